// tb_ff_count_unit: self-checking test of the rank's Count TCAMs, TCAM mask and
// multi-operand adder.
//
// Phase 1 programs every Count TCAM with the number of ones of its 2-bit key (the
// normal edit count) and phase 2 with an arbitrary table of counts 0..7 per key, to
// show the count comes from the TCAM contents and not from fixed logic. In both
// phases random segment vectors and bank-group activity masks are applied every
// cycle, and the output one clock edge later (the unit's one-cycle latency) is
// compared with the sum of the table entries of the active bank groups. Cycles with
// in_valid low must give out_valid low.
module tb_ff_count_unit;
  import ff_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic prog_en, in_valid, out_valid;
  prog_t prog;
  logic [N_BG*SEGS_PER_WORD-1:0] in_vec;
  logic [N_BG-1:0] in_act;
  logic [CNT_W-1:0] out_edits;

  ff_count_unit dut (.clk, .rst_n, .prog_en, .prog, .in_valid, .in_vec, .in_act,
                     .out_valid, .out_edits);

  int tbl [4];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic program_table();
    for (int i = 0; i < 16; i++) begin
      @(negedge clk);
      prog_en = 1; prog = '0; prog.tgt = PT_CNT; prog.idx = 4'(i);
      prog.valid = (i < 4); prog.key = 16'(i); prog.care = 16'h000f;
      prog.data = (i < 4) ? 4'(tbl[i]) : 4'd0;
    end
    // a write to another TCAM type must not disturb the Count TCAMs
    @(negedge clk); prog.tgt = PT_OS; prog.idx = 4'd0; prog.data = 4'd7;
    @(negedge clk); prog_en = 0;
  endtask

  task automatic run(int n);
    int expv;
    bit expo;
    for (int k = 0; k < n; k++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      in_vec   = (N_BG*SEGS_PER_WORD)'($urandom);
      in_act   = N_BG'($urandom);
      expo = in_valid;
      expv = 0;
      for (int g = 0; g < N_BG; g++)
        if (in_act[g]) expv += tbl[in_vec[2*g +: 2]];
      @(negedge clk);                       // one edge later
      checks++;
      if (out_valid !== expo || (expo && out_edits != CNT_W'(expv))) begin
        failures++;
        $display("vec %b act %b: valid %b edits %0d, expected %b %0d", in_vec, in_act,
                 out_valid, out_edits, expo, expv);
      end
      in_valid = 0;
    end
  endtask

  initial begin
    prog_en = 0; prog = '0; in_valid = 0; in_vec = '0; in_act = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    tbl = '{0, 1, 1, 2};
    program_table();
    run(300);
    foreach (tbl[i]) tbl[i] = $urandom_range(0, 7);
    program_table();
    run(300);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
