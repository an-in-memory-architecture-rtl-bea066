// tb_ff_subarray: self-checking test of one sub-array running the segment filter.
//
// The PD TCAM is programmed so that entry j matches "the 8 bases of segment j are
// all matches", the OS TCAM so that it returns the inverse of those two match lines.
// Reference rows are written to random tile groups, column positions and rows;
// compares then use reads made from a stored row (with random base substitutions),
// a random run of shift rows and random base masks. The expected segment vector is
// worked out from a model of the stored rows: a segment is an edit unless some
// compared row agrees with the read on every unmasked base of that segment.
// Phase 1 checks the latency of single compares: res_req rises 4 + WR + n*(3 + RD)
// clock edges after the edge that takes the command (one more counted from the
// cycle the command is driven). Phase 2 queues commands back to back with a
// slow acknowledge, so the FIFO fills (cmd_ready low) and results wait for ack.
module tb_ff_subarray;
  import ff_pkg::*;
  localparam int WR = 2, RD = 1;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int full_seen = 0, wait_seen = 0;

  logic cmd_valid, cmd_ready, prog_en, res_req, res_ack;
  sa_cmd_t cmd; prog_t prog; sa_res_t res;

  ff_subarray #(.WR_CYCLES(WR), .RD_CYCLES(RD)) dut (.clk, .rst_n, .cmd_valid, .cmd_ready,
    .cmd, .prog_en, .prog, .res_req, .res_ack, .res);

  logic [31:0] mem [2][2][16];   // [tgrp][colsel][row]
  sa_res_t expq [$];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [1:0] seg_mism(logic [31:0] a, logic [31:0] b, logic [15:0] m);
    logic [1:0] s = 0;
    for (int i = 0; i < 16; i++)
      if (m[i] && a[2*i +: 2] != b[2*i +: 2]) s[i / 8] = 1;
    return s;
  endfunction

  task automatic program_tcams();
    for (int j = 0; j < 4; j++) begin
      @(negedge clk);
      prog_en = 1; prog = '0; prog.tgt = PT_PD; prog.idx = 4'(j); prog.valid = (j < 2);
      prog.care = (j == 0) ? 16'h00ff : 16'hff00;
    end
    for (int i = 0; i < 16; i++) begin
      @(negedge clk);
      prog = '0; prog.tgt = PT_OS; prog.idx = 4'(i); prog.valid = (i < 4);
      prog.key = 16'(i); prog.care = 16'h0003; prog.data = 4'(~i & 3);
    end
    @(negedge clk); prog_en = 0;
  endtask

  task automatic send(sa_cmd_t c);
    cmd = c; cmd_valid = 1;
    do @(posedge clk); while (!cmd_ready);
    #1 cmd_valid = 0;
  endtask

  function automatic sa_cmd_t make_write(int g, int c, int r, logic [31:0] d);
    sa_cmd_t x = '0;
    x.op = OP_WRITE_REF; x.addr.tgrp = 2'(g); x.addr.colsel = 2'(c); x.addr.row = 4'(r);
    x.data = d;
    return x;
  endfunction

  // builds a compare and its expected result
  sa_res_t last_exp;
  function automatic sa_cmd_t make_cmp();
    sa_res_t e;
    sa_cmd_t x = '0;
    int g = $urandom_range(0, 1), c = $urandom_range(0, 1);
    int n = $urandom_range(1, 6), r0 = $urandom_range(1, 16 - n);
    logic [31:0] rd = mem[g][c][r0 + $urandom_range(0, n - 1)];
    logic [1:0] acc = 2'b11;
    int subs = $urandom_range(0, 3);
    for (int k = 0; k < subs; k++) begin
      int b = $urandom_range(0, 15);
      rd[2*b +: 2] = rd[2*b +: 2] + 2'($urandom_range(1, 3));
    end
    if ($urandom_range(0, 3) == 0) rd = $urandom;
    x.op = OP_COMPARE; x.addr.tgrp = 2'(g); x.addr.colsel = 2'(c); x.addr.row = 4'(r0);
    x.addr.nshift = 5'(n);
    case ($urandom_range(0, 2))
      0: x.addr.mask = 16'hffff;
      1: x.addr.mask = 16'hffff << $urandom_range(1, 15);
      default: x.addr.mask = 16'hffff >> $urandom_range(1, 15);
    endcase
    x.data = rd;
    x.tag.id_lsb = 2'($urandom); x.tag.shv = 4'($urandom);
    mem[g][c][0] = rd;
    for (int r = r0; r < r0 + n; r++) acc &= seg_mism(rd, mem[g][c][r], x.addr.mask);
    e.tag = x.tag; e.edits = acc;
    last_exp = e;
    return x;
  endfunction

  // result checker
  always @(posedge clk) if (rst_n && res_req && res_ack) begin
    checks++;
    if (expq.size() == 0) begin failures++; $display("unexpected result"); end
    else begin
      sa_res_t e;
      e = expq.pop_front();
      if (res !== e) begin
        failures++;
        $display("result tag %h edits %b, expected tag %h edits %b", res.tag, res.edits,
                 e.tag, e.edits);
      end
    end
  end
  always @(posedge clk) if (rst_n) begin
    if (cmd_valid && !cmd_ready) full_seen++;
    if (res_req && !res_ack) wait_seen++;
  end

  initial begin
    cmd_valid = 0; cmd = '0; prog_en = 0; prog = '0; res_ack = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    program_tcams();
    // reference rows
    for (int g = 0; g < 2; g++) for (int c = 0; c < 2; c++) for (int r = 1; r < 16; r++) begin
      automatic logic [31:0] d = $urandom;
      if (r > 1 && $urandom_range(0, 1)) d = {mem[g][c][r-1][29:0], 2'($urandom)}; // shifted copy
      mem[g][c][r] = d;
      @(negedge clk); send(make_write(g, c, r, d));
    end
    repeat (100) @(negedge clk);
    // phase 1: single compares, latency
    res_ack = 1;
    for (int k = 0; k < 60; k++) begin
      sa_res_t e; sa_cmd_t x; int lat;
      x = make_cmp();
      expq.push_back(last_exp);
      @(negedge clk);
      cmd = x; cmd_valid = 1;
      @(negedge clk); cmd_valid = 0; lat = 1;
      while (!res_req) begin @(negedge clk); lat++; end
      checks++;
      if (lat != 5 + WR + int'(x.addr.nshift) * (3 + RD)) begin
        failures++; $display("latency %0d for %0d shifts", lat, x.addr.nshift);
      end
      @(negedge clk);
    end
    // phase 2: back-to-back with slow acknowledge
    fork
      begin
        for (int k = 0; k < 200; k++) begin
          sa_res_t e; sa_cmd_t x;
          x = make_cmp();
          expq.push_back(last_exp);
          @(negedge clk); send(x);
        end
      end
      begin
        repeat (6000) begin @(negedge clk); res_ack = ($urandom_range(0, 7) == 0); end
        res_ack = 1;
      end
    join
    wait (expq.size() == 0);
    repeat (5) @(negedge clk);
    checks++;
    if (full_seen == 0 || wait_seen == 0) begin
      failures++; $display("stall not exercised: full %0d wait %0d", full_seen, wait_seen);
    end
    $display("FIFO-full stalls %0d, result waits %0d", full_seen, wait_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
