// tb_ff_tcam: self-checking test of the TCAM at its default (Count TCAM) size and
// at the Pattern-Detect size (16-bit key). Programs random entries (valid bit,
// value, care mask, result word), searches with random keys and compares the match
// lines, hit, first-match index and result word with a model in the testbench.
// Ends with the Count TCAM programmed as a population-count table and checks all 16
// keys.
module tb_ff_tcam;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // Count TCAM size (module defaults)
  logic       pe; logic [3:0] pidx; logic pv; logic [3:0] pk, pc; logic [2:0] pd;
  logic [3:0] key; logic [15:0] match; logic hit; logic [3:0] hidx; logic [2:0] hdata;
  ff_tcam dut (.clk, .rst_n, .prog_en(pe), .prog_idx(pidx), .prog_valid(pv),
    .prog_key(pk), .prog_care(pc), .prog_data(pd), .key, .match, .hit,
    .hit_idx(hidx), .hit_data(hdata));

  // Pattern-Detect size
  logic       pe2; logic [1:0] pidx2; logic pv2; logic [15:0] pk2, pc2; logic [0:0] pd2;
  logic [15:0] key2; logic [3:0] match2; logic hit2; logic [1:0] hidx2; logic [0:0] hd2;
  ff_tcam #(.KEY_W(16), .ENTRIES(4), .DATA_W(1)) dut2 (.clk, .rst_n, .prog_en(pe2),
    .prog_idx(pidx2), .prog_valid(pv2), .prog_key(pk2), .prog_care(pc2), .prog_data(pd2),
    .key(key2), .match(match2), .hit(hit2), .hit_idx(hidx2), .hit_data(hd2));

  logic        mv [16]; logic [3:0] mk [16], mc [16]; logic [2:0] md [16];
  logic        mv2 [4]; logic [15:0] mk2 [4], mc2 [4];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check1();
    logic [15:0] em = '0; logic eh = 0; logic [3:0] ei = 0; logic [2:0] ed = 0;
    for (int i = 0; i < 16; i++) em[i] = mv[i] && (((key ^ mk[i]) & mc[i]) == 0);
    for (int i = 15; i >= 0; i--) if (em[i]) begin eh = 1; ei = 4'(i); ed = md[i]; end
    checks++;
    if (match !== em || hit !== eh || (eh && (hidx !== ei || hdata !== ed)) || (!eh && hdata !== 0)) begin
      failures++;
      $display("key %h: match %h/%h hit %b/%b idx %0d/%0d data %0d/%0d", key, match, em,
               hit, eh, hidx, ei, hdata, ed);
    end
  endtask

  initial begin
    pe = 0; pidx = 0; pv = 0; pk = 0; pc = 0; pd = 0; key = 0;
    pe2 = 0; pidx2 = 0; pv2 = 0; pk2 = 0; pc2 = 0; pd2 = 0; key2 = 0;
    for (int i = 0; i < 16; i++) mv[i] = 0;
    for (int i = 0; i < 4; i++) mv2[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    key = 4'h5; #1 check1();            // nothing programmed: no hit
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      if ($urandom_range(0, 3) == 0) begin
        pe = 1; pidx = 4'($urandom); pv = ($urandom_range(0, 4) != 0);
        pk = 4'($urandom); pc = 4'($urandom); pd = 3'($urandom);
        @(negedge clk);
        mv[pidx] = pv; mk[pidx] = pk; mc[pidx] = pc; md[pidx] = pd;
        pe = 0;
      end
      key = 4'($urandom);
      #1 check1();
    end
    // population-count table
    for (int i = 0; i < 16; i++) begin
      @(negedge clk);
      pe = 1; pidx = 4'(i); pv = 1; pk = 4'(i); pc = 4'hf; pd = 3'($countones(4'(i)));
    end
    @(negedge clk); pe = 0;
    for (int i = 0; i < 16; i++) begin
      key = 4'(i); #1;
      checks++;
      if (!hit || hdata !== 3'($countones(4'(i)))) begin
        failures++; $display("count %h -> %0d", key, hdata);
      end
    end
    // Pattern-Detect size: entry j matches when 8-bit half j is zero
    for (int j = 0; j < 4; j++) begin
      @(negedge clk);
      pe2 = 1; pidx2 = 2'(j); pv2 = (j < 2); pk2 = 16'h0;
      pc2 = (j == 0) ? 16'h00ff : (j == 1) ? 16'hff00 : 16'h0; pd2 = 1'b1;
      mv2[j] = pv2; mk2[j] = pk2; mc2[j] = pc2;
    end
    @(negedge clk); pe2 = 0;
    for (int n = 0; n < 200; n++) begin
      logic [3:0] em;
      key2 = 16'($urandom);
      if ($urandom_range(0, 1)) key2[7:0] = 0;
      if ($urandom_range(0, 1)) key2[15:8] = 0;
      #1;
      for (int i = 0; i < 4; i++) em[i] = mv2[i] && (((key2 ^ mk2[i]) & mc2[i]) == 0);
      checks++;
      if (match2 !== em || match2[0] !== (key2[7:0] == 0) || match2[1] !== (key2[15:8] == 0)) begin
        failures++; $display("pd key %h match %b exp %b", key2, match2, em);
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
