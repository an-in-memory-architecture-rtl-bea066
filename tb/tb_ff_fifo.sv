// tb_ff_fifo: self-checking test of the FIFO. Random pushes and pops against a
// queue model: checks data order, that in_ready falls exactly when DEPTH words are
// stored, that out_valid is low when empty, and that a word pushed at one edge
// is readable after that edge.
module tb_ff_fifo;
  localparam int W = 16, D = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic iv, ir, ov, ordy;
  logic [W-1:0] id, od;
  logic [W-1:0] q [$];

  ff_fifo #(.W(W), .DEPTH(D)) dut (.clk, .rst_n, .in_valid(iv), .in_ready(ir), .in_data(id),
    .out_valid(ov), .out_ready(ordy), .out_data(od));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    iv = 0; ordy = 0; id = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      // bursty traffic so the FIFO fills and drains
      iv   = (n % 200 < 100) ? ($urandom_range(0, 3) != 0) : ($urandom_range(0, 3) == 0);
      ordy = (n % 200 < 100) ? ($urandom_range(0, 3) == 0) : ($urandom_range(0, 3) != 0);
      id   = W'($urandom);
      #1;
      checks++;
      if (ir !== (q.size() < D) || ov !== (q.size() > 0)) begin
        failures++; $display("flags: size %0d ready %b valid %b", q.size(), ir, ov);
      end
      if (ov && ordy) begin
        checks++;
        if (od !== q[0]) begin failures++; $display("data %h exp %h", od, q[0]); end
      end
      @(posedge clk);
      if (ov && ordy) void'(q.pop_front());
      if (iv && ir) q.push_back(id);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
