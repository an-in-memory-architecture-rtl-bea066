// tb_ff_bank: self-checking test of one bank: its input buffer, round-robin result arbiter and two
// sub-arrays.
//
// The TCAMs of every sub-array are programmed through the shared bus (PD entry j =
// "segment j all matching", OS = inverse of those match lines). Reference rows are
// written to every sub-array, tile group, column position and row; compares then use
// reads made from a stored row with random substitutions, random runs of shift rows
// and random base masks. Each compare carries a distinct tag (ID LSBs and shift
// value), so results that come back out of order are matched by tag against the
// expected segment vector from a model of the stored rows.
// Phase 1 checks the latency of a lone compare: res_req rises 7 + WR + n*(3 + RD)
// cycles after the cycle the command is driven (the sub-array's 5 + WR + n*(3 + RD)
// plus one input buffer and one output buffer per level). Phase 2 sends commands
// back to back with a slow random acknowledge, so FIFOs fill, the input handshake
// stalls, results from several sub-arrays compete for the output (ev_arb) and come
// back out of order; each of these must be seen.
module tb_ff_bank;
  import ff_pkg::*;
  localparam int WR = 2, RD = 1, NB = 1, NS = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int n_stall = 0, n_full = 0, n_arb = 0, n_ooo = 0, n_wait = 0;

  logic cmd_valid, cmd_ready, prog_en, res_req, res_ack, ev_full, ev_arb;
  sa_cmd_t cmd; prog_t prog; sa_res_t res;

  ff_bank dut (.clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .prog_en, .prog,
              .res_req, .res_ack, .res, .ev_full, .ev_arb);

  logic [31:0] mem [NB][NS][2][2][16];   // [bank][sub][tgrp][colsel][row]
  logic [1:0]  expv [int];                // expected edits by tag
  int          order [$];                 // tags in issue order
  int          tagc = 0;

  initial begin
    repeat (200000) @(posedge clk);
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

  // a compare to bank b (b < 0: random), sub-array s (s < 0: random); records the
  // expected result under a fresh tag
  function automatic sa_cmd_t make_cmp(int b, int s);
    sa_cmd_t x = '0;
    int g = $urandom_range(0, 1), c = $urandom_range(0, 1);
    int n = $urandom_range(1, 6), r0 = $urandom_range(1, 16 - n);
    int t = tagc;
    logic [31:0] rd;
    logic [1:0] acc = 2'b11;
    if (b < 0) b = $urandom_range(0, NB - 1);
    if (s < 0) s = $urandom_range(0, NS - 1);
    rd = mem[b][s][g][c][r0 + $urandom_range(0, n - 1)];
    for (int k = 0; k < $urandom_range(0, 3); k++) begin
      int p = $urandom_range(0, 15);
      rd[2*p +: 2] = rd[2*p +: 2] + 2'($urandom_range(1, 3));
    end
    x.op = OP_COMPARE; x.addr.bank = 4'(b); x.addr.sub = 4'(s);
    x.addr.tgrp = 2'(g); x.addr.colsel = 2'(c); x.addr.row = 4'(r0);
    x.addr.nshift = 5'(n);
    x.addr.mask = ($urandom_range(0, 1) == 0) ? 16'hffff : 16'($urandom);
    x.data = rd;
    tagc = (tagc + 1) % 64;
    x.tag.id_lsb = 2'(t); x.tag.shv = 4'(t >> 2);
    for (int r = r0; r < r0 + n; r++) acc &= seg_mism(rd, mem[b][s][g][c][r], x.addr.mask);
    expv[t] = acc;
    order.push_back(t);
    return x;
  endfunction

  // result checker
  always @(posedge clk) if (rst_n && res_req && res_ack) begin
    int t;
    t = int'({res.tag.shv, res.tag.id_lsb});
    checks++;
    if (!expv.exists(t)) begin failures++; $display("unexpected result tag %0d", t); end
    else begin
      if (res.edits !== expv[t]) begin
        failures++;
        $display("tag %0d edits %b, expected %b", t, res.edits, expv[t]);
      end
      expv.delete(t);
      if (order[0] != t) n_ooo++;
      foreach (order[i]) if (order[i] == t) begin order.delete(i); break; end
    end
  end
  always @(posedge clk) if (rst_n) begin
    if (cmd_valid && !cmd_ready) n_stall++;
    if (ev_full) n_full++;
    if (ev_arb) n_arb++;
    if (res_req && !res_ack) n_wait++;
  end

  initial begin
    cmd_valid = 0; cmd = '0; prog_en = 0; prog = '0; res_ack = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    program_tcams();
    for (int b = 0; b < NB; b++) for (int s = 0; s < NS; s++)
      for (int g = 0; g < 2; g++) for (int c = 0; c < 2; c++) for (int r = 1; r < 16; r++) begin
        automatic sa_cmd_t w = '0;
        w.op = OP_WRITE_REF; w.addr.bank = 4'(b); w.addr.sub = 4'(s);
        w.addr.tgrp = 2'(g); w.addr.colsel = 2'(c); w.addr.row = 4'(r);
        w.data = $urandom;
        mem[b][s][g][c][r] = w.data;
        @(negedge clk); send(w);
      end
    repeat (100) @(negedge clk);
    // phase 1: lone compares, latency
    res_ack = 1;
    for (int k = 0; k < 40; k++) begin
      automatic sa_cmd_t x = make_cmp(-1, -1);
      int lat;
      @(negedge clk);
      cmd = x; cmd_valid = 1;
      @(negedge clk); cmd_valid = 0; lat = 1;
      while (!res_req) begin @(negedge clk); lat++; end
      checks++;
      if (lat != 7 + WR + int'(x.addr.nshift) * (3 + RD)) begin
        failures++; $display("latency %0d for %0d shifts", lat, x.addr.nshift);
      end
      @(negedge clk);
    end
    // phase 2: back to back, slow acknowledge; a share of commands aimed at one
    // sub-array to fill its FIFO
    fork
      begin
        for (int k = 0; k < 300; k++) begin
          automatic sa_cmd_t x = (k % 40 < 10) ? make_cmp(0, 0) : make_cmp(-1, -1);
          @(negedge clk); send(x);
        end
      end
      begin
        repeat (5000) begin @(negedge clk); res_ack = ($urandom_range(0, 3) == 0); end
        res_ack = 1;
      end
    join
    wait (expv.size() == 0);
    repeat (5) @(negedge clk);
    checks++;
    $display("input stalls %0d, FIFO full %0d, arbitration %0d, out of order %0d, result waits %0d",
             n_stall, n_full, n_arb, n_ooo, n_wait);
    if (n_stall == 0 || n_full == 0 || n_arb == 0 || n_ooo == 0 || n_wait == 0) begin
      failures++; $display("a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
