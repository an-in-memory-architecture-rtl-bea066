// tb_ont10k_workload: whole-read test at the size of the ONT-10k workload - reads of
// 10,000 bases from Oxford Nanopore-like sequencing, filtered at edit thresholds of
// 2 % and 7 % of the read length (E = 200 and 700), on the design at its default
// size (no parameter overrides).
//
// A 10,240-base random reference is stored once, without shifted copies (word-set
// W at bank W%2, sub-array (W/2)%2, tile group (W/4)%2, column position (W/8)%2,
// row 1 + W/16), which is what the default array can hold for a read this long.
// Reads of 10,000 bases start mid word-set (157 word-sets, the first and last
// partly masked) and carry random substitutions at 1 % and 5 %, plus an unrelated
// random read. With shift 0 only, the expected count is the number of segments
// holding at least one substituted base; it is worked out from the strings and
// compared with the design's count and accept bit for each pairing and threshold.
// The testbench prints the cycles each pairing took from its first word to its
// result, and fails if no pairing was accepted or none rejected.
module tb_ont10k_workload;
  import ff_pkg::*;
  localparam int NWS = 160;
  localparam int REF_BP = NWS * 64;
  localparam int L = 10000;
  localparam int POS = 100;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, n_acc = 0, n_rej = 0;

  logic in_valid, in_ready, prog_en, out_valid, out_accept;
  host_word_t in_word;
  prog_t prog;
  logic [ID_W-1:0] out_id;
  logic [CNT_W-1:0] out_edits;
  logic ev_fifo_full, ev_arb, ev_slot_wait;

  filterfuse_top dut (.clk, .rst_n, .in_valid, .in_ready, .in_word, .prog_en, .prog,
                      .out_valid, .out_id, .out_accept, .out_edits,
                      .ev_fifo_full, .ev_arb, .ev_slot_wait);

  logic [1:0] refg [REF_BP];
  logic [1:0] rd   [L];
  longint     cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(host_word_t w);
    in_word = w; in_valid = 1;
    do @(posedge clk); while (!in_ready);
    #1 in_valid = 0;
  endtask

  task automatic prog_one(prog_tgt_e t, int idx, bit v, logic [15:0] k, logic [15:0] c,
                          logic [3:0] d);
    @(negedge clk);
    prog_en = 1; prog.tgt = t; prog.idx = 4'(idx); prog.valid = v;
    prog.key = k; prog.care = c; prog.data = d;
  endtask

  function automatic void place(int w, ref host_word_t h);
    h.addr.bank   = IDX_W'(w % 2);
    h.addr.sub    = IDX_W'((w / 2) % 2);
    h.addr.tgrp   = TGRP_W'((w / 4) % 2);
    h.addr.colsel = COLS_W'((w / 8) % 2);
    h.addr.row    = ROW_W'(1 + w / 16);
  endfunction

  // one pairing of the read in rd[] at reference position POS; returns after its
  // result has been checked
  task automatic pairing(int id, int ethr);
    int w0 = POS / 64, w1 = (POS + L - 1) / 64;
    int expv = 0;
    longint t0 = cyc;
    for (int s = (POS / 8) * 8; s < POS + L; s += 8) begin
      bit e = 0;
      for (int b = s; b < s + 8; b++)
        if (b >= POS && b < POS + L && rd[b - POS] != refg[b]) e = 1;
      expv += int'(e);
    end
    for (int w = w0; w <= w1; w++)
      for (int g = 0; g < 4; g++) begin
        automatic host_word_t h = '0;
        h.op = OP_COMPARE;
        place(w, h);
        h.addr.nshift = NSH_W'(1);
        for (int b = 0; b < 16; b++) begin
          automatic int P = w * 64 + g * 16 + b;
          if (P >= POS && P < POS + L) begin
            h.data[2*b +: 2] = rd[P - POS];
            h.addr.mask[b] = 1'b1;
          end
        end
        h.id = ID_W'(id); h.active = |h.addr.mask;
        h.n_ws = CNT_W'(w1 - w0 + 1); h.n_ss = 8'd1; h.e_thr = CNT_W'(ethr);
        @(negedge clk); send(h);
      end
    while (!out_valid) @(posedge clk);
    checks++;
    if (out_id != ID_W'(id) || int'(out_edits) != expv || out_accept != (expv <= ethr)) begin
      failures++;
      $display("id %0d: edits %0d accept %b, expected %0d %b", out_id, out_edits,
               out_accept, expv, expv <= ethr);
    end
    if (out_accept) n_acc++; else n_rej++;
    $display("pairing %0d: %0d word-sets, E=%0d, edits %0d, accept %b, %0d cycles", id,
             w1 - w0 + 1, ethr, out_edits, out_accept, cyc - t0);
    @(negedge clk);
  endtask

  task automatic make_read(int pct);
    for (int i = 0; i < L; i++) begin
      rd[i] = refg[POS + i];
      if ($urandom_range(0, 99) < pct) rd[i] = rd[i] + 2'($urandom_range(1, 3));
    end
  endtask

  initial begin
    in_valid = 0; in_word = '0; prog_en = 0; prog = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int j = 0; j < 4; j++)
      prog_one(PT_PD, j, j < 2, 16'h0, (j == 0) ? 16'h00ff : 16'hff00, 4'h1);
    for (int i = 0; i < 16; i++)
      prog_one(PT_OS, i, i < 4, 16'(i), 16'h0003, 4'(~i & 3));
    for (int i = 0; i < 16; i++)
      prog_one(PT_CNT, i, 1, 16'(i), 16'h000f, 4'($countones(4'(i))));
    @(negedge clk); prog_en = 0;
    foreach (refg[i]) refg[i] = 2'($urandom);
    for (int w = 0; w < NWS; w++)
      for (int g = 0; g < 4; g++) begin
        automatic host_word_t h = '0;
        h.op = OP_WRITE_REF;
        place(w, h);
        for (int b = 0; b < 16; b++) h.data[2*b +: 2] = refg[w * 64 + g * 16 + b];
        h.active = 1'b1;
        @(negedge clk); send(h);
      end
    make_read(1);
    pairing(1, L * 2 / 100);
    make_read(5);
    pairing(2, L * 2 / 100);
    pairing(3, L * 7 / 100);
    foreach (rd[i]) rd[i] = 2'($urandom);
    pairing(4, L * 7 / 100);
    checks++;
    if (n_acc == 0 || n_rej == 0) begin
      failures++; $display("accept %0d reject %0d: both must occur", n_acc, n_rej);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
