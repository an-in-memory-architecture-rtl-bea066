// tb_filterfuse_top: end-to-end test of the whole filter at its default size (no
// parameter overrides), playing the host.
//
// The host programs the PD, OS and Count TCAMs, lays a random reference out in the
// crossbars (word-set W at bank W%2, sub-array (W/2)%2, tile group (W/4)%2, column
// position (W/8)%2, row group W/16; inside a row group, row 1+d+2 holds the
// reference moved by d = -2..+2 bases) and then sends pairings: a read copied from
// the reference at a random position with random substitutions, insertions or
// deletions, an edit threshold and one of three shift-set plans:
//   A  one shift set, shifts -2..+2;
//   B  two shift sets, shifts -2..0 and +1..+2 (AND buffer across shift sets);
//   C  two shift sets, the second with the read moved by one segment (shift value
//      1), i.e. shifts of 6..10 bases.
// The expected edit count and accept bit are worked out base by base from the
// reference and read strings: a segment (8 reference-aligned bases) counts as an
// edit unless some compared shift makes all of its unmasked bases equal; counts of
// words not taking part are masked. Every result is checked, and every mechanism
// (host stall, sub-array FIFO back-pressure, slot wait, result arbitration,
// multi-shift-set AND, shift-value realignment, TCAM mask, accept and reject,
// results returned out of order) is counted and must occur at least once. Stall and
// arbitration events come from the design's ev_* outputs.
module tb_filterfuse_top;
  import ff_pkg::*;
  localparam int E = 2;                 // shifts stored per row group
  localparam int NWS = 40;              // word-sets of reference in use
  localparam int REF_BP = NWS * 64;
  localparam int NPAIR = 60;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_ready, prog_en, out_valid, out_accept;
  host_word_t in_word;
  prog_t prog;
  logic [ID_W-1:0] out_id;
  logic [CNT_W-1:0] out_edits;
  logic ev_fifo_full, ev_arb, ev_slot_wait;

  filterfuse_top dut (.clk, .rst_n, .in_valid, .in_ready, .in_word, .prog_en, .prog,
                      .out_valid, .out_id, .out_accept, .out_edits,
                      .ev_fifo_full, .ev_arb, .ev_slot_wait);

  logic [1:0] refg [REF_BP + 64];
  int         readal [REF_BP + 64];    // read base at each reference position, -1 = none
  int         exp_edits [int];
  bit         exp_acc [int];
  int         outstanding = 0;

  // mechanism counters
  int n_host_stall = 0, n_fifo_bp = 0, n_slot_wait = 0, n_arb = 0;
  int n_ooo = 0;                       // results that overtook an older pairing
  int issue_q [$];                      // ids in the order their pairings were sent
  int n_multi_ss = 0, n_shv = 0, n_tmask = 0, n_acc = 0, n_rej = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired, %0d results outstanding", outstanding);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- host helpers ----------------
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
  endfunction

  function automatic int rowbase(int w);
    return 1 + (w / 16) * (2 * E + 1);
  endfunction

  // ---------------- expected result of one word-set ----------------
  // shift set k: shift value s[k] (segments), shifts d0[k]..d1[k]
  function automatic int ws_edits(int w, int nss, int s [2], int d0 [2], int d1 [2],
                                  logic [3:0] act);
    logic [7:0] andb = '1;
    int tot = 0;
    for (int k = 0; k < nss; k++)
      for (int g = 0; g < 4; g++) if (act[g])
        for (int j = 0; j < 2; j++) begin
          int q = g * 2 + j;             // query segment
          bit res = 1;
          for (int d = d0[k]; d <= d1[k]; d++) begin
            bit mism = 0;
            for (int b = 0; b < 8; b++) begin
              int P = w * 64 + q * 8 + b;
              int rp = P - 8 * s[k];
              if (rp >= 0 && readal[rp] >= 0 && P + d >= 0)
                if (2'(readal[rp]) != refg[P + d]) mism = 1;
            end
            res &= mism;
          end
          if (q - s[k] >= 0) andb[q - s[k]] &= res;
        end
    for (int g = 0; g < 4; g++) if (act[g]) tot += int'(andb[2*g]) + int'(andb[2*g+1]);
    return tot;
  endfunction

  // ---------------- one pairing ----------------
  // pos_in < 0: random place and length; otherwise a 48-base read at pos_in
  task automatic pairing(int id, int plan, int pos_in = -1);
    int L = (pos_in < 0) ? $urandom_range(40, 300) : 48;
    int pos = (pos_in < 0) ? $urandom_range(8, REF_BP - L - 16) : pos_in;
    int nws, w0, w1, nss, ethr, tot = 0;
    int s [2], d0 [2], d1 [2];
    int rd [$];
    // build the read from the reference with random edits
    for (int i = 0; i < L; i++) begin
      int r = $urandom_range(0, 199);
      if (r == 0) continue;                                   // deletion
      if (r == 1) rd.push_back($urandom_range(0, 3));        // insertion
      if (r < 6) rd.push_back(int'(refg[pos + i] + 2'($urandom_range(1, 3)))); // substitution
      else rd.push_back(int'(refg[pos + i]));
    end
    if ($urandom_range(0, 5) == 0 && pos_in < 0)              // unrelated read
      foreach (rd[i]) rd[i] = $urandom_range(0, 3);
    L = rd.size();
    for (int p = 0; p < REF_BP + 64; p++) readal[p] = -1;
    for (int i = 0; i < L; i++) readal[pos + i] = rd[i];
    w0 = pos / 64; w1 = (pos + L - 1) / 64; nws = w1 - w0 + 1;
    ethr = $urandom_range(0, 8);
    case (plan)
      0: begin nss = 1; s = '{0, 0}; d0 = '{-2, 0}; d1 = '{2, 0}; end
      1: begin nss = 2; s = '{0, 0}; d0 = '{-2, 1}; d1 = '{0, 2}; end
      3: begin nss = 2; s = '{0, 0}; d0 = '{-2, -2}; d1 = '{2, 2}; end
      4: begin nss = 1; s = '{0, 0}; d0 = '{-2, 0}; d1 = '{int'($urandom_range(0, 4)) - 2, 0}; end
      default: begin nss = 2; s = '{0, 1}; d0 = '{-2, -2}; d1 = '{2, 2}; end
    endcase
    if (nss > 1) n_multi_ss++;
    if (plan == 2) n_shv++;
    for (int w = w0; w <= w1; w++) begin
      logic [3:0] act;
      for (int g = 0; g < 4; g++) begin
        act[g] = 0;
        for (int b = 0; b < 16; b++) if (readal[w*64 + g*16 + b] >= 0) act[g] = 1;
      end
      if (act != 4'hf) n_tmask++;
      tot += ws_edits(w, nss, s, d0, d1, act);
      for (int k = 0; k < nss; k++)
        for (int g = 0; g < 4; g++) begin
          automatic host_word_t h = '0;
          h.op = OP_COMPARE;
          place(w, h);
          h.addr.row    = ROW_W'(rowbase(w) + d0[k] + E);
          h.addr.nshift = NSH_W'(d1[k] - d0[k] + 1);
          for (int b = 0; b < 16; b++) begin
            int P = w * 64 + g * 16 + b;
            int rp = P - 8 * s[k];
            if (rp >= 0 && readal[rp] >= 0) begin
              h.data[2*b +: 2] = 2'(readal[rp]);
              h.addr.mask[b] = 1'b1;
            end else begin
              h.data[2*b +: 2] = 2'($urandom);
              h.addr.mask[b] = 1'b0;
            end
          end
          h.id = ID_W'(id); h.active = act[g]; h.shv = SHV_W'(s[k]);
          h.n_ws = CNT_W'(nws); h.n_ss = 8'(nss); h.e_thr = CNT_W'(ethr);
          @(negedge clk); send(h);
        end
    end
    exp_edits[id] = tot;
    exp_acc[id] = (tot <= ethr);
    issue_q.push_back(id);
    outstanding++;
  endtask

  // ---------------- result checker ----------------
  always @(posedge clk) if (rst_n && out_valid) begin
    int id;
    id = int'(out_id);
    checks++;
    if (!exp_edits.exists(id)) begin
      failures++; $display("result for unknown id %0d", id);
    end else begin
      if (int'(out_edits) != exp_edits[id] || out_accept != exp_acc[id]) begin
        failures++;
        $display("id %0d: edits %0d accept %b, expected %0d %b", id, out_edits, out_accept,
                 exp_edits[id], exp_acc[id]);
      end
      if (out_accept) n_acc++; else n_rej++;
      if (issue_q[0] != id) n_ooo++;
      foreach (issue_q[i]) if (issue_q[i] == id) begin issue_q.delete(i); break; end
      exp_edits.delete(id);
      outstanding--;
    end
  end

  // ---------------- mechanism counters (from the event outputs) ----------------
  always @(posedge clk) if (rst_n) begin
    if (in_valid && !in_ready) n_host_stall++;
    if (ev_slot_wait) n_slot_wait++;
    if (ev_arb) n_arb++;
    if (ev_fifo_full) n_fifo_bp++;
  end

  initial begin
    in_valid = 0; in_word = '0; prog_en = 0; prog = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // TCAMs: PD entry j = segment j all matching; OS = inverse; Count = number of ones
    for (int j = 0; j < 4; j++)
      prog_one(PT_PD, j, j < 2, 16'h0, (j == 0) ? 16'h00ff : 16'hff00, 4'h1);
    for (int i = 0; i < 16; i++)
      prog_one(PT_OS, i, i < 4, 16'(i), 16'h0003, 4'(~i & 3));
    for (int i = 0; i < 16; i++)
      prog_one(PT_CNT, i, 1, 16'(i), 16'h000f, 4'($countones(4'(i))));
    @(negedge clk); prog_en = 0;
    // reference
    foreach (refg[i]) refg[i] = 2'($urandom);
    for (int w = 0; w < NWS; w++)
      for (int d = -E; d <= E; d++)
        for (int g = 0; g < 4; g++) begin
          automatic host_word_t h = '0;
          h.op = OP_WRITE_REF;
          place(w, h);
          h.addr.row = ROW_W'(rowbase(w) + d + E);
          for (int b = 0; b < 16; b++) begin
            automatic int P = w * 64 + g * 16 + b + d;
            h.data[2*b +: 2] = (P >= 0) ? refg[P] : 2'b00;
          end
          h.active = 1'b1;
          @(negedge clk); send(h);
        end
    // pairings one after another; ids n*3+1 and (n+4)*3+1 share ID LSBs, so later
    // pairings wait for a slot held by a pairing with other ID MSBs
    for (int n = 0; n < NPAIR; n++) pairing(n * 3 + 1, n % 3);
    // burst: four pairings with two full shift sets each, all in word-set 0 (bank
    // 0, sub-array 0), so eight long compares queue at one sub-array FIFO
    for (int n = 0; n < 4; n++) pairing(1000 + n, 3, 6);
    // burst: pairings of random length spread over word-sets 8..11 (both banks and
    // both sub-arrays), so results meet at the bank and bank-group outputs
    for (int n = 0; n < 40; n++) pairing(2000 + n, 4, (8 + n % 4) * 64 + 8);
    wait (outstanding == 0);
    repeat (10) @(negedge clk);
    checks++;
    $display("host stalls %0d, FIFO back-pressure %0d, slot waits %0d, arbitration %0d",
             n_host_stall, n_fifo_bp, n_slot_wait, n_arb);
    $display("multi shift sets %0d, shift value %0d, TCAM mask %0d, accept %0d, reject %0d, out of order %0d",
             n_multi_ss, n_shv, n_tmask, n_acc, n_rej, n_ooo);
    if (n_host_stall == 0 || n_fifo_bp == 0 || n_slot_wait == 0 || n_arb == 0 ||
        n_multi_ss == 0 || n_shv == 0 || n_tmask == 0 || n_acc == 0 || n_rej == 0 || n_ooo == 0) begin
      failures++; $display("a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
