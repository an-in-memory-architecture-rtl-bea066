// filterfuse_top: the rank - the highest level of the in-memory pre-alignment
// filter and its interface to the host. It holds the rank controller, the
// rank-level logic units (Count TCAMs, TCAM mask, multi-operand adder) and N_BG bank
// groups of banks, sub-arrays and tiles.
//
// Host side. The host sends one 32-bit word per handshake (in_valid/in_ready) with
// its instruction, address (bank, sub-array, tile group, column index, row, number
// of shift rows, base mask), pairing ID, shift value and the pairing's settings
// (word-sets N, shift sets per word-set, edit threshold E). Words are gathered in
// the rank input buffer; once it holds a word-set (WPB = 4 words) the rank empties
// it in parallel, word k to bank group k, skipping words marked inactive. While a
// word-set is being handed down, in_ready is low.
//
// Pairing bookkeeping. The low LSB_W bits of the ID travel down with the data as
// the tag; the high bits stay in the ID MSB buffer, indexed by the low bits, and are
// joined again when the pairing ends. Per in-flight pairing (slot) the rank keeps an
// AND buffer, the number of shift sets sent and results expected and received, the
// word-set count and the sum buffer. Each returning bank-group result is moved down
// by its shift value (in segments) and ANDed into the slot's AND buffer, so a
// segment stays marked as an edit only if no shift set matched it. When every shift
// set of the word-set has returned, the AND buffer goes through the Count TCAMs,
// TCAM mask and adder, and the count is added to the sum buffer. After the last
// word-set, out_valid pulses for one cycle with out_id, out_edits and out_accept =
// (edits <= E), which is Accept = (Matches >= N_segment - E).
//
// Stalls. A compare word-set is held in the input buffer (in_ready low) while its
// slot belongs to another pairing, or while all shift sets of the slot's current
// word-set are already out and not all results are back. Bank groups and sub-array
// FIFOs stall the rank through their ready signals.
//
// From the paper: the rank's tasks, input buffer of a word-set, words spread over
// bank groups, masks through the address bus, ID LSB/MSB split, AND buffer over
// shift sets with shift value, Count TCAMs, TCAM mask, adder, sum buffer, word-set
// count, ready and accept outputs. This design's choices: the host word format,
// the slot rules above, one word-set in flight per pairing, shift value in whole
// segments, that the host programs all TCAMs through one broadcast bus, and the
// three event outputs (ev_*) for performance counting.
module filterfuse_top
  import ff_pkg::*;
#(
  parameter int unsigned N_BANK     = 2,
  parameter int unsigned N_SUB      = 2,
  parameter int unsigned N_TILES    = 8,
  parameter int unsigned FIFO_DEPTH = 4,
  parameter int unsigned WR_CYCLES  = 2,
  parameter int unsigned RD_CYCLES  = 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // host words
  input  logic              in_valid,
  output logic              in_ready,
  input  host_word_t        in_word,
  // TCAM programming
  input  logic              prog_en,
  input  prog_t             prog,
  // results
  output logic              out_valid,
  output logic [ID_W-1:0]   out_id,
  output logic              out_accept,
  output logic [CNT_W-1:0]  out_edits,
  // events of this cycle, for performance counters
  output logic              ev_fifo_full,   // a sub-array FIFO refused a command
  output logic              ev_arb,         // results competed at a bank or bank group
  output logic              ev_slot_wait    // word-set held: its pairing slot is busy
);
  localparam int unsigned S = SEGS_PER_WORD;

  // ---------------- rank input buffer ----------------
  host_word_t            wb [WPB];
  logic [$clog2(WPB):0]  wcnt;
  logic [N_BG-1:0]       pend;       // words of the word-set not yet taken below
  logic                  booked;     // slot bookkeeping done for this word-set
  logic                  full;

  assign full     = (wcnt == ($clog2(WPB)+1)'(WPB));
  assign in_ready = !full;

  // ---------------- bank groups ----------------
  logic [N_BG-1:0] bg_valid, bg_ready, bg_req, bg_ack, bg_ev_full, bg_ev_arb;
  sa_cmd_t         bg_cmd [N_BG];
  sa_res_t         bg_res [N_BG];

  for (genvar g = 0; g < N_BG; g++) begin : g_bg
    ff_bankgroup #(.N_BANK(N_BANK), .N_SUB(N_SUB), .N_TILES(N_TILES),
                   .FIFO_DEPTH(FIFO_DEPTH), .WR_CYCLES(WR_CYCLES),
                   .RD_CYCLES(RD_CYCLES)) u_bg (
      .clk, .rst_n,
      .cmd_valid(bg_valid[g]), .cmd_ready(bg_ready[g]), .cmd(bg_cmd[g]),
      .prog_en, .prog,
      .res_req(bg_req[g]), .res_ack(bg_ack[g]), .res(bg_res[g]),
      .ev_full(bg_ev_full[g]), .ev_arb(bg_ev_arb[g])
    );
    assign bg_cmd[g] = '{op:   wb[g].op,
                         addr: wb[g].addr,
                         data: wb[g].data,
                         tag:  '{id_lsb: wb[g].id[LSB_W-1:0], shv: wb[g].shv}};
    assign bg_valid[g] = full && booked && pend[g];
  end
  assign bg_ack = bg_req;     // the rank takes every bank-group result at once
  assign ev_fifo_full = |bg_ev_full;
  assign ev_arb       = |bg_ev_arb;

  // ---------------- per-slot state ----------------
  logic [N_SLOT-1:0]       s_busy, s_cnting;
  logic [ID_W-LSB_W-1:0]   s_msb   [N_SLOT];   // ID MSB buffer
  logic [WS_SEGS-1:0]      s_and   [N_SLOT];   // AND buffer
  logic [N_BG-1:0]         s_act   [N_SLOT];   // TCAM mask of the word-set
  logic [7:0]              s_nss   [N_SLOT];
  logic [7:0]              s_disp  [N_SLOT];   // shift sets sent
  logic [7:0]              s_exp   [N_SLOT];   // results expected
  logic [7:0]              s_rcv   [N_SLOT];   // results received
  logic [CNT_W-1:0]        s_nws   [N_SLOT];
  logic [CNT_W-1:0]        s_wsdone[N_SLOT];   // word-set count
  logic [CNT_W-1:0]        s_sum   [N_SLOT];   // sum buffer
  logic [CNT_W-1:0]        s_e     [N_SLOT];

  // results of this cycle folded into the AND buffers
  logic [WS_SEGS-1:0] and_nx [N_SLOT];
  logic [7:0]         rcv_nx [N_SLOT];
  always_comb begin
    for (int s = 0; s < N_SLOT; s++) begin
      and_nx[s] = s_and[s];
      rcv_nx[s] = s_rcv[s];
    end
    for (int g = 0; g < N_BG; g++)
      if (bg_req[g]) begin
        automatic int sl = int'(bg_res[g].tag.id_lsb);
        rcv_nx[sl] = rcv_nx[sl] + 8'd1;
        for (int j = 0; j < S; j++) begin
          automatic int p = g * S + j - int'(bg_res[g].tag.shv);
          if (p >= 0) and_nx[sl][p] = and_nx[sl][p] & bg_res[g].edits[j];
        end
      end
  end

  // ---------------- dispatch decision ----------------
  logic [LSB_W-1:0]      d_slot;
  logic [ID_W-LSB_W-1:0] d_msb;
  logic                  d_cmp, d_ok;
  logic [N_BG-1:0]       d_act;
  logic [7:0]            d_nact;
  always_comb begin
    d_slot = wb[0].id[LSB_W-1:0];
    d_msb  = wb[0].id[ID_W-1:LSB_W];
    d_cmp  = (wb[0].op == OP_COMPARE);
    for (int g = 0; g < N_BG; g++) d_act[g] = wb[g].active;
    d_nact = '0;
    for (int g = 0; g < N_BG; g++) d_nact = d_nact + 8'(d_act[g]);
    if (!d_cmp)              d_ok = 1'b1;
    else if (!s_busy[d_slot]) d_ok = 1'b1;
    else d_ok = (s_msb[d_slot] == d_msb) && !s_cnting[d_slot] &&
                (s_disp[d_slot] < s_nss[d_slot]);
  end

  assign ev_slot_wait = full && !booked && !d_ok;

  // ---------------- count launch ----------------
  logic             c_go;
  logic [LSB_W-1:0] c_slot, c_slot_q;
  logic             c_done;
  logic [CNT_W-1:0] c_edits;
  always_comb begin
    c_go   = 1'b0;
    c_slot = '0;
    for (int s = N_SLOT - 1; s >= 0; s--)
      if (s_busy[s] && !s_cnting[s] && s_disp[s] == s_nss[s] && s_rcv[s] == s_exp[s]) begin
        c_go   = 1'b1;
        c_slot = LSB_W'(s);
      end
  end

  ff_count_unit #(.NBG(N_BG)) u_cnt (
    .clk, .rst_n, .prog_en, .prog,
    .in_valid (c_go),
    .in_vec   (s_and[c_slot]),
    .in_act   (s_act[c_slot]),
    .out_valid(c_done),
    .out_edits(c_edits)
  );

  // ---------------- rank controller ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wcnt       <= '0;
      pend       <= '0;
      booked     <= 1'b0;
      s_busy     <= '0;
      s_cnting   <= '0;
      c_slot_q   <= '0;
      out_valid  <= 1'b0;
      out_id     <= '0;
      out_accept <= 1'b0;
      out_edits  <= '0;
      for (int s = 0; s < N_SLOT; s++) begin
        s_msb[s] <= '0; s_and[s] <= '1; s_act[s] <= '0; s_nss[s] <= '0;
        s_disp[s] <= '0; s_exp[s] <= '0; s_rcv[s] <= '0; s_nws[s] <= '0;
        s_wsdone[s] <= '0; s_sum[s] <= '0; s_e[s] <= '0;
      end
      for (int k = 0; k < WPB; k++) wb[k] <= '0;
    end else begin
      out_valid <= 1'b0;

      // input buffer fill
      if (in_valid && in_ready) begin
        wb[wcnt[$clog2(WPB)-1:0]] <= in_word;
        wcnt <= wcnt + 1'b1;
      end

      // results
      for (int s = 0; s < N_SLOT; s++) begin
        s_and[s] <= and_nx[s];
        s_rcv[s] <= rcv_nx[s];
      end

      // word-set dispatch
      if (full && !booked && d_ok) begin
        booked <= 1'b1;
        pend   <= d_act;
        if (d_cmp) begin
          if (!s_busy[d_slot]) begin
            s_busy[d_slot]   <= 1'b1;
            s_msb[d_slot]    <= d_msb;
            s_nss[d_slot]    <= wb[0].n_ss;
            s_nws[d_slot]    <= wb[0].n_ws;
            s_e[d_slot]      <= wb[0].e_thr;
            s_sum[d_slot]    <= '0;
            s_wsdone[d_slot] <= '0;
          end
          s_act[d_slot]  <= d_act;
          s_disp[d_slot] <= s_disp[d_slot] + 8'd1;
          s_exp[d_slot]  <= s_exp[d_slot] + d_nact;
        end
      end
      if (full && booked) begin
        pend <= pend & ~bg_ready;
        if ((pend & ~bg_ready) == '0) begin
          wcnt   <= '0;
          booked <= 1'b0;
        end
      end

      // count launch and completion
      if (c_go) begin
        s_cnting[c_slot] <= 1'b1;
        c_slot_q         <= c_slot;
      end
      if (c_done) begin
        automatic logic [CNT_W-1:0] tot = s_sum[c_slot_q] + c_edits;
        s_cnting[c_slot_q] <= 1'b0;
        s_and[c_slot_q]    <= '1;
        s_rcv[c_slot_q]    <= '0;
        s_exp[c_slot_q]    <= '0;
        s_disp[c_slot_q]   <= '0;
        s_sum[c_slot_q]    <= tot;
        s_wsdone[c_slot_q] <= s_wsdone[c_slot_q] + 1'b1;
        if (s_wsdone[c_slot_q] + 1'b1 == s_nws[c_slot_q]) begin
          s_busy[c_slot_q] <= 1'b0;
          out_valid  <= 1'b1;
          out_id     <= {s_msb[c_slot_q], c_slot_q};
          out_edits  <= tot;
          out_accept <= (tot <= s_e[c_slot_q]);
        end
      end
    end
  end

  // a compare word-set always names the same pairing in all its words
  assert property (@(posedge clk) disable iff (!rst_n)
                   full && !booked && d_cmp |-> wb[1].id == wb[0].id);
endmodule
