// ff_bankgroup: a bank group - N_BANK banks behind one input buffer and one output
// arbiter (ff_level_router selecting on addr.bank).
//
// Each bank group receives one word of every word-set from the rank (word k goes
// to bank group k). It acknowledges the word within a cycle, forwards it to the
// bank named in the address, and returns bank results one at a time through a
// round-robin arbiter and output buffer with req/ack. Splitting the hierarchy into
// banks and bank groups keeps bus fan-out small; both levels only buffer, route and
// arbitrate here, since the edit counting is done by the rank. The paper names the
// level and its acknowledge scheme; the bank count per group is this design's
// choice (the paper gives none). ev_full and ev_arb OR the banks' events with
// this level's arbitration conflict (performance counting, this design's addition).
module ff_bankgroup
  import ff_pkg::*;
#(
  parameter int unsigned N_BANK     = 2,
  parameter int unsigned N_SUB      = 2,
  parameter int unsigned N_TILES    = 8,
  parameter int unsigned FIFO_DEPTH = 4,
  parameter int unsigned WR_CYCLES  = 2,
  parameter int unsigned RD_CYCLES  = 1
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    cmd_valid,
  output logic    cmd_ready,
  input  sa_cmd_t cmd,
  input  logic    prog_en,
  input  prog_t   prog,
  output logic    res_req,
  input  logic    res_ack,
  output sa_res_t res,
  // events of this cycle: a sub-array FIFO refusing a command, results competing
  output logic    ev_full,
  output logic    ev_arb
);
  logic [N_BANK-1:0] b_valid, b_ready, b_req, b_ack;
  sa_cmd_t           b_cmd;
  logic [N_BANK-1:0] b_ev_full, b_ev_arb;
  sa_res_t           b_res [N_BANK];
  logic             rt_conflict;

  ff_level_router #(.N(N_BANK), .SEL_BANK(1'b1)) u_rt (
    .clk, .rst_n,
    .in_valid(cmd_valid), .in_ready(cmd_ready), .in_cmd(cmd),
    .out_valid(b_valid), .out_ready(b_ready), .out_cmd(b_cmd),
    .c_req(b_req), .c_ack(b_ack), .c_res(b_res),
    .r_req(res_req), .r_ack(res_ack), .r_res(res), .conflict(rt_conflict)
  );

  for (genvar i = 0; i < N_BANK; i++) begin : g_bank
    ff_bank #(.N_SUB(N_SUB), .N_TILES(N_TILES), .FIFO_DEPTH(FIFO_DEPTH),
              .WR_CYCLES(WR_CYCLES), .RD_CYCLES(RD_CYCLES)) u_bank (
      .clk, .rst_n,
      .cmd_valid(b_valid[i]), .cmd_ready(b_ready[i]), .cmd(b_cmd),
      .prog_en, .prog,
      .res_req(b_req[i]), .res_ack(b_ack[i]), .res(b_res[i]),
      .ev_full(b_ev_full[i]), .ev_arb(b_ev_arb[i])
    );
  end

  assign ev_full = |b_ev_full;
  assign ev_arb  = rt_conflict || |b_ev_arb;
endmodule
