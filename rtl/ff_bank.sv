// ff_bank: a bank - N_SUB sub-arrays behind one input buffer and one output
// arbiter (ff_level_router selecting on addr.sub).
//
// A command from the bank group is acknowledged by the bank's input buffer within a
// cycle and then handed to the sub-array it names as soon as that sub-array's FIFO
// has room. Sub-array results compete for the single result port; they leave one
// per grant, in round-robin order, with their tag. The TCAM programming bus reaches
// every sub-array. Grouping sub-arrays into banks and the acknowledge scheme follow
// the paper; the number of sub-arrays per bank is this design's choice (the paper
// gives none). ev_full and ev_arb report back-pressure from a full sub-array FIFO
// and result arbitration, for performance counting (this design's addition).
module ff_bank
  import ff_pkg::*;
#(
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
  logic [N_SUB-1:0] s_valid, s_ready, s_req, s_ack;
  sa_cmd_t          s_cmd;
  sa_res_t          s_res [N_SUB];
  logic             rt_conflict;

  ff_level_router #(.N(N_SUB), .SEL_BANK(1'b0)) u_rt (
    .clk, .rst_n,
    .in_valid(cmd_valid), .in_ready(cmd_ready), .in_cmd(cmd),
    .out_valid(s_valid), .out_ready(s_ready), .out_cmd(s_cmd),
    .c_req(s_req), .c_ack(s_ack), .c_res(s_res),
    .r_req(res_req), .r_ack(res_ack), .r_res(res), .conflict(rt_conflict)
  );

  for (genvar i = 0; i < N_SUB; i++) begin : g_sub
    ff_subarray #(.N_TILES(N_TILES), .FIFO_DEPTH(FIFO_DEPTH),
                  .WR_CYCLES(WR_CYCLES), .RD_CYCLES(RD_CYCLES)) u_sa (
      .clk, .rst_n,
      .cmd_valid(s_valid[i]), .cmd_ready(s_ready[i]), .cmd(s_cmd),
      .prog_en, .prog,
      .res_req(s_req[i]), .res_ack(s_ack[i]), .res(s_res[i])
    );
  end

  assign ev_full = |(s_valid & ~s_ready);
  assign ev_arb  = rt_conflict;
endmodule
