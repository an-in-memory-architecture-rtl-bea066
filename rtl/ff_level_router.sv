// ff_level_router: the buffering and arbitration shared by the bank and bank-group
// levels.
//
// Downward, a one-entry input buffer takes a command from the level above and
// acknowledges it in the same cycle whenever the buffer is empty or is being
// emptied, so the level above never waits for the whole path down to a sub-array.
// The buffered command is offered to child addr.bank (SEL_BANK = 1, bank-group
// level) or child addr.sub (SEL_BANK = 0, bank level); a command naming a child that
// does not exist is dropped. Upward, children raise c_req with a result; a
// round-robin arbiter grants one per cycle (c_ack), the result moves into a
// one-entry output buffer and is offered upward with r_req until r_ack, so results
// that finish together are passed on one after another.
//
// The paper gives the input buffers with single-cycle acknowledgement and the
// request/acknowledge scheme; buffer depths and round-robin order are this design's.
// The conflict output (more than one child requesting in a cycle) is an event
// signal for performance counting; it is this design's addition.
module ff_level_router
  import ff_pkg::*;
#(
  parameter int unsigned N        = 2,
  parameter bit          SEL_BANK = 1'b0
) (
  input  logic          clk,
  input  logic          rst_n,
  // from the level above
  input  logic          in_valid,
  output logic          in_ready,
  input  sa_cmd_t       in_cmd,
  // to the children
  output logic [N-1:0]  out_valid,
  input  logic [N-1:0]  out_ready,
  output sa_cmd_t       out_cmd,
  // results from the children
  input  logic [N-1:0]  c_req,
  output logic [N-1:0]  c_ack,
  input  sa_res_t       c_res [N],
  // result to the level above
  output logic          r_req,
  input  logic          r_ack,
  output sa_res_t       r_res,
  // event: children competing for the result port this cycle
  output logic          conflict
);
  // ---------------- command path ----------------
  logic           buf_v;
  sa_cmd_t        buf_cmd;
  logic [IDX_W-1:0] sel;
  logic           fwd, bad;

  assign sel = SEL_BANK ? buf_cmd.addr.bank : buf_cmd.addr.sub;
  assign bad = (int'(sel) >= N);
  always_comb
    for (int i = 0; i < N; i++) out_valid[i] = buf_v && (int'(sel) == i);
  assign out_cmd  = buf_cmd;
  assign fwd      = buf_v && (bad || |(out_valid & out_ready));
  assign in_ready = !buf_v || fwd;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buf_v   <= 1'b0;
      buf_cmd <= '0;
    end else begin
      if (in_valid && in_ready) begin
        buf_v   <= 1'b1;
        buf_cmd <= in_cmd;
      end else if (fwd) begin
        buf_v   <= 1'b0;
      end
    end
  end

  // ---------------- result path ----------------
  localparam int unsigned PW = (N > 1) ? $clog2(N) : 1;
  logic [PW-1:0] prio;        // first child looked at
  logic          ob_v;
  logic          take;
  logic [PW-1:0] gnt;
  logic          any;

  always_comb begin
    any = 1'b0;
    gnt = '0;
    for (int k = N - 1; k >= 0; k--) begin
      int unsigned c;
      c = (int'(prio) + k) % N;
      if (c_req[c]) begin
        any = 1'b1;
        gnt = PW'(c);
      end
    end
  end

  assign conflict = ($countones(c_req) > 1);
  assign take  = any && (!ob_v || r_ack);
  always_comb
    for (int i = 0; i < N; i++) c_ack[i] = take && (int'(gnt) == i);
  assign r_req = ob_v;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ob_v  <= 1'b0;
      r_res <= '0;
      prio  <= '0;
    end else begin
      if (take) begin
        ob_v  <= 1'b1;
        r_res <= c_res[gnt];
        prio  <= PW'((int'(gnt) + 1) % N);
      end else if (r_ack) begin
        ob_v  <= 1'b0;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   r_req && !r_ack |=> r_req && $stable(r_res));
endmodule
