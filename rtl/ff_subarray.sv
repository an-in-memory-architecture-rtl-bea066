// ff_subarray: one sub-array - input FIFO, sub-array controller, N_TILES tiles and
// the sub-array logic units that turn bitwise XOR results into one segment-level
// result per command.
//
// Commands (sa_cmd_t) enter through the FIFO with a valid/ready handshake. The
// controller takes one at a time:
//   OP_WRITE_REF : writes the 32-bit data into row addr.row of tiles 4Z..4Z+3
//                  (Z = addr.tgrp, column-mux index addr.colsel). No result.
//   OP_COMPARE   : writes the 32-bit read piece into the query row (row 0) of the
//                  same tiles, then for each shift row r = addr.row ..
//                  addr.row+addr.nshift-1:
//                    1. XOR instruction to the four tiles (query row ^ row r),
//                    2. the four tile outputs are picked by multiplexers and
//                       joined in the XOR-result register (32 bits),
//                    3. pairwise OR of each 2-bit base -> 16 base mismatch bits,
//                    4. AND with the sub-array mask (addr.mask, 1 = base in pairing),
//                    5. Pattern-Detect TCAM search: its match lines say which
//                       patterns are present (programmed so that entry j matches
//                       "segment j is all zero"),
//                    6. Output-Select TCAM search on those match lines returns the
//                       segment bit-vector of this shift (1 = segment mismatches),
//                    7. bitwise AND into the partial result.
//                  The partial result starts at all ones, so after the last shift a
//                  segment bit is 0 exactly when at least one shift matched it.
//                  The result and the tag (ID LSBs and shift value) are held in
//                  the result and ID register, then moved into the output buffer, a
//                  FIFO of OUT_DEPTH entries that offers its oldest entry with
//                  res_req until res_ack. The controller takes the next command as
//                  soon as the result is in the output buffer, so a busy output bus
//                  stalls the sub-array only when that buffer is full.
// Timing: a tile operation costs its crossbar cycles plus two cycles of issue and
// hand-back; a compare with n shift rows takes WR_CYCLES+2 + n*(RD_CYCLES+3) cycles
// from leaving the FIFO until its result is in the result register, and res_req
// rises one cycle later.
//
// The seven steps, the input FIFO, the output buffer, the mask, the two TCAMs, the
// ID register and the req/ack output follow the paper; both buffer depths are this
// design's. The TCAM contents come from the programming
// port and are the user's; the command format and tile-group selection are this
// design's choices.
module ff_subarray
  import ff_pkg::*;
#(
  parameter int unsigned N_TILES    = 8,
  parameter int unsigned FIFO_DEPTH = 4,
  parameter int unsigned WR_CYCLES  = 2,
  parameter int unsigned RD_CYCLES  = 1,
  parameter int unsigned OUT_DEPTH  = 2
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
  output sa_res_t res
);
  localparam int unsigned NG = N_TILES / TILES_PER_WORD;   // tile groups

  // ---------------- input FIFO ----------------
  logic    f_valid, f_ready;
  sa_cmd_t f_cmd;
  ff_fifo #(.W($bits(sa_cmd_t)), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .in_valid(cmd_valid), .in_ready(cmd_ready), .in_data(cmd),
    .out_valid(f_valid), .out_ready(f_ready), .out_data(f_cmd)
  );

  // ---------------- tiles ----------------
  tile_op_e                tile_op;      // registered instruction pulse
  logic [ROW_W-1:0]        tile_row;
  logic [N_SA-1:0]         t_dout [N_TILES];
  logic [N_TILES-1:0]      t_done;
  sa_cmd_t                 cur;

  for (genvar t = 0; t < N_TILES; t++) begin : g_tile
    tile_op_e op_t;
    assign op_t = (int'(cur.addr.tgrp) == t / TILES_PER_WORD) ? tile_op : T_IDLE;
    ff_tile #(.ROWS(XB_ROWS), .COLS(XB_COLS), .NSA(N_SA),
              .WR_CYCLES(WR_CYCLES), .RD_CYCLES(RD_CYCLES)) u_tile (
      .clk, .rst_n,
      .instr   (op_t),
      .row     (tile_row),
      .colsel  (cur.addr.colsel),
      .data_in (cur.data[(t % TILES_PER_WORD)*N_SA +: N_SA]),
      .wmask   ({N_SA{1'b1}}),
      .data_out(t_dout[t]),
      .done    (t_done[t])
    );
  end

  // output multiplexers: tile k of the selected group feeds XOR-result bits [8k+7:8k]
  logic [WORD_W-1:0] mux_out;
  logic              grp_done;
  always_comb begin
    mux_out  = '0;
    grp_done = 1'b0;
    for (int g = 0; g < NG; g++)
      if (int'(cur.addr.tgrp) == g) begin
        grp_done = t_done[g*TILES_PER_WORD];
        for (int k = 0; k < TILES_PER_WORD; k++)
          mux_out[k*N_SA +: N_SA] = t_dout[g*TILES_PER_WORD + k];
      end
  end

  // ---------------- logic units ----------------
  logic [WORD_W-1:0]        xor_res;      // XOR-result register
  logic [WORD_BP-1:0]       pw_or;        // pairwise OR
  logic [WORD_BP-1:0]       masked;       // sub-array mask
  logic [PD_ENTRIES-1:0]    pd_match;
  logic [SEGS_PER_WORD-1:0] os_vec;
  logic [SEGS_PER_WORD-1:0] partial;
  sa_res_t                  res_q;        // result and ID register
  logic                     o_ready;

  always_comb
    for (int b = 0; b < WORD_BP; b++) pw_or[b] = xor_res[2*b] | xor_res[2*b+1];
  assign masked = pw_or & cur.addr.mask;

  logic                           pd_hit, os_hit;
  logic [$clog2(PD_ENTRIES)-1:0]  pd_idx;
  logic [$clog2(OS_ENTRIES)-1:0]  os_idx;
  logic [0:0]                     pd_data;

  ff_tcam #(.KEY_W(WORD_BP), .ENTRIES(PD_ENTRIES), .DATA_W(1)) u_pd (
    .clk, .rst_n,
    .prog_en   (prog_en && prog.tgt == PT_PD),
    .prog_idx  (prog.idx[$clog2(PD_ENTRIES)-1:0]),
    .prog_valid(prog.valid),
    .prog_key  (prog.key[WORD_BP-1:0]),
    .prog_care (prog.care[WORD_BP-1:0]),
    .prog_data (prog.data[0]),
    .key       (masked),
    .match     (pd_match),
    .hit       (pd_hit),
    .hit_idx   (pd_idx),
    .hit_data  (pd_data)
  );

  ff_tcam #(.KEY_W(PD_ENTRIES), .ENTRIES(OS_ENTRIES), .DATA_W(SEGS_PER_WORD),
            .MISS_DATA({SEGS_PER_WORD{1'b1}})) u_os (
    .clk, .rst_n,
    .prog_en   (prog_en && prog.tgt == PT_OS),
    .prog_idx  (prog.idx[$clog2(OS_ENTRIES)-1:0]),
    .prog_valid(prog.valid),
    .prog_key  (prog.key[PD_ENTRIES-1:0]),
    .prog_care (prog.care[PD_ENTRIES-1:0]),
    .prog_data (prog.data[SEGS_PER_WORD-1:0]),
    .key       (pd_match),
    .match     (),
    .hit       (os_hit),
    .hit_idx   (os_idx),
    .hit_data  (os_vec)
  );

  // ---------------- sub-array controller ----------------
  typedef enum logic [2:0] {S_IDLE, S_WAIT_W, S_WAIT_Q, S_WAIT_X, S_EVAL, S_OUT} st_e;
  st_e              st;
  logic [NSH_W-1:0] left;

  assign f_ready = (st == S_IDLE);

  // output buffer
  ff_fifo #(.W($bits(sa_res_t)), .DEPTH(OUT_DEPTH)) u_obuf (
    .clk, .rst_n,
    .in_valid(st == S_OUT), .in_ready(o_ready), .in_data(res_q),
    .out_valid(res_req), .out_ready(res_ack), .out_data(res)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st       <= S_IDLE;
      cur      <= '0;
      tile_op  <= T_IDLE;
      tile_row <= '0;
      left     <= '0;
      xor_res  <= '0;
      partial  <= '0;
      res_q    <= '0;
    end else begin
      tile_op <= T_IDLE;
      case (st)
        S_IDLE: if (f_valid) begin
          cur <= f_cmd;
          unique case (f_cmd.op)
            OP_WRITE_REF: begin
              tile_op  <= T_WRITE;
              tile_row <= f_cmd.addr.row;
              st       <= S_WAIT_W;
            end
            OP_COMPARE: begin
              tile_op  <= T_WRITE;
              tile_row <= '0;            // query row
              st       <= S_WAIT_Q;
            end
            default: ;                   // NOP is dropped
          endcase
        end
        S_WAIT_W: if (grp_done) st <= S_IDLE;
        S_WAIT_Q: if (grp_done) begin
          partial <= '1;
          left    <= cur.addr.nshift;
          if (cur.addr.nshift == '0) begin
            res_q <= '{tag: cur.tag, edits: '1};
            st  <= S_OUT;
          end else begin
            tile_op  <= T_XOR;
            tile_row <= cur.addr.row;
            st       <= S_WAIT_X;
          end
        end
        S_WAIT_X: if (grp_done) begin
          xor_res <= mux_out;
          st      <= S_EVAL;
        end
        S_EVAL: begin
          partial <= partial & os_vec;
          left    <= left - 1'b1;
          if (left == NSH_W'(1)) begin
            res_q <= '{tag: cur.tag, edits: partial & os_vec};
            st  <= S_OUT;
          end else begin
            tile_op  <= T_XOR;
            tile_row <= tile_row + 1'b1;
            st       <= S_WAIT_X;
          end
        end
        S_OUT: if (o_ready) st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end

  // a result offered with req stays put until acknowledged
  assert property (@(posedge clk) disable iff (!rst_n)
                   res_req && !res_ack |=> res_req && $stable(res));

  initial assert (N_TILES % TILES_PER_WORD == 0)
    else $error("N_TILES must be a multiple of the tiles per word");
endmodule
