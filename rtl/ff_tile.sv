// ff_tile: one memory tile - a crossbar with its tile controller, counter, write
// buffer, write-driver select, column multiplexers, sense amplifiers and output
// register.
//
// The crossbar is ROWS x COLS cells. Row 0 is the query row that receives the read;
// the other rows hold a reference piece and its shifted copies. N_SA sense
// amplifiers serve the columns through COLS/N_SA-way column multiplexers: SA j sees
// columns j*G .. j*G+G-1 (G = COLS/N_SA) and colsel picks column j*G+colsel, so one
// N_SA-bit operand is interleaved over the row. Operations (instr):
//   T_READ  : data_out <= row[row]
//   T_WRITE : row[row] <= data_in, only where wmask is 1 (write-driver select)
//   T_XOR   : data_out <= row[0] ^ row[row]  (sense amplifiers in logic mode)
// A command is taken on the cycle instr != T_IDLE while the tile is idle; the tile
// then counts WR_CYCLES (write) or RD_CYCLES (read, xor) clock cycles, which stands
// for the crossbar access being slower than the logic clock, and pulses done on the
// cycle the result is in data_out (or the write is in the array). Commands arriving
// while busy are ignored; the sub-array controller only issues after done.
//
// Following the paper: the read/write/XOR instruction set, the query row, the
// counter beside the controller, masked write-driver select, column multiplexing and
// the output register. This design's choices: the cycle counts, the interleave
// order and that the analog cells and sample-and-hold are a register array.
module ff_tile
  import ff_pkg::*;
#(
  parameter int unsigned ROWS      = XB_ROWS,
  parameter int unsigned COLS      = XB_COLS,
  parameter int unsigned NSA       = N_SA,
  parameter int unsigned WR_CYCLES = 2,
  parameter int unsigned RD_CYCLES = 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  tile_op_e                instr,
  input  logic [$clog2(ROWS)-1:0] row,
  input  logic [COLS_W-1:0]       colsel,
  input  logic [NSA-1:0]          data_in,
  input  logic [NSA-1:0]          wmask,
  output logic [NSA-1:0]          data_out,
  output logic                    done
);
  localparam int unsigned G   = COLS / NSA;
  localparam int unsigned CW  = 8;

  logic [COLS-1:0] xbar [ROWS];

  typedef enum logic [1:0] {S_IDLE, S_BUSY} st_e;
  st_e                    st;
  tile_op_e               op_q;
  logic [$clog2(ROWS)-1:0] row_q;
  logic [COLS_W-1:0]      col_q;
  logic [NSA-1:0]         wbuf;     // write buffer register
  logic [NSA-1:0]         wsel;     // write driver select
  logic [CW-1:0]          cnt;

  // column multiplexers: operand bit j of a row
  function automatic logic [NSA-1:0] col_mux(input logic [COLS-1:0] r,
                                             input logic [COLS_W-1:0] c);
    logic [NSA-1:0] v;
    for (int j = 0; j < NSA; j++) v[j] = r[j*G + int'(c)];
    return v;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st       <= S_IDLE;
      op_q     <= T_IDLE;
      row_q    <= '0;
      col_q    <= '0;
      wbuf     <= '0;
      wsel     <= '0;
      cnt      <= '0;
      data_out <= '0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      case (st)
        S_IDLE: if (instr != T_IDLE) begin
          op_q  <= instr;
          row_q <= row;
          col_q <= colsel;
          wbuf  <= data_in;
          wsel  <= wmask;
          cnt   <= CW'((instr == T_WRITE) ? WR_CYCLES - 1 : RD_CYCLES - 1);
          st    <= S_BUSY;
        end
        S_BUSY: begin
          if (cnt != 0) cnt <= cnt - 1'b1;
          else begin
            unique case (op_q)
              T_READ:  data_out <= col_mux(xbar[row_q], col_q);
              T_XOR:   data_out <= col_mux(xbar[0], col_q) ^ col_mux(xbar[row_q], col_q);
              default: ;
            endcase
            done <= 1'b1;
            st   <= S_IDLE;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  // crossbar cells (write drivers, gated by the write driver select)
  always_ff @(posedge clk) begin
    if (st == S_BUSY && cnt == 0 && op_q == T_WRITE)
      for (int j = 0; j < NSA; j++)
        if (wsel[j]) xbar[row_q][j*G + int'(col_q)] <= wbuf[j];
  end

  initial begin
    assert (COLS % NSA == 0) else $error("COLS must be a multiple of NSA");
    assert (WR_CYCLES >= 1 && RD_CYCLES >= 1) else $error("cycle counts must be >= 1");
  end
endmodule
