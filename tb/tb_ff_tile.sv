// tb_ff_tile: self-checking test of one tile. Writes random operands into random
// rows and column-mux positions (with random write masks), reads them back and XORs
// them with the query row, comparing every output with a bit-level model of the
// crossbar kept in the testbench. Also checks that done arrives WR_CYCLES
// (write) or RD_CYCLES (read, xor) cycles after the edge that takes the
// instruction (one more, counted from the cycle the instruction is driven).
module tb_ff_tile;
  import ff_pkg::*;
  localparam int ROWS = 16, COLS = 16, NSA = 8, WR = 2, RD = 1;
  localparam int G = COLS / NSA;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  tile_op_e instr;
  logic [3:0] row;
  logic [COLS_W-1:0] colsel;
  logic [NSA-1:0] din, wmask, dout;
  logic done;
  int checks = 0, failures = 0;
  logic [COLS-1:0] model [ROWS];

  ff_tile #(.ROWS(ROWS), .COLS(COLS), .NSA(NSA), .WR_CYCLES(WR), .RD_CYCLES(RD)) dut (
    .clk, .rst_n, .instr, .row, .colsel, .data_in(din), .wmask, .data_out(dout), .done);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [NSA-1:0] pick(logic [COLS-1:0] r, int c);
    logic [NSA-1:0] v;
    for (int j = 0; j < NSA; j++) v[j] = r[j*G + c];
    return v;
  endfunction

  task automatic op(tile_op_e o, int r, int c, logic [NSA-1:0] d, logic [NSA-1:0] m,
                    int exp_lat);
    int lat = 0;
    @(negedge clk);
    instr = o; row = 4'(r); colsel = COLS_W'(c); din = d; wmask = m;
    @(negedge clk);
    instr = T_IDLE;
    lat = 1;
    while (!done) begin @(negedge clk); lat++; end
    checks++;
    if (lat != exp_lat) begin
      failures++;
      $display("latency op=%0d got %0d expected %0d", o, lat, exp_lat);
    end
  endtask

  initial begin
    instr = T_IDLE; row = 0; colsel = 0; din = 0; wmask = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // fill every row and column position fully
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < G; c++) begin
        automatic logic [NSA-1:0] d = NSA'($urandom);
        op(T_WRITE, r, c, d, '1, WR + 1);
        for (int j = 0; j < NSA; j++) model[r][j*G + c] = d[j];
      end
    // random masked writes, reads and xors
    for (int n = 0; n < 300; n++) begin
      automatic int r = $urandom_range(0, ROWS-1);
      automatic int c = $urandom_range(0, G-1);
      case ($urandom_range(0, 2))
        0: begin
          automatic logic [NSA-1:0] d = NSA'($urandom), m = NSA'($urandom);
          op(T_WRITE, r, c, d, m, WR + 1);
          for (int j = 0; j < NSA; j++) if (m[j]) model[r][j*G + c] = d[j];
        end
        1: begin
          op(T_READ, r, c, '0, '0, RD + 1);
          checks++;
          if (dout !== pick(model[r], c)) begin
            failures++;
            $display("read row %0d col %0d: %h vs %h", r, c, dout, pick(model[r], c));
          end
        end
        default: begin
          op(T_XOR, r, c, '0, '0, RD + 1);
          checks++;
          if (dout !== (pick(model[0], c) ^ pick(model[r], c))) begin
            failures++;
            $display("xor row %0d col %0d: %h vs %h", r, c, dout,
                     pick(model[0], c) ^ pick(model[r], c));
          end
        end
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
