// ff_fifo: synchronous first-in first-out buffer, used as the sub-array input
// buffer that holds every input of a pairing (data, instruction, address, mask,
// ID) until the sub-array has finished the previous one.
//
// Valid/ready on both sides: a word enters when in_valid && in_ready and leaves when
// out_valid && out_ready. in_ready depends only on the fill level, so the upper
// level sees its acknowledgement in the same cycle it offers a word; a word written
// in cycle t can be read in cycle t+1. Storage is a register array of DEPTH words
// (DEPTH a power of two). The paper asks for the FIFO and its purpose; the depth
// and the handshake are this design's choices.
module ff_fifo #(
  parameter int unsigned W     = 8,
  parameter int unsigned DEPTH = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic [AW:0]   cnt;

  wire push = in_valid && in_ready;
  wire pop  = out_valid && out_ready;

  assign in_ready  = (cnt != (AW+1)'(DEPTH));
  assign out_valid = (cnt != '0);
  assign out_data  = mem[rp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp  <= '0;
      rp  <= '0;
      cnt <= '0;
    end else begin
      if (push) wp <= wp + 1'b1;
      if (pop)  rp <= rp + 1'b1;
      cnt <= cnt + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  always_ff @(posedge clk) if (push) mem[wp] <= in_data;

  initial assert (DEPTH == (1 << AW)) else $error("DEPTH must be a power of two");
endmodule
