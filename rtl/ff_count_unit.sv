// ff_count_unit: the rank-level logic units that turn a word-set segment vector
// into an edit count - one Count TCAM per bank group, the TCAM mask and the
// multi-operand adder.
//
// in_vec holds the word-set's segment bits (1 = segment with an edit), bank group
// g owning bits [g*S +: S] with S = SEGS_PER_WORD. Each Count TCAM is 4 bits wide;
// its key is the bank group's S bits padded with zeros, and the entry that matches
// returns the edit number of that pattern (programmed as the number of ones). The
// count of a bank group whose word did not take part (in_act[g] = 0) is masked to
// zero, and the adder sums the masked counts. Latency: one cycle, in_valid at edge
// t gives out_valid and out_edits after edge t+1.
//
// Count TCAMs of 4-bit width, the mask after them and the adder follow the paper;
// one Count TCAM per bank group, the zero padding of the key and the unprogrammed
// miss value (0) are this design's choices. out_edits is CNT_W bits wide to match
// the rank's sum buffer; one word-set counts at most NBG times the largest 3-bit
// table entry, so its upper bits are always zero in this unit on its own.
module ff_count_unit
  import ff_pkg::*;
#(
  parameter int unsigned NBG = N_BG
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   prog_en,
  input  prog_t                  prog,
  input  logic                   in_valid,
  input  logic [NBG*SEGS_PER_WORD-1:0] in_vec,
  input  logic [NBG-1:0]         in_act,
  output logic                   out_valid,
  output logic [CNT_W-1:0]       out_edits
);
  localparam int unsigned S  = SEGS_PER_WORD;
  localparam int unsigned DW = $clog2(CNT_KEY_W + 1);

  logic [DW-1:0]    cnt    [NBG];
  logic [DW-1:0]    masked [NBG];
  logic [CNT_W-1:0] sum;

  for (genvar g = 0; g < NBG; g++) begin : g_ct
    logic [CNT_KEY_W-1:0] key;
    assign key = CNT_KEY_W'(in_vec[g*S +: S]);
    ff_tcam #(.KEY_W(CNT_KEY_W), .ENTRIES(CNT_ENTRIES), .DATA_W(DW)) u_ct (
      .clk, .rst_n,
      .prog_en   (prog_en && prog.tgt == PT_CNT),
      .prog_idx  (prog.idx[$clog2(CNT_ENTRIES)-1:0]),
      .prog_valid(prog.valid),
      .prog_key  (prog.key[CNT_KEY_W-1:0]),
      .prog_care (prog.care[CNT_KEY_W-1:0]),
      .prog_data (prog.data[DW-1:0]),
      .key       (key),
      .match     (),
      .hit       (),
      .hit_idx   (),
      .hit_data  (cnt[g])
    );
    assign masked[g] = in_act[g] ? cnt[g] : '0;   // TCAM mask
  end

  always_comb begin                                // multi-operand adder
    sum = '0;
    for (int g = 0; g < NBG; g++) sum = sum + CNT_W'(masked[g]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_edits <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) out_edits <= sum;
    end
  end

  initial assert (SEGS_PER_WORD <= CNT_KEY_W)
    else $error("segments per bank group exceed the Count TCAM width");
endmodule
