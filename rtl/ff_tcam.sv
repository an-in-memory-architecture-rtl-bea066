// ff_tcam: programmable ternary content-addressable memory, the building block of
// the Pattern-Detect (PD), Output-Select (OS) and Count TCAMs.
//
// ENTRIES entries each hold a valid bit, a KEY_W-bit value, a KEY_W-bit care mask
// (1 = the bit is compared, 0 = don't care) and a DATA_W-bit result word. A search
// compares key with every entry at once: match[i] is 1 when entry i is valid and
// agrees with key on all cared bits. hit, hit_idx and hit_data give the lowest
// matching entry and its result word; with no hit, hit_data is MISS_DATA.
// Search is combinational (one cycle with the register that follows it in the
// user). Entries are written through the programming port one per cycle
// (prog_en), and all entries are invalid after reset.
//
// The paper gives what these TCAMs do (detect bit patterns, select an output,
// assign an edit count to a 4-bit pattern) and the 4-bit Count TCAM width; the
// entry count, the result word, first-match priority and the programming port are
// this design's choices.
module ff_tcam #(
  parameter int unsigned KEY_W   = 4,
  parameter int unsigned ENTRIES = 16,
  parameter int unsigned DATA_W  = 3,
  parameter logic [DATA_W-1:0] MISS_DATA = '0
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       prog_en,
  input  logic [$clog2(ENTRIES)-1:0] prog_idx,
  input  logic                       prog_valid,
  input  logic [KEY_W-1:0]           prog_key,
  input  logic [KEY_W-1:0]           prog_care,
  input  logic [DATA_W-1:0]          prog_data,
  input  logic [KEY_W-1:0]           key,
  output logic [ENTRIES-1:0]         match,
  output logic                       hit,
  output logic [$clog2(ENTRIES)-1:0] hit_idx,
  output logic [DATA_W-1:0]          hit_data
);
  logic [ENTRIES-1:0] e_valid;
  logic [KEY_W-1:0]   e_key  [ENTRIES];
  logic [KEY_W-1:0]   e_care [ENTRIES];
  logic [DATA_W-1:0]  e_data [ENTRIES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) e_valid <= '0;
    else if (prog_en) e_valid[prog_idx] <= prog_valid;
  end

  always_ff @(posedge clk) begin
    if (prog_en) begin
      e_key[prog_idx]  <= prog_key;
      e_care[prog_idx] <= prog_care;
      e_data[prog_idx] <= prog_data;
    end
  end

  always_comb begin
    for (int i = 0; i < ENTRIES; i++)
      match[i] = e_valid[i] && (((key ^ e_key[i]) & e_care[i]) == '0);
    hit      = |match;
    hit_idx  = '0;
    hit_data = MISS_DATA;
    for (int i = ENTRIES - 1; i >= 0; i--)
      if (match[i]) begin
        hit_idx  = ($clog2(ENTRIES))'(i);
        hit_data = e_data[i];
      end
  end
endmodule
