// ff_pkg: shared constants and types of the in-memory long-read pre-alignment
// filter (tiles, sub-arrays, banks, bank groups and the rank).
//
// Bases are 2-bit encoded; base i of a word sits in bits [2i+1:2i]. A host word is
// 32 bits (16 bases), four words form a word-set of 128 bits that is spread over the
// four bank groups, word k going to bank group k. Inside a sub-array the 32 bits of a
// word are held by four tiles of 8 sense amplifiers, tile 4Z+k holding bits
// [8k+7:8k]. These numbers follow the paper's own example configuration (32-bit
// words, 4 bank groups, 8-SA tiles, 4 words per bank (WPB), 16x16 crossbars, 8-base
// segments). Field widths of the address and tag, the ID width and the number of
// in-flight pairings are this design's own choices.
package ff_pkg;

  // ---------------- sizes given by the paper ----------------
  localparam int unsigned WORD_W   = 32;              // host word
  localparam int unsigned N_BG     = 4;               // bank groups
  localparam int unsigned WPB      = 4;               // words per word-set
  localparam int unsigned N_SA     = 8;               // sense amplifiers per tile
  localparam int unsigned XB_ROWS  = 16;              // crossbar rows (row 0 = query row)
  localparam int unsigned XB_COLS  = 16;              // crossbar columns
  localparam int unsigned SEG_BP   = 8;               // segment length T in bases
  localparam int unsigned CNT_KEY_W = 4;              // Count TCAM width

  // ---------------- derived ----------------
  localparam int unsigned WORD_BP       = WORD_W / 2;         // 16 bases per word
  localparam int unsigned TILES_PER_WORD = WORD_W / N_SA;     // 4 tiles hold one word
  localparam int unsigned SEGS_PER_WORD = WORD_BP / SEG_BP;   // 2 segments per sub-array
  localparam int unsigned WS_SEGS       = N_BG * SEGS_PER_WORD; // 8 segments per word-set
  localparam int unsigned COL_GROUPS    = XB_COLS / N_SA;     // column-mux ways

  // ---------------- this design's choices ----------------
  localparam int unsigned IDX_W   = 4;   // bank / sub-array index fields
  localparam int unsigned TGRP_W  = 2;   // tile group Z (tiles 4Z..4Z+3)
  localparam int unsigned COLS_W  = 2;   // column-mux index
  localparam int unsigned ROW_W   = $clog2(XB_ROWS);
  localparam int unsigned NSH_W   = 5;   // number of shift rows in one compare
  localparam int unsigned SHV_W   = 4;   // shift value, in segments
  localparam int unsigned ID_W    = 16;  // pairing ID seen by the host
  localparam int unsigned LSB_W   = 2;   // ID LSBs travelling with the data
  localparam int unsigned N_SLOT  = 1 << LSB_W; // pairings in flight
  localparam int unsigned CNT_W   = 16;  // edit sums, thresholds, word-set counts
  localparam int unsigned PD_ENTRIES = 4;
  localparam int unsigned OS_ENTRIES = 16;
  localparam int unsigned CNT_ENTRIES = 16;
  localparam int unsigned PROG_KEY_W  = 16;
  localparam int unsigned PROG_DATA_W = 4;

  // Operation of a tile (instruction signal of the tile, Fig. 5).
  typedef enum logic [1:0] {
    T_IDLE  = 2'd0,
    T_READ  = 2'd1,
    T_WRITE = 2'd2,
    T_XOR   = 2'd3
  } tile_op_e;

  // Operation carried from the rank down to a sub-array.
  typedef enum logic [1:0] {
    OP_NOP       = 2'd0,
    OP_WRITE_REF = 2'd1,   // write one reference row of a tile group
    OP_COMPARE   = 2'd2    // write the query row, then XOR it with nshift rows
  } sa_op_e;

  typedef struct packed {
    logic [IDX_W-1:0]   bank;
    logic [IDX_W-1:0]   sub;
    logic [TGRP_W-1:0]  tgrp;
    logic [COLS_W-1:0]  colsel;
    logic [ROW_W-1:0]   row;      // reference row, or first shift row of a compare
    logic [NSH_W-1:0]   nshift;   // shift rows compared (row .. row+nshift-1)
    logic [WORD_BP-1:0] mask;     // 1 = base belongs to the pairing
  } sa_addr_t;

  // Tag returned with every sub-array result.
  typedef struct packed {
    logic [LSB_W-1:0] id_lsb;
    logic [SHV_W-1:0] shv;
  } tag_t;

  typedef struct packed {
    sa_op_e           op;
    sa_addr_t         addr;
    logic [WORD_W-1:0] data;
    tag_t             tag;
  } sa_cmd_t;

  typedef struct packed {
    tag_t                     tag;
    logic [SEGS_PER_WORD-1:0] edits;   // 1 = no shift matched this segment
  } sa_res_t;

  // TCAM programming bus, broadcast from the rank.
  typedef enum logic [1:0] {
    PT_PD  = 2'd0,
    PT_OS  = 2'd1,
    PT_CNT = 2'd2
  } prog_tgt_e;

  typedef struct packed {
    prog_tgt_e              tgt;
    logic [3:0]             idx;
    logic                   valid;    // entry valid bit
    logic [PROG_KEY_W-1:0]  key;
    logic [PROG_KEY_W-1:0]  care;     // 1 = compare this bit
    logic [PROG_DATA_W-1:0] data;
  } prog_t;

  // One host word (rank input).
  typedef struct packed {
    sa_op_e            op;
    sa_addr_t          addr;
    logic [WORD_W-1:0] data;
    logic [ID_W-1:0]   id;
    logic              active;   // word takes part (its count is not masked)
    logic [SHV_W-1:0]  shv;      // shift value of this shift set, in segments
    logic [CNT_W-1:0]  n_ws;     // word-sets of the pairing
    logic [7:0]        n_ss;     // shift sets per word-set
    logic [CNT_W-1:0]  e_thr;    // edit threshold E
  } host_word_t;

endpackage
