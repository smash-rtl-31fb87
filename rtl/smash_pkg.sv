// smash_pkg: types and constants shared by the Bitmap Management Unit (BMU).
//
// The BMU indexes sparse matrices stored as a hierarchy of bitmaps. The
// numbers taken from the paper are the group count (4), the number of bitmap
// levels per group (3) and the bitmap buffer size (256 bytes). Everything
// else here -- operand widths, the command encoding, the 64-bit memory word,
// the bit order inside a word -- is this design's own choice.
//
// Bit order: bit p of a bitmap stream lives in 64-bit word p/64 at bit
// position 63-(p%64), i.e. the first bitmap bit is the most significant bit
// of its word, matching the count-leading-zeros scan the paper describes for
// the software-only variant.
package smash_pkg;

  localparam int unsigned NUM_GROUPS   = 4;    // paper: "4 groups of 3 bitmap buffers"
  localparam int unsigned NUM_LEVELS   = 3;    // paper: 3 buffers per group
  localparam int unsigned BMU_BUF_BYTES = 256;  // paper: "each buffer is 256 bytes"
  localparam int unsigned WORD_W       = 64;   // memory word (own choice)
  localparam int unsigned DIM_W        = 32;   // rows / columns operand width
  localparam int unsigned ADDR_W       = 32;   // byte address width
  localparam int unsigned COMP_W       = 12;   // holds ratios 1..2048
  localparam int unsigned IDX_W        = 48;   // linear element index width
  localparam int unsigned POS_W        = 32;   // bit position inside a bitmap stream
  localparam int unsigned GRP_W        = 2;
  localparam int unsigned LVL_W        = 2;

  // SMASH instructions (Table 1 of the paper); the encoding is our own.
  typedef enum logic [2:0] {
    OP_MATINFO  = 3'd0,  // a = rows, b = cols
    OP_BMAPINFO = 3'd1,  // a = comp, b = lvl
    OP_RDBMAP   = 3'd2,  // a = byte address [mem], b = buf (level)
    OP_PBMAP    = 3'd3,  // no operands
    OP_RDIND    = 3'd4   // returns row, col
  } smash_op_e;

  typedef struct packed {
    smash_op_e          op;
    logic [GRP_W-1:0]   grp;
    logic [31:0]        a;
    logic [31:0]        b;
  } smash_cmd_t;

  // Response of RDIND. 'found' is 0 once PBMAP has run past the last
  // non-zero block of the matrix (own addition: the paper gives no way for
  // software to learn that the bitmap is exhausted).
  typedef struct packed {
    logic               found;
    logic [IDX_W-1:0]   row;
    logic [DIM_W-1:0]   col;
  } smash_rsp_t;

  // Contents of the programmable registers of one group.
  typedef struct packed {
    logic [DIM_W-1:0]                     rows;
    logic [DIM_W-1:0]                     cols;
    logic [LVL_W-1:0]                     nlev;   // levels in use, 0..NUM_LEVELS
    logic [NUM_LEVELS-1:0][COMP_W-1:0]    comp;   // comp(i)
    logic [NUM_LEVELS-1:0][IDX_W-1:0]     wprod;  // prod_{j<=i} comp(j)
    logic [IDX_W-1:0]                     total;  // rows * cols
  } bmu_cfg_t;

  // Bit-reverse a word so that stream order becomes LSB-first.
  function automatic logic [WORD_W-1:0] rev_word(input logic [WORD_W-1:0] w);
    for (int i = 0; i < WORD_W; i++) rev_word[i] = w[WORD_W-1-i];
  endfunction

  // Position of the lowest set bit (w must be non-zero).
  function automatic logic [5:0] lowest_set(input logic [WORD_W-1:0] w);
    lowest_set = '0;
    for (int i = WORD_W-1; i >= 0; i--) if (w[i]) lowest_set = 6'(i);
  endfunction

endpackage
