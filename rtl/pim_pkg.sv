// pim_pkg: types and constants shared by the flash PIM die.
//
// The die moves 64-bit words over its H-tree. A word-stream link carries
// {valid, last, data} forward and a ready signal backward; a word is
// transferred in a cycle where valid and ready are both high, and `last`
// marks the final word of a packet.
//
// Downward packets (toward the planes) start with a header word and an
// argument word, followed by `len` payload words. The header says which
// planes receive the packet (a plane address plus a per-level broadcast
// mask, so that any aligned sub-tree can be reached) and, for a read-out,
// how each RPU level combines the two upward streams it receives. This
// command format is this design's own; the paper names the operations
// (inbound I/O, PIM, outbound I/O with accumulation, page read, program,
// loading an operand into a page buffer)
// but not their encoding.
package pim_pkg;

  localparam int unsigned WORD_W     = 64;  // one H-tree word per 250 MHz cycle = 2 GB/s
  localparam int unsigned MAX_LEVELS = 8;   // up to 256 planes per die
  localparam int unsigned IN_BITS    = 8;   // W8A8: 8-bit inputs, applied bit-serially
  localparam int unsigned W_BITS     = 8;   // 8-bit weights, two QLC cells each
  localparam int unsigned ACC_W      = 32;  // INT32 partial sums and RPU lanes

  typedef logic [WORD_W-1:0] word_t;

  typedef struct packed {
    logic  last;
    word_t data;
  } flit_t;

  typedef enum logic [3:0] {
    OP_NOP      = 4'd0,
    OP_PIM      = 4'd1,  // payload: input vector; plane runs one dot-product pass
    OP_READ_OUT = 4'd2,  // plane streams page-buffer words upward
    OP_PROGRAM  = 4'd3,  // payload: one page; plane programs it into the cells
    OP_READ     = 4'd4,  // plane senses one page into its page buffer
    OP_LOAD     = 4'd5   // payload goes into the page buffer at `offset`, no cell access
  } opcode_e;

  // What an RPU does with the two upward streams of its children.
  typedef enum logic [2:0] {
    UP_PASS   = 3'd0,  // stream mode: forward the child chosen by the address bit
    UP_CONCAT = 3'd1,  // stream mode: child 0 until its last word, then child 1
    UP_ADD    = 3'd2,  // ALU mode: lane-wise INT32 sum of the two children
    UP_VVM    = 3'd3,  // ALU mode: INT8 dot product of the two streams (QK^T)
    UP_VSM    = 3'd4   // ALU mode: INT8 scalar (child 0) times INT8 vector (child 1) (SV)
  } up_mode_e;

  typedef struct packed {
    opcode_e                         op;       // [63:60]
    logic [MAX_LEVELS-1:0]           addr;     // [59:52] target plane index
    logic [MAX_LEVELS-1:0]           bcast;    // [51:44] per level: send to both children
    logic [MAX_LEVELS-1:0][2:0]      up_mode;  // [43:20] per level RPU upward mode
    logic [3:0]                      rsvd;     // [19:16]
    logic [15:0]                     len;      // [15:0]  payload words after the argument word
  } hdr_t;

  typedef struct packed {
    logic [15:0] rsvd;    // [63:48]
    logic [7:0]  count;   // [47:40] words to read out
    logic [7:0]  offset;  // [39:32] first page-buffer word to read out or load
    logic [5:0]  rsvd2;   // [31:26]
    logic [1:0]  mux;     // [25:24] column-mux phase (which quarter of the BLs is sensed)
    logic [6:0]  rsvd3;   // [23:17]
    logic        group;   // [16]    PIM: which half of the rows (32 blocks) is active
    logic        rsvd4;   // [15]
    logic [6:0]  layer;   // [14:8]  WL layer (stack index)
    logic [7:0]  row;     // [7:0]   BLS row for page read / program
  } args_t;

  // Plane controller operations.
  typedef enum logic [1:0] {
    PCMD_PIM  = 2'd0,
    PCMD_READ = 2'd1,
    PCMD_PROG = 2'd2
  } pcmd_e;

  function automatic int unsigned clog2_min1(int unsigned v);
    return (v <= 1) ? 1 : $clog2(v);
  endfunction

endpackage
