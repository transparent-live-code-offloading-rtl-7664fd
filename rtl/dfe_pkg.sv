// dfe_pkg -- types and constants shared by the data-flow engine (DFE) overlay.
//
// The DFE is a mesh of identical cells. Every cell has one input and one
// output on each of its four sides and a functional unit (FU) in the middle.
// All links carry 32-bit signed integer tokens with a valid/ready handshake.
//
// Per-cell configuration word (cell_cfg_t, 26 bits, stored LSB-aligned in a
// 32-bit word of the configuration memory):
//   [25:22] const_en  one bit per input side (index = dir_e): the input keeps
//                     the first token it receives as a constant
//   [21:10] out_src   3 bits per output side: OUT_OFF, OUT_FU, or OUT_IN|dir
//   [9:8]   src_s     side feeding the FU selection input (OP_SEL only)
//   [7:6]   src_b     side feeding FU input 2
//   [5:4]   src_a     side feeding FU input 1
//   [3:0]   op        FU operation
// The field layout and the operation codes are this design's own choice;
// the paper only lists what a cell can be told to do.
package dfe_pkg;

  localparam int unsigned DATA_W = 32;   // 32-bit integer datapath
  localparam int unsigned PKT_W  = 128;  // host word: 128 bits carry one 32-bit datum
  localparam int unsigned TAG_LSB = 32;  // tag field position inside a host word
  localparam int unsigned TAG_W   = 16;  // tag field width
  localparam int unsigned CFG_W   = 26;  // used bits of a cell configuration word

  typedef logic signed [DATA_W-1:0] data_t;

  // Cell sides. Input and output on the same side share an index.
  typedef enum logic [1:0] {
    DIR_N = 2'd0,
    DIR_E = 2'd1,
    DIR_S = 2'd2,
    DIR_W = 2'd3
  } dir_e;

  typedef enum logic [3:0] {
    OP_NONE = 4'd0,   // FU unused: the cell is only a router
    OP_ADD  = 4'd1,
    OP_SUB  = 4'd2,
    OP_MUL  = 4'd3,
    OP_GT   = 4'd4,   // comparisons give 1 or 0
    OP_GE   = 4'd5,
    OP_LT   = 4'd6,
    OP_LE   = 4'd7,
    OP_EQ   = 4'd8,
    OP_NE   = 4'd9,
    OP_SEL  = 4'd10   // MUX: s != 0 ? a : b
  } op_e;

  // Output source: bit 2 set means "cell input on side [1:0]".
  typedef enum logic [2:0] {
    OUT_OFF  = 3'd0,
    OUT_FU   = 3'd1,
    OUT_IN_N = 3'd4,
    OUT_IN_E = 3'd5,
    OUT_IN_S = 3'd6,
    OUT_IN_W = 3'd7
  } out_src_e;

  typedef struct packed {
    logic [3:0]         const_en;
    out_src_e [3:0]     out_src;
    dir_e               src_s;
    dir_e               src_b;
    dir_e               src_a;
    op_e                op;
  } cell_cfg_t;

  // A token on a link: valid plus payload. Ready travels the other way.
  typedef struct packed {
    logic  valid;
    data_t data;
  } token_t;

  // The side a link enters from, seen by the neighbouring cell.
  function automatic dir_e opposite(dir_e d);
    return dir_e'(d ^ 2'd2);
  endfunction

  // Operation of the functional unit. Signed 32-bit, product truncated to
  // 32 bits; no division or remainder.
  function automatic data_t fu_compute(op_e op, data_t a, data_t b, data_t s);
    unique case (op)
      OP_ADD:  return a + b;
      OP_SUB:  return a - b;
      OP_MUL:  return a * b;
      OP_GT:   return data_t'(a >  b);
      OP_GE:   return data_t'(a >= b);
      OP_LT:   return data_t'(a <  b);
      OP_LE:   return data_t'(a <= b);
      OP_EQ:   return data_t'(a == b);
      OP_NE:   return data_t'(a != b);
      OP_SEL:  return (s != 0) ? a : b;
      default: return '0;
    endcase
  endfunction

  // Perimeter port numbering, for an array of R rows and C columns:
  // north ports 0..C-1 (by column), east C..C+R-1 (by row),
  // south C+R..2C+R-1 (by column), west 2C+R..2C+2R-1 (by row).
  function automatic int unsigned border_port(int unsigned rows, int unsigned cols,
                                              dir_e side, int unsigned pos);
    unique case (side)
      DIR_N:   return pos;
      DIR_E:   return cols + pos;
      DIR_S:   return cols + rows + pos;
      default: return 2*cols + rows + pos;
    endcase
  endfunction

endpackage
