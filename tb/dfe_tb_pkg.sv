// dfe_tb_pkg -- hand-placed DFE configurations and reference models shared
// by the array and top-level testbenches.
//
// Kernel K_AXPY (C = A + 3*B + 1, the running example of a matrix update),
// three cells of row 0:
//   (0,0) MUL  B (from W border) * 3 (constant on N)      -> E
//   (0,1) ADD  A (from N border) + (0,0)                   -> E
//   (0,2) ADD  (0,1) + 1 (constant on N)                   -> N border
// Kernel K_BRANCH (C = A > B ? A + 3*B + 1 : A - 5*B - 2, a loop body with
// an if/else turned into a MUX), fourteen cells of the 4 x 4 corner:
//   (0,0) MUL  B*3, B also forwarded S     (0,1) ADD A+3B, A forwarded S
//   (0,2) ADD  +1 (const N), result S      (0,3) route N->S (constant -2)
//   (1,0) MUL  B*-5 (const W), B on S      (1,1) ADD A + -5B
//   (1,2) ADD  + -2 (const E), t3 N->S     (1,3) route N->W, W->S
//   (2,0) GT   A > B                       (2,1) route W->E, E->S
//   (2,2) SEL  s=W a=N b=E, result W       (2,3) route N->W
//   (3,1) route N->W                       (3,0) route E->W (result out)
// Kernel K_FIR8 (y = bias + sum of w[i]*x[i], i = 0..7: 17 inputs counting
// the 9 constants, 1 output, 16 computing nodes), for any array of at
// least 3 rows and 8 columns:
//   (0,i) MUL  x[i] (from N border) * w[i] (constant on S)  -> S
//   (1,i) ADD  product (N) + partial sum (W; bias constant at i = 0) -> E,
//         and route S -> N to carry w[i] up
//   (r,i) r >= 2: route S -> N (w[i] enters at the south border)
//   (1,j) j >= 8: route W -> E, the result leaves at the east border.
// K_AXPY and K_BRANCH use only the north and west perimeter, so they run on any array of
// at least 4 x 4 cells. Input and output port numbers follow
// dfe_pkg::border_port.
package dfe_tb_pkg;
  import dfe_pkg::*;

  typedef enum int {K_AXPY = 0, K_BRANCH = 1} kernel_e;

  function automatic cell_cfg_t mk(op_e op, dir_e a, dir_e b, dir_e s,
                                   out_src_e on, out_src_e oe, out_src_e os, out_src_e ow,
                                   logic [3:0] cst);
    cell_cfg_t c;
    c = '0;
    c.op = op; c.src_a = a; c.src_b = b; c.src_s = s;
    c.out_src[DIR_N] = on; c.out_src[DIR_E] = oe; c.out_src[DIR_S] = os; c.out_src[DIR_W] = ow;
    c.const_en = cst;
    return c;
  endfunction

  localparam logic [3:0] CN = 4'b0001, CE = 4'b0010, CS = 4'b0100, CW = 4'b1000, C0 = 4'b0000;

  function automatic cell_cfg_t kernel_cell(kernel_e k, int r, int c);
    if (k == K_AXPY) begin
      if (r == 0 && c == 0) return mk(OP_MUL, DIR_W, DIR_N, DIR_N, OUT_OFF, OUT_FU, OUT_OFF, OUT_OFF, CN);
      if (r == 0 && c == 1) return mk(OP_ADD, DIR_N, DIR_W, DIR_N, OUT_OFF, OUT_FU, OUT_OFF, OUT_OFF, C0);
      if (r == 0 && c == 2) return mk(OP_ADD, DIR_W, DIR_N, DIR_N, OUT_FU, OUT_OFF, OUT_OFF, OUT_OFF, CN);
      return '0;
    end
    case ({r[3:0], c[3:0]})
      8'h00: return mk(OP_MUL,  DIR_W, DIR_N, DIR_N, OUT_OFF, OUT_FU,   OUT_IN_W, OUT_OFF,  CN);
      8'h01: return mk(OP_ADD,  DIR_N, DIR_W, DIR_N, OUT_OFF, OUT_FU,   OUT_IN_N, OUT_OFF,  C0);
      8'h02: return mk(OP_ADD,  DIR_W, DIR_N, DIR_N, OUT_OFF, OUT_OFF,  OUT_FU,   OUT_OFF,  CN);
      8'h03: return mk(OP_NONE, DIR_N, DIR_N, DIR_N, OUT_OFF, OUT_OFF,  OUT_IN_N, OUT_OFF,  C0);
      8'h10: return mk(OP_MUL,  DIR_N, DIR_W, DIR_N, OUT_OFF, OUT_FU,   OUT_IN_N, OUT_OFF,  CW);
      8'h11: return mk(OP_ADD,  DIR_N, DIR_W, DIR_N, OUT_OFF, OUT_FU,   OUT_OFF,  OUT_OFF,  C0);
      8'h12: return mk(OP_ADD,  DIR_W, DIR_E, DIR_N, OUT_OFF, OUT_FU,   OUT_IN_N, OUT_OFF,  CE);
      8'h13: return mk(OP_NONE, DIR_N, DIR_N, DIR_N, OUT_OFF, OUT_OFF,  OUT_IN_W, OUT_IN_N, C0);
      8'h20: return mk(OP_GT,   DIR_W, DIR_N, DIR_N, OUT_OFF, OUT_FU,   OUT_OFF,  OUT_OFF,  C0);
      8'h21: return mk(OP_NONE, DIR_N, DIR_N, DIR_N, OUT_OFF, OUT_IN_W, OUT_IN_E, OUT_OFF,  C0);
      8'h22: return mk(OP_SEL,  DIR_N, DIR_E, DIR_W, OUT_OFF, OUT_OFF,  OUT_OFF,  OUT_FU,   C0);
      8'h23: return mk(OP_NONE, DIR_N, DIR_N, DIR_N, OUT_OFF, OUT_OFF,  OUT_OFF,  OUT_IN_N, C0);
      8'h30: return mk(OP_NONE, DIR_N, DIR_N, DIR_N, OUT_OFF, OUT_OFF,  OUT_OFF,  OUT_IN_E, C0);
      8'h31: return mk(OP_NONE, DIR_N, DIR_N, DIR_N, OUT_OFF, OUT_OFF,  OUT_OFF,  OUT_IN_N, C0);
      default: return '0;
    endcase
  endfunction

  localparam int FIR_TAPS = 8;

  function automatic cell_cfg_t fir_cell(int rows, int cols, int r, int c);
    if (c < FIR_TAPS) begin
      if (r == 0) return mk(OP_MUL, DIR_N, DIR_S, DIR_N, OUT_OFF, OUT_OFF, OUT_FU, OUT_OFF, CS);
      if (r == 1) return mk(OP_ADD, DIR_N, DIR_W, DIR_N, OUT_IN_S, OUT_FU, OUT_OFF, OUT_OFF,
                            (c == 0) ? CW : C0);
      return mk(OP_NONE, DIR_N, DIR_N, DIR_N, OUT_IN_S, OUT_OFF, OUT_OFF, OUT_OFF, C0);
    end
    if (r == 1) return mk(OP_NONE, DIR_N, DIR_N, DIR_N, OUT_OFF, OUT_IN_W, OUT_OFF, OUT_OFF, C0);
    return '0;
  endfunction

  // Constants: perimeter input and value, sent once after a configuration.
  typedef struct { dir_e side; int pos; data_t value; } const_t;

  function automatic int n_consts(kernel_e k);
    return (k == K_AXPY) ? 2 : 4;
  endfunction

  function automatic const_t kernel_const(kernel_e k, int i);
    const_t t;
    case (i)
      0: t = '{DIR_N, 0, 3};
      1: t = '{DIR_N, 2, 1};
      2: t = '{DIR_N, 3, -2};
      default: t = '{DIR_W, 1, -5};
    endcase
    return t;
  endfunction

  // Per element: A goes to N1 (and W2 for K_BRANCH), B to W0.
  function automatic int port_a(kernel_e k, int rows, int cols, int copy);
    if (copy == 0) return border_port(rows, cols, DIR_N, 1);
    return border_port(rows, cols, DIR_W, 2);
  endfunction
  function automatic int n_a_copies(kernel_e k);
    return (k == K_AXPY) ? 1 : 2;
  endfunction
  function automatic int port_b(int rows, int cols);
    return border_port(rows, cols, DIR_W, 0);
  endfunction
  function automatic int port_out(kernel_e k, int rows, int cols);
    return (k == K_AXPY) ? border_port(rows, cols, DIR_N, 2) : border_port(rows, cols, DIR_W, 3);
  endfunction

  // Reference results, 32-bit wrapping signed arithmetic, written in 64 bits.
  function automatic data_t ref_result(kernel_e k, data_t a, data_t b);
    longint la = longint'(a), lb = longint'(b);
    if (k == K_AXPY || la > lb) return data_t'(la + 3 * lb + 1);
    return data_t'(la - 5 * lb - 2);
  endfunction
endpackage
