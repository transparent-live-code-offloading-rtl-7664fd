// dfe_array -- the data-flow engine (DFE): a ROWS x COLS mesh of dfe_cell.
//
// Neighbouring cells are joined point to point (Manhattan topology): the
// east output of cell (r,c) drives the west input of cell (r,c+1), the
// south output of (r,c) the north input of (r+1,c), and the other way
// round. There are no routing nodes besides the cells themselves. The
// sides of the cells on the edge form the perimeter I/O: one input and one
// output per cell side on the border, 2*(ROWS+COLS) of each, numbered as in
// dfe_pkg::border_port (north by column, then east by row, south by column,
// west by row). Row 0 is the north edge, column 0 the west edge.
//
// Configuration: cfg_we with cfg_addr = r*COLS + c loads cell (r,c).
// clear empties every buffer of the mesh and keeps the configuration.
// Each hop through a routing cell costs one cycle, each FU two.
//
// Follows the paper: parametric mesh of identical cells, perimeter I/O,
// default size 18 x 18 (the array built on the prototype's Virtex-7
// xc7vx485t). Port numbering and addressing are this design's choices.
module dfe_array
  import dfe_pkg::*;
#(
  parameter int unsigned ROWS      = 18,
  parameter int unsigned COLS      = 18,
  parameter int unsigned OUT_DEPTH = 2,
  localparam int unsigned NPORT    = 2 * (ROWS + COLS),
  localparam int unsigned NCELL    = ROWS * COLS,
  localparam int unsigned CAW      = (NCELL > 1) ? $clog2(NCELL) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           clear,
  input  logic           cfg_we,
  input  logic [CAW-1:0] cfg_addr,
  input  cell_cfg_t      cfg_data,
  input  token_t         bin_tok   [NPORT],
  output logic           bin_ready [NPORT],
  output token_t         bout_tok  [NPORT],
  input  logic           bout_ready[NPORT]
);
  token_t c_in_tok   [ROWS][COLS][4];
  logic   c_in_ready [ROWS][COLS][4];
  token_t c_out_tok  [ROWS][COLS][4];
  logic   c_out_ready[ROWS][COLS][4];

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      localparam int unsigned PN = border_port(ROWS, COLS, DIR_N, c);
      localparam int unsigned PE = border_port(ROWS, COLS, DIR_E, r);
      localparam int unsigned PS = border_port(ROWS, COLS, DIR_S, c);
      localparam int unsigned PW = border_port(ROWS, COLS, DIR_W, r);

      dfe_cell #(.OUT_DEPTH(OUT_DEPTH)) u_cell (
        .clk       (clk),
        .rst_n     (rst_n),
        .clear     (clear),
        .cfg_we    (cfg_we && (cfg_addr == CAW'(r * COLS + c))),
        .cfg_data  (cfg_data),
        .in_tok    (c_in_tok[r][c]),
        .in_ready  (c_in_ready[r][c]),
        .out_tok   (c_out_tok[r][c]),
        .out_ready (c_out_ready[r][c])
      );

      // north side
      if (r == 0) begin : g_n_edge
        assign c_in_tok[r][c][DIR_N]    = bin_tok[PN];
        assign bin_ready[PN]            = c_in_ready[r][c][DIR_N];
        assign bout_tok[PN]             = c_out_tok[r][c][DIR_N];
        assign c_out_ready[r][c][DIR_N] = bout_ready[PN];
      end else begin : g_n_link
        assign c_in_tok[r][c][DIR_N]    = c_out_tok[r-1][c][DIR_S];
        assign c_out_ready[r][c][DIR_N] = c_in_ready[r-1][c][DIR_S];
      end
      // south side
      if (r == ROWS - 1) begin : g_s_edge
        assign c_in_tok[r][c][DIR_S]    = bin_tok[PS];
        assign bin_ready[PS]            = c_in_ready[r][c][DIR_S];
        assign bout_tok[PS]             = c_out_tok[r][c][DIR_S];
        assign c_out_ready[r][c][DIR_S] = bout_ready[PS];
      end else begin : g_s_link
        assign c_in_tok[r][c][DIR_S]    = c_out_tok[r+1][c][DIR_N];
        assign c_out_ready[r][c][DIR_S] = c_in_ready[r+1][c][DIR_N];
      end
      // west side
      if (c == 0) begin : g_w_edge
        assign c_in_tok[r][c][DIR_W]    = bin_tok[PW];
        assign bin_ready[PW]            = c_in_ready[r][c][DIR_W];
        assign bout_tok[PW]             = c_out_tok[r][c][DIR_W];
        assign c_out_ready[r][c][DIR_W] = bout_ready[PW];
      end else begin : g_w_link
        assign c_in_tok[r][c][DIR_W]    = c_out_tok[r][c-1][DIR_E];
        assign c_out_ready[r][c][DIR_W] = c_in_ready[r][c-1][DIR_E];
      end
      // east side
      if (c == COLS - 1) begin : g_e_edge
        assign c_in_tok[r][c][DIR_E]    = bin_tok[PE];
        assign bin_ready[PE]            = c_in_ready[r][c][DIR_E];
        assign bout_tok[PE]             = c_out_tok[r][c][DIR_E];
        assign c_out_ready[r][c][DIR_E] = bout_ready[PE];
      end else begin : g_e_link
        assign c_in_tok[r][c][DIR_E]    = c_out_tok[r][c+1][DIR_W];
        assign c_out_ready[r][c][DIR_E] = c_in_ready[r][c+1][DIR_W];
      end
    end
  end
endmodule
