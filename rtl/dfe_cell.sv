// dfe_cell -- one cell of the data-flow engine overlay.
//
// A cell has an input and an output on each of its four sides (N, E, S, W)
// and a functional unit (dfe_fu) in its centre. Its 26-bit configuration
// (dfe_pkg::cell_cfg_t) says:
//   * which input feeds each of the FU's three inputs (input 1, input 2 and
//     the selection input, the last used only by the MUX operation);
//   * what drives each output: nothing, the FU result, or one of the three
//     inputs on the other sides (an input never turns back out of the side
//     it came in on);
//   * which inputs are constants. A constant input keeps the first token that
//     reaches it and from then on offers that value to the FU on every
//     firing without consuming anything; this is the "masking" of the
//     input's handshake.
// A cell can thus be an operator, a router, or both at once.
//
// Data flow is elastic. Every output has a small FIFO (dfe_fifo, depth
// OUT_DEPTH) whose registered "not full" and "not empty" flags are the only
// signals a neighbour sees, so no combinational path crosses more than one
// cell boundary. An input token that feeds several consumers (outputs and/or
// the FU) is taken only when all of them can take it in the same cycle
// (lazy fork). The FU fires when every operand it uses is valid and every
// other consumer of those operands is ready (join). An input with no
// consumer is never taken. Latency: one cycle through a routing path (output
// FIFO), two cycles through the FU (FU register, then output FIFO).
//
// Configuration: cfg_we loads cfg_data into the configuration register.
// clear empties all FIFOs, the FU register and the constants, and keeps the
// configuration. rst_n resets everything, configuration included (cell off).
//
// The paper gives the cell's structure (four inputs, four outputs, FU with
// two operands and a selection input, any input to any FU operand, any
// other input or the FU to any output, inputs turned into constants by
// masking one signal) and says the overlay is fully pipelined. The FIFO
// depth, lazy fork and the encoding are this design's choices.
module dfe_cell
  import dfe_pkg::*;
#(
  parameter int unsigned OUT_DEPTH = 2
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      clear,
  input  logic      cfg_we,
  input  cell_cfg_t cfg_data,
  input  token_t    in_tok   [4],
  output logic      in_ready [4],
  output token_t    out_tok  [4],
  input  logic      out_ready[4]
);
  cell_cfg_t cfg;

  // constant registers, one per input side
  logic  const_loaded [4];
  data_t const_val    [4];

  logic  eff_valid [4];   // input as seen by the consumers
  data_t eff_data  [4];
  logic  capture   [4];   // a constant input takes its value
  logic  fu_uses   [4];
  logic  out_ok    [4];   // all outputs routing this input can accept
  logic  has_cons  [4];
  logic  pop       [4];

  logic  fu_in_ready, fu_fire, fu_out_valid, fu_pop;
  data_t fu_out_data;
  logic  fifo_in_ready [4];
  logic  fifo_push     [4];
  data_t fifo_in_data  [4];
  logic  fu_active, fu_ops_ok, fu_has_cons, fu_cons_ok;

  // Output o routes input side d.
  function automatic logic routes(out_src_e [3:0] src, int o, int d);
    return (o != d) && (src[o] == out_src_e'({1'b1, 2'(d)}));
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      cfg <= '0;
    else if (cfg_we) cfg <= cfg_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int d = 0; d < 4; d++) begin
        const_loaded[d] <= 1'b0;
        const_val[d]    <= '0;
      end
    end else if (clear || cfg_we) begin
      for (int d = 0; d < 4; d++) const_loaded[d] <= 1'b0;
    end else begin
      for (int d = 0; d < 4; d++)
        if (capture[d]) begin
          const_loaded[d] <= 1'b1;
          const_val[d]    <= in_tok[d].data;
        end
    end
  end

  assign fu_active = (cfg.op != OP_NONE);

  always_comb begin
    for (int d = 0; d < 4; d++) begin
      eff_valid[d] = cfg.const_en[d] ? const_loaded[d] : in_tok[d].valid;
      eff_data[d]  = cfg.const_en[d] ? const_val[d]    : in_tok[d].data;
      capture[d]   = cfg.const_en[d] && !const_loaded[d] && in_tok[d].valid;
      fu_uses[d]   = fu_active && ((cfg.src_a == dir_e'(d)) || (cfg.src_b == dir_e'(d)) ||
                                   ((cfg.op == OP_SEL) && (cfg.src_s == dir_e'(d))));
      out_ok[d]    = 1'b1;
      has_cons[d]  = fu_uses[d];
      for (int o = 0; o < 4; o++)
        if (!cfg.const_en[d] && routes(cfg.out_src, o, d)) begin
          out_ok[d]   = out_ok[d] && fifo_in_ready[o];
          has_cons[d] = 1'b1;
        end
    end

  end

  // fork of the FU result
  always_comb begin
    fu_has_cons = 1'b0;
    fu_cons_ok  = 1'b1;
    for (int o = 0; o < 4; o++)
      if (cfg.out_src[o] == OUT_FU) begin
        fu_has_cons = 1'b1;
        fu_cons_ok  = fu_cons_ok && fifo_in_ready[o];
      end
    fu_pop = fu_out_valid && fu_has_cons && fu_cons_ok;
  end

  always_comb begin
    // join: all FU operands present, and their other consumers ready
    fu_ops_ok = 1'b1;
    for (int d = 0; d < 4; d++)
      if (fu_uses[d]) fu_ops_ok = fu_ops_ok && eff_valid[d] && out_ok[d];
    fu_fire = fu_active && fu_ops_ok && fu_in_ready;

    // lazy fork of each non-constant input
    for (int d = 0; d < 4; d++) begin
      if (cfg.const_en[d])
        pop[d] = 1'b0;
      else
        pop[d] = in_tok[d].valid && has_cons[d] && out_ok[d] && (!fu_uses[d] || fu_fire);
      in_ready[d] = pop[d] || capture[d];
    end

  end

  always_comb begin
    for (int o = 0; o < 4; o++) begin
      fifo_push[o]    = 1'b0;
      fifo_in_data[o] = fu_out_data;
      if (cfg.out_src[o] == OUT_FU) begin
        fifo_push[o] = fu_pop;
      end else begin
        for (int d = 0; d < 4; d++)
          if (!cfg.const_en[d] && routes(cfg.out_src, o, d)) begin
            fifo_push[o]    = pop[d];
            fifo_in_data[o] = in_tok[d].data;
          end
      end
    end
  end

  dfe_fu u_fu (
    .clk       (clk),
    .rst_n     (rst_n),
    .clear     (clear || cfg_we),
    .op        (cfg.op),
    .in_valid  (fu_fire),
    .in_ready  (fu_in_ready),
    .a         (eff_data[cfg.src_a]),
    .b         (eff_data[cfg.src_b]),
    .s         (eff_data[cfg.src_s]),
    .out_valid (fu_out_valid),
    .out_ready (fu_pop),
    .out_data  (fu_out_data)
  );

  for (genvar o = 0; o < 4; o++) begin : g_out
    logic fifo_out_valid;
    data_t fifo_out_data;
    dfe_fifo #(.WIDTH(DATA_W), .DEPTH(OUT_DEPTH)) u_obuf (
      .clk       (clk),
      .rst_n     (rst_n),
      .clear     (clear || cfg_we),
      .in_valid  (fifo_push[o]),
      .in_ready  (fifo_in_ready[o]),
      .in_data   (fifo_in_data[o]),
      .out_valid (fifo_out_valid),
      .out_ready (out_ready[o]),
      .out_data  (fifo_out_data),
      .count     ()
    );
    assign out_tok[o].valid = fifo_out_valid;
    assign out_tok[o].data  = fifo_out_data;
  end

`ifndef SYNTHESIS
  // a push is only ever made into an output FIFO that has room
  for (genvar o = 0; o < 4; o++) begin : g_chk
    a_push_room: assert property (@(posedge clk) disable iff (!rst_n)
      fifo_push[o] |-> fifo_in_ready[o]);
  end
`endif
endmodule
