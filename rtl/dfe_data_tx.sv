// dfe_data_tx -- "Data Tx": delivers tagged host data to the DFE inputs.
//
// Each host word is PKT_W = 128 bits and carries one 32-bit datum in bits
// [31:0] and, in bits [TAG_LSB+TAG_W-1:TAG_LSB] = [47:32], a tag naming the
// destination perimeter input (numbering of dfe_pkg::border_port); the rest
// of the word is ignored. This is the simple tag-per-datum protocol of the
// prototype: 128 bits travel for each 32 bits of payload.
//
// A small FIFO (PORT_DEPTH words) sits in front of every perimeter input,
// so that the host can interleave the operands of one kernel in any order
// without a waiting operand blocking the one it waits for. A host word is
// taken (pkt_ready) when the FIFO of its port has room; its datum can enter
// the DFE on the next cycle. A word whose tag is not a perimeter input is
// dropped and sets the sticky tag_error flag (cleared by clear).
// Throughput: one host word per cycle.
//
// The tag itself is the paper's; its position and width, the per-port
// FIFOs and the handling of bad tags are this design's choices.
module dfe_data_tx
  import dfe_pkg::*;
#(
  parameter int unsigned NPORT      = 72,
  parameter int unsigned PORT_DEPTH = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             pkt_valid,
  output logic             pkt_ready,
  input  logic [PKT_W-1:0] pkt_data,
  output token_t           bin_tok  [NPORT],
  input  logic             bin_ready[NPORT],
  output logic             tag_error
);
  logic [TAG_W-1:0] tag;
  logic             tag_ok;
  logic             port_in_ready[NPORT];

  assign tag    = pkt_data[TAG_LSB +: TAG_W];
  assign tag_ok = (32'(tag) < NPORT);

  always_comb begin
    pkt_ready = 1'b1;                 // bad tags are dropped at once
    for (int p = 0; p < NPORT; p++)
      if (tag_ok && (32'(tag) == p)) pkt_ready = port_in_ready[p];
  end

  for (genvar p = 0; p < NPORT; p++) begin : g_port
    logic  fifo_out_valid;
    data_t fifo_out_data;
    dfe_fifo #(.WIDTH(DATA_W), .DEPTH(PORT_DEPTH)) u_pbuf (
      .clk       (clk),
      .rst_n     (rst_n),
      .clear     (clear),
      .in_valid  (pkt_valid && tag_ok && (32'(tag) == p)),
      .in_ready  (port_in_ready[p]),
      .in_data   (pkt_data[DATA_W-1:0]),
      .out_valid (fifo_out_valid),
      .out_ready (bin_ready[p]),
      .out_data  (fifo_out_data),
      .count     ()
    );
    assign bin_tok[p].valid = fifo_out_valid;
    assign bin_tok[p].data  = fifo_out_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                       tag_error <= 1'b0;
    else if (clear)                   tag_error <= 1'b0;
    else if (pkt_valid && !tag_ok)    tag_error <= 1'b1;
  end

  logic unused_ok;
  assign unused_ok = &{1'b0, pkt_data[PKT_W-1:TAG_LSB+TAG_W]};
endmodule
