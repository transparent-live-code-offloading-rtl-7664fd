// dfe_top -- FPGA side of the live code off-loading prototype: the DFE
// overlay with its configuration and data paths, as seen from the PCIe core.
//
//   host register writes --> dfe_config_mem --> dfe_controller --> DFE config
//   host commands ---------------------------> dfe_controller --> DFE clear
//   host data in  --> data FIFO --> dfe_data_tx --> DFE perimeter inputs
//   host data out <-- data FIFO <-- dfe_data_rx <-- DFE perimeter outputs
//
// The PCIe endpoint and its DMA engine are not part of this RTL; their side
// is brought out as plain ports:
//   cfg_wr_*      write the configuration word of cell r*COLS+c;
//   cmd_configure load the whole configuration into the DFE (clears it);
//   cmd_reset     clear the DFE, keep the configuration;
//   h2d_*         128-bit host-to-DFE words: datum [31:0], destination
//                 perimeter input [47:32];
//   d2h_*         128-bit DFE-to-host words: datum [31:0], source perimeter
//                 output [47:32];
//   busy/configured/tag_error  status.
// The host should send data only when busy is low; data it sends while the
// DFE is being configured waits in the input FIFO.
// A clear also empties the Data Tx port buffers and the Data Rx arbiter
// state, but not the two host FIFOs.
//
// Follows the paper's block diagram (PCIe, memory config, DFE controller,
// data FIFO + Data Tx, Data Rx + data FIFO, DFE) and its 128-bit tagged
// word per 32-bit datum. FIFO depths and port layout are this design's.
module dfe_top
  import dfe_pkg::*;
#(
  parameter int unsigned ROWS       = 18,
  parameter int unsigned COLS       = 18,
  parameter int unsigned FIFO_DEPTH = 512,
  parameter int unsigned OUT_DEPTH  = 2,
  parameter int unsigned PORT_DEPTH = 2,
  localparam int unsigned NCELL     = ROWS * COLS,
  localparam int unsigned NPORT     = 2 * (ROWS + COLS),
  localparam int unsigned CAW       = (NCELL > 1) ? $clog2(NCELL) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // configuration and control
  input  logic             cfg_wr_en,
  input  logic [CAW-1:0]   cfg_wr_addr,
  input  logic [31:0]      cfg_wr_data,
  input  logic             cmd_configure,
  input  logic             cmd_reset,
  output logic             busy,
  output logic             configured,
  output logic             tag_error,
  // host to DFE data
  input  logic             h2d_valid,
  output logic             h2d_ready,
  input  logic [PKT_W-1:0] h2d_data,
  // DFE to host data
  output logic             d2h_valid,
  input  logic             d2h_ready,
  output logic [PKT_W-1:0] d2h_data
);
  logic             mem_rd_en;
  logic [CAW-1:0]   mem_rd_addr;
  logic [31:0]      mem_rd_data;
  logic             dfe_clear, cfg_we;
  logic [CAW-1:0]   cfg_addr;
  cell_cfg_t        cfg_data;

  logic             txq_valid, txq_ready;
  logic [PKT_W-1:0] txq_data;
  logic             rxq_valid, rxq_ready;
  logic [PKT_W-1:0] rxq_data;

  token_t           bin_tok   [NPORT];
  logic             bin_ready [NPORT];
  token_t           bout_tok  [NPORT];
  logic             bout_ready[NPORT];

  dfe_config_mem #(.DEPTH(NCELL), .WIDTH(32)) u_cfg_mem (
    .clk     (clk),
    .wr_en   (cfg_wr_en),
    .wr_addr (cfg_wr_addr),
    .wr_data (cfg_wr_data),
    .rd_en   (mem_rd_en),
    .rd_addr (mem_rd_addr),
    .rd_data (mem_rd_data)
  );

  dfe_controller #(.NCELL(NCELL)) u_ctrl (
    .clk           (clk),
    .rst_n         (rst_n),
    .cmd_configure (cmd_configure),
    .cmd_reset     (cmd_reset),
    .busy          (busy),
    .configured    (configured),
    .mem_rd_en     (mem_rd_en),
    .mem_rd_addr   (mem_rd_addr),
    .mem_rd_data   (mem_rd_data),
    .dfe_clear     (dfe_clear),
    .cfg_we        (cfg_we),
    .cfg_addr      (cfg_addr),
    .cfg_data      (cfg_data)
  );

  dfe_fifo #(.WIDTH(PKT_W), .DEPTH(FIFO_DEPTH)) u_h2d_fifo (
    .clk       (clk),
    .rst_n     (rst_n),
    .clear     (1'b0),
    .in_valid  (h2d_valid),
    .in_ready  (h2d_ready),
    .in_data   (h2d_data),
    .out_valid (txq_valid),
    .out_ready (txq_ready && !dfe_clear),
    .out_data  (txq_data),
    .count     ()
  );

  dfe_data_tx #(.NPORT(NPORT), .PORT_DEPTH(PORT_DEPTH)) u_tx (
    .clk       (clk),
    .rst_n     (rst_n),
    .clear     (dfe_clear),
    .pkt_valid (txq_valid && !dfe_clear),
    .pkt_ready (txq_ready),
    .pkt_data  (txq_data),
    .bin_tok   (bin_tok),
    .bin_ready (bin_ready),
    .tag_error (tag_error)
  );

  dfe_array #(.ROWS(ROWS), .COLS(COLS), .OUT_DEPTH(OUT_DEPTH)) u_dfe (
    .clk        (clk),
    .rst_n      (rst_n),
    .clear      (dfe_clear),
    .cfg_we     (cfg_we),
    .cfg_addr   (cfg_addr),
    .cfg_data   (cfg_data),
    .bin_tok    (bin_tok),
    .bin_ready  (bin_ready),
    .bout_tok   (bout_tok),
    .bout_ready (bout_ready)
  );

  dfe_data_rx #(.NPORT(NPORT)) u_rx (
    .clk        (clk),
    .rst_n      (rst_n),
    .clear      (dfe_clear),
    .bout_tok   (bout_tok),
    .bout_ready (bout_ready),
    .pkt_valid  (rxq_valid),
    .pkt_ready  (rxq_ready),
    .pkt_data   (rxq_data)
  );

  dfe_fifo #(.WIDTH(PKT_W), .DEPTH(FIFO_DEPTH)) u_d2h_fifo (
    .clk       (clk),
    .rst_n     (rst_n),
    .clear     (1'b0),
    .in_valid  (rxq_valid),
    .in_ready  (rxq_ready),
    .in_data   (rxq_data),
    .out_valid (d2h_valid),
    .out_ready (d2h_ready),
    .out_data  (d2h_data),
    .count     ()
  );
endmodule
