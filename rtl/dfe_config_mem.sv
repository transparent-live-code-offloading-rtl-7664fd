// dfe_config_mem -- configuration memory of the DFE ("Memory config." in the
// prototype's block diagram).
//
// Holds one 32-bit word per cell, at address r*COLS + c; the low
// dfe_pkg::CFG_W bits are the cell's cell_cfg_t. The host writes it through
// wr_en/wr_addr/wr_data at any time; the DFE controller reads it back one
// word per cycle when it (re)configures the mesh. Read latency is one cycle
// (rd_en at cycle t, rd_data valid at t+1), which maps onto FPGA block RAM.
// The memory is not reset: the host writes every word it needs before
// asking for a configuration.
// The paper only names this block; its organisation is this design's.
module dfe_config_mem #(
  parameter int unsigned DEPTH = 324,        // cells of an 18 x 18 DFE
  parameter int unsigned WIDTH = 32,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             wr_en,
  input  logic [AW-1:0]    wr_addr,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             rd_en,
  input  logic [AW-1:0]    rd_addr,
  output logic [WIDTH-1:0] rd_data
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en && (32'(wr_addr) < DEPTH)) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
