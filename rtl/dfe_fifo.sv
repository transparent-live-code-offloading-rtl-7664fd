// dfe_fifo -- synchronous first-in first-out buffer with valid/ready ports.
//
// Used for the two host data FIFOs of the prototype (between the PCIe core
// and the Data Tx / Data Rx engines), for the buffers behind every DFE
// output and for the per-port buffers of Data Tx.
//
// A word is written when in_valid && in_ready and read when
// out_valid && out_ready. in_ready (not full) and out_valid (not empty) come
// straight from registers, so no combinational path runs through the FIFO:
// this is what keeps the mesh of cells free of long ready chains. A full
// FIFO does not accept a write even if it is read in the same cycle. With
// DEPTH >= 2 a stream passes at one word per cycle; write-to-read latency
// is one cycle. clear empties the FIFO synchronously.
// The FIFO structure is this design's own; the paper only names the FIFOs.
module dfe_fifo #(
  parameter int unsigned WIDTH = 128,
  parameter int unsigned DEPTH = 512
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CW = $clog2(DEPTH+1);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;
  logic             push, pop;

  assign in_ready  = (count != CW'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rd_ptr];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  function automatic logic [AW-1:0] next_ptr(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else if (clear) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= next_ptr(wr_ptr);
      if (pop)  rd_ptr <= next_ptr(rd_ptr);
      count <= count + CW'(push) - CW'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

`ifndef SYNTHESIS
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    32'(count) <= DEPTH);
`endif
endmodule
