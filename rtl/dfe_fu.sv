// dfe_fu -- functional unit of a DFE cell.
//
// Computes one operation of the configured kind (dfe_pkg::op_e) on the
// operand tokens a, b and s and holds the result in an output register, so
// that every cell adds one pipeline stage on the path through its FU.
// Operations: add, sub, mul (32-bit signed, product truncated to 32 bits),
// the six signed comparisons (result 1 or 0) and SEL, a MUX returning a when
// s is non-zero and b otherwise. There is no division or remainder.
//
// Handshake: the cell joins the operand tokens itself and pulses in_valid
// when all operands are present; in_ready = result register empty or being
// read this cycle. A result appears on out_valid one cycle after it is
// accepted. Latency 1, one result per cycle.
// The paper gives the operation set (arithmetic of the original overlay,
// plus comparisons and MUX nodes, no division); the encoding, the operand
// order of SEL and the one-stage pipeline are this design's choices.
module dfe_fu
  import dfe_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clear,
  input  op_e   op,
  input  logic  in_valid,
  output logic  in_ready,
  input  data_t a,
  input  data_t b,
  input  data_t s,
  output logic  out_valid,
  input  logic  out_ready,
  output data_t out_data
);
  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else if (clear) begin
      out_valid <= 1'b0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) out_data <= fu_compute(op, a, b, s);
    end
  end
endmodule
