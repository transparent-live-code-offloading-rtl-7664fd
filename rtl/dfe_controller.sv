// dfe_controller -- finite state machine that switches the DFE configuration
// and resets the DFE.
//
// Commands (one-cycle pulses from the host register interface):
//   cmd_configure  clear the mesh, then copy all NCELL words of the
//                  configuration memory into the cells, then run;
//   cmd_reset      clear the mesh (all tokens and constants dropped), keep
//                  the configuration, then run.
// A command that arrives while the controller is busy is ignored.
//
// Timing of a configuration: one CLEAR cycle, then NCELL LOAD cycles that
// each issue one memory read, then one LAST cycle for the final read data;
// the cell write for address k happens the cycle after its read. busy is
// high for NCELL + 2 cycles from the cycle after cmd_configure, and
// dfe_clear is high during all of them, so no token moves while the mesh
// changes. A reset keeps busy and dfe_clear high for one cycle.
// configured goes high at the end of the first configuration.
//
// The paper says only that configuration switch and reset are done by a
// simple finite state machine; the states and timing are this design's.
module dfe_controller
  import dfe_pkg::*;
#(
  parameter int unsigned NCELL = 324,
  localparam int unsigned CAW  = (NCELL > 1) ? $clog2(NCELL) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            cmd_configure,
  input  logic            cmd_reset,
  output logic            busy,
  output logic            configured,
  // configuration memory read port
  output logic            mem_rd_en,
  output logic [CAW-1:0]  mem_rd_addr,
  input  logic [31:0]     mem_rd_data,
  // DFE configuration bus and clear
  output logic            dfe_clear,
  output logic            cfg_we,
  output logic [CAW-1:0]  cfg_addr,
  output cell_cfg_t       cfg_data
);
  typedef enum logic [1:0] {
    ST_RUN   = 2'd0,
    ST_CLEAR = 2'd1,
    ST_LOAD  = 2'd2,
    ST_LAST  = 2'd3
  } state_e;

  state_e         state;
  logic [CAW-1:0] idx;
  logic           loading;   // this configuration also loads the cells
  logic           rd_pending;
  logic [CAW-1:0] rd_addr_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= ST_RUN;
      idx        <= '0;
      loading    <= 1'b0;
      configured <= 1'b0;
      rd_pending <= 1'b0;
      rd_addr_q  <= '0;
    end else begin
      rd_pending <= mem_rd_en;
      rd_addr_q  <= mem_rd_addr;
      unique case (state)
        ST_RUN: begin
          if (cmd_configure) begin
            state   <= ST_CLEAR;
            loading <= 1'b1;
          end else if (cmd_reset) begin
            state   <= ST_CLEAR;
            loading <= 1'b0;
          end
        end
        ST_CLEAR: begin
          idx   <= '0;
          state <= loading ? ST_LOAD : ST_RUN;
        end
        ST_LOAD: begin
          idx <= idx + 1'b1;
          if (32'(idx) == NCELL - 1) state <= ST_LAST;
        end
        ST_LAST: begin
          state      <= ST_RUN;
          configured <= 1'b1;
        end
        default: state <= ST_RUN;
      endcase
    end
  end

  assign busy        = (state != ST_RUN);
  assign dfe_clear   = busy;
  assign mem_rd_en   = (state == ST_LOAD);
  assign mem_rd_addr = idx;
  assign cfg_we      = rd_pending;
  assign cfg_addr    = rd_addr_q;
  assign cfg_data    = cell_cfg_t'(mem_rd_data[CFG_W-1:0]);

  logic unused_ok;
  assign unused_ok = &{1'b0, mem_rd_data[31:CFG_W]};

`ifndef SYNTHESIS
  a_we_only_busy: assert property (@(posedge clk) disable iff (!rst_n)
    cfg_we |-> dfe_clear);
`endif
endmodule
