// dfe_data_rx -- "Data Rx": collects DFE results and tags them with their
// source for the host.
//
// Every perimeter output of the DFE may hold a result. A round-robin
// arbiter picks one valid output per cycle, starting its search at the
// port after the one last served, and forms a PKT_W = 128-bit host word:
// datum in bits [31:0], source port number (dfe_pkg::border_port) in bits
// [47:32], zeros above. The word is offered on pkt_valid/pkt_data and the
// chosen output is taken in the same cycle pkt_ready is high, so results
// leave at up to one per cycle and no port waits more than NPORT-1 grants.
// The word and the grant are combinational from registered inputs; the
// host data FIFO behind this block registers them.
//
// The tag is the paper's; arbitration and word layout are this design's.
module dfe_data_rx
  import dfe_pkg::*;
#(
  parameter int unsigned NPORT = 72,
  localparam int unsigned PW   = (NPORT > 1) ? $clog2(NPORT) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  token_t           bout_tok  [NPORT],
  output logic             bout_ready[NPORT],
  output logic             pkt_valid,
  input  logic             pkt_ready,
  output logic [PKT_W-1:0] pkt_data
);
  logic [PW-1:0] last;     // port served most recently
  logic [PW-1:0] grant;
  logic          found;

  always_comb begin
    found = 1'b0;
    grant = '0;
    for (int i = 1; i <= NPORT; i++) begin
      logic [PW-1:0] p;
      p = PW'((32'(last) + i) % NPORT);
      if (!found && bout_tok[p].valid) begin
        found = 1'b1;
        grant = p;
      end
    end
    pkt_valid = found;
    pkt_data  = '0;
    pkt_data[DATA_W-1:0]      = bout_tok[grant].data;
    pkt_data[TAG_LSB +: TAG_W] = TAG_W'(grant);
    for (int p = 0; p < NPORT; p++)
      bout_ready[p] = found && pkt_ready && (grant == PW'(p));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                      last <= PW'(NPORT - 1);
    else if (clear)                  last <= PW'(NPORT - 1);
    else if (found && pkt_ready)     last <= grant;
  end
endmodule
