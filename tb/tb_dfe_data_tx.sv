// tb_dfe_data_tx -- self-checking testbench of Data Tx.
// Sends random tagged words (including bad tags) while the port sinks take
// data at random. Checks that each datum leaves on the port its tag names,
// in order per port, that a full port stalls the host stream, and that bad
// tags are dropped and flagged.
module tb_dfe_data_tx;
  import dfe_pkg::*;
  localparam int NP = 6;
  logic clk = 0, rst_n = 0, clear = 0;
  logic pkt_valid, pkt_ready, tag_error;
  logic [PKT_W-1:0] pkt_data;
  token_t bin_tok[NP];
  logic bin_ready[NP];
  data_t model[NP][$];
  int checks = 0, failures = 0, stalls = 0, bad = 0;

  always #5 clk = ~clk;
  dfe_data_tx #(.NPORT(NP), .PORT_DEPTH(2)) dut (.*);

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // port sinks
  always @(posedge clk) if (rst_n)
    for (int p = 0; p < NP; p++)
      if (bin_tok[p].valid && bin_ready[p]) begin
        check(model[p].size() > 0 && bin_tok[p].data == model[p][0],
              $sformatf("port %0d datum", p));
        if (model[p].size() > 0) void'(model[p].pop_front());
      end

  initial begin
    int n;
    pkt_valid = 0; pkt_data = 0;
    for (int p = 0; p < NP; p++) bin_ready[p] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    n = 0;
    while (n < 800) begin
      int tag;
      tag = (n % 50 == 49) ? NP + 3 : $urandom % NP;
      pkt_data = '0;
      pkt_data[31:0] = $urandom;
      pkt_data[TAG_LSB +: TAG_W] = TAG_W'(tag);
      pkt_data[PKT_W-1 -: 8] = 8'hA5;       // ignored high bits
      pkt_valid = 1;
      for (int p = 0; p < NP; p++) bin_ready[p] = ($urandom % 3) == 0;
      @(posedge clk);
      if (pkt_ready) begin
        if (tag < NP) model[tag].push_back(data_t'(pkt_data[31:0]));
        else bad++;
        n++;
      end else begin
        stalls++;
        check(tag < NP, "only a full port stalls");
      end
      #1;
      if (tag >= NP) check(tag_error, "bad tag flagged");
    end
    pkt_valid = 0;
    for (int p = 0; p < NP; p++) bin_ready[p] = 1;
    repeat (10) @(posedge clk);
    for (int p = 0; p < NP; p++) check(model[p].size() == 0, "every datum delivered");
    check(stalls > 0, "stall exercised");
    check(bad > 0, "bad tag exercised");
    clear = 1; @(posedge clk); #1; clear = 0;
    check(!tag_error, "clear resets tag_error");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
