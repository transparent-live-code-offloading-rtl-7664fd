// tb_dfe_data_rx -- self-checking testbench of Data Rx.
// Random port sources (each keeps its token until taken, as a FIFO does)
// and a random host side. Checks that every word carries the datum of the
// port its tag names, per-port order, one grant per cycle, round-robin
// the round-robin order against a model of its own and the
// zero upper bits.
module tb_dfe_data_rx;
  import dfe_pkg::*;
  localparam int NP = 5;
  logic clk = 0, rst_n = 0, clear = 0;
  token_t bout_tok[NP];
  logic bout_ready[NP];
  logic pkt_valid, pkt_ready;
  logic [PKT_W-1:0] pkt_data;
  int seq[NP];
  int next_exp[NP];
  int last_model = NP - 1;
  logic taken[NP];
  int checks = 0, failures = 0, received = 0, contention = 0;

  always #5 clk = ~clk;
  dfe_data_rx #(.NPORT(NP)) dut (.*);

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

  initial begin
    for (int p = 0; p < NP; p++) begin
      bout_tok[p] = '0; seq[p] = 0; next_exp[p] = 0;
    end
    pkt_ready = 0;
    for (int p = 0; p < NP; p++) taken[p] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      int nvalid, ngrant;
      for (int p = 0; p < NP; p++)
        if (!bout_tok[p].valid && ($urandom % 4) == 0) begin
          bout_tok[p].valid = 1;
          bout_tok[p].data  = data_t'(p * 1000000 + seq[p]);
          seq[p]++;
        end
      pkt_ready = ($urandom % 4) != 0;
      #1;
      nvalid = 0; ngrant = 0;
      for (int p = 0; p < NP; p++) begin
        nvalid += bout_tok[p].valid;
        ngrant += bout_ready[p];
      end
      if (nvalid > 1) contention++;
      check(pkt_valid == (nvalid > 0), "pkt_valid");
      check(ngrant == ((nvalid > 0 && pkt_ready) ? 1 : 0), "one grant per cycle");
      if (pkt_valid && pkt_ready) begin
        int src;
        src = int'(pkt_data[TAG_LSB +: TAG_W]);
        check(src < NP && bout_ready[src], "tag names the granted port");
        check(pkt_data[PKT_W-1:TAG_LSB+TAG_W] == '0, "upper bits zero");
        if (src < NP) begin
          check(pkt_data[31:0] == 32'(src * 1000000 + next_exp[src]), "datum and order");
          next_exp[src]++;
        end
        received++;
        // independent round-robin model: first valid port after the last served
        begin
          int exp_p;
          exp_p = -1;
          for (int i = 1; i <= NP; i++)
            if (exp_p < 0 && bout_tok[(last_model + i) % NP].valid) exp_p = (last_model + i) % NP;
          check(src == exp_p, $sformatf("round-robin grant %0d expected %0d v=%b%b%b%b%b last=%0d/%0d", src, exp_p, bout_tok[0].valid, bout_tok[1].valid, bout_tok[2].valid, bout_tok[3].valid, bout_tok[4].valid, last_model, dut.last));
          last_model = exp_p;
        end
      end
      for (int p = 0; p < NP; p++) taken[p] = bout_ready[p];
      @(negedge clk);
      for (int p = 0; p < NP; p++) if (taken[p]) bout_tok[p].valid = 0;
    end
    check(contention > 0, "contention exercised");
    check(received > 100, "results flowed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
