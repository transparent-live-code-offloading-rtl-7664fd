// tb_dfe_array -- self-checking testbench of the DFE mesh (4 x 5 cells).
// Loads the two hand-placed kernels of dfe_tb_pkg through the configuration
// bus, sends the constants once and then streams of operands into the
// perimeter inputs (each input source keeps its word until taken), with a
// randomly stalling result sink, and compares the results with the
// reference model. Also checks the pipeline latency of K_AXPY (six cycles
// from operands to result: three FU stages of two registers each), that
// a clear between configurations drops the constants and that nothing
// appears on unused outputs.
module tb_dfe_array;
  import dfe_pkg::*;
  import dfe_tb_pkg::*;
  localparam int R = 4, C = 5, NP = 2 * (R + C);
  logic clk = 0, rst_n = 0, clear = 0, cfg_we = 0;
  logic [$clog2(R*C)-1:0] cfg_addr;
  cell_cfg_t cfg_data;
  token_t bin_tok[NP];
  logic bin_ready[NP];
  token_t bout_tok[NP];
  logic bout_ready[NP];
  data_t src_q[NP][$];
  data_t got_q[NP][$];
  int sink_pct = 70;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  dfe_array #(.ROWS(R), .COLS(C)) dut (.*);

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step();
    logic took[NP];
    for (int p = 0; p < NP; p++) begin
      bin_tok[p].valid = src_q[p].size() > 0;
      bin_tok[p].data  = (src_q[p].size() > 0) ? src_q[p][0] : '0;
      bout_ready[p]    = ($urandom % 100) < sink_pct;
    end
    #1;
    for (int p = 0; p < NP; p++) begin
      took[p] = bin_tok[p].valid && bin_ready[p];
      if (bout_tok[p].valid && bout_ready[p]) got_q[p].push_back(bout_tok[p].data);
    end
    @(negedge clk);
    for (int p = 0; p < NP; p++) if (took[p]) void'(src_q[p].pop_front());
  endtask

  task automatic load(kernel_e k);
    clear = 1;
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++) begin
        cfg_we = 1; cfg_addr = $bits(cfg_addr)'(r * C + c); cfg_data = kernel_cell(k, r, c);
        @(negedge clk);
      end
    cfg_we = 0; clear = 0;
    for (int p = 0; p < NP; p++) begin src_q[p].delete(); got_q[p].delete(); end
    for (int i = 0; i < n_consts(k); i++) begin
      const_t t;
      t = kernel_const(k, i);
      src_q[border_port(R, C, t.side, t.pos)].push_back(t.value);
    end
  endtask

  task automatic run_kernel(kernel_e k, int n);
    data_t exp[$];
    int po;
    load(k);
    po = port_out(k, R, C);
    for (int i = 0; i < n; i++) begin
      data_t a, b;
      a = (i % 4 == 0) ? data_t'($urandom) : data_t'($urandom % 200) - 100;
      b = (i % 4 == 0) ? data_t'($urandom) : data_t'($urandom % 200) - 100;
      for (int cp = 0; cp < n_a_copies(k); cp++) src_q[port_a(k, R, C, cp)].push_back(a);
      src_q[port_b(R, C)].push_back(b);
      exp.push_back(ref_result(k, a, b));
    end
    for (int cyc = 0; cyc < 20 * n + 100; cyc++) step();
    check(got_q[po].size() == n, $sformatf("kernel %0d: %0d results of %0d", k, got_q[po].size(), n));
    for (int i = 0; i < got_q[po].size() && i < n; i++)
      check(got_q[po][i] == exp[i], $sformatf("kernel %0d result %0d: %0d expected %0d", k, i, got_q[po][i], exp[i]));
    for (int p = 0; p < NP; p++)
      if (p != po) check(got_q[p].size() == 0, $sformatf("nothing on unused output %0d", p));
  endtask

  initial begin
    int lat;
    for (int p = 0; p < NP; p++) begin bin_tok[p] = '0; bout_ready[p] = 0; end
    cfg_addr = '0; cfg_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_kernel(K_BRANCH, 150);
    run_kernel(K_AXPY, 150);
    sink_pct = 100;
    run_kernel(K_BRANCH, 40);

    // latency of K_AXPY with constants already loaded
    load(K_AXPY);
    for (int n = 0; n < 10; n++) step();
    src_q[port_a(K_AXPY, R, C, 0)].push_back(10);
    src_q[port_b(R, C)].push_back(20);
    lat = 0;
    while (got_q[port_out(K_AXPY, R, C)].size() == 0 && lat < 30) begin step(); lat++; end
    check(lat == 7, $sformatf("K_AXPY result delivered in cycle %0d, expected 7", lat));
    check(got_q[port_out(K_AXPY, R, C)].size() == 1 && got_q[port_out(K_AXPY, R, C)][0] == 71,
          "K_AXPY single result");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
