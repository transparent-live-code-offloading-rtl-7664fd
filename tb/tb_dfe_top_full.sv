// tb_dfe_top_full -- one complete off-load on the DFE at its default size
// (18 x 18 cells, 512-word host FIFOs): write all 324 cell configurations,
// configure, send the constants and 200 elements of the branching kernel
// K_BRANCH (C = A > B ? A + 3B + 1 : A - 5B - 2), read the 200 tagged
// results and compare them with the reference model. Also checks the
// configuration time (326 busy cycles) and that the result stream, once
// started, keeps pace with the host input: three
// host words per element arrive one per cycle, so one result every three
// cycles.
module tb_dfe_top_full;
  import dfe_pkg::*;
  import dfe_tb_pkg::*;
  localparam int R = 18, C = 18, NCELL = R * C, CAW = $clog2(NCELL), N = 200;
  logic clk = 0, rst_n = 0;
  logic cfg_wr_en = 0, cmd_configure = 0, cmd_reset = 0;
  logic [CAW-1:0] cfg_wr_addr;
  logic [31:0] cfg_wr_data;
  logic busy, configured, tag_error;
  logic h2d_valid, h2d_ready, d2h_valid, d2h_ready;
  logic [PKT_W-1:0] h2d_data, d2h_data;
  logic [PKT_W-1:0] tx_q[$];
  logic [PKT_W-1:0] rx_q[$];
  data_t exp[$];
  int checks = 0, failures = 0;
  int first_rx = -1, last_rx = -1, cyc = 0;

  always #5 clk = ~clk;

  dfe_top dut (.*);

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [PKT_W-1:0] word(int port, data_t v);
    logic [PKT_W-1:0] w;
    w = '0;
    w[31:0] = v;
    w[TAG_LSB +: TAG_W] = TAG_W'(port);
    return w;
  endfunction

  initial begin
    int busy_cycles;
    h2d_valid = 0; h2d_data = '0; d2h_ready = 1; cfg_wr_addr = '0; cfg_wr_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++) begin
        cfg_wr_en = 1; cfg_wr_addr = CAW'(r * C + c);
        cfg_wr_data = 32'(kernel_cell(K_BRANCH, r, c));
        @(negedge clk);
      end
    cfg_wr_en = 0;
    cmd_configure = 1; @(negedge clk); cmd_configure = 0;
    busy_cycles = 0;
    while (busy && busy_cycles < 2000) begin busy_cycles++; @(negedge clk); end
    check(busy_cycles == NCELL + 2, $sformatf("configuration took %0d cycles", busy_cycles));

    for (int i = 0; i < n_consts(K_BRANCH); i++) begin
      const_t t;
      t = kernel_const(K_BRANCH, i);
      tx_q.push_back(word(border_port(R, C, t.side, t.pos), t.value));
    end
    for (int i = 0; i < N; i++) begin
      data_t a, b;
      a = data_t'($urandom); b = data_t'($urandom);
      if (i % 2 == 0) b = a - data_t'($urandom % 50);   // often a > b
      for (int cp = 0; cp < n_a_copies(K_BRANCH); cp++) tx_q.push_back(word(port_a(K_BRANCH, R, C, cp), a));
      tx_q.push_back(word(port_b(R, C), b));
      exp.push_back(ref_result(K_BRANCH, a, b));
    end
    while ((tx_q.size() > 0 || rx_q.size() < N) && cyc < 20000) begin
      logic sent;
      h2d_valid = tx_q.size() > 0;
      h2d_data  = (tx_q.size() > 0) ? tx_q[0] : '0;
      #1;
      sent = h2d_valid && h2d_ready;
      if (d2h_valid && d2h_ready) begin
        rx_q.push_back(d2h_data);
        if (first_rx < 0) first_rx = cyc;
        last_rx = cyc;
      end
      @(negedge clk);
      cyc++;
      if (sent) void'(tx_q.pop_front());
    end
    check(rx_q.size() == N, $sformatf("%0d results of %0d", rx_q.size(), N));
    for (int i = 0; i < rx_q.size() && i < N; i++) begin
      check(data_t'(rx_q[i][31:0]) == exp[i],
            $sformatf("result %0d: %0d expected %0d", i, data_t'(rx_q[i][31:0]), exp[i]));
      check(int'(rx_q[i][TAG_LSB +: TAG_W]) == port_out(K_BRANCH, R, C), "result tag");
    end
    // three host words per element, one word per cycle: a result every 3 cycles
    check(last_rx - first_rx <= 3 * (N - 1) + 10,
          $sformatf("results spread over %0d cycles", last_rx - first_rx));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
