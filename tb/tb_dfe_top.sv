// tb_dfe_top -- end-to-end testbench of the FPGA side of the prototype,
// on a 4 x 4 DFE with 8-word host FIFOs.
// It plays the host: writes cell configurations into the configuration
// memory, commands a configuration, sends the constants and then tagged
// operand words, and reads tagged results back, exactly as the run-time
// would through PCIe. Sequence:
//   1 configure K_AXPY (C = A + 3B + 1), stream 60 elements;
//   2 stop reading results so that the output FIFO, the DFE and the input
//     FIFO fill up (backpressure reaches the host), then resume;
//   3 send a word with an invalid tag (flagged, dropped);
//   4 reset the DFE (constants dropped, configuration kept), resend the
//     constants and stream again;
//   5 switch the configuration to K_BRANCH (if/else turned into a MUX) and
//     stream elements taking both branches.
// Every result is checked against the reference model, including its
// source tag; configuration time is checked (NCELL + 2 busy cycles), and
// each mechanism must have happened at least once.
module tb_dfe_top;
  import dfe_pkg::*;
  import dfe_tb_pkg::*;
  localparam int R = 4, C = 4, NCELL = R * C, CAW = $clog2(NCELL);
  logic clk = 0, rst_n = 0;
  logic cfg_wr_en = 0, cmd_configure = 0, cmd_reset = 0;
  logic [CAW-1:0] cfg_wr_addr;
  logic [31:0] cfg_wr_data;
  logic busy, configured, tag_error;
  logic h2d_valid, h2d_ready, d2h_valid, d2h_ready;
  logic [PKT_W-1:0] h2d_data, d2h_data;
  int checks = 0, failures = 0;
  logic [PKT_W-1:0] tx_q[$];
  logic [PKT_W-1:0] rx_q[$];
  int rd_pct = 100;
  // mechanism counters
  int n_config = 0, n_reset = 0, n_const = 0, n_h2d_stall = 0, n_d2h_full = 0;
  int n_mux_true = 0, n_mux_false = 0, n_tag_err = 0;

  always #5 clk = ~clk;

  dfe_top #(.ROWS(R), .COLS(C), .FIFO_DEPTH(8)) dut (.*);

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

  // one cycle of the host data streams, called at a negedge
  task automatic step();
    logic sent;
    h2d_valid = tx_q.size() > 0;
    h2d_data  = (tx_q.size() > 0) ? tx_q[0] : '0;
    d2h_ready = ($urandom % 100) < rd_pct;
    #1;
    sent = h2d_valid && h2d_ready;
    if (h2d_valid && !h2d_ready) n_h2d_stall++;
    if (dut.u_d2h_fifo.count == 8) n_d2h_full++;
    if (d2h_valid && d2h_ready) rx_q.push_back(d2h_data);
    @(negedge clk);
    if (sent) void'(tx_q.pop_front());
  endtask

  function automatic logic [PKT_W-1:0] word(int port, data_t v);
    logic [PKT_W-1:0] w;
    w = '0;
    w[31:0] = v;
    w[TAG_LSB +: TAG_W] = TAG_W'(port);
    return w;
  endfunction

  task automatic configure(kernel_e k);
    int busy_cycles;
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++) begin
        cfg_wr_en = 1; cfg_wr_addr = CAW'(r * C + c);
        cfg_wr_data = 32'(kernel_cell(k, r, c));
        @(negedge clk);
      end
    cfg_wr_en = 0;
    cmd_configure = 1; @(negedge clk); cmd_configure = 0;
    busy_cycles = 0;
    while (busy && busy_cycles < 1000) begin busy_cycles++; @(negedge clk); end
    check(busy_cycles == NCELL + 2, $sformatf("configuration took %0d cycles", busy_cycles));
    check(configured, "configured");
    n_config++;
  endtask

  task automatic send_consts(kernel_e k);
    for (int i = 0; i < n_consts(k); i++) begin
      const_t t;
      t = kernel_const(k, i);
      tx_q.push_back(word(border_port(R, C, t.side, t.pos), t.value));
      n_const++;
    end
  endtask

  task automatic stream(kernel_e k, int n, int drain_cycles);
    data_t exp[$];
    rx_q.delete();
    for (int i = 0; i < n; i++) begin
      data_t a, b;
      a = data_t'($urandom % 2000) - 1000;
      b = data_t'($urandom % 2000) - 1000;
      if (i % 7 == 0) a = data_t'($urandom);
      for (int cp = 0; cp < n_a_copies(k); cp++) tx_q.push_back(word(port_a(k, R, C, cp), a));
      tx_q.push_back(word(port_b(R, C), b));
      exp.push_back(ref_result(k, a, b));
      if (k == K_BRANCH) begin
        if (a > b) n_mux_true++; else n_mux_false++;
      end
    end
    for (int cyc = 0; cyc < drain_cycles; cyc++) step();
    while (tx_q.size() > 0 || rx_q.size() < n) begin
      step();
      drain_cycles++;
      if (drain_cycles > 20000) break;
    end
    for (int cyc = 0; cyc < 50; cyc++) step();
    check(rx_q.size() == n, $sformatf("kernel %0d: %0d results of %0d", k, rx_q.size(), n));
    for (int i = 0; i < rx_q.size() && i < n; i++) begin
      check(data_t'(rx_q[i][31:0]) == exp[i],
            $sformatf("kernel %0d result %0d: %0d expected %0d", k, i, data_t'(rx_q[i][31:0]), exp[i]));
      check(int'(rx_q[i][TAG_LSB +: TAG_W]) == port_out(k, R, C), "result tag names the output port");
    end
  endtask

  initial begin
    h2d_valid = 0; h2d_data = '0; d2h_ready = 0; cfg_wr_addr = '0; cfg_wr_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // 1 first configuration and a stream
    configure(K_AXPY);
    send_consts(K_AXPY);
    rd_pct = 80;
    stream(K_AXPY, 60, 0);

    // 2 backpressure: nobody reads the results for a while
    rd_pct = 0;
    begin
      int stalls_before = n_h2d_stall;
      fork
        begin
          repeat (400) @(negedge clk);
          rd_pct = 100;
        end
      join_none
      stream(K_AXPY, 40, 0);
      check(n_h2d_stall > stalls_before, "backpressure reached the host input");
    end

    // 3 a word with a tag that names no perimeter input
    tx_q.push_back(word(2 * (R + C) + 5, 99));
    repeat (5) step();
    check(tag_error, "invalid tag flagged");
    if (tag_error) n_tag_err++;

    // 4 DFE reset: constants must be sent again
    cmd_reset = 1; @(negedge clk); cmd_reset = 0;
    while (busy) @(negedge clk);
    n_reset++;
    check(!tag_error, "reset clears the tag error");
    check(!dut.u_dfe.g_row[0].g_col[0].u_cell.const_loaded[DIR_N], "reset drops the constants");
    send_consts(K_AXPY);
    rd_pct = 90;
    stream(K_AXPY, 30, 0);

    // 5 configuration switch to the branching kernel
    configure(K_BRANCH);
    send_consts(K_BRANCH);
    stream(K_BRANCH, 80, 0);

    $display("mechanisms: config=%0d reset=%0d const=%0d h2d_stall=%0d d2h_full=%0d mux_true=%0d mux_false=%0d tag_err=%0d",
             n_config, n_reset, n_const, n_h2d_stall, n_d2h_full, n_mux_true, n_mux_false, n_tag_err);
    check(n_config >= 2, "configuration switch happened");
    check(n_reset >= 1, "DFE reset happened");
    check(n_const > 0, "constants were loaded");
    check(n_h2d_stall > 0, "host input stalled");
    check(n_d2h_full > 0, "output FIFO filled");
    check(n_mux_true > 0 && n_mux_false > 0, "MUX took both branches");
    check(n_tag_err > 0, "tag error happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
