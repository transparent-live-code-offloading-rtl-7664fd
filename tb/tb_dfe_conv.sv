// tb_dfe_conv -- the convolution workload on the default 18 x 18 DFE.
// An 8-tap convolution (K_FIR8 of dfe_tb_pkg: 8 products, 8 additions,
// 8 weights and a bias held as constants) is loaded through the host
// interface and slid along a line of 96 random pixels: for every output
// the host sends the 8 pixels of the window, one word each. Every result
// is compared with y[j] = bias + sum w[i]*x[j+i], with its source tag.
// The weights travel 17 hops from the south edge to their multipliers and
// the result 10 hops to the east edge, so this also exercises long routes
// at the full mesh size. Expected rate: one result per 8 host words.
module tb_dfe_conv;
  import dfe_pkg::*;
  import dfe_tb_pkg::*;
  localparam int R = 18, C = 18, NCELL = R * C, CAW = $clog2(NCELL);
  localparam int NPIX = 96, NOUT = NPIX - FIR_TAPS + 1;
  logic clk = 0, rst_n = 0;
  logic cfg_wr_en = 0, cmd_configure = 0, cmd_reset = 0;
  logic [CAW-1:0] cfg_wr_addr;
  logic [31:0] cfg_wr_data;
  logic busy, configured, tag_error;
  logic h2d_valid, h2d_ready, d2h_valid, d2h_ready;
  logic [PKT_W-1:0] h2d_data, d2h_data;
  logic [PKT_W-1:0] tx_q[$];
  logic [PKT_W-1:0] rx_q[$];
  data_t w[FIR_TAPS];
  data_t bias;
  data_t x[NPIX];
  int checks = 0, failures = 0;
  int cyc = 0, first_rx = -1, last_rx = -1;

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
    logic [PKT_W-1:0] wd;
    wd = '0;
    wd[31:0] = v;
    wd[TAG_LSB +: TAG_W] = TAG_W'(port);
    return wd;
  endfunction

  initial begin
    h2d_valid = 0; h2d_data = '0; d2h_ready = 1; cfg_wr_addr = '0; cfg_wr_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++) begin
        cfg_wr_en = 1; cfg_wr_addr = CAW'(r * C + c);
        cfg_wr_data = 32'(fir_cell(R, C, r, c));
        @(negedge clk);
      end
    cfg_wr_en = 0;
    cmd_configure = 1; @(negedge clk); cmd_configure = 0;
    while (busy) @(negedge clk);

    bias = data_t'($urandom % 256) - 128;
    for (int i = 0; i < FIR_TAPS; i++) w[i] = data_t'($urandom % 33) - 16;
    for (int j = 0; j < NPIX; j++) x[j] = data_t'($urandom % 256);
    tx_q.push_back(word(border_port(R, C, DIR_W, 1), bias));
    for (int i = 0; i < FIR_TAPS; i++) tx_q.push_back(word(border_port(R, C, DIR_S, i), w[i]));
    for (int j = 0; j < NOUT; j++)
      for (int i = 0; i < FIR_TAPS; i++) tx_q.push_back(word(border_port(R, C, DIR_N, i), x[j + i]));

    while ((tx_q.size() > 0 || rx_q.size() < NOUT) && cyc < 20000) begin
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

    check(rx_q.size() == NOUT, $sformatf("%0d results of %0d", rx_q.size(), NOUT));
    for (int j = 0; j < rx_q.size() && j < NOUT; j++) begin
      longint acc;
      acc = longint'(bias);
      for (int i = 0; i < FIR_TAPS; i++) acc += longint'(w[i]) * longint'(x[j + i]);
      check(data_t'(rx_q[j][31:0]) == data_t'(acc),
            $sformatf("y[%0d] = %0d expected %0d", j, data_t'(rx_q[j][31:0]), data_t'(acc)));
      check(int'(rx_q[j][TAG_LSB +: TAG_W]) == border_port(R, C, DIR_E, 1), "result tag");
    end
    check(last_rx - first_rx <= FIR_TAPS * (NOUT - 1) + 10,
          $sformatf("%0d results over %0d cycles", NOUT, last_rx - first_rx));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
