// tb_dfe_cell -- self-checking testbench of one DFE cell.
// Each input side has a source that offers the next word of its stream
// until the cell takes it; each output side has a sink with random ready.
// All handshakes are sampled mid-cycle. Four configurations are run:
//   1 routing only, with a fork (N -> S and W, W -> E);
//   2 MUL with a constant input (N) and the variable operand (W) also
//     forwarded on (W -> S), result forked to E and N;
//   3 SEL (MUX) with s from W, a from N, b from E, result to S;
//   4 GT comparison, result to W;
// and the outputs are compared with streams computed here. Latencies of one
// cycle (routing) and two cycles (through the FU) are checked on single
// tokens, and a full output is shown to stall the cell.
module tb_dfe_cell;
  import dfe_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0, cfg_we = 0;
  cell_cfg_t cfg_data;
  token_t in_tok[4];
  logic in_ready[4];
  token_t out_tok[4];
  logic out_ready[4];
  data_t src_q[4][$];
  data_t got_q[4][$];
  data_t exp_q[4][$];
  int ready_pct = 70;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  dfe_cell #(.OUT_DEPTH(2)) dut (.*);

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

  // one clock cycle of sources and sinks; called at a negedge
  task automatic step();
    logic took[4];
    for (int d = 0; d < 4; d++) begin
      in_tok[d].valid = src_q[d].size() > 0;
      in_tok[d].data  = (src_q[d].size() > 0) ? src_q[d][0] : '0;
      out_ready[d]    = ($urandom % 100) < ready_pct;
    end
    #1;
    for (int d = 0; d < 4; d++) begin
      took[d] = in_tok[d].valid && in_ready[d];
      if (out_tok[d].valid && out_ready[d]) got_q[d].push_back(out_tok[d].data);
    end
    @(negedge clk);
    for (int d = 0; d < 4; d++) if (took[d]) void'(src_q[d].pop_front());
  endtask

  task automatic configure(cell_cfg_t c);
    cfg_data = c; cfg_we = 1;
    @(negedge clk);
    cfg_we = 0;
    for (int d = 0; d < 4; d++) begin got_q[d].delete(); exp_q[d].delete(); src_q[d].delete(); end
  endtask

  task automatic run_and_compare(string name, int cycles);
    for (int n = 0; n < cycles; n++) step();
    for (int d = 0; d < 4; d++) begin
      check(got_q[d].size() == exp_q[d].size(),
            $sformatf("%s: output %0d got %0d words, expected %0d", name, d, got_q[d].size(), exp_q[d].size()));
      for (int i = 0; i < got_q[d].size() && i < exp_q[d].size(); i++)
        check(got_q[d][i] == exp_q[d][i],
              $sformatf("%s: output %0d word %0d = %0d, expected %0d", name, d, i, got_q[d][i], exp_q[d][i]));
    end
  endtask

  function automatic cell_cfg_t mk(op_e op, dir_e a, dir_e b, dir_e s,
                                   out_src_e on, out_src_e oe, out_src_e os, out_src_e ow,
                                   logic [3:0] cst);
    cell_cfg_t c;
    c = '0;
    c.op = op; c.src_a = a; c.src_b = b; c.src_s = s;
    c.out_src[DIR_N] = on; c.out_src[DIR_E] = oe; c.out_src[DIR_S] = os; c.out_src[DIR_W] = ow;
    c.const_en = cst;
    return c;
  endfunction

  initial begin
    cell_cfg_t c;
    int lat;
    for (int d = 0; d < 4; d++) begin in_tok[d] = '0; out_ready[d] = 0; end
    cfg_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;

    // 1: routing with a fork
    configure(mk(OP_NONE, DIR_N, DIR_N, DIR_N, OUT_OFF, OUT_IN_W, OUT_IN_N, OUT_IN_N, 4'b0000));
    for (int i = 0; i < 60; i++) begin
      data_t x, y;
      x = $urandom; y = $urandom;
      src_q[DIR_N].push_back(x); exp_q[DIR_S].push_back(x); exp_q[DIR_W].push_back(x);
      src_q[DIR_W].push_back(y); exp_q[DIR_E].push_back(y);
    end
    run_and_compare("route", 400);

    // 2: MUL with constant on N; W also forwarded to S; result to E and N
    configure(mk(OP_MUL, DIR_W, DIR_N, DIR_N, OUT_FU, OUT_FU, OUT_IN_W, OUT_OFF, 4'b0001));
    src_q[DIR_N].push_back(-7);
    src_q[DIR_N].push_back(1234);      // must stay unused: the constant is kept
    for (int i = 0; i < 60; i++) begin
      data_t x;
      x = data_t'($urandom % 100000) - 50000;
      src_q[DIR_W].push_back(x);
      exp_q[DIR_E].push_back(x * -7); exp_q[DIR_N].push_back(x * -7); exp_q[DIR_S].push_back(x);
    end
    run_and_compare("mul-const", 400);
    check(src_q[DIR_N].size() == 1, "constant input takes only its first token");

    // 3: SEL s=W a=N b=E -> S
    configure(mk(OP_SEL, DIR_N, DIR_E, DIR_W, OUT_OFF, OUT_OFF, OUT_FU, OUT_OFF, 4'b0000));
    for (int i = 0; i < 60; i++) begin
      data_t a, b, s;
      a = $urandom; b = $urandom; s = ($urandom % 2) ? data_t'($urandom % 5) : 0;
      src_q[DIR_N].push_back(a); src_q[DIR_E].push_back(b); src_q[DIR_W].push_back(s);
      exp_q[DIR_S].push_back(s != 0 ? a : b);
    end
    run_and_compare("sel", 400);

    // 4: GT a=S b=E -> W, and N -> E pass-through at the same time
    configure(mk(OP_GT, DIR_S, DIR_E, DIR_N, OUT_OFF, OUT_IN_N, OUT_OFF, OUT_FU, 4'b0000));
    for (int i = 0; i < 60; i++) begin
      data_t a, b, z;
      a = data_t'($urandom % 7) - 3; b = data_t'($urandom % 7) - 3; z = $urandom;
      src_q[DIR_S].push_back(a); src_q[DIR_E].push_back(b); src_q[DIR_N].push_back(z);
      exp_q[DIR_W].push_back(a > b ? 1 : 0); exp_q[DIR_E].push_back(z);
    end
    run_and_compare("gt", 400);

    // latency: routing one cycle, FU two cycles
    ready_pct = 100;
    configure(mk(OP_ADD, DIR_N, DIR_W, DIR_N, OUT_OFF, OUT_IN_W, OUT_FU, OUT_OFF, 4'b0000));
    src_q[DIR_N].push_back(5); src_q[DIR_W].push_back(6);
    exp_q[DIR_E].push_back(6); exp_q[DIR_S].push_back(11);
    lat = 0;
    while (got_q[DIR_S].size() == 0 && lat < 10) begin
      step();
      lat++;
      if (lat == 2) check(got_q[DIR_E].size() == 1, "routing latency one cycle");
    end
    check(lat == 3, $sformatf("FU path delivers in the third cycle (two registers), got %0d", lat));

    // stall: with the E output blocked, a routed stream stops after the FIFO fills
    configure(mk(OP_NONE, DIR_N, DIR_N, DIR_N, OUT_OFF, OUT_IN_W, OUT_OFF, OUT_OFF, 4'b0000));
    ready_pct = 0;
    for (int i = 0; i < 10; i++) src_q[DIR_W].push_back(i);
    for (int n = 0; n < 20; n++) step();
    check(src_q[DIR_W].size() == 8, $sformatf("stall after two buffered words, %0d left", src_q[DIR_W].size()));
    // clear drops the buffered words
    clear = 1; @(negedge clk); clear = 0;
    #1;
    check(!out_tok[DIR_E].valid, "clear empties output buffers");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
