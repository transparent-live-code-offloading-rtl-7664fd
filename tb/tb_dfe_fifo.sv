// tb_dfe_fifo -- self-checking testbench of the FIFO.
// Random pushes and pops against a queue model; checks order, count,
// full/empty flags, full throughput at depth 2 and clear.
module tb_dfe_fifo;
  localparam int W = 16, D = 4;
  logic clk = 0, rst_n = 0, clear = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  logic [$clog2(D+1)-1:0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] model[$];

  always #5 clk = ~clk;

  dfe_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  // depth-2 FIFO for the throughput check
  logic t_in_valid, t_in_ready, t_out_valid;
  logic [W-1:0] t_out_data;
  logic [1:0] t_count;
  dfe_fifo #(.WIDTH(W), .DEPTH(2)) dut2 (
    .clk(clk), .rst_n(rst_n), .clear(1'b0), .in_valid(t_in_valid), .in_ready(t_in_ready),
    .in_data(in_data), .out_valid(t_out_valid), .out_ready(1'b1), .out_data(t_out_data),
    .count(t_count));

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0; t_in_valid = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      logic push, pop;
      @(negedge clk);
      in_valid  = ($urandom % 3) != 0;
      out_ready = ($urandom % 2) != 0;
      in_data   = W'($urandom);
      check(in_ready == (model.size() < D), "in_ready = not full");
      check(out_valid == (model.size() > 0), "out_valid = not empty");
      check(count == model.size(), "count");
      if (model.size() > 0) check(out_data == model[0], "order");
      push = in_valid && in_ready;
      pop  = out_valid && out_ready;
      @(posedge clk);
      if (pop) void'(model.pop_front());
      if (push) model.push_back(in_data);
    end
    @(negedge clk);
    in_valid = 1; in_data = 5;
    @(negedge clk);
    in_valid = 0; clear = 1;
    @(negedge clk);
    clear = 0;
    check(!out_valid && count == 0, "clear");
    // throughput: a depth-2 FIFO drained every cycle takes a word every cycle
    t_in_valid = 1;
    for (int n = 0; n < 10; n++) begin
      in_data = W'(n);
      @(negedge clk);
      check(t_in_ready, "depth-2 FIFO accepts every cycle");
      check(t_out_valid && t_out_data == W'(n), "one-cycle latency");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
