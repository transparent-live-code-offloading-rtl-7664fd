// tb_dfe_controller -- self-checking testbench of the configuration/reset
// state machine. A memory model answers reads one cycle late. Checks that a
// configuration writes every cell exactly once, in order, with the word
// stored for it; that busy and dfe_clear last NCELL + 2 cycles for a
// configuration and one cycle for a reset; that cell writes only happen
// while the mesh is held clear; and that commands during busy are ignored.
module tb_dfe_controller;
  import dfe_pkg::*;
  localparam int N = 7;
  localparam int AW = $clog2(N);
  logic clk = 0, rst_n = 0;
  logic cmd_configure = 0, cmd_reset = 0;
  logic busy, configured, mem_rd_en, dfe_clear, cfg_we;
  logic [AW-1:0] mem_rd_addr, cfg_addr;
  logic [31:0] mem_rd_data;
  cell_cfg_t cfg_data;
  logic [31:0] mem [N];
  int checks = 0, failures = 0;
  int writes[$];
  int busy_cycles;

  always #5 clk = ~clk;
  always_ff @(posedge clk) if (mem_rd_en) mem_rd_data <= mem[mem_rd_addr];

  dfe_controller #(.NCELL(N)) dut (.*);

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // monitor: record cell writes and count busy cycles
  always @(posedge clk) if (rst_n) begin
    if (cfg_we) begin
      writes.push_back(int'(cfg_addr));
      check(cfg_data == cell_cfg_t'(mem[cfg_addr][CFG_W-1:0]), "written word");
      check(dfe_clear, "write only while clear");
    end
    if (busy) busy_cycles++;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic pulse_cfg();
    @(negedge clk); cmd_configure = 1; @(negedge clk); cmd_configure = 0;
  endtask

  initial begin
    for (int i = 0; i < N; i++) mem[i] = $urandom;
    mem_rd_data = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    check(!busy && !configured && !dfe_clear, "idle after reset");
    for (int round = 0; round < 3; round++) begin
      writes.delete(); busy_cycles = 0;
      for (int i = 0; i < N; i++) mem[i] = $urandom;
      pulse_cfg();
      // a second command while busy must be ignored
      @(negedge clk); cmd_reset = 1; @(negedge clk); cmd_reset = 0;
      repeat (N + 10) @(negedge clk);
      check(busy_cycles == N + 2, $sformatf("configuration busy %0d cycles", busy_cycles));
      check(writes.size() == N, $sformatf("%0d cell writes", writes.size()));
      for (int i = 0; i < writes.size(); i++) check(writes[i] == i, "write order");
      check(configured && !busy && !dfe_clear, "running after configuration");
    end
    // reset command: one clear cycle, no writes
    writes.delete(); busy_cycles = 0;
    @(negedge clk); cmd_reset = 1; @(negedge clk); cmd_reset = 0;
    repeat (5) @(negedge clk);
    check(busy_cycles == 1, "reset busy one cycle");
    check(writes.size() == 0, "reset writes nothing");
    check(configured, "configuration kept over a reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
