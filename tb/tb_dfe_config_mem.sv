// tb_dfe_config_mem -- self-checking testbench of the configuration memory.
// Writes random words to random addresses, reads them back with the
// one-cycle read latency, and checks that without rd_en the output holds its
// last read even when the address moves.
module tb_dfe_config_mem;
  localparam int D = 40;
  logic clk = 0;
  logic wr_en, rd_en;
  logic [5:0] wr_addr, rd_addr;
  logic [31:0] wr_data, rd_data;
  logic [31:0] model [D];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  dfe_config_mem #(.DEPTH(D)) dut (.*);

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
    wr_en = 0; rd_en = 0; wr_addr = 0; rd_addr = 0; wr_data = 0;
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 6'(a); wr_data = $urandom; model[a] = wr_data;
    end
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      wr_en = ($urandom % 2) != 0; wr_addr = 6'($urandom % D); wr_data = $urandom;
      rd_en = 0;
      @(posedge clk);
      if (wr_en) model[wr_addr] = wr_data;
      @(negedge clk);
      wr_en = 0; rd_en = 1; rd_addr = 6'($urandom % D);
      @(posedge clk); #1;
      check(rd_data == model[rd_addr], $sformatf("read %0d", rd_addr));
      begin
        logic [31:0] prev;
        prev = rd_data;
        rd_en = 0; rd_addr = 6'($urandom % D);
        @(posedge clk); #1;
        check(rd_data == prev, "read data held without rd_en");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
