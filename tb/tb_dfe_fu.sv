// tb_dfe_fu -- self-checking testbench of the functional unit.
// Drives random operands through every operation, with random output
// backpressure, and compares each result with a reference computed here in
// 64-bit arithmetic. Also checks the one-cycle latency and that a stalled
// result is held.
module tb_dfe_fu;
  import dfe_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0;
  op_e op;
  logic in_valid, in_ready, out_valid, out_ready;
  data_t a, b, s, out_data;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  dfe_fu dut (.*);

  function automatic data_t ref_op(op_e o, data_t x, data_t y, data_t z);
    longint lx = longint'(x), ly = longint'(y);
    case (o)
      OP_ADD: return data_t'(lx + ly);
      OP_SUB: return data_t'(lx - ly);
      OP_MUL: return data_t'(lx * ly);
      OP_GT:  return (lx > ly)  ? 1 : 0;
      OP_GE:  return (lx >= ly) ? 1 : 0;
      OP_LT:  return (lx < ly)  ? 1 : 0;
      OP_LE:  return (lx <= ly) ? 1 : 0;
      OP_EQ:  return (lx == ly) ? 1 : 0;
      OP_NE:  return (lx != ly) ? 1 : 0;
      OP_SEL: return (z == 0) ? y : x;
      default: return 0;
    endcase
  endfunction

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  data_t corner_vals[4] = '{0, 1, -1, 7};
  initial begin
    in_valid = 0; out_ready = 1; op = OP_ADD; a = 0; b = 0; s = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 600; n++) begin
      data_t exp;
      op = op_e'(1 + (n % 10));
      a  = (n % 3 == 0) ? corner_vals[$urandom % 4] : data_t'($urandom);
      b  = (n % 5 == 0) ? a : data_t'($urandom);
      s  = (n % 2 == 0) ? 0 : data_t'($urandom | 1);
      exp = ref_op(op, a, b, s);
      in_valid = 1;
      @(negedge clk);
      check(in_ready, "in_ready with empty result register");
      @(posedge clk); #1;
      in_valid = 0;
      check(out_valid && out_data == exp,
            $sformatf("op %0d a=%0d b=%0d s=%0d got %0d exp %0d", op, a, b, s, out_data, exp));
      // hold the result for a random time: it must not change
      out_ready = 0;
      repeat ($urandom % 3) begin
        @(posedge clk); #1;
        check(out_valid && out_data == exp && !in_ready, "held result under stall");
      end
      out_ready = 1;
      @(posedge clk); #1;
      check(!out_valid, "result consumed");
    end
    // back-to-back stream: one result per cycle
    op = OP_ADD; out_ready = 1;
    for (int n = 0; n < 8; n++) begin
      a = n; b = 100; in_valid = 1;
      @(posedge clk); #1;
      check(out_valid && out_data == n + 100, "streaming add");
    end
    in_valid = 0;
    clear = 1; @(posedge clk); #1; clear = 0;
    check(!out_valid, "clear empties the result register");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
