// tb_xtpu_mult: exhaustive check of the PE multiplier.
//
// Every one of the 65,536 pairs of signed 8-bit operands is applied and the
// 16-bit result is compared with the product computed as a 32-bit integer
// in the testbench.  The multiplier is combinational; a clock only paces the
// stimulus and drives the watchdog.
module tb_xtpu_mult;
  import xtpu_pkg::*;

  logic  clk = 1'b0;
  act_t  a;
  wgt_t  b;
  prod_t p;
  int    checks = 0, failures = 0;

  always #5 clk = ~clk;

  xtpu_mult dut (.a, .b, .p);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int expected;
    for (int i = -128; i < 128; i++) begin
      for (int j = -128; j < 128; j++) begin
        a = act_t'(i);
        b = wgt_t'(j);
        @(posedge clk);
        expected = i * j;
        checks++;
        if (int'(p) != expected) begin
          failures++;
          if (failures < 10) $display("FAIL %0d * %0d = %0d, expected %0d", i, j, p, expected);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
