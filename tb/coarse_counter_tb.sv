// Testbench of the coarse counter: counts clk_ph edges after a system reset, latches the count
// at the enabled edge, holds it, and wraps after 4096 counts.
module coarse_counter_tb;
  timeunit 1ps; timeprecision 1fs;

  logic clk_ph = 0, sys_rst = 1, clr = 1, capture_en = 0;
  logic [11:0] count, value;
  int checks = 0, failures = 0;

  coarse_counter dut (.*);

  always #909 clk_ph = ~clk_ph;

  initial begin : watchdog
    #(20000 * 1818);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n;
    for (int it = 0; it < 6; it++) begin
      sys_rst = 1; clr = 1;
      @(negedge clk_ph);
      sys_rst = 0; clr = 0;
      // edges after reset release: the first edge sees count 0
      n = (it == 5) ? 4096 + 17 : $urandom_range(1, 3000);
      repeat (n) @(negedge clk_ph);
      capture_en = 1;
      @(negedge clk_ph);
      capture_en = 0;
      checks++;
      if (value != 12'(n)) begin
        failures++;
        $display("FAIL n=%0d value=%0d", n, value);
      end
      capture_en = 1;
      repeat (5) @(negedge clk_ph);
      capture_en = 0;
      checks++;
      if (value != 12'(n) || count != 12'(n + 6)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
