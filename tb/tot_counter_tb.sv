// Testbench of the TOT counter: counts the cycles of an activation window, saturates at 1000
// and clears.
module tot_counter_tb;
  timeunit 1ps; timeprecision 1fs;

  logic clk = 0, clr = 1, active = 0;
  logic [9:0] value;
  logic full;
  int checks = 0, failures = 0;

  tot_counter dut (.*);

  always #909 clk = ~clk;

  initial begin : watchdog
    #(20000 * 1818);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n;
    for (int it = 0; it < 12; it++) begin
      clr = 1;
      @(negedge clk);
      clr = 0;
      n = (it < 2) ? 1000 + 50 * it : $urandom_range(1, 999);
      active = 1;
      repeat (n) @(negedge clk);
      active = 0;
      repeat (3) @(negedge clk);
      checks++;
      if (value != 10'((n > 1000) ? 1000 : n) || full != (n >= 1000)) begin
        failures++;
        $display("FAIL n=%0d value=%0d full=%0d", n, value, full);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
