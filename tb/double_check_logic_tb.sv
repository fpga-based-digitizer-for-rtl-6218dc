// Testbench of the double-check logic: clean pulses of N clocks must give an activation of
// N + upt clocks (minimum 1 + upt); a dip no longer than upt clocks between two pulses is
// bridged, a longer dip ends the activation after the first pulse; stop ends it at once.
module double_check_logic_tb;
  timeunit 1ps; timeprecision 1fs;

  logic clk = 0, clr = 1, gated_e = 0, stop = 0;
  logic [3:0] upt;
  logic active, done;
  int checks = 0, failures = 0;
  int act_cycles;

  double_check_logic dut (.*);

  always #909 clk = ~clk;
  always @(posedge clk) if (active) act_cycles++;

  initial begin : watchdog
    #(200000 * 1818);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int n1, input int dip, input int n2, input int exp_act);
    clr = 1;
    repeat (2) @(negedge clk);
    clr = 0;
    act_cycles = 0;
    gated_e = 1;
    repeat (n1) @(negedge clk);
    if (dip > 0) begin
      gated_e = 0;
      repeat (dip) @(negedge clk);
      gated_e = 1;
      repeat (n2) @(negedge clk);
    end
    gated_e = 0;
    repeat (n1 + dip + n2 + 40) @(negedge clk);
    checks++;
    if (act_cycles != exp_act || !done || active) begin
      failures++;
      $display("FAIL upt=%0d n1=%0d dip=%0d n2=%0d act=%0d exp=%0d done=%0d",
               upt, n1, dip, n2, act_cycles, exp_act, done);
    end
  endtask

  initial begin
    int u, n1, d, n2;
    for (int it = 0; it < 300; it++) begin
      u   = $urandom_range(1, 8);
      upt = 4'(u);
      n1  = $urandom_range(1, 40);
      unique case (it % 3)
        0: run(n1, 0, 0, n1 + u);                   // clean pulse
        1: begin                                     // short dip, bridged
             d  = $urandom_range(1, u);
             n2 = $urandom_range(u + 1, 30);
             run(n1, d, n2, n1 + d + n2 + u);
           end
        default: begin                               // long dip, ends after first pulse
             d  = $urandom_range(u + 1, u + 10);
             n2 = $urandom_range(1, 30);
             run(n1, d, n2, n1 + u);
           end
      endcase
    end
    // stop ends the activation immediately
    upt = 4;
    clr = 1;
    repeat (2) @(negedge clk);
    clr = 0;
    act_cycles = 0;
    gated_e = 1;
    repeat (20) @(negedge clk);
    stop = 1;
    @(negedge clk);
    stop = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (!done || active) failures++;
    gated_e = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
