// Testbench of the channel controller with the TDC and NRBC status signals driven directly:
// gate opening only after quiet inputs, the T-E window at its boundary (te_window clocks pass,
// te_window + 1 reject, with T or E first), the energy flag at the cut-off, and release by the
// system reset.
module channel_controller_tb;
  timeunit 1ps; timeprecision 1fs;
  import bgo_pkg::*;

  logic clk = 0, sys_rst = 1, buffered_t = 0, buffered_e = 0;
  logic t_hit = 0, t_done = 0, e_busy = 0, e_done = 0;
  logic [TOT_W-1:0] tot = '0, tot_cutoff = 10'd60;
  logic [WIN_W-1:0] te_window;
  logic gate_en, clr, meas_done, energy_flag, reject;
  int checks = 0, failures = 0, rejects = 0;

  channel_controller dut (.*);

  always #909 clk = ~clk;
  int clr_cycles = 0;
  always @(posedge clk) if (reject) rejects++;
  always @(posedge clk) if (clr) clr_cycles++;

  initial begin : watchdog
    #(100000 * 1818);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $realtime); end
  endtask

  task automatic restart();
    t_hit = 0; t_done = 0; e_busy = 0; e_done = 0;
    sys_rst = 1;
    repeat (2) @(negedge clk);
    sys_rst = 0;
  endtask

  task automatic wait_gate();
    int g = 0;
    while (!gate_en && g < 100) begin @(negedge clk); g++; end
    check(gate_en && !clr, "gate opens");
  endtask

  // first of T/E at once, the other k clocks later; returns whether it was accepted
  task automatic pair(input bit t_first, input int k, output bit accepted, output bit cleared);
    int r0 = rejects;
    int c0 = clr_cycles;
    if (t_first) t_hit = 1; else e_busy = 1;
    repeat (k) @(negedge clk);
    if (t_first) e_busy = 1; else t_hit = 1;
    repeat (4) @(negedge clk);
    accepted = (rejects == r0);
    cleared  = (clr_cycles != c0);
  endtask

  initial begin
    bit acc, clrd;
    int w, tv;
    te_window = 8'd10;
    // 1. gate stays closed while an input is high
    buffered_e = 1;
    restart();
    repeat (20) @(negedge clk);
    check(!gate_en && clr, "closed while E high");
    buffered_e = 0;
    wait_gate();
    // 2. window boundary, both orders
    for (int it = 0; it < 40; it++) begin
      w = $urandom_range(2, 40);
      te_window = WIN_W'(w);
      restart();
      wait_gate();
      pair(it % 2 == 0, (it % 4 < 2) ? w : w + 1, acc, clrd);
      check(acc == (it % 4 < 2), "window boundary");
      check(clrd == !acc, "channel cleared only after a reject");
    end
    // 3. energy flag at the cut-off, meas_done, hold until sys_rst
    for (int it = 0; it < 20; it++) begin
      te_window = 8'd10;
      restart();
      wait_gate();
      pair(1, 3, acc, clrd);
      check(acc && !meas_done, "measuring");
      tv = (it < 3) ? 59 + it : $urandom_range(0, 1000);
      tot = TOT_W'(tv);
      e_busy = 0; e_done = 1;
      repeat (3) @(negedge clk);
      check(!meas_done, "waits for TDC");
      t_done = 1;
      repeat (3) @(negedge clk);
      check(meas_done && energy_flag == (tv > 60), "meas_done and energy flag");
      check(!gate_en, "gates closed while holding");
      repeat (20) @(negedge clk);
      check(meas_done, "held");
      sys_rst = 1;
      @(negedge clk);
      check(!meas_done, "released by system reset");
    end
    check(rejects == 20, "reject count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
