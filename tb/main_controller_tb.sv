// Testbench of the main controller: system reset length, waiting for all channels, dropping
// events whose energy flags are not both set, the four-phase UART handshake and the event
// counters.  The UART side is played by the testbench with random answer delays.
module main_controller_tb;
  timeunit 1ps; timeprecision 1fs;

  logic clk = 0, rst = 1, uart_done = 0;
  logic [1:0] meas_done = '0, energy_flag = '0;
  logic sys_rst, uart_start;
  logic [15:0] valid_events, dropped_events;
  int checks = 0, failures = 0, n_valid = 0, n_drop = 0, rst_len;

  main_controller dut (.*);

  always #909 clk = ~clk;

  initial begin : watchdog
    #(200000 * 1818);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $realtime); end
  endtask

  task automatic wait_reset_end();
    int g = 0;
    rst_len = 0;
    while (sys_rst && g < 200) begin @(negedge clk); g++; rst_len++; end
  endtask

  initial begin
    bit [1:0] f;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int it = 0; it < 100; it++) begin
      wait_reset_end();
      check(!sys_rst && !uart_start, "reset ended");
      // channels finish one after the other
      meas_done[it % 2] = 1;
      repeat ($urandom_range(1, 20)) @(negedge clk);
      check(!sys_rst && !uart_start, "waits for all channels");
      f = 2'($urandom_range(0, 3));
      energy_flag = f;
      meas_done = 2'b11;
      repeat (2) @(negedge clk);
      if (f == 2'b11) begin
        n_valid++;
        check(uart_start && !sys_rst, "uart start on valid coincidence");
        repeat ($urandom_range(1, 50)) @(negedge clk);
        check(uart_start, "start held until done");
        uart_done = 1;
        repeat (4) @(negedge clk);
        check(!uart_start && sys_rst, "start dropped, system reset after done");
        meas_done = '0; energy_flag = '0;
        repeat ($urandom_range(3, 20)) @(negedge clk);
        check(sys_rst, "reset held while done is high");
        uart_done = 0;
      end else begin
        n_drop++;
        check(!uart_start && sys_rst, "system reset on missing energy flag");
        meas_done = '0; energy_flag = '0;
        wait_reset_end();
        check(rst_len >= 1, "reset length");
        continue;
      end
    end
    wait_reset_end();
    check(valid_events == 16'(n_valid) && dropped_events == 16'(n_drop), "event counters");
    $display("valid %0d dropped %0d", n_valid, n_drop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
