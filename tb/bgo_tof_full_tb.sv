// Full-size testbench: the two-channel digitizer with every parameter at its default,
// including the 115200-baud UART (477 clocks of 55 MHz per bit), taken through one complete
// operation: a coincidence 2050 ps apart with spiky energy pulses, the coincidence decision and
// the transmission of the 52-byte frame, which is decoded and checked (time difference within
// three taps, TOT values within the expected range).
module bgo_tof_full_tb;
  timeunit 1ps; timeprecision 1fs;
  import bgo_pkg::*;

  localparam realtime T   = 1818.0;
  localparam realtime PHI = 20.0;
  localparam realtime TU  = 18182.0;
  localparam int      CPB = UART_CLKS_PER_BIT_DEFAULT;
  localparam real     TAP = 1818.18 / 176.0;

  logic clk = 0, clk_ph = 0, uart_clk = 0, rst = 1, uart_rst = 1;
  logic [1:0] buffered_t = '0, buffered_e = '0;
  logic [UPT_W-1:0] upt = UPT_W'(UPT_DEFAULT);
  logic [WIN_W-1:0] te_window = WIN_W'(TE_WINDOW_DEFAULT);
  logic [TOT_W-1:0] tot_cutoff = TOT_W'(TOT_CUTOFF_DEFAULT);
  logic uart_txd, sys_rst, uart_start, uart_done;
  logic [1:0] gated_t, gated_e, meas_done, energy_flag, reject;
  ch_record_t rec [2];
  logic [15:0] valid_events, dropped_events;
  int checks = 0, failures = 0;
  int n_reject = 0, n_frames = 0, n_bridged = 0, n_saturated = 0, n_multi_clock = 0;
  byte unsigned rx[$];

  bgo_tof_top dut (.*);

  always #(T/2) clk = ~clk;
  initial begin #(PHI); forever #(T/2) clk_ph = ~clk_ph; end
  always #(TU/2) uart_clk = ~uart_clk;
  always @(posedge clk) n_reject += int'(reject[0]) + int'(reject[1]);

  // UART receiver
  initial begin
    byte unsigned b;
    forever begin
      @(negedge uart_txd);
      #(TU * CPB / 2);
      if (uart_txd == 0) begin
        for (int i = 0; i < 8; i++) begin
          #(TU * CPB);
          b[i] = uart_txd;
        end
        #(TU * CPB);
        rx.push_back(b);
      end
    end
  end

  initial begin : watchdog
    #(8ms);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $realtime); end
  endtask

  task automatic wait_armed();
    int g = 0;
    while ((sys_rst || uart_start) && g < 300000) begin @(negedge clk); g++; end
    repeat (20) @(negedge clk);
  endtask

  task automatic e_pulse(input int c, input realtime width, input bit spikes);
    realtime t0 = $realtime;
    buffered_e[c] = 1;
    if (spikes) begin
      repeat (3) begin
        #(real'($urandom_range(300, 2500)));
        buffered_e[c] = 0;
        #(real'($urandom_range(300, 2500)));
        buffered_e[c] = 1;
        #(real'($urandom_range(9000, 12000)));
      end
    end
    #(width - ($realtime - t0));
    buffered_e[c] = 0;
  endtask

  // timing pulse, then 5 ns later the energy pulse of one channel
  task automatic channel_event(input int c, input realtime delay, input realtime width,
                               input bit spikes);
    #(delay);
    buffered_t[c] = 1;
    #(5000);
    fork
      begin #(2000); buffered_t[c] = 0; end
      e_pulse(c, width, spikes);
    join
  endtask

  task automatic coincidence(input realtime dt, input realtime w1, input realtime w2,
                             input bit spikes);
    #(real'($urandom_range(0, 1817)) + 0.41);
    if (dt >= 0) fork
      channel_event(0, 0, w1, spikes);
      channel_event(1, dt, w2, spikes);
    join else fork
      channel_event(0, -dt, w1, spikes);
      channel_event(1, 0, w2, spikes);
    join
  endtask

  // decode one frame and check time difference and TOT values
  task automatic receive_and_check(input realtime dt, input realtime w1, input realtime w2);
    int g = 0;
    int coarse[2], tot[2], ones[2];
    real dt_meas, exp_tot;
    while (rx.size() < 2 * CH_BYTES && g < 12000) begin #(TU * 100); g++; end
    check(rx.size() == 2 * CH_BYTES, "frame received");
    if (rx.size() != 2 * CH_BYTES) return;
    n_frames++;
    for (int c = 0; c < 2; c++) begin
      ones[c] = 0;
      for (int k = 0; k < CODE_BYTES; k++) ones[c] += $countones(rx[c * CH_BYTES + k]);
      tot[c]    = int'(rx[c * CH_BYTES + 22]) + 256 * int'(rx[c * CH_BYTES + 23]);
      coarse[c] = int'(rx[c * CH_BYTES + 24]) + 256 * int'(rx[c * CH_BYTES + 25]);
    end
    rx.delete();
    // t_hit = coarse * T - fine * T_tap + const
    dt_meas = real'(coarse[1] - coarse[0]) * T - real'(ones[1] - ones[0]) * TAP;
    if (coarse[1] != coarse[0]) n_multi_clock++;
    check(dt_meas - dt < 3.0 * TAP && dt - dt_meas < 3.0 * TAP, "time difference");
    $display("dt applied %0.0f ps, measured %0.1f ps (coarse %0d/%0d, fine %0d/%0d), TOT %0d/%0d",
             dt, dt_meas, coarse[0], coarse[1], ones[0], ones[1], tot[0], tot[1]);
    for (int c = 0; c < 2; c++) begin
      exp_tot = ((c == 0) ? w1 : w2) / T + real'(UPT_DEFAULT);
      if (exp_tot > 1000.0) begin
        check(tot[c] == 1000, "TOT saturated");
        if (tot[c] == 1000) n_saturated++;
      end else
        check(real'(tot[c]) > exp_tot - 3.0 && real'(tot[c]) < exp_tot + 1.0, "TOT value");
    end
  endtask

  initial begin
    repeat (4) @(negedge uart_clk);
    rst = 0; uart_rst = 0;
    wait_armed();
    coincidence(-2050.0, 200000.0, 250000.0, 1);
    receive_and_check(-2050.0, 200000.0, 250000.0);
    check(n_frames == 1 && valid_events == 16'd1 && dropped_events == 16'd0, "one frame sent");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
