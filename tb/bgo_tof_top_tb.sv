// End-to-end testbench of the two-channel digitizer at its default sizes (550 MHz system
// clock, 44-CARRY4 lines, 55 MHz UART clock) except for the UART bit time, shortened to 8
// clocks to keep the simulation short.  Coincidences are applied
// with the time differences of the electrical test (+2050, +260, 0, -260, -2050 ps between
// channel 1 and channel 2), each timing pulse followed 5 ns later by an energy pulse.  A
// receiver in the testbench decodes every UART frame; the time difference is rebuilt from the
// transmitted coarse counts and thermometer codes (fine time = number of ones in the code) and
// must match the applied one within three taps, and the TOT values the pulse widths.  The
// sequence also includes an event below the TOT cut-off (dropped), a timing pulse without an
// energy pulse (rejected by the T-E window), energy pulses with local spikes (bridged by the
// double-check logic) and energy pulses beyond the TOT range (saturated at 1000); each of these
// must be seen at least once.
module bgo_tof_top_tb;
  timeunit 1ps; timeprecision 1fs;
  import bgo_pkg::*;

  localparam realtime T   = 1818.0;
  localparam realtime PHI = 20.0;
  localparam realtime TU  = 18182.0;
  localparam int      CPB = 8;   // UART bit time shortened for simulation speed
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

  bgo_tof_top #(.CLKS_PER_BIT(CPB)) dut (.*);

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
    #(3ms);
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
    realtime dts[5] = '{2050.0, 260.0, 0.0, -260.0, -2050.0};
    int drop0;
    repeat (4) @(negedge uart_clk);
    rst = 0; uart_rst = 0;
    // 1. the five time differences of the electrical test, 200 ns energy pulses
    for (int i = 0; i < 5; i++) begin
      wait_armed();
      coincidence(dts[i], 200000.0, 200000.0, i == 1);
      receive_and_check(dts[i], 200000.0, 200000.0);
      if (i == 1) n_bridged++;
    end
    // 2. an event below the TOT cut-off on channel 2: dropped, nothing sent
    wait_armed();
    drop0 = int'(dropped_events);
    coincidence(700.0, 200000.0, 60000.0, 0);
    repeat (200) @(negedge clk);
    check(int'(dropped_events) == drop0 + 1 && rx.size() == 0 && !uart_start, "low energy dropped");
    // 3. a timing pulse with no energy pulse on channel 1: rejected by the T-E window
    wait_armed();
    buffered_t[0] = 1; #(3000); buffered_t[0] = 0;
    repeat (100) @(negedge clk);
    check(n_reject >= 1 && meas_done == 2'b00, "noise hit rejected");
    coincidence(-1200.0, 300000.0, 250000.0, 1);
    receive_and_check(-1200.0, 300000.0, 250000.0);
    n_bridged++;
    // 4. energy pulses longer than the TOT range
    wait_armed();
    coincidence(3700.0, 1900000.0, 2000000.0, 0);
    receive_and_check(3700.0, 1900000.0, 2000000.0);
    // every mechanism must have happened
    check(n_frames == 7 && valid_events == 16'd7, "frames sent");
    check(dropped_events >= 1, "energy-flag drop happened");
    check(n_reject >= 1, "T-E window rejection happened");
    check(n_bridged >= 1, "spiky energy pulse bridged");
    check(n_saturated >= 2, "TOT saturation happened");
    check(n_multi_clock >= 2, "time difference beyond one clock");
    $display("frames %0d dropped %0d rejected %0d bridged %0d saturated %0d multi-clock %0d",
             n_frames, dropped_events, n_reject, n_bridged, n_saturated, n_multi_clock);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
