// Testbench of one digitizer channel with pulse-shaped T and E inputs: a timing pulse followed
// a few nanoseconds later by an energy pulse with local spikes on its rising part.  Checks the
// TOT value (pulse width / 1.818 ns + upt, within one count), the energy flag against the
// cut-off, the reconstructed hit time (within two taps), rejection of a timing pulse with no
// energy pulse, and re-arming by the system reset.
module bgo_tof_digitizer_tb;
  timeunit 1ps; timeprecision 1fs;
  import bgo_pkg::*;

  localparam realtime T   = 1818.0;
  localparam realtime PHI = 20.0;
  localparam real     TAP = 1818.18 / 176.0;

  logic clk = 0, clk_ph = 0, sys_rst = 1, buffered_t = 0, buffered_e = 0;
  logic [UPT_W-1:0] upt = 4;
  logic [WIN_W-1:0] te_window = 8'd32;
  logic [TOT_W-1:0] tot_cutoff = 10'd60;
  logic gated_t, gated_e, meas_done, energy_flag, reject;
  ch_record_t rec;
  int checks = 0, failures = 0, rejects = 0;

  bgo_tof_digitizer dut (.*);

  always #(T/2) clk = ~clk;
  initial begin #(PHI); forever #(T/2) clk_ph = ~clk_ph; end
  always @(posedge clk) if (reject) rejects++;

  initial begin : watchdog
    #(400000 * T);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $realtime); end
  endtask

  task automatic energy_pulse(input realtime width, input bit spikes);
    realtime t0 = $realtime;
    buffered_e = 1;
    if (spikes) begin
      // dips shorter than upt clocks, each followed by a high stretch longer than upt clocks
      // so that the second check of the double-check logic falls on a high level
      repeat (3) begin
        #(real'($urandom_range(300, 2500)));
        buffered_e = 0;
        #(real'($urandom_range(300, 2500)));
        buffered_e = 1;
        #(real'($urandom_range(9000, 12000)));
      end
    end
    #(width - ($realtime - t0));
    buffered_e = 0;
  endtask

  initial begin
    realtime t_rel, t_hit, w;
    real t_true, t_est, exp_tot;
    int g;
    for (int it = 0; it < 40; it++) begin
      sys_rst = 1;
      repeat (2) @(negedge clk);
      sys_rst = 0;
      t_rel = $realtime;
      repeat (10 + $urandom_range(0, 400)) @(negedge clk);
      #(real'($urandom_range(0, 1817)) + 0.29);
      if (it % 8 == 7) begin
        // timing pulse with no energy pulse: rejected, channel re-arms by itself
        buffered_t = 1; #(3000); buffered_t = 0;
        repeat (60) @(negedge clk);
        check(rejects == (it + 1) / 8 && !meas_done, "noise hit rejected");
        continue;
      end
      t_hit = $realtime;
      buffered_t = 1;
      #(real'($urandom_range(2000, 8000)));
      w = (it % 3 == 0) ? real'($urandom_range(20000, 100000)) : real'($urandom_range(120000, 600000));
      if (it % 2 == 1 && w < 60000.0) w = 60000.0;
      fork
        begin #(2000); buffered_t = 0; end
        energy_pulse(w, it % 2 == 1);
      join
      g = 0;
      while (!meas_done && g < 1000) begin @(negedge clk); g++; end
      check(meas_done, "measurement done");
      exp_tot = w / T + 4.0;
      // a dip right after the rising edge can delay the first synchronised high sample by up
      // to two clocks
      check(real'(rec.tot) > exp_tot - ((it % 2 == 1) ? 3.0 : 1.0) && real'(rec.tot) < exp_tot + 1.0,
            "TOT value");
      check(energy_flag == (rec.tot > 60), "energy flag");
      t_true = t_hit - t_rel;
      t_est  = (real'(rec.coarse) + 0.5) * T - real'(rec.fine.fine) * TAP;
      check(t_est - t_true < 2.0 * TAP + 1.0 && t_true - t_est < 2.0 * TAP + 1.0, "hit time");
      if (it < 3) $display("tot=%0d (%.1f) coarse=%0d fine=%0d t_true=%.1f t_est=%.1f",
                           rec.tot, exp_tot, rec.coarse, rec.fine.fine, t_true, t_est);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
