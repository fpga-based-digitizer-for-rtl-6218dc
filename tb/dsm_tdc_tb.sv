// Testbench of the dual-side monitoring TDC (input logic, carry-chain model, sampling
// registers, coarse counter, encoder).  Hits at random times after a system reset; for each the
// expected coarse count (clk_ph edges since the reset, up to the capturing edge) and the
// expected fine time (taps travelled by the SOP minus taps travelled by the EOP at the
// capturing edge) are worked out from the hit time, and the reconstructed hit time
// coarse * T - fine * T_tap is checked against the true one to within two taps.
module dsm_tdc_tb;
  timeunit 1ps; timeprecision 1fs;
  import bgo_pkg::*;

  localparam realtime T   = 1818.0;
  localparam realtime PHI = 20.0;
  localparam real     TAP = 1818.18 / 176.0;
  localparam real     IN  = 5.0;

  logic clk = 0, clk_ph = 0, sys_rst = 1, clr = 0, gated_t = 0;
  logic hit_seen, done;
  logic [N_TAPS-1:0] code;
  logic [COARSE_W-1:0] coarse;
  fine_t fine;
  int checks = 0, failures = 0, exact = 0;
  int n_ph;

  dsm_tdc dut (.*);

  always #(T/2) clk = ~clk;
  initial begin #(PHI); forever #(T/2) clk_ph = ~clk_ph; end
  always @(posedge clk_ph) n_ph++;

  initial begin : watchdog
    #(200000 * T);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int taps_after(real dt);
    int n = $floor((dt - IN) / TAP);
    if (n < 0) n = 0;
    if (n > N_TAPS) n = N_TAPS;
    return n;
  endfunction

  initial begin
    realtime t_rel, t_hit, t_edge, t_cap;
    int exp_coarse, s, e, cyc;
    real t_est, t_true;
    fine_t first;
    #1 clr = 1;
    for (int it = 0; it < 200; it++) begin
      sys_rst = 1; clr = 1;
      repeat (2) @(negedge clk);
      sys_rst = 0; clr = 0;
      t_rel = $realtime;              // no clk_ph edge at this instant
      n_ph = 0;
      cyc = $urandom_range(2, (it < 10) ? 4090 : 300);
      repeat (cyc) @(negedge clk);
      #(real'($urandom_range(0, 1817)) + 0.37);
      t_hit = $realtime;
      gated_t = 1;
      // next rising clk edge after the hit, and the capturing clk_ph edge after it
      t_edge = T * ($floor(t_hit / T - 0.5) + 1.5);
      if (t_edge <= t_hit) t_edge += T;
      t_cap = t_edge + PHI;
      #(t_cap - $realtime - 1.0);
      exp_coarse = n_ph;
      s = taps_after(t_cap - t_hit);
      e = taps_after(t_cap - t_edge);
      repeat (3) @(posedge clk_ph);
      #1;
      gated_t = 0;
      checks++;
      if (!done || !hit_seen || coarse != COARSE_W'(exp_coarse)) begin
        failures++;
        $display("FAIL it=%0d done=%0d coarse=%0d exp=%0d", it, done, coarse, exp_coarse);
      end
      // a pulse narrower than about one tap dies in the line: an empty code is then correct
      checks++;
      if (s - e <= 1 && fine.fine == 0 && !fine.eop_ok) exact++;
      else if ((int'(fine.fine) - (s - e)) > 1 || (int'(fine.fine) - (s - e)) < -1 ||
          int'(fine.eop) != e || !fine.eop_ok) begin
        failures++;
        $display("FAIL it=%0d fine=%0d eop=%0d exp %0d/%0d", it, fine.fine, fine.eop, s - e, e);
      end
      else if (int'(fine.fine) == s - e) exact++;
      // reconstructed time since reset release
      t_true = t_hit - t_rel;
      // the reset is released half a period before a clk edge; the capturing edge follows
      // the clk edge (coarse + 1) periods after that edge
      t_est  = (real'(coarse) + 0.5) * T - real'(fine.fine) * TAP;
      checks++;
      if ((t_est - t_true) > 2.0 * TAP + 1.0 || (t_true - t_est) > 2.0 * TAP + 1.0) begin
        failures++;
        $display("FAIL it=%0d t_true=%0.1f t_est=%0.1f", it, t_true, t_est);
      end
      // later hits are ignored
      first = fine;
      gated_t = 1;
      #300;
      gated_t = 0;
      repeat (2) @(posedge clk_ph);
      checks++;
      if (coarse != COARSE_W'(exp_coarse) || fine != first) failures++;
    end
    checks++;
    if (exact < 150) failures++;
    $display("exact fine codes: %0d of 200", exact);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
