// Testbench of the noise-resistant binary counter.  Clean pulses aligned to the clock give
// TOT = N + upt; spiky pulses whose dips are shorter than upt give the TOT of the whole pulse;
// pulses longer than the range saturate at 1000.  It then repeats the electrical test of the
// design: asynchronous pulses of 4, 10, 100, 200, 500 and 1800 ns with upt = 1, 2 and 4; the
// mean TOT must be within 0.5 of width / 1.818 ns + upt, which also checks linearity.
module nrbc_tb;
  timeunit 1ps; timeprecision 1fs;
  import bgo_pkg::*;

  localparam realtime T = 1818.0;
  logic clk = 0, clr = 1, gated_e = 0;
  logic [UPT_W-1:0] upt;
  logic busy, done;
  logic [TOT_W-1:0] tot;
  int checks = 0, failures = 0;

  nrbc dut (.*);

  always #(T/2) clk = ~clk;

  initial begin : watchdog
    #(3000000 * T);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic arm();
    clr = 1;
    repeat (2) @(negedge clk);
    clr = 0;
  endtask

  task automatic wait_done();
    int guard = 0;
    while (!done && guard < 3000) begin @(negedge clk); guard++; end
  endtask

  initial begin
    int u, n, d, extra;
    real sum, mean, expm;
    realtime widths[6] = '{4000.0, 10000.0, 100000.0, 200000.0, 500000.0, 1800000.0};
    int upts[3] = '{1, 2, 4};
    // clean and spiky pulses aligned to the clock
    for (int it = 0; it < 60; it++) begin
      u = $urandom_range(1, 6);
      upt = UPT_W'(u);
      n = $urandom_range(1, 300);
      arm();
      gated_e = 1;
      extra = 0;
      if (it % 2 == 1) begin
        // local spikes: three dips of at most upt clocks on the rising part, each followed by
        // a high stretch longer than upt
        repeat (3) begin
          d = $urandom_range(u + 1, u + 3);  // high long enough to cover the second check
          repeat (d) @(negedge clk);
          extra += d;
          gated_e = 0;
          d = $urandom_range(1, u);
          repeat (d) @(negedge clk);
          extra += d;
          gated_e = 1;
        end
      end
      repeat (n) @(negedge clk);
      gated_e = 0;
      wait_done();
      checks++;
      if (tot != TOT_W'(n + extra + u) || !done) begin
        failures++;
        $display("FAIL it=%0d n=%0d upt=%0d tot=%0d", it, n, u, tot);
      end
    end
    // saturation
    upt = 4;
    arm();
    gated_e = 1;
    repeat (1100) @(negedge clk);
    checks++;
    if (tot != 1000 || !done) failures++;
    gated_e = 0;
    // electrical test: asynchronous pulses
    for (int iu = 0; iu < 3; iu++) begin
      upt = UPT_W'(upts[iu]);
      for (int iw = 0; iw < 6; iw++) begin
        sum = 0.0;
        for (int s = 0; s < 40; s++) begin
          arm();
          #(real'($urandom_range(0, 1817)));
          gated_e = 1;
          #(widths[iw]);
          gated_e = 0;
          wait_done();
          sum += real'(tot);
        end
        mean = sum / 40.0;
        expm = widths[iw] / T + real'(upts[iu]);
        checks++;
        if (mean < expm - 0.5 || mean > expm + 0.5) begin
          failures++;
          $display("FAIL width=%0.0f ps upt=%0d mean=%0.2f expected %0.2f", widths[iw],
                   upts[iu], mean, expm);
        end
        $display("width %0.0f ns upt %0d: mean TOT %0.2f", widths[iw] / 1000.0, upts[iu], mean);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
