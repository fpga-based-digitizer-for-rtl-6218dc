// Testbench of the TDC input logic: hits at random offsets within the clock period; checks
// that the pulse rises at the hit and falls at the next system-clock edge, that exactly one
// clk_ph edge sees capture_en, that later hits are ignored until clr, and hit_seen.
module tdc_input_logic_tb;
  timeunit 1ps; timeprecision 1fs;

  localparam realtime T   = 1818.0;
  localparam realtime PHI = 20.0;

  logic clk = 0, clk_ph = 0, clr = 0, gated_t = 0;
  logic tdc_in, capture_en, hit_seen;
  int checks = 0, failures = 0;
  int cap_edges = 0;
  realtime t_rise, t_fall;

  tdc_input_logic dut (.*);

  always #(T/2) clk = ~clk;
  initial begin #(PHI); forever #(T/2) clk_ph = ~clk_ph; end

  always @(posedge clk_ph) if (capture_en) cap_edges++;
  always @(posedge tdc_in) t_rise = $realtime;
  always @(negedge tdc_in) t_fall = $realtime;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $realtime); end
  endtask

  initial begin : watchdog
    #(2000 * T);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    realtime off, t_hit, t_edge;
    #1 clr = 1;
    repeat (3) @(posedge clk);
    for (int n = 0; n < 100; n++) begin
      @(posedge clk);
      #1;
      clr = 0;
      @(posedge clk);
      off = 30.0 + real'($urandom_range(0, 1700));
      t_edge = $realtime + T;          // the next rising edge of clk
      #(off);
      t_hit   = $realtime;
      cap_edges = 0;
      gated_t = 1;
      #1;
      check(tdc_in == 1, "pulse starts at hit");
      check(t_rise == t_hit, "rise time");
      check(hit_seen == 0, "no hit_seen before clock");
      #(t_edge - $realtime - 2.0);
      check(tdc_in == 1, "pulse high before next edge");
      check(capture_en == 0, "capture_en low before edge");
      #4;
      check(tdc_in == 0, "pulse ends at next edge");
      check(t_fall == t_edge, "fall time equals clock edge");
      check(capture_en == 1, "capture_en after edge");
      check(hit_seen == 1, "hit_seen");
      gated_t = 0;
      #(3 * T);
      check(cap_edges == 1, "exactly one capture edge");
      // a second hit must not restart the pulse
      gated_t = 1;
      #10;
      check(tdc_in == 0, "second hit ignored");
      gated_t = 0;
      @(posedge clk);
      #1;
      clr = 1;
      #1;
      check(hit_seen == 1 && tdc_in == 0, "held until clr edge");
      @(posedge clk);
      #1;
      check(hit_seen == 0 && capture_en == 0, "cleared");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
