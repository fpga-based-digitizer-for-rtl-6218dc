// TDC input logic: turns the rising edge of Gated T into the pulse that is sent down the
// delay line, and tells the sampling registers which clock edge to keep.
//
// The pulse (tdc_in) rises asynchronously at the hit (start of propagation, SOP) and falls at
// the first system-clock edge that sees it (end of propagation, EOP).  Its width is therefore
// the time from the hit to the next clock edge, at most one clock period, which is what the
// 44-CARRY4 line is sized for.  Because the EOP is launched by the clock through the same path
// as the SOP, measuring the SOP relative to the EOP cancels the clock-to-line delay and its
// drift with voltage and temperature.
//
// capture_en is high from the clock edge that ends the pulse until the following edge of the
// phase-shifted clock (clk_ph), so exactly one clk_ph edge, the one just after the EOP has
// entered the first CARRY4, sees it high.  The sampling registers and the coarse counter use it
// as their enable.  hit_seen (clk domain) stays high from the clock edge ending the pulse until
// clr.  The hit flip-flop is clocked by the hit itself, so it can only be cleared
// asynchronously; clr is therefore used both as an asynchronous and a synchronous clear here.
//
// The SOP/EOP waveform and the Capture Enable output follow the Input Logic block of the
// published block diagram; the flip-flop structure realising it is this design's choice.
// clr (clk domain, active high) clears the hit flip-flop asynchronously.
module tdc_input_logic (
  input  logic clk,        // system clock
  input  logic clk_ph,     // system clock + phase, same frequency
  input  logic clr,        // channel clear, clk domain
  input  logic gated_t,    // asynchronous hit from the channel controller's gate
  output logic tdc_in,     // pulse into the delay line
  output logic capture_en, // enable for the next clk_ph edge
  output logic hit_seen    // a hit has been seen (clk domain)
);
  timeunit 1ps; timeprecision 1fs;

  logic hit_q;   // set by the hit, asynchronous to clk
  logic stop_q;  // clk-domain flag, ends the pulse
  logic stop_ph; // stop_q seen by clk_ph

  always_ff @(posedge gated_t or posedge clr) begin
    if (clr) hit_q <= 1'b0;
    else     hit_q <= 1'b1;
  end

  always_ff @(posedge clk) begin
    if (clr)        stop_q <= 1'b0;
    else if (hit_q) stop_q <= 1'b1;
  end

  always_ff @(posedge clk_ph) begin
    if (clr) stop_ph <= 1'b0;
    else     stop_ph <= stop_q;
  end

  assign tdc_in     = hit_q & ~stop_q;
  assign capture_en = stop_q & ~stop_ph;
  assign hit_seen   = stop_q;

endmodule
