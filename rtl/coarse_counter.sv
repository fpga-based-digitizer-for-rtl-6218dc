// Coarse counter of the TDC: a 12-bit binary counter on the phase-shifted system clock,
// cleared by the system reset, whose value is latched at the TDC's capturing edge.
//
// With 1.8 ns per count the 12 bits cover 4096 x 1.8 ns, about 7.4 us after each system
// reset; the count wraps after that.  value is the count at the capturing clk_ph edge (before
// that edge's increment) and is held until clr.  Width and clock follow the published design;
// wrap-around rather than saturation is this design's choice.
module coarse_counter #(
  parameter int unsigned W = bgo_pkg::COARSE_W
) (
  input  logic         clk_ph,
  input  logic         sys_rst,    // restarts the count (clk_ph-synchronous)
  input  logic         clr,        // releases the latched value
  input  logic         capture_en,
  output logic [W-1:0] count,
  output logic [W-1:0] value
);
  timeunit 1ps; timeprecision 1fs;

  logic held;

  always_ff @(posedge clk_ph) begin
    if (sys_rst) count <= '0;
    else         count <= count + 1'b1;
  end

  always_ff @(posedge clk_ph) begin
    if (clr) begin
      value <= '0;
      held  <= 1'b0;
    end else if (capture_en && !held) begin
      value <= count;
      held  <= 1'b1;
    end
  end

endmodule
