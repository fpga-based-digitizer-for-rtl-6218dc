// Sampling registers of the TDC with cross-detection ordering.
//
// On the clk_ph edge at which capture_en is high the raw carry-chain outputs are registered
// and held until clr.  Within every CARRY4 the outputs are taken in 2-1-4-3 order, so bits
// 4c+0..4c+3 of code come from raw outputs 4c+1, 4c+0, 4c+3, 4c+2.  Because adjacent outputs of
// a CARRY4 switch in swapped order, this yields a thermometer code without bubbles and no
// bubble-correction logic is needed.  The lowest CARRY4 (bits 3:0) monitors the end of
// propagation, the rest the start of propagation.
//
// The 2-1-4-3 order and the EOP/SOP split follow the published design.  valid rises at the
// capturing edge and stays high until clr (synchronous, clk_ph domain).
module tdc_sampler #(
  parameter int unsigned N_TAPS = bgo_pkg::N_TAPS
) (
  input  logic              clk_ph,
  input  logic              clr,
  input  logic              capture_en,
  input  logic [N_TAPS-1:0] raw,
  output logic [N_TAPS-1:0] code,
  output logic              valid
);
  timeunit 1ps; timeprecision 1fs;

  logic [N_TAPS-1:0] reordered;

  always_comb begin
    for (int k = 0; k < N_TAPS; k++) reordered[k] = raw[k ^ 1];
  end

  always_ff @(posedge clk_ph) begin
    if (clr) begin
      code  <= '0;
      valid <= 1'b0;
    end else if (capture_en && !valid) begin
      code  <= reordered;
      valid <= 1'b1;
    end
  end

endmodule
