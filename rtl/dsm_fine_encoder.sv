// Dual-side monitoring fine-time encoder: finds both edges of the captured pulse in the
// thermometer code and corrects the start of propagation (SOP) with the end of propagation
// (EOP).
//
// At the capturing clock edge the delay line holds the TDC pulse as a run of ones: the EOP
// edge, launched by the system clock, has just entered the first CARRY4 and sits at eop (the
// lowest one); the SOP edge, launched by the hit, has travelled further and sits at sop (one
// past the highest one).  fine = sop - eop is the time from the hit to the clock edge that
// ended the pulse, in taps.  Any delay common to both edges, such as the clock-to-line path and
// its drift with voltage and temperature, drops out of the difference.  eop_ok reports that
// the EOP lies inside the monitoring CARRY4, as it must for a good conversion; an all-zero code
// (a hit right at the clock edge) gives fine = 0 and eop_ok = 0.
//
// The SOP-minus-EOP correction follows the published design; the published text gives the
// principle but not the encoder circuit, so this combinational priority search is this
// design's own.  It is purely combinational.
module dsm_fine_encoder
  import bgo_pkg::*;
#(
  parameter int unsigned NUM_TAPS   = bgo_pkg::N_TAPS,
  parameter int unsigned NUM_EOP_TAPS = bgo_pkg::EOP_TAPS
) (
  input  logic [NUM_TAPS-1:0] code,
  output fine_t             result
);
  timeunit 1ps; timeprecision 1fs;

  always_comb begin
    logic found;
    logic [FINE_W-1:0] lo, hi;
    found = 1'b0;
    lo    = '0;
    hi    = '0;
    for (int k = NUM_TAPS - 1; k >= 0; k--) begin
      if (code[k]) begin
        lo    = FINE_W'(k);
        found = 1'b1;
      end
    end
    for (int k = 0; k < NUM_TAPS; k++) begin
      if (code[k]) hi = FINE_W'(k + 1);
    end
    result.eop    = found ? lo : '0;
    result.sop    = found ? hi : '0;
    result.fine   = found ? FINE_W'(hi - lo) : '0;
    result.eop_ok = found && (lo < FINE_W'(NUM_EOP_TAPS));
  end

endmodule
