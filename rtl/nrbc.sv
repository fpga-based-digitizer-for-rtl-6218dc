// Noise-resistant binary counter (NRBC): time-over-threshold energy measurement that is not
// cut short by local spikes on the rising edge of the energy signal.
//
// The double-check logic filters Gated E with the user-defined period (upt) and drives the
// activation input of the 10-bit TOT counter.  The TOT value is the number of system clocks the
// activation lasted: for a clean pulse of N clocks it is N + upt, from 1 + upt up to 1000.  done
// rises when the activation ends, or when the counter saturates at 1000, and holds with the
// value until clr.  busy is high during the activation.  Structure follows the published
// block diagram (double-check logic feeding a 10-bit counter).
module nrbc
  import bgo_pkg::*;
(
  input  logic             clk,
  input  logic             clr,
  input  logic             gated_e,
  input  logic [UPT_W-1:0] upt,
  output logic             busy,
  output logic             done,
  output logic [TOT_W-1:0] tot
);
  timeunit 1ps; timeprecision 1fs;

  logic full, dcl_done;

  double_check_logic u_dcl (
    .clk, .clr, .gated_e, .upt, .stop(full), .active(busy), .done(dcl_done)
  );

  tot_counter #(.W(TOT_W), .MAX(TOT_MAX)) u_cnt (
    .clk, .clr, .active(busy), .value(tot), .full
  );

  assign done = dcl_done;

endmodule
