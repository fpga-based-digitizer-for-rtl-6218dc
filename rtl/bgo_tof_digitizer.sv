// One BGO TOF digitizer channel: LVDS-buffered timing (T) and energy (E) inputs, channel
// controller, dual-side monitoring TDC for the timing signal (prompt Cerenkov light) and
// noise-resistant binary counter for the energy signal (scintillation light).
//
// The channel controller gates Buffered T and Buffered E into Gated T and Gated E once both
// inputs are quiet, checks that T and E arrive close together, waits for both measurements and
// reports meas_done and energy_flag to the main controller.  The held record (sampled
// thermometer code, coarse count, encoded fine time, TOT value) stays valid from meas_done
// until the next sys_rst.  gated_e is brought out so it can be watched, as was done to choose
// the update period.  The gates are plain AND gates driven by a register of the controller.
// The composition follows the published block diagram.
module bgo_tof_digitizer
  import bgo_pkg::*;
#(
  parameter int unsigned STABLE_CYCLES = bgo_pkg::STABLE_CYCLES_DEFAULT
) (
  input  logic             clk,
  input  logic             clk_ph,
  input  logic             sys_rst,
  input  logic             buffered_t,
  input  logic             buffered_e,
  input  logic [UPT_W-1:0] upt,
  input  logic [WIN_W-1:0] te_window,
  input  logic [TOT_W-1:0] tot_cutoff,
  output logic             gated_t,
  output logic             gated_e,
  output logic             meas_done,
  output logic             energy_flag,
  output logic             reject,
  output ch_record_t       rec
);
  timeunit 1ps; timeprecision 1fs;

  logic gate_en, clr, t_hit, t_done, e_busy, e_done;

  assign gated_t = buffered_t & gate_en;
  assign gated_e = buffered_e & gate_en;

  channel_controller #(.STABLE_CYCLES(STABLE_CYCLES)) u_cc (
    .clk, .sys_rst, .buffered_t, .buffered_e,
    .t_hit, .t_done, .e_busy, .e_done, .tot(rec.tot),
    .te_window, .tot_cutoff,
    .gate_en, .clr, .meas_done, .energy_flag, .reject
  );

  dsm_tdc u_tdc (
    .clk, .clk_ph, .sys_rst, .clr, .gated_t,
    .hit_seen(t_hit), .done(t_done),
    .code(rec.code), .coarse(rec.coarse), .fine(rec.fine)
  );

  nrbc u_nrbc (
    .clk, .clr, .gated_e, .upt,
    .busy(e_busy), .done(e_done), .tot(rec.tot)
  );

endmodule
