// Two-channel FPGA digitizer for BGO time-of-flight PET (top level).
//
// Each channel measures the arrival time of its timing signal (prompt Cerenkov light) with a
// dual-side monitoring TDC and the energy of its energy signal (scintillation light) with a
// noise-resistant time-over-threshold counter.  The main controller waits until both channels
// hold an event, keeps the pair only if both energy flags are set, has the UART logic send both
// records to the computer, and then issues a system reset, which re-arms the channels and
// restarts the coarse counters.
//
// Clocks (from a PLL outside this module): clk, the 550 MHz system clock; clk_ph, the same
// clock shifted so that its edge falls just after the end of the TDC pulse has entered the
// first CARRY4; uart_clk, 55 MHz.  rst is synchronous to clk, uart_rst to uart_clk.  The T
// and E inputs are the outputs of the LVDS input buffers, which compare the analog signals with
// VT_Timing and VT_Energy; they are asynchronous.  upt, te_window and tot_cutoff are run-time
// settings (4, 32 and 60 in the configuration used for the reported measurements; the window
// value is this design's own).  The records and flags are also brought out for observation.
module bgo_tof_top
  import bgo_pkg::*;
#(
  parameter int unsigned NCH           = 2,
  parameter int unsigned STABLE_CYCLES = bgo_pkg::STABLE_CYCLES_DEFAULT,
  parameter int unsigned CLKS_PER_BIT  = bgo_pkg::UART_CLKS_PER_BIT_DEFAULT
) (
  input  logic             clk,
  input  logic             clk_ph,
  input  logic             uart_clk,
  input  logic             rst,
  input  logic             uart_rst,
  input  logic [NCH-1:0]   buffered_t,
  input  logic [NCH-1:0]   buffered_e,
  input  logic [UPT_W-1:0] upt,
  input  logic [WIN_W-1:0] te_window,
  input  logic [TOT_W-1:0] tot_cutoff,
  output logic             uart_txd,
  output logic [NCH-1:0]   gated_t,
  output logic [NCH-1:0]   gated_e,
  output logic [NCH-1:0]   meas_done,
  output logic [NCH-1:0]   energy_flag,
  output logic [NCH-1:0]   reject,
  output ch_record_t       rec [NCH],
  output logic             sys_rst,
  output logic             uart_start,
  output logic             uart_done,
  output logic [15:0]      valid_events,
  output logic [15:0]      dropped_events
);
  timeunit 1ps; timeprecision 1fs;

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    bgo_tof_digitizer #(.STABLE_CYCLES(STABLE_CYCLES)) u_ch (
      .clk, .clk_ph, .sys_rst,
      .buffered_t(buffered_t[c]), .buffered_e(buffered_e[c]),
      .upt, .te_window, .tot_cutoff,
      .gated_t(gated_t[c]), .gated_e(gated_e[c]),
      .meas_done(meas_done[c]), .energy_flag(energy_flag[c]), .reject(reject[c]),
      .rec(rec[c])
    );
  end

  main_controller #(.NCH(NCH)) u_main (
    .clk, .rst, .meas_done, .energy_flag, .uart_done,
    .sys_rst, .uart_start, .valid_events, .dropped_events
  );

  uart_logic #(.NCH(NCH), .CLKS_PER_BIT(CLKS_PER_BIT)) u_uart (
    .uart_clk, .rst(uart_rst), .uart_start, .rec, .uart_done, .txd(uart_txd)
  );

endmodule
