// Dual-side monitoring (DSM) TDC of one channel: input logic, 44-CARRY4 delay line,
// cross-detection sampling registers, coarse counter and SOP/EOP fine-time encoder.
//
// A rising edge on gated_t launches a pulse down the line that ends at the next system-clock
// edge.  On the following clk_ph edge the line is sampled (SOP and EOP together) and the coarse
// count is latched.  One clk_ph cycle later the encoded fine time is registered and done rises;
// everything is held until clr.  The hit time, measured from the last system reset, is
//     t_hit = coarse * T_clk - fine * T_tap     (+ a constant offset),
// with T_tap about T_clk / 176.  The delay line is a behavioural model; the rest is
// synthesizable.  Structure and sizes follow the published block diagram; the exact register
// stages are this design's own.
module dsm_tdc
  import bgo_pkg::*;
#(
  parameter int unsigned NUM_CARRY4 = bgo_pkg::N_CARRY4,
  parameter real         TAP_PS   = 1818.18 / 176.0,
  parameter real         IN_PS    = 5.0
) (
  input  logic                    clk,
  input  logic                    clk_ph,
  input  logic                    sys_rst,
  input  logic                    clr,
  input  logic                    gated_t,
  output logic                    hit_seen,   // clk domain
  output logic                    done,       // clk_ph domain, result valid
  output logic [4*NUM_CARRY4-1:0]   code,
  output logic [COARSE_W-1:0]     coarse,
  output fine_t                   fine
);
  timeunit 1ps; timeprecision 1fs;

  localparam int unsigned NT = 4 * NUM_CARRY4;

  logic          tdc_in, capture_en, captured;
  logic [NT-1:0] raw;
  logic [COARSE_W-1:0] coarse_count;
  fine_t         enc;

  tdc_input_logic u_in (
    .clk, .clk_ph, .clr, .gated_t,
    .tdc_in, .capture_en, .hit_seen
  );

  carry4_delay_line #(.N_CARRY4(NUM_CARRY4), .TAP_PS(TAP_PS), .IN_PS(IN_PS)) u_line (
    .ci(tdc_in), .co(raw)
  );

  tdc_sampler #(.N_TAPS(NT)) u_smp (
    .clk_ph, .clr, .capture_en, .raw, .code, .valid(captured)
  );

  coarse_counter #(.W(COARSE_W)) u_coarse (
    .clk_ph, .sys_rst, .clr, .capture_en, .count(coarse_count), .value(coarse)
  );

  dsm_fine_encoder #(.NUM_TAPS(NT), .NUM_EOP_TAPS(CARRY4_TAPS)) u_enc (
    .code, .result(enc)
  );

  always_ff @(posedge clk_ph) begin
    if (clr) begin
      fine <= '0;
      done <= 1'b0;
    end else begin
      fine <= enc;
      done <= captured;
    end
  end

endmodule
