// Channel controller: arms one digitizer channel, rejects noise-triggered timing hits and
// grades the energy of the event.
//
// It follows the channel-controller flow of the published design:
//  1. CHECK   the channel is held cleared and both gates closed until the buffered T and E
//             inputs (brought into the clk domain by two flip-flops) have both been low for
//             STABLE_CYCLES clocks;
//  2. ARMED   the gates open: Gated T = Buffered T, Gated E = Buffered E;
//  3. WINDOW  once the TDC has seen a hit or the NRBC has started, the other must be seen
//             at most te_window clocks later, otherwise the timing hit is taken as noise, the channel is
//             cleared and the flow restarts at CHECK (reject pulses for one clock);
//  4. MEASURE wait until the TDC conversion and the TOT measurement are both done, then set
//             energy_flag when the TOT value is above tot_cutoff;
//  5. HOLD    meas_done is high and all results are held until the main controller's system
//             reset (sys_rst), which returns the channel to CHECK from any state.
// The published text does not define "stable", give the window value or say which of T and E
// must come first; treating the window symmetrically, counting it from the first of the two,
// and the meaning of "stable" are this design's choices.  Note that the NRBC reports its start
// two to three clocks after Gated E rises (synchroniser and state register), which shifts the
// effective window by that amount.  gate_en and clr are registered copies of the state decode.
module channel_controller
  import bgo_pkg::*;
#(
  parameter int unsigned STABLE_CYCLES = bgo_pkg::STABLE_CYCLES_DEFAULT
) (
  input  logic             clk,
  input  logic             sys_rst,
  input  logic             buffered_t,
  input  logic             buffered_e,
  input  logic             t_hit,       // TDC has seen a hit (clk domain)
  input  logic             t_done,      // TDC result valid (clk_ph domain, same frequency)
  input  logic             e_busy,      // NRBC activation running
  input  logic             e_done,      // NRBC measurement finished
  input  logic [TOT_W-1:0] tot,
  input  logic [WIN_W-1:0] te_window,
  input  logic [TOT_W-1:0] tot_cutoff,
  output logic             gate_en,     // opens both gates
  output logic             clr,         // clears TDC and NRBC
  output logic             meas_done,
  output logic             energy_flag,
  output logic             reject       // one-clock pulse on a T-E window rejection
);
  timeunit 1ps; timeprecision 1fs;

  typedef enum logic [2:0] {S_CHECK, S_ARMED, S_WINDOW, S_MEASURE, S_HOLD} state_t;

  state_t           state;
  logic             bt_s1, bt_s2, be_s1, be_s2, t_done_q;
  logic [7:0]       stable_cnt;
  logic [WIN_W-1:0] win_cnt;
  logic             e_seen;

  assign e_seen = e_busy | e_done;

  always_ff @(posedge clk) begin
    bt_s1    <= buffered_t;
    bt_s2    <= bt_s1;
    be_s1    <= buffered_e;
    be_s2    <= be_s1;
    t_done_q <= t_done;
  end

  always_ff @(posedge clk) begin
    reject <= 1'b0;
    if (sys_rst) begin
      state       <= S_CHECK;
      stable_cnt  <= '0;
      win_cnt     <= '0;
      energy_flag <= 1'b0;
    end else begin
      unique case (state)
        S_CHECK: begin
          energy_flag <= 1'b0;
          if (bt_s2 || be_s2) stable_cnt <= '0;
          else if (stable_cnt >= 8'(STABLE_CYCLES - 1)) begin
            stable_cnt <= '0;
            state      <= S_ARMED;
          end else stable_cnt <= stable_cnt + 1'b1;
        end
        S_ARMED: begin
          win_cnt <= WIN_W'(1);
          if (t_hit && e_seen)      state <= S_MEASURE;
          else if (t_hit || e_seen) state <= S_WINDOW;
        end
        S_WINDOW: begin
          if (t_hit && e_seen) state <= S_MEASURE;
          else if (win_cnt >= te_window) begin
            state  <= S_CHECK;
            reject <= 1'b1;
          end else win_cnt <= win_cnt + 1'b1;
        end
        S_MEASURE: begin
          if (t_done_q && e_done) begin
            energy_flag <= (tot > tot_cutoff);
            state       <= S_HOLD;
          end
        end
        S_HOLD:  ;
        default: state <= S_CHECK;
      endcase
    end
  end

  // Registered so that the asynchronous clear of the TDC hit flip-flop and the gates cannot
  // glitch; they follow the state by one clock.  clr is held low during sys_rst so that every
  // system reset ends with a rising edge of clr, which the hit flip-flop needs.
  always_ff @(posedge clk) begin
    clr     <= !sys_rst && (state == S_CHECK);
    gate_en <= (state == S_ARMED) || (state == S_WINDOW) || (state == S_MEASURE);
  end

  assign meas_done = (state == S_HOLD);

endmodule
