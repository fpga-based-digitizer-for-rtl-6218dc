// Double-check logic (DCL) of the noise-resistant binary counter: turns the jittery Gated E
// comparator output into one clean activation window for the TOT counter.
//
// Gated E is first brought into the system-clock domain by two flip-flops.  The activation
// signal rises on the first synchronised high sample.  When the input is later seen low, that
// is only a first check: the DCL waits the user-defined period (upt clocks) and checks again.
// If the input is high at the second check the low was a dip between local spikes and the
// activation simply continues; if it is still low the measurement ends (done).  A pulse of N
// clocks thus gives an activation of N + upt clocks and the smallest count is 1 + upt, as
// stated for the published design.  upt = 0 behaves as upt = 1.
//
// The UPT-based check and its minimum count follow the published design; the state machine
// realising it is this design's own.  clr (synchronous) re-arms the logic.  stop ends the
// activation at once (used when the TOT counter saturates).
module double_check_logic
  import bgo_pkg::*;
(
  input  logic             clk,
  input  logic             clr,
  input  logic             gated_e,
  input  logic [UPT_W-1:0] upt,
  input  logic             stop,
  output logic             active,
  output logic             done
);
  timeunit 1ps; timeprecision 1fs;

  typedef enum logic [1:0] {S_IDLE, S_ACTIVE, S_RECHECK, S_DONE} state_t;

  state_t           state;
  logic             e_s1, e_s2;
  logic [UPT_W-1:0] wait_cnt;

  always_ff @(posedge clk) begin
    e_s1 <= gated_e;
    e_s2 <= e_s1;
  end

  always_ff @(posedge clk) begin
    if (clr) begin
      state    <= S_IDLE;
      wait_cnt <= '0;
    end else begin
      unique case (state)
        S_IDLE:    if (e_s2) state <= S_ACTIVE;
        S_ACTIVE:  if (stop) state <= S_DONE;
                   else if (!e_s2) begin
                     state    <= S_RECHECK;
                     wait_cnt <= UPT_W'(1);
                   end
        S_RECHECK: if (stop) state <= S_DONE;
                   else if (wait_cnt >= upt) state <= e_s2 ? S_ACTIVE : S_DONE;
                   else wait_cnt <= wait_cnt + 1'b1;
        S_DONE:    ;
        default:   state <= S_IDLE;
      endcase
    end
  end

  assign active = (state == S_ACTIVE) || (state == S_RECHECK);
  assign done   = (state == S_DONE);

endmodule
