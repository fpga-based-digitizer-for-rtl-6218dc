// Shared constants and record types of the two-channel BGO time-of-flight digitizer.
//
// The numbers that come from the published design are the 550 MHz system clock (1.8 ns
// period), the 44-CARRY4 delay line (one CARRY4 monitoring the end of propagation, 43 the
// start of propagation), the 12-bit coarse counter, the 10-bit TOT counter with its maximum of
// 1000 counts, the 4-clock update period (UPT) of the double-check logic, the TOT cut-off of 60
// and the 55 MHz UART clock.  The LVDS-input stability time, the T-E noise-rejection window and
// the UART bit rate are not given and are this design's own choices.
package bgo_pkg;
  timeunit 1ps; timeprecision 1fs;

  // Delay line geometry.
  localparam int unsigned CARRY4_TAPS   = 4;
  localparam int unsigned N_CARRY4      = 44;                    // 43 SOP + 1 EOP
  localparam int unsigned N_TAPS        = N_CARRY4 * CARRY4_TAPS; // 176
  localparam int unsigned EOP_TAPS      = CARRY4_TAPS;           // CARRY4 #1
  localparam int unsigned FINE_W        = 8;                     // holds 0..176

  // Counters.
  localparam int unsigned COARSE_W      = 12;
  localparam int unsigned TOT_W         = 10;
  localparam int unsigned TOT_MAX       = 1000;

  // Run-time settings and their defaults.
  localparam int unsigned UPT_W         = 4;
  localparam int unsigned UPT_DEFAULT   = 4;
  localparam int unsigned TOT_CUTOFF_DEFAULT = 60;
  localparam int unsigned WIN_W         = 8;
  localparam int unsigned TE_WINDOW_DEFAULT  = 32;   // system clocks, own choice
  localparam int unsigned STABLE_CYCLES_DEFAULT = 2; // own choice

  // UART: 55 MHz / 115200 baud, own choice of rate.
  localparam int unsigned UART_CLKS_PER_BIT_DEFAULT = 477;

  // Fine-time result of one TDC conversion.
  typedef struct packed {
    logic [FINE_W-1:0] sop;    // tap index just past the start-of-propagation edge
    logic [FINE_W-1:0] eop;    // tap index of the end-of-propagation edge
    logic [FINE_W-1:0] fine;   // sop - eop: hit-to-clock-edge time in taps
    logic              eop_ok; // EOP edge found inside the monitoring CARRY4
  } fine_t;

  // What one channel holds after a measurement.
  typedef struct packed {
    logic [N_TAPS-1:0]   code;    // sampled thermometer code (after cross-detection reorder)
    logic [COARSE_W-1:0] coarse;  // coarse count at the capturing clock edge
    fine_t               fine;
    logic [TOT_W-1:0]    tot;     // TOT value from the NRBC
  } ch_record_t;

  // Bytes per channel in the UART frame: code, TOT, coarse, each rounded up to whole bytes.
  localparam int unsigned CODE_BYTES   = (N_TAPS + 7) / 8;     // 22
  localparam int unsigned TOT_BYTES    = (TOT_W + 7) / 8;      // 2
  localparam int unsigned COARSE_BYTES = (COARSE_W + 7) / 8;   // 2
  localparam int unsigned CH_BYTES     = CODE_BYTES + TOT_BYTES + COARSE_BYTES; // 26

endpackage
