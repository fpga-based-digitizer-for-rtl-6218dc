// Behavioural model (not synthesizable) of the tapped delay line of the TDC: a chain of
// N_CARRY4 carry primitives of four outputs each, 44 in the published design, so that one
// 1.8 ns clock period spans the whole line.
//
// The signal entering at ci reaches output k of the chain after IN_PS + (p+1) * TAP_PS, with p
// the position of that output in propagation order.  As in real carry primitives, the outputs
// of a CARRY4 do not switch in index order: output 1 switches before output 0 and output 3
// before output 2, so sampling them in index order would give bubbles in the thermometer code.
// The sampling registers undo this by reading them in 2-1-4-3 order (cross-detection
// sampling).  The line is a chain of stages of one tap delay each, so a pulse travels down the
// line intact as long as it is wider than one tap.  The tap delay defaults to one 550 MHz period over 176 taps.
//
// This model stands in for the FPGA's carry chain, which cannot be described as logic; its
// delays are a model choice, not measured values.
module carry4_delay_line #(
  parameter int unsigned N_CARRY4 = 44,
  parameter real         TAP_PS   = 1818.18 / 176.0,
  parameter real         IN_PS    = 5.0
) (
  input  logic                    ci,
  output logic [4*N_CARRY4-1:0]   co
);
  timeunit 1ps; timeprecision 1fs;

  // stage[p] is the p-th output in propagation order; each stage adds one tap delay
  logic [4*N_CARRY4-1:0] stage;

  assign #(IN_PS + TAP_PS) stage[0] = ci;
  for (genvar p = 1; p < 4 * N_CARRY4; p++) begin : g_stage
    assign #(TAP_PS) stage[p] = stage[p-1];
  end

  // CO1 switches before CO0 and CO3 before CO2 in every CARRY4
  for (genvar k = 0; k < 4 * N_CARRY4; k++) begin : g_out
    assign co[k] = stage[k ^ 1];
  end

endmodule
