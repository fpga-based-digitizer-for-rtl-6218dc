// TOT counter: a 10-bit binary counter that counts system clocks while the activation signal
// from the double-check logic is high, saturating at the maximum count (1000 in the published
// design).  full is high once the maximum is reached; clr (synchronous) clears the count.
// The 10-bit width and the 1000 limit follow the published design.
module tot_counter #(
  parameter int unsigned W   = bgo_pkg::TOT_W,
  parameter int unsigned MAX = bgo_pkg::TOT_MAX
) (
  input  logic         clk,
  input  logic         clr,
  input  logic         active,
  output logic [W-1:0] value,
  output logic         full
);
  timeunit 1ps; timeprecision 1fs;

  always_ff @(posedge clk) begin
    if (clr)                          value <= '0;
    else if (active && value < W'(MAX)) value <= value + 1'b1;
  end

  assign full = (value >= W'(MAX));

endmodule
