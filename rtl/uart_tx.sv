// UART transmitter, 8 data bits, no parity, one stop bit, least significant bit first.
// A byte offered with valid while ready is high is sent; ready is low while it is being sent.
// CLKS_PER_BIT clocks make one bit time.  The line idles high.
module uart_tx #(
  parameter int unsigned CLKS_PER_BIT = bgo_pkg::UART_CLKS_PER_BIT_DEFAULT
) (
  input  logic       clk,
  input  logic       rst,
  input  logic [7:0] data,
  input  logic       valid,
  output logic       ready,
  output logic       txd
);
  timeunit 1ps; timeprecision 1fs;

  logic [9:0]  shreg;   // stop, data[7:0], start
  logic [3:0]  bits_left;
  logic [15:0] clk_cnt;

  assign ready = (bits_left == 0);

  always_ff @(posedge clk) begin
    if (rst) begin
      shreg     <= '1;
      bits_left <= '0;
      clk_cnt   <= '0;
      txd       <= 1'b1;
    end else if (bits_left == 0) begin
      txd <= 1'b1;
      if (valid) begin
        shreg     <= {1'b1, data, 1'b0};
        bits_left <= 4'd10;
        clk_cnt   <= '0;
        txd       <= 1'b0;
      end
    end else begin
      txd <= shreg[0];
      if (clk_cnt == 16'(CLKS_PER_BIT - 1)) begin
        clk_cnt   <= '0;
        shreg     <= {1'b1, shreg[9:1]};
        bits_left <= bits_left - 1'b1;
        txd       <= (bits_left == 1) ? 1'b1 : shreg[1];
      end else clk_cnt <= clk_cnt + 1'b1;
    end
  end

endmodule
