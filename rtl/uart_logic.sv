// UART logic: sends the records of all channels to the computer after a valid coincidence.
//
// It runs on the slow UART clock (55 MHz).  uart_start from the main controller is
// synchronised by two flip-flops; on its rising edge the records, which the channels hold
// unchanged until the next system reset, are copied into a frame register and sent byte by
// byte through an 8N1 transmitter.  When the last byte has left, uart_done rises and stays high
// until uart_start falls (four-phase handshake).
//
// Frame, per channel in channel order (NCH x 26 bytes, each field least significant byte
// first): the sampled TDC code (176 bits in 22 bytes, in the cross-detection order the
// sampling registers store it, bit 0 first), the TOT value (2 bytes) and the coarse count
// (2 bytes).  The field order follows the published block diagram; the byte packing, the
// absence of a header and the bit rate (CLKS_PER_BIT) are this design's choices.
module uart_logic
  import bgo_pkg::*;
#(
  parameter int unsigned NCH          = 2,
  parameter int unsigned CLKS_PER_BIT = bgo_pkg::UART_CLKS_PER_BIT_DEFAULT
) (
  input  logic       uart_clk,
  input  logic       rst,
  input  logic       uart_start,
  input  ch_record_t rec [NCH],
  output logic       uart_done,
  output logic       txd
);
  timeunit 1ps; timeprecision 1fs;

  localparam int unsigned FRAME_BYTES = NCH * CH_BYTES;
  localparam int unsigned IDX_W       = $clog2(FRAME_BYTES + 1);

  logic                     st_s1, st_s2, busy;
  logic [8*FRAME_BYTES-1:0] frame, frame_load;
  logic [IDX_W-1:0]         left;
  logic                     tx_ready, tx_valid;

  // Byte image of all records.
  always_comb begin
    frame_load = '0;
    for (int c = 0; c < NCH; c++) begin
      frame_load[8*c*CH_BYTES +: 8*CODE_BYTES] = (8*CODE_BYTES)'(rec[c].code);
      frame_load[8*(c*CH_BYTES + CODE_BYTES) +: 8*TOT_BYTES] = (8*TOT_BYTES)'(rec[c].tot);
      frame_load[8*(c*CH_BYTES + CODE_BYTES + TOT_BYTES) +: 8*COARSE_BYTES] =
        (8*COARSE_BYTES)'(rec[c].coarse);
    end
  end

  always_ff @(posedge uart_clk) begin
    st_s1 <= uart_start;
    st_s2 <= st_s1;
  end

  assign tx_valid = busy && (left != 0);

  always_ff @(posedge uart_clk) begin
    if (rst) begin
      busy      <= 1'b0;
      uart_done <= 1'b0;
      left      <= '0;
      frame     <= '0;
    end else if (!busy) begin
      if (!st_s2) uart_done <= 1'b0;
      else if (!uart_done) begin
        frame <= frame_load;
        left  <= IDX_W'(FRAME_BYTES);
        busy  <= 1'b1;
      end
    end else begin
      if (tx_valid && tx_ready) begin
        frame <= frame >> 8;
        left  <= left - 1'b1;
      end else if (left == 0 && tx_ready) begin
        busy      <= 1'b0;
        uart_done <= 1'b1;
      end
    end
  end

  uart_tx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_tx (
    .clk(uart_clk), .rst, .data(frame[7:0]), .valid(tx_valid), .ready(tx_ready), .txd
  );

endmodule
