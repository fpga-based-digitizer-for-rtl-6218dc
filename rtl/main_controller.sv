// Main controller: decides whether the events held by the channels form a valid coincidence
// and, if so, has the UART logic send them to the computer.
//
// It follows the main-controller flow of the published design: system reset; wait until every
// channel reports meas_done; if every channel's energy flag is set raise uart_start, otherwise
// go straight back to system reset; after uart_done go back to system reset.  sys_rst is held
// for RST_CYCLES clocks (the coarse counters restart from it).  uart_start/uart_done form a
// four-phase handshake with the UART clock domain: start stays high until done is seen high,
// and a new start is only raised once done has fallen again.  uart_done is synchronised here by
// two flip-flops.  The counters valid_events/dropped_events tally coincidences sent and
// rejected for the energy flags.  The handshake and the reset length are this design's choices.
module main_controller #(
  parameter int unsigned NCH        = 2,
  parameter int unsigned RST_CYCLES = 2
) (
  input  logic            clk,
  input  logic            rst,          // power-on reset, clk domain
  input  logic [NCH-1:0]  meas_done,
  input  logic [NCH-1:0]  energy_flag,
  input  logic            uart_done,    // from the UART clock domain
  output logic            sys_rst,
  output logic            uart_start,
  output logic [15:0]     valid_events,
  output logic [15:0]     dropped_events
);
  timeunit 1ps; timeprecision 1fs;

  typedef enum logic [1:0] {S_RESET, S_WAIT, S_SEND} state_t;

  state_t     state;
  logic [3:0] rst_cnt;
  logic       done_s1, done_s2;

  always_ff @(posedge clk) begin
    done_s1 <= uart_done;
    done_s2 <= done_s1;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state          <= S_RESET;
      rst_cnt        <= '0;
      sys_rst        <= 1'b1;
      uart_start     <= 1'b0;
      valid_events   <= '0;
      dropped_events <= '0;
    end else begin
      unique case (state)
        S_RESET: begin
          sys_rst <= 1'b1;
          if (rst_cnt >= 4'(RST_CYCLES - 1) && !done_s2) begin
            rst_cnt <= '0;
            sys_rst <= 1'b0;
            state   <= S_WAIT;
          end else if (rst_cnt < 4'(RST_CYCLES - 1)) rst_cnt <= rst_cnt + 1'b1;
        end
        S_WAIT: begin
          if (&meas_done) begin
            if (&energy_flag) begin
              uart_start   <= 1'b1;
              valid_events <= valid_events + 1'b1;
              state        <= S_SEND;
            end else begin
              dropped_events <= dropped_events + 1'b1;
              sys_rst        <= 1'b1;
              state          <= S_RESET;
            end
          end
        end
        S_SEND: begin
          if (done_s2) begin
            uart_start <= 1'b0;
            sys_rst    <= 1'b1;
            state      <= S_RESET;
          end
        end
        default: state <= S_RESET;
      endcase
    end
  end

  // A start request is never withdrawn before the UART logic has answered.
  a_start_held : assert property (@(posedge clk) disable iff (rst)
    (uart_start && !done_s2) |=> uart_start);

endmodule
