// Testbench of the carry-chain delay-line model: launches a pulse and checks, half a tap after
// each expected switching time, which outputs have switched, including the swapped order
// within each CARRY4 and the transport of the falling edge.
module carry4_delay_line_tb;
  timeunit 1ps; timeprecision 1fs;

  localparam int  NC  = 44;
  localparam int  NT  = 4 * NC;
  localparam real TAP = 1818.18 / 176.0;
  localparam real IN  = 5.0;

  logic          ci;
  logic [NT-1:0] co;
  int checks = 0, failures = 0;

  carry4_delay_line dut (.ci, .co);

  function automatic logic [NT-1:0] expect_after(real dt);
    // outputs whose propagation position p satisfies IN + (p+1)*TAP <= dt have switched
    logic [NT-1:0] e;
    for (int k = 0; k < NT; k++) e[k] = (IN + real'((k ^ 1) + 1) * TAP <= dt);
    return e;
  endfunction

  initial begin : watchdog
    #1us;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    realtime t0, t1;
    logic [NT-1:0] e_r, e_f;
    ci = 0;
    // the taps power up at arbitrary values, which take one line length (one clock period)
    // to shift out
    #3000ps;
    if (co !== '0) failures++;
    checks++;
    t0 = $realtime;
    ci = 1;
    // rising edge front
    for (int m = 0; m < NT; m += 7) begin
      #((t0 + IN + (real'(m) + 0.5) * TAP) - $realtime);
      e_r = expect_after($realtime - t0);
      checks++;
      if (co !== e_r) begin
        failures++;
        $display("rise m=%0d co=%h exp=%h", m, co, e_r);
      end
      // the expected vector, read in 2-1-4-3 order, must be a thermometer code
      checks++;
      if ($countones(e_r) != m) failures++;
    end
    // a 300 ps pulse: the falling edge follows the rising edge down the line
    #(3000ps);
    ci = 0;
    #3000ps;
    checks++;
    if (co !== '0) failures++;
    t0 = $realtime;
    ci = 1;
    #300ps;
    t1 = $realtime;
    ci = 0;
    for (int m = 0; m < NT; m += 11) begin
      #((t1 + IN + (real'(m) + 0.5) * TAP) - $realtime);
      e_r = expect_after($realtime - t0);
      e_f = expect_after($realtime - t1);
      checks++;
      if (co !== (e_r & ~e_f)) begin
        failures++;
        $display("pulse m=%0d co=%h exp=%h", m, co, e_r & ~e_f);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
