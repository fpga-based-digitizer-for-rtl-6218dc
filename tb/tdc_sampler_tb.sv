// Testbench of the TDC sampling registers: random carry-chain outputs; checks that only the
// clk_ph edge with capture_en is kept, that it is stored in 2-1-4-3 order within every CARRY4,
// that it is held against later enables and that clr releases it.
module tdc_sampler_tb;
  timeunit 1ps; timeprecision 1fs;

  localparam int NT = 176;
  logic clk_ph = 0, clr = 1, capture_en = 0;
  logic [NT-1:0] raw, code, exp_code;
  logic valid;
  int checks = 0, failures = 0;

  tdc_sampler dut (.*);

  always #909 clk_ph = ~clk_ph;

  function automatic logic [NT-1:0] rand_vec();
    logic [NT-1:0] v;
    for (int k = 0; k < NT; k += 32) v[k +: 32] = $urandom;
    return v;
  endfunction

  initial begin : watchdog
    #(2000 * 1818);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    raw = '0;
    @(negedge clk_ph); clr = 0;
    for (int n = 0; n < 200; n++) begin
      raw = rand_vec();
      @(negedge clk_ph);
      checks++;
      if (valid || code != '0) failures++;
      raw = rand_vec();
      capture_en = 1;
      for (int c = 0; c < NT / 4; c++)
        exp_code[4*c +: 4] = {raw[4*c+2], raw[4*c+3], raw[4*c+0], raw[4*c+1]};
      @(negedge clk_ph);
      capture_en = 0;
      checks++;
      if (!valid || code != exp_code) begin
        failures++;
        $display("FAIL code %h exp %h", code, exp_code);
      end
      raw = rand_vec();
      capture_en = 1;
      @(negedge clk_ph);
      capture_en = 0;
      checks++;
      if (!valid || code != exp_code) failures++;
      clr = 1;
      @(negedge clk_ph);
      clr = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
