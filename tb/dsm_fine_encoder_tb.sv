// Testbench of the SOP/EOP fine-time encoder: builds thermometer codes with a run of ones from
// the EOP tap to the SOP tap and checks eop, sop, fine = sop - eop and eop_ok; also the empty
// code.
module dsm_fine_encoder_tb;
  timeunit 1ps; timeprecision 1fs;
  import bgo_pkg::*;

  localparam int NT = 176;
  logic [NT-1:0] code;
  fine_t result;
  int checks = 0, failures = 0;

  dsm_fine_encoder dut (.code, .result);

  initial begin : watchdog
    #1us;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e, s;
    code = '0;
    #1;
    checks++;
    if (result.fine != 0 || result.eop_ok) failures++;
    for (int n = 0; n < 2000; n++) begin
      e = $urandom_range(0, 6);
      s = $urandom_range(e + 1, NT);
      code = '0;
      for (int k = e; k < s; k++) code[k] = 1'b1;
      #1;
      checks++;
      if (result.eop != 8'(e) || result.sop != 8'(s) || result.fine != 8'(s - e) ||
          result.eop_ok != (e < 4)) begin
        failures++;
        $display("FAIL e=%0d s=%0d got eop=%0d sop=%0d fine=%0d ok=%0d", e, s,
                 result.eop, result.sop, result.fine, result.eop_ok);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
