// Testbench of the UART logic: random channel records, a start request, and a serial receiver
// in the testbench that decodes the 8N1 line; every byte is compared with the frame layout
// (per channel: 22 code bytes, 2 TOT bytes, 2 coarse bytes, least significant first), the
// frame length in bit times is checked, and the done/start handshake is followed.
module uart_logic_tb;
  timeunit 1ps; timeprecision 1fs;
  import bgo_pkg::*;

  localparam int CPB = 8;
  localparam int NCH = 2;
  localparam realtime TU = 18182.0;

  logic uart_clk = 0, rst = 1, uart_start = 0;
  ch_record_t rec [NCH];
  logic uart_done, txd;
  int checks = 0, failures = 0;
  byte unsigned rx[$];

  uart_logic #(.NCH(NCH), .CLKS_PER_BIT(CPB)) dut (.*);

  always #(TU/2) uart_clk = ~uart_clk;

  // receiver: samples the middle of every bit
  initial begin
    byte unsigned b;
    forever begin
      @(negedge txd);
      #(TU * CPB / 2);
      if (txd == 0) begin
        for (int i = 0; i < 8; i++) begin
          #(TU * CPB);
          b[i] = txd;
        end
        #(TU * CPB);
        if (txd == 1) rx.push_back(b);
        else begin failures++; $display("FAIL framing error"); end
      end
    end
  end

  initial begin : watchdog
    #(200000 * TU);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    byte unsigned exp_b[$];
    realtime t0, t1;
    for (int c = 0; c < NCH; c++) rec[c] = '0;
    repeat (3) @(negedge uart_clk);
    rst = 0;
    for (int it = 0; it < 4; it++) begin
      for (int c = 0; c < NCH; c++) begin
        for (int k = 0; k < N_TAPS; k++) rec[c].code[k] = 1'($urandom);
        rec[c].tot    = TOT_W'($urandom);
        rec[c].coarse = COARSE_W'($urandom);
        rec[c].fine   = '0;
      end
      exp_b.delete();
      for (int c = 0; c < NCH; c++) begin
        for (int k = 0; k < 22; k++) exp_b.push_back(rec[c].code[8*k +: 8]);
        exp_b.push_back(8'(rec[c].tot));
        exp_b.push_back(8'(rec[c].tot >> 8));
        exp_b.push_back(8'(rec[c].coarse));
        exp_b.push_back(8'(rec[c].coarse >> 8));
      end
      rx.delete();
      @(negedge uart_clk);
      uart_start = 1;
      t0 = $realtime;
      wait (uart_done);
      t1 = $realtime;
      checks++;
      // 52 bytes of 10 bit times and one load clock each, plus synchronisation
      if (t1 - t0 < TU * CPB * 10 * 52 || t1 - t0 > TU * ((CPB * 10 + 1) * 52 + 20)) begin
        failures++;
        $display("FAIL frame time %0.0f", t1 - t0);
      end
      #(TU * CPB);
      checks++;
      if (rx.size() != exp_b.size()) begin
        failures++;
        $display("FAIL got %0d bytes", rx.size());
      end else
        for (int i = 0; i < exp_b.size(); i++) begin
          checks++;
          if (rx[i] != exp_b[i]) begin
            failures++;
            $display("FAIL byte %0d %h exp %h", i, rx[i], exp_b[i]);
          end
        end
      uart_start = 0;
      repeat (4) @(negedge uart_clk);
      checks++;
      if (uart_done || txd != 1) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
