// Testbench of the rf_transmitter model: checks the tuning range ends
// (310 fF -> about 2.61 GHz, 440 fF -> about 2.19 GHz with 12 nH, so the
// 2.2..2.6 GHz span), that the frequency falls as the code rises, OOK keying
// by the data, FSK keeping the oscillator on with a lower frequency for 0,
// and the four power settings from 0.2 to 0.5 mW.
`timescale 1ns/1ps
module tb_rf_transmitter;
  logic data = 0, fsk_mode = 0;
  logic [6:0] cap_code = '0, fsk_dev = '0;
  logic [1:0] pwr_code = '0;
  logic osc_on;
  logic [15:0] freq_mhz, power_uw;
  int checks = 0, failures = 0;

  rf_transmitter dut (.*);

  function automatic int ref_mhz(int code);
    real c, f;
    c = 310.0e-15 + 130.0e-15 * real'(code) / 127.0;
    f = 1.0 / (2.0 * 3.14159265358979 * $sqrt(12.0e-9 * c));
    return int'($floor(f / 1.0e6 + 0.5));
  endfunction

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s: on=%0d f=%0d p=%0d", what, osc_on, freq_mhz, power_uw); end
  endtask

  initial begin
    int prev;
    // OOK
    data = 1; cap_code = 0; #1;
    chk(osc_on && freq_mhz >= 2600 && freq_mhz <= 2620, "310 fF end");
    cap_code = 127; #1;
    chk(osc_on && freq_mhz >= 2180 && freq_mhz <= 2200, "440 fF end");
    prev = 100000;
    for (int c = 0; c < 128; c++) begin
      cap_code = 7'(c); #1;
      chk(int'(freq_mhz) == ref_mhz(c), "frequency formula");
      chk(int'(freq_mhz) <= prev, "monotonic");
      prev = int'(freq_mhz);
    end
    data = 0; #1;
    chk(!osc_on && freq_mhz == 0 && power_uw == 0, "OOK off on 0");
    for (int p = 0; p < 4; p++) begin
      data = 1; pwr_code = 2'(p); #1;
      chk(int'(power_uw) == 200 + 100 * p, "power step");
    end
    // FSK
    fsk_mode = 1; cap_code = 40; fsk_dev = 10; data = 1; #1;
    chk(osc_on && int'(freq_mhz) == ref_mhz(40), "FSK mark");
    data = 0; #1;
    chk(osc_on && int'(freq_mhz) == ref_mhz(50), "FSK space");
    cap_code = 125; #1;
    chk(int'(freq_mhz) == ref_mhz(127), "FSK code saturates");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
