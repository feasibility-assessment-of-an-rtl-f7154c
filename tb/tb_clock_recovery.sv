// Testbench of clock_recovery: checks that the 37.4 MHz input is divided by
// 40 (935 kHz), with a 20-cycle high and a 20-cycle low time, and that the
// first rising edge comes 20 input cycles after reset (the testbench sees
// every output change on the input edge after it).
`timescale 1ns/1ps
module tb_clock_recovery;
  logic clk_xtal = 0, rst_n = 1, clk_sys;
  int checks = 0, failures = 0;
  initial #1 rst_n = 0;   // a falling edge, so every flop is reset
  int cyc = 0, last_rise = -1, last_fall = -1, rises = 0;

  clock_recovery dut (.clk_xtal(clk_xtal), .rst_n(rst_n), .clk_sys(clk_sys));

  always #13.369 clk_xtal = ~clk_xtal;   // 37.4 MHz

  always @(posedge clk_xtal) if (rst_n) cyc++;

  logic prev = 0;
  always @(posedge clk_xtal) begin
    if (rst_n) begin
      if (clk_sys && !prev) begin
        checks++;
        if (last_rise < 0) begin
          if (cyc != 21) begin failures++; $display("first rise at %0d", cyc); end
        end else if (cyc - last_rise != 40) begin
          failures++; $display("period %0d", cyc - last_rise);
        end
        last_rise = cyc; rises++;
      end
      if (!clk_sys && prev) begin
        checks++;
        if (cyc - last_rise != 20) begin failures++; $display("high time %0d", cyc - last_rise); end
        last_fall = cyc;
      end
      prev = clk_sys;
    end
  end

  initial begin
    repeat (5) @(posedge clk_xtal);
    checks++; if (clk_sys !== 1'b0) failures++;
    rst_n = 1;
    repeat (40 * 25) @(posedge clk_xtal);
    checks++; if (rises != 25) begin failures++; $display("rises %0d", rises); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100us;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
