// Testbench of monitor_ctrl with a simple ADC stand-in (fixed latency,
// code = counter).  Checks the sample period of 11 clocks (85 kHz, under
// 90 kHz), the selected electrode, that the serial line carries each code
// as start bit 1, 8 bits MSB first, stop bit 0, that sampling stops when
// the monitor is disabled, and that a result arriving while a word is being
// sent is counted as an overrun.  The watched electrode is changed right
// after a sample starts: the ADC selection must hold until the next start.
`timescale 1ns/1ps
module tb_monitor_ctrl;
  import retina_pkg::*;
  logic clk = 0, rst_n = 1, mon_en = 0;
  logic [EL_W-1:0] mon_el = '0, adc_sel;
  logic adc_start, adc_done = 0, tx_data, tx_busy;
  logic [7:0] adc_code = '0;
  logic [15:0] sample_cnt_o, ovr_cnt_o;
  int checks = 0, failures = 0;
  initial #1 rst_n = 0;   // a falling edge, so every flop is reset
  int cyc = 0, last_start = -1, n_start = 0;
  byte unsigned codes[$];
  int latency = 4;

  monitor_ctrl dut (.*);

  always #534.76 clk = ~clk;

  // ADC stand-in
  int busy = 0;
  logic [EL_W-1:0] held_sel = '0;
  always @(posedge clk) if (busy > 0 && !adc_start) begin
    checks++;
    if (adc_sel != held_sel) begin failures++; $display("ADC selection changed during a conversion"); end
  end
  logic [7:0] next_code = 8'h3C;
  always @(posedge clk) begin
    cyc++;
    adc_done <= 0;
    if (adc_start) begin
      checks++;
      if (adc_sel != mon_el) begin failures++; $display("ADC electrode %0d", adc_sel); end
      if (last_start >= 0) begin
        checks++;
        if (cyc - last_start != 11) begin failures++; $display("sample period %0d", cyc - last_start); end
      end
      last_start = cyc; n_start++;
      busy = latency;
      held_sel = adc_sel;
    end else if (busy > 1) busy--;
    else if (busy == 1) begin
      busy = 0;
      adc_done <= 1; adc_code <= next_code;
      codes.push_back(next_code);
      next_code = next_code * 8'd7 + 8'd13;
    end
  end

  // serial receiver: a 1 on an idle line starts a word
  int nwords = 0;
  initial begin
    forever begin
      byte unsigned b;
      @(posedge clk);
      if (tx_data === 1'b1) begin
        b = 0;
        for (int i = 0; i < 8; i++) begin @(posedge clk); b = {b[6:0], tx_data}; end
        @(posedge clk);
        checks++;
        if (tx_data !== 1'b0) begin failures++; $display("no stop bit"); end
        checks++;
        if (codes.size() == 0 || b != codes.pop_front()) begin failures++; $display("word %02x wrong", b); end
        nwords++;
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (20) @(posedge clk);
    checks++; if (n_start != 0) begin failures++; $display("sampling while disabled"); end
    mon_el = 9'd77; mon_en = 1;
    repeat (11 * 15) @(posedge clk);
    @(posedge clk iff adc_start); #1 mon_el = 9'd201;
    repeat (11 * 15) @(posedge clk);
    mon_en = 0; last_start = -1;
    repeat (40) @(posedge clk);
    checks++; if (nwords < 29 || nwords != sample_cnt_o) begin failures++; $display("words %0d samples %0d", nwords, sample_cnt_o); end
    // overrun: a second result injected while a word is going out
    @(negedge clk); adc_done = 1; adc_code = 8'hA5; codes.push_back(8'hA5);
    @(negedge clk); adc_done = 0;
    repeat (3) @(negedge clk); adc_done = 1; adc_code = 8'h11;
    @(negedge clk); adc_done = 0;
    repeat (20) @(posedge clk);
    checks++; if (ovr_cnt_o != 1) begin failures++; $display("overruns %0d", ovr_cnt_o); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
