// Testbench of the monitor_adc model: random electrode voltages, random
// electrode selection; checks the code against a linear 8-bit quantiser of
// +-2.7 V computed here, the conversion latency of 9 clocks, that a start
// while busy is ignored and that the sample is taken at the start strobe.
`timescale 1ns/1ps
module tb_monitor_adc;
  import retina_pkg::*;
  localparam int N = N_ELECTRODES;
  logic clk = 0, rst_n = 1, start = 0, done;
  logic [EL_W-1:0] sel = '0;
  logic signed [V_W-1:0] v_mv [N];
  logic [7:0] code;
  int checks = 0, failures = 0;
  initial #1 rst_n = 0;   // a falling edge, so every flop is reset

  monitor_adc dut (.clk(clk), .rst_n(rst_n), .start(start), .sel(sel), .v_mv(v_mv), .done(done), .code(code));

  always #534.76 clk = ~clk;

  function automatic int ref_code(int v);
    // nearest of 256 levels spread evenly over -2700..+2700 mV
    real x;
    x = (real'(v) + 2700.0) * 255.0 / 5400.0;
    if (x < 0.0) x = 0.0;
    if (x > 255.0) x = 255.0;
    return int'($floor(x + 0.5));
  endfunction

  initial begin
    for (int e = 0; e < N; e++) v_mv[e] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 60; n++) begin
      int s, want, lat;
      for (int e = 0; e < N; e++) v_mv[e] = V_W'($urandom_range(0, 6000) - 3000);
      s = $urandom_range(0, N - 1);
      want = ref_code(int'(v_mv[s]));
      @(negedge clk); sel = EL_W'(s); start = 1;
      @(negedge clk); start = 0;
      // the electrode changes after the sample was taken
      v_mv[s] = -v_mv[s];
      // a start while busy must be ignored
      @(negedge clk); start = 1; sel = EL_W'((s + 1) % N);
      @(negedge clk); start = 0;
      lat = 2;  // rising edges since the one that took the start
      while (!done) begin @(negedge clk); lat++; end
      checks++;
      if (int'(code) != want) begin failures++; $display("code %0d, want %0d", code, want); end
      checks++;
      if (lat != 9) begin failures++; $display("latency %0d, want 9", lat); end
      @(negedge clk);
      checks++;
      if (done) begin failures++; $display("second conversion from a busy start"); end
      repeat (12) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
