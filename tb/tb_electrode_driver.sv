// Testbench of the electrode_driver model: checks that the current copied
// during calibration is the one sourced in the anodic phase even if the
// programmed amplitude changes afterwards, that the cathodic phase sinks the
// programmed amplitude, that off, gap and return modes carry no driver
// current, and that the voltage is I x R clipped to +-2.7 V.
`timescale 1ns/1ps
module tb_electrode_driver;
  import retina_pkg::*;
  drv_mode_t mode = DRV_OFF;
  logic [AMP_W-1:0] amp = '0;
  logic signed [I_W-1:0] i_ua;
  logic signed [V_W-1:0] v_mv;
  int checks = 0, failures = 0;

  electrode_driver dut (.mode(mode), .amp(amp), .i_ua(i_ua), .v_mv(v_mv));

  task automatic expect_iv(int i, string what);
    int v;
    v = i * 10;
    if (v > 2700) v = 2700;
    if (v < -2700) v = -2700;
    #1;
    checks++;
    if (int'(i_ua) != i || int'(v_mv) != v) begin
      failures++;
      $display("%s: i=%0d v=%0d, want %0d %0d", what, i_ua, v_mv, i, v);
    end
  endtask

  initial begin
    for (int n = 0; n < 40; n++) begin
      int a_cal, a_new;
      a_cal = $urandom_range(50, 255);
      a_new = $urandom_range(50, 255);
      mode = DRV_CAL; amp = AMP_W'(a_cal);   expect_iv(0, "calibration");
      mode = DRV_OFF; amp = AMP_W'(a_new);   expect_iv(0, "off");
      mode = DRV_ANODIC;                     expect_iv(a_cal, "anodic uses the copy");
      mode = DRV_RETURN;                     expect_iv(0, "return");
      mode = DRV_CATHODIC; amp = AMP_W'(a_cal); expect_iv(-a_cal, "cathodic");
    end
    // compliance clipping: 255 uA x 10 kOhm = 2.55 V is inside, a heavier
    // load is not tested here; check the sign and the exact small value
    mode = DRV_CAL; amp = 8'd50; #1; mode = DRV_ANODIC; expect_iv(50, "50 uA");
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
