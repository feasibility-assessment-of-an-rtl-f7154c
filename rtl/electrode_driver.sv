// Electrode driver: behavioural model of one analog current driver.
// Behavioural model, not synthesizable logic: the real block is analog.
//
// The driver uses dynamic current copy for charge balance.  In DRV_CAL the
// current sink is set to `amp` uA and the current source copies it, keeping
// the copy on a gate capacitor; here that held copy is a latch open during
// calibration.  DRV_ANODIC then sources the held copy, DRV_CATHODIC sinks
// `amp`.  Any other mode leaves the electrode without driver current
// (DRV_RETURN ties it to the return node, which carries the group's
// return current and is not modelled per electrode).
//
// Outputs: i_ua, the signed current into the tissue (+ = anodic), and v_mv,
// the electrode voltage across an assumed resistive load of R_KOHM, clipped
// to the +-2.7 V compliance the paper gives.  The current range
// (50..255 uA, 1 uA steps) and the compliance are the paper's; the purely
// resistive load is this model's simplification.  The model is
// combinational: outputs follow the mode with no delay.
module electrode_driver
  import retina_pkg::*;
#(
  parameter int R_KOHM          = 10,
  parameter int V_COMPLIANCE_MV = 2700
) (
  input  drv_mode_t           mode,
  input  logic [AMP_W-1:0]    amp,
  output logic signed [I_W-1:0] i_ua,
  output logic signed [V_W-1:0] v_mv
);
  logic [AMP_W-1:0] held;  // current copied into the source during calibration

  always_latch begin
    if (mode == DRV_CAL) held = amp;
  end

  always_comb begin
    int v;
    unique case (mode)
      DRV_ANODIC:   i_ua = I_W'(signed'({1'b0, held}));
      DRV_CATHODIC: i_ua = -I_W'(signed'({1'b0, amp}));
      default:      i_ua = '0;
    endcase
    v = int'(i_ua) * R_KOHM;
    if (v >  V_COMPLIANCE_MV) v =  V_COMPLIANCE_MV;
    if (v < -V_COMPLIANCE_MV) v = -V_COMPLIANCE_MV;
    v_mv = V_W'(v);
  end
endmodule
