// Electrode monitor front end: behavioural model of the analog multiplexer
// and the 8-bit ADC.
// Behavioural model, not synthesizable logic: the real block is analog.
//
// On a `start` strobe the multiplexer connects electrode `sel` and the
// sample is held; CONV_CYCLES clock cycles later `code` holds the result and
// `done` pulses for one cycle.  The transfer is linear from -V_FS_MV
// (code 0) to +V_FS_MV (code 255), with full scale at the drivers' +-2.7 V
// range.  The 8-bit resolution, the free choice of electrode and the 90 kHz
// maximum sample rate are the paper's; the ADC type is not given, and the
// latency and transfer are this model's assumptions.  A start while busy
// is ignored.
module monitor_adc
  import retina_pkg::*;
#(
  parameter int N_EL        = N_ELECTRODES,
  parameter int CONV_CYCLES = 9,
  parameter int V_FS_MV     = 2700
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [EL_W-1:0]       sel,
  input  logic signed [V_W-1:0] v_mv [N_EL],
  output logic                  done,
  output logic [7:0]            code
);
  int   busy;
  int   held;

  function automatic logic [7:0] quantise(int v);
    int c;
    c = ((v + V_FS_MV) * 255 + V_FS_MV) / (2 * V_FS_MV);  // rounded
    if (c < 0)   c = 0;
    if (c > 255) c = 255;
    return 8'(c);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 0;
      held <= 0;
      done <= 1'b0;
      code <= '0;
    end else begin
      done <= 1'b0;
      if (busy == 0) begin
        if (start) begin
          held <= (int'(sel) < N_EL) ? int'(v_mv[sel]) : 0;
          busy <= CONV_CYCLES;
        end
      end else if (busy == 1) begin
        code <= quantise(held);
        done <= 1'b1;
        busy <= 0;
      end else begin
        busy <= busy - 1;
      end
    end
  end
endmodule
