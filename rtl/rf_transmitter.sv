// RF transmitter: behavioural model of the 2.4 GHz LC oscillator.
// Behavioural model, not synthesizable logic: the real block is analog.
//
// A complementary cross-coupled LC oscillator whose inductor is the PCB loop
// antenna (L = 12 nH) and whose capacitor is an on-chip digitally tuned one,
// 310 fF to 440 fF, i.e. about 2.6 to 2.2 GHz.  In OOK mode the tail
// transistor switches the oscillator with the serial data.  In FSK mode the
// oscillator stays on and a 0 adds fsk_dev steps to the capacitor code,
// lowering the frequency.  pwr_code gates the tail transistor's width:
// 200, 300, 400 or 500 uW while on.
//
// L, the capacitance range and the 0.2..0.5 mW power range are the paper's;
// the 7-bit linear tuning code, the FSK deviation input and the four power
// steps are this model's assumptions.  Outputs follow the inputs at once.
module rf_transmitter #(
  parameter real L_NH      = 12.0,
  parameter real C_MIN_FF  = 310.0,
  parameter real C_MAX_FF  = 440.0,
  parameter int  CAP_BITS  = 7
) (
  input  logic                data,
  input  logic                fsk_mode,
  input  logic [CAP_BITS-1:0] cap_code,
  input  logic [CAP_BITS-1:0] fsk_dev,
  input  logic [1:0]          pwr_code,
  output logic                osc_on,
  output logic [15:0]         freq_mhz,
  output logic [15:0]         power_uw
);
  localparam real PI    = 3.14159265358979;
  localparam int  CODES = (1 << CAP_BITS) - 1;

  always_comb begin
    int  c;
    real cap_ff, f_hz;
    c = int'(cap_code);
    if (fsk_mode && !data) c = c + int'(fsk_dev);
    if (c > CODES) c = CODES;
    cap_ff   = C_MIN_FF + (C_MAX_FF - C_MIN_FF) * real'(c) / real'(CODES);
    f_hz     = 1.0 / (2.0 * PI * $sqrt(L_NH * 1.0e-9 * cap_ff * 1.0e-15));
    osc_on   = fsk_mode | data;
    freq_mhz = osc_on ? 16'($rtoi(f_hz / 1.0e6 + 0.5)) : 16'd0;
    power_uw = osc_on ? 16'(200 + 100 * int'(pwr_code)) : 16'd0;
  end
endmodule
