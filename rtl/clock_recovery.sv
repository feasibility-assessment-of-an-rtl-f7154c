// Clock recovery: system clock divider.
//
// The crystal oscillator runs at 37.4 MHz; dividing it by 40 gives the
// 935 kHz system clock of the stimulation controller (both numbers are the
// paper's).  The divider counts DIV/2 input cycles and toggles the output,
// so the output has a 50 % duty cycle (a choice of this design).  clk_sys
// is low during reset and its first rising edge comes DIV/2 input cycles
// after reset is released.  DIV must be even.
module clock_recovery #(
  parameter int DIV = 40
) (
  input  logic clk_xtal,
  input  logic rst_n,
  output logic clk_sys
);
  localparam int HALF = DIV / 2;
  localparam int CW   = $clog2(HALF);

  logic [CW-1:0] cnt;

  always_ff @(posedge clk_xtal or negedge rst_n) begin
    if (!rst_n) begin
      cnt     <= '0;
      clk_sys <= 1'b0;
    end else if (cnt == CW'(HALF - 1)) begin
      cnt     <= '0;
      clk_sys <= ~clk_sys;
    end else begin
      cnt <= cnt + 1'b1;
    end
  end

  initial begin
    assert (DIV % 2 == 0 && DIV >= 2) else $error("DIV must be even");
  end
endmodule
