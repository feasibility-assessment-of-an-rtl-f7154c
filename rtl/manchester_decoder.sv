// Data recovery: oversampling Manchester decoder.
//
// The optical receiver's comparator output carries a 2 Mbit/s Manchester
// code and is sampled with the 37.4 MHz crystal clock, 18.7 samples per
// bit, so no PLL is needed: the decoder only has to tell the transition in
// the middle of every bit from the optional one at the bit boundary.
//
// How it works: the input passes a two-flop synchroniser and an edge
// detector.  A counter measures samples since the last mid-bit transition.
// A transition seen once 3/4 of a bit has passed is the next mid-bit
// transition; earlier transitions are bit boundaries and are ignored.  The
// level after a mid-bit transition is the bit (rising = 1, the IEEE 802.3
// convention, chosen here).  With no transition for 1.25 bit the decoder
// drops `locked`; the first transition after that is taken as a mid-bit one.
// A transmitter should open each frame with alternating bits, whose only
// transitions are mid-bit: if the decoder first locks onto a bit boundary,
// the next accepted transition would be 1.5 bit away, so lock drops after
// 1.25 bit and the decoder relocks on a true mid-bit transition.
//
// Timing: bit_valid is a one-cycle strobe 3 cycles after the mid-bit
// transition reaches rx_in.  Oversampling rate and bit rate are the paper's;
// the window sizes and the polarity are this design's choices.
module manchester_decoder #(
  parameter int CLK_KHZ  = 37400,
  parameter int BIT_KBPS = 2000
) (
  input  logic clk,
  input  logic rst_n,
  input  logic rx_in,
  output logic bit_valid,
  output logic bit_data,
  output logic locked
);
  localparam int SPB_X10 = CLK_KHZ * 10 / BIT_KBPS;  // samples per bit x10 (187)
  localparam int IGNORE  = SPB_X10 * 3 / 40;         // 3/4 bit (14)
  localparam int TIMEOUT = SPB_X10 * 5 / 40;         // 1.25 bit (23)
  localparam int CW      = $clog2(TIMEOUT + 2);

  logic [2:0]    sync;   // [0],[1] synchroniser, [2] previous sample
  logic [CW-1:0] since;  // samples since the last mid-bit transition
  logic          edge_seen;

  assign edge_seen = sync[2] ^ sync[1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sync      <= '0;
      since     <= '0;
      locked    <= 1'b0;
      bit_valid <= 1'b0;
      bit_data  <= 1'b0;
    end else begin
      sync      <= {sync[1:0], rx_in};
      bit_valid <= 1'b0;
      if (edge_seen && (!locked || since >= CW'(IGNORE))) begin
        // mid-bit transition: the new level is the bit value
        bit_valid <= 1'b1;
        bit_data  <= sync[1];
        locked    <= 1'b1;
        since     <= '0;
      end else if (since >= CW'(TIMEOUT)) begin
        locked <= 1'b0;
      end else begin
        since <= since + 1'b1;
      end
    end
  end

  initial begin
    assert (IGNORE > SPB_X10 / 20 && TIMEOUT > SPB_X10 / 10 && TIMEOUT < SPB_X10 * 3 / 20)
      else $error("oversampling ratio too low for the decoder windows");
  end
endmodule
