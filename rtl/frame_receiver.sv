// Frame receiver: start-of-frame search and deserialiser.
//
// Runs in the 37.4 MHz domain on the bits of the Manchester decoder.  While
// hunting it keeps the last 8 bits and waits for the start-of-frame byte
// 0xD5 (after a preamble of alternating bits).  It then shifts in exactly
// FRAME_BITS bits, most significant first, copies them to frame_o and flips
// frame_toggle_o.  frame_o stays stable until the next frame is complete,
// at least FRAME_BITS bit times later, so the slow system-clock domain can
// take it over with a synchronised copy of the toggle alone.
//
// If the decoder loses lock in the middle of a frame, the partial frame is
// dropped and abort_cnt_o counts it.  The paper only says that each frame
// fully configures the next pulses; the delimiter, the layout in retina_pkg
// and the abort rule are this design's choices.
module frame_receiver
  import retina_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        bit_valid,
  input  logic        bit_data,
  input  logic        locked,
  output stim_frame_t frame_o,
  output logic        frame_toggle_o,
  output logic [15:0] frame_cnt_o,
  output logic [15:0] abort_cnt_o
);
  localparam int CW = $clog2(FRAME_BITS + 1);

  logic                  receiving;
  logic [7:0]            hunt;
  logic [FRAME_BITS-1:0] shreg;
  logic [CW-1:0]         nbits;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      receiving      <= 1'b0;
      hunt           <= '0;
      shreg          <= '0;
      nbits          <= '0;
      frame_o        <= '0;
      frame_toggle_o <= 1'b0;
      frame_cnt_o    <= '0;
      abort_cnt_o    <= '0;
    end else if (!locked) begin
      if (receiving) abort_cnt_o <= abort_cnt_o + 1'b1;
      receiving <= 1'b0;
      hunt      <= '0;
    end else if (bit_valid) begin
      if (!receiving) begin
        hunt <= {hunt[6:0], bit_data};
        if ({hunt[6:0], bit_data} == SFD) begin
          receiving <= 1'b1;
          nbits     <= '0;
        end
      end else begin
        shreg <= {shreg[FRAME_BITS-2:0], bit_data};
        nbits <= nbits + 1'b1;
        if (nbits == CW'(FRAME_BITS - 1)) begin
          frame_o        <= stim_frame_t'({shreg[FRAME_BITS-2:0], bit_data});
          frame_toggle_o <= ~frame_toggle_o;
          frame_cnt_o    <= frame_cnt_o + 1'b1;
          receiving      <= 1'b0;
          hunt           <= '0;
        end
      end
    end
  end
endmodule
