// Electrode monitor controller and uplink serialiser.
//
// While mon_en is high it asks the ADC for a sample of electrode mon_el
// every ADC_DIV system clocks: 935 kHz / 11 = 85 kHz, the fastest integer
// division that stays under the paper's 90 kHz maximum sample rate.
// adc_sel is registered together with adc_start and then held, so the
// multiplexer stays on one electrode for a whole conversion even when the
// next slot selects another one.  Each
// 8-bit result is sent on tx_data, the serial data line of the RF
// transmitter, as a 10-bit word: a start bit 1, the code most significant
// bit first, a stop bit 0, one bit per system clock; the line idles at 0
// (transmitter off in OOK).  A word takes 10 clocks, so it always ends
// before the next sample; if a result still arrives while a word is being
// sent, it is dropped and ovr_cnt_o counts it.
//
// The sample rate limit and 8-bit samples are the paper's; the pacing
// divider, the word format and the bit rate are this design's choices.
module monitor_ctrl
  import retina_pkg::*;
#(
  parameter int ADC_DIV = 11
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            mon_en,
  input  logic [EL_W-1:0] mon_el,
  output logic            adc_start,
  output logic [EL_W-1:0] adc_sel,
  input  logic            adc_done,
  input  logic [7:0]      adc_code,
  output logic            tx_data,
  output logic            tx_busy,
  output logic [15:0]     sample_cnt_o,
  output logic [15:0]     ovr_cnt_o
);
  localparam int DW = $clog2(ADC_DIV + 1);

  logic [DW-1:0] div;
  logic [9:0]    word;
  logic [3:0]    nleft;

  assign tx_busy = (nleft != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      div          <= '0;
      adc_start    <= 1'b0;
      adc_sel      <= '0;
      word         <= '0;
      nleft        <= '0;
      tx_data      <= 1'b0;
      sample_cnt_o <= '0;
      ovr_cnt_o    <= '0;
    end else begin
      // pacing
      adc_start <= 1'b0;
      if (!mon_en) begin
        div <= '0;
      end else if (div == '0) begin
        adc_start <= 1'b1;
        adc_sel   <= mon_el;
        div       <= DW'(ADC_DIV - 1);
      end else begin
        div <= div - 1'b1;
      end

      // serialiser
      if (tx_busy) begin
        tx_data <= word[9];
        word    <= {word[8:0], 1'b0};
        nleft   <= nleft - 1'b1;
      end else begin
        tx_data <= 1'b0;
      end
      if (adc_done) begin
        if (!tx_busy || nleft == 4'd1) begin
          // load; the first bit goes out on the next clock
          word         <= {1'b1, adc_code, 1'b0};
          nleft        <= 4'd10;
          sample_cnt_o <= sample_cnt_o + 1'b1;
        end else begin
          ovr_cnt_o <= ovr_cnt_o + 1'b1;
        end
      end
    end
  end
endmodule
