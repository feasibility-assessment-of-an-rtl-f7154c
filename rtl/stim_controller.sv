// Digital stimulation controller.
//
// Stateless sequencer: every frame from the optical link fully describes one
// stimulation time slot, so after a power loss (a blink) stimulation resumes
// with the next frame and nothing has to be reprogrammed.  A slot is
//
//   calibration (cal_w) -> phase 1 (phase_w) -> gap (ipg_w) -> phase 2 (phase_w)
//
// on a group of up to MAX_GROUP active electrodes, each with its own
// amplitude, and one return electrode (or the external return).  During
// calibration each active driver's sink sets the current its source copies
// (dynamic current copy), so the two phases carry equal charge.  Phase 1 is
// anodic unless the frame asks for cathodic first.
//
// How it works:
//  * Frame hand-over.  frame_i comes from the 37.4 MHz domain and is stable
//    long before and after frame_toggle_i flips; the toggle is synchronised
//    with two flops and its change captures frame_i.
//  * Check.  A frame is rejected (rej_cnt_o) if an enabled entry has an
//    amplitude under 50 uA or an electrode >= N_ELECTRODES, two entries name
//    the same electrode, the return is also active or out of range, the
//    monitor electrode is out of range, the phase width is 0 or over 70000
//    ticks (700 ms), or the calibration or gap is 0.
//  * Buffer.  One checked frame waits while a slot runs; a frame arriving
//    while it is still full is dropped (ovf_cnt_o).
//  * Time base.  Durations count 10 us ticks.  10 us is 9.35 cycles of the
//    935 kHz clock, so a fractional accumulator (add TICK_HZ per cycle, wrap
//    at SYS_HZ) issues the ticks: 9 or 10 cycles apart, exact on average.
//  * Slots start on a tick; a waiting frame starts the tick after the previous
//    slot's phase 2 ends, so back-to-back slots last cal_w + 2*phase_w + ipg_w
//    ticks, as in the paper's time-slot definition.
//  * Driver outputs are registered, one clock after the sequencer state.
//
// From the paper: 288 electrodes, 935 kHz clock, 10 us steps up to 700 ms,
// 50..255 uA, calibration / anodic-first / gap / cathodic order.  The frame
// checks, the buffer depth, the group size and the tick generator are this
// design's own choices.
module stim_controller
  import retina_pkg::*;
#(
  parameter int N_EL    = N_ELECTRODES,
  parameter int SYS_HZ  = 935000,
  parameter int TICK_HZ = 100000
) (
  input  logic             clk,
  input  logic             rst_n,
  input  stim_frame_t      frame_i,
  input  logic             frame_toggle_i,
  output drv_mode_t        drv_mode_o [N_EL],
  output logic [AMP_W-1:0] drv_amp_o  [N_EL],
  output logic             mon_en_o,
  output logic [EL_W-1:0]  mon_el_o,
  output seq_state_t       state_o,
  output logic             tick_o,
  output logic [15:0]      acc_cnt_o,   // frames accepted
  output logic [15:0]      rej_cnt_o,   // frames rejected by the check
  output logic [15:0]      ovf_cnt_o,   // frames dropped, buffer full
  output logic [15:0]      slot_cnt_o   // slots started
);
  localparam int AW = $clog2(SYS_HZ + TICK_HZ + 1);

  // ---------------------------------------------------------------- check
  function automatic logic frame_ok(stim_frame_t f);
    logic ok;
    ok = (f.phase_w != '0) && (f.phase_w <= PW_W'(PW_MAX)) &&
         (f.cal_w != '0) && (f.ipg_w != '0) &&
         (f.ret_el == RET_EXTERNAL || f.ret_el < EL_W'(N_EL)) &&
         (!f.mon_en || f.mon_el < EL_W'(N_EL));
    for (int k = 0; k < MAX_GROUP; k++) begin
      if (f.entry[k].en) begin
        if (f.entry[k].el >= EL_W'(N_EL))      ok = 1'b0;
        if (f.entry[k].amp < AMP_W'(AMP_MIN))  ok = 1'b0;
        if (f.entry[k].el == f.ret_el)         ok = 1'b0;
        for (int j = 0; j < k; j++)
          if (f.entry[j].en && f.entry[j].el == f.entry[k].el) ok = 1'b0;
      end
    end
    return ok;
  endfunction

  // ------------------------------------------------------- clock crossing
  logic [2:0] tog_s;
  logic       new_frame;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) tog_s <= '0;
    else        tog_s <= {tog_s[1:0], frame_toggle_i};
  end
  // tog_s[0] is only a synchroniser stage; its reset value is matched
  // by the receiver's reset value of the toggle.
  assign new_frame = tog_s[2] ^ tog_s[1];

  // ------------------------------------------------------------ time base
  logic [AW-1:0] acc;
  logic          tick;
  assign tick = (acc + AW'(TICK_HZ)) >= AW'(SYS_HZ);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    acc <= '0;
    else if (tick) acc <= acc + AW'(TICK_HZ) - AW'(SYS_HZ);
    else           acc <= acc + AW'(TICK_HZ);
  end
  assign tick_o = tick;

  // ------------------------------------------------------------ sequencer
  stim_frame_t      pend, act;
  logic             pend_v;
  seq_state_t       state;
  logic [PW_W-1:0]  rem;
  logic             last, consume, take;

  assign last    = (rem == PW_W'(1));
  assign consume = tick && pend_v && (state == SEQ_IDLE || (state == SEQ_PH2 && last));
  assign take    = new_frame && frame_ok(frame_i) && (!pend_v || consume);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend       <= '0;
      pend_v     <= 1'b0;
      act        <= '0;
      state      <= SEQ_IDLE;
      rem        <= '0;
      acc_cnt_o  <= '0;
      rej_cnt_o  <= '0;
      ovf_cnt_o  <= '0;
      slot_cnt_o <= '0;
    end else begin
      // buffer
      if (take) begin
        pend      <= frame_i;
        pend_v    <= 1'b1;
        acc_cnt_o <= acc_cnt_o + 1'b1;
      end else if (consume) begin
        pend_v <= 1'b0;
      end
      if (new_frame && !frame_ok(frame_i)) rej_cnt_o <= rej_cnt_o + 1'b1;
      if (new_frame && frame_ok(frame_i) && !take) ovf_cnt_o <= ovf_cnt_o + 1'b1;

      // slot sequence, advanced on ticks
      if (consume) begin
        act        <= pend;
        state      <= SEQ_CAL;
        rem        <= PW_W'(pend.cal_w);
        slot_cnt_o <= slot_cnt_o + 1'b1;
      end else if (tick) begin
        unique case (state)
          SEQ_IDLE: ;
          SEQ_CAL:  if (last) begin state <= SEQ_PH1; rem <= act.phase_w;       end else rem <= rem - 1'b1;
          SEQ_PH1:  if (last) begin state <= SEQ_IPG; rem <= PW_W'(act.ipg_w); end else rem <= rem - 1'b1;
          SEQ_IPG:  if (last) begin state <= SEQ_PH2; rem <= act.phase_w;       end else rem <= rem - 1'b1;
          SEQ_PH2:  if (last) begin state <= SEQ_IDLE; rem <= '0;               end else rem <= rem - 1'b1;
          default:  state <= SEQ_IDLE;
        endcase
      end
    end
  end

  assign state_o  = state;
  assign mon_en_o = act.mon_en;
  assign mon_el_o = act.mon_el;

  // ------------------------------------------------------- driver decode
  drv_mode_t act_mode, ret_mode;
  always_comb begin
    act_mode = DRV_OFF;
    ret_mode = DRV_OFF;
    unique case (state)
      SEQ_CAL: act_mode = DRV_CAL;
      SEQ_PH1: begin act_mode = act.cathodic_first ? DRV_CATHODIC : DRV_ANODIC; ret_mode = DRV_RETURN; end
      SEQ_IPG: ret_mode = DRV_RETURN;
      SEQ_PH2: begin act_mode = act.cathodic_first ? DRV_ANODIC : DRV_CATHODIC; ret_mode = DRV_RETURN; end
      default: ;
    endcase
  end

  for (genvar e = 0; e < N_EL; e++) begin : g_el
    drv_mode_t        m;
    logic [AMP_W-1:0] a;
    always_comb begin
      m = (act.ret_el == EL_W'(e)) ? ret_mode : DRV_OFF;
      a = '0;
      for (int k = 0; k < MAX_GROUP; k++) begin
        if (act.entry[k].en && act.entry[k].el == EL_W'(e)) begin
          m = act_mode;
          a = act.entry[k].amp;
        end
      end
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        drv_mode_o[e] <= DRV_OFF;
        drv_amp_o[e]  <= '0;
      end else begin
        drv_mode_o[e] <= m;
        drv_amp_o[e]  <= a;
      end
    end
  end

  // ----------------------------------------------------------- assertions
  a_active_ok: assert property (@(posedge clk) disable iff (!rst_n)
                                 state != SEQ_IDLE |-> act.phase_w != '0);
  a_rem_nz:    assert property (@(posedge clk) disable iff (!rst_n)
                                 state != SEQ_IDLE |-> rem != '0);
endmodule
