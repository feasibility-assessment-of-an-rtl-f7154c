// End-to-end testbench of retina_implant_top at its default size (288
// electrodes, 37.4 MHz crystal, 935 kHz system clock).
//
// The testbench plays the glasses: it Manchester-encodes frames at 2 Mbit/s
// (preamble of alternating bits, 0xD5, frame) onto rx_comp, asynchronous to
// the crystal clock.  It checks, independently of the design:
//  * every electrode current, every system clock, against the slot that
//    should be running (group members at +amp / -amp in the right phase
//    order, everything else at 0), which covers frame decoding, the
//    controller and the current-copy drivers together,
//  * the duration of each phase and gap in real time (n x 10 us, within one
//    system clock) and of the calibration,
//  * the monitor words on the RF data line (start bit, 8 bits, stop bit)
//    against the 8-bit code of the voltages the monitored electrode can
//    show, and that the OOK transmitter is on exactly when the line is 1,
//  * the counters of the link and of the controller.
// It makes each mechanism happen and fails if one never did: back-to-back
// slots, cathodic-first polarity, a rejected frame, a dropped frame (buffer
// full), a frame cut by loss of lock while a slot runs (the slot must go
// on), monitor samples and RF keying.
`timescale 1ns/1ps
module tb_retina_implant_top;
  import retina_pkg::*;
  localparam int N = N_ELECTRODES;

  logic clk_xtal = 0, rst_n = 1, rx_comp = 0;
  logic clk_sys, link_locked, stim_tick, tx_data, rf_osc_on;
  logic signed [I_W-1:0] el_i_ua [N];
  logic signed [V_W-1:0] el_v_mv [N];
  seq_state_t seq_state;
  logic [15:0] rf_freq_mhz, rf_power_uw, frame_cnt, abort_cnt, acc_cnt, rej_cnt, ovf_cnt,
               slot_cnt, sample_cnt, ovr_cnt;
  int checks = 0, failures = 0;
  initial #1 rst_n = 0;   // a falling edge, so every flop is reset

  retina_implant_top dut (
    .clk_xtal(clk_xtal), .rst_n(rst_n), .rx_comp(rx_comp),
    .rf_fsk_mode(1'b0), .rf_cap_code(7'd60), .rf_fsk_dev(7'd8), .rf_pwr_code(2'd1),
    .clk_sys(clk_sys), .el_i_ua(el_i_ua), .el_v_mv(el_v_mv), .seq_state(seq_state),
    .link_locked(link_locked), .stim_tick(stim_tick), .tx_data(tx_data), .rf_osc_on(rf_osc_on),
    .rf_freq_mhz(rf_freq_mhz), .rf_power_uw(rf_power_uw), .frame_cnt(frame_cnt),
    .abort_cnt(abort_cnt), .acc_cnt(acc_cnt), .rej_cnt(rej_cnt), .ovf_cnt(ovf_cnt),
    .slot_cnt(slot_cnt), .sample_cnt(sample_cnt), .ovr_cnt(ovr_cnt));

  always #13.369 clk_xtal = ~clk_xtal;   // 37.4 MHz

  task automatic fail(string s);
    failures++;
    if (failures < 20) $display("FAIL %s at %t", s, $time);
  endtask

  // ------------------------------------------------------------ glasses
  task automatic send_bit(bit b);
    rx_comp = ~b; #250ns;
    rx_comp = b;  #250ns;
  endtask

  task automatic send_frame(stim_frame_t f, int cut_at = -1);
    logic [FRAME_BITS-1:0] v;
    v = f;
    for (int i = 0; i < 16; i++) send_bit(i[0]);
    for (int i = 7; i >= 0; i--) send_bit(SFD[i]);
    for (int i = FRAME_BITS - 1; i >= 0; i--) begin
      if (FRAME_BITS - 1 - i == cut_at) begin
        rx_comp = 0; #3us;   // light interrupted: the decoder loses lock
        return;
      end
      send_bit(v[i]);
    end
    rx_comp = 0;
  endtask

  function automatic stim_frame_t make_frame(int n, int pw, bit cath, int base, int amp0);
    stim_frame_t f = '0;
    f.cathodic_first = cath;
    f.cal_w = 8'd3; f.ipg_w = 8'd1; f.phase_w = PW_W'(pw);   // 30 us, 10 us as in the experiments
    f.ret_el = (base % 2 == 0) ? RET_EXTERNAL : EL_W'((base + 150) % N);
    f.mon_en = 1; f.mon_el = EL_W'(base);
    for (int k = 0; k < n; k++) begin
      f.entry[k].en  = 1;
      f.entry[k].el  = EL_W'((base + 5 * k) % N);
      f.entry[k].amp = AMP_W'(amp0 + 11 * k);
    end
    return f;
  endfunction

  // ---------------------------------------------------------- reference
  stim_frame_t expq[$];
  stim_frame_t cur = '0, drv_cur = '0, old_cur = '0;
  seq_state_t  prev_state = SEQ_IDLE, drv_state = SEQ_IDLE;
  realtime     t_enter = 0;
  int n_slots = 0, n_b2b = 0, n_cath = 0, n_cur_checks = 0;

  function automatic realtime want_len(seq_state_t s, stim_frame_t f);
    case (s)
      SEQ_CAL: return 10us * f.cal_w;
      SEQ_PH1, SEQ_PH2: return 10us * f.phase_w;
      SEQ_IPG: return 10us * f.ipg_w;
      default: return 0;
    endcase
  endfunction

  always @(posedge clk_sys) begin
    // drivers follow the sequencer state one clock later
    if (rst_n && drv_state != SEQ_IDLE) begin
      int want[N];
      int sgn;
      for (int e = 0; e < N; e++) want[e] = 0;
      sgn = 0;
      if (drv_state == SEQ_PH1) sgn = drv_cur.cathodic_first ? -1 : 1;
      if (drv_state == SEQ_PH2) sgn = drv_cur.cathodic_first ? 1 : -1;
      for (int k = 0; k < MAX_GROUP; k++)
        if (drv_cur.entry[k].en) want[drv_cur.entry[k].el] = sgn * int'(drv_cur.entry[k].amp);
      for (int e = 0; e < N; e++)
        if (int'(el_i_ua[e]) != want[e])
          fail($sformatf("electrode %0d current %0d, want %0d (%s)", e, el_i_ua[e], want[e], drv_state.name()));
      checks++; n_cur_checks++;
    end
    if (rst_n) track_slots();
    drv_state = seq_state;
    drv_cur   = cur;
  end

  // follows the sequencer state: phase lengths, and which frame runs
  task automatic track_slots();
    if (seq_state != prev_state) begin
      if (prev_state != SEQ_IDLE) begin
        realtime d, w;
        d = $realtime - t_enter;
        w = want_len(prev_state, cur);
        checks++;
        if (d < w - 1.1us || d > w + 1.1us)
          fail($sformatf("%s lasted %0t, want %0t", prev_state.name(), d, w));
      end
      if (prev_state == SEQ_PH2 && seq_state == SEQ_CAL) n_b2b++;
      if (seq_state == SEQ_CAL) begin
        checks++;
        if (expq.size() == 0) fail("slot without a frame");
        else begin old_cur = cur; cur = expq.pop_front(); end
        n_slots++;
        if (cur.cathodic_first) n_cath++;
      end
      t_enter = $realtime;
    end
    prev_state = seq_state;
  endtask

  // ---------------------------------------------- monitor uplink checker
  int n_words = 0, n_rf_on = 0;
  function automatic int q8(int v);
    real x;
    x = (real'(v) + 2700.0) * 255.0 / 5400.0;
    return int'($floor(x + 0.5));
  endfunction
  initial begin
    forever begin
      byte unsigned b;
      @(posedge clk_sys);
      if (rst_n && tx_data === 1'b1) begin
        b = 0;
        for (int i = 0; i < 8; i++) begin @(posedge clk_sys); b = {b[6:0], tx_data}; end
        @(posedge clk_sys);
        checks++;
        if (tx_data !== 1'b0) fail("monitor word without stop bit");
        begin
          // the monitored electrode is at 0 V or at +-amp x 10 kOhm; a word
          // sampled just before a slot change belongs to the previous slot
          bit ok;
          ok = (int'(b) == q8(0));
          for (int k = 0; k < MAX_GROUP; k++) begin
            if (cur.entry[k].en && cur.entry[k].el == cur.mon_el)
              if (int'(b) == q8(10 * int'(cur.entry[k].amp)) || int'(b) == q8(-10 * int'(cur.entry[k].amp))) ok = 1;
            if (old_cur.entry[k].en && old_cur.entry[k].el == old_cur.mon_el)
              if (int'(b) == q8(10 * int'(old_cur.entry[k].amp)) || int'(b) == q8(-10 * int'(old_cur.entry[k].amp))) ok = 1;
          end
          checks++;
          if (!ok) fail($sformatf("monitor word %0d not a level of electrode %0d", b, cur.mon_el));
        end
        n_words++;
      end
    end
  end
  always @(posedge clk_sys) begin
    if (rf_osc_on !== tx_data) fail("OOK transmitter does not follow the data");
    if (rf_osc_on) begin
      n_rf_on++;
      if (rf_power_uw != 16'd300) fail("RF power");
    end
  end

  // ----------------------------------------------------------- stimulus
  initial begin
    stim_frame_t f;
    #500ns rst_n = 1;
    #10us;

    // single electrode, 100 us anodic-first pulse at 100 uA: the experiment's pulse
    f = make_frame(1, 10, 0, 12, 100); expq.push_back(f); send_frame(f);
    #300us;
    // groups back to back: each frame arrives while the previous slot runs
    f = make_frame(10, 10, 0, 31, 60);  expq.push_back(f); send_frame(f);
    f = make_frame(13, 5, 1, 64, 50);   expq.push_back(f); send_frame(f);
    f = make_frame(16, 4, 0, 201, 70);  expq.push_back(f); send_frame(f);
    #400us;
    // rejected: amplitude below 50 uA
    f = make_frame(2, 10, 0, 5, 40); send_frame(f);
    #20us;
    // buffer full: a 1 ms slot runs, one frame waits, the third is dropped.
    // While the slot runs the light is cut in the middle of a frame: that
    // frame is lost, the running slot goes on unchanged.
    f = make_frame(1, 50, 0, 100, 150); expq.push_back(f); send_frame(f);
    #50us;
    f = make_frame(2, 10, 0, 6, 90); send_frame(f, 120);
    checks++; if (seq_state == SEQ_IDLE) fail("slot not running while the light was cut");
    f = make_frame(3, 10, 1, 111, 200); expq.push_back(f); send_frame(f);
    f = make_frame(3, 10, 0, 120, 200); send_frame(f);
    #1500us;

    checks++; if (expq.size() != 0) fail($sformatf("%0d frames never ran", expq.size()));
    checks++; if (frame_cnt != 8) fail($sformatf("frames received %0d, want 8", frame_cnt));
    checks++; if (acc_cnt != 6 || slot_cnt != 6) fail($sformatf("accepted %0d slots %0d, want 6", acc_cnt, slot_cnt));
    checks++; if (ovr_cnt != 0) fail("monitor overrun");
    checks++; if (sample_cnt != 16'(n_words) && sample_cnt != 16'(n_words + 1)) fail($sformatf("samples %0d words %0d", sample_cnt, n_words));
    // every mechanism must have happened
    checks++; if (n_b2b < 1)      fail("no back-to-back slot");
    checks++; if (n_cath < 1)     fail("no cathodic-first slot");
    checks++; if (rej_cnt != 1)   fail($sformatf("rejected %0d, want 1", rej_cnt));
    checks++; if (ovf_cnt != 1)   fail($sformatf("dropped %0d, want 1", ovf_cnt));
    checks++; if (abort_cnt != 1) fail($sformatf("aborted %0d, want 1", abort_cnt));
    checks++; if (n_words < 50)   fail($sformatf("only %0d monitor words", n_words));
    checks++; if (n_rf_on < 50)   fail("RF transmitter hardly keyed");
    $display("slots=%0d back_to_back=%0d cathodic_first=%0d rejected=%0d dropped=%0d aborted=%0d monitor_words=%0d rf_on_cycles=%0d current_checks=%0d",
             n_slots, n_b2b, n_cath, rej_cnt, ovf_cnt, abort_cnt, n_words, n_rf_on, n_cur_checks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20ms;
    fail("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
