// Workload testbench: the stimulation the paper's experiments and power
// analysis use, run through the whole implant (retina_implant_top, default
// size) from the Manchester-coded optical input.
//
// 1. Experiment protocol: one burst of 10 biphasic pulses on one electrode,
//    33 ms apart, anodic first, 30 us calibration, 10 us gap, phases of
//    100, 150, 250 and 500 us and amplitudes from 60 uA up in 20 uA steps.
//    Checked: pulse period 33 ms (within one system clock), the width of both
//    phases, the amplitude of both phases on the electrode.
// 2. Highest pulse rates of the power budget: for each phase width, slots
//    run back to back with the electrode group size needed for the
//    estimated maximum rate (about 38, 29, 19.3 and 12.5 thousand pulses per
//    second at 100, 150, 250 and 500 us).  The glasses send the next frame as
//    soon as a slot starts, so it waits in the buffer.  Checked: no idle
//    time between slots, and the pulses delivered per second reach the rate.
`timescale 1ns/1ps
module tb_workloads;
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
    .rf_fsk_mode(1'b0), .rf_cap_code(7'd60), .rf_fsk_dev(7'd8), .rf_pwr_code(2'd0),
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

  task automatic send_bit(bit b);
    rx_comp = ~b; #250ns;
    rx_comp = b;  #250ns;
  endtask

  task automatic send_frame(stim_frame_t f);
    logic [FRAME_BITS-1:0] v;
    v = f;
    for (int i = 0; i < 16; i++) send_bit(i[0]);
    for (int i = 7; i >= 0; i--) send_bit(SFD[i]);
    for (int i = FRAME_BITS - 1; i >= 0; i--) send_bit(v[i]);
    rx_comp = 0;
  endtask

  function automatic stim_frame_t make_frame(int n, int pw_ticks, int base, int amp);
    stim_frame_t f = '0;
    f.cal_w = 8'd3; f.ipg_w = 8'd1; f.phase_w = PW_W'(pw_ticks);
    f.ret_el = RET_EXTERNAL;
    for (int k = 0; k < n; k++) begin
      f.entry[k].en  = 1;
      f.entry[k].el  = EL_W'((base + 17 * k) % N);
      f.entry[k].amp = AMP_W'(amp);
    end
    return f;
  endfunction

  // watch one electrode: start time, width and amplitude of each phase
  int watch = 0;
  realtime t_pos = 0, t_neg = 0, last_pulse = -1;
  int pos_amp = 0, neg_amp = 0;
  int n_pulses = 0;
  logic signed [I_W-1:0] prev_i = 0;
  realtime pw_want = 0, period_want = 0;
  int amp_want = 0;
  always @(posedge clk_sys) begin
    logic signed [I_W-1:0] i;
    i = el_i_ua[watch];
    if (i > 0 && prev_i <= 0) begin t_pos = $realtime; pos_amp = int'(i); end
    if (i < 0 && prev_i >= 0) begin t_neg = $realtime; neg_amp = -int'(i); end
    if (prev_i > 0 && i <= 0 && pw_want > 0) begin
      checks++;
      if ($realtime - t_pos < pw_want - 1.1us || $realtime - t_pos > pw_want + 1.1us)
        fail($sformatf("anodic phase %0t, want %0t", $realtime - t_pos, pw_want));
      checks++;
      if (pos_amp != amp_want) fail($sformatf("anodic %0d uA, want %0d", pos_amp, amp_want));
      if (last_pulse >= 0 && period_want > 0) begin
        checks++;
        if (t_pos - last_pulse < period_want - 1.1us || t_pos - last_pulse > period_want + 1.1us)
          fail($sformatf("pulse period %0t, want %0t", t_pos - last_pulse, period_want));
      end
      last_pulse = t_pos;
    end
    if (prev_i < 0 && i >= 0 && pw_want > 0) begin
      checks++;
      if ($realtime - t_neg < pw_want - 1.1us || $realtime - t_neg > pw_want + 1.1us)
        fail($sformatf("cathodic phase %0t, want %0t", $realtime - t_neg, pw_want));
      checks++;
      if (neg_amp != amp_want) fail($sformatf("cathodic %0d uA, want %0d", neg_amp, amp_want));
      n_pulses++;
    end
    prev_i = i;
  end

  // pulses delivered, all electrodes: count falling ends of cathodic phases
  longint pulses_all = 0;
  logic [N-1:0] was_neg = '0;
  always @(posedge clk_sys) begin
    for (int e = 0; e < N; e++) begin
      if (was_neg[e] && el_i_ua[e] >= 0) pulses_all++;
      was_neg[e] = (el_i_ua[e] < 0);
    end
  end

  initial begin
    int pws[4] = '{10, 15, 25, 50};          // 100, 150, 250, 500 us
    int rate[4] = '{38000, 29000, 19300, 12500};
    #500ns rst_n = 1;
    #10us;

    // ------------------------------------------------ 1. experiment burst
    watch = 77;
    period_want = 33ms;
    for (int p = 0; p < 10; p++) begin
      realtime t0;
      pw_want = pws[p % 4] * 10us;
      amp_want = 60 + 20 * p;                  // 60 .. 240 uA
      t0 = $realtime;
      send_frame(make_frame(1, pws[p % 4], 77, amp_want));
      if (p < 9) #(33ms - ($realtime - t0));
    end
    #2ms;
    checks++; if (n_pulses != 10) fail($sformatf("burst delivered %0d pulses, want 10", n_pulses));
    $display("experiment burst: %0d pulses, 33 ms apart", n_pulses);

    // ----------------------------------------------- 2. maximum rates
    period_want = 0;
    pw_want = 0;
    for (int w = 0; w < 4; w++) begin
      int slot_us, g, nslots;
      longint p0;
      realtime t_first, t_last;
      slot_us = 2 * pws[w] * 10 + 10 + 30;
      g = (rate[w] * slot_us + 999999) / 1000000;   // electrodes per slot
      nslots = 12;
      send_frame(make_frame(g, pws[w], 3 * w, 120));
      p0 = pulses_all;
      t_first = 0;
      for (int s = 1; s <= nslots; s++) begin
        @(posedge clk_sys iff seq_state == SEQ_CAL);
        if (s == 1) t_first = $realtime;
        if (s < nslots) send_frame(make_frame(g, pws[w], 3 * w + s, 120));
        @(posedge clk_sys iff seq_state != SEQ_CAL);
      end
      @(posedge clk_sys iff seq_state == SEQ_IDLE);
      t_last = $realtime;
      #5us;
      begin
        real achieved;
        longint delivered;
        delivered = pulses_all - p0;
        achieved = real'(delivered) / ((t_last - t_first) / 1s);
        $display("phase %0d us: %0d electrodes per %0d us slot, %0d pulses, %0.0f pulses/s (estimate %0d)",
                 pws[w] * 10, g, slot_us, delivered, achieved, rate[w]);
        checks++;
        if (delivered != longint'(g) * nslots) fail("pulses lost");
        // back to back: the slots fill the time with no idle tick between them
        checks++;
        if ((t_last - t_first) > real'(nslots * slot_us) * 1us + 12us)
          fail($sformatf("%0d slots took %0t, want %0d us", nslots, t_last - t_first, nslots * slot_us));
        checks++;
        if (achieved < real'(rate[w]) * 0.99) fail($sformatf("rate %0.0f below %0d", achieved, rate[w]));
      end
    end
    checks++; if (ovf_cnt != 0 || rej_cnt != 0 || abort_cnt != 0) fail("frames lost");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #400ms;
    fail("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
