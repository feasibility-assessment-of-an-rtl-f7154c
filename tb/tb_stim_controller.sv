// Testbench of stim_controller at the full 288 electrodes and 935 kHz.
// Frames are handed over as the receiver does (frame, then toggle).  An
// independent model in the testbench keeps the queue of frames that should
// run and checks
//  * the length of calibration, phase 1, gap and phase 2 in 10 us ticks, and
//    the slot length in clock cycles (ticks x 9.35, +-1 cycle),
//  * the mode and amplitude of all 288 drivers in every state
//    (active group, return electrode, everything else off),
//  * anodic-first and cathodic-first polarity,
//  * back-to-back slots with no idle tick between them,
//  * rejection of malformed frames and dropping of frames when the buffer
//    is full, through the counters.
`timescale 1ns/1ps
module tb_stim_controller;
  import retina_pkg::*;
  localparam int N = N_ELECTRODES;
  logic clk = 0, rst_n = 1;
  stim_frame_t frame_i = '0;
  logic frame_toggle_i = 0;
  drv_mode_t drv_mode_o [N];
  logic [AMP_W-1:0] drv_amp_o [N];
  logic mon_en_o, tick_o;
  logic [EL_W-1:0] mon_el_o;
  seq_state_t state_o;
  logic [15:0] acc_cnt_o, rej_cnt_o, ovf_cnt_o, slot_cnt_o;
  int checks = 0, failures = 0;
  initial #1 rst_n = 0;   // a falling edge, so every flop is reset

  stim_controller dut (.clk(clk), .rst_n(rst_n), .frame_i(frame_i), .frame_toggle_i(frame_toggle_i),
    .drv_mode_o(drv_mode_o), .drv_amp_o(drv_amp_o), .mon_en_o(mon_en_o), .mon_el_o(mon_el_o),
    .state_o(state_o), .tick_o(tick_o), .acc_cnt_o(acc_cnt_o), .rej_cnt_o(rej_cnt_o),
    .ovf_cnt_o(ovf_cnt_o), .slot_cnt_o(slot_cnt_o));

  always #534.76 clk = ~clk;   // 935 kHz

  task automatic fail(string s);
    failures++;
    if (failures < 20) $display("FAIL %s at %t", s, $time);
  endtask

  // ------------------------------------------------------- frame builder
  function automatic stim_frame_t make_frame(int n, int pw, int cal, int ipg, bit cath, int base);
    stim_frame_t f = '0;
    f.cathodic_first = cath;
    f.cal_w = GAP_W'(cal); f.ipg_w = GAP_W'(ipg); f.phase_w = PW_W'(pw);
    f.ret_el = (base % 2 == 0) ? RET_EXTERNAL : EL_W'((base + 200) % N);
    f.mon_en = 1; f.mon_el = EL_W'(base);
    for (int k = 0; k < n; k++) begin
      f.entry[k].en  = 1;
      f.entry[k].el  = EL_W'((base + 7 * k) % N);
      f.entry[k].amp = AMP_W'(AMP_MIN + ((base + 13 * k) % 206));
    end
    return f;
  endfunction

  stim_frame_t expq[$];   // frames expected to run, in order

  task automatic send(stim_frame_t f, bit expect_run);
    frame_i = f;
    repeat (2) @(posedge clk);
    frame_toggle_i = ~frame_toggle_i;
    if (expect_run) expq.push_back(f);
    repeat (5) @(posedge clk);
  endtask

  // ------------------------------------------------------ slot checker
  seq_state_t prev_state = SEQ_IDLE;
  int ticks_in = 0, cyc = 0, slot_start_cyc = 0, slot_ticks = 0, in_state_cyc = 0;
  stim_frame_t cur;
  int n_slots = 0, n_b2b = 0, n_cath = 0, n_drv_checks = 0;

  function automatic int want_ticks(seq_state_t s, stim_frame_t f);
    case (s)
      SEQ_CAL: return int'(f.cal_w);
      SEQ_PH1, SEQ_PH2: return int'(f.phase_w);
      SEQ_IPG: return int'(f.ipg_w);
      default: return 0;
    endcase
  endfunction

  task automatic check_drivers(seq_state_t s, stim_frame_t f);
    drv_mode_t am, rm;
    am = DRV_OFF; rm = DRV_OFF;
    case (s)
      SEQ_CAL: am = DRV_CAL;
      SEQ_PH1: begin am = f.cathodic_first ? DRV_CATHODIC : DRV_ANODIC; rm = DRV_RETURN; end
      SEQ_IPG: rm = DRV_RETURN;
      SEQ_PH2: begin am = f.cathodic_first ? DRV_ANODIC : DRV_CATHODIC; rm = DRV_RETURN; end
      default: ;
    endcase
    for (int e = 0; e < N; e++) begin
      drv_mode_t m;
      logic [AMP_W-1:0] a;
      m = (int'(f.ret_el) == e) ? rm : DRV_OFF;
      a = '0;
      for (int k = 0; k < MAX_GROUP; k++)
        if (f.entry[k].en && int'(f.entry[k].el) == e) begin m = am; a = f.entry[k].amp; end
      if (drv_mode_o[e] != m || drv_amp_o[e] != a) begin
        fail($sformatf("electrode %0d in state %s: mode %0d amp %0d, want %0d %0d",
                       e, s.name(), drv_mode_o[e], drv_amp_o[e], m, a));
      end
    end
    checks++; n_drv_checks++;
  endtask

  always @(posedge clk) if (rst_n) begin
    cyc++;
    in_state_cyc++;
    if (state_o != prev_state) begin
      // leaving prev_state
      if (prev_state != SEQ_IDLE) begin
        checks++;
        if (ticks_in != want_ticks(prev_state, cur))
          fail($sformatf("%s lasted %0d ticks, want %0d", prev_state.name(), ticks_in, want_ticks(prev_state, cur)));
      end
      if (prev_state == SEQ_PH2) begin
        // slot length in cycles against 9.35 cycles per tick
        int want_cyc;
        want_cyc = (slot_ticks * 935 + 50) / 100;
        checks++;
        if ((cyc - slot_start_cyc) < want_cyc - 1 || (cyc - slot_start_cyc) > want_cyc + 1)
          fail($sformatf("slot took %0d cycles, want %0d", cyc - slot_start_cyc, want_cyc));
        if (state_o == SEQ_CAL) n_b2b++;
      end
      if (state_o == SEQ_CAL) begin
        checks++;
        if (expq.size() == 0) fail("unexpected slot");
        else cur = expq.pop_front();
        slot_start_cyc = cyc;
        slot_ticks = int'(cur.cal_w) + 2 * int'(cur.phase_w) + int'(cur.ipg_w);
        n_slots++;
        if (cur.cathodic_first) n_cath++;
      end
      ticks_in = 0;
      in_state_cyc = 0;
    end
    if (in_state_cyc == 2 && state_o != SEQ_IDLE) check_drivers(state_o, cur);
    if (tick_o) ticks_in++;
    prev_state = state_o;
  end

  // ---------------------------------------------------------- stimulus
  initial begin
    stim_frame_t f;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (20) @(posedge clk);
    check_drivers(SEQ_IDLE, '0);

    // 1. experiment-like pulse: 100 us phases, 30 us calibration, 10 us gap
    send(make_frame(1, 10, 3, 1, 0, 24), 1);
    repeat (300) @(posedge clk);
    checks++; if (mon_en_o != 1 || mon_el_o != 24) fail("monitor selection");

    // 2. groups and polarity, back to back: the second frame waits in the buffer
    send(make_frame(16, 5, 3, 2, 0, 3), 1);
    send(make_frame(9, 4, 1, 1, 1, 40), 1);
    repeat (400) @(posedge clk);

    // 3. malformed frames are rejected
    f = make_frame(2, 5, 3, 1, 0, 10); f.entry[1].amp = 8'd49;            send(f, 0);
    f = make_frame(2, 5, 3, 1, 0, 10); f.entry[1].el = f.entry[0].el;     send(f, 0);
    f = make_frame(2, 5, 3, 1, 0, 11); f.ret_el = f.entry[0].el;          send(f, 0);
    f = make_frame(2, 0, 3, 1, 0, 10);                                    send(f, 0);
    f = make_frame(2, PW_MAX + 1, 3, 1, 0, 10);                           send(f, 0);
    f = make_frame(2, 5, 0, 1, 0, 10);                                    send(f, 0);
    f = make_frame(2, 5, 3, 1, 0, 10); f.entry[0].el = 9'd300;            send(f, 0);
    checks++; if (rej_cnt_o != 7) fail($sformatf("rejected %0d, want 7", rej_cnt_o));

    // 4. overflow: a long slot runs, one frame waits, the next is dropped
    send(make_frame(3, 60, 3, 1, 0, 100), 1);
    repeat (30) @(posedge clk);
    send(make_frame(4, 2, 2, 1, 0, 120), 1);
    send(make_frame(4, 2, 2, 1, 0, 130), 0);
    checks++; if (ovf_cnt_o != 1) fail($sformatf("overflow %0d, want 1", ovf_cnt_o));
    repeat (1500) @(posedge clk);

    // 5. random valid frames, each sent while the previous one still runs
    for (int i = 0; i < 12; i++) begin
      send(make_frame($urandom_range(1, 16), $urandom_range(1, 12), $urandom_range(1, 4),
                      $urandom_range(1, 3), bit'($urandom_range(0, 1)), $urandom_range(0, N - 1)), 1);
      while (expq.size() > 0) @(posedge clk);
    end
    repeat (400) @(posedge clk);

    checks++; if (expq.size() != 0) fail($sformatf("%0d frames never ran", expq.size()));
    checks++; if (slot_cnt_o != 17 || n_slots != 17) fail($sformatf("slots %0d/%0d, want 17", slot_cnt_o, n_slots));
    checks++; if (acc_cnt_o != 17) fail($sformatf("accepted %0d", acc_cnt_o));
    checks++; if (n_b2b < 2) fail("no back-to-back slots");
    checks++; if (n_cath < 1) fail("no cathodic-first slot");
    $display("slots=%0d back_to_back=%0d cathodic_first=%0d driver_checks=%0d", n_slots, n_b2b, n_cath, n_drv_checks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200ms;
    fail("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
