// Implant electronics, top level.
//
// The optical link delivers both power and data.  The data side is modelled
// from the comparator output of the photodiode receiver (rx_comp) onward:
//
//   clk_xtal 37.4 MHz --> clock_recovery (/40) --> clk_sys 935 kHz
//   rx_comp --> manchester_decoder --> frame_receiver  (37.4 MHz domain)
//           --> stim_controller (935 kHz) --> N_EL electrode_driver models
//   electrode voltages --> monitor_adc model <-- monitor_ctrl (935 kHz)
//           --> serial tx_data --> rf_transmitter model (2.4 GHz OOK/FSK)
//
// Analog and passive parts outside this module: photovoltaic cell, power
// recovery regulators (their power-good is rst_n), crystal oscillator
// (clk_xtal), photodiode with transimpedance amplifier and comparator
// (rx_comp), the electrode array and the antenna.  The RF transmitter's
// tuning and power inputs are brought out as ports; how they are set is
// not specified.  Each clock domain has its own reset synchroniser.
//
// The block partition and the clock numbers follow the paper; the serial
// formats, the frame layout and the reset scheme are this design's choices.
module retina_implant_top
  import retina_pkg::*;
#(
  parameter int N_EL = N_ELECTRODES
) (
  input  logic                  clk_xtal,
  input  logic                  rst_n,
  input  logic                  rx_comp,
  input  logic                  rf_fsk_mode,
  input  logic [6:0]            rf_cap_code,
  input  logic [6:0]            rf_fsk_dev,
  input  logic [1:0]            rf_pwr_code,
  output logic                  clk_sys,
  output logic signed [I_W-1:0] el_i_ua [N_EL],
  output logic signed [V_W-1:0] el_v_mv [N_EL],
  output seq_state_t            seq_state,
  output logic                  link_locked,
  output logic                  stim_tick,
  output logic                  tx_data,
  output logic                  rf_osc_on,
  output logic [15:0]           rf_freq_mhz,
  output logic [15:0]           rf_power_uw,
  output logic [15:0]           frame_cnt,
  output logic [15:0]           abort_cnt,
  output logic [15:0]           acc_cnt,
  output logic [15:0]           rej_cnt,
  output logic [15:0]           ovf_cnt,
  output logic [15:0]           slot_cnt,
  output logic [15:0]           sample_cnt,
  output logic [15:0]           ovr_cnt
);
  logic rst_x_n, rst_s_n;

  // ------------------------------------------------------------- clocks
  reset_sync u_rst_x (.clk(clk_xtal), .rst_n(rst_n), .rst_n_o(rst_x_n));
  clock_recovery #(.DIV(40)) u_clk (.clk_xtal(clk_xtal), .rst_n(rst_x_n), .clk_sys(clk_sys));
  // both synchronisers assert from the raw reset; the system-clock one is
  // released two clk_sys edges after the divider starts
  reset_sync u_rst_s (.clk(clk_sys), .rst_n(rst_n), .rst_n_o(rst_s_n));

  // ------------------------------------------------- optical data path
  logic        bit_valid, bit_data;
  stim_frame_t frame;
  logic        frame_toggle;

  manchester_decoder u_dec (
    .clk(clk_xtal), .rst_n(rst_x_n), .rx_in(rx_comp),
    .bit_valid(bit_valid), .bit_data(bit_data), .locked(link_locked));

  frame_receiver u_rx (
    .clk(clk_xtal), .rst_n(rst_x_n),
    .bit_valid(bit_valid), .bit_data(bit_data), .locked(link_locked),
    .frame_o(frame), .frame_toggle_o(frame_toggle),
    .frame_cnt_o(frame_cnt), .abort_cnt_o(abort_cnt));

  // ------------------------------------------------ stimulation control
  drv_mode_t        drv_mode [N_EL];
  logic [AMP_W-1:0] drv_amp  [N_EL];
  logic             mon_en;
  logic [EL_W-1:0]  mon_el;

  stim_controller #(.N_EL(N_EL)) u_ctrl (
    .clk(clk_sys), .rst_n(rst_s_n),
    .frame_i(frame), .frame_toggle_i(frame_toggle),
    .drv_mode_o(drv_mode), .drv_amp_o(drv_amp),
    .mon_en_o(mon_en), .mon_el_o(mon_el), .state_o(seq_state), .tick_o(stim_tick),
    .acc_cnt_o(acc_cnt), .rej_cnt_o(rej_cnt), .ovf_cnt_o(ovf_cnt), .slot_cnt_o(slot_cnt));

  for (genvar e = 0; e < N_EL; e++) begin : g_drv
    electrode_driver u_drv (
      .mode(drv_mode[e]), .amp(drv_amp[e]), .i_ua(el_i_ua[e]), .v_mv(el_v_mv[e]));
  end

  // --------------------------------------------------- electrode monitor
  logic            adc_start, adc_done;
  logic [EL_W-1:0] adc_sel;
  logic [7:0]      adc_code;

  monitor_ctrl u_mon (
    .clk(clk_sys), .rst_n(rst_s_n), .mon_en(mon_en), .mon_el(mon_el),
    .adc_start(adc_start), .adc_sel(adc_sel), .adc_done(adc_done), .adc_code(adc_code),
    .tx_data(tx_data), .tx_busy(), .sample_cnt_o(sample_cnt), .ovr_cnt_o(ovr_cnt));

  monitor_adc #(.N_EL(N_EL)) u_adc (
    .clk(clk_sys), .rst_n(rst_s_n), .start(adc_start), .sel(adc_sel), .v_mv(el_v_mv),
    .done(adc_done), .code(adc_code));

  rf_transmitter u_rf (
    .data(tx_data), .fsk_mode(rf_fsk_mode), .cap_code(rf_cap_code), .fsk_dev(rf_fsk_dev),
    .pwr_code(rf_pwr_code), .osc_on(rf_osc_on), .freq_mhz(rf_freq_mhz), .power_uw(rf_power_uw));
endmodule
