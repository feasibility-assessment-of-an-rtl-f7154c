// Shared types and constants of the optically powered retinal stimulator.
//
// The stimulator receives self-contained frames over a Manchester-coded
// optical link; every frame fully describes the next stimulation time slot.
// This package holds the frame layout, the electrode driver modes and the
// sequencer states used by the receiver, the controller, the drivers and
// the testbenches.
//
// From the paper: 288 electrodes, amplitudes of 50..255 uA in 1 uA steps,
// phase widths of 10 us .. 700 ms in 10 us steps, calibration before each
// biphasic pulse, anodic-first polarity in the experiments.  The frame
// layout, the start-of-frame byte, the group size of 16 electrodes and the
// "external return" code are this design's own choices.
package retina_pkg;

  localparam int N_ELECTRODES = 288;
  localparam int EL_W         = 9;     // enough for 288 electrodes
  localparam int AMP_W        = 8;     // 1 uA per step
  localparam int AMP_MIN      = 50;    // smallest amplitude the driver supports
  localparam int PW_W         = 17;    // phase width in 10 us ticks
  localparam int PW_MAX       = 70000; // 700 ms / 10 us
  localparam int GAP_W        = 8;     // calibration and interphase gap, 10 us ticks
  localparam int MAX_GROUP    = 16;    // electrodes stimulated together in one slot
  localparam int V_W          = 13;    // electrode voltage in mV, signed
  localparam int I_W          = 10;    // electrode current in uA, signed

  // Return electrode code meaning "no on-array return, use the external one".
  localparam logic [EL_W-1:0] RET_EXTERNAL = '1;

  // Start-of-frame delimiter, sent after a preamble of alternating bits.
  localparam logic [7:0] SFD = 8'hD5;

  typedef struct packed {
    logic              en;   // entry is used
    logic [EL_W-1:0]   el;   // active electrode index, 0..287
    logic [AMP_W-1:0]  amp;  // amplitude in uA, 50..255
  } stim_entry_t;

  // One frame, sent most significant bit first.
  typedef struct packed {
    logic              cathodic_first; // 0: anodic phase first
    logic [GAP_W-1:0]  cal_w;          // calibration length, ticks (>= 1)
    logic [PW_W-1:0]   phase_w;        // width of each phase, ticks (1..70000)
    logic [GAP_W-1:0]  ipg_w;          // interphase gap, ticks (>= 1)
    logic [EL_W-1:0]   ret_el;         // return electrode or RET_EXTERNAL
    logic              mon_en;         // electrode monitor on
    logic [EL_W-1:0]   mon_el;         // electrode watched by the monitor
    stim_entry_t [MAX_GROUP-1:0] entry;
  } stim_frame_t;

  localparam int FRAME_BITS = $bits(stim_frame_t);

  typedef enum logic [2:0] {
    DRV_OFF      = 3'd0,  // disconnected
    DRV_CAL      = 3'd1,  // sink sets the current copied by the source
    DRV_ANODIC   = 3'd2,  // source pushes the copied current
    DRV_CATHODIC = 3'd3,  // sink pulls the programmed current
    DRV_RETURN   = 3'd4   // connected to the return node
  } drv_mode_t;

  typedef enum logic [2:0] {
    SEQ_IDLE = 3'd0,
    SEQ_CAL  = 3'd1,
    SEQ_PH1  = 3'd2,
    SEQ_IPG  = 3'd3,
    SEQ_PH2  = 3'd4
  } seq_state_t;

endpackage
