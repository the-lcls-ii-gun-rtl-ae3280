// llrf_pkg: widths, types and constants shared by the gun/buncher LLRF
// controller.
//
// The ADC word is 16 bits and there are eight ADC-derived channels, named as
// the operator display names them (CAV1, CAV2, FWD1, REV1, FWD2, REV2, DRV1,
// PRL7_1); the trigger sources and modes of the waveform recorder carry the
// display's names too. Everything else here is this design's own choice: an
// 18-bit signed baseband word, an 18-bit phase word in which 2^18 is one full
// turn, 32-bit phase accumulators and a 16-bit DAC word.
package llrf_pkg;

  localparam int ADC_W  = 16;   // ADC sample width
  localparam int DAC_W  = 16;   // DAC sample width
  localparam int DW     = 18;   // baseband I/Q width
  localparam int PW     = 18;   // phase width, 2^PW = 360 degrees
  localparam int AW_AMP = DW + 2; // amplitude out of a CORDIC (includes gain)
  localparam int PACC_W = 32;   // phase-accumulator width
  localparam int NCH    = 8;    // ADC channels
  localparam int NREC   = NCH + 1; // recorded channels: ADC channels plus drive

  // ADC channel numbering
  typedef enum logic [2:0] {
    CH_CAV1   = 3'd0,
    CH_CAV2   = 3'd1,
    CH_FWD1   = 3'd2,
    CH_REV1   = 3'd3,
    CH_FWD2   = 3'd4,
    CH_REV2   = 3'd5,
    CH_DRV1   = 3'd6,
    CH_PRL7_1 = 3'd7
  } chan_e;

  typedef struct packed {
    logic signed [DW-1:0] i;
    logic signed [DW-1:0] q;
  } iq_t;

  // Controller operating modes
  typedef enum logic [1:0] {
    MODE_OPEN     = 2'd0,  // fixed drive amplitude and phase
    MODE_SEL      = 2'd1,  // self-excited loop, fixed amplitude
    MODE_SEL_AMP  = 2'd2,  // self-excited loop with amplitude feedback
    MODE_FEEDBACK = 2'd3   // amplitude and phase feedback about a fixed phase
  } ctl_mode_e;

  // Waveform recorder trigger sources and modes
  typedef enum logic [2:0] {
    TRIG_ALWAYS = 3'd0,
    TRIG_DELAY  = 3'd1,
    TRIG_RISING = 3'd2,
    TRIG_DECAY  = 3'd3,
    TRIG_EXT    = 3'd4
  } trig_src_e;

  typedef enum logic {
    TMODE_SINGLE = 1'b0,
    TMODE_NORMAL = 1'b1
  } trig_mode_e;

  typedef enum logic [1:0] {
    WS_IDLE  = 2'd0,
    WS_ARMED = 2'd1,
    WS_POST  = 2'd2,   // triggered, recording the post-trigger part
    WS_DONE  = 2'd3
  } wave_state_e;

  // Configuration of the SEL / feedback core
  typedef struct packed {
    ctl_mode_e                mode;
    logic        [PW-1:0]     sel_ofs;     // SEL drive phase rotation
    logic        [PW-1:0]     fb_ofs;      // phase offset on the feedback input
    logic        [AW_AMP-1:0] amp_set;     // amplitude set-point (CORDIC units)
    logic        [PW-1:0]     phase_set;   // phase set-point
    logic        [DW-2:0]     drive_amp;   // feed-forward drive amplitude
    logic        [PW-1:0]     drive_phase; // drive phase in OPEN/FEEDBACK
    logic        [15:0]       kp;          // proportional gain
    logic        [15:0]       ki;          // integral gain
    logic        [DW-2:0]     amp_max;     // drive amplitude clip
  } sel_cfg_t;

  // Configuration of the waveform recorder
  typedef struct packed {
    trig_src_e  src;
    trig_mode_e mode;
    logic [31:0] delay;      // TRIG_DELAY: clocks from the RF rising edge
    logic [15:0] post;       // rows recorded after the trigger
    logic        arm;        // pulse: arm
    logic        read_done;  // pulse: software finished reading
  } wave_cfg_t;


  // Register-bank configuration of the whole controller
  typedef struct packed {
    logic [PACC_W-1:0] dn_step;      // down-conversion NCO frequency word
    logic [PACC_W-1:0] up_step;      // up-conversion NCO frequency word
    sel_cfg_t          sel;          // SEL / feedback core (sel.sel_ofs = host value)
    wave_cfg_t         wave;         // waveform recorder
    logic [3:0]        cic_dec_log2; // CIC decimation = 2^cic_dec_log2
    chan_e             sel_ch;       // SEL input channel
    chan_e             fb_ch;        // feedback input channel
    chan_e             prl_ch;       // phase reference channel
    logic              cw;           // continuous-wave RF
    logic [31:0]       period;       // pulse period, ADC clocks
    logic [31:0]       width;        // pulse width, ADC clocks
    logic [PW-1:0]     scan_start;   // SEL phase scan: first offset
    logic [PW-1:0]     scan_step;    // SEL phase scan: step
    logic [7:0]        scan_n;       // SEL phase scan: number of pulses
    logic              scan_go;      // pulse: start the scan
    logic              sel_ofs_load; // pulse: host SEL offset written
    logic [3:0]        det_stride;   // detune: log2 sample stride
  } llrf_cfg_t;

  // Read-back status of the whole controller
  typedef struct packed {
    logic signed [31:0] detune;
    logic [PW-1:0]      best_phase;
    logic [AW_AMP-1:0]  best_amp;
    logic               scan_busy;
    wave_state_e        wave_state;
    logic [31:0]        trig_count;
    logic [PW-1:0]      prl_phase;
    logic [AW_AMP-1:0]  cav_amp;
    logic [PW-1:0]      cav_phase;
    logic [AW_AMP-1:0]  fb_amp;
    logic [PW-1:0]      fb_phase;
    logic [PW-1:0]      sel_ofs;     // offset applied to the SEL drive
    iq_t                wave_data;   // waveform memory read data
  } llrf_status_t;

  // Register map (word addresses). Waveform memory: addr[19] = 1,
  // addr[18:0] = {row, channel[3:0], q_not_i}.
  localparam logic [19:0] R_DN_STEP = 20'h00, R_UP_STEP = 20'h01, R_MODE = 20'h02,
                          R_SEL_OFS = 20'h03, R_FB_OFS = 20'h04, R_AMP_SET = 20'h05,
                          R_PH_SET = 20'h06, R_DRV_AMP = 20'h07, R_DRV_PH = 20'h08,
                          R_KP = 20'h09, R_KI = 20'h0A, R_AMP_MAX = 20'h0B,
                          R_CIC_DEC = 20'h0C, R_CHSEL = 20'h0D, R_CW = 20'h0E,
                          R_PERIOD = 20'h0F, R_WIDTH = 20'h10, R_TRIG_SRC = 20'h11,
                          R_TRIG_MODE = 20'h12, R_TRIG_DLY = 20'h13, R_POST = 20'h14,
                          R_CMD = 20'h15, R_SCAN_START = 20'h16, R_SCAN_STEP = 20'h17,
                          R_SCAN_N = 20'h18, R_DET_STRIDE = 20'h19,
                          R_DETUNE = 20'h20, R_BEST_PH = 20'h21, R_BEST_AMP = 20'h22,
                          R_STATUS = 20'h23, R_TRIG_CNT = 20'h24, R_PRL_PH = 20'h25,
                          R_CAV_AMP = 20'h26, R_CAV_PH = 20'h27, R_FB_AMP = 20'h28,
                          R_FB_PH = 20'h29, R_SEL_APPLIED = 20'h2A;
  // R_CMD bits
  localparam int CMD_ARM = 0, CMD_READ_DONE = 1, CMD_SCAN = 2;

  // Reset frequency words: the LCLS-II gun column of the frequency table,
  // round(f_IF / f_clk * 2^32): 20.714 / 94.286 MHz and 34.285 / 188.57 MHz.
  localparam logic [PACC_W-1:0] DN_STEP_GUN = 32'h383dd182;
  localparam logic [PACC_W-1:0] UP_STEP_GUN = 32'h2e8b7a78;

  // Angle helpers: degrees to phase word (for constants in testbenches)
  function automatic logic [PW-1:0] deg2ph(input real deg);
    real t;
    t = deg / 360.0 * real'(2 ** PW);
    return PW'($rtoi(t + (t >= 0.0 ? 0.5 : -0.5)));
  endfunction

endpackage
