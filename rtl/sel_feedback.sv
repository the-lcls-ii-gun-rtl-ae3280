// sel_feedback: the controller core, self-excited loop (SEL) and feedback.
//
// Two probe inputs, each picked by software from the ADC channels: the SEL
// input and the feedback (FB) input. Usually both are the same cavity probe.
// Data path, one sample per clock:
//
//   1. Polar conversion (two CORDICs, vectoring):
//        SEL: cav_amp, cav_phase = |sel_iq|, arg(sel_iq)
//        FB : fb_amp,  fb_phase  = |fb_iq|,  arg(fb_iq) + fb_ofs - ref_phase
//      fb_ofs is the independent phase offset on the feedback input and
//      ref_phase the averaged phase-reference-line phase.
//   2. Errors: amp_err = amp_set - fb_amp, phase_err = phase_set - fb_phase
//      (phase difference wraps, read as signed).
//   3. PI: integ += ki*err; corr = (kp*err + integ) >>> GAIN_SHIFT, one PI for
//      amplitude and one for phase. Integrators are clamped and are cleared
//      while the loop is off or RF is off.
//   4. Drive in polar form, by mode:
//        MODE_OPEN     : amp = drive_amp,         phase = drive_phase
//        MODE_SEL      : amp = drive_amp,         phase = cav_phase + sel_ofs
//        MODE_SEL_AMP  : amp = drive_amp + corr_a, phase = cav_phase + sel_ofs
//        MODE_FEEDBACK : amp = drive_amp + corr_a, phase = drive_phase + corr_p
//      amp is clipped to [0, amp_max] and forced to 0 while rf_on is low.
//      In SEL the drive follows the cavity's own phase, so the cavity rings at
//      its own resonance; sel_ofs rotates the drive to close the loop with the
//      right phase.
//   5. A CORDIC in rotation mode turns (0.6073*amp, phase) into drive I/Q.
//
// Units: amplitudes out of a vectoring CORDIC carry its gain of ~1.6468, so
// amp_set is in those units; drive_amp/amp_max are in drive LSBs. Phases are
// PW-bit words (2^PW is a turn).
//
// Timing: cav_*/fb_* lag the probes by STAGES + 2 clocks; the drive lags the
// probes by 2*STAGES + 8 clocks. rst must be held at least STAGES + 2 clocks.
//
// The paper gives the two selectable inputs, the phase offset on the feedback
// input, the SEL mode with its scanned phase offset and a feedback loop. The
// polar structure, the four modes, PI form, gains, clipping and the reference
// subtraction are this design's choices.
module sel_feedback
  import llrf_pkg::*;
#(
  parameter int STAGES     = 18,
  parameter int GAIN_SHIFT = 16
) (
  input  logic              clk,
  input  logic              rst,
  input  iq_t               sel_iq,
  input  iq_t               fb_iq,
  input  logic [PW-1:0]     ref_phase,
  input  logic              rf_on,
  input  sel_cfg_t          cfg,
  output iq_t               drive,
  output logic              drive_valid,
  output logic [AW_AMP-1:0] cav_amp,
  output logic [PW-1:0]     cav_phase,
  output logic [AW_AMP-1:0] fb_amp,
  output logic [PW-1:0]     fb_phase,
  output logic signed [AW_AMP:0] amp_err,
  output logic signed [PW-1:0]   phase_err
);
  localparam int PRW = 48;                       // product width
  localparam int IW  = GAIN_SHIFT + DW + 4;      // integrator width
  localparam logic signed [PRW-1:0] IMAX = PRW'((64'sd1 <<< (IW - 1)) - 1);
  localparam logic signed [PRW-1:0] IMIN = -IMAX;
  localparam logic signed [PRW-1:0] ZERO = '0;    // signed zero keeps ?: signed
  localparam logic [15:0] INV_GAIN = 16'd19898;  // round(0.60725 * 2^15)

  // ---- 1. polar conversion ---------------------------------------------
  logic                 s_ov, f_ov;
  logic signed [DW+1:0] s_x, s_y, f_x, f_y;
  logic [PW-1:0]        s_z, f_z;

  cordic #(.DW(DW), .PW(PW), .STAGES(STAGES)) u_vec_sel (
    .clk(clk), .in_valid(~rst), .vectoring(1'b1),
    .x_in(sel_iq.i), .y_in(sel_iq.q), .z_in('0),
    .out_valid(s_ov), .x_out(s_x), .y_out(s_y), .z_out(s_z));

  cordic #(.DW(DW), .PW(PW), .STAGES(STAGES)) u_vec_fb (
    .clk(clk), .in_valid(~rst), .vectoring(1'b1),
    .x_in(fb_iq.i), .y_in(fb_iq.q), .z_in(cfg.fb_ofs - ref_phase),
    .out_valid(f_ov), .x_out(f_x), .y_out(f_y), .z_out(f_z));

  logic v1;
  always_ff @(posedge clk) begin
    if (rst) begin
      v1 <= 1'b0;
      cav_amp <= '0; cav_phase <= '0; fb_amp <= '0; fb_phase <= '0;
    end else begin
      v1        <= s_ov & f_ov;
      cav_amp   <= AW_AMP'(s_x);
      cav_phase <= s_z;
      fb_amp    <= AW_AMP'(f_x);
      fb_phase  <= f_z;
    end
  end

  // ---- 2. errors -----------------------------------------------------------
  logic v2;
  logic [PW-1:0] cav_phase2;
  always_ff @(posedge clk) begin
    if (rst) begin
      v2 <= 1'b0; amp_err <= '0; phase_err <= '0; cav_phase2 <= '0;
    end else begin
      v2         <= v1;
      amp_err    <= $signed({1'b0, cfg.amp_set}) - $signed({1'b0, fb_amp});
      phase_err  <= $signed(cfg.phase_set - fb_phase);
      cav_phase2 <= cav_phase;
    end
  end

  // ---- 3. PI -------------------------------------------------------------
  logic amp_loop, ph_loop;
  always_comb begin
    amp_loop = rf_on && (cfg.mode == MODE_SEL_AMP || cfg.mode == MODE_FEEDBACK);
    ph_loop  = rf_on && (cfg.mode == MODE_FEEDBACK);
  end

  function automatic logic signed [PRW-1:0] clamp(input logic signed [PRW-1:0] v);
    if (v > IMAX) return IMAX;
    if (v < IMIN) return IMIN;
    return v;
  endfunction

  logic signed [PRW-1:0] int_a, int_p;
  logic signed [PRW-1:0] corr_a, corr_p;
  logic v3;
  logic [PW-1:0] cav_phase3;
  always_ff @(posedge clk) begin
    logic signed [PRW-1:0] pa, pp, ia_n, ip_n;
    pa = PRW'(amp_err) * $signed({1'b0, cfg.ki});
    pp = PRW'(phase_err) * $signed({1'b0, cfg.ki});
    ia_n = amp_loop ? clamp(int_a + pa) : ZERO;
    ip_n = ph_loop  ? clamp(int_p + pp) : ZERO;
    if (rst) begin
      v3 <= 1'b0; int_a <= '0; int_p <= '0; corr_a <= '0; corr_p <= '0; cav_phase3 <= '0;
    end else begin
      v3         <= v2;
      int_a      <= ia_n;
      int_p      <= ip_n;
      corr_a     <= amp_loop ? (PRW'(amp_err)   * $signed({1'b0, cfg.kp}) + ia_n) >>> GAIN_SHIFT : ZERO;
      corr_p     <= ph_loop  ? (PRW'(phase_err) * $signed({1'b0, cfg.kp}) + ip_n) >>> GAIN_SHIFT : ZERO;
      cav_phase3 <= cav_phase2;
    end
  end

  // ---- 4. polar drive --------------------------------------------------------
  logic v4;
  logic [DW-2:0] d_amp;
  logic [PW-1:0] d_phase;
  always_ff @(posedge clk) begin
    logic signed [PRW-1:0] a;
    a = PRW'($signed({1'b0, cfg.drive_amp}));
    if (cfg.mode == MODE_SEL_AMP || cfg.mode == MODE_FEEDBACK) a = a + corr_a;
    if (a < 0) a = '0;
    if (a > PRW'($signed({1'b0, cfg.amp_max}))) a = PRW'($signed({1'b0, cfg.amp_max}));
    if (!rf_on) a = '0;
    if (rst) begin
      v4 <= 1'b0; d_amp <= '0; d_phase <= '0;
    end else begin
      v4    <= v3;
      d_amp <= (DW-1)'(a);
      unique case (cfg.mode)
        MODE_OPEN:     d_phase <= cfg.drive_phase;
        MODE_SEL,
        MODE_SEL_AMP:  d_phase <= cav_phase3 + cfg.sel_ofs;
        MODE_FEEDBACK: d_phase <= cfg.drive_phase + PW'(corr_p);
      endcase
    end
  end

  // ---- 5. back to I/Q ------------------------------------------------------
  logic v5;
  logic signed [DW-1:0] r_x;
  logic [PW-1:0] r_z;
  always_ff @(posedge clk) begin
    logic [DW+15:0] prod;
    prod = {1'b0, d_amp} * INV_GAIN;
    if (rst) begin
      v5 <= 1'b0; r_x <= '0; r_z <= '0;
    end else begin
      v5  <= v4;
      r_x <= $signed(DW'(prod >> 15));
      r_z <= d_phase;
    end
  end

  logic                 r_ov;
  logic signed [DW+1:0] r_xo, r_yo;
  logic [PW-1:0]        r_zo;
  cordic #(.DW(DW), .PW(PW), .STAGES(STAGES)) u_rot (
    .clk(clk), .in_valid(v5 & ~rst), .vectoring(1'b0),
    .x_in(r_x), .y_in('0), .z_in(r_z),
    .out_valid(r_ov), .x_out(r_xo), .y_out(r_yo), .z_out(r_zo));

  always_ff @(posedge clk) begin
    if (rst) begin
      drive_valid <= 1'b0;
      drive       <= '0;
    end else begin
      drive_valid <= r_ov;
      drive.i     <= DW'(r_xo);
      drive.q     <= DW'(r_yo);
    end
  end

  logic unused;
  assign unused = ^{s_y, f_y, r_zo, r_xo[DW+1:DW], r_yo[DW+1:DW], corr_p[PRW-1:PW]};
endmodule
