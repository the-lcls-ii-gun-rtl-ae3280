// llrf_top: gun/buncher LLRF controller firmware.
//
// Two clock domains. The ADC domain (adc_clk, with its serial bit clock
// ser_clk) holds almost everything; the DAC domain (dac_clk = 2 x adc_clk,
// same clock chip) holds the up-conversion.
//
//   serial ADC lanes -> adc_deser -> 8 x 16-bit samples
//     -> ddc_mixer x8 (one shared down-conversion nco)     -> baseband I/Q
//        -> cic_decim x8 (+1 for the drive) -> waveform_buffer (recorder)
//        -> stream_select: SEL probe, FB probe, phase reference
//             SEL, FB -> iq_lowpass -> sel_feedback (SEL + PI feedback)
//             reference -> prl_phase_avg -> ref_phase for the feedback
//   sel_feedback drive -> upconverter (DAC domain, own nco) -> dac_data
//   sel_feedback cavity phase -> detune_calc -> software
//   sel_feedback cavity amplitude -> sel_phase_scan -> SEL phase offset
//   rf_pulse_gen: RF gate (CW or pulsed), pulse edges for the scan and
//                 the recorder triggers
//   reg_bank: configuration and read-back over a local bus (the network
//             interface to the software is outside this design)
//
// Resets are synchronous per domain: rst (adc_clk), ser_rst (ser_clk),
// dac_rst (dac_clk). Hold each for at least STAGES + 2 clocks of its domain.
//
// The split into these blocks follows the paper's description of the
// firmware (its block diagram was not available); everything inside the
// blocks that the paper does not state is this design's own, as each
// file's header says.
module llrf_top
  import llrf_pkg::*;
#(
  parameter int DEPTH        = 2048,
  parameter int STAGES       = 18,
  parameter int MAX_DEC_LOG2 = 12,
  parameter int LP_SHIFT     = 4,
  parameter int PRL_AVG_LOG2 = 10,
  parameter int DET_AVG_LOG2 = 8
) (
  input  logic                    adc_clk,
  input  logic                    rst,
  input  logic                    ser_clk,
  input  logic                    ser_rst,
  input  logic                    dac_clk,
  input  logic                    dac_rst,
  // ADC serial interface
  input  logic                    adc_frame,
  input  logic [NCH-1:0]          adc_sdata,
  // DAC
  output logic signed [DAC_W-1:0] dac_data,
  // local bus from the network interface
  input  logic [19:0]             bus_addr,
  input  logic [31:0]             bus_wdata,
  input  logic                    bus_we,
  input  logic                    bus_re,
  output logic [31:0]             bus_rdata,
  output logic                    bus_rvalid,
  // trigger and RF gate
  input  logic                    ext_trig,
  output logic                    rf_on
);
  localparam logic signed [DW-1:0] LO_AMP = DW'(79590);  // 0.6073 * (2^17 - 1)

  llrf_cfg_t    cfg;
  llrf_status_t status;

  // ---- ADC input and down-conversion ---------------------------------------
  logic signed [ADC_W-1:0] adc [NCH];

  adc_deser #(.NCH(NCH), .ADC_W(ADC_W)) u_deser (
    .ser_clk(ser_clk), .ser_rst(ser_rst), .frame(adc_frame), .sdata(adc_sdata),
    .adc_clk(adc_clk), .adc_data(adc));

  logic signed [DW-1:0] lo_c, lo_s;
  logic                 lo_v;
  nco #(.PACC_W(PACC_W), .DW(DW), .PW(PW), .STAGES(STAGES)) u_nco_dn (
    .clk(adc_clk), .rst(rst), .phase_step(cfg.dn_step), .phase_ofs('0),
    .amp(LO_AMP), .cos_out(lo_c), .sin_out(lo_s), .out_valid(lo_v));

  iq_t bb [NCH];
  for (genvar c = 0; c < NCH; c++) begin : g_ddc
    ddc_mixer #(.AW(ADC_W), .W(DW)) u_mix (
      .clk(adc_clk), .adc(adc[c]), .lo_cos(lo_c), .lo_sin(lo_s),
      .bb_i(bb[c].i), .bb_q(bb[c].q));
  end

  // ---- recording path --------------------------------------------------------
  iq_t  drive;
  logic drive_valid;
  iq_t  rec_in  [NREC];
  iq_t  rec_out [NREC];
  logic rec_v   [NREC];

  always_comb begin
    for (int c = 0; c < NCH; c++) rec_in[c] = bb[c];
    rec_in[NCH] = drive;
  end

  for (genvar c = 0; c < NREC; c++) begin : g_cic
    cic_decim #(.W(DW), .MAX_DEC_LOG2(MAX_DEC_LOG2)) u_cic (
      .clk(adc_clk), .rst(rst), .in_valid(lo_v),
      .din_i(rec_in[c].i), .din_q(rec_in[c].q), .dec_log2(cfg.cic_dec_log2),
      .out_valid(rec_v[c]), .dout_i(rec_out[c].i), .dout_q(rec_out[c].q));
  end

  logic rf_rise, rf_fall;
  logic [$clog2(DEPTH)-1:0] wave_row;
  logic [3:0]               wave_ch;

  waveform_buffer #(.N(NREC), .DEPTH(DEPTH)) u_wave (
    .clk(adc_clk), .rst(rst), .din(rec_out), .din_valid(rec_v[0]),
    .rf_rise(rf_rise), .rf_fall(rf_fall), .ext_trig(ext_trig), .cfg(cfg.wave),
    .rd_row(wave_row), .rd_ch(wave_ch), .rd_data(status.wave_data),
    .state(status.wave_state), .trig_count(status.trig_count));

  // ---- controller path -------------------------------------------------------
  iq_t sel_raw, fb_raw, prl_raw, sel_lp, fb_lp;

  stream_select #(.N(NCH)) u_sel_sel (.clk(adc_clk), .sel(cfg.sel_ch), .din(bb), .dout(sel_raw));
  stream_select #(.N(NCH)) u_sel_fb  (.clk(adc_clk), .sel(cfg.fb_ch),  .din(bb), .dout(fb_raw));
  stream_select #(.N(NCH)) u_sel_prl (.clk(adc_clk), .sel(cfg.prl_ch), .din(bb), .dout(prl_raw));

  iq_lowpass #(.SHIFT(LP_SHIFT)) u_lp_sel (.clk(adc_clk), .rst(rst), .din(sel_raw), .dout(sel_lp));
  iq_lowpass #(.SHIFT(LP_SHIFT)) u_lp_fb  (.clk(adc_clk), .rst(rst), .din(fb_raw),  .dout(fb_lp));

  logic [PW-1:0]     ref_phase;
  logic [AW_AMP-1:0] ref_amp;
  logic              ref_valid;
  prl_phase_avg #(.AVG_LOG2(PRL_AVG_LOG2), .STAGES(STAGES)) u_prl (
    .clk(adc_clk), .rst(rst), .din(prl_raw),
    .ref_phase(ref_phase), .ref_amp(ref_amp), .ref_valid(ref_valid));
  assign status.prl_phase = ref_phase;

  rf_pulse_gen u_pulse (
    .clk(adc_clk), .rst(rst), .cw(cfg.cw), .period(cfg.period), .width(cfg.width),
    .rf_on(rf_on), .rise(rf_rise), .fall(rf_fall));

  logic [PW-1:0] sel_ofs;
  logic          scan_done;
  sel_phase_scan u_scan (
    .clk(adc_clk), .rst(rst), .start(cfg.scan_go),
    .scan_start(cfg.scan_start), .scan_step(cfg.scan_step), .n_steps(cfg.scan_n),
    .pulse_fall(rf_fall), .cav_amp(status.cav_amp),
    .host_ofs(cfg.sel.sel_ofs), .host_load(cfg.sel_ofs_load),
    .sel_ofs(sel_ofs), .best_phase(status.best_phase), .best_amp(status.best_amp),
    .busy(status.scan_busy), .done(scan_done));
  assign status.sel_ofs = sel_ofs;

  sel_cfg_t core_cfg;
  always_comb begin
    core_cfg         = cfg.sel;
    core_cfg.sel_ofs = sel_ofs;
  end

  logic signed [AW_AMP:0] amp_err;
  logic signed [PW-1:0]   phase_err;
  sel_feedback #(.STAGES(STAGES)) u_core (
    .clk(adc_clk), .rst(rst), .sel_iq(sel_lp), .fb_iq(fb_lp), .ref_phase(ref_phase),
    .rf_on(rf_on), .cfg(core_cfg), .drive(drive), .drive_valid(drive_valid),
    .cav_amp(status.cav_amp), .cav_phase(status.cav_phase),
    .fb_amp(status.fb_amp), .fb_phase(status.fb_phase),
    .amp_err(amp_err), .phase_err(phase_err));

  logic det_valid;
  detune_calc #(.AVG_LOG2(DET_AVG_LOG2)) u_detune (
    .clk(adc_clk), .rst(rst), .enable(rf_on), .phase(status.cav_phase),
    .stride_log2(cfg.det_stride), .detune(status.detune), .detune_valid(det_valid));

  // ---- software interface ------------------------------------------------------
  reg_bank #(.DEPTH(DEPTH)) u_regs (
    .clk(adc_clk), .rst(rst), .addr(bus_addr), .wdata(bus_wdata), .we(bus_we), .re(bus_re),
    .rdata(bus_rdata), .rvalid(bus_rvalid), .cfg(cfg), .status(status),
    .wave_row(wave_row), .wave_ch(wave_ch));

  // ---- DAC domain ---------------------------------------------------------------
  upconverter #(.STAGES(STAGES)) u_up (
    .dac_clk(dac_clk), .rst(dac_rst), .drive(drive), .phase_step(cfg.up_step),
    .dac(dac_data));

  // Status-only signals with no consumer inside the design
  logic unused;
  assign unused = ^{ref_amp, ref_valid, amp_err, phase_err, det_valid, drive_valid, scan_done,
                    lo_s[0] & 1'b0};
endmodule
