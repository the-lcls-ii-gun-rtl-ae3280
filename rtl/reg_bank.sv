// reg_bank: software-visible registers of the controller.
//
// Software (through the network interface, outside this design) reaches
// the controller over a simple local bus: 20-bit word address, 32-bit data,
// one-clock write strobe we and read strobe re. Writes take effect on the
// next clock. Reads return rdata with rvalid two clocks after re; the
// extra clock lets a waveform-memory read (addr[19] = 1) reach the recorder,
// whose read port has one clock of latency. The map is in llrf_pkg (R_*).
//
//   addr[19] = 0  configuration (read/write) and status (read only) words
//   addr[19] = 1  waveform memory: addr[18:0] = {row, channel[3:0], q_not_i};
//                 wave_row/wave_ch are taken straight from the bus address.
//
// Writing R_CMD gives one-clock pulses: arm the recorder, report the
// readout finished, start the SEL phase scan. Writing R_SEL_OFS also
// pulses sel_ofs_load so that the written offset replaces a scan result.
// Reset values: the LCLS-II gun frequency words, open-loop mode with zero
// drive and RF off, decimation 64, SEL and feedback on CAV1, reference on
// PRL7_1, recorder triggered by the RF decay in normal mode.
//
// Assertions state the bus rules: a read answers exactly two clocks after
// its strobe, and a write and a read do not share a clock.
//
// The paper says the channel selections, frequencies, modes and recording are
// software-controlled; the bus and the map are this design's own.
module reg_bank
  import llrf_pkg::*;
#(
  parameter int DEPTH = 2048
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic [19:0]              addr,
  input  logic [31:0]              wdata,
  input  logic                     we,
  input  logic                     re,
  output logic [31:0]              rdata,
  output logic                     rvalid,
  output llrf_cfg_t                cfg,
  input  llrf_status_t             status,
  output logic [$clog2(DEPTH)-1:0] wave_row,
  output logic [3:0]               wave_ch
);
  localparam int AB = $clog2(DEPTH);

  assign wave_row = addr[5 +: AB];
  assign wave_ch  = addr[4:1];

  always_ff @(posedge clk) begin
    cfg.wave.arm      <= 1'b0;
    cfg.wave.read_done <= 1'b0;
    cfg.scan_go       <= 1'b0;
    cfg.sel_ofs_load  <= 1'b0;
    if (rst) begin
      cfg.dn_step         <= DN_STEP_GUN;
      cfg.up_step         <= UP_STEP_GUN;
      cfg.sel.mode        <= MODE_OPEN;
      cfg.sel.sel_ofs     <= '0;
      cfg.sel.fb_ofs      <= '0;
      cfg.sel.amp_set     <= '0;
      cfg.sel.phase_set   <= '0;
      cfg.sel.drive_amp   <= '0;
      cfg.sel.drive_phase <= '0;
      cfg.sel.kp          <= '0;
      cfg.sel.ki          <= '0;
      cfg.sel.amp_max     <= '1;
      cfg.wave.src        <= TRIG_DECAY;
      cfg.wave.mode       <= TMODE_NORMAL;
      cfg.wave.delay      <= '0;
      cfg.wave.post       <= 16'(DEPTH / 2);
      cfg.cic_dec_log2    <= 4'd6;
      cfg.sel_ch          <= CH_CAV1;
      cfg.fb_ch           <= CH_CAV1;
      cfg.prl_ch          <= CH_PRL7_1;
      cfg.cw              <= 1'b0;
      cfg.period          <= '0;
      cfg.width           <= '0;
      cfg.scan_start      <= '0;
      cfg.scan_step       <= '0;
      cfg.scan_n          <= '0;
      cfg.det_stride      <= 4'd4;
    end else if (we && !addr[19]) begin
      unique case (addr)
        R_DN_STEP:    cfg.dn_step         <= wdata;
        R_UP_STEP:    cfg.up_step         <= wdata;
        R_MODE:       cfg.sel.mode        <= ctl_mode_e'(wdata[1:0]);
        R_SEL_OFS: begin
                      cfg.sel.sel_ofs     <= wdata[PW-1:0];
                      cfg.sel_ofs_load    <= 1'b1;
        end
        R_FB_OFS:     cfg.sel.fb_ofs      <= wdata[PW-1:0];
        R_AMP_SET:    cfg.sel.amp_set     <= wdata[AW_AMP-1:0];
        R_PH_SET:     cfg.sel.phase_set   <= wdata[PW-1:0];
        R_DRV_AMP:    cfg.sel.drive_amp   <= wdata[DW-2:0];
        R_DRV_PH:     cfg.sel.drive_phase <= wdata[PW-1:0];
        R_KP:         cfg.sel.kp          <= wdata[15:0];
        R_KI:         cfg.sel.ki          <= wdata[15:0];
        R_AMP_MAX:    cfg.sel.amp_max     <= wdata[DW-2:0];
        R_CIC_DEC:    cfg.cic_dec_log2    <= wdata[3:0];
        R_CHSEL: begin
                      cfg.sel_ch          <= chan_e'(wdata[2:0]);
                      cfg.fb_ch           <= chan_e'(wdata[6:4]);
                      cfg.prl_ch          <= chan_e'(wdata[10:8]);
        end
        R_CW:         cfg.cw              <= wdata[0];
        R_PERIOD:     cfg.period          <= wdata;
        R_WIDTH:      cfg.width           <= wdata;
        R_TRIG_SRC:   cfg.wave.src        <= trig_src_e'(wdata[2:0]);
        R_TRIG_MODE:  cfg.wave.mode       <= trig_mode_e'(wdata[0]);
        R_TRIG_DLY:   cfg.wave.delay      <= wdata;
        R_POST:       cfg.wave.post       <= wdata[15:0];
        R_CMD: begin
                      cfg.wave.arm        <= wdata[CMD_ARM];
                      cfg.wave.read_done  <= wdata[CMD_READ_DONE];
                      cfg.scan_go         <= wdata[CMD_SCAN];
        end
        R_SCAN_START: cfg.scan_start      <= wdata[PW-1:0];
        R_SCAN_STEP:  cfg.scan_step       <= wdata[PW-1:0];
        R_SCAN_N:     cfg.scan_n          <= wdata[7:0];
        R_DET_STRIDE: cfg.det_stride      <= wdata[3:0];
        default: ;
      endcase
    end
  end

  // read: addr latched (clock 1), data selected and registered (clock 2)
  logic [19:0] addr_q;
  logic        re_q;
  always_ff @(posedge clk) begin
    if (rst) begin
      re_q   <= 1'b0;
      addr_q <= '0;
      rvalid <= 1'b0;
      rdata  <= '0;
    end else begin
      re_q   <= re;
      addr_q <= addr;
      rvalid <= re_q;
      if (re_q) begin
        if (addr_q[19]) begin
          rdata <= addr_q[0] ? 32'(status.wave_data.q) : 32'(status.wave_data.i);
        end else begin
          unique case (addr_q)
            R_DN_STEP:     rdata <= cfg.dn_step;
            R_UP_STEP:     rdata <= cfg.up_step;
            R_MODE:        rdata <= 32'(cfg.sel.mode);
            R_SEL_OFS:     rdata <= 32'(cfg.sel.sel_ofs);
            R_FB_OFS:      rdata <= 32'(cfg.sel.fb_ofs);
            R_AMP_SET:     rdata <= 32'(cfg.sel.amp_set);
            R_PH_SET:      rdata <= 32'(cfg.sel.phase_set);
            R_DRV_AMP:     rdata <= 32'(cfg.sel.drive_amp);
            R_DRV_PH:      rdata <= 32'(cfg.sel.drive_phase);
            R_KP:          rdata <= 32'(cfg.sel.kp);
            R_KI:          rdata <= 32'(cfg.sel.ki);
            R_AMP_MAX:     rdata <= 32'(cfg.sel.amp_max);
            R_CIC_DEC:     rdata <= 32'(cfg.cic_dec_log2);
            R_CHSEL:       rdata <= {21'd0, cfg.prl_ch, 1'b0, cfg.fb_ch, 1'b0, cfg.sel_ch};
            R_CW:          rdata <= 32'(cfg.cw);
            R_PERIOD:      rdata <= cfg.period;
            R_WIDTH:       rdata <= cfg.width;
            R_TRIG_SRC:    rdata <= 32'(cfg.wave.src);
            R_TRIG_MODE:   rdata <= 32'(cfg.wave.mode);
            R_TRIG_DLY:    rdata <= cfg.wave.delay;
            R_POST:        rdata <= 32'(cfg.wave.post);
            R_SCAN_START:  rdata <= 32'(cfg.scan_start);
            R_SCAN_STEP:   rdata <= 32'(cfg.scan_step);
            R_SCAN_N:      rdata <= 32'(cfg.scan_n);
            R_DET_STRIDE:  rdata <= 32'(cfg.det_stride);
            R_DETUNE:      rdata <= status.detune;
            R_BEST_PH:     rdata <= 32'(status.best_phase);
            R_BEST_AMP:    rdata <= 32'(status.best_amp);
            R_STATUS:      rdata <= {28'd0, status.scan_busy, 1'b0, status.wave_state};
            R_TRIG_CNT:    rdata <= status.trig_count;
            R_PRL_PH:      rdata <= 32'(status.prl_phase);
            R_CAV_AMP:     rdata <= 32'(status.cav_amp);
            R_CAV_PH:      rdata <= 32'(status.cav_phase);
            R_FB_AMP:      rdata <= 32'(status.fb_amp);
            R_FB_PH:       rdata <= 32'(status.fb_phase);
            R_SEL_APPLIED: rdata <= 32'(status.sel_ofs);
            default:       rdata <= 32'hDEAD_BEEF;
          endcase
        end
      end
    end
  end

  // bus rules
  a_rvalid: assert property (@(posedge clk) disable iff (rst) re |-> ##2 rvalid);
  a_only_after_re: assert property (@(posedge clk) disable iff (rst) rvalid |-> $past(re, 2));
  a_no_rw: assert property (@(posedge clk) disable iff (rst) !(we && re));
endmodule
