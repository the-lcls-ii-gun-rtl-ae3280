// tb_llrf_top: end-to-end test of the controller with the cavity emulator in
// the loop. It is also the full-size test: llrf_top runs with its default
// parameters (no overrides).
//
// Set-up: ser_clk (period 2), adc_clk (period 32, 16 bit clocks per frame),
// dac_clk (period 16, twice the ADC rate) all from one time base. The DAC
// output drives cavity_emulator; its probe, forward and reflected IF signals
// are serialized onto the ADC lanes as
//   CAV1 = probe, CAV2 = probe/2, FWD1/FWD2 = forward, REV1/REV2 = reflected,
//   DRV1 = forward, PRL7_1 = a reference tone at the down IF whose phase the
//   test can move.
// Software is modelled by bus reads and writes. The sequence, with the
// mechanism each step counts:
//   open_loop       open-loop drive fills the cavity
//   channel_select  feedback probe moved from CAV1 to CAV2: amplitude halves
//   pulsed          RF pulses from the pulse generator
//   phase_scan      SEL phase scan over 16 pulses finds a best offset
//   sel             CW self-excited loop with the best offset keeps a strong field
//   sel_offset      the offset plus half a turn collapses the field
//   detune          published detune has the emulator's sign and size
//   sel_amp         SEL with amplitude loop reaches the set amplitude
//   feedback        amplitude and phase loops reach their set points
//   phase_reference moving the reference line phase moves the cavity phase
//   trig_<source>   one record per trigger source, checked from the data
//   decimation      recording time scales with the decimation
//   normal_rearm    normal mode re-arms after read-out and records again
//   single          single mode stops after read-out
//   drive_recorded  the drive channel is recorded
//   mode_switch     changes of controller mode
// A mechanism that never happened counts as a failure.
module tb_llrf_top;
  import llrf_pkg::*;
  localparam real TP    = 6.283185307179586;
  localparam real TURN  = 262144.0;
  localparam real DETUNE = 0.0005;
  localparam int  DEPTH = 2048;

  logic ser_clk = 0, adc_clk = 0, dac_clk = 0;
  always #1  ser_clk = ~ser_clk;
  always #8  dac_clk = ~dac_clk;
  always #16 adc_clk = ~adc_clk;

  int checks = 0, failures = 0;
  int mech[string];

  logic rst = 1, ser_rst = 1, dac_rst = 1;
  logic adc_frame;
  logic [NCH-1:0] adc_sdata;
  logic signed [DAC_W-1:0] dac_data;
  logic [19:0] bus_addr = 0;
  logic [31:0] bus_wdata = 0;
  logic bus_we = 0, bus_re = 0;
  logic [31:0] bus_rdata;
  logic bus_rvalid;
  logic ext_trig = 0;
  logic rf_on;

  llrf_top dut (.*);

  // ---- plant ----
  logic signed [15:0] cav, fwd, rev;
  cavity_emulator #(.DETUNE(DETUNE)) u_cav (
    .dac_clk(dac_clk), .dac(dac_data), .adc_clk(adc_clk), .cav(cav), .fwd(fwd), .rev(rev));

  real prl_ph = 0.0;     // reference line phase, turns
  logic [31:0] th_prl = 0;
  logic [ADC_W-1:0] words [NCH];
  initial for (int c = 0; c < NCH; c++) words[c] = '0;
  always @(posedge adc_clk) begin
    words[CH_CAV1]   <= cav;
    words[CH_CAV2]   <= cav >>> 1;
    words[CH_FWD1]   <= fwd;
    words[CH_REV1]   <= rev;
    words[CH_FWD2]   <= fwd;
    words[CH_REV2]   <= rev;
    words[CH_DRV1]   <= fwd;
    words[CH_PRL7_1] <= 16'($rtoi(12000.0 * $cos(TP * (real'(th_prl) / 4294967296.0 + prl_ph))));
    th_prl <= th_prl + DN_STEP_GUN;
  end
  adc_serializer #(.NCH(NCH), .ADC_W(ADC_W)) u_ser (
    .ser_clk(ser_clk), .words(words), .frame(adc_frame), .sdata(adc_sdata));

  // ---- monitors ----
  logic rf_q = 0;
  int   rises = 0;
  always @(posedge adc_clk) begin
    rf_q <= rf_on;
    if (rf_on && !rf_q) rises++;
  end

  // ---- helpers ----
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (t=%0t)", msg, $time); end
  endtask

  task automatic wr(input logic [19:0] a, input logic [31:0] d);
    @(negedge adc_clk) begin bus_addr = a; bus_wdata = d; bus_we = 1; end
    @(negedge adc_clk) bus_we = 0;
  endtask

  task automatic rd(input logic [19:0] a, output logic [31:0] d);
    @(negedge adc_clk) begin bus_addr = a; bus_re = 1; end
    @(negedge adc_clk) bus_re = 0;
    @(negedge adc_clk);
    d = bus_rdata;
  endtask

  task automatic wait_clk(input int n);
    repeat (n) @(negedge adc_clk);
  endtask

  // average of n reads (ripple from the IF image is a few per cent)
  task automatic rd_avg(input logic [19:0] a, input int n, output real r);
    logic [31:0] d;
    r = 0.0;
    for (int k = 0; k < n; k++) begin
      rd(a, d);
      r += real'(d);
      wait_clk(7);
    end
    r = r / real'(n);
  endtask

  // circular mean of a phase register, turns
  task automatic rd_phase(input logic [19:0] a, input int n, output real r);
    logic [31:0] d;
    real c, s;
    c = 0.0; s = 0.0;
    for (int k = 0; k < n; k++) begin
      rd(a, d);
      c += $cos(TP * real'(d) / TURN);
      s += $sin(TP * real'(d) / TURN);
      wait_clk(7);
    end
    r = $atan2(s, c) / TP;
  endtask

  function automatic real wrapd(input real d);   // wrapped difference, turns
    return d - $floor(d + 0.5);
  endfunction
  function automatic real rabs(input real v);
    return v < 0.0 ? -v : v;
  endfunction

  task automatic set_mode(input ctl_mode_e m);
    wr(R_MODE, 32'(m));
    mech["mode_switch"]++;
  endtask

  // wait for the recorder to reach a state; returns clocks waited (-1: timeout)
  task automatic wait_state(input wave_state_e s, input int limit, output int t);
    logic [31:0] d;
    t = 0;
    forever begin
      rd(R_STATUS, d);
      t += 3;
      if (wave_state_e'(d[1:0]) == s) return;
      if (t > limit) begin t = -1; return; end
    end
  endtask

  // amplitude of a recorded channel at one row
  task automatic rec_amp(input int row, input chan_e ch, output real a);
    logic [31:0] di, dq;
    logic [19:0] base;
    base = 20'h80000 | 20'(row << 5) | 20'(int'(ch) << 1);
    rd(base, di);
    rd(base | 20'd1, dq);
    a = $sqrt(real'($signed(di)) ** 2 + real'($signed(dq)) ** 2);
  endtask
  task automatic rec_amp_n(input int row, input int ch, output real a);
    logic [31:0] di, dq;
    logic [19:0] base;
    base = 20'h80000 | 20'(row << 5) | 20'(ch << 1);
    rd(base, di);
    rd(base | 20'd1, dq);
    a = $sqrt(real'($signed(di)) ** 2 + real'($signed(dq)) ** 2);
  endtask

  // one recording: source, mode, post rows; returns clocks to DONE
  task automatic record(input trig_src_e src, input trig_mode_e m, input int post,
                        output int t);
    wr(R_TRIG_SRC, 32'(src));
    wr(R_TRIG_MODE, 32'(m));
    wr(R_POST, 32'(post));
    wr(R_CMD, 32'h1 << CMD_ARM);
    wait_state(WS_DONE, 60000, t);
  endtask

  initial begin
    logic [31:0] d, best, tc0, tc1;
    real a0, a1, a2, ph0, ph1, det_exp;
    int t, t1, t2, T;

    repeat (40) @(negedge adc_clk);
    rst = 0; ser_rst = 0; dac_rst = 0;
    wait_clk(50);

    // ---- open loop, CW ----
    rd(R_DN_STEP, d);
    check(d == DN_STEP_GUN, "reset frequency word");
    wr(R_CW, 1);
    wr(R_DRV_AMP, 60000);
    wr(R_DRV_PH, 0);
    wait_clk(1500);
    rd_avg(R_CAV_AMP, 8, a0);
    check(a0 > 15000.0, $sformatf("open loop cavity amplitude %f", a0));
    if (a0 > 15000.0) mech["open_loop"]++;

    // ---- channel select: feedback probe on CAV2 (half scale) ----
    rd_avg(R_FB_AMP, 8, a1);
    wr(R_CHSEL, {21'd0, CH_PRL7_1, 1'b0, CH_CAV2, 1'b0, CH_CAV1});
    wait_clk(200);
    rd_avg(R_FB_AMP, 8, a2);
    check(rabs(a2 / a1 - 0.5) < 0.03, $sformatf("channel select ratio %f", a2 / a1));
    if (rabs(a2 / a1 - 0.5) < 0.03) mech["channel_select"]++;
    wr(R_CHSEL, {21'd0, CH_PRL7_1, 1'b0, CH_CAV1, 1'b0, CH_CAV1});

    // ---- pulsed operation and SEL phase scan ----
    wr(R_PERIOD, 800);
    wr(R_WIDTH, 400);
    wr(R_CW, 0);
    set_mode(MODE_SEL);
    t = rises;
    wait_clk(1700);
    check(rises - t == 2, $sformatf("pulses %0d", rises - t));
    if (rises - t == 2) mech["pulsed"]++;
    wr(R_SCAN_START, 0);
    wr(R_SCAN_STEP, 32'(PW'(1 << (PW - 4))));
    wr(R_SCAN_N, 16);
    wr(R_CMD, 32'h1 << CMD_SCAN);
    rd(R_STATUS, d);
    check(d[3], "scan busy");
    t = 0;
    do begin wait_clk(200); t += 200; rd(R_STATUS, d); end while (d[3] && t < 20000);
    check(!d[3], "scan finished");
    rd(R_BEST_PH, best);
    rd(R_BEST_AMP, d);
    a0 = real'(d);
    check(a0 > 15000.0, $sformatf("scan best amplitude %f", a0));
    rd(R_SEL_APPLIED, d);
    check(d == best, "best offset applied");
    if (a0 > 15000.0 && d == best) mech["phase_scan"]++;
    $display("scan: best phase %0d (%f turn), amplitude %f", best, real'(best) / TURN, a0);

    // ---- CW SEL with the best offset ----
    wr(R_CW, 1);
    wait_clk(2000);
    rd_avg(R_CAV_AMP, 16, a1);
    check(a1 > 0.9 * a0, $sformatf("SEL CW amplitude %f vs scan %f", a1, a0));
    if (a1 > 0.9 * a0) mech["sel"]++;

    // ---- detune: phase slope of the self-excited field ----
    // The SEL field rings where the loop phase closes, near the cavity
    // resonance; the exact offset depends on how well the scan's offset
    // matches. The published detune is compared with the emulator's actual
    // field rotation over the same number of clocks, and its sign with the
    // emulator's detune.
    wr(R_DET_STRIDE, 4);
    wait_clk(1 << (4 + 8));
    det_exp = 0.0;
    ph0 = $atan2(u_cav.vi, u_cav.vr) / TP;
    for (int k = 0; k < (1 << 8); k++) begin
      wait_clk(16);
      ph1 = $atan2(u_cav.vi, u_cav.vr) / TP;
      det_exp += wrapd(ph1 - ph0) * TURN;
      ph0 = ph1;
    end
    rd(R_DETUNE, d);
    $display("detune %0d, field rotation %f, cavity detune %f", $signed(d), det_exp,
             DETUNE * TURN * real'(1 << (4 + 8)));
    check(rabs(real'($signed(d)) - det_exp) < 0.1 * rabs(det_exp), "detune value");
    check($signed(d) > 0, "detune sign");
    if (rabs(real'($signed(d)) - det_exp) < 0.1 * rabs(det_exp) && $signed(d) > 0) mech["detune"]++;

    // ---- wrong offset: half a turn away ----
    // The loop delay (about 60 clocks) lets the loop close again at a
    // frequency off resonance, so the field drops to about half, not to zero.
    wr(R_SEL_OFS, 32'(PW'(best + (1 << (PW - 1)))));
    wait_clk(1500);
    rd_avg(R_CAV_AMP, 16, a2);
    check(a2 < 0.7 * a1, $sformatf("SEL wrong offset amplitude %f vs %f", a2, a1));
    if (a2 < 0.7 * a1) mech["sel_offset"]++;
    wr(R_SEL_OFS, best);
    wait_clk(1500);

    // ---- SEL with amplitude loop ----
    wr(R_KP, 8192);
    wr(R_KI, 64);
    wr(R_AMP_SET, 30000);
    set_mode(MODE_SEL_AMP);
    wait_clk(15000);
    rd_avg(R_FB_AMP, 16, a0);
    check(rabs(a0 - 30000.0) < 600.0, $sformatf("SEL amplitude loop %f", a0));
    if (rabs(a0 - 30000.0) < 600.0) mech["sel_amp"]++;

    // ---- feedback: amplitude and phase ----
    wr(R_AMP_SET, 35000);
    wr(R_PH_SET, 50000);
    wr(R_FB_OFS, 7000);
    set_mode(MODE_FEEDBACK);
    wait_clk(20000);
    rd_avg(R_FB_AMP, 16, a0);
    rd_phase(R_FB_PH, 16, ph0);
    check(rabs(a0 - 35000.0) < 700.0, $sformatf("feedback amplitude %f", a0));
    check(rabs(wrapd(ph0 - 50000.0 / TURN)) < 0.005, $sformatf("feedback phase %f", ph0));
    if (rabs(a0 - 35000.0) < 700.0 && rabs(wrapd(ph0 - 50000.0 / TURN)) < 0.005) mech["feedback"]++;

    // ---- reference line: move its phase, the locked cavity follows ----
    rd_phase(R_CAV_PH, 32, ph0);
    prl_ph = 0.125;
    wait_clk(15000);
    rd_phase(R_CAV_PH, 32, ph1);
    $display("cavity phase moved %f turn", wrapd(ph1 - ph0));
    check(rabs(wrapd(ph1 - ph0) - 0.125) < 0.01, "reference phase followed");
    if (rabs(wrapd(ph1 - ph0) - 0.125) < 0.01) mech["phase_reference"]++;

    // ---- recorder: pulsed, feedback on, decimation by 2 ----
    wr(R_CW, 0);
    wr(R_DRV_AMP, 60000);
    wr(R_CIC_DEC, 1);
    wr(R_TRIG_DLY, 200);
    T = DEPTH - 512;                     // row of the trigger
    // Decay: field high before, decayed 100 rows (200 clocks) later
    record(TRIG_DECAY, TMODE_SINGLE, 512, t);
    check(t >= 0, "decay record done");
    rec_amp(T - 2, CH_CAV1, a0);
    rec_amp(T + 100, CH_CAV1, a1);
    check(a0 > 10000.0 && a1 < 0.3 * a0, $sformatf("decay record %f -> %f", a0, a1));
    if (t >= 0 && a0 > 10000.0 && a1 < 0.3 * a0) mech["trig_decay"]++;
    rec_amp_n(T - 2, NCH, a2);
    check(a2 > 10000.0, $sformatf("drive channel %f", a2));
    if (a2 > 10000.0) mech["drive_recorded"]++;
    // single mode: read-out done -> idle
    wr(R_CMD, 32'h1 << CMD_READ_DONE);
    rd(R_STATUS, d);
    check(wave_state_e'(d[1:0]) == WS_IDLE, "single mode idle");
    if (wave_state_e'(d[1:0]) == WS_IDLE) mech["single"]++;

    // Rising: empty before, filling after
    record(TRIG_RISING, TMODE_SINGLE, 512, t);
    check(t >= 0, "rising record done");
    rec_amp(T - 20, CH_CAV1, a0);
    rec_amp(T + 150, CH_CAV1, a1);
    check(a0 < 0.1 * a1 && a1 > 10000.0, $sformatf("rising record %f -> %f", a0, a1));
    if (t >= 0 && a0 < 0.1 * a1 && a1 > 10000.0) mech["trig_rising"]++;

    // Delay: 200 clocks after the rise, so 110 rows earlier RF was off
    record(TRIG_DELAY, TMODE_SINGLE, 512, t);
    check(t >= 0, "delay record done");
    rec_amp(T - 110, CH_CAV1, a0);
    rec_amp(T, CH_CAV1, a1);
    check(a0 < 0.1 * a1 && a1 > 10000.0, $sformatf("delay record %f -> %f", a0, a1));
    if (t >= 0 && a0 < 0.1 * a1 && a1 > 10000.0) mech["trig_delay"]++;

    // Ext: nothing happens until the external trigger
    wr(R_TRIG_SRC, 32'(TRIG_EXT));
    wr(R_CMD, 32'h1 << CMD_ARM);
    wait_clk(6000);
    rd(R_STATUS, d);
    check(wave_state_e'(d[1:0]) == WS_ARMED, "ext: waits for trigger");
    @(negedge adc_clk) ext_trig = 1;
    @(negedge adc_clk) ext_trig = 0;
    wait_state(WS_DONE, 3000, t);
    check(t >= 0, "ext record done");
    if (wave_state_e'(d[1:0]) == WS_ARMED && t >= 0) mech["trig_ext"]++;

    // Always, and the decimation: full buffer time at /2 and /4
    wr(R_CMD, 32'h1 << CMD_READ_DONE);
    record(TRIG_ALWAYS, TMODE_SINGLE, 512, t1);
    check(t1 >= 0, "always record done");
    if (t1 >= 0) mech["trig_always"]++;
    wr(R_CIC_DEC, 2);
    record(TRIG_ALWAYS, TMODE_SINGLE, 512, t2);
    $display("record times %0d %0d", t1, t2);
    check(rabs(real'(t2) / real'(t1) - 2.0) < 0.05, "decimation scales recording time");
    if (rabs(real'(t2) / real'(t1) - 2.0) < 0.05) mech["decimation"]++;

    // Normal mode: read-out done re-arms and the next decay records again
    wr(R_CIC_DEC, 1);
    record(TRIG_DECAY, TMODE_NORMAL, 512, t);
    rd(R_TRIG_CNT, tc0);
    wr(R_CMD, 32'h1 << CMD_READ_DONE);
    rd(R_STATUS, d);
    check(wave_state_e'(d[1:0]) == WS_ARMED, "normal mode re-armed");
    wait_state(WS_DONE, 20000, t);
    rd(R_TRIG_CNT, tc1);
    check(t >= 0 && tc1 == tc0 + 1, "normal mode second record");
    if (wave_state_e'(d[1:0]) == WS_ARMED && t >= 0 && tc1 == tc0 + 1) mech["normal_rearm"]++;

    // back to open loop
    set_mode(MODE_OPEN);

    // ---- mechanism summary ----
    foreach (mech[k]) $display("mechanism %-16s %0d", k, mech[k]);
    begin
      string need[$] = '{"open_loop", "channel_select", "pulsed", "phase_scan", "sel",
                         "sel_offset", "detune", "sel_amp", "feedback", "phase_reference",
                         "trig_decay", "trig_rising", "trig_delay", "trig_ext", "trig_always",
                         "decimation", "normal_rearm", "single", "drive_recorded", "mode_switch"};
      foreach (need[k]) begin
        checks++;
        if (!mech.exists(need[k]) || mech[need[k]] == 0) begin
          failures++;
          $display("FAIL mechanism %s never happened", need[k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge adc_clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
