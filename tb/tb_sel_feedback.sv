// tb_sel_feedback: checks the controller core in each mode.
//   open loop : drive = drive_amp at drive_phase, whatever the probes do
//   clipping  : drive_amp above amp_max is cut to amp_max
//   rf gate   : rf_on low gives zero drive
//   polar out : cav_amp/cav_phase and fb_phase = arg(fb) + fb_ofs - ref_phase
//   SEL       : drive phase = probe phase + sel_ofs (random phases, offsets)
//   latency   : a probe phase step reaches the drive after LAT clocks
//   SEL_AMP   : amplitude loop closed through a plant, phase still from SEL
//   FEEDBACK  : amplitude and phase loops both converge through the plant
// The plant model is fb = 0.5 * drive rotated by a fixed angle, one clock late.
//
// The SEL with its offset, the phase offset on the feedback input and the
// feedback loop are the paper's; modes, PI form and gains are this design's.
module tb_sel_feedback;
  import llrf_pkg::*;
  localparam int STAGES = 18;
  localparam int LAT    = 2 * STAGES + 8;
  localparam real TURN  = 262144.0;
  localparam real K     = 1.6467602581;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst = 1;
  iq_t sel_iq, fb_iq, drive;
  logic [PW-1:0] ref_phase;
  logic rf_on;
  sel_cfg_t cfg;
  logic drive_valid;
  logic [AW_AMP-1:0] cav_amp, fb_amp;
  logic [PW-1:0] cav_phase, fb_phase;
  logic signed [AW_AMP:0] amp_err;
  logic signed [PW-1:0] phase_err;

  sel_feedback #(.STAGES(STAGES)) dut (.*);

  // plant: fb = 0.5 * drive * e^{j psi}
  bit   use_plant = 0;
  real  psi = 0.0;
  iq_t  sel_ext, fb_ext;
  always_ff @(posedge clk) begin
    real c, s;
    c = $cos(psi); s = $sin(psi);
    fb_iq <= use_plant ? '{i: DW'($rtoi(0.5 * (c * drive.i - s * drive.q))),
                           q: DW'($rtoi(0.5 * (s * drive.i + c * drive.q)))} : fb_ext;
  end
  assign sel_iq = sel_ext;

  function automatic iq_t polar(input real a, input real ph_turns);
    iq_t r;
    r.i = DW'($rtoi(a * $cos(6.283185307 * ph_turns)));
    r.q = DW'($rtoi(a * $sin(6.283185307 * ph_turns)));
    return r;
  endfunction

  function automatic real drv_amp();
    return $sqrt(real'(drive.i) * real'(drive.i) + real'(drive.q) * real'(drive.q));
  endfunction
  function automatic real drv_ph();   // turns, 0..1
    real p;
    p = $atan2(real'(drive.q), real'(drive.i)) / 6.283185307;
    return p < 0.0 ? p + 1.0 : p;
  endfunction
  function automatic real pdiff(input real a, input real b);  // wrapped, turns
    real d;
    d = a - b;
    d = d - $floor(d + 0.5);
    return d < 0.0 ? -d : d;
  endfunction

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (t=%0t)", msg, $time); end
  endtask

  initial begin
    real a, ph, ofs;
    int lat;
    cfg = '0;
    cfg.amp_max = '1;
    sel_ext = '0; fb_ext = '0; ref_phase = '0; rf_on = 0;
    repeat (STAGES + 4) @(negedge clk);
    rst = 0;

    // ---- open loop, random amplitude and phase ----
    cfg.mode = MODE_OPEN;
    rf_on = 1;
    for (int k = 0; k < 20; k++) begin
      a  = real'($urandom_range(1000, 100000));
      ph = real'($urandom_range(0, 262143)) / TURN;
      cfg.drive_amp   = (DW-1)'($rtoi(a));
      cfg.drive_phase = PW'($rtoi(ph * TURN));
      sel_ext = polar(30000.0, real'($urandom) / 4294967296.0);
      repeat (LAT + 4) @(negedge clk);
      check(drive_valid, "drive_valid");
      check(drv_amp() > a * 0.995 - 4 && drv_amp() < a * 1.005 + 4, $sformatf("open amp %f vs %f", drv_amp(), a));
      check(pdiff(drv_ph(), ph) < 2e-4 + 5.0 / a, $sformatf("open phase %f vs %f", drv_ph(), ph));
    end

    // ---- clipping and RF gate ----
    cfg.drive_amp = 17'd90000;
    cfg.amp_max   = 17'd40000;
    repeat (LAT + 4) @(negedge clk);
    check(drv_amp() > 39800 && drv_amp() < 40200, $sformatf("clip %f", drv_amp()));
    rf_on = 0;
    repeat (LAT + 4) @(negedge clk);
    check(drive.i == 0 && drive.q == 0, "rf gate");
    rf_on = 1;
    cfg.amp_max = '1;

    // ---- polar outputs and FB reference subtraction ----
    for (int k = 0; k < 10; k++) begin
      real fp, exp_fb;
      ph = real'($urandom_range(0, 262143)) / TURN;
      fp = real'($urandom_range(0, 262143)) / TURN;
      cfg.fb_ofs = PW'($urandom);
      ref_phase  = PW'($urandom);
      sel_ext = polar(50000.0, ph);
      fb_ext  = polar(40000.0, fp);
      repeat (STAGES + 6) @(negedge clk);
      check(real'(cav_amp) > 50000.0 * K - 20 && real'(cav_amp) < 50000.0 * K + 20, $sformatf("cav_amp %0d", cav_amp));
      check(pdiff(real'(cav_phase) / TURN, ph) < 1e-4, "cav_phase");
      exp_fb = fp + (real'(cfg.fb_ofs) - real'(ref_phase)) / TURN;
      check(pdiff(real'(fb_phase) / TURN, exp_fb) < 1e-4, $sformatf("fb_phase %f vs %f", real'(fb_phase) / TURN, exp_fb));
    end

    // ---- SEL: drive follows probe phase plus offset ----
    cfg.mode = MODE_SEL;
    cfg.drive_amp = 17'd60000;
    for (int k = 0; k < 20; k++) begin
      ph  = real'($urandom_range(0, 262143)) / TURN;
      ofs = real'($urandom_range(0, 262143)) / TURN;
      cfg.sel_ofs = PW'($rtoi(ofs * TURN));
      sel_ext = polar(real'($urandom_range(5000, 70000)), ph);
      repeat (LAT + 4) @(negedge clk);
      check(pdiff(drv_ph(), ph + ofs) < 3e-4, $sformatf("sel phase %f vs %f", drv_ph(), ph + ofs));
      check(drv_amp() > 59700 && drv_amp() < 60300, "sel amp");
    end

    // ---- latency: phase step on the SEL probe ----
    sel_ext = polar(60000.0, 0.0);
    cfg.sel_ofs = '0;
    repeat (LAT + 4) @(negedge clk);
    sel_ext = polar(60000.0, 0.5);
    lat = 0;
    while (drive.i > 0 && lat < 200) begin @(negedge clk); lat++; end
    check(lat == LAT, $sformatf("latency %0d expected %0d", lat, LAT));

    // ---- SEL_AMP: amplitude loop through the plant ----
    use_plant = 1;
    psi = 1.0;
    cfg.mode = MODE_SEL_AMP;
    cfg.drive_amp = 17'd20000;
    cfg.amp_set   = AW_AMP'(60000);   // fb_amp units, about 0.5 * 1.6468 * |drive|
    cfg.kp = 16'd8192;
    cfg.ki = 16'd64;
    cfg.sel_ofs = PW'(40000);
    sel_ext = polar(40000.0, 0.3);
    repeat (12000) @(negedge clk);
    check(fb_amp > 59900 && fb_amp < 60100, $sformatf("sel_amp loop fb_amp %0d", fb_amp));
    check(pdiff(drv_ph(), 0.3 + 40000.0 / TURN) < 3e-4, "sel_amp phase");

    // ---- FEEDBACK: both loops ----
    cfg.mode = MODE_FEEDBACK;
    cfg.amp_set   = AW_AMP'(80000);
    cfg.phase_set = PW'(100000);
    cfg.drive_phase = '0;
    cfg.fb_ofs = PW'(5000);
    ref_phase  = PW'(20000);
    repeat (20000) @(negedge clk);
    check(fb_amp > 79900 && fb_amp < 80100, $sformatf("fb loop amp %0d", fb_amp));
    check(rabs(int'(phase_err)) < 50, $sformatf("fb loop phase err %0d", phase_err));
    check(rabs(int'(amp_err)) < 100, $sformatf("fb loop amp err %0d", amp_err));

    // loop off with RF off: integrators cleared, drive zero
    rf_on = 0;
    repeat (LAT + 4) @(negedge clk);
    check(drive.i == 0 && drive.q == 0, "rf gate in feedback");
    check(dut.int_a == 0 && dut.int_p == 0, "integrators cleared");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int rabs(input int x);
    return x < 0 ? -x : x;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
