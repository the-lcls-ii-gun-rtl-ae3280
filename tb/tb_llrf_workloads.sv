// tb_llrf_workloads: runs the controller end to end in each of the three
// frequency plans of the original system and records at the decimation its
// operator display shows (64).
//
//   plan        f_ADC : f_DAC   down word      up word
//   gun         1 : 2           0x383dd182     0x2e8b7a78
//   buncher     1 : 2           0x364d889c     0xc4d99809  (145 MHz, alias)
//   second gun  1 : 2           0xba315865     0x17458e43  (74.288 MHz, alias)
//
// Only the ratios of the clocks matter to the logic, so one time base serves
// all plans: ser_clk period 2, adc_clk 32, dac_clk 16. For each plan the
// frequency words are written over the bus and a cavity emulator built for
// that plan (same words) closes the loop; its probe feeds CAV1, its forward
// wave FWD1, and a reference tone at the plan's down IF feeds PRL7_1.
// Per plan: open-loop drive must fill the cavity to the same level in all
// plans (the words only move the IF), and amplitude and phase feedback must
// reach their set points. Then, in the gun plan, one record is taken at
// decimation 64 with the Always trigger and checked: every row read back
// must show the steady cavity and drive amplitudes (the CIC has unity gain).
// The top runs with its default parameters. Takes about 15 s.
module tb_llrf_workloads;
  import llrf_pkg::*;
  localparam real TP   = 6.283185307179586;
  localparam real TURN = 262144.0;
  localparam int  DEPTH = 2048;
  localparam logic [31:0] DN [3] = '{32'h383dd182, 32'h364d889c, 32'hba315865};
  localparam logic [31:0] UP [3] = '{32'h2e8b7a78, 32'hc4d99809, 32'h17458e43};

  logic ser_clk = 0, adc_clk = 0, dac_clk = 0;
  always #1  ser_clk = ~ser_clk;
  always #8  dac_clk = ~dac_clk;
  always #16 adc_clk = ~adc_clk;

  int checks = 0, failures = 0;

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

  // ---- one emulator per plan, all driven by the DAC ----
  logic signed [15:0] cav [3], fwd [3], rev [3];
  for (genvar k = 0; k < 3; k++) begin : g_plan
    cavity_emulator #(.UP_STEP(UP[k]), .DN_STEP(DN[k])) u_cav (
      .dac_clk(dac_clk), .dac(dac_data), .adc_clk(adc_clk),
      .cav(cav[k]), .fwd(fwd[k]), .rev(rev[k]));
  end

  int plan = 0;
  logic [31:0] th_prl = 0;
  logic [ADC_W-1:0] words [NCH];
  initial for (int c = 0; c < NCH; c++) words[c] = '0;
  always @(posedge adc_clk) begin
    for (int c = 0; c < NCH; c++) words[c] <= '0;
    words[CH_CAV1]   <= cav[plan];
    words[CH_FWD1]   <= fwd[plan];
    words[CH_REV1]   <= rev[plan];
    words[CH_PRL7_1] <= 16'($rtoi(12000.0 * $cos(TP * real'(th_prl) / 4294967296.0)));
    th_prl <= th_prl + DN[plan];
  end
  adc_serializer #(.NCH(NCH), .ADC_W(ADC_W)) u_ser (
    .ser_clk(ser_clk), .words(words), .frame(adc_frame), .sdata(adc_sdata));

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

  initial begin
    logic [31:0] d;
    real a0, ph0, open_amp [3], ci, cq, di, dq;
    int t;
    repeat (40) @(negedge adc_clk);
    rst = 0; ser_rst = 0; dac_rst = 0;
    wait_clk(50);
    wr(R_CW, 1);
    wr(R_KP, 8192);
    wr(R_KI, 64);
    for (int k = 0; k < 3; k++) begin
      plan = k;
      wr(R_MODE, 32'(MODE_OPEN));
      wr(R_DRV_AMP, 0);
      wr(R_DN_STEP, DN[k]);
      wr(R_UP_STEP, UP[k]);
      wait_clk(600);                      // previous plan's cavity decays
      wr(R_DRV_AMP, 60000);
      wait_clk(1500);
      rd_avg(R_CAV_AMP, 16, open_amp[k]);
      $display("plan %0d: open-loop cavity amplitude %f", k, open_amp[k]);
      check(open_amp[k] > 15000.0, $sformatf("plan %0d open loop fills the cavity", k));
      if (k > 0)
        check(rabs(open_amp[k] / open_amp[0] - 1.0) < 0.05, $sformatf("plan %0d same gain as the gun plan", k));
      wr(R_AMP_SET, 35000);
      wr(R_PH_SET, 50000);
      wr(R_MODE, 32'(MODE_FEEDBACK));
      wait_clk(20000);
      rd_avg(R_FB_AMP, 16, a0);
      rd_phase(R_FB_PH, 16, ph0);
      $display("plan %0d: feedback amplitude %f phase %f turn", k, a0, ph0);
      check(rabs(a0 - 35000.0) < 700.0, $sformatf("plan %0d feedback amplitude", k));
      check(rabs(wrapd(ph0 - 50000.0 / TURN)) < 0.005, $sformatf("plan %0d feedback phase", k));
    end

    // ---- decimation 64 record, gun plan, open loop CW ----
    plan = 0;
    wr(R_DN_STEP, DN[0]);
    wr(R_UP_STEP, UP[0]);
    wr(R_MODE, 32'(MODE_OPEN));
    wr(R_DRV_AMP, 60000);
    wr(R_CIC_DEC, 6);
    wait_clk(2000);
    rd_avg(R_CAV_AMP, 16, a0);
    wr(R_TRIG_SRC, 32'(TRIG_ALWAYS));
    wr(R_TRIG_MODE, 32'(TMODE_SINGLE));
    wr(R_POST, 16);
    wr(R_CMD, 32'h1 << CMD_ARM);
    t = 0;
    do begin wait_clk(1000); t += 1000; rd(R_STATUS, d); end
    while (wave_state_e'(d[1:0]) != WS_DONE && t < 200000);
    $display("decimation 64 record took %0d clocks", t);
    check(wave_state_e'(d[1:0]) == WS_DONE, "decimation 64 record done");
    check(t >= DEPTH * 64 - 1000 && t <= DEPTH * 64 + 2000, "decimation 64 record time");
    for (int r = 16; r < DEPTH; r += 97) begin
      rd(20'h80000 | 20'(r << 5) | 20'(int'(CH_CAV1) << 1), d);      ci = real'($signed(d));
      rd(20'h80000 | 20'(r << 5) | 20'(int'(CH_CAV1) << 1) | 1, d);  cq = real'($signed(d));
      rd(20'h80000 | 20'(r << 5) | 20'(NCH << 1), d);                di = real'($signed(d));
      rd(20'h80000 | 20'(r << 5) | 20'(NCH << 1) | 1, d);            dq = real'($signed(d));
      // the core reports |v| times the CORDIC gain
      check(rabs($sqrt(ci * ci + cq * cq) * 1.6467602581 / a0 - 1.0) < 0.02,
            $sformatf("row %0d cavity amplitude %f", r, $sqrt(ci * ci + cq * cq)));
      check(rabs($sqrt(di * di + dq * dq) / 60000.0 - 1.0) < 0.01,
            $sformatf("row %0d drive amplitude %f", r, $sqrt(di * di + dq * dq)));
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
