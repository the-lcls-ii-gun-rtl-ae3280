// tb_cavity_emulator: drives two emulator instances (on resonance and
// detuned) with a constant-amplitude DAC tone at the up-conversion IF and
// checks:
//   - the forward wave settles to the tone's amplitude,
//   - the tuned cavity follows the first-order step response 1-(1-BW)^n,
//   - the detuned cavity settles to BW/(BW - j 2 pi DETUNE) times the forward
//     wave (amplitude and phase),
//   - the ADC words carry the field at the scale SCALE (peak of the IF signal).
//
// Clocks: dac_clk period 8, adc_clk period 16 (f_DAC = 2 f_ADC as in the
// paper's frequency table). The expected responses are worked out here from
// the first-order cavity equation the model uses, which is its own choice.
module tb_cavity_emulator;
  import llrf_pkg::*;
  localparam real TP  = 6.283185307179586;
  localparam real BW  = 0.02;
  localparam real DET = 0.002;
  logic dac_clk = 0, adc_clk = 0;
  always #4 dac_clk = ~dac_clk;
  always #8 adc_clk = ~adc_clk;
  int checks = 0, failures = 0;

  logic signed [15:0] dac = 0;
  logic signed [15:0] cav0, fwd0, rev0, cav1, fwd1, rev1;

  cavity_emulator #(.BW(BW)) u_tuned (
    .dac_clk(dac_clk), .dac(dac), .adc_clk(adc_clk), .cav(cav0), .fwd(fwd0), .rev(rev0));
  cavity_emulator #(.BW(BW), .DETUNE(DET)) u_detuned (
    .dac_clk(dac_clk), .dac(dac), .adc_clk(adc_clk), .cav(cav1), .fwd(fwd1), .rev(rev1));

  logic [31:0] th = 0;
  bit on = 0;
  always @(posedge dac_clk) begin
    dac <= on ? 16'($rtoi(16000.0 * $cos(TP * real'(th) / 4294967296.0))) : 16'sd0;
    th  <= th + UP_STEP_GUN;
  end

  function automatic real rabs(input real v);
    return v < 0.0 ? -v : v;
  endfunction

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    real f, v, e, ph, g, pk;
    repeat (10) @(posedge adc_clk);
    @(posedge adc_clk) on = 1;
    // step response of the tuned cavity, sampled at several times
    for (int n = 1; n <= 300; n++) begin
      @(posedge adc_clk);
      #1;
      if (n % 30 == 0) begin
        f = $sqrt(u_tuned.fr ** 2 + u_tuned.fi ** 2);
        v = $sqrt(u_tuned.vr ** 2 + u_tuned.vi ** 2);
        e = f * (1.0 - (1.0 - BW) ** real'(n));
        check(rabs(f - 16000.0 / 32768.0) < 0.03, $sformatf("forward amplitude %f", f));
        check(rabs(v - e) < 0.03, $sformatf("step n=%0d got %f expected %f", n, v, e));
      end
    end
    repeat (2000) @(posedge adc_clk);
    #1;
    // detuned steady state
    f  = $sqrt(u_detuned.fr ** 2 + u_detuned.fi ** 2);
    v  = $sqrt(u_detuned.vr ** 2 + u_detuned.vi ** 2);
    g  = BW / $sqrt(BW * BW + (TP * DET) ** 2);
    ph = $atan2(u_detuned.vi, u_detuned.vr) - $atan2(u_detuned.fi, u_detuned.fr);
    check(rabs(v / f - g) < 0.02, $sformatf("detuned gain %f expected %f", v / f, g));
    check(rabs(ph - $atan2(TP * DET, BW)) < 0.05, $sformatf("detuned phase %f", ph));
    // ADC scale: peak of the cavity IF signal
    pk = 0.0;
    for (int n = 0; n < 200; n++) begin
      @(posedge adc_clk);
      if (rabs(real'(cav0)) > pk) pk = rabs(real'(cav0));
    end
    v = $sqrt(u_tuned.vr ** 2 + u_tuned.vi ** 2) * 16000.0;
    check(pk > 0.97 * v && pk < 1.01 * v, $sformatf("adc peak %f vs %f", pk, v));
    // reflected wave of a tuned, filled cavity is small
    pk = 0.0;
    for (int n = 0; n < 200; n++) begin
      @(posedge adc_clk);
      if (rabs(real'(rev0)) > pk) pk = rabs(real'(rev0));
    end
    check(pk < 0.05 * v, $sformatf("reflected %f", pk));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge adc_clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
