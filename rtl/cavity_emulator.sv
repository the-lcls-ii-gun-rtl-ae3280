// cavity_emulator: behavioural (non-synthesizable) model of an RF cavity
// and its analog front end, for closed-loop simulation of the controller.
//
// Not hardware: it uses real arithmetic. It stands in for everything between
// the DAC and the ADCs (up-mixer, amplifier, cavity, down-mixers):
//   DAC domain: the real IF stream from the DAC is demodulated with an ideal
//     oscillator at the up-conversion IF (the same 32-bit frequency word the
//     controller uses) and low-pass filtered by three one-pole sections
//     (coefficient FWD_LP each) to remove the image at twice the IF:
//     forward wave F (complex).
//   ADC domain, every clock:
//     V <- V + BW * (F - V) + j * 2*pi*DETUNE * V      (first-order cavity)
//   and the probe V, the forward wave F and the reflected wave F - V are
//   re-modulated onto the down-conversion IF (again an ideal oscillator on
//   the controller's frequency word) and scaled to 16-bit ADC words.
// BW is the cavity half bandwidth in radians per ADC clock, DETUNE the
// resonance offset in turns per ADC clock: in self-excited operation the
// field rotates at DETUNE against the controller's NCO.
//
// The paper describes a Verilog, non-synthesizable cavity emulator tied to
// the controller's drive and cavity field in HDL simulation; these equations
// and scales are this model's own.
module cavity_emulator #(
  parameter logic [31:0] UP_STEP = 32'h2e8b7a78,
  parameter logic [31:0] DN_STEP = 32'h383dd182,
  parameter real         BW      = 0.02,
  parameter real         DETUNE  = 0.0,
  parameter real         SCALE   = 16000.0,
  parameter real         FWD_LP  = 0.3
) (
  input  logic               dac_clk,
  input  logic signed [15:0] dac,
  input  logic               adc_clk,
  output logic signed [15:0] cav,
  output logic signed [15:0] fwd,
  output logic signed [15:0] rev
);
  localparam real TWO_PI = 6.283185307179586;

  logic [31:0] th_up, th_dn;
  real fr, fi;   // forward wave
  real ar, ai;   // first two low-pass sections
  real br, bi;
  real vr, vi;   // cavity field

  initial begin
    th_up = '0; th_dn = '0;
    fr = 0.0; fi = 0.0; ar = 0.0; ai = 0.0; br = 0.0; bi = 0.0; vr = 0.0; vi = 0.0;
    cav = '0;
    fwd = '0;
    rev = '0;
  end

  function automatic logic signed [15:0] to_adc(input real x);
    real y;
    y = x * SCALE;
    if (y > 32767.0)  y = 32767.0;
    if (y < -32768.0) y = -32768.0;
    return 16'($rtoi(y));
  endfunction

  // State is updated with non-blocking assignments: the two clocks have
  // coincident edges, and the ADC process must see the forward wave of the
  // previous DAC clock, not a race.
  always @(posedge dac_clk) begin
    real a, x;
    a  = TWO_PI * real'(th_up) / 4294967296.0;
    x  = real'(dac) / 32768.0;
    // demodulate (x * 2 e^{-ja}) and low-pass
    ar <= ar + FWD_LP * (2.0 * x * $cos(a) - ar);
    ai <= ai + FWD_LP * (-2.0 * x * $sin(a) - ai);
    br <= br + FWD_LP * (ar - br);
    bi <= bi + FWD_LP * (ai - bi);
    fr <= fr + FWD_LP * (br - fr);
    fi <= fi + FWD_LP * (bi - fi);
    th_up <= th_up + UP_STEP;
  end

  always @(posedge adc_clk) begin
    real a, w, nr, ni;
    w  = TWO_PI * DETUNE;
    nr = vr + BW * (fr - vr) - w * vi;
    ni = vi + BW * (fi - vi) + w * vr;
    a  = TWO_PI * real'(th_dn) / 4294967296.0;
    vr    <= nr;
    vi    <= ni;
    cav   <= to_adc(nr * $cos(a) - ni * $sin(a));
    fwd   <= to_adc(fr * $cos(a) - fi * $sin(a));
    rev   <= to_adc((fr - nr) * $cos(a) - (fi - ni) * $sin(a));
    th_dn <= th_dn + DN_STEP;
  end
endmodule
