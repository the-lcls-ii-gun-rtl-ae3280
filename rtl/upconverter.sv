// upconverter: drive I/Q to the real IF stream of the DAC.
//
// Runs in the DAC clock domain. The drive from the controller core (ADC clock
// domain) is registered on dac_clk; the DAC clock is twice the ADC clock and
// comes from the same clock chip with aligned edges, so the drive register is
// taken across as a related-clock transfer with no synchronizer.
// An NCO at the up-conversion IF (phase_step = f_IF/f_DAC * 2^32) supplies
// cos/sin and
//     dac = (I*cos - Q*sin) / 2^(2*DW - 1 - DAC_W)
// saturated to DAC_W bits, so a full-scale drive on a full-scale harmonic
// gives a full-scale DAC word.
//
// Timing: dac lags drive by 3 DAC clocks. The NCO output is valid STAGES + 2
// clocks after rst falls; until then dac is 0.
//
// The paper gives the separate DAC clock domain and the up-conversion
// frequencies; the arithmetic is this design's choice.
module upconverter
  import llrf_pkg::*;
#(
  parameter int STAGES = 18
) (
  input  logic                    dac_clk,
  input  logic                    rst,
  input  iq_t                     drive,
  input  logic [PACC_W-1:0]       phase_step,
  output logic signed [DAC_W-1:0] dac
);
  localparam logic signed [DW-1:0] LO_AMP = DW'(79590);  // 0.6073 * (2^17 - 1)
  localparam int SH = 2 * DW - 1 - DAC_W;
  localparam logic signed [2*DW:0] DMAX = (2*DW+1)'((1 << (DAC_W - 1)) - 1);
  localparam logic signed [2*DW:0] DMIN = -DMAX - 1;

  localparam logic signed [2*DW-1:0] ZERO = '0;  // signed zero keeps ?: signed

  iq_t drive_d;
  logic signed [DW-1:0] lo_c, lo_s;
  logic lo_v;

  nco #(.PACC_W(PACC_W), .DW(DW), .PW(PW), .STAGES(STAGES)) u_nco (
    .clk(dac_clk), .rst(rst), .phase_step(phase_step), .phase_ofs('0),
    .amp(LO_AMP), .cos_out(lo_c), .sin_out(lo_s), .out_valid(lo_v));

  logic signed [2*DW-1:0] p_i, p_q;
  always_ff @(posedge dac_clk) begin
    logic signed [2*DW:0] s;
    if (rst) begin
      drive_d <= '0; p_i <= '0; p_q <= '0; dac <= '0;
    end else begin
      drive_d <= drive;
      p_i     <= lo_v ? drive_d.i * lo_c : ZERO;
      p_q     <= lo_v ? drive_d.q * lo_s : ZERO;
      s        = ((2*DW+1)'(p_i) - (2*DW+1)'(p_q)) >>> SH;
      if (s > DMAX)      dac <= DAC_W'(DMAX);
      else if (s < DMIN) dac <= DAC_W'(DMIN);
      else               dac <= DAC_W'(s);
    end
  end
endmodule
