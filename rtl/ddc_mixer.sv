// ddc_mixer: digital down-conversion of one ADC stream to baseband I/Q.
//
// The 16-bit ADC sample x is multiplied by the NCO harmonics:
//   I = x * cos,   Q = -x * sin
// and the product is scaled back to DW bits (bits [ADC_W+DW-2 -: DW]), so a
// full-scale sample times a full-scale harmonic gives a full-scale I/Q.
// The result still carries the 2*IF image; the CIC filters or the feedback
// low-pass remove it.
//
// Timing: registered, one clock from adc/lo_* to bb.
//
// The paper describes digital mixers bringing the ADC streams to baseband;
// the sign convention and scaling are this design's choice.
module ddc_mixer #(
  parameter int AW = 16,
  parameter int W  = 18
) (
  input  logic                 clk,
  input  logic signed [AW-1:0] adc,
  input  logic signed  [W-1:0] lo_cos,
  input  logic signed  [W-1:0] lo_sin,
  output logic signed  [W-1:0] bb_i,
  output logic signed  [W-1:0] bb_q
);
  logic signed [AW+W-1:0] pi, pq;

  always_comb begin
    pi = adc * lo_cos;
    pq = -(adc * lo_sin);
  end

  always_ff @(posedge clk) begin
    bb_i <= pi[AW+W-2 -: W];
    bb_q <= pq[AW+W-2 -: W];
  end

  logic unused;
  assign unused = pi[AW+W-1] ^ pq[AW+W-1] ^ (|pi[AW-2:0]) ^ (|pq[AW-2:0]);
endmodule
