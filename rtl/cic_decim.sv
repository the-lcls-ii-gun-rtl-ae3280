// cic_decim: second-order CIC decimator for one I/Q stream.
//
// Two integrators run at the input rate, a decimation counter picks one
// sample in 2^dec_log2, and two combs run at the output rate. The DC gain of
// a second-order CIC is R^2 = 2^(2*dec_log2), removed by an arithmetic shift,
// so the output has unity DC gain and the same width as the input. The
// integrators are W + 2*MAX_DEC_LOG2 bits wide and may wrap: the combs undo
// the wrap (modular arithmetic).
//
// The recorder takes its waveforms from these filters; the operator display
// shows a decimation of 64 (dec_log2 = 6).
//
// Interface: din/in_valid in, dout/out_valid out; out_valid pulses once per
// 2^dec_log2 accepted inputs, registered. Changing dec_log2 takes effect at
// once; the first outputs after a change are transients.
//
// The paper describes the mixers driving a CIC filter that feeds the waveform
// data; its order, ratio range and power-of-two ratio are this design's choice.
module cic_decim #(
  parameter int W            = 18,
  parameter int MAX_DEC_LOG2 = 12
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                in_valid,
  input  logic signed [W-1:0] din_i,
  input  logic signed [W-1:0] din_q,
  input  logic          [3:0] dec_log2,
  output logic                out_valid,
  output logic signed [W-1:0] dout_i,
  output logic signed [W-1:0] dout_q
);
  localparam int AW = W + 2 * MAX_DEC_LOG2;

  logic signed [AW-1:0] i1_i, i2_i, i1_q, i2_q;   // integrators
  logic signed [AW-1:0] d1_i, d2_i, d1_q, d2_q;   // comb delays
  logic        [MAX_DEC_LOG2-1:0] cnt;
  logic        [3:0] dl;

  always_comb dl = (dec_log2 > 4'(MAX_DEC_LOG2)) ? 4'(MAX_DEC_LOG2) : dec_log2;

  always_ff @(posedge clk) begin
    logic signed [AW-1:0] c1_i, c2_i, c1_q, c2_q;
    out_valid <= 1'b0;
    if (rst) begin
      {i1_i, i2_i, i1_q, i2_q} <= '0;
      {d1_i, d2_i, d1_q, d2_q} <= '0;
      cnt    <= '0;
      dout_i <= '0;
      dout_q <= '0;
    end else if (in_valid) begin
      i1_i <= i1_i + AW'(din_i);
      i2_i <= i2_i + i1_i;
      i1_q <= i1_q + AW'(din_q);
      i2_q <= i2_q + i1_q;
      if (cnt >= (MAX_DEC_LOG2'(1) << dl) - 1'b1) begin
        cnt  <= '0;
        c1_i = i2_i - d1_i;
        c2_i = c1_i - d2_i;
        c1_q = i2_q - d1_q;
        c2_q = c1_q - d2_q;
        d1_i <= i2_i;
        d2_i <= c1_i;
        d1_q <= i2_q;
        d2_q <= c1_q;
        dout_i    <= W'(c2_i >>> (2 * dl));
        dout_q    <= W'(c2_q >>> (2 * dl));
        out_valid <= 1'b1;
      end else begin
        cnt <= cnt + 1'b1;
      end
    end
  end
endmodule
