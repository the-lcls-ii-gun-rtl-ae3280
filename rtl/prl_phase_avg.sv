// prl_phase_avg: averaged phase of the phase reference line (PRL).
//
// The PRL is the globally distributed phase reference. Its baseband I and Q
// are summed over 2^AVG_LOG2 consecutive samples (a boxcar that also removes
// the 2*IF mixer image), the sums are scaled back to DW bits and one CORDIC
// vectoring turns the mean vector into amplitude and phase. Averaging the
// vector rather than the phase avoids trouble at the +-180 degree wrap. The
// resulting phase is the drift-compensated reference that the feedback
// measures the cavity against.
//
// Timing: accepts a sample every clock; ref_valid pulses once per
// 2^AVG_LOG2 samples, STAGES + 2 clocks after the window closes, and
// ref_phase/ref_amp hold between pulses. ref_amp carries the CORDIC gain.
// rst clears the sums and the outputs.
//
// The paper states that the PRL phase is digitally averaged; the boxcar of
// I/Q and its length are this design's choices.
module prl_phase_avg
  import llrf_pkg::*;
#(
  parameter int AVG_LOG2 = 10,
  parameter int STAGES   = 18
) (
  input  logic              clk,
  input  logic              rst,
  input  iq_t               din,
  output logic [PW-1:0]     ref_phase,
  output logic [AW_AMP-1:0] ref_amp,
  output logic              ref_valid
);
  localparam int SW = DW + AVG_LOG2;
  logic signed [SW-1:0] sum_i, sum_q;
  logic [AVG_LOG2-1:0]  cnt;
  logic                 c_in_valid;
  logic signed [DW-1:0] c_x, c_y;

  always_ff @(posedge clk) begin
    c_in_valid <= 1'b0;
    if (rst) begin
      sum_i <= '0;
      sum_q <= '0;
      cnt   <= '0;
      c_x   <= '0;
      c_y   <= '0;
    end else begin
      cnt <= cnt + 1'b1;
      if (&cnt) begin
        c_x        <= DW'((sum_i + SW'(din.i)) >>> AVG_LOG2);
        c_y        <= DW'((sum_q + SW'(din.q)) >>> AVG_LOG2);
        c_in_valid <= 1'b1;
        sum_i      <= '0;
        sum_q      <= '0;
      end else begin
        sum_i <= sum_i + SW'(din.i);
        sum_q <= sum_q + SW'(din.q);
      end
    end
  end

  logic              c_out_valid;
  logic signed [DW+1:0] c_xo, c_yo;
  logic [PW-1:0]     c_zo;

  cordic #(.DW(DW), .PW(PW), .STAGES(STAGES)) u_cordic (
    .clk      (clk),
    .in_valid (c_in_valid),
    .vectoring(1'b1),
    .x_in     (c_x),
    .y_in     (c_y),
    .z_in     ('0),
    .out_valid(c_out_valid),
    .x_out    (c_xo),
    .y_out    (c_yo),
    .z_out    (c_zo)
  );

  always_ff @(posedge clk) begin
    ref_valid <= 1'b0;
    if (rst) begin
      ref_phase <= '0;
      ref_amp   <= '0;
    end else if (c_out_valid) begin
      ref_phase <= c_zo;
      ref_amp   <= AW_AMP'(c_xo);
      ref_valid <= 1'b1;
    end
  end

  logic unused_y;
  assign unused_y = ^c_yo;
endmodule
