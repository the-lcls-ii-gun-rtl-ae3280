// detune_calc: cavity detune from the slope of the probe phase.
//
// The probe phase is measured against the down-conversion NCO. When the
// cavity rings at a frequency that differs from the NCO by df (in SEL it
// rings at its own resonance), the phase advances by df/f_clk of a turn per
// clock. The block samples the phase every 2^stride_log2 clocks while
// enable is high, takes the wrapped difference to the previous sample
// (signed, so steps below half a turn are unambiguous), and sums 2^AVG_LOG2
// differences. The result
//     detune = sum of phase steps   [phase LSBs over 2^(stride_log2+AVG_LOG2) clocks]
//     df     = detune * f_clk / 2^(PW + stride_log2 + AVG_LOG2)
// is published to software, which trims the NCO frequency words with it.
// A window in which enable drops is discarded and restarted.
//
// Timing: detune_valid pulses once per completed window and detune holds
// between pulses. rst clears everything.
//
// The paper says the firmware computes the relative detune and software
// uses it in a slow loop on the phase accumulators; the phase-slope method is
// this design's choice.
module detune_calc
  import llrf_pkg::*;
#(
  parameter int AVG_LOG2 = 8
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                enable,
  input  logic [PW-1:0]       phase,
  input  logic [3:0]          stride_log2,
  output logic signed [31:0]  detune,
  output logic                detune_valid
);
  logic [15:0]        scnt;
  logic [AVG_LOG2:0]  n;       // differences summed so far
  logic               have_prev;
  logic [PW-1:0]      prev;
  logic signed [31:0] acc;

  always_ff @(posedge clk) begin
    logic signed [PW-1:0] d;
    detune_valid <= 1'b0;
    if (rst || !enable) begin
      scnt <= '0; n <= '0; have_prev <= 1'b0; prev <= '0; acc <= '0;
      if (rst) detune <= '0;
    end else begin
      if (scnt >= (16'(1) << stride_log2) - 1'b1) begin
        scnt <= '0;
        prev <= phase;
        have_prev <= 1'b1;
        if (have_prev) begin
          d = $signed(phase - prev);
          if (32'(n) == (1 << AVG_LOG2) - 1) begin
            detune       <= acc + 32'(d);
            detune_valid <= 1'b1;
            acc          <= '0;
            n            <= '0;
          end else begin
            acc <= acc + 32'(d);
            n   <= n + 1'b1;
          end
        end
      end else begin
        scnt <= scnt + 1'b1;
      end
    end
  end
endmodule
