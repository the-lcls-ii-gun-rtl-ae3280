// iq_lowpass: one-pole IIR low-pass on an I/Q stream.
//
//   y[n+1] = y[n] + (x[n] - y[n]) / 2^SHIFT
//
// It removes most of the 2*IF mixer image from a probe before the SEL and
// feedback CORDICs see it (about -27 dB for a 20.7 MHz IF at 94.3 MHz with
// SHIFT = 4) at the cost of a time constant of 2^SHIFT clocks. The state keeps
// SHIFT extra fraction bits, so a constant input settles within one LSB.
// Registered: one clock of latency, unity DC gain. rst clears the state.
//
// The paper does not say how the feedback path filters the image; this
// filter is this design's choice.
module iq_lowpass
  import llrf_pkg::*;
#(
  parameter int SHIFT = 4
) (
  input  logic clk,
  input  logic rst,
  input  iq_t  din,
  output iq_t  dout
);
  localparam int SW = DW + SHIFT + 1;
  logic signed [SW-1:0] si, sq;   // state with SHIFT fraction bits

  always_ff @(posedge clk) begin
    if (rst) begin
      si <= '0;
      sq <= '0;
    end else begin
      si <= si + (((SW'(din.i) <<< SHIFT) - si) >>> SHIFT);
      sq <= sq + (((SW'(din.q) <<< SHIFT) - sq) >>> SHIFT);
    end
  end

  always_comb begin
    dout.i = DW'(si >>> SHIFT);
    dout.q = DW'(sq >>> SHIFT);
  end
endmodule
