// stream_select: software-controlled channel selector.
//
// Routes one of N baseband I/Q streams to a consumer; the controller has
// three of them (SEL probe, feedback probe, phase reference). Registered, one
// clock of latency. A select value of N or more gives channel 0.
//
// The paper describes software-controllable demultiplexers that pick ADC
// streams for the sub-components; the registered N:1 form is this design's.
module stream_select
  import llrf_pkg::*;
#(
  parameter int N = 8
) (
  input  logic                 clk,
  input  logic [$clog2(N)-1:0] sel,
  input  iq_t                  din [N],
  output iq_t                  dout
);
  always_ff @(posedge clk) begin
    if (32'(sel) < N) dout <= din[sel];
    else              dout <= din[0];
  end
endmodule
