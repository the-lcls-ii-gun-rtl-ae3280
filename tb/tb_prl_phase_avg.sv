// tb_prl_phase_avg: a reference vector with a known phase plus a 2*IF image
// and noise is fed in; each averaged phase must be within a few LSBs of the
// reference phase, the amplitude must match G*|v|, and ref_valid must come
// once per 2^AVG_LOG2 samples. The phase is then stepped to check tracking.
//
// AVG_LOG2 is reduced to keep the run short. The paper says only that the
// reference-line phase is averaged; the boxcar is this design's.
module tb_prl_phase_avg;
  import llrf_pkg::*;
  localparam int AVG_LOG2 = 6;
  localparam real TP = 6.283185307179586, K = 1.6467602581;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst = 1;
  iq_t din;
  logic [PW-1:0] ref_phase;
  logic [AW_AMP-1:0] ref_amp;
  logic ref_valid;

  prl_phase_avg #(.AVG_LOG2(AVG_LOG2)) dut (.*);

  real phdeg = -135.2;  // a PRL phase like the one on the operator display
  int n = 0, nvalid = 0, last_v = -1;
  always @(negedge clk) begin
    real a, img;
    a   = phdeg / 360.0 * TP;
    img = TP * 0.4394 * n;   // image at 2*IF: 64 samples hold ~28.1 turns
    din.i <= 18'($rtoi(60000.0 * $cos(a) + 20000.0 * $cos(img)) + $urandom_range(0, 40) - 20);
    din.q <= 18'($rtoi(60000.0 * $sin(a) - 20000.0 * $sin(img)) + $urandom_range(0, 40) - 20);
    n <= n + 1;
  end

  function automatic real pd(input real a, input real b);
    real d = a - b;
    while (d > 180.0) d -= 360.0;
    while (d < -180.0) d += 360.0;
    return d;
  endfunction

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) begin
    if (ref_valid && !rst) begin
      real got;
      got = real'(ref_phase) / 262144.0 * 360.0;
      nvalid++;
      if (last_v >= 0) begin
        checks++;
        if (cyc - last_v != (1 << AVG_LOG2)) begin failures++; $display("period %0d", cyc - last_v); end
      end
      last_v = cyc;
      if (nvalid > 2) begin
        checks++;
        if (pd(got, phdeg) > 0.5 || pd(got, phdeg) < -0.5) begin failures++; $display("phase %f exp %f", got, phdeg); end
        checks++;
        if (real'(ref_amp) < K * 60000.0 * 0.98 || real'(ref_amp) > K * 60000.0 * 1.02) begin failures++; $display("amp %0d", ref_amp); end
      end
    end
  end

  initial begin
    din = '0;
    repeat (25) @(posedge clk);
    rst = 0;
    repeat (1000) @(posedge clk);
    phdeg = 100.0;
    nvalid = 0;
    repeat (1000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
