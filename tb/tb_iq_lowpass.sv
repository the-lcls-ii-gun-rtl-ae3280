// tb_iq_lowpass: a bit-exact reference of y += (x - y) >> SHIFT checks every
// output for random input; a step must settle to within one LSB, and a tone
// at 2*IF (the mixer image) must come out at least 20 dB down.
//
// SHIFT = 4, the default. The filter is this design's own addition in front
// of the controller core.
module tb_iq_lowpass;
  import llrf_pkg::*;
  localparam int SHIFT = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst = 1;
  iq_t din, dout;

  iq_lowpass #(.SHIFT(SHIFT)) dut (.*);

  longint si = 0, sq = 0;
  initial begin
    real a, pk;
    din = '0;
    repeat (2) @(negedge clk);
    rst = 0;
    for (int n = 0; n < 1000; n++) begin
      din.i = 18'($urandom_range(0, 200000) - 100000);
      din.q = 18'($urandom_range(0, 200000) - 100000);
      si = si + ((longint'(din.i) * 16 - si) >>> SHIFT);
      sq = sq + ((longint'(din.q) * 16 - sq) >>> SHIFT);
      @(negedge clk);
      checks++;
      if (dout.i != 18'(si >>> SHIFT) || dout.q != 18'(sq >>> SHIFT)) begin
        failures++;
        if (failures < 10) $display("n=%0d got %0d exp %0d", n, dout.i, si >>> SHIFT);
      end
    end
    // step response
    din.i = 18'sd100000; din.q = -18'sd100000;
    repeat (400) @(negedge clk);
    checks++;
    if (dout.i < 99999 || dout.i > 100000 || dout.q > -99999 || dout.q < -100001) begin
      failures++; $display("step %0d %0d", dout.i, dout.q);
    end
    // image rejection: 2*IF = 41.43 MHz at 94.286 MHz
    pk = 0;
    for (int n = 0; n < 600; n++) begin
      a = 6.283185307179586 * 0.43939 * n;
      din.i = 18'($rtoi(100000.0 * $cos(a)));
      din.q = 18'($rtoi(100000.0 * $sin(a)));
      @(negedge clk);
      if (n > 200) begin
        if (dout.i > pk) pk = dout.i;
        if (-dout.i > pk) pk = -dout.i;
      end
    end
    checks++;
    if (pk > 10000.0) begin failures++; $display("image peak %f", pk); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
