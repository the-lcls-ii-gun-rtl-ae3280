// tb_detune_calc: the phase input rotates at a known rate (positive,
// negative, and across the +-180 degree wrap); each published detune must be
// rate * 2^(stride_log2 + AVG_LOG2) within rounding. A window in which
// enable drops must publish nothing.
//
// Rates are given in phase LSBs per clock; the phase-slope method and its
// units are this design's own, the paper only says detune is computed.
module tb_detune_calc;
  import llrf_pkg::*;
  localparam int AVG_LOG2 = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst = 1, enable = 0;
  logic [PW-1:0] phase = 0;
  logic [3:0] stride_log2 = 2;
  logic signed [31:0] detune;
  logic detune_valid;

  detune_calc #(.AVG_LOG2(AVG_LOG2)) dut (.*);

  real rate = 0.0, ph = 0.0;   // LSB per clock
  int nv = 0;
  always @(negedge clk) begin
    ph = ph + rate;
    phase <= PW'($rtoi(ph) & ((1 << PW) - 1));
  end

  always @(posedge clk) begin
    if (detune_valid) begin
      real e;
      nv++;
      e = rate * real'(1 << (stride_log2 + AVG_LOG2));
      checks++;
      if (real'(detune) - e > 2.0 || real'(detune) - e < -2.0) begin
        failures++; $display("detune %0d exp %f", detune, e);
      end
    end
  end

  task automatic run(input real r, input int s, input int cycles, input int exp_n);
    @(negedge clk) enable = 0; rate = r; stride_log2 = 4'(s);
    @(negedge clk) enable = 1;
    nv = 0;
    repeat (cycles) @(posedge clk);
    checks++;
    if (nv != exp_n) begin failures++; $display("rate %f: %0d results, exp %0d", r, nv, exp_n); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    run(37.0, 2, 64 * 5 + 10, 5);
    run(-1234.0, 0, 16 * 8 + 5, 8);
    run(20000.0, 2, 64 * 3 + 10, 3);    // wraps the phase many times
    // enable dropping mid-window: no result
    @(negedge clk) enable = 1; rate = 10.0; stride_log2 = 2; nv = 0;
    repeat (40) @(posedge clk);
    @(negedge clk) enable = 0;
    @(negedge clk) enable = 1;
    repeat (40) @(posedge clk);
    checks++;
    if (nv != 0) begin failures++; $display("result from a broken window"); end
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
