// tb_nco: checks the oscillator's frequency and waveform.
// With a known phase_step the accumulator phase after n clocks is n*step;
// every output sample is compared with G*amp*cos/sin of that phase (G the
// CORDIC gain) and the output latency is checked. A second frequency word and
// a phase offset are then loaded and checked the same way.
//
// The phase-accumulator-plus-CORDIC structure is the paper's; widths and
// the gun frequency words (from the frequency table) are checked here.
module tb_nco;
  import llrf_pkg::*;
  localparam real K = 1.6467602581, TP = 6.283185307179586;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst = 1;
  logic [31:0] phase_step = 32'h383dd182;
  logic [PW-1:0] phase_ofs = '0;
  logic signed [DW-1:0] amp = 18'sd79590;
  logic signed [DW-1:0] cos_out, sin_out;
  logic out_valid;

  nco dut (.*);

  function automatic real rabs(input real v);
    return v < 0.0 ? -v : v;
  endfunction

  // reference accumulator, delayed by the CORDIC latency
  logic [31:0] racc;
  logic [31:0] hist [$];
  int vcount = 0;
  always @(posedge clk) begin
    if (rst) begin
      racc <= '0;
      hist.delete();
    end else begin
      hist.push_back(racc + {phase_ofs, 14'd0});
      racc <= racc + phase_step;
    end
  end

  always @(posedge clk) begin
    if (!rst && out_valid) begin
      real a, ec, es;
      logic [31:0] ph;
      ph = hist[hist.size() - 1 - 18];
      a  = TP * real'(ph[31:14]) / 262144.0;
      ec = K * 79590.0 * $cos(a);
      es = K * 79590.0 * $sin(a);
      checks++;
      vcount++;
      if (rabs(ec - cos_out) > 12 || rabs(es - sin_out) > 12) begin
        failures++;
        if (failures < 10) $display("ph=%h got %0d %0d exp %f %f", ph, cos_out, sin_out, ec, es);
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    // first valid output must come STAGES + 2 clocks after reset release
    repeat (19) @(posedge clk);
    #1 if (out_valid) begin failures++; $display("valid too early"); end
    @(posedge clk); #1 checks++;
    if (!out_valid) begin failures++; $display("valid too late"); end
    repeat (500) @(posedge clk);
    @(negedge clk) begin phase_step = 32'h0400_0000; phase_ofs = deg2ph(90.0); end
    repeat (500) @(posedge clk);
    if (vcount < 900) begin failures++; $display("too few samples"); end
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
