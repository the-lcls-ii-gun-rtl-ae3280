// tb_upconverter: a constant drive (I, Q) must produce
// dac[n] = |d|*cos(theta_n + arg d) scaled to 16 bits, with theta_n the
// up-conversion NCO phase (step per DAC clock). Each sample after the NCO
// has started is compared with that formula, for two drive vectors and
// two frequency words, one of them above Nyquist (an alias).
//
// One sample per DAC clock; latency 3 DAC clocks after the NCO. The
// frequency words are the gun's and the buncher's from the frequency table.
module tb_upconverter;
  import llrf_pkg::*;
  localparam real TP = 6.283185307179586;
  logic dac_clk = 0;
  always #5 dac_clk = ~dac_clk;
  int checks = 0, failures = 0;

  logic rst = 1;
  iq_t drive;
  logic [31:0] phase_step = UP_STEP_GUN;
  logic signed [15:0] dac;

  upconverter dut (.*);

  // reference phase accumulator: NCO phase of the sample leaving at each clock
  logic [31:0] acc = 0;
  int n = 0;
  real pk;
  always @(posedge dac_clk) begin
    if (rst) begin acc <= 0; n <= 0; end
    else begin acc <= acc + phase_step; n <= n + 1; end
  end

  function automatic real rabs(input real v);
    return v < 0.0 ? -v : v;
  endfunction

  task automatic run(input int di, input int dq, input logic [31:0] step);
    @(negedge dac_clk) rst = 1; drive.i = 18'(di); drive.q = 18'(dq); phase_step = step;
    repeat (2) @(negedge dac_clk);
    rst = 0;
    repeat (30) @(negedge dac_clk);
    for (int k = 0; k < 300; k++) begin
      real th, e;
      logic [31:0] a;
      // dac at this point was formed from the NCO sample of clock n - 21
      a  = 32'(n - 21) * step;
      th = TP * real'(a[31:14]) / 262144.0;
      e  = (real'(di) * $cos(th) - real'(dq) * $sin(th)) * 1.6467602581 * 79590.0 / 524288.0;
      checks++;
      if (rabs(e - real'(dac)) > 3.0) begin
        failures++;
        if (failures < 10) $display("n=%0d got %0d exp %f", n, dac, e);
      end
      @(negedge dac_clk);
    end
  endtask

  initial begin
    drive = '0;
    run(100000, 0, UP_STEP_GUN);
    run(-30000, 90000, UP_STEP_GUN);
    run(60000, -60000, 32'hc4d99809);   // buncher: 145 MHz at 188.57 MHz
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge dac_clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
