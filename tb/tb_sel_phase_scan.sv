// tb_sel_phase_scan: the cavity amplitude is modelled as a function of the
// offset under test, peaking at a chosen phase; a scan of 16 pulses must
// step the offset once per pulse, find the peak offset, apply it after the
// scan, and give the host value back after host_load.
//
// One offset per RF pulse follows the paper's description of the scan;
// maximum amplitude as the criterion is this design's.
module tb_sel_phase_scan;
  import llrf_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst = 1, start = 0, pulse_fall = 0, host_load = 0;
  logic [PW-1:0] scan_start = 0, scan_step = 0, host_ofs = 18'h1234;
  logic [7:0] n_steps = 16;
  logic [AW_AMP-1:0] cav_amp = 0;
  logic [PW-1:0] sel_ofs, best_phase;
  logic [AW_AMP-1:0] best_amp;
  logic busy, done;

  sel_phase_scan dut (.*);

  localparam logic [PW-1:0] PEAK = 18'd100000;
  function automatic logic [AW_AMP-1:0] model(input logic [PW-1:0] ph);
    real d;
    d = real'($signed(ph - PEAK)) / 262144.0 * 6.283185307179586;
    return AW_AMP'($rtoi(50000.0 + 40000.0 * $cos(d)));
  endfunction

  initial begin
    int ndone = 0;
    logic [PW-1:0] exp_best;
    real best = -1;
    repeat (2) @(negedge clk);
    rst = 0;
    @(negedge clk);
    checks++;
    if (sel_ofs != host_ofs) begin failures++; $display("host offset not applied"); end
    scan_start = 18'd5000; scan_step = 18'd16384;   // 22.5 degree steps
    start = 1;
    @(negedge clk) start = 0;
    for (int k = 0; k < 16; k++) begin
      logic [PW-1:0] expo;
      expo = scan_start + PW'(k) * scan_step;
      checks++;
      if (!busy || sel_ofs != expo) begin failures++; $display("k=%0d ofs %0d exp %0d", k, sel_ofs, expo); end
      if (real'(model(expo)) > best) begin best = real'(model(expo)); exp_best = expo; end
      repeat (5) @(negedge clk);
      cav_amp = model(sel_ofs);
      pulse_fall = 1;
      @(negedge clk);
      pulse_fall = 0;
      ndone += done;
      cav_amp = 0;
      repeat (3) @(negedge clk);
      ndone += done;
    end
    checks++;
    if (busy || best_phase != exp_best || sel_ofs != exp_best) begin
      failures++; $display("best %0d applied %0d exp %0d", best_phase, sel_ofs, exp_best);
    end
    checks++;
    if (best_amp != model(exp_best)) begin failures++; $display("best amp"); end
    host_load = 1;
    @(negedge clk) host_load = 0;
    checks++;
    if (sel_ofs != host_ofs) begin failures++; $display("host_load ignored"); end
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
