// tb_rf_pulse_gen: rf_on is checked cycle by cycle against a counter model
// for a pulse train (period 50, width 20); rise and fall must come on the
// first and last RF-on clock of every pulse. CW mode must hold rf_on high and
// period 0 must switch it off.
//
// Pulse timing in clocks; CW and pulsed operation follow the paper, the
// counter scheme is this design's.
module tb_rf_pulse_gen;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst = 1, cw = 0;
  logic [31:0] period = 50, width = 20;
  logic rf_on, rise, fall;

  rf_pulse_gen dut (.*);

  initial begin
    int nr = 0, nf = 0, prev;
    repeat (2) @(negedge clk);
    rst = 0;
    @(negedge clk);   // first registered output
    for (int t = 0; t < 500; t++) begin
      checks++;
      if (rf_on != ((t % 50) < 20) || rise != (t % 50 == 0) || fall != (t % 50 == 19)) begin
        failures++;
        if (failures < 10) $display("t=%0d on=%0d rise=%0d fall=%0d", t, rf_on, rise, fall);
      end
      nr += rise; nf += fall;
      @(negedge clk);
    end
    checks++;
    if (nr != 10 || nf != 10) begin failures++; $display("edges %0d %0d", nr, nf); end
    cw = 1;
    repeat (3) @(negedge clk);
    for (int t = 0; t < 100; t++) begin
      checks++;
      if (!rf_on) failures++;
      @(negedge clk);
    end
    cw = 0; period = 0;
    repeat (2) @(negedge clk);
    checks++;
    if (rf_on) begin failures++; $display("period 0 still on"); end
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
