// tb_ddc_mixer: random ADC samples and harmonics are multiplied; each output
// must equal x*cos and -x*sin, scaled by 2^-15 as the bit selection [32:15]
// of the 34-bit product, one clock later.
//
// The mixer is one of the paper's digital mixers; the scaling is this
// design's choice and is checked bit-exactly.
module tb_ddc_mixer;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic signed [15:0] adc = 0;
  logic signed [17:0] lo_cos = 0, lo_sin = 0;
  logic signed [17:0] bb_i, bb_q;

  ddc_mixer dut (.*);

  initial begin
    longint ei, eq;
    for (int n = 0; n < 1000; n++) begin
      @(negedge clk);
      adc    = 16'($urandom);
      lo_cos = 18'($urandom_range(0, 262142) - 131071);
      lo_sin = 18'($urandom_range(0, 262142) - 131071);
      ei = (longint'(adc) * longint'(lo_cos)) >>> 15;
      eq = (-(longint'(adc) * longint'(lo_sin))) >>> 15;
      @(negedge clk);
      checks++;
      if (bb_i != 18'(ei) || bb_q != 18'(eq)) begin
        failures++;
        if (failures < 10) $display("x=%0d c=%0d s=%0d got %0d %0d exp %0d %0d", adc, lo_cos, lo_sin, bb_i, bb_q, ei, eq);
      end
    end
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
