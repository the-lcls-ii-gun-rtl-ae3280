// tb_stream_select: eight distinct random streams; for every select value
// the output must equal the selected input one clock later.
//
// Registered select, one clock of latency (this design's choice).
module tb_stream_select;
  import llrf_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [2:0] sel = 0;
  iq_t din [8];
  iq_t dout;

  stream_select #(.N(8)) dut (.*);

  initial begin
    iq_t exp_v;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      sel = 3'(n % 8);
      for (int c = 0; c < 8; c++) din[c] = iq_t'({c[3:0], 32'($urandom)});
      exp_v = din[sel];
      @(negedge clk);
      checks++;
      if (dout != exp_v) begin failures++; $display("sel=%0d got %h exp %h", sel, dout, exp_v); end
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
