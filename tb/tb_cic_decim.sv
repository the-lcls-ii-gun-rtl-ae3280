// tb_cic_decim: a reference second-order CIC written as plain sums checks
// every output of the filter for random input at decimations 1, 8 and 64;
// the number of outputs per 2^dec_log2 inputs and the unity DC gain (constant
// input) are checked as well.
//
// One input per clock; the decimations include 64, the value the operator
// display of the original system shows. The filter order is this design's.
module tb_cic_decim;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst = 1, in_valid = 0;
  logic signed [17:0] din_i = 0, din_q = 0;
  logic [3:0] dec_log2 = 0;
  logic out_valid;
  logic signed [17:0] dout_i, dout_q;

  cic_decim dut (.*);

  // reference: output k = sum_{j} w_j x[kR - j], triangular weights, / R^2
  longint xi[$], xq[$];
  int nin = 0, nout = 0;
  bit const_mode = 0;

  task automatic run(input int dl, input int nsamp, input bit cst);
    int r = 1 << dl;
    @(negedge clk) rst = 1; dec_log2 = 4'(dl); in_valid = 0;
    @(negedge clk) rst = 0;
    xi.delete(); xq.delete(); nin = 0; nout = 0;
    for (int n = 0; n < nsamp; n++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      din_i = cst ? 18'sd50000 : 18'($urandom_range(0, 200000) - 100000);
      din_q = cst ? -18'sd70000 : 18'($urandom_range(0, 200000) - 100000);
      if (in_valid) begin xi.push_back(din_i); xq.push_back(din_q); end
    end
    @(negedge clk) in_valid = 0;
    @(negedge clk);
    checks++;
    if (nout != xi.size() / r) begin failures++; $display("dl=%0d outputs %0d exp %0d", dl, nout, xi.size() / r); end
  endtask

  // the k-th output (k from 1) covers inputs up to index k*R-3
  always @(posedge clk) begin
    if (out_valid) begin
      int r, last;
      longint si, sq;
      r = 1 << dec_log2;
      nout++;
      last = nout * r - 3;   // the two integrator registers delay the input by 2
      si = 0; sq = 0;
      for (int j = 0; j < 2 * r - 1; j++) begin
        int w;
        w = (j < r) ? j + 1 : 2 * r - 1 - j;
        if (last - j >= 0) begin si += w * xi[last - j]; sq += w * xq[last - j]; end
      end
      si = si >>> (2 * dec_log2);
      sq = sq >>> (2 * dec_log2);
      checks++;
      if (dout_i != 18'(si) || dout_q != 18'(sq)) begin
        failures++;
        if (failures < 10) $display("dl=%0d k=%0d got %0d %0d exp %0d %0d", dec_log2, nout, dout_i, dout_q, si, sq);
      end
    end
  end

  initial begin
    run(0, 300, 0);
    run(3, 2000, 0);
    run(6, 6000, 0);
    run(6, 3000, 1);
    checks++;
    if (dout_i != 18'sd50000 || dout_q != -18'sd70000) begin failures++; $display("DC gain %0d %0d", dout_i, dout_q); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
