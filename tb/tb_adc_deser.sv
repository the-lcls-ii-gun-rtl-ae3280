// tb_adc_deser: random words are serialized onto eight lanes (MSB first,
// frame on the MSB, 16 bit clocks per ADC clock, edges aligned) and the
// deserializer's parallel output is compared with them, word for word, at
// the expected latency (4 ADC clocks from the serializer input, of which
// one is the serializer's own); the sequence must come out in order with none
// dropped or repeated.
//
// Clocks: ser_clk period 2, adc_clk period 32. The serial format is this
// design's assumption; the paper gives only 16-bit serial ADC samples.
module tb_adc_deser;
  localparam int NCH = 8, ADC_W = 16;
  logic ser_clk = 0, adc_clk = 0;
  always #1 ser_clk = ~ser_clk;
  always #16 adc_clk = ~adc_clk;
  int checks = 0, failures = 0;

  logic ser_rst = 1;
  logic [ADC_W-1:0] words [NCH];
  logic frame;
  logic [NCH-1:0] sdata;
  logic signed [ADC_W-1:0] adc_data [NCH];

  adc_serializer #(.NCH(NCH), .ADC_W(ADC_W)) u_ser (.ser_clk, .words, .frame, .sdata);
  adc_deser #(.NCH(NCH), .ADC_W(ADC_W)) dut (.ser_clk, .ser_rst, .frame, .sdata, .adc_clk, .adc_data);

  // new words each ADC clock; remember what was sent
  logic [ADC_W-1:0] sent [$][NCH];
  initial for (int c = 0; c < NCH; c++) words[c] = '0;
  always @(posedge adc_clk) begin
    logic [ADC_W-1:0] w [NCH];
    for (int c = 0; c < NCH; c++) w[c] = 16'($urandom);
    words <= w;
    sent.push_back(w);
  end

  int n = 0, first = -1;
  initial begin
    repeat (4) @(posedge adc_clk);
    ser_rst = 0;
    repeat (6) @(posedge adc_clk);
    // find the alignment: which sent word is on the output now
    @(negedge adc_clk);
    for (int k = 0; k < sent.size(); k++)
      if (sent[k][0] == adc_data[0] && sent[k][1] == adc_data[1]) first = k;
    checks++;
    if (first < 0) begin failures++; $display("no alignment found"); end
    else $display("latency: %0d ADC clocks", sent.size() - first);
    checks++;
    if (sent.size() - first != 4) begin failures++; $display("unexpected latency"); end
    for (int m = 1; m < 300; m++) begin
      @(negedge adc_clk);
      for (int c = 0; c < NCH; c++) begin
        checks++;
        if (first < 0 || adc_data[c] != $signed(sent[first + m][c])) begin
          failures++;
          if (failures < 10) $display("m=%0d c=%0d got %h exp %h", m, c, adc_data[c], sent[first + m][c]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge adc_clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
