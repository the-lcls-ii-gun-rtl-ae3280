// adc_serializer: testbench model of the ADC serial output.
//
// Takes NCH parallel 16-bit words per frame and sends each on its own lane,
// MSB first, one bit per ser_clk edge, with frame high during the MSB. The
// words are sampled at the start of each frame (every ADC_W bit clocks).
//
// Interface: words is read in the first bit clock of each frame; frame and
// sdata change on ser_clk rising edges. The lane format (MSB first, frame on
// the MSB) is the one the deserializer assumes; the paper only says the ADC
// data arrive serially.
module adc_serializer #(
  parameter int NCH   = 8,
  parameter int ADC_W = 16
) (
  input  logic             ser_clk,
  input  logic [ADC_W-1:0] words [NCH],
  output logic             frame,
  output logic [NCH-1:0]   sdata
);
  int cnt = 0;
  logic [ADC_W-1:0] sh [NCH];

  initial begin
    frame = 0;
    sdata = '0;
    for (int c = 0; c < NCH; c++) sh[c] = '0;
  end

  always @(posedge ser_clk) begin
    if (cnt == 0) begin
      for (int c = 0; c < NCH; c++) begin
        sh[c]    <= words[c] << 1;
        sdata[c] <= words[c][ADC_W-1];
      end
      frame <= 1'b1;
    end else begin
      for (int c = 0; c < NCH; c++) begin
        sh[c]    <= sh[c] << 1;
        sdata[c] <= sh[c][ADC_W-1];
      end
      frame <= 1'b0;
    end
    cnt <= (cnt == ADC_W - 1) ? 0 : cnt + 1;
  end
endmodule
