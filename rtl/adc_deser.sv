// adc_deser: deserializer for the ADC serial lanes.
//
// Each of the NCH ADC channels arrives on one serial lane, most significant
// bit first, one bit per ser_clk edge (single data rate); the ADC's frame
// signal is high during the first bit of every word. The bit clock is
// ADC_W times the ADC sample clock and is derived from the same reference,
// so both domains are phase-locked.
//
//   ser_clk domain: a shift register per lane; on the frame bit the finished
//                   word is taken, and HOLD_AT bit clocks later (mid-frame) it
//                   is copied to a holding register that then stays still for
//                   a whole frame.
//   adc_clk domain: adc_data registers the holding register. Because the
//                   holding register changes only mid-frame, the ADC-clock
//                   edge, aligned with the frame, always samples it stable.
//
// Latency: a word whose MSB is on the lanes at frame edge n appears on
// adc_data after the first adc_clk edge that follows mid-frame n+1.
//
// The paper states that the serial ADC stream is deserialized with the ADC
// reference clock; the lane format and the mid-frame hand-over are this
// design's choices.
module adc_deser #(
  parameter int NCH     = 8,
  parameter int ADC_W   = 16,
  parameter int HOLD_AT = ADC_W / 2
) (
  input  logic                    ser_clk,
  input  logic                    ser_rst,
  input  logic                    frame,
  input  logic [NCH-1:0]          sdata,
  input  logic                    adc_clk,
  output logic signed [ADC_W-1:0] adc_data [NCH]
);
  logic [ADC_W-1:0] sh   [NCH];
  logic [ADC_W-1:0] word [NCH];
  logic [ADC_W-1:0] hold [NCH];
  logic [$clog2(ADC_W+1)-1:0] bitcnt;

  always_ff @(posedge ser_clk) begin
    if (ser_rst) begin
      bitcnt <= '0;
      for (int c = 0; c < NCH; c++) begin
        sh[c]   <= '0;
        word[c] <= '0;
        hold[c] <= '0;
      end
    end else begin
      if (frame) bitcnt <= 1;
      else if (32'(bitcnt) < ADC_W) bitcnt <= bitcnt + 1'b1;
      for (int c = 0; c < NCH; c++) begin
        sh[c] <= {sh[c][ADC_W-2:0], sdata[c]};
        if (frame) word[c] <= sh[c];
        if (32'(bitcnt) == HOLD_AT) hold[c] <= word[c];
      end
    end
  end

  always_ff @(posedge adc_clk) begin
    for (int c = 0; c < NCH; c++) adc_data[c] <= hold[c];
  end
endmodule
