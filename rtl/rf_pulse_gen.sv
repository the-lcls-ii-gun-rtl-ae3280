// rf_pulse_gen: RF-on gate for CW and pulsed operation.
//
// In CW mode rf_on stays high. Otherwise a counter runs over period clocks
// and rf_on is high for the first width of them. rise pulses in the first
// clock of each RF pulse and fall in its last RF-on clock, so anything that
// samples the cavity with fall sees the end of the flat top. Leaving CW mode
// restarts the period.
//
// Interface: period, width in clocks (width <= period; period 0 stops the
// pulses). Registered outputs, one clock after the counter.
//
// The paper mentions the outbound RF pulse and a non-CW mode; the counter
// scheme is this design's own.
module rf_pulse_gen (
  input  logic        clk,
  input  logic        rst,
  input  logic        cw,
  input  logic [31:0] period,
  input  logic [31:0] width,
  output logic        rf_on,
  output logic        rise,
  output logic        fall
);
  logic [31:0] cnt;

  always_ff @(posedge clk) begin
    rise <= 1'b0;
    fall <= 1'b0;
    if (rst) begin
      cnt   <= '0;
      rf_on <= 1'b0;
    end else if (cw) begin
      cnt   <= '0;
      rise  <= !rf_on;
      rf_on <= 1'b1;
    end else if (period == 0 || width == 0) begin
      cnt   <= '0;
      fall  <= rf_on;
      rf_on <= 1'b0;
    end else begin
      cnt   <= (cnt >= period - 1) ? '0 : cnt + 1;
      rf_on <= cnt < width;
      rise  <= cnt == 0;
      fall  <= cnt == width - 1;
    end
  end
endmodule
