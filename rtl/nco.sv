// nco: numerically controlled oscillator, a phase accumulator followed by a
// CORDIC in rotation mode.
//
// Every clock the PACC_W-bit accumulator advances by phase_step, so the output
// frequency is f_clk * phase_step / 2^PACC_W; software rewrites phase_step to
// serve each IF of a setup (and to follow the cavity during warm-up). The top
// PW bits plus phase_ofs are rotated from (amp, 0), giving
//   cos_out = G*amp*cos(phi),  sin_out = G*amp*sin(phi),   G ~ 1.6468,
// so amp = 0.6073 * full-scale gives full-scale harmonics. The caller must keep
// G*amp below 2^(DW-1).
//
// Timing: one sample per clock, outputs lag the accumulator by STAGES + 1
// clocks. out_valid is low for that long after reset. rst clears the
// accumulator (phase 0).
//
// The paper gives the structure (phase accumulator coupled with a CORDIC);
// widths are this design's choice.
module nco #(
  parameter int PACC_W = 32,
  parameter int DW     = 18,
  parameter int PW     = 18,
  parameter int STAGES = 18
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic    [PACC_W-1:0] phase_step,
  input  logic        [PW-1:0] phase_ofs,
  input  logic signed [DW-1:0] amp,
  output logic signed [DW-1:0] cos_out,
  output logic signed [DW-1:0] sin_out,
  output logic                 out_valid
);
  logic [PACC_W-1:0] acc;
  logic              acc_valid;

  always_ff @(posedge clk) begin
    if (rst) begin
      acc       <= '0;
      acc_valid <= 1'b0;
    end else begin
      acc       <= acc + phase_step;
      acc_valid <= 1'b1;
    end
  end

  logic signed [DW+1:0] xo, yo;
  logic        [PW-1:0] zo;

  cordic #(.DW(DW), .PW(PW), .STAGES(STAGES)) u_cordic (
    .clk      (clk),
    .in_valid (acc_valid & ~rst),
    .vectoring(1'b0),
    .x_in     (amp),
    .y_in     ('0),
    .z_in     (acc[PACC_W-1 -: PW] + phase_ofs),
    .out_valid(out_valid),
    .x_out    (xo),
    .y_out    (yo),
    .z_out    (zo)
  );

  assign cos_out = DW'(xo);
  assign sin_out = DW'(yo);

  // zo (the residual angle) is not needed by an oscillator
  logic unused_z;
  assign unused_z = ^{zo, xo[DW+1:DW], yo[DW+1:DW]};
endmodule
