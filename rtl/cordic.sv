// cordic: pipelined CORDIC, rotation or vectoring chosen per sample.
//
// The controller uses one CORDIC kind for three jobs: generating cos/sin
// harmonics from a phase accumulator (rotation), turning baseband I/Q into
// amplitude and phase (vectoring) and turning a polar drive back into I/Q
// (rotation). Phase is a PW-bit word, 2^PW being one full turn.
//
// Rotation   (vectoring = 0): (x, y) is rotated by z; z goes to 0.
// Vectoring  (vectoring = 1): (x, y) is rotated onto the +x axis; x_out is the
//            magnitude and z_out = z_in + atan2(y, x).
// A first stage folds the input into the right half plane by a 180-degree
// turn; STAGES micro-rotations follow. The CORDIC gain (about 1.6468) is
// left in x_out/y_out: callers pre-scale by 0.6073 where they need unity gain.
// x/y grow by two bits so that neither the gain nor a 45-degree vector can
// overflow.
//
// Timing: fully pipelined, one sample per clock, out_valid follows in_valid
// by STAGES + 1 clocks. No reset: valid is cleared by the pipeline itself
// once in_valid has been low for STAGES + 1 clocks.
//
// The paper names the CORDIC module that drives its mixers; widths, stage
// count and the two-mode form are this design's choices.
module cordic #(
  parameter int DW     = 18,
  parameter int PW     = 18,
  parameter int STAGES = 18
) (
  input  logic                 clk,
  input  logic                 in_valid,
  input  logic                 vectoring,
  input  logic signed [DW-1:0] x_in,
  input  logic signed [DW-1:0] y_in,
  input  logic        [PW-1:0] z_in,
  output logic                 out_valid,
  output logic signed [DW+1:0] x_out,
  output logic signed [DW+1:0] y_out,
  output logic        [PW-1:0] z_out
);
  localparam int XW = DW + 2;

  // atan(2^-i) in phase units
  function automatic logic [PW-1:0] atan_ph(input int i);
    real a;
    a = $atan(1.0 / real'(2.0 ** i)) / (2.0 * 3.14159265358979323846) * real'(2.0 ** PW);
    return PW'($rtoi(a + 0.5));
  endfunction

  logic signed [XW-1:0] xs [STAGES+1];
  logic signed [XW-1:0] ys [STAGES+1];
  logic        [PW-1:0] zs [STAGES+1];
  logic                 vs [STAGES+1];
  logic                 ms [STAGES+1];

  // Stage 0: fold into the right half plane.
  always_ff @(posedge clk) begin
    logic signed [XW-1:0] xe, ye;
    logic                 flip;
    xe = XW'(x_in);
    ye = XW'(y_in);
    if (vectoring) flip = x_in[DW-1];
    else           flip = (z_in[PW-1] != z_in[PW-2]);
    vs[0] <= in_valid;
    ms[0] <= vectoring;
    xs[0] <= flip ? -xe : xe;
    ys[0] <= flip ? -ye : ye;
    zs[0] <= flip ? z_in + PW'(1 << (PW - 1)) : z_in;
  end

  for (genvar s = 0; s < STAGES; s++) begin : g_stage
    localparam logic [PW-1:0] ANG = atan_ph(s);
    always_ff @(posedge clk) begin
      logic up;   // rotate counter-clockwise
      if (ms[s]) up = ys[s][XW-1];   // vectoring: y < 0 -> rotate up
      else       up = !zs[s][PW-1];  // rotation: z >= 0 -> rotate up
      vs[s+1] <= vs[s];
      ms[s+1] <= ms[s];
      if (up) begin
        xs[s+1] <= xs[s] - (ys[s] >>> s);
        ys[s+1] <= ys[s] + (xs[s] >>> s);
        zs[s+1] <= zs[s] - ANG;
      end else begin
        xs[s+1] <= xs[s] + (ys[s] >>> s);
        ys[s+1] <= ys[s] - (xs[s] >>> s);
        zs[s+1] <= zs[s] + ANG;
      end
    end
  end

  always_comb begin
    out_valid = vs[STAGES];
    x_out     = xs[STAGES];
    y_out     = ys[STAGES];
    z_out     = zs[STAGES];
  end
endmodule
