// tb_cordic: checks the CORDIC in both modes against real-number math.
// Random vectors and angles are fed one per clock; each result is compared
// with cos/sin (rotation) or hypot/atan2 (vectoring), allowing a few LSBs of
// rounding error, and the pipeline latency is checked: the result is on the
// outputs after the (STAGES + 1)-th clock edge, counting the edge that takes
// the input.
//
// STAGES = 18 and 18-bit words, the defaults. The CORDIC itself is named by
// the paper; tolerances are this test's own.
module tb_cordic;
  localparam int DW = 18, PW = 18, STAGES = 18;
  localparam real K = 1.6467602581;
  localparam real TP = 6.283185307179586;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, vectoring = 0;
  logic signed [DW-1:0] x_in = 0, y_in = 0;
  logic [PW-1:0] z_in = 0;
  logic out_valid;
  logic signed [DW+1:0] x_out, y_out;
  logic [PW-1:0] z_out;

  cordic #(.DW(DW), .PW(PW), .STAGES(STAGES)) dut (.*);

  typedef struct { bit vec; int x, y, z; int t; } stim_t;
  stim_t q[$];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic real rabs(input real v);
    return v < 0.0 ? -v : v;
  endfunction

  function automatic int pdiff(int a, int b);
    int d = (a - b) & ((1 << PW) - 1);
    if (d >= (1 << (PW - 1))) d -= (1 << PW);
    return d;
  endfunction

  always @(posedge clk) begin
    if (out_valid && q.size() > 0) begin
      stim_t s;
      real ex, ey, ez, ang;
      s = q.pop_front();
      checks++;
      if (cyc - s.t != STAGES) begin
        failures++; $display("latency %0d", cyc - s.t);
      end
      if (!s.vec) begin
        ang = TP * s.z / real'(1 << PW);
        ex = K * (s.x * $cos(ang) - s.y * $sin(ang));
        ey = K * (s.x * $sin(ang) + s.y * $cos(ang));
        if (rabs(ex - x_out) > 8 + 3e-4 * rabs(ex) || rabs(ey - y_out) > 8 + 3e-4 * rabs(ey)) begin
          failures++; $display("ROT x=%0d y=%0d z=%0d got %0d %0d exp %f %f", s.x, s.y, s.z, x_out, y_out, ex, ey);
        end
      end else begin
        ex = K * $sqrt(real'(s.x) * s.x + real'(s.y) * s.y);
        ez = $atan2(real'(s.y), real'(s.x)) / TP * real'(1 << PW);
        if (rabs(ex - x_out) > 8 + 3e-4 * ex || (rabs(real'(pdiff(int'(z_out), $rtoi(ez)))) > 4.0 + 41721.5 * 12.0 / ex && ex > 2000.0)) begin
          failures++; $display("VEC x=%0d y=%0d got %0d %0d exp %f %f", s.x, s.y, x_out, z_out, ex, ez);
        end
      end
    end
  end

  initial begin
    repeat (STAGES + 3) @(posedge clk);
    for (int n = 0; n < 2000; n++) begin
      stim_t s;
      s.vec = n[0];
      s.x = $urandom_range(0, 100000) - 50000;
      s.y = s.vec ? $urandom_range(0, 100000) - 50000 : 0;
      s.z = s.vec ? 0 : $urandom_range(0, (1 << PW) - 1);
      if (n < 8) begin  // axis cases
        s.x = (n % 4 < 2) ? 40000 : -40000;
        s.y = s.vec ? ((n % 4 == 1 || n % 4 == 3) ? 30000 : -30000) : 0;
        s.z = s.vec ? 0 : (n * (1 << (PW - 3)));
      end
      @(negedge clk);
      in_valid = 1; vectoring = s.vec; x_in = s.x; y_in = s.y; z_in = s.z;
      s.t = cyc + 1;
      q.push_back(s);
    end
    @(negedge clk) in_valid = 0;
    repeat (STAGES + 4) @(posedge clk);
    if (q.size() != 0) begin failures++; $display("missing outputs %0d", q.size()); end
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
