// sel_phase_scan: automatic search for the self-excited-loop phase offset.
//
// During cavity bring-up the SEL drive phase rotation is stepped once per RF
// pulse: pulse k runs with offset start + k*step, k = 0 .. n_steps-1. On each
// pulse's falling edge the cavity amplitude is sampled; the offset that gave
// the largest amplitude is kept. When the scan ends that best offset is
// applied to the SEL drive until software writes a new offset (host_load).
//
//   sel_ofs = busy     ? offset under test
//           : have_res ? best_phase
//           :            host_ofs
//
// Interface: start (pulse) begins a scan; pulse_fall marks the end of an RF
// pulse (cav_amp is taken in that clock); done pulses once at the end;
// host_load (pulse) makes host_ofs the applied offset again.
// Timing: one pulse per step; done one clock after the last pulse_fall.
//
// The paper states that the firmware scans for the best SEL phase offset
// and applies it in SEL mode, one offset per pulse; maximum amplitude as the
// criterion is this design's choice.
module sel_phase_scan
  import llrf_pkg::*;
(
  input  logic              clk,
  input  logic              rst,
  input  logic              start,
  input  logic [PW-1:0]     scan_start,
  input  logic [PW-1:0]     scan_step,
  input  logic [7:0]        n_steps,
  input  logic              pulse_fall,
  input  logic [AW_AMP-1:0] cav_amp,
  input  logic [PW-1:0]     host_ofs,
  input  logic              host_load,
  output logic [PW-1:0]     sel_ofs,
  output logic [PW-1:0]     best_phase,
  output logic [AW_AMP-1:0] best_amp,
  output logic              busy,
  output logic              done
);
  logic [PW-1:0] cur;
  logic [7:0]    k;
  logic          have_res;

  always_ff @(posedge clk) begin
    done <= 1'b0;
    if (rst) begin
      cur <= '0; k <= '0; busy <= 1'b0; have_res <= 1'b0;
      best_phase <= '0; best_amp <= '0;
    end else if (start && n_steps != 0) begin
      busy       <= 1'b1;
      have_res   <= 1'b0;
      cur        <= scan_start;
      k          <= '0;
      best_amp   <= '0;
      best_phase <= scan_start;
    end else if (busy && pulse_fall) begin
      if (k == 0 || cav_amp > best_amp) begin
        best_amp   <= cav_amp;
        best_phase <= cur;
      end
      cur <= cur + scan_step;
      k   <= k + 1'b1;
      if (k + 1'b1 == n_steps) begin
        busy     <= 1'b0;
        have_res <= 1'b1;
        done     <= 1'b1;
      end
    end else if (host_load && !busy) begin
      have_res <= 1'b0;
    end
  end

  always_comb begin
    if (busy)          sel_ofs = cur;
    else if (have_res) sel_ofs = best_phase;
    else               sel_ofs = host_ofs;
  end
endmodule
