// waveform_buffer: triggered recorder for the decimated waveforms.
//
// Every decimated sample (din_valid, from the CIC filters) carries NREC
// channels of I/Q: the eight ADC channels and the drive. While armed, rows are
// written round the circular memory of DEPTH rows. A trigger is accepted
// once at least DEPTH - post rows have been written since arming; after it,
// post more rows are written and the recorder stops, so the memory holds
// DEPTH - post rows before the trigger and post rows from it on.
//
// Trigger sources (the names the operator display uses):
//   TRIG_ALWAYS  at once           TRIG_RISING  RF pulse rising edge
//   TRIG_DELAY   delay clocks after the RF rising edge
//   TRIG_DECAY   RF pulse falling edge (decay of the cavity field)
//   TRIG_EXT     external trigger input
// A trigger event that comes between two rows is held until the next row.
// Modes: TMODE_SINGLE stops in WS_DONE until software arms again;
// TMODE_NORMAL re-arms by itself when software signals read_done.
// trig_count counts accepted triggers.
//
// Readout: rd_row 0 is the oldest row, rd_ch selects the channel; rd_data
// follows one clock after the address. Read while WS_DONE for a coherent
// record.
//
// The paper says the capture is triggered according to the configuration and
// is usually aligned with the falling edge of the RF pulse in pulsed mode.
// The source and mode names come from the operator display; the depth, the
// pre/post-trigger split and the re-arm rule are this design's choices.
module waveform_buffer
  import llrf_pkg::*;
#(
  parameter int N     = NREC,
  parameter int DEPTH = 2048
) (
  input  logic                     clk,
  input  logic                     rst,
  input  iq_t                      din [N],
  input  logic                     din_valid,
  input  logic                     rf_rise,
  input  logic                     rf_fall,
  input  logic                     ext_trig,
  input  wave_cfg_t                cfg,
  input  logic [$clog2(DEPTH)-1:0] rd_row,
  input  logic [$clog2(N)-1:0]     rd_ch,
  output iq_t                      rd_data,
  output wave_state_e              state,
  output logic [31:0]              trig_count
);
  localparam int AB = $clog2(DEPTH);
  localparam int RW = N * $bits(iq_t);

  logic [RW-1:0] mem [DEPTH];
  logic [AB-1:0] wp;
  logic [AB:0]   filled;
  logic [15:0]   post_cnt;
  logic          pend;        // trigger event waiting for the next row
  logic          dly_run;
  logic [31:0]   dly_cnt;

  logic [RW-1:0] row_w;
  always_comb begin
    for (int c = 0; c < N; c++) row_w[c*$bits(iq_t) +: $bits(iq_t)] = din[c];
  end

  // trigger event in this clock
  logic ev, dly_hit;
  always_comb begin
    dly_hit = dly_run && (dly_cnt >= cfg.delay);
    unique case (cfg.src)
      TRIG_ALWAYS: ev = 1'b1;
      TRIG_DELAY:  ev = dly_hit || (rf_rise && cfg.delay == 0);
      TRIG_RISING: ev = rf_rise;
      TRIG_DECAY:  ev = rf_fall;
      TRIG_EXT:    ev = ext_trig;
      default:     ev = 1'b0;
    endcase
  end

  logic prefilled;
  always_comb prefilled = (filled >= (AB+1)'(DEPTH) - (AB+1)'(cfg.post));

  always_ff @(posedge clk) begin
    if (rst) begin
      state      <= WS_IDLE;
      wp         <= '0;
      filled     <= '0;
      post_cnt   <= '0;
      pend       <= 1'b0;
      trig_count <= '0;
      dly_run    <= 1'b0;
      dly_cnt    <= '0;
    end else begin
      // delayed-trigger timer
      if (rf_rise) begin
        dly_run <= 1'b1;
        dly_cnt <= 32'd1;
      end else if (dly_hit) begin
        dly_run <= 1'b0;
      end else if (dly_run) begin
        dly_cnt <= dly_cnt + 1;
      end

      if (cfg.arm) begin
        state    <= WS_ARMED;
        filled   <= '0;
        pend     <= 1'b0;
        post_cnt <= '0;
      end else begin
        unique case (state)
          WS_IDLE: ;
          WS_ARMED: begin
            if (ev && prefilled) pend <= 1'b1;
            if (din_valid) begin
              mem[wp] <= row_w;
              wp      <= wp + 1'b1;
              if (filled < (AB+1)'(DEPTH)) filled <= filled + 1'b1;
              if ((pend || ev) && prefilled) begin
                pend       <= 1'b0;
                trig_count <= trig_count + 1;
                if (cfg.post <= 16'd1) state <= WS_DONE;
                else begin
                  state    <= WS_POST;
                  post_cnt <= 16'd1;
                end
              end
            end
          end
          WS_POST: begin
            if (din_valid) begin
              mem[wp]  <= row_w;
              wp       <= wp + 1'b1;
              post_cnt <= post_cnt + 1'b1;
              if (post_cnt + 1'b1 >= cfg.post) state <= WS_DONE;
            end
          end
          WS_DONE: begin
            if (cfg.read_done) begin
              if (cfg.mode == TMODE_NORMAL) begin
                state    <= WS_ARMED;
                filled   <= '0;
                pend     <= 1'b0;
                post_cnt <= '0;
              end else begin
                state <= WS_IDLE;
              end
            end
          end
        endcase
      end
    end
  end

  // readout, one clock of latency
  logic [RW-1:0]        rd_q;
  logic [$clog2(N)-1:0] ch_q;
  always_ff @(posedge clk) begin
    rd_q <= mem[wp + rd_row];
    ch_q <= rd_ch;
  end
  always_comb begin
    rd_data = '0;
    for (int c = 0; c < N; c++)
      if (32'(ch_q) == c) rd_data = rd_q[c*$bits(iq_t) +: $bits(iq_t)];
  end
endmodule
