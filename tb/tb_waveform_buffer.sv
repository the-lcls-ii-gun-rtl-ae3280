// tb_waveform_buffer: rows carry a running row number (I) and the channel
// number (Q). For each trigger source the recorder is armed, the trigger
// event is made at a known row, and after WS_DONE the whole memory is read
// back: rows must be consecutive, the first row written at or after the
// trigger must sit at index DEPTH - post, and trig_count must count. Also
// checked: a trigger before the pre-trigger part is full is ignored, Single
// mode stops after read_done, Normal mode re-arms by itself.
//
// N = 3, DEPTH = 64, post = 16 to keep the run short. Source and mode names
// follow the original system's operator display; the rest is this design's.
module tb_waveform_buffer;
  import llrf_pkg::*;
  localparam int N = 3, DEPTH = 64, POST = 16;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst = 1;
  iq_t din [N];
  logic din_valid = 0, rf_rise = 0, rf_fall = 0, ext_trig = 0;
  wave_cfg_t cfg;
  logic [5:0] rd_row = 0;
  logic [1:0] rd_ch = 0;
  iq_t rd_data;
  wave_state_e state;
  logic [31:0] trig_count;

  waveform_buffer #(.N(N), .DEPTH(DEPTH)) dut (.*);

  int row = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  // a row every 4 clocks
  always @(negedge clk) begin
    din_valid <= (cyc % 4 == 0);
    if (cyc % 4 == 0) begin
      for (int c = 0; c < N; c++) begin din[c].i <= 18'(row); din[c].q <= 18'(c); end
      row <= row + 1;
    end
  end

  // trigger monitor: the row written at the first posedge at or after the
  // event (as seen at a posedge) is the expected trigger row
  int mon_row = -1, dly_at = -1;
  bit ev_seen = 0;
  always @(posedge clk) begin
    bit e;
    unique case (cfg.src)
      TRIG_RISING: e = rf_rise;
      TRIG_DECAY:  e = rf_fall;
      TRIG_EXT:    e = ext_trig;
      TRIG_DELAY:  e = (cyc == dly_at);
      default:     e = 0;
    endcase
    if (rf_rise) dly_at = cyc + int'(cfg.delay);
    if (e) ev_seen = 1;
    if (ev_seen && din_valid) begin
      mon_row = din[0].i;
      ev_seen = 0;
    end
  end

  task automatic pulse(ref logic s);
    @(negedge clk) s = 1;
    @(negedge clk) s = 0;
  endtask

  task automatic wait_rows(input int n);
    repeat (4 * n) @(negedge clk);
  endtask

  // read back all rows; check consecutive and trigger position
  task automatic readback(input int trig_row, input int exp_count);
    int first;
    checks++;
    if (state != WS_DONE) begin failures++; $display("state %0d not DONE", state); end
    checks++;
    if (trig_count != 32'(exp_count)) begin failures++; $display("count %0d exp %0d", trig_count, exp_count); end
    for (int r = 0; r < DEPTH; r++) begin
      for (int c = 0; c < N; c++) begin
        @(negedge clk) begin rd_row = 6'(r); rd_ch = 2'(c); end
        @(negedge clk);
        if (r == 0 && c == 0) first = rd_data.i;
        checks++;
        if (rd_data.i != 18'(first + r) || rd_data.q != 18'(c)) begin
          failures++;
          if (failures < 10) $display("r=%0d c=%0d got %0d/%0d exp %0d", r, c, rd_data.i, rd_data.q, first + r);
        end
      end
    end
    checks++;
    if (first + DEPTH - POST != trig_row) begin failures++; $display("trigger row %0d exp %0d", first + DEPTH - POST, trig_row); end
  endtask

  task automatic wait_done();
    int t = 0;
    while (state != WS_DONE && t < 2000) begin @(negedge clk); t++; end
  endtask

  int tr;
  initial begin
    cfg = '0;
    cfg.post = 16'(POST);
    cfg.mode = TMODE_SINGLE;
    cfg.src  = TRIG_RISING;
    repeat (3) @(negedge clk);
    rst = 0;
    // 1. rising edge, with an early trigger that must be ignored
    @(negedge clk) cfg.arm = 1;
    @(negedge clk) cfg.arm = 0;
    wait_rows(10);
    pulse(rf_rise);
    wait_rows(5);
    checks++;
    if (state != WS_ARMED) begin failures++; $display("early trigger accepted"); end
    wait_rows(50);
    @(negedge clk); pulse(rf_rise);
    wait_done();
    readback(mon_row, 1);
    // single mode: read_done -> idle
    @(negedge clk) cfg.read_done = 1;
    @(negedge clk) cfg.read_done = 0;
    checks++;
    if (state != WS_IDLE) begin failures++; $display("single mode did not stop"); end
    // 2. decay (falling edge), normal mode
    cfg.src = TRIG_DECAY; cfg.mode = TMODE_NORMAL;
    @(negedge clk) cfg.arm = 1;
    @(negedge clk) cfg.arm = 0;
    wait_rows(60);
    pulse(rf_rise);      // not this source
    wait_rows(3);
    @(negedge clk); pulse(rf_fall);
    wait_done();
    readback(mon_row, 2);
    @(negedge clk) cfg.read_done = 1;
    @(negedge clk) cfg.read_done = 0;
    checks++;
    if (state != WS_ARMED) begin failures++; $display("normal mode did not re-arm"); end
    // 3. external trigger, re-armed by normal mode
    cfg.src = TRIG_EXT;
    wait_rows(60);
    @(negedge clk); pulse(ext_trig);
    wait_done();
    readback(mon_row, 3);
    // 4. delay: 40 clocks (10 rows) after the rising edge
    cfg.src = TRIG_DELAY; cfg.delay = 40;
    @(negedge clk) cfg.read_done = 1;
    @(negedge clk) cfg.read_done = 0;
    wait_rows(60);
    @(negedge clk); pulse(rf_rise);
    wait_done();
    readback(mon_row, 4);
    // 5. always: triggers as soon as the pre-trigger part is full
    cfg.src = TRIG_ALWAYS;
    @(negedge clk) begin cfg.arm = 1; tr = row + DEPTH - POST; end
    @(negedge clk) cfg.arm = 0;
    wait_done();
    readback(tr, 5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
