// tb_reg_bank: checks the reset values, writes and reads back every
// configuration register with random data (masked to its width), checks that
// writes reach the cfg fields, that R_CMD and R_SEL_OFS give one-clock
// pulses, that status words read back, that waveform reads pass the address
// to the recorder and return I or Q, and that rvalid comes two clocks after re.
//
// The bus and the register map are this design's own; the paper says only
// that everything is software-controlled. Clock period 10.
module tb_reg_bank;
  import llrf_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst = 1;
  logic [19:0] addr = 0;
  logic [31:0] wdata = 0;
  logic we = 0, re = 0;
  logic [31:0] rdata;
  logic rvalid;
  llrf_cfg_t cfg;
  llrf_status_t status;
  logic [10:0] wave_row;
  logic [3:0] wave_ch;

  reg_bank dut (.*);

  task automatic wr(input logic [19:0] a, input logic [31:0] d);
    @(negedge clk) begin addr = a; wdata = d; we = 1; end
    @(negedge clk) we = 0;
  endtask

  task automatic rd(input logic [19:0] a, output logic [31:0] d);
    @(negedge clk) begin addr = a; re = 1; end
    @(negedge clk) re = 0;
    checks++;
    if (rvalid) begin failures++; $display("rvalid too early"); end
    @(negedge clk);
    checks++;
    if (!rvalid) begin failures++; $display("rvalid missing"); end
    d = rdata;
  endtask

  typedef struct { logic [19:0] a; logic [31:0] mask; } reg_t;
  reg_t regs[$];
  initial begin
    logic [31:0] d, v;
    status = '0;
    repeat (2) @(negedge clk);
    rst = 0;
    // reset values
    rd(R_DN_STEP, d);  checks++; if (d != DN_STEP_GUN) begin failures++; $display("dn reset"); end
    rd(R_UP_STEP, d);  checks++; if (d != UP_STEP_GUN) begin failures++; $display("up reset"); end
    rd(R_CIC_DEC, d);  checks++; if (d != 6) begin failures++; $display("dec reset"); end
    rd(R_CHSEL, d);    checks++; if (d != 32'h700) begin failures++; $display("chsel reset %h", d); end
    rd(R_TRIG_SRC, d); checks++; if (d != 32'(TRIG_DECAY)) begin failures++; $display("src reset"); end
    // read/write
    regs = '{'{R_DN_STEP, 32'hFFFFFFFF}, '{R_UP_STEP, 32'hFFFFFFFF}, '{R_MODE, 32'h3},
             '{R_SEL_OFS, 32'h3FFFF}, '{R_FB_OFS, 32'h3FFFF}, '{R_AMP_SET, 32'hFFFFF},
             '{R_PH_SET, 32'h3FFFF}, '{R_DRV_AMP, 32'h1FFFF}, '{R_DRV_PH, 32'h3FFFF},
             '{R_KP, 32'hFFFF}, '{R_KI, 32'hFFFF}, '{R_AMP_MAX, 32'h1FFFF}, '{R_CIC_DEC, 32'hF},
             '{R_CHSEL, 32'h777}, '{R_CW, 32'h1}, '{R_PERIOD, 32'hFFFFFFFF},
             '{R_WIDTH, 32'hFFFFFFFF}, '{R_TRIG_MODE, 32'h1},
             '{R_TRIG_DLY, 32'hFFFFFFFF}, '{R_POST, 32'hFFFF}, '{R_SCAN_START, 32'h3FFFF},
             '{R_SCAN_STEP, 32'h3FFFF}, '{R_SCAN_N, 32'hFF}, '{R_DET_STRIDE, 32'hF}};
    foreach (regs[k]) begin
      v = $urandom & regs[k].mask;
      wr(regs[k].a, v);
      rd(regs[k].a, d);
      checks++;
      if (d != v) begin failures++; $display("reg %h wrote %h read %h", regs[k].a, v, d); end
    end
    // fields
    wr(R_AMP_SET, 32'h12345); checks++; if (cfg.sel.amp_set != 20'h12345) begin failures++; $display("amp_set field"); end
    wr(R_CHSEL, 32'h325);     checks++; if (cfg.sel_ch != CH_REV2 || cfg.fb_ch != CH_FWD1 || cfg.prl_ch != CH_REV1) begin failures++; $display("chsel fields"); end
    wr(R_TRIG_SRC, 32'(TRIG_EXT)); checks++; if (cfg.wave.src != TRIG_EXT) begin failures++; $display("src field"); end
    // command pulses
    @(negedge clk) begin addr = R_CMD; wdata = 32'h7; we = 1; end
    @(negedge clk) begin
      we = 0;
      checks++;
      if (!cfg.wave.arm || !cfg.wave.read_done || !cfg.scan_go) begin failures++; $display("cmd pulse missing"); end
    end
    @(negedge clk);
    checks++;
    if (cfg.wave.arm || cfg.wave.read_done || cfg.scan_go) begin failures++; $display("cmd pulse too long"); end
    @(negedge clk) begin addr = R_SEL_OFS; wdata = 32'h100; we = 1; end
    @(negedge clk) begin we = 0; checks++; if (!cfg.sel_ofs_load) begin failures++; $display("load pulse"); end end
    // status
    status.detune = -32'sd12345;
    status.trig_count = 32'd77;
    status.wave_state = WS_DONE;
    status.scan_busy = 1;
    rd(R_DETUNE, d);   checks++; if (d != 32'hFFFFCFC7) begin failures++; $display("detune %h", d); end
    rd(R_TRIG_CNT, d); checks++; if (d != 77) begin failures++; $display("trig count"); end
    rd(R_STATUS, d);   checks++; if (d != 32'h0B) begin failures++; $display("status %h", d); end
    // waveform window: row 5, channel 3, Q
    status.wave_data.i = -18'sd5;
    status.wave_data.q = 18'sd1000;
    @(negedge clk) begin addr = 20'h80000 | (20'd5 << 5) | (20'd3 << 1) | 20'd1; re = 1; end
    checks++;
    if (wave_row != 5 || wave_ch != 3) begin failures++; $display("wave address %0d %0d", wave_row, wave_ch); end
    @(negedge clk) re = 0;
    @(negedge clk);
    checks++;
    if (!rvalid || rdata != 32'd1000) begin failures++; $display("wave Q %0d", rdata); end
    @(negedge clk) begin addr = 20'h80000; re = 1; end
    @(negedge clk) re = 0;
    @(negedge clk);
    checks++;
    if (rdata != 32'hFFFFFFFB) begin failures++; $display("wave I %h", rdata); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
