// tb_llrf_regs: self-checking test of the LLRF parameter register file.
//
// Drives the one-clock register bus directly. Checks the reset values (1 us pulse at
// 60 Hz), write and read-back of every parameter with full and partial byte strobes, the
// masking of unused bits, that the soft-trigger bit gives a one-clock pulse and is not
// stored, that the fb_cfg fields carry the written values, that status inputs appear at
// their addresses, and that reads at CAP_BASE and above are decoded into capture channel
// and sample and return the capture data.
module tb_llrf_regs;
  import llrf_pkg::*;

  localparam int unsigned NUM_CH = 3, CAP_DEPTH = 64;

  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;

  logic                bus_we = 0, bus_re = 0;
  logic [AXI_AW-1:0]   bus_addr = '0;
  logic [AXI_DW-1:0]   bus_wdata = '0, bus_rdata;
  logic [AXI_DW/8-1:0] bus_wstrb = '0;
  fb_cfg_t             fb_cfg;
  logic                master_trig, soft_trig;
  logic [31:0]         trig_period;
  logic [15:0]         pulse_len;
  logic [31:0]         pulse_count = 32'd77;
  logic [15:0]         meas_amp = 16'd1234, meas_phase = 16'hABCD;
  logic [15:0]         drive_amp = 16'd4321, drive_phase = 16'h1357;
  logic                cap_done = 1'b1;
  logic [30:0]         cap_tag = 31'd55;
  logic [15:0]         fb_updates = 16'd9;
  logic                amp_clamped = 1'b1, phase_clamped = 1'b0;
  logic                cap_rd_en;
  logic [1:0]          cap_rd_ch;
  logic [5:0]          cap_rd_idx;
  logic [31:0]         cap_rd_data;

  llrf_regs #(.NUM_CH(NUM_CH), .CAP_DEPTH(CAP_DEPTH)) dut (.*);

  // Capture memory model: data = {ch, idx} pattern, one clock read latency.
  logic [1:0] last_ch;
  logic [5:0] last_idx;
  always_ff @(posedge clk)
    if (cap_rd_en) begin
      cap_rd_data <= {8'hC0, 6'd0, cap_rd_ch, 10'd0, cap_rd_idx};
      last_ch <= cap_rd_ch; last_idx <= cap_rd_idx;
    end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int soft_pulses = 0;
  always @(posedge clk) if (rst_n && soft_trig) soft_pulses++;

  task automatic wr(input logic [AXI_AW-1:0] a, input logic [31:0] d, input logic [3:0] s = 4'hF);
    @(negedge clk);
    bus_we = 1; bus_addr = a; bus_wdata = d; bus_wstrb = s;
    @(negedge clk);
    bus_we = 0;
  endtask

  task automatic rd(input logic [AXI_AW-1:0] a, output logic [31:0] d);
    @(negedge clk);
    bus_re = 1; bus_addr = a;
    @(negedge clk);
    bus_re = 0;
    d = bus_rdata;     // valid one clock after bus_re
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    logic [AXI_AW-1:0] addrs [14];
    logic [31:0] vals [14];
    repeat (3) @(posedge clk);
    rst_n = 1;
    rd(REG_ID, d);        check(d == 32'h4C4C5246, "ID");
    rd(REG_PERIOD, d);    check(d == 32'd4096000, "reset period = 60 Hz at 245.76 MHz");
    rd(REG_PULSE_LEN, d); check(d == 32'd246, "reset pulse length = 1 us");
    check(trig_period == 32'd4096000 && pulse_len == 16'd246, "reset outputs");
    rd(REG_CTRL, d);      check(d == 0 && !master_trig && !fb_cfg.enable, "CTRL reset");

    addrs = '{REG_PERIOD, REG_PULSE_LEN, REG_WIN_START, REG_WIN_LOG2, REG_AMP_SET, REG_AMP_GAIN,
              REG_AMP_HI, REG_AMP_LO, REG_PH_SET, REG_PH_GAIN, REG_PH_HI, REG_PH_LO,
              REG_FF_AMP, REG_FF_PHASE};
    for (int i = 0; i < 14; i++) begin
      vals[i] = $urandom;
      wr(addrs[i], vals[i]);
    end
    for (int i = 0; i < 14; i++) begin
      logic [31:0] exp;
      exp = (i == 0) ? vals[i] : (i == 3) ? (vals[i] & 32'hF) : (vals[i] & 32'hFFFF);
      rd(addrs[i], d);
      check(d == exp, $sformatf("reg %h: %h expected %h", addrs[i], d, exp));
      vals[i] = exp;
    end
    check(trig_period == vals[0] && pulse_len == vals[1][15:0], "period / length outputs");
    check(fb_cfg.win_start == vals[2][15:0] && fb_cfg.win_log2 == vals[3][3:0], "window fields");
    check(fb_cfg.amp.set_value == vals[4][15:0] && fb_cfg.amp.gain == vals[5][15:0] &&
          fb_cfg.amp.upper == vals[6][15:0] && fb_cfg.amp.lower == vals[7][15:0], "amplitude loop fields");
    check(fb_cfg.phase.set_value == vals[8][15:0] && fb_cfg.phase.gain == vals[9][15:0] &&
          fb_cfg.phase.upper == vals[10][15:0] && fb_cfg.phase.lower == vals[11][15:0], "phase loop fields");
    check(fb_cfg.ff_amp == vals[12][15:0] && fb_cfg.ff_phase == vals[13][15:0], "feed-forward fields");

    // Byte strobes: only byte 1 of the period changes.
    wr(REG_PERIOD, 32'hFFFF_FFFF, 4'b0010);
    rd(REG_PERIOD, d);
    check(d == (vals[0] | 32'h0000_FF00), "byte strobe on period");

    // CTRL: enable, master, channel 2, soft trigger pulse.
    wr(REG_CTRL, 32'h0000_0027);
    rd(REG_CTRL, d);
    check(d == 32'h23, "CTRL stores all but the soft-trigger bit");
    check(fb_cfg.enable && master_trig && fb_cfg.channel == 4'd2, "CTRL fields");
    check(soft_pulses == 1, $sformatf("one soft-trigger pulse (got %0d)", soft_pulses));

    // Status registers.
    rd(REG_PULSES, d);   check(d == 77, "pulse count");
    rd(REG_MEAS, d);     check(d == {16'hABCD, 16'd1234}, "measured amplitude / phase");
    rd(REG_DRIVE, d);    check(d == {16'h1357, 16'd4321}, "drive amplitude / phase");
    rd(REG_CAP_STAT, d); check(d == {1'b1, 31'd55}, "capture status");
    rd(REG_FB_STAT, d);  check(d == {16'd9, 16'd1}, "feedback status");

    // Capture window.
    for (int ch = 0; ch < NUM_CH; ch++)
      for (int k = 0; k < 4; k++) begin
        automatic int idx = (k * 21 + ch) % CAP_DEPTH;
        rd(CAP_BASE + AXI_AW'(4 * (ch * CAP_DEPTH + idx)), d);
        check(last_ch == 2'(ch) && last_idx == 6'(idx), $sformatf("capture decode ch %0d idx %0d", ch, idx));
        check(d == {8'hC0, 6'd0, 2'(ch), 10'd0, 6'(idx)}, "capture data returned");
      end
    rd(REG_ID, d); check(d == 32'h4C4C5246, "register read after capture read");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
