// tb_llrf_top: end-to-end test of the LLRF fabric design at its default size.
//
// A baseband model of the RF chain closes the loop around the design: the DAC I/Q goes
// through a klystron (12-sample delay, about 50 ns, gain and phase shift) to give the
// klystron forward signal on input 0; a single-pole cavity filter fed from it gives the
// cavity probe on input 1; their difference stands in for the reflected signal on input 2.
// Everything is configured over the two AXI4-Lite links, as the processor would do it.
// The test
//   1. loads a 1 us pulse (246 samples, flat top at DAC amplitude 10000) into the BRAM and
//      reads part of it back;
//   2. fires an external TTL trigger in open loop and checks every DAC sample and the
//      latency from the trigger edge to the first sample;
//   3. reads the whole capture of all three inputs back and compares it with what the
//      model put on the inputs, and checks the measured flat-top amplitude and phase;
//   4. switches to the internal master trigger, closes the loop and checks that the cavity
//      probe settles at the requested amplitude and phase;
//   5. lowers the amplitude limit and checks that the drive stops at it;
//   6. fires a soft trigger, switches back to the external trigger, and finally measures
//   the master trigger interval at the reset period (60 Hz).
// Every mechanism (external, master and soft trigger, trigger-mode switch, waveform
// playback, capture read-out, open-loop drive, closed-loop update, limit clamp) is counted
// and must have happened at least once.
module tb_llrf_top;
  import llrf_pkg::*;

  localparam real PI = 3.14159265358979;
  localparam int  NUM_ADC = 3, CAP_DEPTH = 1024, PLEN = 246;

  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;

  iq_t       adc_iq [NUM_ADC];
  iq_t       dac_iq;
  logic      rf_on;
  logic      ext_trig = 0;
  logic [1:0] trig_out;
  axil_req_t req [2];
  axil_rsp_t rsp [2];

  llrf_top dut (
    .clk, .rst_n, .adc_iq, .dac_iq, .rf_on, .ext_trig, .trig_out,
    .s_axil_cfg_req(req[0]), .s_axil_cfg_rsp(rsp[0]),
    .s_axil_wave_req(req[1]), .s_axil_wave_rsp(rsp[1])
  );

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- AXI4-Lite master (port 0: parameters, port 1: waveform) ----------------
  // A handshake that does not complete within 1000 clocks ends the test as failed.
  task automatic bus_timeout(input int t);
    if (t >= 1000) begin
      failures++;
      $display("FAIL: AXI4-Lite handshake timed out");
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  endtask

  task automatic axi_wr(input int p, input logic [AXI_AW-1:0] a, input logic [31:0] d);
    @(negedge clk);
    req[p].awaddr = a; req[p].awvalid = 1; req[p].wdata = d; req[p].wstrb = 4'hF; req[p].wvalid = 1;
    for (int t = 0; ; t++) begin #1; if (rsp[p].awready && rsp[p].wready) break; bus_timeout(t); @(negedge clk); end
    @(negedge clk);
    req[p].awvalid = 0; req[p].wvalid = 0; req[p].bready = 1;
    for (int t = 0; ; t++) begin #1; if (rsp[p].bvalid) break; bus_timeout(t); @(negedge clk); end
    @(negedge clk);
    req[p].bready = 0;
  endtask

  task automatic axi_rd(input int p, input logic [AXI_AW-1:0] a, output logic [31:0] d);
    @(negedge clk);
    req[p].araddr = a; req[p].arvalid = 1;
    for (int t = 0; ; t++) begin #1; if (rsp[p].arready) break; bus_timeout(t); @(negedge clk); end
    @(negedge clk);
    req[p].arvalid = 0; req[p].rready = 1;
    for (int t = 0; ; t++) begin #1; if (rsp[p].rvalid) break; bus_timeout(t); @(negedge clk); end
    d = rsp[p].rdata;
    @(negedge clk);
    req[p].rready = 0;
  endtask

  // ---------------- RF chain model ----------------
  real k_gain = 0.8, k_phase = 25.0;   // klystron
  real c_alpha = 1.0 / 8.0;            // cavity fill per sample
  real kd_i [12], kd_q [12];
  real cav_i = 0, cav_q = 0;
  int  cyc = 0;
  iq_t adc_log [NUM_ADC][131072];       // inputs by clock number (wraps)

  function automatic logic signed [15:0] to16(input real v);
    if (v > 32767.0) return 16'sd32767;
    if (v < -32768.0) return -16'sd32768;
    return 16'($rtoi(v));
  endfunction

  always @(posedge clk) begin
    real ki, kq, c, s;
    cyc <= cyc + 1;
    // klystron: delay then gain and phase
    c = $cos(k_phase * PI / 180.0); s = $sin(k_phase * PI / 180.0);
    ki = k_gain * (kd_i[11] * c - kd_q[11] * s);
    kq = k_gain * (kd_i[11] * s + kd_q[11] * c);
    for (int n = 11; n > 0; n--) begin kd_i[n] = kd_i[n-1]; kd_q[n] = kd_q[n-1]; end
    kd_i[0] = real'(dac_iq.i); kd_q[0] = real'(dac_iq.q);
    cav_i = cav_i + c_alpha * (ki - cav_i);
    cav_q = cav_q + c_alpha * (kq - cav_q);
    adc_iq[0].i <= to16(ki);           adc_iq[0].q <= to16(kq);
    adc_iq[1].i <= to16(cav_i);        adc_iq[1].q <= to16(cav_q);
    adc_iq[2].i <= to16(ki - cav_i);   adc_iq[2].q <= to16(kq - cav_q);
  end
  // What each input carries during clock number cyc (sampled just before the next edge).
  always @(negedge clk) for (int ch = 0; ch < NUM_ADC; ch++) adc_log[ch][cyc % 131072] = adc_iq[ch];

  // ---------------- observers ----------------
  int trig_cyc = -1, n_trig = 0, first_dac_cyc = -1, rf_len = 0;
  logic trig_out_q = 0;
  always @(posedge clk) begin
    trig_out_q <= trig_out[0];
    if (rst_n && trig_out[0] && !trig_out_q) begin trig_cyc = cyc - 1; n_trig++; first_dac_cyc = -1; rf_len = 0; end
    if (rst_n && rf_on) begin
      if (first_dac_cyc < 0) first_dac_cyc = cyc;
      rf_len++;
    end
  end

  // mechanism counters
  int m_ext = 0, m_master = 0, m_soft = 0, m_switch = 0, m_play = 0, m_capture = 0,
      m_open = 0, m_closed = 0, m_clamp = 0;

  // waveform: 20-sample rise, flat top at 10000
  iq_t wave [PLEN];
  initial for (int n = 0; n < PLEN; n++) begin
    wave[n].i = 16'((n < 20) ? (10000 * n) / 20 : 10000);
    wave[n].q = 16'((n < 20) ? (-2000 * n) / 20 : -2000);
  end

  // Check the DAC stream of the pulse that starts at trig_cyc against wave * drive.
  iq_t dac_log [131072];
  always @(negedge clk) dac_log[cyc % 131072] = dac_iq;

  task automatic check_pulse(input real drv_amp, input real drv_ph_deg, input string tag);
    int bad = 0;
    real c, s;
    c = drv_amp / 32768.0 * $cos(drv_ph_deg * PI / 180.0);
    s = drv_amp / 32768.0 * $sin(drv_ph_deg * PI / 180.0);
    check(first_dac_cyc - trig_cyc == 3, $sformatf("%s: first DAC sample %0d clocks after trigger", tag, first_dac_cyc - trig_cyc));
    check(rf_len == PLEN, $sformatf("%s: rf_on for %0d clocks", tag, rf_len));
    for (int n = 0; n < PLEN; n++) begin
      iq_t got = dac_log[(trig_cyc + 3 + n) % 131072];
      real ei = real'(wave[n].i) * c - real'(wave[n].q) * s;
      real eq = real'(wave[n].i) * s + real'(wave[n].q) * c;
      if ((real'(got.i) - ei) > 6.0 || (ei - real'(got.i)) > 6.0 ||
          (real'(got.q) - eq) > 6.0 || (eq - real'(got.q)) > 6.0) begin
        if (bad < 3) $display("  %s sample %0d: %0d,%0d expected %f,%f", tag, n, got.i, got.q, ei, eq);
        bad++;
      end
    end
    check(bad == 0, $sformatf("%s: %0d DAC samples off", tag, bad));
    check(dac_log[(trig_cyc + 3 + PLEN) % 131072] == '0, $sformatf("%s: DAC quiet after the pulse", tag));
    m_play++;
  endtask

  function automatic real wrap180(input real a);
    while (a >= 180.0) a -= 360.0;
    while (a < -180.0) a += 360.0;
    return a;
  endfunction
  function automatic real absr(input real a); return a < 0 ? -a : a; endfunction

  task automatic wait_update();
    // Feedback finishes a few tens of clocks after its window; wait well past that.
    repeat (600) @(posedge clk);
  endtask

  // Expected flat-top measurement: average of input 1 over the window.
  localparam int WIN_START = 150, WIN_LOG2 = 6;
  task automatic check_meas(input string tag);
    logic [31:0] d;
    real si = 0, sq = 0, amp_e, ph_e, ph_g;
    for (int n = 0; n < (1 << WIN_LOG2); n++) begin
      iq_t v = adc_log[1][(trig_cyc + WIN_START + 2 + n) % 131072];
      si += real'(v.i); sq += real'(v.q);
    end
    si /= real'(1 << WIN_LOG2); sq /= real'(1 << WIN_LOG2);
    amp_e = $sqrt(si * si + sq * sq);
    ph_e  = $atan2(sq, si) * 180.0 / PI;
    axi_rd(0, REG_MEAS, d);
    ph_g = real'($signed(d[31:16])) * 360.0 / 65536.0;
    check(absr(real'(d[15:0]) - amp_e) <= 4.0, $sformatf("%s: flat-top amplitude %0d expected %f", tag, d[15:0], amp_e));
    check(absr(wrap180(ph_g - ph_e)) <= 0.1, $sformatf("%s: flat-top phase %f expected %f", tag, ph_g, ph_e));
  endtask

  initial begin
    #60ms;   // a full run ends at about 33 ms
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    int t_edge, bad, c0, c1;
    for (int n = 0; n < 12; n++) begin kd_i[n] = 0; kd_q[n] = 0; end
    for (int n = 0; n < 131072; n++) dac_log[n] = '0;
    req[0] = '0; req[1] = '0;
    for (int ch = 0; ch < NUM_ADC; ch++) adc_iq[ch] = '0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    repeat (4) @(posedge clk);

    // 1. identification and waveform load
    axi_rd(0, REG_ID, d);
    check(d == ID_VALUE, "ID register");
    for (int n = 0; n < PLEN; n++) axi_wr(1, AXI_AW'(4 * n), wave[n]);
    bad = 0;
    for (int n = 0; n < PLEN; n += 5) begin axi_rd(1, AXI_AW'(4 * n), d); if (d != wave[n]) bad++; end
    check(bad == 0, "waveform read back through the waveform link");

    // Open loop, unity drive.
    axi_wr(0, REG_PULSE_LEN, PLEN);
    axi_wr(0, REG_WIN_START, WIN_START);
    axi_wr(0, REG_WIN_LOG2, WIN_LOG2);
    axi_wr(0, REG_FF_AMP, 32767);
    axi_wr(0, REG_FF_PHASE, 0);
    axi_wr(0, REG_CTRL, 32'h10);           // feedback reference: input 1, loop open, external trigger
    repeat (100) @(posedge clk);
    axi_rd(0, REG_DRIVE, d);
    check(d == {16'd0, 16'd32767}, "open-loop drive register");

    // 2. external trigger
    @(negedge clk);
    #1 ext_trig = 1; t_edge = cyc;
    repeat (30) @(posedge clk);
    ext_trig = 0;
    wait_update();
    check(n_trig == 1, "one trigger from the external edge");
    check(first_dac_cyc - t_edge >= 5 && first_dac_cyc - t_edge <= 7,
          $sformatf("external edge to first DAC sample: %0d clocks", first_dac_cyc - t_edge));
    check_pulse(32767.0, 0.0, "open loop");
    m_ext++; m_open++;

    // 3. capture read-out
    forever begin axi_rd(0, REG_CAP_STAT, d); if (d[31]) break; end
    check(d[30:0] == 0, "capture tag of the first pulse");
    bad = 0;
    for (int ch = 0; ch < NUM_ADC; ch++)
      for (int n = 0; n < CAP_DEPTH; n++) begin
        axi_rd(0, CAP_BASE + AXI_AW'(4 * (ch * CAP_DEPTH + n)), d);
        if (d != adc_log[ch][(trig_cyc + 1 + n) % 131072]) begin
          if (bad < 3) $display("  capture ch %0d sample %0d: %h expected %h", ch, n, d, adc_log[ch][(trig_cyc + 1 + n) % 131072]);
          bad++;
        end
      end
    check(bad == 0, $sformatf("capture of %0d inputs x %0d samples: %0d wrong", NUM_ADC, CAP_DEPTH, bad));
    m_capture++;
    check_meas("open loop");

    // 4. master trigger, closed loop: cavity probe at 6000, +45 degrees
    axi_wr(0, REG_AMP_SET, 6000);
    axi_wr(0, REG_AMP_GAIN, 768);
    axi_wr(0, REG_PH_SET, 32'($rtoi(45.0 * 65536.0 / 360.0)));
    axi_wr(0, REG_PH_GAIN, 200);
    axi_wr(0, REG_PERIOD, 3000);
    axi_wr(0, REG_CTRL, 32'h13);           // loop closed, master trigger, input 1
    m_switch++;
    for (int p = 0; p < 15; p++) begin
      automatic int seen = n_trig;
      while (n_trig == seen) @(posedge clk);
      c0 = trig_cyc;
      wait_update();
      axi_rd(0, REG_DRIVE, d);
      if (p > 0) begin
        // the drive read now was set by the previous pulse's update; the pulse that just ran
        // used the drive of the update before, so only check the stream for stable drive
      end
      m_master++; m_closed++;
      if (p == 14) check_meas("closed loop");
      if (p > 0) check(c0 - c1 == 3000, $sformatf("master trigger period %0d", c0 - c1));
      c1 = c0;
    end
    axi_rd(0, REG_MEAS, d);
    check(absr(real'(d[15:0]) - 6000.0) <= 10.0, $sformatf("closed loop: cavity amplitude %0d", d[15:0]));
    check(absr(wrap180(real'($signed(d[31:16])) * 360.0 / 65536.0 - 45.0)) <= 0.2, "closed loop: cavity phase 45 degrees");
    axi_rd(0, REG_FB_STAT, d);
    check(d[31:16] >= 15, $sformatf("closed-loop updates counted: %0d", d[31:16]));
    check(d[1:0] == 0, "no limit hit in normal closed-loop operation");
    // The settled pulse: drive now steady, compare the last pulse with it.
    axi_rd(0, REG_DRIVE, d);
    begin
      automatic int seen = n_trig;
      automatic real a = real'(d[15:0]);
      automatic real ph = real'($signed(d[31:16])) * 360.0 / 65536.0;
      while (n_trig == seen) @(posedge clk);
      repeat (PLEN + 10) @(posedge clk);
      check_pulse(a, ph, "closed loop");
    end

    // 5. amplitude limit below what the loop needs
    axi_wr(0, REG_AMP_HI, 12000);
    repeat (4) begin
      automatic int seen = n_trig;
      while (n_trig == seen) @(posedge clk);
      wait_update();
    end
    axi_rd(0, REG_FB_STAT, d);
    check(d[0] == 1'b1, "amplitude limit flagged");
    axi_rd(0, REG_DRIVE, d);
    check(d[15:0] == 16'd12000, $sformatf("drive amplitude held at the limit: %0d", d[15:0]));
    if (d[15:0] == 16'd12000) m_clamp++;

    // 6. back to the external trigger; soft trigger
    axi_wr(0, REG_CTRL, 32'h11);
    m_switch++;
    c0 = n_trig;
    repeat (4000) @(posedge clk);
    check(n_trig == c0, "no master trigger after switching back to external");
    axi_wr(0, REG_CTRL, 32'h15);
    repeat (10) @(posedge clk);
    check(n_trig == c0 + 1, "soft trigger fires once");
    m_soft++;
    axi_rd(0, REG_PULSES, d);
    check(d == 32'(n_trig), $sformatf("pulse counter %0d", d));

    // Master trigger at the reset period: 4,096,000 clocks = 60 Hz at 245.76 MHz.
    axi_wr(0, REG_PERIOD, 4096000);
    axi_wr(0, REG_CTRL, 32'h12);
    m_switch++;
    begin
      automatic int seen = n_trig;
      while (n_trig == seen) @(posedge clk);
      c0 = trig_cyc; seen = n_trig;
      while (n_trig == seen) @(posedge clk);
      check(trig_cyc - c0 == 4096000, $sformatf("60 Hz master period: %0d clocks", trig_cyc - c0));
      m_master++;
    end

    $display("mechanisms: external=%0d master=%0d soft=%0d mode_switch=%0d playback=%0d capture=%0d open_loop=%0d closed_loop=%0d clamp=%0d",
             m_ext, m_master, m_soft, m_switch, m_play, m_capture, m_open, m_closed, m_clamp);
    check(m_ext > 0, "external trigger happened");
    check(m_master > 0, "master trigger happened");
    check(m_soft > 0, "soft trigger happened");
    check(m_switch > 0, "trigger mode switch happened");
    check(m_play > 0, "waveform playback happened");
    check(m_capture > 0, "capture read-out happened");
    check(m_open > 0, "open-loop drive happened");
    check(m_closed > 0, "closed-loop update happened");
    check(m_clamp > 0, "limit clamp happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
