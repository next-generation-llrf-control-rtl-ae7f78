// tb_llrf_workloads: the measurement campaigns of the prototype, run on the full design at
// its default size.
//
// The design is driven only through its ports, as in the field: waveforms and settings go
// in over the two AXI4-Lite links, and every capture is read back over the parameter link.
// Two RF models close the loop from dac_iq to adc_iq:
//   * SSA loopback (input 0): the solid-state amplifier output, 4 samples of delay, gain 0.8
//     and a phase of 25 degrees that falls by 2.5 degrees per 1000 units of drive (about
//     10 degrees per 4000 DAC units, as the prototype's amplifier showed), plus a small
//     random amplitude and phase jitter per pulse;
//   * accelerating structure (inputs 0-2): klystron forward (SSA model followed by
//     12 samples, about 50 ns, of klystron delay), cavity forward (the klystron signal
//     4 samples later, 0.9 of it) and cavity reflection of an over-coupled cavity that fills
//     with a time constant of 200 samples (about 0.8 us): reflection = forward - 2 * field.
// Every input carries +-3 LSB of random noise.
// Campaigns:
//   A. SSA loopback, 1 us pulses (246 samples) at 60 Hz (master trigger, 4,096,000 clocks),
//      DAC amplitude 2000 to 10000 in steps of 2000. For each: every DAC sample, the
//      capture of input 0 against the model, the flat-top measurement, and a 200-sample DFT
//      of the captured flat top, whose carrier (DC after down-conversion) must exceed every
//      other bin by 50 dB. The phase measured at 10000 must sit about 20 degrees below the
//      one at 2000.
//   B. 60 consecutive 1 us pulses at amplitude 10000, each read out (capture of input 0 and
//      MEAS) before the next trigger, with pulse tags checked for gaps. The trigger period
//      is set to 40,960 clocks (6 kHz) through the PERIOD register so that 60 pulses
//      simulate in seconds; it is a register value, not a size of the design. The spread
//      of the 60 flat-top amplitudes and phases must match that of the model.
//   C. Accelerating structure, 450 ns pulses (111 samples), two external TTL triggers
//      16.67 ms (60 Hz) apart: DAC stream, and the capture of all three inputs in full.
//   D. Accelerating structure, 1 us pulses at 10 Hz (master trigger, PERIOD 24,576,000):
//      the trigger interval and the capture of all three inputs.
module tb_llrf_workloads;
  import llrf_pkg::*;

  localparam real PI = 3.14159265358979;
  localparam int  NUM_ADC = 3, CAP_DEPTH = 1024, LOG = 131072;
  localparam int  WIN_START = 100, WIN_LOG2 = 7;

  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;

  iq_t        adc_iq [NUM_ADC];
  iq_t        dac_iq;
  logic       rf_on;
  logic       ext_trig = 0;
  logic [1:0] trig_out;
  axil_req_t  req [2];
  axil_rsp_t  rsp [2];

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

  function automatic real absr(input real a); return a < 0 ? -a : a; endfunction
  function automatic real wrap180(input real a);
    while (a >= 180.0) a -= 360.0;
    while (a < -180.0) a += 360.0;
    return a;
  endfunction

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

  // ---------------- RF models ----------------
  bit  structure = 0;                  // 0: SSA loopback, 1: accelerating structure
  real jit_a = 0.0, jit_p = 0.0;       // per-pulse SSA jitter (fraction, degrees)
  real sd_i [4], sd_q [4];             // SSA delay line
  real kd_i [12], kd_q [12];           // klystron delay line
  real fd_i [4], fd_q [4];             // klystron to cavity coupler
  real cav_i = 0, cav_q = 0;
  int  cyc = 0;
  iq_t adc_log [NUM_ADC][LOG];         // inputs by clock number (wraps)
  iq_t dac_log [LOG];

  function automatic logic signed [15:0] to16(input real v);
    if (v > 32767.0) return 16'sd32767;
    if (v < -32768.0) return -16'sd32768;
    return 16'($rtoi(v));
  endfunction
  function automatic logic signed [15:0] noisy(input real v);
    return to16(v + real'($urandom_range(0, 6)) - 3.0);
  endfunction

  always @(posedge clk) begin
    real si, sq, mag, ph, c, s, ki, kq, fi, fq;
    cyc <= cyc + 1;
    // SSA: delay, gain, amplitude-dependent phase
    mag = $sqrt(sd_i[3] * sd_i[3] + sd_q[3] * sd_q[3]);
    ph  = 25.0 - 2.5 * mag / 1000.0 + jit_p;
    c = $cos(ph * PI / 180.0); s = $sin(ph * PI / 180.0);
    si = 0.8 * (1.0 + jit_a) * (sd_i[3] * c - sd_q[3] * s);
    sq = 0.8 * (1.0 + jit_a) * (sd_i[3] * s + sd_q[3] * c);
    for (int n = 3; n > 0; n--) begin sd_i[n] = sd_i[n-1]; sd_q[n] = sd_q[n-1]; end
    sd_i[0] = real'(dac_iq.i); sd_q[0] = real'(dac_iq.q);
    // klystron and structure
    ki = kd_i[11]; kq = kd_q[11];
    for (int n = 11; n > 0; n--) begin kd_i[n] = kd_i[n-1]; kd_q[n] = kd_q[n-1]; end
    kd_i[0] = si; kd_q[0] = sq;
    fi = 0.9 * fd_i[3]; fq = 0.9 * fd_q[3];
    for (int n = 3; n > 0; n--) begin fd_i[n] = fd_i[n-1]; fd_q[n] = fd_q[n-1]; end
    fd_i[0] = ki; fd_q[0] = kq;
    cav_i = cav_i + (fi - cav_i) / 200.0;
    cav_q = cav_q + (fq - cav_q) / 200.0;
    if (!structure) begin
      adc_iq[0].i <= noisy(si); adc_iq[0].q <= noisy(sq);
      adc_iq[1].i <= noisy(0);  adc_iq[1].q <= noisy(0);
      adc_iq[2].i <= noisy(0);  adc_iq[2].q <= noisy(0);
    end else begin
      adc_iq[0].i <= noisy(ki);               adc_iq[0].q <= noisy(kq);
      adc_iq[1].i <= noisy(fi);               adc_iq[1].q <= noisy(fq);
      adc_iq[2].i <= noisy(fi - 2.0 * cav_i); adc_iq[2].q <= noisy(fq - 2.0 * cav_q);
    end
  end
  always @(negedge clk) begin
    for (int ch = 0; ch < NUM_ADC; ch++) adc_log[ch][cyc % LOG] = adc_iq[ch];
    dac_log[cyc % LOG] = dac_iq;
  end

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

  task automatic wait_trigger();
    automatic int seen = n_trig;
    while (n_trig == seen) @(posedge clk);
  endtask

  // ---------------- waveform ----------------
  int  plen = 246;
  int  wave_amp = 10000;
  function automatic iq_t wave(input int n);
    iq_t w;
    w.i = 16'((n < 20) ? (wave_amp * n) / 20 : wave_amp);
    w.q = '0;
    return w;
  endfunction

  task automatic load_wave(input int amp, input int len);
    wave_amp = amp; plen = len;
    for (int n = 0; n < len; n++) axi_wr(1, AXI_AW'(4 * n), wave(n));
    axi_wr(0, REG_PULSE_LEN, 32'(len));
  endtask

  // DAC stream of the last pulse against the waveform (unity drive).
  task automatic check_dac(input string tag);
    int bad = 0;
    check(first_dac_cyc - trig_cyc == 3, $sformatf("%s: first DAC sample %0d clocks after trigger", tag, first_dac_cyc - trig_cyc));
    check(rf_len == plen, $sformatf("%s: rf_on for %0d clocks, expected %0d", tag, rf_len, plen));
    for (int n = 0; n < plen; n++) begin
      iq_t got = dac_log[(trig_cyc + 3 + n) % LOG];
      real e = real'(wave(n).i) * 32767.0 / 32768.0;
      if (absr(real'(got.i) - e) > 1.0 || got.q != 0) bad++;
    end
    check(bad == 0, $sformatf("%s: %0d DAC samples off", tag, bad));
  endtask

  // Read n samples of capture channel ch over the bus and compare with the inputs.
  task automatic check_capture(input int ch, input int n, input string tag);
    logic [31:0] d;
    int bad = 0;
    for (int k = 0; k < n; k++) begin
      axi_rd(0, CAP_BASE + AXI_AW'(4 * (ch * CAP_DEPTH + k)), d);
      cap[k] = d;
      if (d != adc_log[ch][(trig_cyc + 1 + k) % LOG]) bad++;
    end
    check(bad == 0, $sformatf("%s: capture of input %0d, %0d of %0d samples wrong", tag, ch, bad, n));
  endtask
  iq_t cap [CAP_DEPTH];

  // Wait for the capture of pulse number `tag` (0-based trigger count) to be complete.
  task automatic wait_capture(input int tag, input string what);
    logic [31:0] d;
    for (int t = 0; t < 2000; t++) begin
      axi_rd(0, REG_CAP_STAT, d);
      if (d[31]) break;
    end
    check(d[31] && d[30:0] == 31'(tag), $sformatf("%s: capture done with tag %0d, expected %0d", what, d[30:0], tag));
  endtask

  // Expected flat-top measurement of input 0 and the measured one.
  real m_amp, m_ph, e_amp, e_ph;
  task automatic check_meas(input string tag);
    logic [31:0] d;
    real si = 0, sq = 0;
    // The update lands about 41 clocks after the window; wait for it.
    while (cyc < trig_cyc + WIN_START + (1 << WIN_LOG2) + 80) @(posedge clk);
    for (int n = 0; n < (1 << WIN_LOG2); n++) begin
      iq_t v = adc_log[0][(trig_cyc + WIN_START + 2 + n) % LOG];
      si += real'(v.i); sq += real'(v.q);
    end
    si /= real'(1 << WIN_LOG2); sq /= real'(1 << WIN_LOG2);
    e_amp = $sqrt(si * si + sq * sq);
    e_ph  = $atan2(sq, si) * 180.0 / PI;
    axi_rd(0, REG_MEAS, d);
    m_amp = real'(d[15:0]);
    m_ph  = real'($signed(d[31:16])) * 360.0 / 65536.0;
    check(absr(m_amp - e_amp) <= 4.0, $sformatf("%s: flat-top amplitude %f expected %f", tag, m_amp, e_amp));
    check(absr(wrap180(m_ph - e_ph)) <= 0.1, $sformatf("%s: flat-top phase %f expected %f", tag, m_ph, e_ph));
  endtask

  // 200-point DFT of captured flat-top samples (capture indices 45..244 of input 0):
  // the DC bin (the carrier) must exceed every other bin by at least 50 dB.
  task automatic check_spectrum(input string tag);
    real p0 = 0.0, pmax = 0.0;
    for (int k = 0; k < 200; k++) begin
      real re = 0.0, im = 0.0, pk;
      for (int n = 0; n < 200; n++) begin
        real a = -2.0 * PI * real'(k) * real'(n) / 200.0;
        re += real'(cap[45 + n].i) * $cos(a) - real'(cap[45 + n].q) * $sin(a);
        im += real'(cap[45 + n].i) * $sin(a) + real'(cap[45 + n].q) * $cos(a);
      end
      pk = re * re + im * im;
      if (k == 0) p0 = pk; else if (pk > pmax) pmax = pk;
    end
    check(p0 > 1.0e5 * pmax, $sformatf("%s: carrier %0.1f dB above the largest other bin",
                                       tag, 10.0 * $ln(p0 / (pmax + 1.0)) / $ln(10.0)));
  endtask

  initial begin
    #400ms;   // a full run ends at about 250 ms
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    real ph_at [5];
    automatic real sa = 0, saa = 0, sp = 0, spp = 0, ea = 0, eaa = 0, ep = 0, epp = 0;
    int  c0;
    for (int n = 0; n < 4; n++) begin sd_i[n] = 0; sd_q[n] = 0; fd_i[n] = 0; fd_q[n] = 0; end
    for (int n = 0; n < 12; n++) begin kd_i[n] = 0; kd_q[n] = 0; end
    req[0] = '0; req[1] = '0;
    for (int ch = 0; ch < NUM_ADC; ch++) adc_iq[ch] = '0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    repeat (4) @(posedge clk);

    // Common set-up: open loop, unity drive, flat-top window on input 0.
    axi_wr(0, REG_WIN_START, WIN_START);
    axi_wr(0, REG_WIN_LOG2, WIN_LOG2);
    axi_wr(0, REG_FF_AMP, 32767);
    axi_wr(0, REG_FF_PHASE, 0);

    // ---- A: SSA loopback, 1 us at 60 Hz, DAC amplitude 2000..10000 ----
    axi_rd(0, REG_PERIOD, d);
    check(d == 32'd4096000, "reset trigger period is 60 Hz");
    axi_rd(0, REG_PULSE_LEN, d);
    check(d == 32'd246, "reset pulse length is 1 us");
    axi_wr(0, REG_CTRL, 32'h02);             // master trigger, loop open, input 0
    for (int a = 0; a < 5; a++) begin
      load_wave(2000 * (a + 1), 246);
      wait_trigger();
      if (a > 0) check(trig_cyc - c0 == 4096000, $sformatf("A: trigger interval %0d clocks", trig_cyc - c0));
      c0 = trig_cyc;
      repeat (300) @(posedge clk);
      check_dac($sformatf("A amplitude %0d", wave_amp));
      check_meas($sformatf("A amplitude %0d", wave_amp));
      ph_at[a] = m_ph;
      wait_capture(n_trig - 1, "A");
      check_capture(0, 300, $sformatf("A amplitude %0d", wave_amp));
      check_spectrum($sformatf("A amplitude %0d", wave_amp));
      $display("A: DAC amplitude %0d: flat top %0.1f at %0.2f degrees", wave_amp, m_amp, m_ph);
    end
    check(absr(wrap180(ph_at[4] - ph_at[0]) + 20.0) <= 1.0,
          $sformatf("A: phase falls %0.2f degrees from 2000 to 10000", -wrap180(ph_at[4] - ph_at[0])));

    // ---- B: 60 consecutive pulses, each read out before the next ----
    axi_wr(0, REG_CTRL, 32'h00);
    axi_wr(0, REG_PERIOD, 40960);
    axi_wr(0, REG_CTRL, 32'h02);
    wait_trigger();                          // let the period settle
    for (int p = 0; p < 60; p++) begin
      jit_a = (real'($urandom_range(0, 2000)) - 1000.0) * 1.0e-6;   // +-0.1 %
      jit_p = (real'($urandom_range(0, 2000)) - 1000.0) * 5.0e-5;   // +-0.05 degree
      wait_trigger();
      c0 = n_trig - 1;
      check_meas($sformatf("B pulse %0d", p));
      sa += m_amp; saa += m_amp * m_amp; sp += m_ph; spp += m_ph * m_ph;
      ea += e_amp; eaa += e_amp * e_amp; ep += e_ph; epp += e_ph * e_ph;
      wait_capture(c0, $sformatf("B pulse %0d", p));
      check_capture(0, 300, $sformatf("B pulse %0d", p));
      check(n_trig == c0 + 1, $sformatf("B pulse %0d read out before the next trigger", p));
    end
    begin
      automatic real sd_a, sd_p, se_a, se_p;
      sd_a = $sqrt(saa / 60.0 - (sa / 60.0) ** 2); se_a = $sqrt(eaa / 60.0 - (ea / 60.0) ** 2);
      sd_p = $sqrt(spp / 60.0 - (sp / 60.0) ** 2); se_p = $sqrt(epp / 60.0 - (ep / 60.0) ** 2);
      $display("B: 60 pulses: amplitude %0.2f rms %0.3f (model %0.3f), phase %0.3f rms %0.4f deg (model %0.4f)",
               sa / 60.0, sd_a, se_a, sp / 60.0, sd_p, se_p);
      check(absr(sd_a - se_a) <= 0.5 + 0.1 * se_a, "B: pulse-to-pulse amplitude spread");
      check(absr(sd_p - se_p) <= 0.005 + 0.1 * se_p, "B: pulse-to-pulse phase spread");
    end
    jit_a = 0.0; jit_p = 0.0;

    // ---- C: accelerating structure, 450 ns pulses, external trigger at 60 Hz ----
    axi_wr(0, REG_CTRL, 32'h00);             // external trigger
    structure = 1;
    load_wave(10000, 111);
    repeat (2000) @(posedge clk);
    for (int p = 0; p < 2; p++) begin
      c0 = n_trig;
      @(negedge clk);
      #1 ext_trig = 1;
      repeat (64) @(posedge clk);
      ext_trig = 0;
      check(n_trig == c0 + 1, "C: one trigger per TTL pulse");
      repeat (600) @(posedge clk);
      check_dac($sformatf("C pulse %0d", p));
      wait_capture(n_trig - 1, "C");
      for (int ch = 0; ch < NUM_ADC; ch++) check_capture(ch, CAP_DEPTH, $sformatf("C pulse %0d", p));
      if (p == 0) while (cyc < trig_cyc + 4096000 - 3) @(posedge clk);
    end

    // ---- D: accelerating structure, 1 us pulses at 10 Hz ----
    load_wave(10000, 246);
    axi_wr(0, REG_PERIOD, 24576000);
    axi_wr(0, REG_CTRL, 32'h02);
    wait_trigger();
    c0 = trig_cyc;
    wait_trigger();
    check(trig_cyc - c0 == 24576000, $sformatf("D: 10 Hz trigger interval %0d clocks", trig_cyc - c0));
    repeat (300) @(posedge clk);
    check_dac("D");
    wait_capture(n_trig - 1, "D");
    for (int ch = 0; ch < NUM_ADC; ch++) check_capture(ch, CAP_DEPTH, "D");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
