// tb_feedback_ctrl: self-checking test of the pulse-to-pulse feedback controller.
//
// A cavity model closes the loop: during the flat-top window the selected input channel
// carries the drive I/Q multiplied by a complex plant gain g*exp(j*phi); outside the window
// it carries large garbage, so a window misplaced by one sample spoils the measurement.
// The other channels always carry garbage. Expected values are computed here in double
// precision. Checks:
//   * open loop: drive I/Q = ff_amp * exp(j*ff_phase) within 4 LSB;
//   * measurement: amplitude and phase of the window average within 4 LSB / 0.05 degree;
//   * closed loop: amplitude and phase of the cavity converge to the set values;
//   * limits: drive amplitude and phase stop at the upper / lower limits and the clamp
//     flags are raised;
//   * the number of closed-loop updates and the update latency after the window.
module tb_feedback_ctrl;
  import llrf_pkg::*;

  localparam int unsigned NUM_CH = 3;
  localparam real PI = 3.14159265358979;

  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;

  fb_cfg_t     cfg;
  logic        trig = 0;
  iq_t         iq_in [NUM_CH];
  iq_t         drive;
  logic [15:0] drive_amp, drive_phase, meas_amp, meas_phase, updates;
  logic        amp_clamped, phase_clamped, update_done;

  feedback_ctrl #(.NUM_CH(NUM_CH)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Plant: g * exp(j*phi).
  real g = 0.5, phi = 40.0;     // degrees
  iq_t good, good_win;   // good_win: the value that was in the last window
  int  k = 1000000;             // clocks since the trigger edge
  always @(posedge clk) k <= trig ? 0 : k + 1;
  always @(negedge clk) begin
    real c, s, x, y;
    c = $cos(phi * PI / 180.0); s = $sin(phi * PI / 180.0);
    x = g * (real'(drive.i) * c - real'(drive.q) * s);
    y = g * (real'(drive.i) * s + real'(drive.q) * c);
    good.i = 16'($rtoi(x)); good.q = 16'($rtoi(y));
    for (int ch = 0; ch < NUM_CH; ch++) begin
      iq_in[ch].i = 16'($urandom_range(0, 60000) - 30000);
      iq_in[ch].q = 16'($urandom_range(0, 60000) - 30000);
    end
    if (k >= int'(cfg.win_start) + 1 && k <= int'(cfg.win_start) + (1 << cfg.win_log2))
      begin iq_in[cfg.channel[1:0]] = good; good_win = good; end
  end

  int upd_cyc = 0, cyc = 0, win_end_cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (update_done) upd_cyc <= cyc;
  end

  function automatic real wrap180(input real a);
    while (a >= 180.0) a -= 360.0;
    while (a < -180.0) a += 360.0;
    return a;
  endfunction
  function automatic real ph_deg(input logic [15:0] p);
    return real'($signed(p)) * 360.0 / 65536.0;
  endfunction
  function automatic real absr(input real a); return a < 0 ? -a : a; endfunction

  task automatic pulse();
    @(negedge clk) trig = 1;
    @(negedge clk) trig = 0;
    win_end_cyc = cyc + int'(cfg.win_start) + (1 << cfg.win_log2);
    @(posedge update_done);
    repeat (2) @(negedge clk);
  endtask

  task automatic check_measurement(input string tag);
    real x, y, amp_e, ph_e;
    x = real'(good_win.i); y = real'(good_win.q);
    amp_e = $sqrt(x * x + y * y);
    ph_e  = $atan2(y, x) * 180.0 / PI;
    check(absr(real'(meas_amp) - amp_e) <= 4.0,
          $sformatf("%s: measured amplitude %0d, expected %f", tag, meas_amp, amp_e));
    check(absr(wrap180(ph_deg(meas_phase) - ph_e)) <= 0.05,
          $sformatf("%s: measured phase %f, expected %f", tag, ph_deg(meas_phase), ph_e));
  endtask

  initial begin
    #4000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real a_exp, p_exp;
    cfg = '0;
    cfg.channel   = 4'd1;
    cfg.win_start = 16'd20;
    cfg.win_log2  = 4'd5;
    cfg.amp.upper = 16'd32767;
    cfg.amp.lower = 16'd0;
    cfg.phase.upper = 16'h7FFF;
    cfg.phase.lower = 16'h8000;
    cfg.ff_amp    = 16'd20000;
    cfg.ff_phase  = 16'd5461;    // 30 degrees
    repeat (3) @(posedge clk);
    rst_n = 1;
    // Open loop: the drive follows the feed-forward registers without a trigger.
    wait (update_done);
    repeat (2) @(negedge clk);
    a_exp = 20000.0 * $cos(30.0 * PI / 180.0); p_exp = 20000.0 * $sin(30.0 * PI / 180.0);
    check(absr(real'(drive.i) - a_exp) <= 4.0 && absr(real'(drive.q) - p_exp) <= 4.0,
          $sformatf("open-loop drive %0d,%0d expected %f,%f", drive.i, drive.q, a_exp, p_exp));
    check(drive_amp == 20000 && drive_phase == 5461, "open-loop drive amplitude / phase");
    // Measurement with the loop open.
    pulse();
    check_measurement("open loop");
    check(upd_cyc - win_end_cyc <= 2 * (16 + 3) + 6, $sformatf("update latency %0d", upd_cyc - win_end_cyc));
    check(updates == 0, "no closed-loop update while open");
    // Close the loop: cavity amplitude 12000 at -20 degrees.
    cfg.amp.set_value   = 16'd12000;
    cfg.amp.gain        = 16'd256;
    cfg.phase.set_value = 16'($rtoi(-20.0 * 65536.0 / 360.0));
    cfg.phase.gain      = 16'd192;
    cfg.enable          = 1'b1;
    for (int p = 0; p < 25; p++) begin
      pulse();
      check_measurement($sformatf("closed loop pulse %0d", p));
    end
    check(absr(real'(meas_amp) - 12000.0) <= 8.0, $sformatf("amplitude converged: %0d", meas_amp));
    check(absr(wrap180(ph_deg(meas_phase) + 20.0)) <= 0.1, $sformatf("phase converged: %f", ph_deg(meas_phase)));
    check(absr(real'(drive_amp) - 24000.0) <= 20.0, $sformatf("drive amplitude %0d near 24000", drive_amp));
    check(!amp_clamped && !phase_clamped, "no clamp inside the limits");
    check(updates == 25, $sformatf("25 closed-loop updates, got %0d", updates));
    // Limits: upper amplitude 15000 and phase window -70..-65 degrees.
    cfg.amp.upper   = 16'd15000;
    cfg.phase.upper = 16'($rtoi(-65.0 * 65536.0 / 360.0));
    cfg.phase.lower = 16'($rtoi(-70.0 * 65536.0 / 360.0));
    for (int p = 0; p < 4; p++) pulse();
    check(drive_amp == 16'd15000 && amp_clamped, $sformatf("amplitude held at upper limit: %0d", drive_amp));
    check(drive_phase == cfg.phase.upper && phase_clamped, "phase held at upper limit");
    // Plant phase moves: the drive phase must now go below the lower limit and stop there.
    phi = 80.0;
    for (int p = 0; p < 4; p++) pulse();
    check(drive_phase == cfg.phase.lower && phase_clamped, "phase held at lower limit");
    cfg.amp.lower = 16'd15000;
    g = 0.9;
    for (int p = 0; p < 3; p++) pulse();
    check(drive_amp == 16'd15000 && amp_clamped, "amplitude held at lower limit");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
