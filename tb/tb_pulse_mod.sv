// tb_pulse_mod: self-checking test of the pulse waveform modulator.
//
// A waveform memory model (random I/Q, one-clock read latency) stands in for the BRAM.
// For several pulses with random drive I/Q and lengths, every output sample is compared
// with the complex product worked out here in double precision (allowed error: one LSB of
// rounding), and with zero outside the pulse. Checks the 3-clock latency from trigger to
// first sample, the rf_on length, that a drive change during a pulse does not reach the
// output until the next pulse, that pulse_len = 0 plays nothing, and saturation at full
// scale.
module tb_pulse_mod;
  import llrf_pkg::*;

  localparam int unsigned DEPTH = 128;

  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;

  logic        trig = 0;
  logic [15:0] pulse_len = 0;
  iq_t         drive = '0;
  logic        wave_en;
  logic [6:0]  wave_addr;
  iq_t         wave_data;
  iq_t         dac_iq;
  logic        rf_on;

  pulse_mod #(.DEPTH(DEPTH)) dut (.*);

  iq_t wave [DEPTH];
  always_ff @(posedge clk) if (wave_en) wave_data <= wave[wave_addr];

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int expect_part(input iq_t w, input iq_t d, input bit q_part);
    real v;
    v = q_part ? (real'(w.i) * real'(d.q) + real'(w.q) * real'(d.i)) / 32768.0
               : (real'(w.i) * real'(d.i) - real'(w.q) * real'(d.q)) / 32768.0;
    if (v > 32767.0) v = 32767.0;
    if (v < -32768.0) v = -32768.0;
    return $rtoi(v + (v >= 0 ? 0.5 : -0.5));
  endfunction

  function automatic bit close(input int a, input int b);
    return (a - b <= 1) && (b - a <= 1);
  endfunction

  // Run one pulse and check it sample by sample. change_drive alters drive mid-pulse.
  task automatic run_pulse(input int len, input iq_t d, input bit change_drive);
    int on_count = 0;
    @(negedge clk);
    drive = d; pulse_len = 16'(len); trig = 1;
    @(negedge clk);
    trig = 0;
    // After the negedge following trig: 1 clock elapsed. Output appears at clock 3.
    for (int t = 1; t < len + 8; t++) begin
      if (change_drive && t == 5) drive = ~d;
      if (t >= 3 && t < 3 + len) begin
        iq_t w = wave[(t - 3) % DEPTH];
        check(rf_on, $sformatf("rf_on at clock %0d", t));
        check(close(int'(dac_iq.i), expect_part(w, d, 0)) && close(int'(dac_iq.q), expect_part(w, d, 1)),
              $sformatf("sample %0d: got %0d,%0d expected %0d,%0d", t - 3, dac_iq.i, dac_iq.q,
                        expect_part(w, d, 0), expect_part(w, d, 1)));
      end else begin
        check(!rf_on && dac_iq == '0, $sformatf("quiet output at clock %0d", t));
      end
      if (rf_on) on_count++;
      @(negedge clk);
    end
    check(on_count == len, $sformatf("rf_on for %0d clocks, expected %0d", on_count, len));
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    iq_t d;
    for (int i = 0; i < DEPTH; i++) begin
      wave[i].i = 16'($urandom_range(0, 20000) - 10000);
      wave[i].q = 16'($urandom_range(0, 20000) - 10000);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);
    check(!rf_on && dac_iq == '0, "quiet after reset");
    // Unity drive passes the waveform.
    d.i = 16'sd32767; d.q = 16'sd0;
    run_pulse(60, d, 0);
    for (int p = 0; p < 6; p++) begin
      d.i = 16'($urandom_range(0, 65535));
      d.q = 16'($urandom_range(0, 65535));
      run_pulse($urandom_range(1, DEPTH), d, p == 2);
    end
    // Zero length plays nothing.
    run_pulse(0, d, 0);
    // Saturation: full-scale waveform times (-1 - 1j)-ish drive.
    for (int i = 0; i < 8; i++) begin wave[i].i = 16'sh7FFF; wave[i].q = 16'sh7FFF; end
    d.i = 16'sh7FFF; d.q = 16'sh7FFF;
    run_pulse(8, d, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
