// tb_cordic: self-checking test of the iterative CORDIC used by the feedback controller.
//
// Vectoring mode: random I/Q pairs of magnitude up to 32767, plus the axes and the four
// diagonals. Amplitude and phase are compared with sqrt and atan2 worked out here in double
// precision: within 3 LSB in amplitude and 0.02 degree in phase. Rotation mode: random
// amplitudes and angles, including +-180 degrees. Each output is compared with amp*cos and
// amp*sin within 3 LSB. For every operation the test also checks the handshake: done
// comes exactly ITER+3 clocks after start, busy is high in between, and a start while busy
// is ignored. Vectors of magnitude above 32767 must saturate the amplitude at 32767.
module tb_cordic;

  localparam int unsigned ITER = 16;
  localparam real PI = 3.14159265358979;

  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;

  logic               start = 0, vector = 0;
  logic signed [15:0] x_in = 0, y_in = 0;
  logic [15:0]        amp_in = 0, phase_in = 0;
  logic               busy, done;
  logic [15:0]        amp, phase;
  logic signed [15:0] x_out, y_out;

  cordic #(.ITER(ITER), .GUARD(3)) dut (.*);

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

  // Start one operation and wait for done. Checks latency and busy. A second start pulse
  // two clocks in must be ignored (the result must still be that of the first).
  task automatic run(input bit vec);
    int n = 0;
    @(negedge clk);
    vector = vec; start = 1;
    @(negedge clk);
    start = 0;
    while (!done) begin
      check(busy, "busy while working");
      if (n == 2) start = 1;
      @(negedge clk);
      start = 0;
      n++;
      if (n > 100) break;
    end
    check(n + 1 == ITER + 3, $sformatf("done %0d clocks after start, expected %0d", n + 1, ITER + 3));
    @(negedge clk);
    check(!done, "done lasts one clock");
  endtask

  task automatic vec_case(input int i, input int q);
    real a_e, p_e, p_g;
    x_in = 16'(i); y_in = 16'(q);
    run(1);
    a_e = $sqrt(real'(i) * real'(i) + real'(q) * real'(q));
    if (a_e > 32767.0) a_e = 32767.0;
    p_e = $atan2(real'(q), real'(i)) * 180.0 / PI;
    p_g = real'($signed(phase)) * 360.0 / 65536.0;
    check(absr(real'(amp) - a_e) <= 3.0, $sformatf("vector (%0d,%0d): amp %0d expected %f", i, q, amp, a_e));
    if (a_e > 1000.0)
      check(absr(wrap180(p_g - p_e)) <= 0.02, $sformatf("vector (%0d,%0d): phase %f expected %f", i, q, p_g, p_e));
  endtask

  task automatic rot_case(input int a, input int p);
    real x_e, y_e, ang;
    amp_in = 16'(a); phase_in = 16'(p);
    run(0);
    ang = real'($signed(16'(p))) * 2.0 * PI / 65536.0;
    x_e = real'(a) * $cos(ang);
    y_e = real'(a) * $sin(ang);
    check(absr(real'(x_out) - x_e) <= 3.0 && absr(real'(y_out) - y_e) <= 3.0,
          $sformatf("rotate %0d at %0d: (%0d,%0d) expected (%f,%f)", a, p, x_out, y_out, x_e, y_e));
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    check(!busy && !done, "idle after reset");
    // Axes and diagonals.
    vec_case(20000, 0);   vec_case(0, 20000);   vec_case(-20000, 0);  vec_case(0, -20000);
    vec_case(15000, 15000); vec_case(-15000, 15000); vec_case(-15000, -15000); vec_case(15000, -15000);
    vec_case(-32768, 1);  vec_case(32767, -1);
    // Random vectors inside the 32767 circle.
    for (int n = 0; n < 200; n++) begin
      automatic int i = $urandom_range(0, 46000) - 23000;
      automatic int q = $urandom_range(0, 46000) - 23000;
      vec_case(i, q);
    end
    // Saturation beyond full scale.
    vec_case(-32768, -32768);
    vec_case(30000, 30000);
    // Rotation: fixed angles and random ones.
    rot_case(32767, 0); rot_case(32767, 16384); rot_case(32767, 32768); rot_case(32767, 49152);
    rot_case(20000, 32767); rot_case(0, 12345);
    for (int n = 0; n < 200; n++) rot_case($urandom_range(0, 32767), $urandom_range(0, 65535));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
