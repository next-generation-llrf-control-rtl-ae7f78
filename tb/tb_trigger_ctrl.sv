// tb_trigger_ctrl: self-checking test of the trigger block.
//
// Slave mode: applies external TTL pulses of random width at random, clock-unaligned times
// and checks that each rising edge gives exactly one internal trigger, 3 clocks (within one
// clock, as the input is asynchronous) after the edge. Master mode: checks that triggers
// come exactly every `period` clocks and that the external input is then ignored. Also
// checks the soft trigger, the output stretching to OUT_WIDTH clocks on every output and
// the pulse counter.
module tb_trigger_ctrl;

  localparam int unsigned NUM_OUT = 2, OUT_WIDTH = 8;

  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;

  logic               ext_trig = 0, master = 0, soft_trig = 0;
  logic [31:0]        period = 32'd100;
  logic               trig;
  logic [NUM_OUT-1:0] trig_out;
  logic [31:0]        pulse_count;

  trigger_ctrl #(.NUM_OUT(NUM_OUT), .OUT_WIDTH(OUT_WIDTH)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Clock counter and trigger log.
  int cyc = 0, n_trig = 0, last_trig_cyc = -1, out_hi = 0, out_run = 0;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && trig) begin n_trig++; last_trig_cyc = cyc; end
    if (rst_n) begin
      if (trig_out != 0) begin
        out_run++;
        if (trig_out != {NUM_OUT{1'b1}}) out_hi = -1000;  // all outputs must agree
      end else if (out_run != 0) begin
        check(out_run == OUT_WIDTH, $sformatf("output pulse width %0d", out_run));
        out_run = 0;
      end
    end
  end

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int edge_cyc, n_before;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // Slave mode.
    for (int p = 0; p < 20; p++) begin
      repeat (20 + $urandom_range(0, 20)) @(posedge clk);
      #(1 + $urandom_range(0, 2));
      n_before = n_trig;
      ext_trig = 1;
      edge_cyc = cyc;
      repeat ($urandom_range(1, 15)) @(posedge clk);
      #1 ext_trig = 0;
      repeat (6) @(posedge clk);
      check(n_trig == n_before + 1, "one trigger per external edge");
      check(last_trig_cyc - edge_cyc >= 3 && last_trig_cyc - edge_cyc <= 4,
            $sformatf("trigger latency %0d clocks", last_trig_cyc - edge_cyc));
    end
    check(pulse_count == 20, "pulse count after slave mode");
    // Soft trigger.
    @(negedge clk) soft_trig = 1;
    @(negedge clk) soft_trig = 0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    check(n_trig == 21 && last_trig_cyc == cyc - 2, "soft trigger fires on the next clock");
    // Master mode, period 100, external edges ignored.
    repeat (20) @(posedge clk);
    @(negedge clk) master = 1;
    n_before = n_trig;
    begin
      automatic int prev = -1;
      for (int p = 0; p < 10; p++) begin
        automatic int seen = n_trig;
        while (n_trig == seen) begin
          @(posedge clk);
          if (p == 4 && cyc % 37 == 0) ext_trig = ~ext_trig;
        end
        if (prev >= 0) check(last_trig_cyc - prev == 100, $sformatf("master period %0d", last_trig_cyc - prev));
        prev = last_trig_cyc;
      end
    end
    check(n_trig == n_before + 10, "master mode triggers counted");
    check(pulse_count == 31, "pulse count after master mode");
    check(out_hi == 0, "all trigger outputs equal");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
