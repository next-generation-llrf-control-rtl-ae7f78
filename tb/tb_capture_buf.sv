// tb_capture_buf: self-checking test of the I/Q capture buffers.
//
// Feeds every channel a counter-based pattern that tells channel and time apart, triggers
// a capture, reads every sample of every channel back and checks that sample n of each
// channel is the input present n+1 clocks after the trigger. Also checks the done flag and
// its timing (DEPTH+1 clocks after the trigger), the pulse tag, that a second trigger
// records a second pulse over the first, that a trigger during a capture restarts it, and
// that a channel number at or above NUM_CH reads zero.
module tb_capture_buf;
  import llrf_pkg::*;

  localparam int unsigned NUM_CH = 3, DEPTH = 64;

  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;

  logic        trig = 0;
  logic [31:0] trig_count = 0;
  iq_t         iq_in [NUM_CH];
  logic        done, busy;
  logic [30:0] tag;
  logic        rd_en = 0;
  logic [1:0]  rd_ch = 0;
  logic [5:0]  rd_idx = 0;
  logic [31:0] rd_data;

  capture_buf #(.NUM_CH(NUM_CH), .DEPTH(DEPTH)) dut (.*);

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  function automatic iq_t pattern(input int c, input int t);
    iq_t v;
    v.i = 16'(t * 3 + c * 1000);
    v.q = 16'(-(t * 5) - c * 77);
    return v;
  endfunction
  always_comb for (int c = 0; c < NUM_CH; c++) iq_in[c] = pattern(c, cyc);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic fire(input int count, output int tcyc);
    @(negedge clk);
    trig = 1; trig_count = count; tcyc = cyc;
    @(negedge clk);
    trig = 0;
  endtask

  task automatic read_all(input int tcyc);
    for (int c = 0; c < 4; c++)
      for (int n = 0; n < DEPTH; n++) begin
        @(negedge clk);
        rd_en = 1; rd_ch = 2'(c); rd_idx = 6'(n);
        @(negedge clk);
        rd_en = 0;
        if (c < NUM_CH) check(rd_data == pattern(c, tcyc + 1 + n), $sformatf("ch %0d sample %0d", c, n));
        else            check(rd_data == 0, "channel beyond NUM_CH reads zero");
      end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, t1, tdone;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);
    check(!done && !busy, "idle after reset");
    fire(7, t0);
    while (!done) @(posedge clk);
    tdone = cyc;
    check(tdone - t0 == DEPTH + 1, $sformatf("done %0d clocks after trigger", tdone - t0));
    check(tag == 7, "pulse tag");
    read_all(t0);
    // Second pulse, restarted once in the middle.
    fire(8, t1);
    repeat (20) @(posedge clk);
    check(busy && !done, "busy while capturing");
    fire(9, t1);
    while (!done) @(posedge clk);
    check(tag == 9, "tag of restarted capture");
    read_all(t1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
