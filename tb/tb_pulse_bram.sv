// tb_pulse_bram: self-checking test of the pulse waveform memory.
//
// Loads random I/Q words through port A (the processor side), rewrites some with partial
// byte strobes, then reads every word back on port A and plays it out on port B, checking
// both against a model and checking the one-clock read latency of port B.
module tb_pulse_bram;
  import llrf_pkg::*;

  localparam int unsigned DEPTH = 256;

  logic clk = 0;
  always #2 clk = ~clk;

  logic                a_we = 0, a_re = 0;
  logic [AXI_AW-1:0]   a_addr = '0;
  logic [AXI_DW-1:0]   a_wdata = '0, a_rdata;
  logic [AXI_DW/8-1:0] a_wstrb = '0;
  logic                b_en = 0;
  logic [7:0]          b_addr = '0;
  iq_t                 b_data;

  pulse_bram #(.DEPTH(DEPTH)) dut (.*);

  logic [31:0] model [DEPTH];
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < DEPTH; i++) begin
      model[i] = $urandom;
      @(negedge clk);
      a_we = 1; a_addr = AXI_AW'(4 * i); a_wdata = model[i]; a_wstrb = 4'hF;
    end
    for (int i = 0; i < DEPTH; i += 7) begin
      automatic logic [31:0] d = $urandom;
      automatic logic [3:0]  s = 4'(i);
      @(negedge clk);
      a_addr = AXI_AW'(4 * i); a_wdata = d; a_wstrb = s;
      for (int b = 0; b < 4; b++) if (s[b]) model[i][8*b +: 8] = d[8*b +: 8];
    end
    @(negedge clk);
    a_we = 0;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      a_re = 1; a_addr = AXI_AW'(4 * i);
      @(negedge clk);
      a_re = 0;
      check(a_rdata == model[i], $sformatf("port A word %0d", i));
    end
    // Port B streaming: address each clock, data one clock later.
    for (int i = 0; i <= DEPTH; i++) begin
      @(negedge clk);
      if (i > 0) check(b_data == model[i-1], $sformatf("port B word %0d", i - 1));
      b_en = (i < DEPTH); b_addr = 8'(i);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
