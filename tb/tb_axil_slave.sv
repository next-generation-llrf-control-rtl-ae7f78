// tb_axil_slave: self-checking test of the AXI4-Lite slave front end.
//
// A 16-word memory with a one-clock registered read stands behind the register bus. The
// test writes with address first, data first and both together, with partial byte strobes,
// reads everything back through the slave and compares with a copy kept in the testbench.
// It checks that each write gives exactly one bus_we strobe, that the read data arrives
// two clocks after the AR handshake and that a held-off bready / rready keeps the response.
module tb_axil_slave;
  import llrf_pkg::*;

  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;

  axil_req_t req;
  axil_rsp_t rsp;
  logic                bus_we, bus_re;
  logic [AXI_AW-1:0]   bus_addr;
  logic [AXI_DW-1:0]   bus_wdata, bus_rdata;
  logic [AXI_DW/8-1:0] bus_wstrb;

  axil_slave dut (.clk, .rst_n, .s_req(req), .s_rsp(rsp),
                  .bus_we, .bus_re, .bus_addr, .bus_wdata, .bus_wstrb, .bus_rdata);

  logic [31:0] mem [16];
  logic [31:0] model [16];
  int we_count = 0;
  always_ff @(posedge clk) begin
    if (bus_we) begin
      we_count <= we_count + 1;
      for (int b = 0; b < 4; b++) if (bus_wstrb[b]) mem[bus_addr[5:2]][8*b +: 8] <= bus_wdata[8*b +: 8];
    end
    if (bus_re) bus_rdata <= mem[bus_addr[5:2]];
  end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // order: 0 = together, 1 = address first, 2 = data first
  task automatic axi_write(input logic [AXI_AW-1:0] a, input logic [31:0] d,
                           input logic [3:0] s, input int order, input int bdelay);
    int we_before = we_count;
    bit aw_done = 0, w_done = 0, aw_hs, w_hs;
    @(negedge clk);
    if (order != 2) begin req.awaddr = a; req.awvalid = 1; end
    if (order != 1) begin req.wdata = d; req.wstrb = s; req.wvalid = 1; end
    while (!(aw_done && w_done)) begin
      #1;
      aw_hs = req.awvalid && rsp.awready;
      w_hs  = req.wvalid && rsp.wready;
      @(negedge clk);
      if (aw_hs) begin
        aw_done = 1; req.awvalid = 0;
        if (!w_done && !req.wvalid) begin req.wdata = d; req.wstrb = s; req.wvalid = 1; end
      end
      if (w_hs) begin
        w_done = 1; req.wvalid = 0;
        if (!aw_done && !req.awvalid) begin req.awaddr = a; req.awvalid = 1; end
      end
    end
    req.bready = 0;
    while (!rsp.bvalid) @(negedge clk);
    repeat (bdelay) begin @(negedge clk); check(rsp.bvalid, "bvalid held while bready low"); end
    req.bready = 1;
    @(negedge clk);
    req.bready = 0;
    check(we_count == we_before + 1, "one bus_we per write");
    for (int b = 0; b < 4; b++) if (s[b]) model[a[5:2]][8*b +: 8] = d[8*b +: 8];
  endtask

  task automatic axi_read(input logic [AXI_AW-1:0] a, output logic [31:0] d, input int rdelay);
    int cyc = 0;
    @(negedge clk);
    req.araddr = a; req.arvalid = 1;
    forever begin
      #1;
      if (rsp.arready) break;
      @(negedge clk);
    end
    @(negedge clk);
    req.arvalid = 0;
    while (!rsp.rvalid) begin @(negedge clk); cyc++; end
    check(cyc == 2, $sformatf("read data two clocks after AR handshake (got %0d)", cyc + 1));
    repeat (rdelay) begin @(negedge clk); check(rsp.rvalid, "rvalid held while rready low"); end
    d = rsp.rdata;
    req.rready = 1;
    @(negedge clk);
    req.rready = 0;
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    req = '0;
    for (int i = 0; i < 16; i++) begin mem[i] = 0; model[i] = 0; end
    repeat (4) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 16; i++) axi_write(AXI_AW'(4*i), $urandom, 4'hF, i % 3, i % 2);
    for (int i = 0; i < 16; i++) axi_write(AXI_AW'(4*i), $urandom, 4'(1 << (i % 4)) | 4'(i % 3), i % 3, 0);
    for (int i = 0; i < 16; i++) begin
      axi_read(AXI_AW'(4*i), d, i % 3);
      check(d == model[i], $sformatf("read word %0d: %h expected %h", i, d, model[i]));
    end
    check(rsp.bresp == 2'b00 && rsp.rresp == 2'b00, "OKAY responses");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
