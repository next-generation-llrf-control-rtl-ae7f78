// axil_slave: AXI4-Lite slave front end that turns bus transactions into single-cycle
// register-bus strobes.
//
// The processor reaches the fabric over AXI4-Lite. This module accepts one write at a time:
// it waits until both the address (AW) and the data (W) beats have arrived, in either order,
// issues a one-cycle bus_we with the address, data and byte strobes, and answers with an OKAY
// write response (B) held until bready. A read accepts the AR beat, issues a one-cycle
// bus_re, takes bus_rdata on the following clock (the register bus has a fixed read latency
// of one clock) and holds it on R until rready. Reads and writes are served one at a time;
// a read that arrives together with a write waits until the write is answered.
// Timing: write strobe one clock after the later of AW/W is accepted, read data valid two
// clocks after AR is accepted. Reset is synchronous and active low.
// The paper names AXI4-Lite as the link for both the loop parameters and the waveform; the
// single-outstanding-transaction scheme and the one-clock register bus are this design's own.
module axil_slave
  import llrf_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  axil_req_t           s_req,
  output axil_rsp_t           s_rsp,
  // register bus
  output logic                bus_we,
  output logic                bus_re,
  output logic [AXI_AW-1:0]   bus_addr,
  output logic [AXI_DW-1:0]   bus_wdata,
  output logic [AXI_DW/8-1:0] bus_wstrb,
  input  logic [AXI_DW-1:0]   bus_rdata
);

  typedef enum logic [2:0] {S_IDLE, S_WRITE, S_BRESP, S_READ, S_RWAIT, S_RRESP} state_t;
  state_t state;

  logic                have_aw, have_w;
  logic [AXI_AW-1:0]   awaddr_q, araddr_q;
  logic [AXI_DW-1:0]   wdata_q, rdata_q;
  logic [AXI_DW/8-1:0] wstrb_q;

  // Accept AW and W independently while idle; AR only when no write is pending.
  assign s_rsp.awready = (state == S_IDLE) && !have_aw;
  assign s_rsp.wready  = (state == S_IDLE) && !have_w;
  assign s_rsp.arready = (state == S_IDLE) && !have_aw && !have_w && !s_req.awvalid && !s_req.wvalid;
  assign s_rsp.bvalid  = (state == S_BRESP);
  assign s_rsp.bresp   = 2'b00;
  assign s_rsp.rvalid  = (state == S_RRESP);
  assign s_rsp.rresp   = 2'b00;
  assign s_rsp.rdata   = rdata_q;

  assign bus_we    = (state == S_WRITE);
  assign bus_re    = (state == S_READ);
  assign bus_addr  = (state == S_READ) ? araddr_q : awaddr_q;
  assign bus_wdata = wdata_q;
  assign bus_wstrb = wstrb_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      have_aw  <= 1'b0;
      have_w   <= 1'b0;
      awaddr_q <= '0;
      araddr_q <= '0;
      wdata_q  <= '0;
      wstrb_q  <= '0;
      rdata_q  <= '0;
    end else begin
      unique case (state)
        S_IDLE: begin
          if (s_req.awvalid && s_rsp.awready) begin
            awaddr_q <= s_req.awaddr;
            have_aw  <= 1'b1;
          end
          if (s_req.wvalid && s_rsp.wready) begin
            wdata_q <= s_req.wdata;
            wstrb_q <= s_req.wstrb;
            have_w  <= 1'b1;
          end
          if ((have_aw || (s_req.awvalid && s_rsp.awready)) &&
              (have_w  || (s_req.wvalid  && s_rsp.wready))) begin
            state <= S_WRITE;
          end else if (s_req.arvalid && s_rsp.arready) begin
            araddr_q <= s_req.araddr;
            state    <= S_READ;
          end
        end
        S_WRITE: begin
          have_aw <= 1'b0;
          have_w  <= 1'b0;
          state   <= S_BRESP;
        end
        S_BRESP: if (s_req.bready) state <= S_IDLE;
        S_READ:  state <= S_RWAIT;
        S_RWAIT: begin
          rdata_q <= bus_rdata;
          state   <= S_RRESP;
        end
        S_RRESP: if (s_req.rready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // AXI rule: a slave holds a valid response, unchanged, until the master takes it.
  a_bvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_rsp.bvalid && !s_req.bready |=> s_rsp.bvalid);
  a_rvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_rsp.rvalid && !s_req.rready |=> s_rsp.rvalid && $stable(s_rsp.rdata));
  a_one_strobe: assert property (@(posedge clk) disable iff (!rst_n) !(bus_we && bus_re));

endmodule
