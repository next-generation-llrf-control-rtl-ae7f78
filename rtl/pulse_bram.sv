// pulse_bram: block RAM holding the user-defined baseband pulse waveform as I/Q pairs.
//
// The processor loads the waveform over its own AXI4-Lite link (port A); the pulse
// modulator plays it back (port B). Each 32-bit word is one sample, I in bits 15:0 and Q in
// bits 31:16, at byte address 4*sample on port A. Port A writes honour the byte strobes and
// reads return data one clock after a_re, which matches the register bus of axil_slave.
// Port B is read-only with a registered output: b_data is valid one clock after b_en.
// Both ports share one clock. The paper draws this memory as a BRAM between the processor
// and the modulator; its depth, the word layout and the one-clock read latency are this
// design's own choices (1024 samples = 4.17 us at 245.76 MS/s, over four times the longest
// pulse the paper uses).
module pulse_bram
  import llrf_pkg::*;
#(
  parameter int unsigned DEPTH = 1024
) (
  input  logic                     clk,
  // port A: processor
  input  logic                     a_we,
  input  logic                     a_re,
  input  logic [AXI_AW-1:0]        a_addr,
  input  logic [AXI_DW-1:0]        a_wdata,
  input  logic [AXI_DW/8-1:0]      a_wstrb,
  output logic [AXI_DW-1:0]        a_rdata,
  // port B: playback
  input  logic                     b_en,
  input  logic [$clog2(DEPTH)-1:0] b_addr,
  output iq_t                      b_data
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [31:0] mem [DEPTH];
  logic [AW-1:0] a_idx;
  assign a_idx = a_addr[AW+1:2];

  always_ff @(posedge clk) begin
    if (a_we) begin
      for (int b = 0; b < 4; b++)
        if (a_wstrb[b]) mem[a_idx][8*b +: 8] <= a_wdata[8*b +: 8];
    end
    if (a_re) a_rdata <= mem[a_idx];
  end

  always_ff @(posedge clk) begin
    if (b_en) b_data <= mem[b_addr];
  end

endmodule
