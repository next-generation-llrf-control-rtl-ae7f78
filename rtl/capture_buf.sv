// capture_buf: records the baseband I/Q of every input channel for one pulse, for the
// processor to read out.
//
// On trig, all NUM_CH channels are written side by side, one I/Q pair per channel per clock,
// for DEPTH clocks, starting with the sample present in the clock after trig. The buffer then
// holds still and `done` is set, with `tag` giving the pulse number that was captured (the
// trigger count at trig). A new trigger restarts the capture, also while one is running,
// so that consecutive pulses can be recorded one after the other as the processor reads
// them out between pulses (16.7 ms apart at 60 Hz). Read port: rd_en with channel and sample
// index; rd_data is valid one clock later, with 0 for a channel number at or above NUM_CH.
// Each channel has its own memory so that all can be written in the same clock.
// From the paper: the baseband I/Q of consecutive pulses is captured, in parallel on all
// inputs, on the same trigger as pulse generation. This design's own: depth (1024 samples,
// 4.17 us, more than the 2.0-2.9 us windows plotted in the paper), the restart rule and the
// word layout {Q, I}.
module capture_buf
  import llrf_pkg::*;
#(
  parameter int unsigned NUM_CH = 3,
  parameter int unsigned DEPTH  = 1024
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         trig,
  input  logic [31:0]                  trig_count,
  input  iq_t                          iq_in [NUM_CH],
  output logic                         done,
  output logic [30:0]                  tag,
  output logic                         busy,
  input  logic                         rd_en,
  input  logic [(NUM_CH > 1 ? $clog2(NUM_CH) : 1)-1:0] rd_ch,
  input  logic [$clog2(DEPTH)-1:0]     rd_idx,
  output logic [31:0]                  rd_data
);

  localparam int unsigned AW  = $clog2(DEPTH);

  logic [AW-1:0] wr_idx;
  logic          wr_en;
  logic [31:0]   ch_rdata [NUM_CH];
  logic [(NUM_CH > 1 ? $clog2(NUM_CH) : 1)-1:0] rd_ch_q;

  assign busy = wr_en;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_en  <= 1'b0;
      wr_idx <= '0;
      done   <= 1'b0;
      tag    <= '0;
    end else if (trig) begin
      wr_en  <= 1'b1;
      wr_idx <= '0;
      done   <= 1'b0;
      tag    <= trig_count[30:0];
    end else if (wr_en) begin
      wr_idx <= wr_idx + 1;
      if (wr_idx == AW'(DEPTH - 1)) begin
        wr_en <= 1'b0;
        done  <= 1'b1;
      end
    end
  end

  for (genvar c = 0; c < NUM_CH; c++) begin : g_ch
    logic [31:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (wr_en) mem[wr_idx] <= iq_in[c];
      if (rd_en && rd_ch == c) ch_rdata[c] <= mem[rd_idx];
    end
  end

  always_ff @(posedge clk) if (rd_en) rd_ch_q <= rd_ch;

  always_comb begin
    rd_data = '0;
    for (int c = 0; c < NUM_CH; c++)
      if (32'(rd_ch_q) == c) rd_data = ch_rdata[c];
  end

endmodule
