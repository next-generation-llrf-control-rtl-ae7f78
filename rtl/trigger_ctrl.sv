// trigger_ctrl: pulse trigger for the LLRF, from an external TTL input or generated here.
//
// Pulse generation and data capture both start on one trigger. Normally it comes from an
// external TTL source through the trigger board; the platform can also be the master and
// send triggers out through the same board. Slave mode: ext_trig is asynchronous, so it is
// brought into the clock domain with a two-flop synchroniser and its rising edge gives a
// one-clock trig pulse (three clocks after the edge reaches the input). Master mode
// (master = 1): a counter fires trig every `period` clocks (period = 4,096,000 gives the
// paper's 60 Hz at 245.76 MHz) and the external input is ignored. soft_trig fires trig at
// once in either mode. Every trig is stretched to OUT_WIDTH clocks on all NUM_OUT trigger
// outputs towards the trigger board (a TTL receiver needs a pulse wider than one clock of
// 4 ns), and counted in pulse_count.
// From the paper: external TTL triggering and the option to act as master trigger source
// with several trigger outputs. This design's own: synchroniser, edge detection, period
// counter, output width and the number of outputs.
module trigger_ctrl #(
  parameter int unsigned NUM_OUT   = 2,
  parameter int unsigned OUT_WIDTH = 64
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               ext_trig,     // asynchronous TTL input
  input  logic               master,
  input  logic [31:0]        period,
  input  logic               soft_trig,
  output logic               trig,         // one-clock pulse
  output logic [NUM_OUT-1:0] trig_out,
  output logic [31:0]        pulse_count
);

  logic [2:0]  sync_q;        // [1:0] synchroniser, [2] previous synchronised level
  logic [31:0] period_cnt;
  logic [$clog2(OUT_WIDTH+1)-1:0] width_cnt;
  logic        ext_edge, master_fire;

  assign ext_edge    = sync_q[1] && !sync_q[2];
  assign master_fire = master && (period != 0) && (period_cnt >= period - 1);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sync_q      <= '0;
      period_cnt  <= '0;
      trig        <= 1'b0;
      width_cnt   <= '0;
      pulse_count <= '0;
    end else begin
      sync_q <= {sync_q[1], sync_q[0], ext_trig};
      if (!master || master_fire) period_cnt <= '0;
      else                        period_cnt <= period_cnt + 1;
      trig <= soft_trig || (master ? master_fire : ext_edge);
      if (trig) begin
        width_cnt   <= ($clog2(OUT_WIDTH+1))'(OUT_WIDTH);
        pulse_count <= pulse_count + 1;
      end else if (width_cnt != 0) begin
        width_cnt <= width_cnt - 1;
      end
    end
  end

  assign trig_out = {NUM_OUT{width_cnt != 0}};

endmodule
