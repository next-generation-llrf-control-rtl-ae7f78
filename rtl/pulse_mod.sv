// pulse_mod: pulse waveform modulation, the last fabric stage before the DAC path.
//
// On trig the modulator plays the user waveform from the pulse BRAM, samples 0 to
// pulse_len-1, one per clock, and multiplies each waveform sample by the drive I/Q from the
// feedback controller as complex numbers:
//     out.i = (w.i*d.i - w.q*d.q) / 2**15,   out.q = (w.i*d.q + w.q*d.i) / 2**15
// rounded to nearest and saturated to 16 bits. The drive is Q1.15, so a drive of
// (32767, 0) passes the waveform through (scaled by 32767/32768) and any other drive
// scales and rotates it. The drive is sampled at trig and held for the whole pulse, so a
// feedback update never lands in the middle of a pulse. Outside the pulse the output is
// zero. rf_on is high while the output carries the pulse.
// Timing: BRAM address 0 is issued in the clock after trig; the first output sample
// appears 3 clocks after trig (one clock to issue the address, one for the BRAM
// read, one for the registered product). pulse_len = 0 plays nothing; lengths beyond the
// BRAM depth wrap around it. A trigger during a pulse restarts it.
// From the paper: the updated I/Q of the feedback block is modulated with the user-defined
// baseband pulse stored in BRAM. The complex product, the Q1.15 drive format and the
// pipelining are this design's own.
module pulse_mod
  import llrf_pkg::*;
#(
  parameter int unsigned DEPTH = 1024
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     trig,
  input  logic [15:0]              pulse_len,
  input  iq_t                      drive,
  // waveform BRAM playback port (data one clock after wave_en)
  output logic                     wave_en,
  output logic [$clog2(DEPTH)-1:0] wave_addr,
  input  iq_t                      wave_data,
  // to the interpolator of the DAC path
  output iq_t                      dac_iq,
  output logic                     rf_on
);


  logic [15:0] idx;
  logic        playing, valid_d;
  iq_t         drive_q;

  function automatic sample_t round_sat(input logic signed [32:0] p);
    logic signed [32:0] r;
    r = (p + 33'sd16384) >>> 15;
    if (r > 33'sd32767)       return 16'sd32767;
    else if (r < -33'sd32768) return -16'sd32768;
    else                      return r[15:0];
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      playing <= 1'b0;
      idx     <= '0;
      drive_q <= '0;
      valid_d <= 1'b0;
      dac_iq  <= '0;
      rf_on   <= 1'b0;
    end else begin
      if (trig) begin
        playing <= (pulse_len != 0);
        idx     <= '0;
        drive_q <= drive;
      end else if (playing) begin
        idx <= idx + 1;
        if (idx == pulse_len - 1) playing <= 1'b0;
      end
      valid_d <= playing && !trig;
      if (valid_d) begin
        logic signed [32:0] pi, pq;
        pi = 33'(wave_data.i * drive_q.i) - 33'(wave_data.q * drive_q.q);
        pq = 33'(wave_data.i * drive_q.q) + 33'(wave_data.q * drive_q.i);
        dac_iq.i <= round_sat(pi);
        dac_iq.q <= round_sat(pq);
        rf_on    <= 1'b1;
      end else begin
        dac_iq <= '0;
        rf_on  <= 1'b0;
      end
    end
  end

  assign wave_en   = playing;
  assign wave_addr = idx[$clog2(DEPTH)-1:0];

endmodule
