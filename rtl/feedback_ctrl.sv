// feedback_ctrl: pulse-to-pulse amplitude and phase feedback of the RF drive.
//
// After each trigger the controller averages the I/Q of one input channel (cfg.channel) over
// a flat-top window of 2**cfg.win_log2 samples that starts cfg.win_start samples after the
// trigger, and converts the average to amplitude and phase with a CORDIC (meas_amp,
// meas_phase). With the loop enabled it then corrects the drive:
//     drive_amp   <- clamp(drive_amp   + (amp.gain   * (amp.set_value   - meas_amp))   >>> 8, amp.lower,   amp.upper)
//     drive_phase <- clamp(drive_phase + (phase.gain * (phase.set_value - meas_phase)) >>> 8, phase.lower, phase.upper)
// where the phase error is taken modulo 360 degrees (signed 16 bit), the phase limits are
// signed and the gains are Q8.8 (256 = 1.0). The new drive amplitude and phase go through
// the CORDIC once more to give the drive I/Q (Q1.15) that the pulse modulator uses for the
// next pulse. With the loop disabled the drive follows the feed-forward registers (ff_amp,
// ff_phase) whenever they differ from it, trigger or not. amp_clamped / phase_clamped tell
// whether the last update hit a limit; updates counts the closed-loop updates.
// Timing: the update completes 2*(ITER+3)+3 clocks after the end of the window, far inside
// the 16.7 ms or more between pulses. A trigger while waiting for or inside the window
// restarts the measurement; one during the conversions is ignored.
// From the paper: the block takes I/Q of the cavity signals and computes new I/Q from the
// user parameters phase set and amplitude set, each with set value, correction gain, upper
// and lower limit. The paper states that the feedback algorithm itself is still being
// developed, so the averaging, the integral pulse-to-pulse law and all formats here are
// this design's own, the simplest controller that uses exactly those parameters.
module feedback_ctrl
  import llrf_pkg::*;
#(
  parameter int unsigned NUM_CH = 3
) (
  input  logic        clk,
  input  logic        rst_n,
  input  fb_cfg_t     cfg,
  input  logic        trig,
  input  iq_t         iq_in [NUM_CH],
  output iq_t         drive,
  output logic [15:0] drive_amp,
  output logic [15:0] drive_phase,
  output logic [15:0] meas_amp,
  output logic [15:0] meas_phase,
  output logic        amp_clamped,
  output logic        phase_clamped,
  output logic        update_done,    // one-clock pulse when a new drive is in place
  output logic [15:0] updates
);

  typedef enum logic [2:0] {F_IDLE, F_WAIT, F_ACC, F_VEC, F_CALC, F_ROT} fstate_t;
  fstate_t state;

  localparam int unsigned ACC_W = 16 + 15 + 1;

  logic [15:0]             cnt;
  logic signed [ACC_W-1:0] acc_i, acc_q;
  iq_t                     sel;
  logic                    c_start, c_vec, c_done;
  logic signed [15:0]      c_x, c_y, c_xo, c_yo;
  logic [15:0]             c_amp_in, c_ph_in, c_amp, c_ph;
  logic [15:0]             tgt_amp, tgt_ph;

  always_comb begin
    sel = '0;
    for (int c = 0; c < NUM_CH; c++)
      if (cfg.channel == 4'(c)) sel = iq_in[c];
  end

  cordic u_cordic (
    .clk, .rst_n,
    .start(c_start), .vector(c_vec),
    .x_in(c_x), .y_in(c_y), .amp_in(c_amp_in), .phase_in(c_ph_in),
    .busy(), .done(c_done),
    .amp(c_amp), .phase(c_ph), .x_out(c_xo), .y_out(c_yo)
  );

  // Averages of the window: arithmetic shift by win_log2.
  logic signed [ACC_W-1:0] avg_i, avg_q;
  assign avg_i = acc_i >>> cfg.win_log2;
  assign avg_q = acc_q >>> cfg.win_log2;

  // Correction law.
  logic signed [16:0] err_a;
  logic signed [15:0] err_p;
  logic signed [33:0] corr_a, corr_p;
  logic signed [34:0] new_a, new_p;
  logic [15:0]        next_amp, next_ph;
  logic               clamp_a, clamp_p;

  always_comb begin
    err_a  = $signed({1'b0, cfg.amp.set_value}) - $signed({1'b0, meas_amp});
    err_p  = $signed(cfg.phase.set_value - meas_phase);           // wraps modulo 360 degrees
    corr_a = (34'(err_a) * $signed({1'b0, cfg.amp.gain})) >>> GAIN_FRAC;
    corr_p = (34'(err_p) * $signed({1'b0, cfg.phase.gain})) >>> GAIN_FRAC;
    new_a  = 35'($signed({1'b0, drive_amp})) + 35'(corr_a);
    new_p  = 35'($signed(drive_phase)) + 35'(corr_p);
    clamp_a = 1'b0;
    clamp_p = 1'b0;
    if (new_a > 35'($signed({1'b0, cfg.amp.upper}))) begin
      next_amp = cfg.amp.upper; clamp_a = 1'b1;
    end else if (new_a < 35'($signed({1'b0, cfg.amp.lower}))) begin
      next_amp = cfg.amp.lower; clamp_a = 1'b1;
    end else begin
      next_amp = new_a[15:0];
    end
    if (new_p > 35'($signed(cfg.phase.upper))) begin
      next_ph = cfg.phase.upper; clamp_p = 1'b1;
    end else if (new_p < 35'($signed(cfg.phase.lower))) begin
      next_ph = cfg.phase.lower; clamp_p = 1'b1;
    end else begin
      next_ph = new_p[15:0];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state         <= F_IDLE;
      cnt           <= '0;
      acc_i         <= '0;
      acc_q         <= '0;
      c_start       <= 1'b0;
      c_vec         <= 1'b0;
      c_x           <= '0;
      c_y           <= '0;
      c_amp_in      <= '0;
      c_ph_in       <= '0;
      tgt_amp       <= '0;
      tgt_ph        <= '0;
      drive         <= '0;
      drive_amp     <= '0;
      drive_phase   <= '0;
      meas_amp      <= '0;
      meas_phase    <= '0;
      amp_clamped   <= 1'b0;
      phase_clamped <= 1'b0;
      update_done   <= 1'b0;
      updates       <= '0;
    end else begin
      c_start     <= 1'b0;
      update_done <= 1'b0;
      if (trig && state inside {F_IDLE, F_WAIT, F_ACC}) begin
        state <= F_WAIT;
        cnt   <= '0;
        acc_i <= '0;
        acc_q <= '0;
      end else begin
        unique case (state)
          F_IDLE: begin
            if (!cfg.enable && (drive_amp != cfg.ff_amp || drive_phase != cfg.ff_phase)) begin
              tgt_amp  <= cfg.ff_amp;
              tgt_ph   <= cfg.ff_phase;
              c_amp_in <= cfg.ff_amp;
              c_ph_in  <= cfg.ff_phase;
              c_vec    <= 1'b0;
              c_start  <= 1'b1;
              state    <= F_ROT;
            end
          end
          F_WAIT: begin
            if (cnt == cfg.win_start) begin
              cnt   <= '0;
              state <= F_ACC;
            end else begin
              cnt <= cnt + 1;
            end
          end
          F_ACC: begin
            acc_i <= acc_i + ACC_W'(sel.i);
            acc_q <= acc_q + ACC_W'(sel.q);
            cnt   <= cnt + 1;
            if (cnt == 16'((1 << cfg.win_log2) - 1)) state <= F_VEC;
          end
          F_VEC: begin
            // Start the rectangular-to-polar conversion once, then wait for it.
            if (!c_start && !c_vec) begin
              c_x     <= 16'(avg_i);
              c_y     <= 16'(avg_q);
              c_vec   <= 1'b1;
              c_start <= 1'b1;
            end else if (c_done) begin
              meas_amp   <= c_amp;
              meas_phase <= c_ph;
              c_vec      <= 1'b0;
              state      <= F_CALC;
            end
          end
          F_CALC: begin
            if (cfg.enable) begin
              tgt_amp       <= next_amp;
              tgt_ph        <= next_ph;
              c_amp_in      <= next_amp;
              c_ph_in       <= next_ph;
              amp_clamped   <= clamp_a;
              phase_clamped <= clamp_p;
              updates       <= updates + 1;
            end else begin
              tgt_amp  <= cfg.ff_amp;
              tgt_ph   <= cfg.ff_phase;
              c_amp_in <= cfg.ff_amp;
              c_ph_in  <= cfg.ff_phase;
            end
            c_vec   <= 1'b0;
            c_start <= 1'b1;
            state   <= F_ROT;
          end
          F_ROT: begin
            if (c_done) begin
              drive.i     <= c_xo;
              drive.q     <= c_yo;
              drive_amp   <= tgt_amp;
              drive_phase <= tgt_ph;
              update_done <= 1'b1;
              state       <= F_IDLE;
            end
          end
          default: state <= F_IDLE;
        endcase
      end
    end
  end

endmodule
