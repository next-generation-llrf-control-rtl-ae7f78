// cordic: iterative CORDIC converting between I/Q and amplitude/phase, one micro-rotation
// per clock.
//
// vector = 1 (rectangular to polar): takes x_in = I and y_in = Q, rotates the vector onto
// the positive x axis and returns amp = |I + jQ| and phase = atan2(Q, I). vector = 0 (polar
// to rectangular): takes amp_in and phase_in and returns x_out = amp*cos(phase) and
// y_out = amp*sin(phase). A first step rotates by 180 degrees when the vector (or the angle)
// lies in the left half plane; ITER micro-rotations follow; the CORDIC gain of 1.6468 is
// removed by a multiplication with 0.60725 (39797/65536), in vectoring mode after the
// iterations and in rotation mode before them. Angles are 16-bit binary angles
// (65536 = 360 degrees); internally they carry four more fraction bits, and x/y carry
// GUARD fraction bits. The arctangent table entries are round(atan(2**-i) * 2**20 / (2*pi)).
// Handshake: pulse start for one clock with the inputs valid; done pulses for one clock
// ITER+3 clocks later with the outputs valid, and the outputs hold until the next start.
// A start while busy is ignored. The paper does not describe any of this; the feedback
// controller uses it to turn measured I/Q into amplitude and phase and back.
module cordic #(
  parameter int unsigned ITER  = 16,
  parameter int unsigned GUARD = 3
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic               vector,
  input  logic signed [15:0] x_in,
  input  logic signed [15:0] y_in,
  input  logic [15:0]        amp_in,
  input  logic [15:0]        phase_in,
  output logic               busy,
  output logic               done,
  output logic [15:0]        amp,
  output logic [15:0]        phase,
  output logic signed [15:0] x_out,
  output logic signed [15:0] y_out
);

  localparam int unsigned W  = 16 + GUARD + 3;   // sign, 16 bits, growth of 1.65*sqrt(2), guard
  localparam int unsigned ZW = 20;               // angle, 2**20 = 360 degrees
  localparam logic [15:0] K_Q16 = 16'd39797;     // 0.60725 in Q0.16

  function automatic logic [ZW-1:0] atan_tab(input int i);
    case (i)
      0: return 20'd131072;  1: return 20'd77376;  2: return 20'd40884;  3: return 20'd20753;
      4: return 20'd10417;   5: return 20'd5213;   6: return 20'd2607;   7: return 20'd1304;
      8: return 20'd652;     9: return 20'd326;    10: return 20'd163;   11: return 20'd81;
      12: return 20'd41;     13: return 20'd20;    14: return 20'd10;    15: return 20'd5;
      16: return 20'd3;      17: return 20'd1;
      default: return 20'd0;
    endcase
  endfunction

  typedef enum logic [1:0] {C_IDLE, C_ITER, C_SCALE, C_DONE} cstate_t;
  cstate_t state;

  logic signed [W-1:0]  x, y;
  logic signed [ZW-1:0] z;
  logic                 mode_vec;
  logic [$clog2(ITER+1)-1:0] k;

  // Scaling by K: 18-bit product rounded back.
  function automatic logic signed [W-1:0] scale_k(input logic signed [W-1:0] v);
    logic signed [W+17:0] p;
    p = v * $signed({1'b0, K_Q16});
    return W'((p + (W+18)'(32768)) >>> 16);
  endfunction

  function automatic logic signed [15:0] sat16(input logic signed [W-1:0] v);
    logic signed [W-1:0] r;
    r = (v + W'(1 << (GUARD-1))) >>> GUARD;
    if (r > 32767)       return 16'sd32767;
    else if (r < -32768) return -16'sd32768;
    else                 return r[15:0];
  endfunction

  logic signed [W-1:0] x_ext, y_ext, a_ext;
  assign x_ext = W'(x_in) <<< GUARD;
  assign y_ext = W'(y_in) <<< GUARD;
  assign a_ext = W'({1'b0, amp_in}) <<< GUARD;

  logic d_neg;  // direction of the current micro-rotation
  always_comb begin
    if (mode_vec) d_neg = !y[W-1];   // drive y towards zero
    else          d_neg = z[ZW-1];   // drive z towards zero
  end

  assign busy = (state != C_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= C_IDLE;
      done     <= 1'b0;
      x        <= '0;
      y        <= '0;
      z        <= '0;
      k        <= '0;
      mode_vec <= 1'b0;
      amp      <= '0;
      phase    <= '0;
      x_out    <= '0;
      y_out    <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        C_IDLE: if (start) begin
          mode_vec <= vector;
          k        <= '0;
          state    <= C_ITER;
          if (vector) begin
            // Left half plane: rotate by 180 degrees first.
            if (x_in < 0) begin x <= -x_ext; y <= -y_ext; z <= ZW'(1 << (ZW-1)); end
            else          begin x <=  x_ext; y <=  y_ext; z <= '0;               end
          end else begin
            logic signed [ZW-1:0] zin;
            zin = {phase_in, 4'b0};
            x   <= scale_k(a_ext);
            y   <= '0;
            // Angles beyond +-90 degrees: start from the negative x axis.
            if (zin[ZW-1] != zin[ZW-2]) begin x <= -scale_k(a_ext); z <= zin + ZW'(1 << (ZW-1)); end
            else                        z <= zin;
          end
        end
        C_ITER: begin
          if (d_neg) begin
            x <= x + (y >>> k);
            y <= y - (x >>> k);
            z <= z + $signed(atan_tab(int'(k)));
          end else begin
            x <= x - (y >>> k);
            y <= y + (x >>> k);
            z <= z - $signed(atan_tab(int'(k)));
          end
          if (k == ($clog2(ITER+1))'(ITER - 1)) state <= C_SCALE;
          k <= k + 1;
        end
        C_SCALE: begin
          if (mode_vec) begin
            logic signed [W-1:0] m;
            m     = scale_k(x);
            amp   <= 16'(sat16(m));
            phase <= 16'((z + ZW'(8)) >>> 4);
          end else begin
            x_out <= sat16(x);
            y_out <= sat16(y);
          end
          state <= C_DONE;
        end
        C_DONE: begin
          done  <= 1'b1;
          state <= C_IDLE;
        end
        default: state <= C_IDLE;
      endcase
    end
  end

endmodule
