// llrf_regs: register file holding the user parameters of the LLRF loop and giving the
// processor read access to status and to the I/Q capture buffers.
//
// It sits behind an axil_slave on the parameter link. Writes land in one clock; reads
// return data one clock after bus_re, as the register bus requires. The parameters are the
// ones the paper's block diagram lists for the feedback algorithm (phase and amplitude, each
// with a set value, a correction gain, an upper and a lower limit) plus what running the
// platform needs: feedback enable and reference channel, trigger source and period, pulse
// length, flat-top window and open-loop (feed-forward) drive. The register map is in
// llrf_pkg. Addresses at CAP_BASE and above read capture memory: byte offset
// 4*(channel * CAP_DEPTH + sample). Register writes honour the byte strobes.
// Reset values give the paper's 1 us pulse (246 samples at 245.76 MS/s) at 60 Hz
// (4,096,000 clocks); all other reset values, the map and the fields are this design's own.
module llrf_regs
  import llrf_pkg::*;
#(
  parameter int unsigned NUM_CH    = 3,
  parameter int unsigned CAP_DEPTH = 1024
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // register bus
  input  logic                 bus_we,
  input  logic                 bus_re,
  input  logic [AXI_AW-1:0]    bus_addr,
  input  logic [AXI_DW-1:0]    bus_wdata,
  input  logic [AXI_DW/8-1:0]  bus_wstrb,
  output logic [AXI_DW-1:0]    bus_rdata,
  // configuration out
  output fb_cfg_t              fb_cfg,
  output logic                 master_trig,
  output logic                 soft_trig,      // one-clock pulse
  output logic [31:0]          trig_period,
  output logic [15:0]          pulse_len,
  // status in
  input  logic [31:0]          pulse_count,
  input  logic [15:0]          meas_amp,
  input  logic [15:0]          meas_phase,
  input  logic [15:0]          drive_amp,
  input  logic [15:0]          drive_phase,
  input  logic                 cap_done,
  input  logic [30:0]          cap_tag,
  input  logic [15:0]          fb_updates,
  input  logic                 amp_clamped,
  input  logic                 phase_clamped,
  // capture buffer read port (data one clock after cap_rd_en)
  output logic                 cap_rd_en,
  output logic [(NUM_CH > 1 ? $clog2(NUM_CH) : 1)-1:0] cap_rd_ch,
  output logic [$clog2(CAP_DEPTH)-1:0] cap_rd_idx,
  input  logic [31:0]          cap_rd_data
);

  localparam int unsigned CAW = $clog2(CAP_DEPTH);
  localparam int unsigned CHW = (NUM_CH > 1) ? $clog2(NUM_CH) : 1;

  logic [31:0] ctrl_q, period_q, plen_q, wstart_q, wlog2_q;
  logic [31:0] amp_set_q, amp_gain_q, amp_hi_q, amp_lo_q;
  logic [31:0] ph_set_q, ph_gain_q, ph_hi_q, ph_lo_q;
  logic [31:0] ff_amp_q, ff_ph_q;
  logic [31:0] reg_rdata;
  logic        rd_cap_q;

  function automatic logic [31:0] merge(input logic [31:0] old, input logic [31:0] d,
                                        input logic [3:0] strb);
    logic [31:0] r;
    for (int b = 0; b < 4; b++) r[8*b +: 8] = strb[b] ? d[8*b +: 8] : old[8*b +: 8];
    return r;
  endfunction

  logic is_cap;
  assign is_cap = (bus_addr >= CAP_BASE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ctrl_q     <= '0;
      period_q   <= 32'd4_096_000;
      plen_q     <= 32'd246;
      wstart_q   <= 32'd128;
      wlog2_q    <= 32'd6;
      amp_set_q  <= '0;
      amp_gain_q <= 32'd128;
      amp_hi_q   <= 32'd32767;
      amp_lo_q   <= '0;
      ph_set_q   <= '0;
      ph_gain_q  <= 32'd128;
      ph_hi_q    <= 32'h0000_7FFF;
      ph_lo_q    <= 32'h0000_8000;
      ff_amp_q   <= '0;
      ff_ph_q    <= '0;
      soft_trig  <= 1'b0;
    end else begin
      soft_trig <= 1'b0;
      if (bus_we && !is_cap) begin
        unique case (bus_addr)
          REG_CTRL: begin
            ctrl_q    <= merge(ctrl_q, bus_wdata, bus_wstrb) & 32'h0000_00F3;
            soft_trig <= bus_wstrb[0] & bus_wdata[2];
          end
          REG_PERIOD:    period_q   <= merge(period_q,   bus_wdata, bus_wstrb);
          REG_PULSE_LEN: plen_q     <= merge(plen_q,     bus_wdata, bus_wstrb) & 32'h0000_FFFF;
          REG_WIN_START: wstart_q   <= merge(wstart_q,   bus_wdata, bus_wstrb) & 32'h0000_FFFF;
          REG_WIN_LOG2:  wlog2_q    <= merge(wlog2_q,    bus_wdata, bus_wstrb) & 32'h0000_000F;
          REG_AMP_SET:   amp_set_q  <= merge(amp_set_q,  bus_wdata, bus_wstrb) & 32'h0000_FFFF;
          REG_AMP_GAIN:  amp_gain_q <= merge(amp_gain_q, bus_wdata, bus_wstrb) & 32'h0000_FFFF;
          REG_AMP_HI:    amp_hi_q   <= merge(amp_hi_q,   bus_wdata, bus_wstrb) & 32'h0000_FFFF;
          REG_AMP_LO:    amp_lo_q   <= merge(amp_lo_q,   bus_wdata, bus_wstrb) & 32'h0000_FFFF;
          REG_PH_SET:    ph_set_q   <= merge(ph_set_q,   bus_wdata, bus_wstrb) & 32'h0000_FFFF;
          REG_PH_GAIN:   ph_gain_q  <= merge(ph_gain_q,  bus_wdata, bus_wstrb) & 32'h0000_FFFF;
          REG_PH_HI:     ph_hi_q    <= merge(ph_hi_q,    bus_wdata, bus_wstrb) & 32'h0000_FFFF;
          REG_PH_LO:     ph_lo_q    <= merge(ph_lo_q,    bus_wdata, bus_wstrb) & 32'h0000_FFFF;
          REG_FF_AMP:    ff_amp_q   <= merge(ff_amp_q,   bus_wdata, bus_wstrb) & 32'h0000_FFFF;
          REG_FF_PHASE:  ff_ph_q    <= merge(ff_ph_q,    bus_wdata, bus_wstrb) & 32'h0000_FFFF;
          default: ;
        endcase
      end
    end
  end

  // Registered read of the register half of the map.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      reg_rdata <= '0;
      rd_cap_q  <= 1'b0;
    end else if (bus_re) begin
      rd_cap_q <= is_cap;
      unique case (bus_addr)
        REG_ID:        reg_rdata <= ID_VALUE;
        REG_CTRL:      reg_rdata <= ctrl_q;
        REG_PERIOD:    reg_rdata <= period_q;
        REG_PULSE_LEN: reg_rdata <= plen_q;
        REG_WIN_START: reg_rdata <= wstart_q;
        REG_WIN_LOG2:  reg_rdata <= wlog2_q;
        REG_AMP_SET:   reg_rdata <= amp_set_q;
        REG_AMP_GAIN:  reg_rdata <= amp_gain_q;
        REG_AMP_HI:    reg_rdata <= amp_hi_q;
        REG_AMP_LO:    reg_rdata <= amp_lo_q;
        REG_PH_SET:    reg_rdata <= ph_set_q;
        REG_PH_GAIN:   reg_rdata <= ph_gain_q;
        REG_PH_HI:     reg_rdata <= ph_hi_q;
        REG_PH_LO:     reg_rdata <= ph_lo_q;
        REG_FF_AMP:    reg_rdata <= ff_amp_q;
        REG_FF_PHASE:  reg_rdata <= ff_ph_q;
        REG_PULSES:    reg_rdata <= pulse_count;
        REG_MEAS:      reg_rdata <= {meas_phase, meas_amp};
        REG_DRIVE:     reg_rdata <= {drive_phase, drive_amp};
        REG_CAP_STAT:  reg_rdata <= {cap_done, cap_tag};
        REG_FB_STAT:   reg_rdata <= {fb_updates, 14'd0, phase_clamped, amp_clamped};
        default:       reg_rdata <= 32'hDEAD_BEEF;
      endcase
    end
  end

  // Capture buffer read: word offset {channel, sample} above CAP_BASE.
  logic [AXI_AW-3:0] cap_word;
  assign cap_word   = (AXI_AW-2)'((bus_addr - CAP_BASE) >> 2);
  assign cap_rd_en  = bus_re && is_cap;
  assign cap_rd_idx = cap_word[CAW-1:0];
  assign cap_rd_ch  = CHW'(cap_word >> CAW);

  assign bus_rdata = rd_cap_q ? cap_rd_data : reg_rdata;

  // Outputs.
  assign master_trig = ctrl_q[1];
  assign trig_period = period_q;
  assign pulse_len   = plen_q[15:0];

  always_comb begin
    fb_cfg                 = '0;
    fb_cfg.enable          = ctrl_q[0];
    fb_cfg.channel         = ctrl_q[7:4];
    fb_cfg.win_start       = wstart_q[15:0];
    fb_cfg.win_log2        = wlog2_q[3:0];
    fb_cfg.amp.set_value   = amp_set_q[15:0];
    fb_cfg.amp.gain        = amp_gain_q[15:0];
    fb_cfg.amp.upper       = amp_hi_q[15:0];
    fb_cfg.amp.lower       = amp_lo_q[15:0];
    fb_cfg.phase.set_value = ph_set_q[15:0];
    fb_cfg.phase.gain      = ph_gain_q[15:0];
    fb_cfg.phase.upper     = ph_hi_q[15:0];
    fb_cfg.phase.lower     = ph_lo_q[15:0];
    fb_cfg.ff_amp          = ff_amp_q[15:0];
    fb_cfg.ff_phase        = ff_ph_q[15:0];
  end

endmodule
