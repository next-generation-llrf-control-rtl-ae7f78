// llrf_top: programmable-logic part of an RFSoC low-level RF controller for a C-band
// (5.712 GHz) accelerating structure.
//
// The RF data converter tile of the chip samples each cavity signal directly at
// 2.4576 GS/s, mixes it to baseband and decimates it 10x; this module receives the result,
// one I/Q pair per input channel per clock at 245.76 MHz (adc_iq). It sends one I/Q stream
// (dac_iq) back to the tile, which interpolates and up-mixes it for the DAC (5.89824 GS/s)
// that drives the solid-state amplifier and the klystron.
//
// Inside, on every trigger (trigger_ctrl, external TTL or internal master):
//   * pulse_mod plays the user waveform from pulse_bram, multiplied by the drive I/Q;
//   * capture_buf records all input channels for the processor;
//   * feedback_ctrl measures amplitude and phase of one channel on the flat top and, with
//     the loop closed, corrects the drive for the next pulse.
// The processor configures everything over two AXI4-Lite links: s_axil_cfg reaches the
// register file (llrf_regs, map in llrf_pkg) and the capture buffers, s_axil_wave the
// waveform BRAM (sample n at byte address 4*n, I in bits 15:0, Q in 31:16).
// Timing: the first DAC sample of a pulse leaves 3 clocks after the internal trigger pulse,
// which itself follows an external trigger edge by 3 clocks. All logic runs on one clock;
// rst_n is synchronous and active low.
// The split into these blocks follows the paper's block diagram; the register map, formats,
// memory depths and the feedback law are this design's own.
module llrf_top
  import llrf_pkg::*;
#(
  parameter int unsigned NUM_ADC      = 3,
  parameter int unsigned WAVE_DEPTH   = 1024,
  parameter int unsigned CAP_DEPTH    = 1024,
  parameter int unsigned NUM_TRIG_OUT = 2
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // baseband I/Q from / to the RF data converter tile
  input  iq_t                     adc_iq [NUM_ADC],
  output iq_t                     dac_iq,
  output logic                    rf_on,
  // trigger board
  input  logic                    ext_trig,
  output logic [NUM_TRIG_OUT-1:0] trig_out,
  // processor links
  input  axil_req_t               s_axil_cfg_req,
  output axil_rsp_t               s_axil_cfg_rsp,
  input  axil_req_t               s_axil_wave_req,
  output axil_rsp_t               s_axil_wave_rsp
);

  localparam int unsigned CHW = (NUM_ADC > 1) ? $clog2(NUM_ADC) : 1;

  // ---- parameter link ----
  logic                cfg_we, cfg_re;
  logic [AXI_AW-1:0]   cfg_addr;
  logic [AXI_DW-1:0]   cfg_wdata, cfg_rdata;
  logic [AXI_DW/8-1:0] cfg_wstrb;

  axil_slave u_cfg_axil (
    .clk, .rst_n,
    .s_req(s_axil_cfg_req), .s_rsp(s_axil_cfg_rsp),
    .bus_we(cfg_we), .bus_re(cfg_re), .bus_addr(cfg_addr),
    .bus_wdata(cfg_wdata), .bus_wstrb(cfg_wstrb), .bus_rdata(cfg_rdata)
  );

  fb_cfg_t     fb_cfg;
  logic        master_trig, soft_trig, trig;
  logic [31:0] trig_period, pulse_count;
  logic [15:0] pulse_len;
  logic [15:0] meas_amp, meas_phase, drive_amp, drive_phase, fb_updates;
  logic        amp_clamped, phase_clamped;
  logic        cap_done, cap_rd_en;
  logic [30:0] cap_tag;
  logic [CHW-1:0]               cap_rd_ch;
  logic [$clog2(CAP_DEPTH)-1:0] cap_rd_idx;
  logic [31:0]                  cap_rd_data;

  llrf_regs #(.NUM_CH(NUM_ADC), .CAP_DEPTH(CAP_DEPTH)) u_regs (
    .clk, .rst_n,
    .bus_we(cfg_we), .bus_re(cfg_re), .bus_addr(cfg_addr),
    .bus_wdata(cfg_wdata), .bus_wstrb(cfg_wstrb), .bus_rdata(cfg_rdata),
    .fb_cfg, .master_trig, .soft_trig, .trig_period, .pulse_len,
    .pulse_count, .meas_amp, .meas_phase, .drive_amp, .drive_phase,
    .cap_done, .cap_tag, .fb_updates, .amp_clamped, .phase_clamped,
    .cap_rd_en, .cap_rd_ch, .cap_rd_idx, .cap_rd_data
  );

  // ---- waveform link ----
  logic                wave_we, wave_re;
  logic [AXI_AW-1:0]   wave_addr_bus;
  logic [AXI_DW-1:0]   wave_wdata, wave_rdata;
  logic [AXI_DW/8-1:0] wave_wstrb;

  axil_slave u_wave_axil (
    .clk, .rst_n,
    .s_req(s_axil_wave_req), .s_rsp(s_axil_wave_rsp),
    .bus_we(wave_we), .bus_re(wave_re), .bus_addr(wave_addr_bus),
    .bus_wdata(wave_wdata), .bus_wstrb(wave_wstrb), .bus_rdata(wave_rdata)
  );

  logic                          play_en;
  logic [$clog2(WAVE_DEPTH)-1:0] play_addr;
  iq_t                           play_data;

  pulse_bram #(.DEPTH(WAVE_DEPTH)) u_bram (
    .clk,
    .a_we(wave_we), .a_re(wave_re), .a_addr(wave_addr_bus),
    .a_wdata(wave_wdata), .a_wstrb(wave_wstrb), .a_rdata(wave_rdata),
    .b_en(play_en), .b_addr(play_addr), .b_data(play_data)
  );

  // ---- trigger ----
  trigger_ctrl #(.NUM_OUT(NUM_TRIG_OUT)) u_trig (
    .clk, .rst_n,
    .ext_trig, .master(master_trig), .period(trig_period), .soft_trig,
    .trig, .trig_out, .pulse_count
  );

  // ---- feedback and modulation ----
  iq_t drive;

  feedback_ctrl #(.NUM_CH(NUM_ADC)) u_fb (
    .clk, .rst_n,
    .cfg(fb_cfg), .trig, .iq_in(adc_iq),
    .drive, .drive_amp, .drive_phase, .meas_amp, .meas_phase,
    .amp_clamped, .phase_clamped, .update_done(), .updates(fb_updates)
  );

  pulse_mod #(.DEPTH(WAVE_DEPTH)) u_mod (
    .clk, .rst_n,
    .trig, .pulse_len, .drive,
    .wave_en(play_en), .wave_addr(play_addr), .wave_data(play_data),
    .dac_iq, .rf_on
  );

  // ---- capture ----
  capture_buf #(.NUM_CH(NUM_ADC), .DEPTH(CAP_DEPTH)) u_cap (
    .clk, .rst_n,
    .trig, .trig_count(pulse_count), .iq_in(adc_iq),
    .done(cap_done), .tag(cap_tag), .busy(),
    .rd_en(cap_rd_en), .rd_ch(cap_rd_ch), .rd_idx(cap_rd_idx), .rd_data(cap_rd_data)
  );

endmodule
