// llrf_pkg: types and constants shared by the LLRF programmable-logic design.
//
// Baseband samples travel as complex I/Q pairs of two signed 16-bit words, one pair
// per clock of the 245.76 MHz fabric clock (the data rate after the converter tile's
// 10x decimation). The two AXI4-Lite links from the processor (one for the loop
// parameters, one for the pulse waveform) are carried as a request and a response
// struct. The register map of the parameter link is listed here so that the register
// file, the top and the testbenches agree on it.
//
// Fixed-point conventions (this design's choice; the paper gives no formats):
//   * amplitude: unsigned 16 bit, in the same units as an I or Q word;
//   * drive amplitude: Q1.15, 32767 = unity gain of the pulse modulator;
//   * phase: 16-bit binary angle, 65536 = 360 degrees, read as signed (-180..+180);
//   * loop gain: unsigned Q8.8, 256 = 1.0.
package llrf_pkg;

  localparam int unsigned IQ_W     = 16;   // width of one I or Q word
  localparam int unsigned AXI_AW   = 20;   // AXI4-Lite byte address width
  localparam int unsigned AXI_DW   = 32;   // AXI4-Lite data width
  localparam int unsigned GAIN_FRAC = 8;   // fraction bits of the loop gains

  typedef logic signed [IQ_W-1:0] sample_t;

  typedef struct packed {
    sample_t q;   // bits 31:16 of a 32-bit word
    sample_t i;   // bits 15:0
  } iq_t;

  // AXI4-Lite request (master to slave) and response (slave to master).
  typedef struct packed {
    logic [AXI_AW-1:0]   awaddr;
    logic                awvalid;
    logic [AXI_DW-1:0]   wdata;
    logic [AXI_DW/8-1:0] wstrb;
    logic                wvalid;
    logic                bready;
    logic [AXI_AW-1:0]   araddr;
    logic                arvalid;
    logic                rready;
  } axil_req_t;

  typedef struct packed {
    logic              awready;
    logic              wready;
    logic [1:0]        bresp;
    logic              bvalid;
    logic              arready;
    logic [AXI_DW-1:0] rdata;
    logic [1:0]        rresp;
    logic              rvalid;
  } axil_rsp_t;

  // Set value, correction gain and the two limits of one control loop
  // (amplitude or phase), as listed in the paper's block diagram.
  typedef struct packed {
    logic [15:0] set_value;
    logic [15:0] gain;        // Q8.8
    logic [15:0] upper;
    logic [15:0] lower;
  } loop_cfg_t;

  // Everything the feedback controller needs from the register file.
  typedef struct packed {
    logic        enable;      // 1: closed loop, 0: drive = feed-forward values
    logic [3:0]  channel;     // input channel used as the feedback reference
    logic [15:0] win_start;   // first sample of the flat-top window after the trigger
    logic [3:0]  win_log2;    // window length = 2**win_log2 samples
    loop_cfg_t   amp;
    loop_cfg_t   phase;       // set/upper/lower are signed binary angles
    logic [15:0] ff_amp;      // open-loop drive amplitude (Q1.15)
    logic [15:0] ff_phase;    // open-loop drive phase
  } fb_cfg_t;

  // Register map of the parameter link (byte addresses).
  localparam logic [AXI_AW-1:0] REG_ID        = 'h00;  // RO, ID_VALUE
  localparam logic [AXI_AW-1:0] REG_CTRL      = 'h04;  // [0] fb enable [1] master trigger [2] soft trigger (W1) [7:4] fb channel
  localparam logic [AXI_AW-1:0] REG_PERIOD    = 'h08;  // master trigger period in clocks
  localparam logic [AXI_AW-1:0] REG_PULSE_LEN = 'h0C;  // pulse length in samples
  localparam logic [AXI_AW-1:0] REG_WIN_START = 'h10;
  localparam logic [AXI_AW-1:0] REG_WIN_LOG2  = 'h14;
  localparam logic [AXI_AW-1:0] REG_AMP_SET   = 'h18;
  localparam logic [AXI_AW-1:0] REG_AMP_GAIN  = 'h1C;
  localparam logic [AXI_AW-1:0] REG_AMP_HI    = 'h20;
  localparam logic [AXI_AW-1:0] REG_AMP_LO    = 'h24;
  localparam logic [AXI_AW-1:0] REG_PH_SET    = 'h28;
  localparam logic [AXI_AW-1:0] REG_PH_GAIN   = 'h2C;
  localparam logic [AXI_AW-1:0] REG_PH_HI     = 'h30;
  localparam logic [AXI_AW-1:0] REG_PH_LO     = 'h34;
  localparam logic [AXI_AW-1:0] REG_FF_AMP    = 'h38;
  localparam logic [AXI_AW-1:0] REG_FF_PHASE  = 'h3C;
  localparam logic [AXI_AW-1:0] REG_PULSES    = 'h40;  // RO, triggers seen
  localparam logic [AXI_AW-1:0] REG_MEAS      = 'h44;  // RO, {phase, amplitude} of last flat top
  localparam logic [AXI_AW-1:0] REG_DRIVE     = 'h48;  // RO, {phase, amplitude} of the drive
  localparam logic [AXI_AW-1:0] REG_CAP_STAT  = 'h4C;  // RO, [31] capture done, [30:0] pulse tag
  localparam logic [AXI_AW-1:0] REG_FB_STAT   = 'h50;  // RO, [31:16] feedback updates, [1] phase clamped, [0] amplitude clamped
  // Capture buffers (RO): sample n of channel c is the word at byte address
  // CAP_BASE + 4*(c*CAP_DEPTH + n), laid out as {Q, I}.
  localparam logic [AXI_AW-1:0] CAP_BASE      = 'h10000;

  localparam logic [31:0] ID_VALUE = 32'h4C4C_5246;  // "LLRF"

endpackage
