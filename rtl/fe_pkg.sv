// fe_pkg: constants and types shared by the digital back-end of the
// 64-channel gaseous-detector front-end.
//
// The numbers that come from the chip description are the channel count (64),
// the four analogue buffers per TDC, the 16-bit T-coarse counter, the 10-bit
// Wilkinson ADC, the 20-cycle charge transfer from C_TAC to C_TDC, the 3 gain
// switches (8 gain settings), the 6-bit Bias1, 5-bit Bias2 and 6-bit Bias3
// DACs, the 6-bit discriminator bias DACs, the 3-bit hysteresis DAC and the
// 6-bit test-pulse amplitude DAC. The layout of the configuration words and of
// the event record, the width of the S&H window and test-pulse length fields,
// and the 6-bit width of the two per-channel threshold codes (V_th_T, V_th_E;
// their width is not given), are this design's own choices.
`timescale 1ns / 1ps
package fe_pkg;

  localparam int N_CHANNELS  = 64;   // channels per chip
  localparam int N_BUFFERS   = 4;    // TACs (and S&H cells) per TDC
  localparam int COARSE_W    = 16;   // T-coarse global counter
  localparam int FINE_W      = 10;   // Wilkinson ADC resolution
  localparam int XFER_CYCLES = 20;   // C_TAC -> C_TDC transfer time in clocks
  localparam int INTERP      = 128;  // time interpolation factor
  localparam int CH_ID_W     = $clog2(N_CHANNELS);
  localparam int SLOT_W      = $clog2(N_BUFFERS);
  localparam int WIN_W       = 8;    // S&H window length field (clocks)
  localparam int TPLEN_W     = 8;    // internal test-pulse length field

  // Charge measurement mode of a channel.
  typedef enum logic {
    QMODE_TOT = 1'b0,   // time over threshold: leading and trailing edges timed
    QMODE_SH  = 1'b1    // sample and hold of the slow shaper peak
  } qmode_e;

  // Which shaper branch a discriminator edge is taken from.
  typedef enum logic {
    BR_FAST = 1'b0,
    BR_SLOW = 1'b1
  } branch_e;

  // Per-channel configuration word.
  typedef struct packed {
    logic [2:0]       gain;      // s1..s3 programmable gain switches
    logic [5:0]       bias1;     // common-gate bias DAC
    logic [4:0]       bias2;     // gm-boost bias DAC
    logic [5:0]       bias3;     // gain-stage output DC current DAC
    logic [5:0]       vth_t;     // timing-branch discriminator threshold
    logic [5:0]       vth_e;     // energy-branch discriminator threshold
    qmode_e           qmode;     // charge measurement mode
    branch_e          lead_sel;  // branch giving the leading edge / S&H start
    branch_e          trail_sel; // branch giving the ToT trailing edge
    logic [WIN_W-1:0] sh_window; // S&H sampling window length in clocks
    logic             tp_en;     // channel receives the test pulse
    logic             ch_en;     // channel accepts triggers
  } ch_cfg_t;

  // Global (periphery) configuration word.
  typedef struct packed {
    logic [5:0]         disc_vb1;  // discriminator input-stage bias DAC
    logic [5:0]         disc_vb2;  // discriminator output-stage bias DAC
    logic [2:0]         vhyst;     // discriminator hysteresis DAC
    logic [5:0]         tp_amp;    // test-pulse amplitude DAC
    logic               tp_src;    // 0: internal trigger, 1: external pulse
    logic [TPLEN_W-1:0] tp_len;    // internal test-pulse length in clocks
  } glb_cfg_t;

  localparam int CH_CFG_W  = $bits(ch_cfg_t);
  localparam int GLB_CFG_W = $bits(glb_cfg_t);
  localparam int CFG_W     = (CH_CFG_W > GLB_CFG_W) ? CH_CFG_W : GLB_CFG_W;

  // Result of one buffer of one TDC: T-coarse at the capture edge and the
  // Wilkinson count of the analogue value held in the buffer.
  typedef struct packed {
    logic [COARSE_W-1:0] coarse;
    logic [FINE_W-1:0]   fine;
  } stamp_t;

  // Event record sent off chip. In ToT mode 'energy' is the trailing-edge time
  // stamp; in S&H mode energy.fine is the ADC code of the held peak and
  // energy.coarse the T-coarse at which the sample was held.
  typedef struct packed {
    logic [CH_ID_W-1:0] ch_id;
    qmode_e             qmode;
    stamp_t             time_s;
    stamp_t             energy;
  } event_t;

  localparam int EVENT_W = $bits(event_t);

  // Switch controls from a channel's logic to one analogue TDC bank
  // (buffers, C_TDC and comparator), as brought out of the digital top.
  typedef struct packed {
    logic                 trig;     // TAC start (edge to next clock edge)
    logic [N_BUFFERS-1:0] arm;      // buffer that takes the next start
    logic [N_BUFFERS-1:0] sample;   // S&H cell tracking (E bank only)
    logic [N_BUFFERS-1:0] s2;       // buffer -> C_TDC transfer
    logic                 s3;       // rundown current on
    logic [N_BUFFERS-1:0] rst_buf;  // buffer reset to V_ref
    logic                 rst_adc;  // C_TDC reset to V_ref
  } tdc_sw_t;

endpackage
