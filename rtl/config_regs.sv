// config_regs: configuration registers of the chip.
//
// One configuration word per channel (gain switches s1..s3, Bias1/Bias2/Bias3
// DAC codes, timing and energy discriminator thresholds, charge mode, edge
// selection, S&H window, test-pulse and channel enables) and one global word
// (discriminator Vb1/Vb2 and hysteresis DAC codes, test-pulse amplitude,
// source and length). The fields and most widths follow the chip description
// (the threshold width is assumed). The chip is configured by an FPGA over
// LVDS, but the protocol is not described, so this block offers a plain
// synchronous write/read port: address 0..N_CH-1 selects a channel word,
// address N_CH the global word. Words are LSB-aligned in cfg_wdata. Reset
// values (channels disabled, gain setting 0, mid-scale bias and threshold
// codes, ToT mode, fast branch for both edges, window of 8 clocks) are this
// design's choices.
//
// Timing: a write at clock n is visible on the outputs from clock n+1; the read
// data is combinational from cfg_addr.
`timescale 1ns / 1ps
module config_regs #(
  parameter int N_CH = fe_pkg::N_CHANNELS,
  localparam int AW = $clog2(N_CH + 1),
  localparam int CW = (N_CH > 1) ? $clog2(N_CH) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     cfg_we,
  input  logic [AW-1:0]            cfg_addr,
  input  logic [fe_pkg::CFG_W-1:0] cfg_wdata,
  output logic [fe_pkg::CFG_W-1:0] cfg_rdata,
  output fe_pkg::ch_cfg_t          ch_cfg [N_CH],
  output fe_pkg::glb_cfg_t         glb_cfg
);
  import fe_pkg::*;

  localparam ch_cfg_t CH_RESET = '{
    gain: 3'd0, bias1: 6'd32, bias2: 5'd16, bias3: 6'd32, vth_t: 6'd32, vth_e: 6'd32,
    qmode: QMODE_TOT, lead_sel: BR_FAST, trail_sel: BR_FAST,
    sh_window: WIN_W'(8), tp_en: 1'b0, ch_en: 1'b0};
  localparam glb_cfg_t GLB_RESET = '{
    disc_vb1: 6'd32, disc_vb2: 6'd32, vhyst: 3'd0, tp_amp: 6'd0,
    tp_src: 1'b0, tp_len: TPLEN_W'(4)};

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < N_CH; i++) ch_cfg[i] <= CH_RESET;
      glb_cfg <= GLB_RESET;
    end else if (cfg_we) begin
      if (int'(cfg_addr) < N_CH)       ch_cfg[cfg_addr[CW-1:0]] <= ch_cfg_t'(cfg_wdata[CH_CFG_W-1:0]);
      else if (int'(cfg_addr) == N_CH) glb_cfg          <= glb_cfg_t'(cfg_wdata[GLB_CFG_W-1:0]);
    end
  end

  always_comb begin
    cfg_rdata = '0;
    if (int'(cfg_addr) < N_CH)       cfg_rdata[CH_CFG_W-1:0]  = ch_cfg[cfg_addr[CW-1:0]];
    else if (int'(cfg_addr) == N_CH) cfg_rdata[GLB_CFG_W-1:0] = glb_cfg;
  end

endmodule
