// fe_asic_top: digital part of the 64-channel mixed-signal front-end chip.
//
// Each detector channel has an analogue chain (regulated common-gate
// pre-amplifier, a fast CR-RC shaper and a slow complex-pole shaper, one
// discriminator on each) and two analogue TDC banks (4 TACs on the timing
// branch; 4 TACs and 4 Sample-and-Hold cells on the energy branch, each bank
// with a Wilkinson ADC). Those analogue parts are outside this module: the
// discriminator and comparator outputs come in as ports, and the switch
// controls of the TDC banks, the gain and bias DAC codes and the test-pulse
// controls go out as ports.
//
// Inside: the global 16-bit T-coarse counter, the configuration registers,
// the test-pulse control, one channel_ctrl per channel (each with its two TDC
// controllers) and the readout arbiter that merges the channels' event records
// (channel ID, time stamp, charge) into one output FIFO.
//
// Clock: one 200 MHz clock for everything (5 ns T-coarse period, 40 ps TDC
// bin). Reset: synchronous, active low.
`timescale 1ns / 1ps
module fe_asic_top #(
  parameter int N_CH         = fe_pkg::N_CHANNELS,
  parameter int FIFO_DEPTH   = 16,
  parameter int RESET_CYCLES = 2,
  localparam int AW = $clog2(N_CH + 1),
  localparam int NB = fe_pkg::N_BUFFERS
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // configuration port
  input  logic                          cfg_we,
  input  logic [AW-1:0]                 cfg_addr,
  input  logic [fe_pkg::CFG_W-1:0]      cfg_wdata,
  output logic [fe_pkg::CFG_W-1:0]      cfg_rdata,
  // configuration codes to the analogue blocks (gain switches, DACs)
  output fe_pkg::ch_cfg_t               ch_cfg [N_CH],
  output fe_pkg::glb_cfg_t              glb_cfg,
  // test pulse
  input  logic                          tp_fire,
  input  logic                          tp_ext,
  output logic                          tp_step,
  output logic [5:0]                    tp_amp,
  output logic [N_CH-1:0]               tp_inj,
  // from the analogue channels
  input  logic [N_CH-1:0]               disc_fast,
  input  logic [N_CH-1:0]               disc_slow,
  input  logic [N_CH-1:0]               comp_t,
  input  logic [N_CH-1:0]               comp_e,
  // to the analogue TDC banks
  output fe_pkg::tdc_sw_t               sw_t [N_CH],
  output fe_pkg::tdc_sw_t               sw_e [N_CH],
  // event readout
  output fe_pkg::event_t                out_evt,
  output logic                          out_valid,
  input  logic                          out_ready,
  output logic [N_CH-1:0]               evt_lost,
  output logic [fe_pkg::COARSE_W-1:0]   t_coarse
);
  import fe_pkg::*;

  event_t          ch_evt   [N_CH];
  logic [N_CH-1:0] ch_valid, ch_ready, ch_tp_en;

  coarse_counter #(.WIDTH(COARSE_W)) u_coarse (
    .clk, .rst_n, .en(1'b1), .count(t_coarse)
  );

  config_regs #(.N_CH(N_CH)) u_cfg (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .cfg_rdata, .ch_cfg, .glb_cfg
  );

  always_comb
    for (int i = 0; i < N_CH; i++) ch_tp_en[i] = ch_cfg[i].tp_en;

  test_pulse_ctrl #(.N_CH(N_CH)) u_tp (
    .clk, .rst_n, .glb_cfg, .ch_tp_en, .tp_fire, .tp_ext, .tp_step, .tp_amp, .tp_inj
  );

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    channel_ctrl #(.CH_ID(c), .N_BUF(NB), .RESET_CYCLES(RESET_CYCLES)) u_ch (
      .clk, .rst_n, .cfg(ch_cfg[c]), .coarse(t_coarse),
      .disc_fast(disc_fast[c]), .disc_slow(disc_slow[c]),
      .trig_t(sw_t[c].trig), .arm_t(sw_t[c].arm), .s2_t(sw_t[c].s2), .s3_t(sw_t[c].s3),
      .rst_buf_t(sw_t[c].rst_buf), .rst_adc_t(sw_t[c].rst_adc), .comp_t(comp_t[c]),
      .trig_e(sw_e[c].trig), .arm_e(sw_e[c].arm), .sample_e(sw_e[c].sample),
      .s2_e(sw_e[c].s2), .s3_e(sw_e[c].s3),
      .rst_buf_e(sw_e[c].rst_buf), .rst_adc_e(sw_e[c].rst_adc), .comp_e(comp_e[c]),
      .evt(ch_evt[c]), .evt_valid(ch_valid[c]), .evt_ready(ch_ready[c]),
      .evt_lost(evt_lost[c])
    );
    assign sw_t[c].sample = '0;  // the timing bank has no S&H cells
  end

  readout_arbiter #(.N_CH(N_CH), .FIFO_DEPTH(FIFO_DEPTH)) u_ro (
    .clk, .rst_n, .ch_evt, .ch_valid, .ch_ready, .out_evt, .out_valid, .out_ready
  );

endmodule
