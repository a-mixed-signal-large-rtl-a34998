// test_pulse_ctrl: digital part of the on-chip calibration pulse.
//
// The calibration circuit in the chip periphery produces a voltage step that is
// sent to the channels enabled for calibration, where it is turned into a
// current pulse. Its trigger is either generated by the global control logic
// or taken from an external digital test pulse. This block makes that choice
// (glb_cfg.tp_src), stretches an internal one-clock command 'tp_fire' into a
// pulse of glb_cfg.tp_len clocks, and gates the result with each channel's
// tp_en bit. The step amplitude (6-bit DAC code) is passed to the analogue
// generator. Source selection and per-channel enabling follow the chip
// description; the pulse length field and the command input are this
// design's choices.
//
// Timing: the internal pulse starts one clock after tp_fire and lasts tp_len
// clocks (a tp_fire during a pulse restarts it). The external path is
// combinational.
`timescale 1ns / 1ps
module test_pulse_ctrl #(
  parameter int N_CH = fe_pkg::N_CHANNELS
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  fe_pkg::glb_cfg_t        glb_cfg,
  input  logic [N_CH-1:0]         ch_tp_en,
  input  logic                    tp_fire,  // internal trigger command
  input  logic                    tp_ext,   // external digital test pulse
  output logic                    tp_step,  // step trigger to the analogue generator
  output logic [5:0]              tp_amp,   // step amplitude DAC code
  output logic [N_CH-1:0]         tp_inj    // per-channel injection enable
);

  logic [fe_pkg::TPLEN_W-1:0] cnt;
  logic                       tp_int;

  always_ff @(posedge clk) begin
    if (!rst_n)       cnt <= '0;
    else if (tp_fire) cnt <= glb_cfg.tp_len;
    else if (cnt != '0) cnt <= cnt - 1'b1;
  end

  assign tp_int  = (cnt != '0);
  assign tp_step = glb_cfg.tp_src ? tp_ext : tp_int;
  assign tp_amp  = glb_cfg.tp_amp;
  assign tp_inj  = tp_step ? ch_tp_en : '0;

endmodule
