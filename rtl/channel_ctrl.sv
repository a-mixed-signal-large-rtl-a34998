// channel_ctrl: control logic of one front-end channel.
//
// Each channel has two discriminators, one on the fast (timing) shaper and
// one on the slow (energy) shaper, and two multi-buffered TDCs: the T-TDC
// (4 TACs and a Wilkinson ADC) times the leading edge; the E-TDC (4 TACs,
// 4 Sample-and-Hold cells and a second Wilkinson ADC) measures the charge.
// This block
//   * selects which discriminator gives the leading edge (and the S&H start)
//     and which gives the ToT trailing edge (lead_sel, trail_sel);
//   * detects the edges at the clock (the analogue TAC itself measures the
//     time from the discriminator edge to that clock edge);
//   * gives each event the next of the N_BUF buffers in round-robin order and
//     discards it (evt_lost) when all buffers are occupied;
//   * in ToT mode times the trailing edge in the E-TDC buffer of the same
//     index; in S&H mode keeps that buffer sampling for cfg.sh_window clocks
//     from the leading edge, then holds it and has the E-TDC convert it;
//   * when both conversions of the oldest event are done, offers the event
//     record (channel ID, mode, time stamp, charge) on a valid/ready port and
//     frees the buffer pair when it is taken.
// From the chip description: the two modes, the edge/branch selection, the
// four buffers with round-robin assignment and discarding when full, the S&H
// window started by a discriminator, the shared use of the E-branch ADC by
// TACs and S&H cells. This design's choices: buffer k of both TDCs always
// belongs to the same event, events leave in arrival order, edges are sampled
// with one flip-flop, a slot stays occupied until its record is read, and the
// 'arm' outputs that tell the analogue bank which buffer the next trigger
// goes to.
//
// Timing: an edge seen at clock n is captured (T-coarse latched) at clock n.
// evt_valid rises once both TDC controllers report 'done' for the slot.
`timescale 1ns / 1ps
module channel_ctrl #(
  parameter int CH_ID        = 0,
  parameter int N_BUF        = fe_pkg::N_BUFFERS,
  parameter int XFER_CYCLES  = fe_pkg::XFER_CYCLES,
  parameter int RESET_CYCLES = 2,
  localparam int SW = (N_BUF > 1) ? $clog2(N_BUF) : 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  fe_pkg::ch_cfg_t             cfg,
  input  logic [fe_pkg::COARSE_W-1:0] coarse,
  // discriminator outputs (CMOS level, asynchronous to clk)
  input  logic                        disc_fast,
  input  logic                        disc_slow,
  // T-TDC analogue bank
  output logic                        trig_t,     // routed TAC start signal
  output logic [N_BUF-1:0]            arm_t,      // TAC that takes the next start
  output logic [N_BUF-1:0]            s2_t,
  output logic                        s3_t,
  output logic [N_BUF-1:0]            rst_buf_t,
  output logic                        rst_adc_t,
  input  logic                        comp_t,
  // E-TDC analogue bank (TACs for ToT, S&H cells for S&H)
  output logic                        trig_e,     // routed TAC start (ToT trailing edge)
  output logic [N_BUF-1:0]            arm_e,
  output logic [N_BUF-1:0]            sample_e,   // S&H cell tracks the slow shaper
  output logic [N_BUF-1:0]            s2_e,
  output logic                        s3_e,
  output logic [N_BUF-1:0]            rst_buf_e,
  output logic                        rst_adc_e,
  input  logic                        comp_e,
  // event output
  output fe_pkg::event_t              evt,
  output logic                        evt_valid,
  input  logic                        evt_ready,
  output logic                        evt_lost    // one-clock pulse per discarded event
);
  import fe_pkg::*;

  logic lead, trail, lead_q, trail_q, lead_rise, trail_fall;

  logic [SW-1:0]      wr_ptr, e_ptr, rd_ptr;
  logic [N_BUF-1:0]   occ;        // slot allocated to an event
  logic [N_BUF-1:0]   wait_e;     // slot waits for its E capture
  logic [N_BUF-1:0]   slot_sh;    // slot was taken in S&H mode
  logic [WIN_W-1:0]   win_cnt [N_BUF];

  logic               cap_t, cap_e;
  logic [N_BUF-1:0]   busy_t, busy_e, done_t, done_e, rel;
  stamp_t             res_t [N_BUF];
  stamp_t             res_e [N_BUF];

  // Edge selection
  assign lead  = cfg.ch_en & ((cfg.lead_sel  == BR_FAST) ? disc_fast : disc_slow);
  assign trail = cfg.ch_en & ((cfg.trail_sel == BR_FAST) ? disc_fast : disc_slow);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      lead_q  <= 1'b0;
      trail_q <= 1'b0;
    end else begin
      lead_q  <= lead;
      trail_q <= trail;
    end
  end

  assign lead_rise  = lead & ~lead_q;
  assign trail_fall = ~trail & trail_q;

  // Allocation of a buffer to a new event, and E-side capture
  assign cap_t = lead_rise & ~occ[wr_ptr];
  assign cap_e = wait_e[e_ptr] &
                 (slot_sh[e_ptr] ? (win_cnt[e_ptr] == '0) : trail_fall);

  function automatic logic [SW-1:0] nxt(input logic [SW-1:0] p);
    return (p == SW'(N_BUF - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_ptr   <= '0;
      e_ptr    <= '0;
      rd_ptr   <= '0;
      occ      <= '0;
      wait_e   <= '0;
      slot_sh  <= '0;
      evt_lost <= 1'b0;
      for (int i = 0; i < N_BUF; i++) win_cnt[i] <= '0;
    end else begin
      evt_lost <= lead_rise & occ[wr_ptr];
      for (int i = 0; i < N_BUF; i++)
        if (win_cnt[i] != '0) win_cnt[i] <= win_cnt[i] - 1'b1;
      if (cap_t) begin
        occ[wr_ptr]     <= 1'b1;
        wait_e[wr_ptr]  <= 1'b1;
        slot_sh[wr_ptr] <= (cfg.qmode == QMODE_SH);
        win_cnt[wr_ptr] <= (cfg.qmode == QMODE_SH) ? cfg.sh_window : '0;
        wr_ptr          <= nxt(wr_ptr);
      end
      if (cap_e) begin
        wait_e[e_ptr] <= 1'b0;
        e_ptr         <= nxt(e_ptr);
      end
      if (evt_valid && evt_ready) begin
        occ[rd_ptr] <= 1'b0;
        rd_ptr      <= nxt(rd_ptr);
      end
    end
  end

  // Analogue bank steering
  always_comb begin
    arm_t    = '0;
    arm_e    = '0;
    sample_e = '0;
    if (!occ[wr_ptr]) arm_t[wr_ptr] = 1'b1;
    if (wait_e[e_ptr] && !slot_sh[e_ptr]) arm_e[e_ptr] = 1'b1;
    for (int i = 0; i < N_BUF; i++)
      sample_e[i] = wait_e[i] & slot_sh[i] & (win_cnt[i] != '0);
  end

  // The TAC integrates while its start signal is high: from the discriminator
  // edge to the clock edge that samples it.
  assign trig_t   = lead_rise;
  assign trig_e   = trail_fall & wait_e[e_ptr] & ~slot_sh[e_ptr];

  // Two TDC controllers
  tdc_ctrl #(.N_BUF(N_BUF), .XFER_CYCLES(XFER_CYCLES), .RESET_CYCLES(RESET_CYCLES)) u_tdc_t (
    .clk, .rst_n, .coarse,
    .capture(cap_t), .slot(wr_ptr),
    .s2(s2_t), .s3(s3_t), .rst_buf(rst_buf_t), .rst_adc(rst_adc_t), .comp_out(comp_t),
    .busy(busy_t), .done(done_t), .result(res_t), .release_buf(rel)
  );

  tdc_ctrl #(.N_BUF(N_BUF), .XFER_CYCLES(XFER_CYCLES), .RESET_CYCLES(RESET_CYCLES)) u_tdc_e (
    .clk, .rst_n, .coarse,
    .capture(cap_e), .slot(e_ptr),
    .s2(s2_e), .s3(s3_e), .rst_buf(rst_buf_e), .rst_adc(rst_adc_e), .comp_out(comp_e),
    .busy(busy_e), .done(done_e), .result(res_e), .release_buf(rel)
  );

  // Event output, oldest slot first
  assign evt_valid = occ[rd_ptr] & done_t[rd_ptr] & done_e[rd_ptr];
  always_comb begin
    rel         = '0;
    rel[rd_ptr] = evt_valid & evt_ready;
    evt.ch_id   = CH_ID_W'(CH_ID);
    evt.qmode   = slot_sh[rd_ptr] ? QMODE_SH : QMODE_TOT;
    evt.time_s  = res_t[rd_ptr];
    evt.energy  = res_e[rd_ptr];
  end

  // Slot bookkeeping must agree with both TDC controllers.
  a_occ_covers : assert property (@(posedge clk) disable iff (!rst_n)
    ((busy_t | busy_e) & ~occ) == '0);

endmodule
