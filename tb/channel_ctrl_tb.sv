// channel_ctrl_tb: self-checking test of one channel's control logic with
// behavioural models of its two analogue TDC banks.
//
// Discriminator edges are placed a chosen time d before a clock edge, so the
// expected fine code is floor(128 * d / 5 ns) and the expected T-coarse is the
// counter value at that edge. S&H peaks of v mV give floor(v * 5 / 5) codes.
// Covered: ToT mode with fast and slow edge selection, S&H mode with a window
// and a later, larger pulse that must not be sampled, discarding of a fifth
// event while four buffers are full, in-order delivery under back-pressure,
// and a disabled channel.
`timescale 1ns / 1ps
module channel_ctrl_tb;
  import fe_pkg::*;

  localparam real TCLK = 5.0;
  localparam int  CHID = 5;

  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;

  ch_cfg_t cfg;
  logic [COARSE_W-1:0] coarse;
  logic disc_fast = 0, disc_slow = 0;
  logic trig_t, trig_e, s3_t, s3_e, rst_adc_t, rst_adc_e, comp_t, comp_e;
  logic [3:0] arm_t, arm_e, sample_e, s2_t, s2_e, rst_buf_t, rst_buf_e;
  event_t evt;
  logic evt_valid, evt_ready, evt_lost;
  real v_slow = 0.0;

  channel_ctrl #(.CH_ID(CHID)) dut (
    .clk, .rst_n, .cfg, .coarse, .disc_fast, .disc_slow,
    .trig_t, .arm_t, .s2_t, .s3_t, .rst_buf_t, .rst_adc_t, .comp_t,
    .trig_e, .arm_e, .sample_e, .s2_e, .s3_e, .rst_buf_e, .rst_adc_e, .comp_e,
    .evt, .evt_valid, .evt_ready, .evt_lost);

  tac_adc_model m_t (.trig(trig_t), .arm(arm_t), .sample(4'b0), .v_in(0.0), .s2(s2_t),
                     .s3(s3_t), .rst_buf(rst_buf_t), .rst_adc(rst_adc_t), .comp_out(comp_t));
  tac_adc_model m_e (.trig(trig_e), .arm(arm_e), .sample(sample_e), .v_in(v_slow), .s2(s2_e),
                     .s3(s3_e), .rst_buf(rst_buf_e), .rst_adc(rst_adc_e), .comp_out(comp_e));

  always_ff @(posedge clk) coarse <= rst_n ? coarse + 1 : 16'd1000;

  int checks = 0, failures = 0, lost = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always_ff @(posedge clk) if (rst_n && evt_lost) lost <= lost + 1;

  event_t exp_q [$];
  int got = 0;
  always @(posedge clk) begin
    if (evt_valid && evt_ready) begin
      event_t e;
      got++;
      if (exp_q.size() == 0) check(0, "unexpected event");
      else begin
        e = exp_q.pop_front();
        check(evt == e, $sformatf("event ch%0d m%0d t=%0d/%0d e=%0d/%0d, exp ch%0d m%0d t=%0d/%0d e=%0d/%0d",
              evt.ch_id, evt.qmode, evt.time_s.coarse, evt.time_s.fine, evt.energy.coarse, evt.energy.fine,
              e.ch_id, e.qmode, e.time_s.coarse, e.time_s.fine, e.energy.coarse, e.energy.fine));
      end
    end
  end

  function automatic logic [9:0] fine_of(real d);
    return 10'($floor(128.0 * d / TCLK));
  endfunction

  // Drive one discriminator pulse: rise d_r before a clock edge, fall d_f before
  // the edge 'len' clocks later. Returns the coarse values of both edges.
  task automatic pulse(input bit slow, input real d_r, input int len, input real d_f,
                       output logic [15:0] c_r, output logic [15:0] c_f);
    @(posedge clk);
    #(TCLK - d_r);
    c_r = coarse;
    if (slow) disc_slow = 1; else disc_fast = 1;
    repeat (len) @(posedge clk);
    #(TCLK - d_f);
    c_f = coarse;
    if (slow) disc_slow = 0; else disc_fast = 0;
  endtask

  function automatic event_t mk(input qmode_e m, input logic [15:0] tc, input logic [9:0] tf,
                                input logic [15:0] ec, input logic [9:0] ef);
    event_t e;
    e.ch_id = 6'(CHID); e.qmode = m;
    e.time_s.coarse = tc; e.time_s.fine = tf; e.energy.coarse = ec; e.energy.fine = ef;
    return e;
  endfunction

  task automatic wait_drain();
    int n = 0;
    while (exp_q.size() != 0 && n < 5000) begin @(posedge clk); n++; end
    repeat (3) @(posedge clk);
  endtask

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] cr, cf;
    cfg = '{gain: 3'd0, bias1: 6'd0, bias2: 5'd0, bias3: 6'd0, vth_t: 6'd0, vth_e: 6'd0, qmode: QMODE_TOT,
            lead_sel: BR_FAST, trail_sel: BR_FAST, sh_window: 8'd8, tp_en: 1'b0, ch_en: 1'b1};
    evt_ready <= 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (4) @(posedge clk);

    // 1. ToT on the fast branch
    pulse(0, 1.3, 12, 2.1, cr, cf);
    exp_q.push_back(mk(QMODE_TOT, cr, fine_of(1.3), cf, fine_of(2.1)));
    wait_drain();
    check(got == 1, "ToT event delivered");

    // 2. ToT, leading edge from the slow branch, trailing from the slow branch
    cfg.lead_sel = BR_SLOW; cfg.trail_sel = BR_SLOW;
    pulse(1, 4.2, 30, 0.7, cr, cf);
    exp_q.push_back(mk(QMODE_TOT, cr, fine_of(4.2), cf, fine_of(0.7)));
    // a fast pulse must now be ignored
    pulse(0, 2.0, 5, 2.0, cr, cf);
    wait_drain();
    check(got == 2, "slow-branch ToT event, fast pulse ignored");

    // 3. S&H: peak 37.3 mV inside the window, 80 mV after it
    cfg.lead_sel = BR_FAST; cfg.trail_sel = BR_FAST; cfg.qmode = QMODE_SH; cfg.sh_window = 8'd8;
    fork
      begin
        pulse(0, 3.3, 6, 1.0, cr, cf);
      end
      begin
        #(3 * TCLK) v_slow = 20.0;
        #(2 * TCLK) v_slow = 37.3;
        #(2 * TCLK) v_slow = 10.0;
        #(6 * TCLK) v_slow = 80.0;
        #(4 * TCLK) v_slow = 0.0;
      end
    join
    exp_q.push_back(mk(QMODE_SH, cr, fine_of(3.3), cr + 16'd9, 10'd37));
    wait_drain();
    check(got == 3, "S&H event delivered");

    // 4. back-pressure: five events while the output is stalled
    cfg.qmode = QMODE_TOT;
    evt_ready <= 0;
    for (int i = 0; i < 5; i++) begin
      real dr, df;
      dr = 0.4 + 0.9 * i; df = 4.6 - 0.8 * i;
      pulse(0, dr, 3 + i, df, cr, cf);
      if (i < 4) exp_q.push_back(mk(QMODE_TOT, cr, fine_of(dr), cf, fine_of(df)));
      repeat (2) @(posedge clk);
    end
    repeat (400) @(posedge clk);
    check(lost == 1, $sformatf("fifth event discarded (lost=%0d)", lost));
    check(evt_valid, "oldest event waiting");
    evt_ready <= 1;
    wait_drain();
    check(got == 7, $sformatf("four buffered events delivered in order (got=%0d)", got));

    // 5. disabled channel
    cfg.ch_en = 0;
    pulse(0, 2.5, 5, 2.5, cr, cf);
    repeat (300) @(posedge clk);
    check(got == 7 && !evt_valid, "disabled channel stays silent");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
