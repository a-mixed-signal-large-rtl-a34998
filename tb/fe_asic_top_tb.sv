// fe_asic_top_tb: end-to-end test of the whole digital chip at its default
// size (64 channels), with a behavioural analogue TDC bank (tac_adc_model) on
// both branches of every channel and a simple model of the front-end that
// turns a test-pulse injection into a discriminator pulse.
//
// The configuration is written through the configuration port. Every channel
// then receives a discriminator pulse at the same moment (all channels compete
// for the readout), even channels in ToT mode and odd channels in S&H mode,
// channel 10 with its edges taken from the slow branch. Then channel 4 gets six
// pulses in quick succession: four are buffered, two must be discarded. Then an
// internal and an external test pulse reach channels 20..23. The event consumer
// stalls at random and, during the first phase, long enough to fill the
// readout FIFO. Every record is compared with one predicted from the
// stimulus times: fine = floor(128 * d / 5 ns) for an edge d ns before the
// sampling clock edge, T-coarse = clocks since reset at that edge, S&H code =
// floor(peak mV). Each mechanism is counted and must occur at least once.
`timescale 1ns / 1ps
module fe_asic_top_tb;
  import fe_pkg::*;

  localparam int  N    = 64;
  localparam real TCLK = 5.0;

  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;

  logic             cfg_we = 0;
  logic [6:0]       cfg_addr = 0;
  logic [CFG_W-1:0] cfg_wdata = 0, cfg_rdata;
  ch_cfg_t          ch_cfg [N];
  glb_cfg_t         glb_cfg;
  logic             tp_fire = 0, tp_ext = 0, tp_step;
  logic [5:0]       tp_amp;
  logic [N-1:0]     tp_inj, disc_fast = '0, disc_slow = '0, comp_t, comp_e, evt_lost;
  tdc_sw_t          sw_t [N];
  tdc_sw_t          sw_e [N];
  event_t           out_evt;
  logic             out_valid, out_ready = 1;
  logic [15:0]      t_coarse;
  real              v_slow [N];

  fe_asic_top dut (.*);

  for (genvar c = 0; c < N; c++) begin : g_ana
    tac_adc_model m_t (.trig(sw_t[c].trig), .arm(sw_t[c].arm), .sample(sw_t[c].sample), .v_in(0.0),
                       .s2(sw_t[c].s2), .s3(sw_t[c].s3), .rst_buf(sw_t[c].rst_buf),
                       .rst_adc(sw_t[c].rst_adc), .comp_out(comp_t[c]));
    tac_adc_model m_e (.trig(sw_e[c].trig), .arm(sw_e[c].arm), .sample(sw_e[c].sample), .v_in(v_slow[c]),
                       .s2(sw_e[c].s2), .s3(sw_e[c].s3), .rst_buf(sw_e[c].rst_buf),
                       .rst_adc(sw_e[c].rst_adc), .comp_out(comp_e[c]));
  end

  // reference clock count: T-coarse value expected at each edge
  int unsigned ref_coarse;
  always @(posedge clk) ref_coarse = rst_n ? ref_coarse + 1 : 0;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters
  int n_tot = 0, n_sh = 0, n_slow_lead = 0, n_lost = 0, n_contention = 0, n_stall = 0;
  int n_tp_int = 0, n_tp_ext = 0, n_full_fifo = 0;

  // scoreboard
  event_t exp_q [N][$];
  int     n_exp = 0, n_got = 0;
  bit     slow_ch [N];

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      int c;
      event_t e;
      c = int'(out_evt.ch_id);
      n_got++;
      if (exp_q[c].size() == 0) check(0, $sformatf("unexpected event on channel %0d", c));
      else begin
        e = exp_q[c].pop_front();
        check(out_evt == e, $sformatf("ch %0d: got m%0d t=%0d/%0d e=%0d/%0d exp m%0d t=%0d/%0d e=%0d/%0d", c,
              out_evt.qmode, out_evt.time_s.coarse, out_evt.time_s.fine, out_evt.energy.coarse, out_evt.energy.fine,
              e.qmode, e.time_s.coarse, e.time_s.fine, e.energy.coarse, e.energy.fine));
        if (out_evt.qmode == QMODE_TOT) n_tot++; else n_sh++;
        if (slow_ch[c]) n_slow_lead++;
      end
    end
    if (out_valid && !out_ready) n_stall++;
    if ($countones(dut.ch_valid) > 1) n_contention++;
    if (dut.ch_valid != 0 && dut.ch_ready == 0) n_full_fifo++;
    n_lost += $countones(evt_lost);
    if (tp_step && !glb_cfg.tp_src) n_tp_int++;
    if (tp_step &&  glb_cfg.tp_src) n_tp_ext++;
  end

  bit rand_stall = 1, hold = 0;
  always @(negedge clk) out_ready <= hold ? 1'b0 : rand_stall ? ($urandom_range(0, 2) != 0) : 1'b1;

  function automatic logic [9:0] fine_of(input real d);
    return 10'($floor(128.0 * d / TCLK));
  endfunction

  // time from t to the next rising clock edge (edges at 2.5 + 5k ns)
  function automatic real to_edge(input real t);
    real ph;
    ph = (t - 2.5) - TCLK * $floor((t - 2.5) / TCLK);
    return TCLK - ph;
  endfunction

  task automatic wr(input int a, input logic [CFG_W-1:0] d);
    cfg_we = 1; cfg_addr = 7'(a); cfg_wdata = d;
    @(posedge clk);
    #0.1 cfg_we = 0;
  endtask

  // One discriminator pulse on channel c starting now: the rising edge comes
  // 'at' ns from now, the falling edge 'len' clocks later minus 'df'.
  // Predicts and queues the event unless 'drop' is set.
  task automatic hit(input int c, input real at, input int len, input real df,
                     input real v_peak, input bit drop);
    real         t_r, d_r, d_f;
    int unsigned c_r, c_f;
    bit          sh, slow_l, slow_t;
    event_t      e;
    sh     = (ch_cfg[c].qmode == QMODE_SH);
    slow_l = (ch_cfg[c].lead_sel == BR_SLOW);
    slow_t = (ch_cfg[c].trail_sel == BR_SLOW);
    #(at);
    t_r = $realtime;
    d_r = to_edge(t_r);
    c_r = ref_coarse;
    if (slow_l) disc_slow[c] = 1; else disc_fast[c] = 1;
    if (slow_l != slow_t) begin
      if (slow_t) disc_slow[c] = 1; else disc_fast[c] = 1;
    end
    if (sh) begin
      #(3 * TCLK) v_slow[c] = v_peak;
      #(3 * TCLK) v_slow[c] = 0.5 * v_peak;
      #((len - 6) * TCLK - 1.0);
    end else begin
      #(len * TCLK - 1.0);
    end
    // fall 'df' before a clock edge
    t_r = to_edge($realtime) - df;
    if (t_r < 0.05) t_r = t_r + TCLK;
    #(t_r);
    c_f = ref_coarse;
    disc_fast[c] = 0; disc_slow[c] = 0;
    v_slow[c] = 0.0;
    if (!drop) begin
      e.ch_id = 6'(c);
      e.qmode = sh ? QMODE_SH : QMODE_TOT;
      e.time_s.coarse = 16'(c_r);
      e.time_s.fine   = fine_of(d_r);
      e.energy.coarse = sh ? 16'(c_r + 32'(ch_cfg[c].sh_window) + 1) : 16'(c_f);
      e.energy.fine   = sh ? 10'($floor(v_peak)) : fine_of(df);
      exp_q[c].push_back(e);
      n_exp++;
    end
  endtask

  // front-end model for the test pulse: an injection makes a fast pulse
  // 61.7 ns later, 20 clocks long
  logic [N-1:0] tp_inj_q = '0;
  always @(posedge clk) tp_inj_q <= tp_inj;
  for (genvar c = 0; c < N; c++) begin : g_fe
    always @(posedge tp_inj[c]) begin
      fork
        hit(c, 61.7, 20, 1.9, 0.0, 1'b0);
      join_none
    end
  end

  task automatic drain();
    int n = 0;
    while (n_got < n_exp && n < 20000) begin @(posedge clk); n++; end
    repeat (5) @(posedge clk);
  endtask

  initial begin
    ch_cfg_t  cc;
    glb_cfg_t gc;
    for (int c = 0; c < N; c++) begin v_slow[c] = 0.0; slow_ch[c] = 0; end
    repeat (3) @(posedge clk);
    #0.1 rst_n = 1;

    // configuration
    for (int c = 0; c < N; c++) begin
      cc = '{gain: 3'(c % 8), bias1: 6'd20, bias2: 5'd10, bias3: 6'd30, vth_t: 6'(c), vth_e: 6'(63 - c),
             qmode: (c % 2) ? QMODE_SH : QMODE_TOT, lead_sel: BR_FAST, trail_sel: BR_FAST,
             sh_window: 8'd10, tp_en: (c >= 20 && c <= 23), ch_en: 1'b1};
      if (c == 10) begin cc.lead_sel = BR_SLOW; cc.trail_sel = BR_SLOW; slow_ch[c] = 1; end
      wr(c, CFG_W'(cc));
    end
    gc = '{disc_vb1: 6'd33, disc_vb2: 6'd34, vhyst: 3'd2, tp_amp: 6'd40, tp_src: 1'b0, tp_len: 8'd3};
    wr(N, CFG_W'(gc));
    @(posedge clk);
    check(ch_cfg[10].lead_sel == BR_SLOW && ch_cfg[7].qmode == QMODE_SH && ch_cfg[7].gain == 3'd7,
          "channel configuration applied");
    check(ch_cfg[9].vth_t == 6'd9 && ch_cfg[9].vth_e == 6'd54, "threshold codes applied");
    check(glb_cfg == gc && tp_amp == 6'd40, "global configuration applied");
    check(32'(t_coarse) == ref_coarse, "T-coarse counter");

    // A. all channels at once; the consumer is held off for 200 clocks so
    // that the readout FIFO fills and stalls the channels
    hold = 1;
    fork begin #(200 * TCLK) hold = 0; end join_none
    for (int c = 0; c < N; c++) begin
      automatic int cc2 = c;
      automatic real at = 1.0 + 0.061 * c;
      automatic real df = 0.3 + 0.07 * c;
      automatic real vp = 12.37 + 13.3 * c;
      fork hit(cc2, at, 14 + (c % 5), df, vp, 1'b0); join_none
    end
    #(40 * TCLK);
    drain();
    check(n_got == N, $sformatf("phase A: %0d of %0d events", n_got, N));

    // B. six quick pulses on channel 4 (ToT): four buffered, two discarded
    rand_stall = 0;
    for (int i = 0; i < 6; i++) hit(4, 0.5 + 0.7 * i, 2, 0.4 + 0.1 * i, 0.0, i >= 4);
    drain();
    check(n_lost == 2, $sformatf("phase B: %0d events discarded, exp 2", n_lost));
    rand_stall = 1;

    // C. internal test pulse to channels 20..23
    @(posedge clk); #0.1 tp_fire = 1;
    @(posedge clk); #0.1 tp_fire = 0;
    #(60 * TCLK);
    drain();
    // D. external test pulse
    gc.tp_src = 1'b1;
    wr(N, CFG_W'(gc));
    #1.3 tp_ext = 1;
    #(4 * TCLK) tp_ext = 0;
    #(60 * TCLK);
    drain();
    check(n_got == n_exp, $sformatf("all %0d predicted events received (%0d)", n_exp, n_got));
    for (int c = 0; c < N; c++) check(exp_q[c].size() == 0, $sformatf("channel %0d queue empty", c));

    $display("mechanisms: tot=%0d sh=%0d slow_lead=%0d lost=%0d contention=%0d stall=%0d fifo_full=%0d tp_int=%0d tp_ext=%0d",
             n_tot, n_sh, n_slow_lead, n_lost, n_contention, n_stall, n_full_fifo, n_tp_int, n_tp_ext);
    check(n_tot > 0, "ToT mode used");
    check(n_sh > 0, "S&H mode used");
    check(n_slow_lead > 0, "slow-branch edge selection used");
    check(n_lost > 0, "full-buffer discard happened");
    check(n_contention > 0, "readout contention happened");
    check(n_stall > 0, "output back-pressure happened");
    check(n_full_fifo > 0, "readout FIFO full happened");
    check(n_tp_int > 0, "internal test pulse fired");
    check(n_tp_ext > 0, "external test pulse passed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
