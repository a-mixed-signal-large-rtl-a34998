// test_pulse_ctrl_tb: checks the internal pulse (starts one clock after
// tp_fire, lasts tp_len clocks), the external pass-through, the per-channel
// gating with tp_en and the amplitude code.
`timescale 1ns / 1ps
module test_pulse_ctrl_tb;
  import fe_pkg::*;
  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;

  glb_cfg_t    glb_cfg;
  logic [63:0] ch_tp_en, tp_inj;
  logic        tp_fire = 0, tp_ext = 0, tp_step;
  logic [5:0]  tp_amp;

  test_pulse_ctrl dut (.clk, .rst_n, .glb_cfg, .ch_tp_en, .tp_fire, .tp_ext, .tp_step, .tp_amp, .tp_inj);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int hi;
    glb_cfg = '{disc_vb1: 6'd1, disc_vb2: 6'd2, vhyst: 3'd3, tp_amp: 6'd45, tp_src: 1'b0, tp_len: 8'd7};
    ch_tp_en = 64'h8000_0000_0000_0021;
    repeat (2) @(posedge clk);
    #0.1 rst_n = 1;
    check(tp_amp == 6'd45, "amplitude code");
    check(tp_step == 0 && tp_inj == 0, "idle");
    tp_fire = 1;
    @(posedge clk);
    #0.1 tp_fire = 0;
    hi = 0;
    for (int i = 0; i < 20; i++) begin
      if (tp_step) begin
        hi++;
        check(tp_inj == ch_tp_en, "gated to enabled channels");
      end
      @(posedge clk); #0.1;
    end
    check(hi == 7, $sformatf("internal pulse length %0d exp 7", hi));
    // external source
    glb_cfg.tp_src = 1'b1;
    tp_fire = 1;
    @(posedge clk); #0.1 tp_fire = 0;
    check(tp_step == 0, "internal pulse ignored in external mode");
    tp_ext = 1; #1;
    check(tp_step == 1 && tp_inj == ch_tp_en, "external pulse passed");
    ch_tp_en = 64'h0; #1;
    check(tp_inj == 0, "no channel enabled");
    tp_ext = 0; #1;
    check(tp_step == 0, "external pulse end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
