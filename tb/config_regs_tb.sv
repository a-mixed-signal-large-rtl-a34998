// config_regs_tb: writes random words to every channel and to the global
// register, reads them back through cfg_rdata and the decoded outputs, and
// checks the reset values and that an out-of-range address changes nothing.
`timescale 1ns / 1ps
module config_regs_tb;
  import fe_pkg::*;
  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;

  logic             cfg_we = 0;
  logic [6:0]       cfg_addr = 0;
  logic [CFG_W-1:0] cfg_wdata = 0, cfg_rdata;
  ch_cfg_t          ch_cfg [64];
  glb_cfg_t         glb_cfg;

  config_regs dut (.clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .cfg_rdata, .ch_cfg, .glb_cfg);

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

  logic [CH_CFG_W-1:0]  ref_ch [64];
  logic [GLB_CFG_W-1:0] ref_g;

  task automatic wr(input int a, input logic [CFG_W-1:0] d);
    cfg_we = 1; cfg_addr = 7'(a); cfg_wdata = d;
    @(posedge clk);
    #0.1 cfg_we = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #0.1 rst_n = 1;
    check(ch_cfg[17].ch_en == 1'b0 && ch_cfg[17].qmode == QMODE_TOT && ch_cfg[17].sh_window == 8'd8,
          "channel reset value");
    check(glb_cfg.tp_len == 8'd4 && glb_cfg.tp_src == 1'b0, "global reset value");
    for (int i = 0; i < 64; i++) begin
      ref_ch[i] = {$urandom, $urandom};
      wr(i, CFG_W'(ref_ch[i]));
    end
    ref_g = {$urandom, $urandom};
    wr(64, CFG_W'(ref_g));
    wr(100, '1);
    for (int i = 0; i < 64; i++) begin
      cfg_addr = 7'(i);
      #0.1;
      check(cfg_rdata == CFG_W'(ref_ch[i]), $sformatf("readback ch %0d %h %h", i, cfg_rdata, ref_ch[i]));
      check(ch_cfg[i] == ch_cfg_t'(ref_ch[i]), $sformatf("decoded ch %0d", i));
    end
    check(ch_cfg[3].gain == ref_ch[3][CH_CFG_W-1 -: 3], "gain field is the MSBs");
    cfg_addr = 7'd64;
    #0.1;
    check(cfg_rdata == CFG_W'(ref_g) && glb_cfg == glb_cfg_t'(ref_g), "global word");
    cfg_addr = 7'd100;
    #0.1 check(cfg_rdata == '0, "unmapped address reads zero");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
