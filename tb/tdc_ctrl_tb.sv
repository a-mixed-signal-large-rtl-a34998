// tdc_ctrl_tb: self-checking test of the multi-buffer TDC controller.
//
// A synchronous comparator model answers each rundown after a chosen number
// of clocks N (set per buffer), so the expected Wilkinson code is exactly N.
// The test checks the latched T-coarse and fine codes, the 20-clock transfer
// (S2 high time), the round-robin conversion order, the capture-to-done
// latency (N + 24 clocks with RESET_CYCLES = 2), saturation at 1023, the
// reset pulses and the release handshake.
`timescale 1ns / 1ps
module tdc_ctrl_tb;
  import fe_pkg::*;

  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;

  logic [COARSE_W-1:0] coarse;
  logic                capture;
  logic [1:0]          slot;
  logic [3:0]          s2, rst_buf, busy, done, release_buf;
  logic                s3, rst_adc, comp_out;
  stamp_t              result [4];

  tdc_ctrl dut (.clk, .rst_n, .coarse, .capture, .slot, .s2, .s3, .rst_buf, .rst_adc,
                .comp_out, .busy, .done, .result, .release_buf);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // comparator model
  int nval [4];
  int cur_n, rc;
  always_ff @(posedge clk) begin
    for (int i = 0; i < 4; i++) if (s2[i]) cur_n <= nval[i];
    rc <= s3 ? rc + 1 : 0;
  end
  assign comp_out = s3 && (rc >= cur_n);

  // monitors
  int s2_len [4];
  int order [$];
  logic [3:0] s2_q;
  int rstbuf_cnt, rstadc_cnt;
  always_ff @(posedge clk) begin
    s2_q <= s2;
    for (int i = 0; i < 4; i++) begin
      if (s2[i]) s2_len[i] <= s2_len[i] + 1;
      if (s2[i] && !s2_q[i]) order.push_back(i);
    end
    if (rst_buf != 0) rstbuf_cnt <= rstbuf_cnt + 1;
    if (rst_adc) rstadc_cnt <= rstadc_cnt + 1;
  end

  always_ff @(posedge clk) coarse <= rst_n ? coarse + 1 : 16'd100;

  task automatic cap(input int s);
    capture <= 1; slot <= 2'(s);
    @(posedge clk);
    #0.1 capture <= 0;
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] c0;
    int t0, lat;
    capture = 0; slot = 0; release_buf = 0;
    for (int i = 0; i < 4; i++) begin s2_len[i] = 0; nval[i] = 0; end
    cur_n = 0; rc = 0; rstbuf_cnt = 0; rstadc_cnt = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (5) @(posedge clk);

    // 1. single conversion, latency
    nval[0] = 37;
    #1 c0 = coarse;
    cap(0);
    t0 = 0;
    while (!done[0]) begin @(posedge clk); t0++; #0.1; end
    lat = t0;
    check(result[0].coarse == c0, $sformatf("coarse %0d exp %0d", result[0].coarse, c0));
    check(result[0].fine == 10'd37, $sformatf("fine %0d exp 37", result[0].fine));
    check(s2_len[0] == 20, $sformatf("S2 high %0d clocks, exp 20", s2_len[0]));
    check(lat == 37 + 24, $sformatf("latency %0d exp %0d", lat, 37 + 24));
    check(rstbuf_cnt == 2 && rstadc_cnt == 2, "reset pulses 2 clocks");
    check(busy == 4'b0001, "busy until release");
    release_buf <= 4'b0001; @(posedge clk); release_buf <= 0; @(posedge clk);
    check(done == 0 && busy == 0, "release clears done");

    // 2. four back-to-back captures, converted in order 1,2,3,0
    order.delete();
    nval[1] = 5; nval[2] = 200; nval[3] = 0; nval[0] = 128;
    #1 c0 = coarse;
    cap(1); cap(2); cap(3); cap(0);
    check(busy == 4'b1111, "all busy");
    while (done != 4'b1111) @(posedge clk);
    check(order.size() == 4 && order[0] == 1 && order[1] == 2 && order[2] == 3 && order[3] == 0,
          "round-robin conversion order");
    check(result[1].fine == 5 && result[2].fine == 200 && result[3].fine == 0 && result[0].fine == 128,
          $sformatf("fines %0d %0d %0d %0d", result[1].fine, result[2].fine, result[3].fine, result[0].fine));
    check(result[1].coarse == c0 && result[2].coarse == c0 + 1 && result[3].coarse == c0 + 2
          && result[0].coarse == c0 + 3, "coarse of back-to-back captures");
    release_buf <= 4'b1111; @(posedge clk); release_buf <= 0; @(posedge clk);

    // 3. saturation: comparator never fires before 1023
    nval[1] = 5000;
    cap(1);
    while (!done[1]) @(posedge clk);
    check(result[1].fine == 10'h3FF, $sformatf("saturated fine %0d", result[1].fine));
    release_buf <= 4'b0010; @(posedge clk); release_buf <= 0; @(posedge clk);
    check(busy == 0, "idle at end");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
