// tac_adc_model_tb: checks the behavioural TDC bank on its own: a TAC start of
// t ns must make the comparator fire 128*t ns after the rundown starts; an S&H
// cell must hold the peak seen inside its sampling window only; resets clear
// the comparator and the buffer.
`timescale 1ns / 1ps
module tac_adc_model_tb;
  logic       trig = 0, s3 = 0, rst_adc = 0, comp_out;
  logic [3:0] arm = 0, sample = 0, s2 = 0, rst_buf = 0;
  real        v_in = 0.0;

  tac_adc_model dut (.trig, .arm, .sample, .v_in, .s2, .s3, .rst_buf, .rst_adc, .comp_out);

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

  // measure rundown of buffer k
  task automatic rundown(input int k, output real t);
    real t0;
    s2[k] = 1; #100; s2[k] = 0; #5;
    s3 = 1; t0 = $realtime;
    while (!comp_out && $realtime - t0 < 6000.0) #0.01;
    t = $realtime - t0;
    s3 = 0; #5;
    rst_adc = 1; rst_buf[k] = 1; #5; rst_adc = 0; rst_buf[k] = 0; #5;
  endtask

  initial begin
    real t;
    #10;
    // TAC 2 armed, start of 3.2 ns
    arm = 4'b0100; #1; trig = 1; #3.2; trig = 0; arm = 0; #10;
    // TAC 0 armed, start of 0.45 ns
    arm = 4'b0001; #1; trig = 1; #0.45; trig = 0; arm = 0; #10;
    // unarmed start must not load anything
    #1; trig = 1; #4; trig = 0; #10;
    rundown(2, t);
    check(t > 128.0 * 3.2 - 0.05 && t < 128.0 * 3.2 + 0.05, $sformatf("TAC 3.2 ns rundown %f", t));
    rundown(0, t);
    check(t > 128.0 * 0.45 - 0.05 && t < 128.0 * 0.45 + 0.05, $sformatf("TAC 0.45 ns rundown %f", t));
    rundown(1, t);
    check(t < 0.05, $sformatf("empty buffer rundown %f", t));
    check(!comp_out, "comparator reset");
    // S&H cell 3: peak 42 mV inside the window, 90 mV outside
    v_in = 10.0; #5; sample[3] = 1; #5; v_in = 42.0; #5; v_in = 30.0; #5; sample[3] = 0;
    #5 v_in = 90.0; #5 v_in = 0.0;
    rundown(3, t);
    check(t > 42.0 * 5.0 - 0.05 && t < 42.0 * 5.0 + 0.05, $sformatf("S&H rundown %f", t));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
