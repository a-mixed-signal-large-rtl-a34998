// coarse_counter_tb: checks reset to zero, one increment per 5 ns clock while
// enabled, hold while disabled, and the wrap from 65535 to 0 (the wrap is
// reached by running 65536 clocks).
`timescale 1ns / 1ps
module coarse_counter_tb;
  logic clk = 0, rst_n = 0, en = 0;
  always #2.5 clk = ~clk;
  logic [15:0] count;

  coarse_counter dut (.clk, .rst_n, .en, .count);

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

  initial begin
    int model;
    repeat (2) @(posedge clk);
    #1 check(count == 0, "reset value");
    rst_n = 1; en = 1;
    model = 0;
    for (int i = 0; i < 70000; i++) begin
      @(posedge clk);
      model = (model + 1) % 65536;
      #1;
      if (i % 997 == 0 || i == 65535 || i == 65536) check(count == 16'(model), $sformatf("count %0d exp %0d", count, model));
    end
    en = 0;
    repeat (10) @(posedge clk);
    #1 check(count == 16'(model), "holds while disabled");
    rst_n = 0;
    @(posedge clk);
    #1 check(count == 0, "synchronous reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
