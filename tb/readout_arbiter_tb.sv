// readout_arbiter_tb: 64 channel sources with queues of numbered records and a
// consumer with random stalls. Checks that every record arrives once and in
// order per channel, that with all channels requesting the grants rotate
// 0,1,2,... (round robin), that a full FIFO stalls the channels (never drops),
// and that the output sustains one record per clock.
`timescale 1ns / 1ps
module readout_arbiter_tb;
  import fe_pkg::*;
  localparam int N = 64;
  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;

  event_t       ch_evt [N];
  logic [N-1:0] ch_valid, ch_ready;
  event_t       out_evt;
  logic         out_valid, out_ready;

  readout_arbiter dut (.clk, .rst_n, .ch_evt, .ch_valid, .ch_ready, .out_evt, .out_valid, .out_ready);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int sent [N], recv [N], to_send [N];
  int grants [$];
  int received = 0, stall_full = 0, out_cnt = 0;
  bit rand_ready;

  // sources: record n of channel c carries n in time_s.coarse
  always_comb
    for (int c = 0; c < N; c++) begin
      ch_valid[c] = rst_n && (sent[c] < to_send[c]);
      ch_evt[c] = '0;
      ch_evt[c].ch_id = 6'(c);
      ch_evt[c].time_s.coarse = 16'(sent[c]);
      ch_evt[c].energy.fine   = 10'(c * 7);
    end

  always @(posedge clk) begin
    if (rst_n) begin
      for (int c = 0; c < N; c++) if (ch_valid[c] && ch_ready[c]) begin
        sent[c]++;
        grants.push_back(c);
      end
      if (ch_valid != 0 && ch_ready == 0) stall_full++;
      if (out_valid && out_ready) begin
        int c;
        c = int'(out_evt.ch_id);
        out_cnt++;
        if (int'(out_evt.time_s.coarse) != recv[c] || out_evt.energy.fine != 10'(c * 7)) begin
          failures++;
          $display("FAIL: channel %0d got record %0d exp %0d", c, out_evt.time_s.coarse, recv[c]);
        end
        recv[c]++;
        received++;
      end
    end
  end

  always @(negedge clk) out_ready <= rand_ready ? ($urandom_range(0, 3) != 0) : 1'b1;

  initial begin
    int t0, total;
    rand_ready = 0;
    for (int c = 0; c < N; c++) begin sent[c] = 0; recv[c] = 0; to_send[c] = 0; end
    repeat (2) @(posedge clk);
    #0.1 rst_n = 1;
    // 1. every channel has 2 records: grants must rotate, 1 record per clock
    for (int c = 0; c < N; c++) to_send[c] = 2;
    t0 = 0;
    while (received < 2 * N && t0 < 1000) begin @(posedge clk); t0++; end
    check(received == 2 * N, "all records of burst received");
    check(t0 <= 2 * N + 3, $sformatf("burst of %0d records took %0d clocks", 2 * N, t0));
    begin
      bit rr_ok = 1;
      for (int i = 0; i < 2 * N; i++) if (grants[i] != i % N) rr_ok = 0;
      check(rr_ok, "round-robin grant order");
    end
    // 2. random load with a stalling consumer
    rand_ready = 1;
    total = received;
    for (int c = 0; c < N; c++) begin
      int n;
      n = $urandom_range(0, 12);
      to_send[c] += n;
      total += n;
    end
    t0 = 0;
    while (received < total && t0 < 20000) begin @(posedge clk); t0++; end
    check(received == total, $sformatf("random load received %0d of %0d", received, total));
    check(stall_full > 0, "FIFO-full back-pressure happened");
    for (int c = 0; c < N; c++) check(recv[c] == sent[c] && sent[c] == to_send[c], $sformatf("channel %0d count", c));
    check(out_cnt == received, "no duplicate");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
