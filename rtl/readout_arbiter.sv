// readout_arbiter: global back-end that collects the event records of all
// channels into one output stream.
//
// Each clock, a round-robin arbiter picks one channel with a valid record
// (starting after the channel granted last), accepts it and writes it into a
// FIFO of FIFO_DEPTH records; the FIFO drains on a valid/ready output port
// towards the off-chip link. A channel is only granted when the FIFO has room,
// so no record is ever dropped here: back-pressure reaches the channels, whose
// own four buffers then fill and discard new events.
// The chip description only names a data interface between the channels and
// the global back-end read out over LVDS by an FPGA; the round-robin policy,
// the FIFO and its depth are this design's choices.
//
// Timing: a record accepted at clock n is visible at out_valid from clock n+1.
// Throughput: one record per clock.
`timescale 1ns / 1ps
module readout_arbiter #(
  parameter int N_CH       = fe_pkg::N_CHANNELS,
  parameter int FIFO_DEPTH = 16,
  localparam int CW = (N_CH > 1) ? $clog2(N_CH) : 1,
  localparam int AW = $clog2(FIFO_DEPTH)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  fe_pkg::event_t  ch_evt   [N_CH],
  input  logic [N_CH-1:0] ch_valid,
  output logic [N_CH-1:0] ch_ready,
  output fe_pkg::event_t  out_evt,
  output logic            out_valid,
  input  logic            out_ready
);

  fe_pkg::event_t mem [FIFO_DEPTH];
  logic [AW-1:0]  wp, rp;
  logic [AW:0]    level;
  logic [CW-1:0]  last, pick;
  logic           any, push, pop;

  // Round-robin pick: first valid channel after 'last'.
  always_comb begin
    any  = 1'b0;
    pick = last;
    for (int k = 1; k <= N_CH; k++) begin
      if (!any && ch_valid[(int'(last) + k) % N_CH]) begin
        any  = 1'b1;
        pick = CW'((int'(last) + k) % N_CH);
      end
    end
  end

  assign push      = any && (level != (AW+1)'(FIFO_DEPTH));
  assign out_valid = (level != '0);
  assign pop       = out_valid && out_ready;
  assign out_evt   = mem[rp];

  always_comb begin
    ch_ready       = '0;
    ch_ready[pick] = push;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      level <= '0;
      last  <= CW'(N_CH - 1);
    end else begin
      if (push) begin
        mem[wp] <= ch_evt[pick];
        wp      <= wp + 1'b1;
        last    <= pick;
      end
      if (pop) rp <= rp + 1'b1;
      level <= level + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  a_no_overflow : assert property (@(posedge clk) disable iff (!rst_n)
    level <= (AW+1)'(FIFO_DEPTH));

endmodule
