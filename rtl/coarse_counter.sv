// coarse_counter: the global T-coarse time-stamp counter.
//
// A free-running binary counter clocked by the 200 MHz chip clock. Its state
// is distributed to every channel, which latches it at the clock edge that
// ends a TAC measurement; T-coarse and the TAC fine time together form the
// time stamp. The 16-bit width and the clock rate follow the chip description;
// the synchronous active-low reset to zero and the 'enable' input (to hold the
// counter during configuration) are this design's choices.
//
// Timing: count increments by one on every rising clock edge where en is high
// and wraps from 2**WIDTH-1 to 0.
`timescale 1ns / 1ps
module coarse_counter #(
  parameter int WIDTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  output logic [WIDTH-1:0] count
);

  always_ff @(posedge clk) begin
    if (!rst_n)  count <= '0;
    else if (en) count <= count + 1'b1;
  end

endmodule
