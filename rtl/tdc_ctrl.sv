// tdc_ctrl: digital control of one multi-buffered TDC.
//
// One TDC is a bank of N_BUF analogue buffers (Time-to-Amplitude Converters,
// or Sample-and-Hold cells in the energy branch) that share one Wilkinson ADC.
// When a buffer is triggered, the channel logic pulses 'capture' with the
// buffer index in 'slot' at the clock edge that ends the TAC measurement, and
// this block latches T-coarse for that buffer. Captured buffers are converted
// one at a time, in index order (round robin), by a small FSM:
//   XFER     switch S2 of the buffer is closed for XFER_CYCLES clocks (20 in
//            the chip) so that C_TDC settles to the buffer voltage;
//   RUNDOWN  switch S3 connects the small rundown current I_TDC to C_TDC and
//            a 10-bit counter counts clock cycles until the comparator output
//            'comp_out' is seen high (the count saturates at 2**FINE_W-1);
//   RESET    the buffer and C_TDC are returned to V_ref for RESET_CYCLES.
// The coarse/fine pair is then held in 'result[slot]' with 'done[slot]' high
// until the channel logic frees the buffer with 'release[slot]'.
//
// From the chip description: four buffers, round-robin use, 20-cycle transfer,
// 10-bit Wilkinson counting, reset of both capacitors after the conversion.
// This design's choices: the RESET_CYCLES length, the capture/release
// handshake, and that a buffer stays occupied until its result is read (the
// description says the buffer is reset "while" C_TDC is converted and also that
// both capacitors are reset when the conversion is completed; the latter is
// followed).
//
// Timing: XFER_CYCLES + (fine+1) + RESET_CYCLES + 1 clocks from the first
// clock with a pending buffer to 'done'.
`timescale 1ns / 1ps
module tdc_ctrl #(
  parameter int N_BUF        = fe_pkg::N_BUFFERS,
  parameter int XFER_CYCLES  = fe_pkg::XFER_CYCLES,
  parameter int RESET_CYCLES = 2,
  localparam int SW = (N_BUF > 1) ? $clog2(N_BUF) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [fe_pkg::COARSE_W-1:0] coarse,
  // capture side
  input  logic                capture,
  input  logic [SW-1:0]       slot,
  // analogue switch controls
  output logic [N_BUF-1:0]    s2,       // buffer -> C_TDC transfer
  output logic                s3,       // I_TDC rundown on C_TDC
  output logic [N_BUF-1:0]    rst_buf,  // reset buffer capacitor to V_ref
  output logic                rst_adc,  // reset C_TDC to V_ref
  input  logic                comp_out, // Wilkinson comparator
  // results
  output logic [N_BUF-1:0]    busy,     // buffer captured, converting or done
  output logic [N_BUF-1:0]    done,
  output fe_pkg::stamp_t              result [N_BUF],
  input  logic [N_BUF-1:0]    release_buf
);

  typedef enum logic [1:0] {S_IDLE, S_XFER, S_RUNDOWN, S_RESET} state_e;

  localparam int CW = $clog2(XFER_CYCLES > RESET_CYCLES ? XFER_CYCLES : RESET_CYCLES) + 1;
  localparam logic [fe_pkg::FINE_W-1:0] FINE_MAX = '1;

  state_e             state;
  logic [SW-1:0]      conv_ptr;
  logic [CW-1:0]      cnt;
  logic [fe_pkg::FINE_W-1:0]  fine_cnt;
  logic [N_BUF-1:0]   pending;   // captured, not yet converted

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      conv_ptr <= '0;
      cnt      <= '0;
      fine_cnt <= '0;
      pending  <= '0;
      done     <= '0;
      for (int i = 0; i < N_BUF; i++) result[i] <= '0;
    end else begin
      if (capture) begin
        pending[slot]       <= 1'b1;
        result[slot].coarse <= coarse;
      end
      for (int i = 0; i < N_BUF; i++)
        if (release_buf[i]) done[i] <= 1'b0;

      unique case (state)
        S_IDLE: begin
          if (pending[conv_ptr]) begin
            state <= S_XFER;
            cnt   <= '0;
          end
        end
        S_XFER: begin
          if (cnt == CW'(XFER_CYCLES - 1)) begin
            state    <= S_RUNDOWN;
            fine_cnt <= '0;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        S_RUNDOWN: begin
          if (comp_out || fine_cnt == FINE_MAX) begin
            result[conv_ptr].fine <= fine_cnt;
            state <= S_RESET;
            cnt   <= '0;
          end else begin
            fine_cnt <= fine_cnt + 1'b1;
          end
        end
        S_RESET: begin
          if (cnt == CW'(RESET_CYCLES - 1)) begin
            pending[conv_ptr] <= 1'b0;
            done[conv_ptr]    <= 1'b1;
            conv_ptr <= (conv_ptr == SW'(N_BUF - 1)) ? '0 : conv_ptr + 1'b1;
            state    <= S_IDLE;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    s2      = '0;
    rst_buf = '0;
    s3      = (state == S_RUNDOWN);
    rst_adc = (state == S_RESET);
    if (state == S_XFER)  s2[conv_ptr]      = 1'b1;
    if (state == S_RESET) rst_buf[conv_ptr] = 1'b1;
  end

  assign busy = pending | done;

  // A buffer may only be captured when free, and released when done.
  a_capture_free : assert property (@(posedge clk) disable iff (!rst_n)
    capture |-> !busy[slot]);
  a_release_done : assert property (@(posedge clk) disable iff (!rst_n)
    (release_buf & ~done) == '0);

endmodule
