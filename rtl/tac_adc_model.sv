// tac_adc_model: behavioural model (not synthesizable) of the analogue part of
// one multi-buffered TDC: N_BUF Time-to-Amplitude Converters, N_BUF
// Sample-and-Hold cells and the Wilkinson ADC (C_TDC, rundown current I_TDC
// and comparator). It exists so that the digital control can be simulated
// against realistic analogue timing.
//
// TAC: while 'trig' is high and buffer k is armed, I_TAC discharges C_TAC; the
// stored value is the time t_tac between the start of 'trig' and its end (the
// clock edge). With I_TAC = 32 I_TDC and C_TDC = 4 C_TAC, the later rundown of
// C_TDC lasts INTERP (=128) times t_tac.
// S&H: while sample[k] is high the cell follows the peak of v_in (the slow
// shaper output, in mV above the baseline); the rundown then lasts
// v_peak * SH_NS_PER_MV.
// ADC: s2[k] copies buffer k to C_TDC; when s3 rises the comparator output
// goes high after the rundown time; rst_adc returns it low, rst_buf[k] clears
// buffer k. The current and capacitor ratios (I_TAC 25 uA, I_TDC 0.78 uA,
// C_TAC 0.5 pF, C_TDC 2 pF) and the 5 ns clock follow the chip description;
// the S&H transfer slope is this model's choice.
`timescale 1ns / 1ps
module tac_adc_model #(
  parameter int  N_BUF        = 4,
  parameter real INTERP       = 128.0,
  parameter real SH_NS_PER_MV = 5.0
) (
  input  logic             trig,
  input  logic [N_BUF-1:0] arm,
  input  logic [N_BUF-1:0] sample,
  input  real              v_in,
  input  logic [N_BUF-1:0] s2,
  input  logic             s3,
  input  logic [N_BUF-1:0] rst_buf,
  input  logic             rst_adc,
  output logic             comp_out
);

  real    t_start;
  int     k_trig;
  real    held_ns [N_BUF];   // rundown time each buffer would produce
  real    tdc_ns;            // rundown time held on C_TDC
  int     rundown_gen;

  initial begin
    comp_out    = 1'b0;
    tdc_ns      = 0.0;
    k_trig      = -1;
    rundown_gen = 0;
    for (int i = 0; i < N_BUF; i++) held_ns[i] = 0.0;
  end

  // TAC integration
  always @(posedge trig) begin
    k_trig = -1;
    for (int i = 0; i < N_BUF; i++) if (arm[i]) k_trig = i;
    t_start = $realtime;
  end
  always @(negedge trig) begin
    if (k_trig >= 0) held_ns[k_trig] = INTERP * ($realtime - t_start);
    k_trig = -1;
  end

  // S&H peak tracking
  always @(v_in or sample) begin
    for (int i = 0; i < N_BUF; i++)
      if (sample[i] && v_in * SH_NS_PER_MV > held_ns[i]) held_ns[i] = v_in * SH_NS_PER_MV;
  end

  // Transfer, buffer reset
  always @(s2 or rst_buf) begin
    for (int i = 0; i < N_BUF; i++) begin
      if (s2[i])      tdc_ns     = held_ns[i];
      if (rst_buf[i]) held_ns[i] = 0.0;
    end
  end

  // Wilkinson rundown and comparator
  always @(posedge s3) begin
    int gen;
    rundown_gen = rundown_gen + 1;
    gen         = rundown_gen;
    comp_out    = 1'b0;
    #(tdc_ns);
    if (gen == rundown_gen && s3) comp_out = 1'b1;
  end
  always @(posedge rst_adc) begin
    rundown_gen = rundown_gen + 1;
    comp_out    = 1'b0;
    tdc_ns      = 0.0;
  end

endmodule
