// Tone manager: generator and processor of one tone of the comb.
//
// A phase accumulator drives a pipelined CORDIC; its sine and cosine go to
// the two comb adders (in quadrature) and, as local oscillator, to the I&Q
// demodulator, which multiplies them with the common ADC stream. Two CIC
// low-pass accumulators integrate the I and Q products over a frame and give
// their 32-bit sums at each dump. This is the structure of the original
// design. The per-tone enable is this design's choice: a disabled tone adds
// zero to the combs but is still demodulated, which gives a blind channel.
// The demodulator uses the very sine/cosine samples sent to the comb, so the
// loop latency (comb adder, DAC, analog chain, ADC) only rotates the measured
// I&Q by a constant phase.
// Timing: sin_o/cos_o follow freq_word with the phase accumulator (1) plus
// CORDIC (14) latency; i_o/q_o and the iq_valid strobe come one clock after
// dump, dump marking the frame's last demodulated sample.
module tone_manager
  import kid_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst,
  input  logic [PHASE_W-1:0]       freq_word,
  input  logic                     enable,
  input  logic signed [ADC_W-1:0]  adc,
  input  logic                     dump,
  output logic signed [SC_W-1:0]   sin_o,
  output logic signed [SC_W-1:0]   cos_o,
  output logic signed [IQ_W-1:0]   i_o,
  output logic signed [IQ_W-1:0]   q_o,
  output logic                     iq_valid
);

  logic [PHASE_W-1:0]       phase;
  logic signed [SC_W-1:0]   sin_w, cos_w;
  logic signed [PROD_W-1:0] prod_i, prod_q;
  logic                     q_valid;

  phase_acc #(.PHASE_W(PHASE_W)) u_phase (
    .clk, .rst, .freq_word, .phase
  );

  cordic #(.PHASE_W(PHASE_W), .OUT_W(SC_W)) u_cordic (
    .clk, .rst, .phase, .sin_o(sin_w), .cos_o(cos_w)
  );

  assign sin_o = enable ? sin_w : '0;
  assign cos_o = enable ? cos_w : '0;

  iq_demod #(.ADC_W(ADC_W), .SC_W(SC_W), .PROD_W(PROD_W)) u_demod (
    .clk, .adc, .sin_i(sin_w), .cos_i(cos_w), .i_o(prod_i), .q_o(prod_q)
  );

  cic_lpf #(.IN_W(PROD_W), .ACC_W(ACC_W), .OUT_W(IQ_W)) u_lpf_i (
    .clk, .rst, .din(prod_i), .dump, .dout(i_o), .dout_valid(iq_valid)
  );

  cic_lpf #(.IN_W(PROD_W), .ACC_W(ACC_W), .OUT_W(IQ_W)) u_lpf_q (
    .clk, .rst, .din(prod_q), .dump, .dout(q_o), .dout_valid(q_valid)
  );

  // Both channels share the dump, so their strobes coincide.
  a_iq_strobes: assert property (@(posedge clk) disable iff (rst) iq_valid == q_valid);

endmodule
