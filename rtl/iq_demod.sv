// I&Q demodulator of one tone.
//
// The ADC sample is multiplied by the tone's cosine (in-phase branch, I) and
// by its sine (quadrature branch, Q). Of each signed ADC_W x SC_W product
// (24 bits) the PROD_W = 20 most significant bits are kept and go to the
// low-pass accumulators, as in the original design. Keeping them by
// truncation (floor) and the single output register are this design's
// choices. Timing: latency 1 clock, one sample per clock.
module iq_demod #(
  parameter int unsigned ADC_W  = kid_pkg::ADC_W,
  parameter int unsigned SC_W   = kid_pkg::SC_W,
  parameter int unsigned PROD_W = kid_pkg::PROD_W
) (
  input  logic                     clk,
  input  logic signed [ADC_W-1:0]  adc,
  input  logic signed [SC_W-1:0]   sin_i,
  input  logic signed [SC_W-1:0]   cos_i,
  output logic signed [PROD_W-1:0] i_o,
  output logic signed [PROD_W-1:0] q_o
);

  localparam int unsigned FULL_W = ADC_W + SC_W;

  logic signed [FULL_W-1:0] prod_i, prod_q;
  assign prod_i = FULL_W'(adc) * FULL_W'(cos_i);
  assign prod_q = FULL_W'(adc) * FULL_W'(sin_i);

  always_ff @(posedge clk) begin
    i_o <= prod_i[FULL_W-1 -: PROD_W];
    q_o <= prod_q[FULL_W-1 -: PROD_W];
  end

endmodule
