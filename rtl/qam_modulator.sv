// qam_modulator -- digital I/Q up-converter: V = I cos(Wc t) + Q sin(Wc t).
//
// Two signed 16x16 multipliers and an adder, as in the quadrature modulator of the paper:
// the in-phase baseband multiplies the cosine carrier, the quadrature baseband the sine
// carrier, and the products are summed. The Q1.15 result is rounded and saturated to 16 bits.
// The structure is the paper's; rounding, saturation and the single register are this
// design's choices.
// Timing: one register, latency 1, one sample per clock.
module qam_modulator
  import esb_pkg::*;
(
  input  logic    clk,
  input  sample_t i_in,
  input  sample_t q_in,
  input  sample_t cos_in,
  input  sample_t sin_in,
  output sample_t v_out
);
  logic signed [2*SAMPLE_W-1:0] p_i, p_q;
  logic signed [47:0]           acc;

  assign p_i = i_in * cos_in;
  assign p_q = q_in * sin_in;
  assign acc = (48'(p_i) + 48'(p_q) + 48'sd16384) >>> 15;

  always_ff @(posedge clk) v_out <= sat_sample(acc);
endmodule
