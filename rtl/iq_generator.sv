// iq_generator -- baseband I/Q synthesiser with digital pre-distortion.
//
// Produces the two baseband waveforms whose quadrature up-conversion is the phase-modulated
// ESB drive:
//   I(t) = xi_I' sin(beta_m sin(Wm t)) + Delta_I'
//   Q(t) = xi_Q' cos(beta_m sin(Wm t) + phi') + Delta_Q'
// With xi_I' = xi_Q', phi' = 0 and Delta' = 0 this is the ideal I = xi sin(theta),
// Q = xi cos(theta), theta = beta_m sin(Wm t); the primed compensation values let the
// processor pre-distort the baseband to cancel (or deliberately inject) gain imbalance,
// phase imbalance and DC offsets. As in the paper the generator is a phase accumulator,
// phase-to-amplitude look-up tables and interpolation:
//   1. a 32-bit phase accumulator at Wm (ftw_m = Wm / f_s * 2^32);
//   2. a sine table gives sin(Wm t);
//   3. a multiplier scales it by beta_m and converts radians to turns, giving theta;
//   4. two sine tables give sin(theta) and sin(theta + phi' + pi/2) = cos(theta + phi');
//   5. multipliers by xi_I', xi_Q' and adders of Delta_I', Delta_Q', with saturation.
// Number formats are in esb_pkg. Pipeline organisation, formats and saturation are this
// design's choices. Parameters are sampled every clock; a change reaches the outputs within
// IQ_LATENCY cycles.
// Timing: one I/Q pair per clock; phase register to outputs IQ_LATENCY (7) cycles.
module iq_generator
  import esb_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  iq_params_t p,
  output sample_t    i_out,
  output sample_t    q_out
);
  // 1. modulation phase
  logic [PHASE_W-1:0] ph_m;
  phase_accumulator #(.W(PHASE_W)) u_acc (
    .clk, .rst_n, .en(1'b1), .ftw(p.ftw_m), .phase(ph_m)
  );

  // 2. sin(Wm t)
  sample_t s_m;
  sin_lut_interp u_lut_m (.clk, .phase(ph_m), .y(s_m));

  // 3. theta = beta_m * sin(Wm t), in turns (2^32 = one turn)
  logic signed [SAMPLE_W+PARAM_W:0] prod_rad;    // Q4.28 radians
  logic signed [63:0]               theta_wide;
  logic [PHASE_W-1:0]               theta;
  assign prod_rad   = s_m * $signed({1'b0, p.beta});
  assign theta_wide = (64'(prod_rad) * RAD_Q13_TO_TURN32) >>> 15;
  always_ff @(posedge clk) theta <= theta_wide[PHASE_W-1:0];

  // phi' in turns
  logic signed [63:0] phi_wide;
  assign phi_wide = 64'(p.phi) * RAD_Q13_TO_TURN32;

  // 4. sin(theta) and cos(theta + phi')
  logic [PHASE_W-1:0] ph_i, ph_q;
  assign ph_i = theta;
  assign ph_q = theta + phi_wide[PHASE_W-1:0] + (PHASE_W'(1) << (PHASE_W-2));

  sample_t s_i, s_q;
  sin_lut_interp u_lut_i (.clk, .phase(ph_i), .y(s_i));
  sin_lut_interp u_lut_q (.clk, .phase(ph_q), .y(s_q));

  // 5. gain and offset
  logic signed [47:0] a_i, a_q;
  assign a_i = ((48'(s_i) * 48'($signed({1'b0, p.xi_i})) + 48'sd16384) >>> 15) + 48'(p.delta_i);
  assign a_q = ((48'(s_q) * 48'($signed({1'b0, p.xi_q})) + 48'sd16384) >>> 15) + 48'(p.delta_q);

  always_ff @(posedge clk) begin
    i_out <= sat_sample(a_i);
    q_out <= sat_sample(a_q);
  end
endmodule
