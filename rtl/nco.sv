// nco -- numerically controlled oscillator for the carrier, cos(Wc t) and sin(Wc t).
//
// A 48-bit phase accumulator advances by the frequency tuning word (FTW) each sample; the
// upper 32 phase bits drive two sine tables, the cosine one a quarter turn ahead.
// Output frequency = FTW / 2^48 * f_s. A new FTW is taken when `ftw_valid` is high and is
// used from the next sample on; the phase register is never reloaded, so every frequency
// change is phase-continuous, the property the paper relies on to retune the carrier while
// the laser stays locked. In the real device this oscillator is the hardened NCO of the RF
// data converter; its function (FTW, phase continuity) follows the paper, the 48-bit width
// and the table-based phase-to-amplitude conversion are this design's choices.
// Timing: ftw_valid at edge k loads the FTW register; the first phase step with the new FTW
// is at edge k+1; cos/sin follow the phase by LUT_LATENCY (2) cycles.
module nco
  import esb_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    ftw_valid,
  input  ftw_t    ftw_in,
  output ftw_t    ftw,        // tuning word in use
  output sample_t cos_out,
  output sample_t sin_out
);
  ftw_t phase;

  always_ff @(posedge clk) begin
    if (!rst_n)         ftw <= '0;
    else if (ftw_valid) ftw <= ftw_in;
  end

  phase_accumulator #(.W(FTW_W)) u_acc (
    .clk, .rst_n, .en(1'b1), .ftw(ftw), .phase(phase)
  );

  logic [PHASE_W-1:0] ph_sin, ph_cos;
  assign ph_sin = phase[FTW_W-1 -: PHASE_W];
  assign ph_cos = ph_sin + (PHASE_W'(1) << (PHASE_W-2));  // + quarter turn

  sin_lut_interp u_sin (.clk, .phase(ph_sin), .y(sin_out));
  sin_lut_interp u_cos (.clk, .phase(ph_cos), .y(cos_out));
endmodule
