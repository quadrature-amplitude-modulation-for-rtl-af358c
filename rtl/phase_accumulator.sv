// phase_accumulator -- W-bit phase register advanced by a frequency tuning word.
//
// Each clock the phase grows by `ftw` (modulo 2^W), so the output frequency is
// ftw / 2^W times the sample rate. The phase is never reloaded when the tuning word changes,
// which is what makes frequency updates phase-continuous. The accumulator itself is named in
// the paper; the width, the clock enable and the reset to zero phase are this design's choices.
// Timing: `phase` is registered; a new `ftw` first shows in `phase` one cycle later.
module phase_accumulator #(
  parameter int unsigned W = 32
) (
  input  logic         clk,
  input  logic         rst_n,   // synchronous, active low: phase <= 0
  input  logic         en,      // advance this cycle
  input  logic [W-1:0] ftw,
  output logic [W-1:0] phase
);
  always_ff @(posedge clk) begin
    if (!rst_n)  phase <= '0;
    else if (en) phase <= phase + ftw;
  end
endmodule
