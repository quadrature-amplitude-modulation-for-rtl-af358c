// sin_lut_interp -- phase-to-amplitude converter: sine look-up table with linear interpolation.
//
// The upper AW bits of the 32-bit phase (one turn = 2^32) index a table of 2^AW sine
// samples, amplitude 32767; the next FRAC bits interpolate linearly between that entry and
// the next one (wrapping at the end of the turn). With AW = 10 the interpolation error is
// about one LSB of the 16-bit output. The table is a constant computed at elaboration with
// integer arithmetic (see sin_entry), so it synthesises as a ROM. The paper names
// phase-to-amplitude look-up tables and interpolation modules; table size, interpolation
// order and rounding are this design's choices.
// Timing: two-cycle latency, one result per clock.
module sin_lut_interp
  import esb_pkg::*;
#(
  parameter int unsigned AW   = 10,  // log2 of table entries
  parameter int unsigned FRAC = 12   // interpolation bits below the index
) (
  input  logic               clk,
  input  logic [PHASE_W-1:0] phase,
  output sample_t            y
);
  localparam int unsigned N = 1 << AW;

  // Table entry k = round(32767 * sin(2 pi k / N)), computed with integers only: the angle is
  // folded into the first quadrant and its sine summed as a 9-term Taylor series in Q30.
  function automatic sample_t sin_entry(input int unsigned k);
    longint      x, x2, term, acc;
    int unsigned q, r;
    q = (k / (N / 4)) % 4;
    r = k % (N / 4);
    if (q == 1 || q == 3) r = N / 4 - r;
    x    = (64'sd6746518852 * longint'(r)) / longint'(N);   // 2 pi * 2^30 * r / N
    x2   = (x * x) >>> 30;
    term = x;
    acc  = x;
    for (int n = 1; n <= 8; n++) begin
      term = -((term * x2) >>> 30) / longint'((2 * n) * (2 * n + 1));
      acc  = acc + term;
    end
    acc = (acc * 32767 + (64'sd1 <<< 29)) >>> 30;
    return (q >= 2) ? sample_t'(-acc) : sample_t'(acc);
  endfunction

  function automatic logic [N*SAMPLE_W-1:0] gen_table();
    logic [N*SAMPLE_W-1:0] t;
    for (int k = 0; k < N; k++) t[k*SAMPLE_W +: SAMPLE_W] = sin_entry(k);
    return t;
  endfunction

  localparam logic [N*SAMPLE_W-1:0] ROM = gen_table();

  logic [AW-1:0]   idx, idx_next;
  logic [FRAC-1:0] frac;
  assign idx      = phase[PHASE_W-1 -: AW];
  assign frac     = phase[PHASE_W-1-AW -: FRAC];
  assign idx_next = idx + 1'b1;

  // stage 1: table reads
  sample_t         y0_q, y1_q;
  logic [FRAC-1:0] frac_q;
  always_ff @(posedge clk) begin
    y0_q   <= ROM[idx*SAMPLE_W +: SAMPLE_W];
    y1_q   <= ROM[idx_next*SAMPLE_W +: SAMPLE_W];
    frac_q <= frac;
  end

  // stage 2: y0 + (y1 - y0) * frac, rounded
  logic signed [SAMPLE_W:0]        diff;
  logic signed [SAMPLE_W+FRAC+1:0] prod;
  logic signed [SAMPLE_W+1:0]      step;
  assign diff = {y1_q[SAMPLE_W-1], y1_q} - {y0_q[SAMPLE_W-1], y0_q};
  assign prod = diff * $signed({1'b0, frac_q}) + (1 <<< (FRAC-1));
  assign step = (SAMPLE_W+2)'(prod >>> FRAC);

  always_ff @(posedge clk) y <= sample_t'((SAMPLE_W+2)'(y0_q) + step);
endmodule
