// esb_pkg -- shared types and constants of the electronic-sideband (ESB) rf generator.
//
// The generator synthesises V(t) = I(t) cos(Wc t) + Q(t) sin(Wc t) with
// I = xi_I sin(beta_m sin(Wm t)) + Delta_I and Q = xi_Q cos(beta_m sin(Wm t) + phi) + Delta_Q.
// This package fixes the number formats used by every block:
//   * samples (I, Q, NCO outputs, V) are 16-bit two's complement, full scale +/-32767 = +/-1.0;
//   * phases are unsigned fractions of a turn (2^W = one turn);
//   * beta_m and phi are given in radians, Q3.13 (1.01 rad = 8274);
//   * xi_I and xi_Q are unsigned Q1.15 gains (1.0 = 32768);
//   * Delta_I and Delta_Q are signed offsets in output LSBs.
// The formats, the 48-bit carrier tuning word and the register map are this design's own
// choices; the paper gives the quantities, not their encodings.
package esb_pkg;

  localparam int unsigned SAMPLE_W = 16;  // width of every sample
  localparam int unsigned FTW_W    = 48;  // carrier NCO tuning word / phase width
  localparam int unsigned PHASE_W  = 32;  // baseband phase width and LUT phase input width
  localparam int unsigned PARAM_W  = 16;  // width of beta, phi, xi and Delta fields
  localparam int unsigned ADDR_W   = 32;  // byte address of the FTW list
  localparam int unsigned MEM_W    = 64;  // one FTW list entry (FTW in bits 47:0)
  localparam int unsigned REG_AW   = 4;   // register word address
  localparam int unsigned REG_DW   = 32;  // register data

  // Radians (Q3.13) to turns in 2^32 units: 2^32 / (2 pi) / 2^13 = 2^19 / (2 pi) = 83443.03.
  localparam longint RAD_Q13_TO_TURN32 = 64'd83443;

  // Latencies in clock cycles (see the blocks).
  localparam int unsigned LUT_LATENCY = 2;                 // sin_lut_interp
  localparam int unsigned IQ_LATENCY  = 1 + LUT_LATENCY + 1 + LUT_LATENCY + 1; // phase register to I/Q
  localparam int unsigned NCO_LATENCY = 1 + LUT_LATENCY;   // FTW register to cos/sin

  typedef logic signed [SAMPLE_W-1:0] sample_t;
  typedef logic        [FTW_W-1:0]    ftw_t;

  // Quantities the processor sets for the I/Q generator (QAM and compensation parameters).
  typedef struct packed {
    logic [PHASE_W-1:0]        ftw_m;    // Omega_m / f_s * 2^32
    logic [PARAM_W-1:0]        beta;     // beta_m, radians Q3.13
    logic signed [PARAM_W-1:0] phi;      // phi', radians Q3.13
    logic [PARAM_W-1:0]        xi_i;     // xi_I', Q1.15
    logic [PARAM_W-1:0]        xi_q;     // xi_Q', Q1.15
    logic signed [PARAM_W-1:0] delta_i;  // Delta_I', LSBs
    logic signed [PARAM_W-1:0] delta_q;  // Delta_Q', LSBs
  } iq_params_t;

  // DMA descriptor: where the FTW list is, how long it is and how far apart updates are.
  typedef struct packed {
    logic [ADDR_W-1:0] src_addr;  // byte address of the first 64-bit entry
    logic [31:0]       count;     // number of FTWs in the list
    logic [31:0]       period;    // clock cycles between consecutive FTW updates
  } dma_cfg_t;

  // Register map (32-bit words).
  typedef enum logic [REG_AW-1:0] {
    REG_FTW_M      = 4'd0,
    REG_BETA       = 4'd1,
    REG_PHI        = 4'd2,
    REG_XI_I       = 4'd3,
    REG_XI_Q       = 4'd4,
    REG_DELTA_I    = 4'd5,
    REG_DELTA_Q    = 4'd6,
    REG_DMA_ADDR   = 4'd7,
    REG_DMA_COUNT  = 4'd8,
    REG_DMA_PERIOD = 4'd9,
    REG_STATUS     = 4'd10   // read only: bit 0 = DMA busy
  } reg_addr_e;

  // Saturate a wide signed value to a sample.
  function automatic sample_t sat_sample(input logic signed [47:0] x);
    if (x > 48'sd32767)       return sample_t'(16'sd32767);
    else if (x < -48'sd32768) return sample_t'(-16'sd32768);
    else                      return sample_t'(x);
  endfunction

endpackage
