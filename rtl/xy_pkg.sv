// xy_pkg: types and constants of the XY-model Metropolis Monte Carlo engine.
//
// Spin angles theta in [0, 2*pi) are 32-bit binary angles (2^32 = 2*pi), the form the
// paper's "divide the random number by m/2*pi" takes when m is a power of two. Cosines,
// energies and local energy differences are signed fixed point with XY_EF = 29 fraction
// bits. The decision factor p in [0, 1) is an unsigned 32-bit fraction. The per-site
// random state is the 48-bit LCG word of the paper (m = 2^48).
package xy_pkg;

  localparam int XY_EF = 29;                         // fraction bits of energies
  localparam longint XY_ONE = 64'sd1 <<< XY_EF;      // 1.0 in that format

  typedef logic [31:0]        xy_angle_t;
  typedef logic [47:0]        lcg_state_t;
  typedef logic [31:0]        prob_t;                // Q0.32
  typedef logic signed [39:0] xy_energy_t;           // Q10.29, holds sums of 8 cosines

  // LCG constants given in the paper: X' = (a X + c) mod 2^48.
  localparam lcg_state_t LCG_A = 48'd25214903917;
  localparam lcg_state_t LCG_C = 48'd11;

  // Inverse temperature beta = 1/T as unsigned Q8.24. Default T = 0.85:
  // round(2^24 / 0.85) = 19737901.
  localparam logic [31:0] BETA_T085_Q24 = 32'd19737901;

  // log2(e) as Q2.30: round(1.4426950408889634 * 2^30).
  localparam logic [31:0] LOG2E_Q30 = 32'd1549082005;

endpackage
