// itebd_pkg: number format and constants of the iTEBD engine (imaginary-time evolution
// of the spin-1/2 Heisenberg chain with a two-site unit cell A, B and bond vectors
// lambda1, lambda2).
//
// All tensor elements, bond weights and gate elements are signed fixed point, 64 bits
// with FX_F = 40 fraction bits (range +-2^23, resolution 9e-13). The paper computes in
// 64-bit floating point; this fixed-point format is this design's choice. Products are
// formed at full width and rounded back (fx_mul).
//
// The gate U_T = exp(-tau H_ij) in the basis {uu, ud, du, dd} has three distinct
// elements: e0 = <uu|U|uu> = <dd|U|dd>, e1 = <ud|U|ud> = <du|U|du>,
// e2 = <ud|U|du> = <du|U|ud>. For H_ij = S_i . S_j (triplet energy 1/4, singlet -3/4):
//   e0 = exp(-tau/4),  e1 = (exp(-tau/4) + exp(3 tau/4)) / 2,
//   e2 = (exp(-tau/4) - exp(3 tau/4)) / 2.
// The defaults are these values for the paper's time step tau = 0.01, times 2^40.
package itebd_pkg;

  import cordic_pkg::word_t;

  localparam int FX_F = 40;
  typedef word_t fx_t;

  localparam fx_t FX_ONE = 64'sd1 <<< FX_F;

  localparam fx_t E0_TAU001 = 64'sd1096766281819;   //  0.99750312
  localparam fx_t E1_TAU001 = 64'sd1102277624011;   //  1.00251566
  localparam fx_t E2_TAU001 = -64'sd5511342192;     // -0.00501254

  // Smallest bond weight whose inverse is formed exactly; smaller weights are treated
  // as this value when lambda^-1 is contracted (2^-20, about 1e-6).
  localparam fx_t LAMBDA_MIN = 64'sd1 <<< (FX_F - 20);

  function automatic fx_t fx_mul(input fx_t a, input fx_t b);
    logic signed [127:0] p;
    p = 128'(a) * 128'(b);
    p = p + (128'sd1 <<< (FX_F - 1));
    return fx_t'(p >>> FX_F);
  endfunction

endpackage
