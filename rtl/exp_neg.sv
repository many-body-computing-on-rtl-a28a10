// exp_neg: the Metropolis probability P = exp(-y) for y >= 0, as an unsigned Q1.32
// fraction (P = 1.0 is 2^32).
//
// Range reduction: z = y * log2(e), split into an integer part n and a fraction f, so
// exp(-y) = 2^-f * 2^-n. 2^-f comes from a table of 2^FRAC_BITS entries indexed by the
// top bits of f (entry k = 2^(-k / 2^FRAC_BITS)) with linear interpolation on the next
// 16 bits of f, and 2^-n is a right shift. The table is
// computed during elaboration (one entry more, for k = 2^FRAC_BITS) from the Taylor series of exp(-k ln2 / 2^FRAC_BITS) in
// integer arithmetic, so no numbers are stored in the source. With FRAC_BITS = 10 the
// relative error of P from interpolation is below 1e-7, plus the Q0.32 rounding. The paper evaluates P in 64-bit
// floating point; this fixed-point form is this design's choice.
//
// Input y: unsigned, XY_EF fraction bits. Combinational.
module exp_neg
  import xy_pkg::*;
#(
  parameter int FRAC_BITS = 10
) (
  input  logic [47:0] y,
  output logic [32:0] p
);

  localparam int TBL = 1 << FRAC_BITS;

  // 2^(-k/TBL) as Q1.32, from sum_j (-x)^j / j!, x = k ln2 / TBL, evaluated in Q.60.
  function automatic logic [32:0] pow2_neg(input int k);
    localparam logic [127:0] LN2_Q60 = 128'd799144290325165952; // round(ln2 * 2^60)
    logic [127:0] x, term, acc;
    x    = (LN2_Q60 * 128'(k)) / 128'(TBL);
    term = 128'd1 << 60;
    acc  = term;
    for (int j = 1; j < 24; j++) begin
      term = ((term * x) >> 60) / 128'(j);
      if (j % 2 == 1) acc = acc - term;
      else            acc = acc + term;
    end
    return 33'((acc + (128'd1 << 27)) >> 28);
  endfunction

  logic [32:0] pow2_tbl [TBL + 1];
  for (genvar k = 0; k <= TBL; k++) begin : g_tbl
    localparam logic [32:0] ENTRY = pow2_neg(k);
    assign pow2_tbl[k] = ENTRY;
  end

  logic [79:0] z;          // y * log2e, XY_EF + 30 fraction bits
  logic [20:0] n;          // integer part of z
  logic [FRAC_BITS-1:0] f; // leading fraction bits of z: table index
  logic [15:0] r;           // next 16 fraction bits: interpolation weight
  logic [32:0] t0, t1, pf;
  logic [48:0] step;

  always_comb begin
    z    = y * LOG2E_Q30;
    n    = z[79 : XY_EF + 30];
    f    = z[XY_EF + 30 - 1 -: FRAC_BITS];
    r    = z[XY_EF + 30 - 1 - FRAC_BITS -: 16];
    t0   = pow2_tbl[f];
    t1   = pow2_tbl[(FRAC_BITS + 1)'(f) + 1'b1];
    step = (t0 - t1) * r;
    pf   = t0 - 33'(step >> 16);
    if (n > 21'd32) p = '0;
    else            p = pf >> n[5:0];
  end

endmodule
