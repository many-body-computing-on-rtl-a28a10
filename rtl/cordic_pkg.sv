// cordic_pkg: shift-and-add trigonometry shared by the XY Monte Carlo engine and the
// iTEBD Jacobi SVD.
//
// Angles are binary angles: an unsigned 32-bit word where 2^32 is one full turn, so
// angle arithmetic wraps modulo 2*pi for free. Data words are signed fixed point of any
// scaling the caller chooses (the routines are scale-free), held in 64 bits.
//
// cordic_rotate : rotates the vector (x, y) by an angle (rotation mode). The result is
//                 gain-corrected, so cos(a) = cordic_rotate(1.0, 0, a).x.
// cordic_vector : returns atan2(y, x) as a binary angle and the gain-corrected length
//                 sqrt(x^2 + y^2) (vectoring mode).
//
// Both are combinational functions of CORDIC_ITER = 30 micro-rotations; a caller that
// needs a shorter clock period places registers around them. The paper computes these
// functions in 64-bit floating point through its HLS tool; CORDIC fixed point is this
// design's choice.
package cordic_pkg;

  localparam int CORDIC_ITER = 30;

  typedef logic [31:0]        angle_t;   // binary angle, 2^32 = 2*pi
  typedef logic signed [63:0] word_t;    // caller-scaled fixed point

  localparam angle_t ANGLE_180 = 32'h8000_0000;

  // 1/K for 30 iterations, K = prod_i sqrt(1 + 2^-2i), as an unsigned Q0.32 fraction.
  localparam logic [32:0] CORDIC_INV_GAIN = 33'd2608131496;

  // atan(2^-i) / (2*pi) * 2^32, rounded: the micro-rotation angles as binary angles.
  function automatic angle_t cordic_atan(input int i);
    case (i)
      0: return 32'd536870912;   1: return 32'd316933406;   2: return 32'd167458907;
      3: return 32'd85004756;    4: return 32'd42667331;    5: return 32'd21354465;
      6: return 32'd10679838;    7: return 32'd5340245;     8: return 32'd2670163;
      9: return 32'd1335087;    10: return 32'd667544;     11: return 32'd333772;
     12: return 32'd166886;     13: return 32'd83443;      14: return 32'd41722;
     15: return 32'd20861;      16: return 32'd10430;      17: return 32'd5215;
     18: return 32'd2608;       19: return 32'd1304;       20: return 32'd652;
     21: return 32'd326;        22: return 32'd163;        23: return 32'd81;
     24: return 32'd41;         25: return 32'd20;         26: return 32'd10;
     27: return 32'd5;          28: return 32'd3;          29: return 32'd1;
     default: return 32'd0;
    endcase
  endfunction

  // Multiply by 1/K (gain correction), rounding to nearest.
  function automatic word_t cordic_gain_fix(input word_t v);
    logic signed [97:0] p;
    p = v * $signed({1'b0, CORDIC_INV_GAIN});
    p = p + (98'sd1 <<< 31);
    return word_t'(p >>> 32);
  endfunction

  function automatic void cordic_rotate(input word_t x_in, input word_t y_in,
                                        input angle_t ang,
                                        output word_t x_out, output word_t y_out);
    word_t x, y, xn;
    angle_t z;
    x = x_in; y = y_in; z = ang;
    // Bring the residual angle into [-90, 90) degrees by a 180 degree pre-rotation.
    if (z[31] ^ z[30]) begin
      x = -x; y = -y; z = z + ANGLE_180;
    end
    for (int i = 0; i < CORDIC_ITER; i++) begin
      if (!z[31]) begin
        xn = x - (y >>> i); y = y + (x >>> i); z = z - cordic_atan(i);
      end else begin
        xn = x + (y >>> i); y = y - (x >>> i); z = z + cordic_atan(i);
      end
      x = xn;
    end
    x_out = cordic_gain_fix(x);
    y_out = cordic_gain_fix(y);
  endfunction

  function automatic void cordic_vector(input word_t x_in, input word_t y_in,
                                        output angle_t ang, output word_t mag);
    word_t x, y, xn;
    angle_t z;
    x = x_in; y = y_in; z = '0;
    if (x < 0) begin
      x = -x; y = -y; z = ANGLE_180;
    end
    for (int i = 0; i < CORDIC_ITER; i++) begin
      if (y < 0) begin
        xn = x - (y >>> i); y = y + (x >>> i); z = z - cordic_atan(i);
      end else begin
        xn = x + (y >>> i); y = y - (x >>> i); z = z + cordic_atan(i);
      end
      x = xn;
    end
    ang = z;
    mag = cordic_gain_fix(x);
  endfunction

endpackage
