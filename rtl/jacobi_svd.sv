// jacobi_svd: singular value decomposition M = U diag(s) V^T of the 2Db x 2Db iTEBD
// matrix by the two-sided (Brent-Luk) Jacobi method the paper uses.
//
// The rows and columns are grouped into Db pairs, which cuts M into Db x Db blocks of
// 2 x 2. One Jacobi step:
//   1. angles: for each diagonal block [[a, b], [c, d]] (pair p, q) a left angle tl and a
//      right angle tr are found that make R(tl) [[a,b],[c,d]] R(tr)^T diagonal:
//        g = atan2(c - b, a + d), h = atan2(b + c, a - d), tl = -(g + h)/2, tr = (g - h)/2
//      reduced to the smallest equivalent rotations (|tl| <= 45, |tr| <= 90 degrees)
//      (two CORDIC vectorings per block, one block per cycle, Db cycles);
//   2. rotation: every 2 x 2 block (r, c) of M is rotated by the left angle of row pair r
//      and the right angle of column pair c, and the accumulated U and V by the left
//      and right angles of their column pairs (U <- U J_l, V <- V J_r). One block of M,
//      U and V per cycle with eight CORDIC rotations, Db^2 cycles;
//   3. reordering: the pairing changes by the systolic rule of the paper: the index in
//      position 2i-1 moves to 2i+1 and the one in 2i+2 to 2i (positions 1-based), with
//      1 -> 1, 2 -> 3 and 2Db-1 -> 2Db. After 2Db-1 steps (one sweep) every pair of
//      indices has met once and the order is back to 1 ... 2Db.
// The reordering is applied to an index table (ord) instead of moving matrix rows, so
// data never moves; pair r is (ord[2r], ord[2r+1]). This, the 2 x 2 angle formulas and
// the CORDIC arithmetic are this design's choices; the blocking, the use of the diagonal
// blocks' angles for the whole block row and column (Fig. S3) and the order are the
// paper's. The paper does not say how many sweeps are run: n_sweeps is an input.
//
// The diagonal of M then holds the singular values, with signs (handled downstream).
// Ports: quad writes load M (from itebd_presvd); start resets U = V = I and the order
// and runs n_sweeps sweeps; done pulses at the end. Read ports give M's diagonal and
// two U and two V elements per cycle (combinational). A step takes Db^2 + Db + 1
// cycles, a sweep (2Db - 1) times that.
module jacobi_svd
  import cordic_pkg::*;
  import itebd_pkg::*;
#(
  parameter int DB = 30,
  parameter int IW = $clog2(DB),
  parameter int NW = $clog2(2 * DB)
) (
  input  logic          clk,
  input  logic          rst_n,
  // load M, one quad per cycle while idle
  input  logic          m_we,
  input  logic [IW-1:0] m_i,
  input  logic [IW-1:0] m_j,
  input  fx_t           m_uu,
  input  fx_t           m_ud,
  input  fx_t           m_du,
  input  fx_t           m_dd,
  // run
  input  logic          start,
  input  logic [7:0]    n_sweeps,
  output logic          busy,
  output logic          done,
  // results
  input  logic [NW-1:0] rd_diag,
  output fx_t           diag_val,
  input  logic [NW-1:0] rd_row [2],
  input  logic [NW-1:0] rd_col,
  output fx_t           u_val [2],
  output fx_t           v_val [2]
);

  localparam int N = 2 * DB;

  fx_t m [N][N];
  fx_t u [N][N];
  fx_t v [N][N];
  logic [NW-1:0] ord [N];
  angle_t tl [DB];
  angle_t tr [DB];

  typedef enum logic [2:0] {J_IDLE, J_INIT, J_ANG, J_ROT, J_PERM} state_t;
  state_t state;
  logic [IW-1:0] ra, cb;       // block row / column pair
  logic [7:0]    sweep;
  logic [NW-1:0] step;

  assign busy = (state != J_IDLE);

  // ---- 1. angles of diagonal block ra ----
  angle_t ang_l, ang_r;
  always_comb begin
    fx_t a, b, c, d, mag_g, mag_h;
    angle_t g, h, al, ar, k90;
    logic signed [32:0] sum, dif;
    a = m[ord[2*ra]][ord[2*ra]];
    b = m[ord[2*ra]][ord[2*ra+1]];
    c = m[ord[2*ra+1]][ord[2*ra]];
    d = m[ord[2*ra+1]][ord[2*ra+1]];
    cordic_vector(a + d, c - b, g, mag_g);
    cordic_vector(a - d, b + c, h, mag_h);
    sum = $signed({g[31], g}) + $signed({h[31], h});
    dif = $signed({g[31], g}) - $signed({h[31], h});
    al = angle_t'(-(sum >>> 1));
    ar = angle_t'(dif >>> 1);
    // Of the equivalent solutions take the smallest rotations: shift both angles by the
    // multiple of 90 degrees that brings tl into [-45, 45) degrees, then tr into
    // [-90, 90) by a 180 degree turn (which only flips a sign). Without this the
    // iteration can swap rows back and forth and not converge.
    k90   = (al + 32'h2000_0000) & 32'hC000_0000;
    ang_l = al - k90;
    ar    = ar - k90;
    ang_r = (ar[31] ^ ar[30]) ? ar + ANGLE_180 : ar;
  end

  // ---- 2. rotation of block (ra, cb) ----
  logic [NW-1:0] rp, rq, cp, cq;
  fx_t x00, x01, x10, x11;   // rotated M block
  fx_t u0p, u0q, u1p, u1q;   // rotated U rows rp, rq at columns cp, cq
  fx_t v0p, v0q, v1p, v1q;
  always_comb begin
    fx_t y00, y01, y10, y11;
    rp = ord[2*ra]; rq = ord[2*ra+1];
    cp = ord[2*cb]; cq = ord[2*cb+1];
    // left rotation on the two columns of the block
    cordic_rotate(m[rp][cp], m[rq][cp], tl[ra], y00, y10);
    cordic_rotate(m[rp][cq], m[rq][cq], tl[ra], y01, y11);
    // right rotation on the two rows
    cordic_rotate(y00, y01, tr[cb], x00, x01);
    cordic_rotate(y10, y11, tr[cb], x10, x11);
    // U <- U J_l and V <- V J_r on rows rp, rq, column pair cb
    cordic_rotate(u[rp][cp], u[rp][cq], tl[cb], u0p, u0q);
    cordic_rotate(u[rq][cp], u[rq][cq], tl[cb], u1p, u1q);
    cordic_rotate(v[rp][cp], v[rp][cq], tr[cb], v0p, v0q);
    cordic_rotate(v[rq][cp], v[rq][cq], tr[cb], v1p, v1q);
  end

  // ---- 3. systolic reordering (0-based positions) ----
  function automatic logic [NW-1:0] new_pos(input int p);
    if (p == 0)                 return '0;
    else if (p == 1)            return NW'(2);
    else if (p == N - 2)        return NW'(N - 1);
    else if (p % 2 == 0)        return NW'(p + 2);
    else                        return NW'(p - 2);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= J_IDLE;
      done  <= 1'b0;
      ra <= '0; cb <= '0; sweep <= '0; step <= '0;
      for (int p = 0; p < N; p++) ord[p] <= NW'(p);
    end else begin
      done <= 1'b0;
      unique case (state)
        J_IDLE: begin
          if (m_we) begin
            m[NW'(m_i)][NW'(m_j)]             <= m_uu;
            m[NW'(m_i)][NW'(DB) + NW'(m_j)]   <= m_ud;
            m[NW'(DB) + NW'(m_i)][NW'(m_j)]   <= m_du;
            m[NW'(DB) + NW'(m_i)][NW'(DB) + NW'(m_j)] <= m_dd;
          end
          if (start) state <= J_INIT;
        end
        J_INIT: begin
          for (int r = 0; r < N; r++) begin
            ord[r] <= NW'(r);
            for (int c = 0; c < N; c++) begin
              u[r][c] <= (r == c) ? FX_ONE : '0;
              v[r][c] <= (r == c) ? FX_ONE : '0;
            end
          end
          sweep <= '0; step <= '0; ra <= '0; cb <= '0;
          if (n_sweeps == 8'd0) begin
            state <= J_IDLE;
            done  <= 1'b1;
          end else state <= J_ANG;
        end
        J_ANG: begin
          tl[ra] <= ang_l;
          tr[ra] <= ang_r;
          if (ra == IW'(DB - 1)) begin
            ra <= '0; cb <= '0;
            state <= J_ROT;
          end else ra <= ra + 1'b1;
        end
        J_ROT: begin
          m[rp][cp] <= x00; m[rp][cq] <= x01;
          m[rq][cp] <= x10; m[rq][cq] <= x11;
          u[rp][cp] <= u0p; u[rp][cq] <= u0q;
          u[rq][cp] <= u1p; u[rq][cq] <= u1q;
          v[rp][cp] <= v0p; v[rp][cq] <= v0q;
          v[rq][cp] <= v1p; v[rq][cq] <= v1q;
          if (cb == IW'(DB - 1)) begin
            cb <= '0;
            if (ra == IW'(DB - 1)) begin
              ra <= '0;
              state <= J_PERM;
            end else ra <= ra + 1'b1;
          end else cb <= cb + 1'b1;
        end
        J_PERM: begin
          for (int p = 0; p < N; p++) ord[new_pos(p)] <= ord[p];
          if (step == NW'(N - 2)) begin
            step <= '0;
            if (sweep == n_sweeps - 8'd1) begin
              state <= J_IDLE;
              done  <= 1'b1;
            end else begin
              sweep <= sweep + 8'd1;
              state <= J_ANG;
            end
          end else begin
            step  <= step + 1'b1;
            state <= J_ANG;
          end
        end
        default: state <= J_IDLE;
      endcase
    end
  end

  assign diag_val = m[rd_diag][rd_diag];
  always_comb begin
    for (int r = 0; r < 2; r++) begin
      u_val[r] = u[rd_row[r]][rd_col];
      v_val[r] = v[rd_row[r]][rd_col];
    end
  end

endmodule
