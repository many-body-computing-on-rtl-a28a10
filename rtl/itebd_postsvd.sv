// itebd_postsvd: the post-SVD stage of one iTEBD update (third step of the paper's
// Fig. 3): truncation to Db states, new bond weights, and lambda1^-1 contracted into
// the singular vectors, followed by the exchange A <-> B, lambda1 <-> lambda2 that
// prepares the next update.
//
// With M = U diag(s) V^T from jacobi_svd (s signed, rows/columns indexed (spin, bond)):
//   1. DIAG  read the 2Db diagonal values, keep |s| and the sign            (2Db cycles)
//   2. SEL   pick the Db largest |s|, largest first (one arg-max per cycle)  (Db cycles)
//   3. NORM  n = sqrt(sum of the kept s^2), by chained CORDIC vectoring      (Db cycles)
//   4. RECIP 1/n and 1/lambda1[i] (lambda1 clamped below at LAMBDA_MIN)     (Db+1 divisions)
//   5. LAM   new lambda1[k] = |s_k| / n, new lambda2[k] = old lambda1[k]     (Db cycles)
//   6. WRITE for each kept k and bond j, one cycle, four elements:
//              A'_b[k][j]  = V[(b, j)][k] / lambda1[j]            (the old B becomes A)
//              Bt'_a[k][j] = sign_k U[(a, j)][k] / lambda1[j]      (the old A becomes B)
//            written transposed so that the arrays keep their layout
//            (A rows = left bond, Bt rows = right bond)                    (Db^2 cycles)
// The truncation, the use of the kept singular values as the new lambda and the
// contraction of lambda1^-1 into U and V are the paper's. Normalising lambda to unit
// norm, ordering by size, the clamp of small lambda1 before inversion and the folding of
// the A/B exchange into the write-back are this design's choices; the paper does not
// say how it keeps the numbers bounded.
module itebd_postsvd
  import cordic_pkg::*;
  import itebd_pkg::*;
#(
  parameter int DB = 30,
  parameter int IW = $clog2(DB),
  parameter int NW = $clog2(2 * DB)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  output logic          busy,
  output logic          done,
  input  fx_t           lam1 [DB],
  // reads from the SVD
  output logic [NW-1:0] rd_diag,
  input  fx_t           diag_val,
  output logic [NW-1:0] rd_row [2],
  output logic [NW-1:0] rd_col,
  input  fx_t           u_val [2],
  input  fx_t           v_val [2],
  // new tensors: one (k, j) element of each of the four matrices per write
  output logic          t_we,
  output logic [IW-1:0] t_row,
  output logic [IW-1:0] t_col,
  output fx_t           a_up_new,
  output fx_t           a_dn_new,
  output fx_t           bt_up_new,
  output fx_t           bt_dn_new,
  // new bond weights
  output logic          l_we,
  output logic [IW-1:0] l_idx,
  output fx_t           lam1_new,
  output fx_t           lam2_new,
  // statistics of this update
  output logic [NW:0]   n_negative,   // kept singular values that came out negative
  output logic [IW:0]   n_clamped     // lambda1 entries clamped before inversion
);

  localparam int N = 2 * DB;

  typedef enum logic [2:0] {Q_IDLE, Q_DIAG, Q_SEL, Q_NORM, Q_RECIP, Q_LAM, Q_WRITE} state_t;
  state_t state;

  fx_t            sabs  [N];
  logic           sneg  [N];
  logic           taken [N];
  logic [NW-1:0]  sel   [DB];
  fx_t            inv_l [DB];
  fx_t            norm, inv_n;
  logic [NW-1:0]  r;
  logic [IW-1:0]  k, j;
  logic [IW:0]    ridx;       // reciprocal being formed: 0..DB-1 lambda1, DB the norm
  logic           div_wait;

  assign busy = (state != Q_IDLE);

  // ---- arg-max of the not yet taken |s| ----
  logic [NW-1:0] best;
  always_comb begin
    fx_t bv;
    best = '0;
    bv   = -64'sd1;
    for (int t = 0; t < N; t++)
      if (!taken[t] && sabs[t] > bv) begin
        bv   = sabs[t];
        best = NW'(t);
      end
  end

  // ---- norm accumulation ----
  fx_t    norm_next;
  angle_t norm_ang;
  always_comb cordic_vector(norm, sabs[sel[k]], norm_ang, norm_next);

  // ---- divider ----
  logic div_start, div_busy, div_done;
  fx_t  div_d, div_q;
  fx_t  lam_c;
  always_comb begin
    lam_c = (ridx < (IW+1)'(DB)) ? lam1[IW'(ridx)] : norm;
    div_d = (lam_c < LAMBDA_MIN) ? LAMBDA_MIN : lam_c;
  end
  assign div_start = (state == Q_RECIP) && !div_wait;

  fx_recip u_recip (
    .clk, .rst_n, .start(div_start), .d(div_d), .busy(div_busy), .done(div_done), .q(div_q)
  );

  // ---- read addresses ----
  always_comb begin
    rd_diag   = r;
    rd_col    = sel[k];
    rd_row[0] = NW'(j);
    rd_row[1] = NW'(DB) + NW'(j);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= Q_IDLE;
      done <= 1'b0; t_we <= 1'b0; l_we <= 1'b0;
      r <= '0; k <= '0; j <= '0; ridx <= '0; div_wait <= 1'b0;
      norm <= '0; inv_n <= '0;
      t_row <= '0; t_col <= '0; l_idx <= '0;
      a_up_new <= '0; a_dn_new <= '0; bt_up_new <= '0; bt_dn_new <= '0;
      lam1_new <= '0; lam2_new <= '0;
      n_negative <= '0; n_clamped <= '0;
      for (int t = 0; t < N; t++) begin sabs[t] <= '0; sneg[t] <= 1'b0; taken[t] <= 1'b0; end
      for (int t = 0; t < DB; t++) begin sel[t] <= '0; inv_l[t] <= '0; end
    end else begin
      done <= 1'b0;
      t_we <= 1'b0;
      l_we <= 1'b0;
      unique case (state)
        Q_IDLE: if (start) begin
          state <= Q_DIAG;
          r <= '0; k <= '0; j <= '0;
          n_negative <= '0; n_clamped <= '0;
        end
        Q_DIAG: begin
          sneg[r]  <= diag_val[63];
          sabs[r]  <= diag_val[63] ? -diag_val : diag_val;
          taken[r] <= 1'b0;
          if (r == NW'(N - 1)) state <= Q_SEL;
          else                 r <= r + 1'b1;
        end
        Q_SEL: begin
          sel[k]      <= best;
          taken[best] <= 1'b1;
          n_negative  <= n_negative + (NW+1)'(sneg[best]);
          if (k == IW'(DB - 1)) begin
            k <= '0; norm <= '0;
            state <= Q_NORM;
          end else k <= k + 1'b1;
        end
        Q_NORM: begin
          norm <= norm_next;
          if (k == IW'(DB - 1)) begin
            k <= '0; ridx <= '0; div_wait <= 1'b0;
            state <= Q_RECIP;
          end else k <= k + 1'b1;
        end
        Q_RECIP: begin
          if (!div_wait) begin
            div_wait <= 1'b1;
            if (ridx < (IW+1)'(DB) && lam1[IW'(ridx)] < LAMBDA_MIN)
              n_clamped <= n_clamped + 1'b1;
          end else if (div_done) begin
            div_wait <= 1'b0;
            if (ridx == (IW+1)'(DB)) begin
              inv_n <= div_q;
              k <= '0;
              state <= Q_LAM;
            end else begin
              inv_l[IW'(ridx)] <= div_q;
              ridx <= ridx + 1'b1;
            end
          end
        end
        Q_LAM: begin
          l_we     <= 1'b1;
          l_idx    <= k;
          lam1_new <= fx_mul(sabs[sel[k]], inv_n);
          lam2_new <= lam1[k];
          if (k == IW'(DB - 1)) begin
            k <= '0; j <= '0;
            state <= Q_WRITE;
          end else k <= k + 1'b1;
        end
        Q_WRITE: begin
          t_we      <= 1'b1;
          t_row     <= k;
          t_col     <= j;
          a_up_new  <= fx_mul(v_val[0], inv_l[j]);
          a_dn_new  <= fx_mul(v_val[1], inv_l[j]);
          bt_up_new <= sneg[sel[k]] ? -fx_mul(u_val[0], inv_l[j]) : fx_mul(u_val[0], inv_l[j]);
          bt_dn_new <= sneg[sel[k]] ? -fx_mul(u_val[1], inv_l[j]) : fx_mul(u_val[1], inv_l[j]);
          if (j == IW'(DB - 1)) begin
            j <= '0;
            if (k == IW'(DB - 1)) begin
              state <= Q_IDLE;
              done  <= 1'b1;
            end else k <= k + 1'b1;
          end else j <= j + 1'b1;
        end
        default: state <= Q_IDLE;
      endcase
    end
  end

endmodule
