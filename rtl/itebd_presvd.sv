// itebd_presvd: the pre-SVD stage of one iTEBD update (first step of the paper's
// Fig. 3).
//
// The unit cell is held as element matrices rather than as a rank-3 tensor, as the
// paper proposes: A_up, A_dn (Db x Db, rows = left bond i, columns = shared bond k) and
// B_up, B_dn stored transposed as Bt (rows = right bond j, columns = shared bond k), so
// that the paper's product AB_ab = A_a B_b^T is a row-by-row dot product. With the
// bond weights multiplied in (lambda1 A lambda2 and B lambda1),
//   AB_ab[i][j] = lambda1[i] * sum_k A_a[i][k] lambda2[k] Bt_b[j][k] * lambda1[j],
// and the gate reassembles the four blocks into the 2Db x 2Db matrix M with row index
// (a, i) = a*Db + i and column index (b, j) = b*Db + j:
//   M_uu = e0 AB_uu,            M_ud = e1 AB_ud + e2 AB_du,
//   M_du = e2 AB_ud + e1 AB_du, M_dd = e0 AB_dd.
// The block placement is that of the paper's Fig. 3 and Eq. (3).
//
// Schedule: for each (i, j) the four dot products run in parallel, one k per cycle
// (four multiply-accumulates per cycle); one more cycle applies lambda1[i] lambda1[j]
// and the gate and emits the four M elements of (i, j) as one quad write. A run takes
// Db^2 (Db + 1) + 1 cycles. Multiplying lambda1 in after the sum instead of into A and
// B beforehand is this design's choice; the arithmetic is the same.
module itebd_presvd
  import itebd_pkg::*;
#(
  parameter int DB = 30,
  parameter int IW = $clog2(DB)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  output logic          busy,
  output logic          done,
  input  fx_t           a_up  [DB][DB],
  input  fx_t           a_dn  [DB][DB],
  input  fx_t           bt_up [DB][DB],
  input  fx_t           bt_dn [DB][DB],
  input  fx_t           lam1  [DB],
  input  fx_t           lam2  [DB],
  input  fx_t           e0,
  input  fx_t           e1,
  input  fx_t           e2,
  // quad write into M: (i,j), (i,Db+j), (Db+i,j), (Db+i,Db+j)
  output logic          m_we,
  output logic [IW-1:0] m_i,
  output logic [IW-1:0] m_j,
  output fx_t           m_uu,
  output fx_t           m_ud,
  output fx_t           m_du,
  output fx_t           m_dd
);

  typedef enum logic [1:0] {P_IDLE, P_MAC, P_OUT} state_t;
  state_t state;

  logic [IW-1:0] i, j, k;
  fx_t acc_uu, acc_ud, acc_du, acc_dd;

  assign busy = (state != P_IDLE);

  // one multiply-accumulate step for each of the four spin combinations
  fx_t au_l, ad_l;
  always_comb begin
    au_l = fx_mul(a_up[i][k], lam2[k]);
    ad_l = fx_mul(a_dn[i][k], lam2[k]);
  end

  // final scaling and gate
  fx_t w, ab_uu, ab_ud, ab_du, ab_dd;
  always_comb begin
    w     = fx_mul(lam1[i], lam1[j]);
    ab_uu = fx_mul(acc_uu, w);
    ab_ud = fx_mul(acc_ud, w);
    ab_du = fx_mul(acc_du, w);
    ab_dd = fx_mul(acc_dd, w);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= P_IDLE;
      done  <= 1'b0;
      m_we  <= 1'b0;
      i <= '0; j <= '0; k <= '0;
      acc_uu <= '0; acc_ud <= '0; acc_du <= '0; acc_dd <= '0;
      m_i <= '0; m_j <= '0;
      m_uu <= '0; m_ud <= '0; m_du <= '0; m_dd <= '0;
    end else begin
      done <= 1'b0;
      m_we <= 1'b0;
      unique case (state)
        P_IDLE: if (start) begin
          state <= P_MAC;
          i <= '0; j <= '0; k <= '0;
          acc_uu <= '0; acc_ud <= '0; acc_du <= '0; acc_dd <= '0;
        end
        P_MAC: begin
          acc_uu <= acc_uu + fx_mul(au_l, bt_up[j][k]);
          acc_ud <= acc_ud + fx_mul(au_l, bt_dn[j][k]);
          acc_du <= acc_du + fx_mul(ad_l, bt_up[j][k]);
          acc_dd <= acc_dd + fx_mul(ad_l, bt_dn[j][k]);
          if (k == IW'(DB - 1)) state <= P_OUT;
          else                  k <= k + 1'b1;
        end
        P_OUT: begin
          m_we <= 1'b1;
          m_i  <= i;
          m_j  <= j;
          m_uu <= fx_mul(e0, ab_uu);
          m_ud <= fx_mul(e1, ab_ud) + fx_mul(e2, ab_du);
          m_du <= fx_mul(e2, ab_ud) + fx_mul(e1, ab_du);
          m_dd <= fx_mul(e0, ab_dd);
          acc_uu <= '0; acc_ud <= '0; acc_du <= '0; acc_dd <= '0;
          k <= '0;
          if (j == IW'(DB - 1)) begin
            j <= '0;
            if (i == IW'(DB - 1)) begin
              state <= P_IDLE;
              done  <= 1'b1;
            end else begin
              i     <= i + 1'b1;
              state <= P_MAC;
            end
          end else begin
            j     <= j + 1'b1;
            state <= P_MAC;
          end
        end
        default: state <= P_IDLE;
      endcase
    end
  end

endmodule
