// itebd_engine: infinite time-evolving block decimation (iTEBD) for the spin-1/2
// antiferromagnetic Heisenberg chain, in the element-matrix form the paper proposes.
//
// State: the two-site unit cell as four Db x Db matrices A_up, A_dn (rows = left bond)
// and Bt_up, Bt_dn (B transposed: rows = right bond), and the bond weight vectors
// lambda1 (outer bonds) and lambda2 (shared bond). One iteration applies the gate
// U_T = exp(-tau H_ij) (elements e0, e1, e2) to the bond and re-splits it:
//
//   pre-SVD  (itebd_presvd)  M = U_T (lambda1 A lambda2 B lambda1),  2Db x 2Db
//   SVD      (jacobi_svd)    M = U diag(s) V^T, two-sided Jacobi, n_sweeps sweeps
//   post-SVD (itebd_postsvd) keep the Db largest s, new lambda, lambda1^-1 into U, V,
//                            then exchange A <-> B and lambda1 <-> lambda2
//
// so that consecutive iterations act alternately on the two kinds of bond, as in the
// paper's Fig. 3. n_iter iterations run after start; done pulses at the end.
//
// Host port (while idle): host_sel picks the array (0 A_up, 1 A_dn, 2 Bt_up, 3 Bt_dn,
// 4 lambda1, 5 lambda2; vectors use host_col), host_we writes host_wdata, host_rdata
// reads combinationally. The ground-state energy is formed by the host from the read
// back state (the paper does not say where its energy is computed). Counters report
// how often singular values came out negative and bond weights were clamped.
//
// Cycles of one iteration: Db^2 (Db+1) + 1 (pre) + n_sweeps (2Db-1)(Db^2+Db+1) + 2 (SVD)
// + about 3Db + (Db+1)(2 FX_F + 3) + Db + Db^2 (post), plus a few of control.
module itebd_engine
  import itebd_pkg::*;
#(
  parameter int DB = 30,
  parameter int IW = $clog2(DB),
  parameter int NW = $clog2(2 * DB)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [31:0]   n_iter,
  input  logic [7:0]    n_sweeps,
  input  fx_t           e0,
  input  fx_t           e1,
  input  fx_t           e2,
  output logic          busy,
  output logic          done,
  output logic [31:0]   iters_done,
  // host access while idle
  input  logic          host_we,
  input  logic [2:0]    host_sel,
  input  logic [IW-1:0] host_row,
  input  logic [IW-1:0] host_col,
  input  fx_t           host_wdata,
  output fx_t           host_rdata,
  // statistics
  output logic [31:0]   neg_count,
  output logic [31:0]   clamp_count,
  output logic [31:0]   last_iter_cycles
);

  fx_t a_up [DB][DB], a_dn [DB][DB], bt_up [DB][DB], bt_dn [DB][DB];
  fx_t lam1 [DB], lam2 [DB];

  typedef enum logic [2:0] {E_IDLE, E_CHECK, E_PRE, E_SVD, E_POST, E_NEXT} state_t;
  state_t state;
  logic   sub_start;
  logic [31:0] cyc;

  assign busy = (state != E_IDLE);

  // ---- pre-SVD ----
  logic          pre_busy, pre_done, m_we;
  logic [IW-1:0] m_i, m_j;
  fx_t           m_uu, m_ud, m_du, m_dd;

  itebd_presvd #(.DB(DB), .IW(IW)) u_pre (
    .clk, .rst_n,
    .start(sub_start && state == E_PRE), .busy(pre_busy), .done(pre_done),
    .a_up, .a_dn, .bt_up, .bt_dn, .lam1, .lam2, .e0, .e1, .e2,
    .m_we, .m_i, .m_j, .m_uu, .m_ud, .m_du, .m_dd
  );

  // ---- SVD ----
  logic          svd_busy, svd_done;
  logic [NW-1:0] rd_diag, rd_col;
  logic [NW-1:0] rd_row [2];
  fx_t           diag_val;
  fx_t           u_val [2], v_val [2];

  jacobi_svd #(.DB(DB), .IW(IW), .NW(NW)) u_svd (
    .clk, .rst_n,
    .m_we, .m_i, .m_j, .m_uu, .m_ud, .m_du, .m_dd,
    .start(sub_start && state == E_SVD), .n_sweeps, .busy(svd_busy), .done(svd_done),
    .rd_diag, .diag_val, .rd_row, .rd_col, .u_val, .v_val
  );

  // ---- post-SVD ----
  logic          post_busy, post_done, t_we, l_we;
  logic [IW-1:0] t_row, t_col, l_idx;
  fx_t           a_up_new, a_dn_new, bt_up_new, bt_dn_new, lam1_new, lam2_new;
  logic [NW:0]   n_negative;
  logic [IW:0]   n_clamped;

  itebd_postsvd #(.DB(DB), .IW(IW), .NW(NW)) u_post (
    .clk, .rst_n,
    .start(sub_start && state == E_POST), .busy(post_busy), .done(post_done),
    .lam1,
    .rd_diag, .diag_val, .rd_row, .rd_col, .u_val, .v_val,
    .t_we, .t_row, .t_col, .a_up_new, .a_dn_new, .bt_up_new, .bt_dn_new,
    .l_we, .l_idx, .lam1_new, .lam2_new,
    .n_negative, .n_clamped
  );

  // ---- state arrays ----
  always_ff @(posedge clk) begin
    if (state == E_IDLE && host_we) begin
      unique case (host_sel)
        3'd0: a_up[host_row][host_col]  <= host_wdata;
        3'd1: a_dn[host_row][host_col]  <= host_wdata;
        3'd2: bt_up[host_row][host_col] <= host_wdata;
        3'd3: bt_dn[host_row][host_col] <= host_wdata;
        3'd4: lam1[host_col]            <= host_wdata;
        3'd5: lam2[host_col]            <= host_wdata;
        default: ;
      endcase
    end
    if (t_we) begin
      a_up[t_row][t_col]  <= a_up_new;
      a_dn[t_row][t_col]  <= a_dn_new;
      bt_up[t_row][t_col] <= bt_up_new;
      bt_dn[t_row][t_col] <= bt_dn_new;
    end
    if (l_we) begin
      lam1[l_idx] <= lam1_new;
      lam2[l_idx] <= lam2_new;
    end
  end

  always_comb begin
    unique case (host_sel)
      3'd0:    host_rdata = a_up[host_row][host_col];
      3'd1:    host_rdata = a_dn[host_row][host_col];
      3'd2:    host_rdata = bt_up[host_row][host_col];
      3'd3:    host_rdata = bt_dn[host_row][host_col];
      3'd4:    host_rdata = lam1[host_col];
      3'd5:    host_rdata = lam2[host_col];
      default: host_rdata = '0;
    endcase
  end

  // ---- control ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= E_IDLE;
      sub_start <= 1'b0;
      done <= 1'b0;
      iters_done <= '0;
      neg_count <= '0; clamp_count <= '0;
      cyc <= '0; last_iter_cycles <= '0;
    end else begin
      done <= 1'b0;
      sub_start <= 1'b0;
      cyc <= cyc + 32'd1;
      unique case (state)
        E_IDLE: if (start) begin
          iters_done <= '0;
          neg_count <= '0; clamp_count <= '0;
          state <= E_CHECK;
        end
        E_CHECK: begin
          if (iters_done == n_iter) begin
            done  <= 1'b1;
            state <= E_IDLE;
          end else begin
            cyc       <= 32'd1;
            sub_start <= 1'b1;
            state     <= E_PRE;
          end
        end
        E_PRE: if (pre_done) begin
          sub_start <= 1'b1;
          state     <= E_SVD;
        end
        E_SVD: if (svd_done) begin
          sub_start <= 1'b1;
          state     <= E_POST;
        end
        E_POST: if (post_done) begin
          neg_count   <= neg_count + 32'(n_negative);
          clamp_count <= clamp_count + 32'(n_clamped);
          state       <= E_NEXT;
        end
        E_NEXT: begin
          iters_done       <= iters_done + 32'd1;
          last_iter_cycles <= cyc;
          state            <= E_CHECK;
        end
        default: state <= E_IDLE;
      endcase
    end
  end

  // the three stages never overlap
  // checked from the first clock after reset
  logic chk_en = 1'b0;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) chk_en <= 1'b0;
    else        chk_en <= 1'b1;

  assert property (@(posedge clk) disable iff (!chk_en) !(pre_busy && svd_busy) && !(svd_busy && post_busy) && !(pre_busy && post_busy))
    else $error("itebd_engine: pre-SVD, SVD and post-SVD overlap");

endmodule
