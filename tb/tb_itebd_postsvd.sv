// tb_itebd_postsvd: feeds the post-SVD stage (Db = 3) with a diagonal of six signed
// singular values, random U and V (read through the same ports the SVD provides, modelled
// here by arrays) and a lambda1 with one entry below the clamp, and compares with values
// computed here in double precision:
//  * the three kept values are the largest |s|, written as lambda1 in decreasing order,
//    normalised to unit norm; lambda2 receives the old lambda1;
//  * A'_b[k][j] = V[(b,j)][sel k] / lambda1[j] and Bt'_a[k][j] = sign U[(a,j)][sel k] /
//    lambda1[j], with 1/lambda1 limited at 2^20 for the clamped entry (relative 1e-9);
//  * the counts of negative kept values and clamped lambdas.
module tb_itebd_postsvd;
  import itebd_pkg::*;

  localparam int DB = 3, N = 6, IW = 2, NW = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start = 1'b0, busy, done;
  fx_t lam1 [DB];
  logic [NW-1:0] rd_diag, rd_col;
  logic [NW-1:0] rd_row [2];
  fx_t diag_val, u_val [2], v_val [2];
  logic t_we, l_we;
  logic [IW-1:0] t_row, t_col, l_idx;
  fx_t a_up_new, a_dn_new, bt_up_new, bt_dn_new, lam1_new, lam2_new;
  logic [NW:0] n_negative;
  logic [IW:0] n_clamped;
  int checks = 0, failures = 0;

  itebd_postsvd #(.DB(DB)) dut (.*);

  fx_t sd [N], um [N][N], vm [N][N];
  assign diag_val = sd[rd_diag];
  always_comb for (int t = 0; t < 2; t++) begin
    u_val[t] = um[rd_row[t]][rd_col];
    v_val[t] = vm[rd_row[t]][rd_col];
  end

  function automatic real r(fx_t x);
    return real'(x) / 1099511627776.0;
  endfunction
  function automatic fx_t f(real x);
    return fx_t'(longint'(x * 1099511627776.0));
  endfunction
  function automatic logic close(real a, real b, real tol);
    real d;
    d = a - b;
    if (d < 0) d = -d;
    return d <= tol * (1.0 + (b < 0 ? -b : b));
  endfunction

  // expected: s = {0.3, -0.9, 0.05, 0.6, -0.01, 0.2}: kept (by |s|) indices 1, 3, 0
  real sv [N] = '{0.3, -0.9, 0.05, 0.6, -0.01, 0.2};
  int  keep [DB] = '{1, 3, 0};
  real l1 [DB] = '{0.8, 0.5, 1e-7};

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_t = 0, n_l = 0;
  always @(negedge clk) begin
    if (l_we) begin
      real nrm, il;
      nrm = $sqrt(0.81 + 0.36 + 0.09);
      checks += 2;
      n_l++;
      if (!close(r(lam1_new), (sv[keep[l_idx]] < 0 ? -sv[keep[l_idx]] : sv[keep[l_idx]]) / nrm, 1e-9)) begin
        failures++; $display("FAIL lam1_new[%0d] %f", l_idx, r(lam1_new));
      end
      if (lam2_new !== lam1[l_idx]) begin failures++; $display("FAIL lam2_new[%0d]", l_idx); end
    end
    if (t_we) begin
      real il, sg;
      int c;
      c  = keep[t_row];
      il = 1.0 / (l1[t_col] < 1.0 / 1048576.0 ? 1.0 / 1048576.0 : l1[t_col]);
      sg = sv[c] < 0 ? -1.0 : 1.0;
      n_t++;
      checks += 4;
      if (!close(r(a_up_new), r(vm[t_col][c]) * il, 1e-9)) begin failures++; $display("FAIL a_up %0d %0d", t_row, t_col); end
      if (!close(r(a_dn_new), r(vm[DB + t_col][c]) * il, 1e-9)) begin failures++; $display("FAIL a_dn %0d %0d", t_row, t_col); end
      if (!close(r(bt_up_new), sg * r(um[t_col][c]) * il, 1e-9)) begin failures++; $display("FAIL bt_up %0d %0d %f %f", t_row, t_col, r(bt_up_new), sg * r(um[t_col][c]) * il); end
      if (!close(r(bt_dn_new), sg * r(um[DB + t_col][c]) * il, 1e-9)) begin failures++; $display("FAIL bt_dn %0d %0d", t_row, t_col); end
    end
  end

  initial begin
    for (int t = 0; t < N; t++) begin
      sd[t] = f(sv[t]);
      for (int c = 0; c < N; c++) begin
        um[t][c] = f((real'($urandom_range(2000)) - 1000.0) / 1000.0);
        vm[t][c] = f((real'($urandom_range(2000)) - 1000.0) / 1000.0);
      end
    end
    for (int t = 0; t < DB; t++) lam1[t] = f(l1[t]);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
    @(negedge clk);
    checks += 4;
    if (n_t != DB * DB) begin failures++; $display("FAIL %0d tensor writes", n_t); end
    if (n_l != DB) begin failures++; $display("FAIL %0d lambda writes", n_l); end
    if (n_negative != 1) begin failures++; $display("FAIL n_negative %0d", n_negative); end
    if (n_clamped != 1) begin failures++; $display("FAIL n_clamped %0d", n_clamped); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
