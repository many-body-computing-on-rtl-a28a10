// tb_itebd_presvd: drives random A_up, A_dn, Bt_up, Bt_dn (Db = 3), bond weights and the
// tau = 0.01 gate, and compares every quad written with
//   AB_ab[i][j] = lambda1[i] sum_k A_a[i][k] lambda2[k] Bt_b[j][k] lambda1[j],
//   M_uu = e0 AB_uu, M_ud = e1 AB_ud + e2 AB_du, M_du = e2 AB_ud + e1 AB_du,
//   M_dd = e0 AB_dd,
// computed here in double precision (tolerance 1e-9). Checks that each (i, j) is
// written once and the run length Db^2 (Db + 1) + 1 cycles.
module tb_itebd_presvd;
  import itebd_pkg::*;

  localparam int DB = 3, IW = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start = 1'b0, busy, done, m_we;
  fx_t a_up [DB][DB], a_dn [DB][DB], bt_up [DB][DB], bt_dn [DB][DB];
  fx_t lam1 [DB], lam2 [DB];
  fx_t e0 = E0_TAU001, e1 = E1_TAU001, e2 = E2_TAU001;
  logic [IW-1:0] m_i, m_j;
  fx_t m_uu, m_ud, m_du, m_dd;
  int checks = 0, failures = 0;

  itebd_presvd #(.DB(DB)) dut (.*);

  function automatic real r(fx_t x);
    return real'(x) / 1099511627776.0;
  endfunction
  function automatic fx_t rnd();
    return fx_t'(longint'((real'($urandom_range(2000)) - 1000.0) / 1000.0 * 1099511627776.0));
  endfunction
  function automatic logic close(real a, real b);
    real d;
    d = a - b;
    if (d < 0) d = -d;
    return d <= 1e-9;
  endfunction

  int seen [DB][DB];

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (m_we) begin
    real ab [2][2];
    real x [4];
    for (int a = 0; a < 2; a++)
      for (int b = 0; b < 2; b++) begin
        ab[a][b] = 0.0;
        for (int k = 0; k < DB; k++)
          ab[a][b] += r(a ? a_dn[m_i][k] : a_up[m_i][k]) * r(lam2[k]) * r(b ? bt_dn[m_j][k] : bt_up[m_j][k]);
        ab[a][b] *= r(lam1[m_i]) * r(lam1[m_j]);
      end
    x[0] = r(e0) * ab[0][0];
    x[1] = r(e1) * ab[0][1] + r(e2) * ab[1][0];
    x[2] = r(e2) * ab[0][1] + r(e1) * ab[1][0];
    x[3] = r(e0) * ab[1][1];
    seen[m_i][m_j]++;
    checks += 4;
    if (!close(r(m_uu), x[0])) begin failures++; $display("FAIL uu %0d %0d", m_i, m_j); end
    if (!close(r(m_ud), x[1])) begin failures++; $display("FAIL ud %0d %0d", m_i, m_j); end
    if (!close(r(m_du), x[2])) begin failures++; $display("FAIL du %0d %0d", m_i, m_j); end
    if (!close(r(m_dd), x[3])) begin failures++; $display("FAIL dd %0d %0d", m_i, m_j); end
  end

  initial begin
    int cycles;
    for (int i = 0; i < DB; i++) begin
      lam1[i] = rnd(); lam2[i] = rnd();
      for (int j = 0; j < DB; j++) begin
        a_up[i][j] = rnd(); a_dn[i][j] = rnd(); bt_up[i][j] = rnd(); bt_dn[i][j] = rnd();
        seen[i][j] = 0;
      end
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
    checks++;
    if (cycles != DB * DB * (DB + 1) + 1) begin failures++; $display("FAIL cycles %0d", cycles); end
    @(negedge clk);   // the last quad leaves with done
    for (int i = 0; i < DB; i++)
      for (int j = 0; j < DB; j++) begin
        checks++;
        if (seen[i][j] != 1) begin failures++; $display("FAIL (%0d,%0d) written %0d times", i, j, seen[i][j]); end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
