// tb_jacobi_svd: loads a random 8 x 8 matrix (Db = 4) into the Jacobi SVD and checks:
//  * the pairing order after each of the seven steps of the first sweep against the
//    sequences printed in the paper for Db = 4 (1,4,2,6,3,8,5,7; 1,6,4,8,2,7,3,5; ...),
//    and that it is back to 1..8 after the sweep;
//  * after the run: off-diagonal elements of the rotated M below 1e-6, U and V
//    orthogonal to 1e-6, and U diag(M) V^T equal to the loaded matrix to 1e-6,
//    all computed here in double precision;
//  * the cycle count of a run: n_sweeps (2Db - 1) (Db^2 + Db + 1) + 2 (start and initialisation).
module tb_jacobi_svd;
  import itebd_pkg::*;

  localparam int DB = 4, N = 8, IW = 2, NW = 3, SWEEPS = 6;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic m_we = 1'b0, start = 1'b0, busy, done;
  logic [IW-1:0] m_i = '0, m_j = '0;
  fx_t m_uu = '0, m_ud = '0, m_du = '0, m_dd = '0;
  logic [7:0] n_sweeps = SWEEPS;
  logic [NW-1:0] rd_diag = '0, rd_col = '0;
  logic [NW-1:0] rd_row [2] = '{default: '0};
  fx_t diag_val;
  fx_t u_val [2], v_val [2];
  int checks = 0, failures = 0;

  jacobi_svd #(.DB(DB)) dut (.*);

  real a0 [N][N], uu [N][N], vv [N][N], s [N];

  // The paper's sequences for Db = 4 (1-based), steps 1..7 of a sweep.
  int seq [8][N] = '{'{1,2,3,4,5,6,7,8}, '{1,4,2,6,3,8,5,7}, '{1,6,4,8,2,7,3,5},
                     '{1,8,6,7,4,5,2,3}, '{1,7,8,5,6,3,4,2}, '{1,5,7,3,8,2,6,4},
                     '{1,3,5,2,7,4,8,6}, '{1,2,3,4,5,6,7,8}};

  function automatic real r(fx_t x);
    return real'(x) / 1099511627776.0;
  endfunction

  function automatic real absr(real x);
    return x < 0 ? -x : x;
  endfunction

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // order check: sample ord each time the state machine leaves J_PERM in sweep 0
  int perm_seen = 0;
  always @(negedge clk) begin
    if (busy && dut.state == 3'd2 && dut.ra == 0 && dut.sweep == 0 && perm_seen < 8) begin
      logic ok;
      ok = 1'b1;
      for (int p = 0; p < N; p++) if (int'(dut.ord[p]) + 1 != seq[perm_seen][p]) ok = 1'b0;
      checks++;
      if (!ok) begin failures++; $display("FAIL order at step %0d", perm_seen); end
      perm_seen++;
    end
  end

  initial begin
    int cyc0, cycles;
    real err, e2;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int i = 0; i < DB; i++)
      for (int j = 0; j < DB; j++) begin
        fx_t q [4];
        for (int t = 0; t < 4; t++) q[t] = fx_t'($signed($urandom()) >>> 2) <<< 10;
        a0[i][j] = r(q[0]); a0[i][DB+j] = r(q[1]); a0[DB+i][j] = r(q[2]); a0[DB+i][DB+j] = r(q[3]);
        m_we = 1'b1; m_i = IW'(i); m_j = IW'(j);
        m_uu = q[0]; m_ud = q[1]; m_du = q[2]; m_dd = q[3];
        @(negedge clk);
      end
    m_we = 1'b0;
    start = 1'b1; cyc0 = 0;
    @(negedge clk);
    start = 1'b0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
    checks++;
    if (cycles != SWEEPS * (N - 1) * (DB * DB + DB + 1) + 2) begin
      failures++; $display("FAIL cycles %0d exp %0d", cycles, SWEEPS * (N - 1) * (DB * DB + DB + 1) + 2);
    end
    // the sweep returns the order to the start: seen 7 steps plus the start of sweep 1
    checks++;
    if (perm_seen != 7) begin failures++; $display("FAIL saw %0d orders", perm_seen); end
    for (int p = 0; p < N; p++) begin
      checks++;
      if (int'(dut.ord[p]) != p) begin failures++; $display("FAIL final order"); end
    end
    // read back
    for (int rr = 0; rr < N; rr++) begin
      s[rr] = r(dut.m[rr][rr]);
      for (int c = 0; c < N; c++) begin
        uu[rr][c] = r(dut.u[rr][c]); vv[rr][c] = r(dut.v[rr][c]);
        if (rr != c) begin
          checks++;
          if (absr(r(dut.m[rr][c])) > 1e-6) begin failures++; $display("FAIL offdiag %0d %0d %g", rr, c, r(dut.m[rr][c])); end
        end
      end
    end
    // read ports agree with the arrays
    rd_diag = 3'd5; rd_col = 3'd2; rd_row = '{3'd1, 3'd6};
    #1;
    checks++;
    if (diag_val !== dut.m[5][5] || u_val[1] !== dut.u[6][2] || v_val[0] !== dut.v[1][2]) begin
      failures++; $display("FAIL read ports");
    end
    // orthogonality and reconstruction
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        real ou, ov, rec;
        ou = 0; ov = 0; rec = 0;
        for (int k = 0; k < N; k++) begin
          ou += uu[k][i] * uu[k][j];
          ov += vv[k][i] * vv[k][j];
          rec += uu[i][k] * s[k] * vv[j][k];
        end
        checks += 3;
        if (absr(ou - (i == j ? 1.0 : 0.0)) > 1e-6) begin failures++; $display("FAIL U orth %0d %0d", i, j); end
        if (absr(ov - (i == j ? 1.0 : 0.0)) > 1e-6) begin failures++; $display("FAIL V orth %0d %0d", i, j); end
        if (absr(rec - a0[i][j]) > 1e-6) begin failures++; $display("FAIL reconstruct %0d %0d %g %g", i, j, rec, a0[i][j]); end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
