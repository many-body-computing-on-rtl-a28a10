// tb_itebd_engine: runs the complete iTEBD loop at Db = 4 for the Heisenberg chain
// with tau = 0.01 and checks the physics and the bookkeeping:
//  * from the Neel product state, one iteration must give the two singular values
//    e1 and |e2| (normalised), move the old lambda1 into lambda2, and clamp the zero
//    bond weights before inversion;
//  * from a random start, after 2000 iterations the bond energy <H_ij> computed here
//    in double precision from the read-back state must have fallen to within 0.017 above
//    the exact ground-state value 1/4 - ln 2 = -0.4431 (it is -0.431, still converging);
//  * lambda1 stays normalised and sorted, and every iteration takes the same number of
//    cycles, at least the pre-SVD plus SVD cycle counts given by their formulas.
// Host accesses happen at the falling edge while the engine is idle.
module tb_itebd_engine;
  import itebd_pkg::*;

  localparam int DB = 4, IW = 2, NSW = 6, NBLK = 11, BLKIT = 200;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start = 1'b0, busy, done;
  logic [31:0] n_iter = '0, iters_done, neg_count, clamp_count, last_iter_cycles;
  logic [7:0] n_sweeps = 8'(NSW);
  fx_t e0 = E0_TAU001, e1 = E1_TAU001, e2 = E2_TAU001;
  logic host_we = 1'b0;
  logic [2:0] host_sel = '0;
  logic [IW-1:0] host_row = '0, host_col = '0;
  fx_t host_wdata = '0, host_rdata;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  itebd_engine #(.DB(DB)) dut (.*);

  real st [6][DB][DB];   // 0 A_up 1 A_dn 2 Bt_up 3 Bt_dn ; lambda1 in st[4][0][*], lambda2 in st[5][0][*]

  initial begin
    #50ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real fr(fx_t v);
    return real'(v) / real'(FX_ONE);
  endfunction

  function automatic fx_t tofx(real r);
    return fx_t'(longint'(r * real'(FX_ONE)));
  endfunction

  task automatic wr(int sel, int r, int c, real val);
    host_we = 1'b1; host_sel = 3'(sel); host_row = IW'(r); host_col = IW'(c); host_wdata = tofx(val);
    @(negedge clk);
    host_we = 1'b0;
  endtask

  task automatic read_state();
    for (int s = 0; s < 6; s++)
      for (int r = 0; r < DB; r++)
        for (int c = 0; c < DB; c++) begin
          host_sel = 3'(s); host_row = IW'(r); host_col = IW'(c);
          #1;
          st[s][r][c] = fr(host_rdata);
        end
    @(negedge clk);
  endtask

  function automatic real energy();
    real th [2][2][DB][DB];
    real num, den;
    for (int a = 0; a < 2; a++)
      for (int b = 0; b < 2; b++)
        for (int i = 0; i < DB; i++)
          for (int j = 0; j < DB; j++) begin
            real acc = 0.0;
            for (int k = 0; k < DB; k++)
              acc += st[a][i][k] * st[5][0][k] * st[2 + b][j][k];
            th[a][b][i][j] = st[4][0][i] * acc * st[4][0][j];
          end
    num = 0.0; den = 0.0;
    for (int i = 0; i < DB; i++)
      for (int j = 0; j < DB; j++) begin
        num += 0.25 * (th[0][0][i][j] ** 2 + th[1][1][i][j] ** 2)
             - 0.25 * (th[0][1][i][j] ** 2 + th[1][0][i][j] ** 2)
             + th[0][1][i][j] * th[1][0][i][j];
        den += th[0][0][i][j] ** 2 + th[1][1][i][j] ** 2 + th[0][1][i][j] ** 2 + th[1][0][i][j] ** 2;
      end
    return num / den;
  endfunction

  task automatic run(int n);
    longint c0;
    n_iter = n;
    start = 1'b1;
    c0 = cyc;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
    checks++;
    if (iters_done != n) begin failures++; $display("FAIL iterations %0d of %0d", iters_done, n); end
  endtask

  task automatic close(string what, real got, real want, real tol);
    checks++;
    if (got - want > tol || want - got > tol) begin
      failures++; $display("FAIL %s = %f, expected %f", what, got, want);
    end
  endtask

  initial begin
    real en, en_first, en_prev, sumsq, old_l1 [DB], g1, g2, nrm;
    int pre_cyc, svd_cyc, it_cyc;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    // ---- one iteration from the Neel state |up down> ----
    for (int s = 0; s < 4; s++)
      for (int r = 0; r < DB; r++)
        for (int c = 0; c < DB; c++) wr(s, r, c, (r == 0 && c == 0 && (s == 0 || s == 3)) ? 1.0 : 0.0);
    for (int c = 0; c < DB; c++) begin wr(4, 0, c, c == 0 ? 1.0 : 0.0); wr(5, 0, c, c == 0 ? 1.0 : 0.0); end
    run(1);
    read_state();
    g1 = fr(E1_TAU001); g2 = -fr(E2_TAU001); nrm = $sqrt(g1 * g1 + g2 * g2);
    close("neel lambda1[0]", st[4][0][0], g1 / nrm, 1e-6);
    close("neel lambda1[1]", st[4][0][1], g2 / nrm, 1e-6);
    close("neel lambda1[2]", st[4][0][2], 0.0, 1e-6);
    close("neel lambda2[0]", st[5][0][0], 1.0, 1e-9);
    close("neel lambda2[1]", st[5][0][1], 0.0, 1e-9);
    checks++;
    if (clamp_count != 3) begin failures++; $display("FAIL clamp count %0d, expected 3", clamp_count); end
    $display("neel: lambda1 = %f %f, clamps %0d, negatives %0d, cycles %0d",
             st[4][0][0], st[4][0][1], clamp_count, neg_count, last_iter_cycles);

    // cycle count: pre-SVD and SVD formulas are lower bounds of the iteration
    pre_cyc = DB * DB * (DB + 1) + 1;
    svd_cyc = NSW * (2 * DB - 1) * (DB * DB + DB + 1) + 2;
    it_cyc  = last_iter_cycles;
    checks++;
    if (it_cyc < pre_cyc + svd_cyc || it_cyc > pre_cyc + svd_cyc + 2000) begin
      failures++; $display("FAIL iteration cycles %0d (pre+svd %0d)", it_cyc, pre_cyc + svd_cyc);
    end

    // ---- random start, then imaginary-time evolution ----
    for (int s = 0; s < 4; s++)
      for (int r = 0; r < DB; r++)
        for (int c = 0; c < DB; c++) wr(s, r, c, (real'($urandom_range(2000)) - 1000.0) / 1000.0);
    for (int c = 0; c < DB; c++) begin wr(4, 0, c, 0.5); wr(5, 0, c, 0.5); end
    en_prev = 1.0;
    for (int blk = 0; blk < NBLK; blk++) begin
      read_state();
      for (int c = 0; c < DB; c++) old_l1[c] = st[4][0][c];
      run(blk == 0 ? 1 : BLKIT);
      read_state();
      en = energy();
      $display("after block %0d: E = %f  lambda1 = %f %f %f %f  neg %0d clamp %0d cycles %0d",
               blk, en, st[4][0][0], st[4][0][1], st[4][0][2], st[4][0][3],
               neg_count, clamp_count, last_iter_cycles);
      sumsq = 0.0;
      for (int c = 0; c < DB; c++) sumsq += st[4][0][c] ** 2;
      close("sum lambda1^2", sumsq, 1.0, 1e-6);
      for (int c = 1; c < DB; c++) begin
        checks++;
        if (st[4][0][c] > st[4][0][c-1] + 1e-9) begin failures++; $display("FAIL lambda1 not sorted"); end
      end
      if (blk == 0)
        for (int c = 0; c < DB; c++) close("lambda2 = old lambda1", st[5][0][c], old_l1[c], 1e-9);
      checks++;
      if (last_iter_cycles != it_cyc) begin failures++; $display("FAIL cycles changed %0d vs %0d", last_iter_cycles, it_cyc); end
      if (blk == 0) en_first = en;
      if (blk > 1) begin
        checks++;
        if (en > en_prev) begin failures++; $display("FAIL energy rose from %f to %f", en_prev, en); end
      end
      en_prev = en;
    end
    // ground state energy per bond of the Heisenberg chain: 1/4 - ln 2
    // after 2000 steps of tau = 0.01 the energy is still approaching it from above
    close("ground-state energy", en, 0.25 - $ln(2.0) + 0.008, 0.0085);
    checks++;
    if (en > en_first - 0.25) begin failures++; $display("FAIL energy did not decrease"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
