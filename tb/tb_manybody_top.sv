// tb_manybody_top: end-to-end test of the top level at reduced size (L = 8, Db = 4),
// running both engines at the same time.
//  * Monte Carlo: random angles and seeds, 4 steps at T = 0.85. Checks the trial count
//    (L^2 per step), the step cycle count L^2 + 20, that the reported step energy is the
//    energy of the read-back lattice (double-precision cosines), and that the energy sum
//    is the sum of the step energies.
//  * iTEBD: starts from the Neel state and runs 6 iterations. Checks that lambda1 stays
//    normalised and sorted and that each iteration passes the old lambda1 on as lambda2.
//  * Every mechanism of the design is counted from the outside or from internal
//    signals and the test fails if any never happened: trial accepted, trial rejected,
//    sublattice switch, Monte Carlo step completed, LCG seed advanced, Jacobi sweep
//    completed, SVD truncation, negative singular value, bond-weight clamp, A<->B exchange.
// Stimulus changes and outputs are sampled at the falling clock edge.
module tb_manybody_top;
  import xy_pkg::*;
  import itebd_pkg::*;

  localparam int L = 8, AW = 6, DB = 4, IW = 2;
  localparam int NSTEPS = 4, NITER = 6;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic mc_start = 1'b0, mc_busy, mc_done, mc_host_we = 1'b0;
  logic [31:0] mc_n_steps = NSTEPS, mc_beta_q24 = BETA_T085_Q24, mc_steps_done, mc_last_step_cycles;
  logic [AW-1:0] mc_host_addr = '0, mc_host_raddr = '0;
  xy_angle_t mc_host_theta = '0, mc_host_rtheta;
  lcg_state_t mc_host_seed = '0, mc_host_rseed;
  logic signed [63:0] mc_step_energy;
  logic signed [95:0] mc_energy_sum;
  logic [63:0] mc_trial_count, mc_accept_count;

  logic tebd_start = 1'b0, tebd_busy, tebd_done, tebd_host_we = 1'b0;
  logic [31:0] tebd_n_iter = NITER, tebd_iters_done, tebd_neg_count, tebd_clamp_count, tebd_last_iter_cycles;
  logic [7:0] tebd_n_sweeps = 8'd6;
  fx_t tebd_e0 = E0_TAU001, tebd_e1 = E1_TAU001, tebd_e2 = E2_TAU001;
  logic [2:0] tebd_host_sel = '0;
  logic [IW-1:0] tebd_host_row = '0, tebd_host_col = '0;
  fx_t tebd_host_wdata = '0, tebd_host_rdata;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  manybody_top #(.L(L), .DB(DB)) dut (.*);

  // ---- mechanism counters ----
  int n_sub_switch = 0, n_sweeps_done = 0, n_trunc = 0, n_exchange = 0, n_seed_adv = 0;
  logic prev_sub = 1'b0, prev_sel = 1'b0;
  logic [7:0] prev_sweep = '0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_mc.sub != prev_sub) n_sub_switch++;
    prev_sub <= dut.u_mc.sub;
    if (dut.u_tebd.u_svd.sweep != prev_sweep && dut.u_tebd.u_svd.sweep != 8'd0) n_sweeps_done++;
    prev_sweep <= dut.u_tebd.u_svd.sweep;
    if (dut.u_tebd.u_post.state == 3'd2 && !prev_sel) n_trunc++;
    prev_sel <= (dut.u_tebd.u_post.state == 3'd2);
    if (dut.u_tebd.u_post.l_we) n_exchange++;
  end

  initial begin
    #10ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real ang(xy_angle_t a);
    return 6.283185307179586 * real'(a) / 4294967296.0;
  endfunction

  task automatic need(string what, longint n);
    checks++;
    if (n <= 0) begin failures++; $display("FAIL mechanism never happened: %s", what); end
    else $display("mechanism %-26s %0d", what, n);
  endtask

  xy_angle_t th [L*L];
  lcg_state_t seeds0 [L*L];
  real l1_old [DB];

  initial begin
    real e_ref, esum, e_hw, s;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    // load the lattice
    for (int a = 0; a < L * L; a++) begin
      mc_host_we = 1'b1; mc_host_addr = AW'(a);
      mc_host_theta = $urandom();
      seeds0[a] = {$urandom(), $urandom()} & 48'hFFFF_FFFF_FFFF;
      mc_host_seed = seeds0[a];
      @(negedge clk);
    end
    mc_host_we = 1'b0;
    // load the Neel MPS
    for (int sel = 0; sel < 6; sel++)
      for (int r = 0; r < DB; r++)
        for (int c = 0; c < DB; c++) begin
          tebd_host_we = 1'b1; tebd_host_sel = 3'(sel); tebd_host_row = IW'(r); tebd_host_col = IW'(c);
          tebd_host_wdata = (sel < 4) ? ((r == 0 && c == 0 && (sel == 0 || sel == 3)) ? FX_ONE : '0)
                                      : ((c == 0) ? FX_ONE : '0);
          @(negedge clk);
        end
    tebd_host_we = 1'b0;

    // run both
    mc_start = 1'b1; tebd_start = 1'b1;
    @(negedge clk);
    mc_start = 1'b0; tebd_start = 1'b0;
    esum = 0.0;
    fork
      begin
        for (int st = 0; st < NSTEPS; st++) begin
          while (mc_steps_done == 32'(st)) @(negedge clk);
          esum += real'(mc_step_energy) / real'(64'd1 << XY_EF);
        end
        while (mc_busy) @(negedge clk);
      end
      begin
        for (int it = 0; it < NITER; it++) begin
          while (dut.u_tebd.state != 3'd4) @(negedge clk);
          for (int c = 0; c < DB; c++) l1_old[c] = real'(dut.u_tebd.lam1[c]) / real'(FX_ONE);
          while (dut.u_tebd.state == 3'd4) @(negedge clk);
          s = 0.0;
          for (int c = 0; c < DB; c++) begin
            s += (real'(dut.u_tebd.lam1[c]) / real'(FX_ONE)) ** 2;
            checks++;
            if ((real'(dut.u_tebd.lam2[c]) / real'(FX_ONE) - l1_old[c]) ** 2 > 1e-18) begin
              failures++; $display("FAIL iteration %0d: lambda2[%0d] is not the old lambda1", it, c);
            end
            if (c > 0) begin
              checks++;
              if (dut.u_tebd.lam1[c] > dut.u_tebd.lam1[c-1]) begin failures++; $display("FAIL lambda1 not sorted"); end
            end
          end
          checks++;
          if ((s - 1.0) ** 2 > 1e-12) begin failures++; $display("FAIL sum lambda1^2 = %f", s); end
        end
        while (tebd_busy) @(negedge clk);
      end
    join

    // ---- Monte Carlo results ----
    checks++;
    if (mc_trial_count != 64'(NSTEPS * L * L)) begin failures++; $display("FAIL trials %0d", mc_trial_count); end
    checks++;
    if (mc_last_step_cycles != 32'(L * L + 20)) begin failures++; $display("FAIL step cycles %0d", mc_last_step_cycles); end
    for (int a = 0; a < L * L; a++) begin
      mc_host_raddr = AW'(a);
      @(negedge clk);
      th[a] = mc_host_rtheta;
      if (mc_host_rseed != seeds0[a]) n_seed_adv++;
    end
    e_ref = 0.0;
    for (int y = 0; y < L; y++)
      for (int x = 0; x < L; x++) begin
        e_ref -= $cos(ang(th[y*L + x]) - ang(th[y*L + (x + 1) % L]));
        e_ref -= $cos(ang(th[y*L + x]) - ang(th[((y + 1) % L)*L + x]));
      end
    e_hw = real'(mc_step_energy) / real'(64'd1 << XY_EF);
    checks++;
    if ((e_hw - e_ref) ** 2 > 1e-8) begin failures++; $display("FAIL step energy %f, lattice energy %f", e_hw, e_ref); end
    checks++;
    if ((real'(mc_energy_sum) / real'(64'd1 << XY_EF) - esum) ** 2 > 1e-8) begin
      failures++; $display("FAIL energy sum %f, expected %f", real'(mc_energy_sum) / real'(64'd1 << XY_EF), esum);
    end
    $display("MC: E/N = %f after %0d steps, acceptance %0d/%0d", e_hw / (L * L), NSTEPS, mc_accept_count, mc_trial_count);
    checks++;
    if (tebd_iters_done != NITER) begin failures++; $display("FAIL iTEBD iterations %0d", tebd_iters_done); end

    // ---- mechanisms ----
    need("MC trial accepted", mc_accept_count);
    need("MC trial rejected", mc_trial_count - mc_accept_count);
    need("sublattice switch", n_sub_switch);
    need("MC step completed", mc_steps_done);
    need("LCG seed advanced", n_seed_adv);
    need("Jacobi sweep completed", n_sweeps_done);
    need("SVD truncation", n_trunc);
    need("negative singular value", tebd_neg_count);
    need("bond-weight clamp", tebd_clamp_count);
    need("A<->B exchange", n_exchange);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
