// tb_manybody_full: the top level at its default, full size (L = 128, Db = 30).
//  * Monte Carlo: loads a 128 x 128 lattice (random angles and seeds), runs one step at
//    T = 0.85 and checks L^2 trials, the L^2 + 20 cycle step time and that the reported
//    energy is that of the read-back lattice.
//  * iTEBD: loads the Neel state into the 30 x 30 matrices and runs one iteration with
//    8 Jacobi sweeps. Checks the two surviving bond weights e1 and |e2| (normalised),
//    the 29 clamped zero weights and that the iteration takes at least the pre-SVD plus
//    SVD cycle counts, Db^2 (Db+1) + 1 + 8 (2Db-1)(Db^2+Db+1) + 2.
// Stimulus changes and outputs are sampled at the falling clock edge.
module tb_manybody_full;
  import xy_pkg::*;
  import itebd_pkg::*;

  localparam int L = 128, AW = 14, DB = 30, IW = 5;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic mc_start = 1'b0, mc_busy, mc_done, mc_host_we = 1'b0;
  logic [31:0] mc_n_steps = 32'd1, mc_beta_q24 = BETA_T085_Q24, mc_steps_done, mc_last_step_cycles;
  logic [AW-1:0] mc_host_addr = '0, mc_host_raddr = '0;
  xy_angle_t mc_host_theta = '0, mc_host_rtheta;
  lcg_state_t mc_host_seed = '0, mc_host_rseed;
  logic signed [63:0] mc_step_energy;
  logic signed [95:0] mc_energy_sum;
  logic [63:0] mc_trial_count, mc_accept_count;

  logic tebd_start = 1'b0, tebd_busy, tebd_done, tebd_host_we = 1'b0;
  logic [31:0] tebd_n_iter = 32'd1, tebd_iters_done, tebd_neg_count, tebd_clamp_count, tebd_last_iter_cycles;
  logic [7:0] tebd_n_sweeps = 8'd8;
  fx_t tebd_e0 = E0_TAU001, tebd_e1 = E1_TAU001, tebd_e2 = E2_TAU001;
  logic [2:0] tebd_host_sel = '0;
  logic [IW-1:0] tebd_host_row = '0, tebd_host_col = '0;
  fx_t tebd_host_wdata = '0, tebd_host_rdata;

  int checks = 0, failures = 0;

  manybody_top dut (.*);

  initial begin
    #20ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real ang(xy_angle_t a);
    return 6.283185307179586 * real'(a) / 4294967296.0;
  endfunction

  xy_angle_t th [L*L];

  initial begin
    real e_ref, e_hw, g1, g2, nrm, l0, l1;
    int min_cyc;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int a = 0; a < L * L; a++) begin
      mc_host_we = 1'b1; mc_host_addr = AW'(a);
      mc_host_theta = $urandom();
      mc_host_seed = {$urandom(), $urandom()} & 48'hFFFF_FFFF_FFFF;
      @(negedge clk);
    end
    mc_host_we = 1'b0;
    for (int sel = 0; sel < 6; sel++)
      for (int r = 0; r < ((sel < 4) ? DB : 1); r++)
        for (int c = 0; c < DB; c++) begin
          tebd_host_we = 1'b1; tebd_host_sel = 3'(sel); tebd_host_row = IW'(r); tebd_host_col = IW'(c);
          tebd_host_wdata = (sel < 4) ? ((r == 0 && c == 0 && (sel == 0 || sel == 3)) ? FX_ONE : '0)
                                      : ((c == 0) ? FX_ONE : '0);
          @(negedge clk);
        end
    tebd_host_we = 1'b0;

    mc_start = 1'b1; tebd_start = 1'b1;
    @(negedge clk);
    mc_start = 1'b0; tebd_start = 1'b0;
    while (mc_busy || tebd_busy) @(negedge clk);

    checks++;
    if (mc_trial_count != 64'(L * L)) begin failures++; $display("FAIL trials %0d", mc_trial_count); end
    checks++;
    if (mc_last_step_cycles != 32'(L * L + 20)) begin failures++; $display("FAIL step cycles %0d", mc_last_step_cycles); end
    for (int a = 0; a < L * L; a++) begin
      mc_host_raddr = AW'(a);
      @(negedge clk);
      th[a] = mc_host_rtheta;
    end
    e_ref = 0.0;
    for (int y = 0; y < L; y++)
      for (int x = 0; x < L; x++) begin
        e_ref -= $cos(ang(th[y*L + x]) - ang(th[y*L + (x + 1) % L]));
        e_ref -= $cos(ang(th[y*L + x]) - ang(th[((y + 1) % L)*L + x]));
      end
    e_hw = real'(mc_step_energy) / real'(64'd1 << XY_EF);
    checks++;
    if ((e_hw - e_ref) ** 2 > 1e-6) begin failures++; $display("FAIL step energy %f, lattice energy %f", e_hw, e_ref); end
    $display("MC: E = %f (reference %f), accepted %0d of %0d, %0d cycles", e_hw, e_ref,
             mc_accept_count, mc_trial_count, mc_last_step_cycles);

    tebd_host_sel = 3'd4;
    tebd_host_col = 0; #1 l0 = real'(tebd_host_rdata) / real'(FX_ONE);
    tebd_host_col = 1; #1 l1 = real'(tebd_host_rdata) / real'(FX_ONE);
    g1 = real'(E1_TAU001) / real'(FX_ONE); g2 = -real'(E2_TAU001) / real'(FX_ONE);
    nrm = $sqrt(g1 * g1 + g2 * g2);
    checks += 2;
    if ((l0 - g1 / nrm) ** 2 > 1e-12) begin failures++; $display("FAIL lambda1[0] %f", l0); end
    if ((l1 - g2 / nrm) ** 2 > 1e-12) begin failures++; $display("FAIL lambda1[1] %f", l1); end
    checks++;
    if (tebd_clamp_count != DB - 1) begin failures++; $display("FAIL clamps %0d", tebd_clamp_count); end
    min_cyc = DB * DB * (DB + 1) + 1 + 8 * (2 * DB - 1) * (DB * DB + DB + 1) + 2;
    checks++;
    if (tebd_last_iter_cycles < min_cyc || tebd_last_iter_cycles > min_cyc + 20000) begin
      failures++; $display("FAIL iteration cycles %0d, pre+SVD %0d", tebd_last_iter_cycles, min_cyc);
    end
    $display("iTEBD: lambda1 = %f %f, clamps %0d, %0d cycles", l0, l1, tebd_clamp_count, tebd_last_iter_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
