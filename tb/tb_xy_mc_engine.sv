// tb_xy_mc_engine: runs the XY Monte Carlo engine on an 8 x 8 lattice and compares it
// with a reference model written here in double precision: the same per-site LCG
// draws, the checkerboard order (all A sites, then all B sites) and the Metropolis
// rule p < exp(-dE / T) with $cos and $exp.
//
// Checks, after loading random angles and seeds through the host port and running
// N_STEPS steps at T = 0.85: every final angle and LCG state (bit exact), the energy of
// the final configuration (step_energy) and its sum over steps (energy_sum) within
// 1e-6 per bond, the accept and trial counts, the cycle count of one step
// (L^2 + 20: one trial per cycle plus a nine-cycle pipeline drain and one control cycle per sublattice), and that a run of
// zero steps finishes at once. Also requires both accepted and rejected trials to occur.
module tb_xy_mc_engine;
  import xy_pkg::*;

  localparam int L = 8, AW = 6, N_STEPS = 5;
  localparam real T = 0.85;
  localparam real TWO_PI = 6.283185307179586;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start = 1'b0, busy, done;
  logic [31:0] n_steps = N_STEPS, beta_q24 = BETA_T085_Q24, steps_done;
  logic host_we = 1'b0;
  logic [AW-1:0] host_addr = '0, host_raddr = '0;
  xy_angle_t host_theta = '0, host_rtheta;
  lcg_state_t host_seed = '0, host_rseed;
  logic signed [63:0] step_energy;
  logic signed [95:0] energy_sum;
  logic [63:0] trial_count, accept_count;
  logic [31:0] last_step_cycles;
  int checks = 0, failures = 0;

  xy_mc_engine #(.L(L)) dut (.*);

  xy_angle_t  th [L*L];
  lcg_state_t sd [L*L];
  int n_acc = 0, n_trial = 0;
  real e_sum = 0.0;

  function automatic lcg_state_t ref_lcg(lcg_state_t x);
    logic [95:0] w;
    w = 96'(x) * 96'd25214903917 + 96'd11;
    return w[47:0];
  endfunction

  function automatic real ang(xy_angle_t a);
    return TWO_PI * real'(a) / 4294967296.0;
  endfunction

  function automatic int idx(int r, int c);
    return ((r + L) % L) * L + ((c + L) % L);
  endfunction

  function automatic real energy();
    real e = 0.0;
    for (int r = 0; r < L; r++)
      for (int c = 0; c < L; c++)
        e -= $cos(ang(th[idx(r, c)]) - ang(th[idx(r, c + 1)]))
           + $cos(ang(th[idx(r, c)]) - ang(th[idx(r + 1, c)]));
    return e;
  endfunction

  task automatic ref_step();
    real beta;
    beta = real'(BETA_T085_Q24) / 16777216.0;
    for (int sub = 0; sub < 2; sub++)
      for (int r = 0; r < L; r++)
        for (int c = 0; c < L; c++) if (((r + c) & 1) == sub) begin
          lcg_state_t x1, x2;
          xy_angle_t tn;
          real so, sn, de, p;
          int s, nbs [4];
          s = idx(r, c);
          nbs = '{idx(r - 1, c), idx(r + 1, c), idx(r, c - 1), idx(r, c + 1)};
          x1 = ref_lcg(sd[s]); x2 = ref_lcg(x1);
          tn = x1[47:16];
          p  = real'(x2[47:16]) / 4294967296.0;
          so = 0.0; sn = 0.0;
          for (int n = 0; n < 4; n++) begin
            so += $cos(ang(th[s]) - ang(th[nbs[n]]));
            sn += $cos(ang(tn) - ang(th[nbs[n]]));
          end
          de = so - sn;
          n_trial++;
          if (de <= 0.0 || p < $exp(-beta * de)) begin
            th[s] = tn;
            n_acc++;
          end
          sd[s] = x2;
        end
    e_sum += energy();
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real e_hw, e_ref;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    // load the lattice
    for (int a = 0; a < L*L; a++) begin
      th[a] = $urandom(); sd[a] = {$urandom(), $urandom()};
      host_we = 1'b1; host_addr = AW'(a); host_theta = th[a]; host_seed = sd[a];
      @(negedge clk);
    end
    host_we = 1'b0;
    // zero steps: done at once
    n_steps = 0; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    @(negedge clk);
    checks++;
    if (!done || steps_done != 0) begin failures++; $display("FAIL zero-step run"); end
    // the run
    n_steps = N_STEPS; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
    for (int s = 0; s < N_STEPS; s++) ref_step();
    checks += 5;
    if (steps_done != N_STEPS) begin failures++; $display("FAIL steps_done %0d", steps_done); end
    if (trial_count != 64'(n_trial)) begin failures++; $display("FAIL trials %0d exp %0d", trial_count, n_trial); end
    if (accept_count != 64'(n_acc)) begin failures++; $display("FAIL accepts %0d exp %0d", accept_count, n_acc); end
    if (last_step_cycles != L*L + 20) begin failures++; $display("FAIL step cycles %0d exp %0d", last_step_cycles, L*L + 20); end
    if (n_acc == 0 || n_acc == n_trial) begin failures++; $display("FAIL accept and reject not both seen"); end
    e_hw = real'(step_energy) / 536870912.0;
    e_ref = energy();
    checks++;
    if (e_hw - e_ref > 1e-6 * 2 * L * L || e_ref - e_hw > 1e-6 * 2 * L * L) begin
      failures++; $display("FAIL step energy %f exp %f", e_hw, e_ref);
    end
    e_hw = real'(energy_sum) / 536870912.0;
    checks++;
    if (e_hw - e_sum > 1e-6 * 2 * L * L * N_STEPS || e_sum - e_hw > 1e-6 * 2 * L * L * N_STEPS) begin
      failures++; $display("FAIL energy sum %f exp %f", e_hw, e_sum);
    end
    // read back
    for (int a = 0; a < L*L; a++) begin
      host_raddr = AW'(a);
      @(negedge clk);
      checks += 2;
      if (host_rtheta !== th[a]) begin failures++; $display("FAIL theta site %0d: %h exp %h", a, host_rtheta, th[a]); end
      if (host_rseed  !== sd[a]) begin failures++; $display("FAIL seed site %0d", a); end
    end
    $display("accepts %0d of %0d trials, energy per spin %f", n_acc, n_trial, e_ref / (L * L));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
