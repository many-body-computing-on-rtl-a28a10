// manybody_top: the two many-body accelerators of the design side by side.
//
//  * mc_*   : Metropolis Monte Carlo of the 2D classical XY model on an L x L periodic
//             lattice (xy_mc_engine). The host loads angles and per-site LCG seeds,
//             sets beta (Q8.24) and the number of Monte Carlo steps, and reads back the
//             lattice, the energy of the last step and the running energy sum.
//  * tebd_* : iTEBD imaginary-time evolution of the spin-1/2 Heisenberg chain at bond
//             dimension DB (itebd_engine). The host loads the MPS unit cell (A_up, A_dn,
//             Bt_up, Bt_dn, lambda1, lambda2), the gate elements e0, e1, e2, the number
//             of iterations and Jacobi sweeps, and reads the evolved state back.
//
// The two engines share clock and reset and are otherwise independent; both are
// controlled by start/busy/done handshakes (start is a one-cycle pulse, done a
// one-cycle pulse at the end). Host ports are plain signals. The paper runs the two
// algorithms as separate FPGA designs; putting them in one top is this design's choice.
// Default sizes are the paper's largest: L = 128 and Db = 30.
module manybody_top
  import xy_pkg::*;
  import itebd_pkg::*;
#(
  parameter int L    = 128,
  parameter int AW   = $clog2(L * L),
  parameter int DB   = 30,
  parameter int IW   = $clog2(DB)
) (
  input  logic                clk,
  input  logic                rst_n,
  // ---- Monte Carlo ----
  input  logic                mc_start,
  input  logic [31:0]         mc_n_steps,
  input  logic [31:0]         mc_beta_q24,
  output logic                mc_busy,
  output logic                mc_done,
  output logic [31:0]         mc_steps_done,
  input  logic                mc_host_we,
  input  logic [AW-1:0]       mc_host_addr,
  input  xy_angle_t           mc_host_theta,
  input  lcg_state_t          mc_host_seed,
  input  logic [AW-1:0]       mc_host_raddr,
  output xy_angle_t           mc_host_rtheta,
  output lcg_state_t          mc_host_rseed,
  output logic signed [63:0]  mc_step_energy,
  output logic signed [95:0]  mc_energy_sum,
  output logic [63:0]         mc_trial_count,
  output logic [63:0]         mc_accept_count,
  output logic [31:0]         mc_last_step_cycles,
  // ---- iTEBD ----
  input  logic                tebd_start,
  input  logic [31:0]         tebd_n_iter,
  input  logic [7:0]          tebd_n_sweeps,
  input  fx_t                 tebd_e0,
  input  fx_t                 tebd_e1,
  input  fx_t                 tebd_e2,
  output logic                tebd_busy,
  output logic                tebd_done,
  output logic [31:0]         tebd_iters_done,
  input  logic                tebd_host_we,
  input  logic [2:0]          tebd_host_sel,
  input  logic [IW-1:0]       tebd_host_row,
  input  logic [IW-1:0]       tebd_host_col,
  input  fx_t                 tebd_host_wdata,
  output fx_t                 tebd_host_rdata,
  output logic [31:0]         tebd_neg_count,
  output logic [31:0]         tebd_clamp_count,
  output logic [31:0]         tebd_last_iter_cycles
);

  xy_mc_engine #(.L(L), .AW(AW)) u_mc (
    .clk, .rst_n,
    .start(mc_start), .n_steps(mc_n_steps), .beta_q24(mc_beta_q24),
    .busy(mc_busy), .done(mc_done), .steps_done(mc_steps_done),
    .host_we(mc_host_we), .host_addr(mc_host_addr), .host_theta(mc_host_theta),
    .host_seed(mc_host_seed), .host_raddr(mc_host_raddr),
    .host_rtheta(mc_host_rtheta), .host_rseed(mc_host_rseed),
    .step_energy(mc_step_energy), .energy_sum(mc_energy_sum),
    .trial_count(mc_trial_count), .accept_count(mc_accept_count),
    .last_step_cycles(mc_last_step_cycles)
  );

  itebd_engine #(.DB(DB), .IW(IW)) u_tebd (
    .clk, .rst_n,
    .start(tebd_start), .n_iter(tebd_n_iter), .n_sweeps(tebd_n_sweeps),
    .e0(tebd_e0), .e1(tebd_e1), .e2(tebd_e2),
    .busy(tebd_busy), .done(tebd_done), .iters_done(tebd_iters_done),
    .host_we(tebd_host_we), .host_sel(tebd_host_sel), .host_row(tebd_host_row),
    .host_col(tebd_host_col), .host_wdata(tebd_host_wdata), .host_rdata(tebd_host_rdata),
    .neg_count(tebd_neg_count), .clamp_count(tebd_clamp_count),
    .last_iter_cycles(tebd_last_iter_cycles)
  );

endmodule
