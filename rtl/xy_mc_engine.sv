// xy_mc_engine: Metropolis Monte Carlo for the classical 2D XY model,
// H = -sum_<x,x+d> cos(theta_x - theta_x+d), on an L x L square lattice with periodic
// boundaries.
//
// Following the paper, the lattice is split into the two checkerboard sublattices
// A ((row+col) even) and B ((row+col) odd). Every neighbour of an A site is a B site,
// so all A sites can be tried independently, then all B sites: one MC step is
// "sublattice A evolution" followed by "sublattice B evolution", repeated until the
// requested number of steps is reached. Within a sublattice the single-spin-flip trials
// stream through a pipeline, one new site per clock:
//
//   issue address -> read (1) -> xy_trial_gen (4) -> xy_delta_e (2) -> xy_accept (2)
//   -> write back angle and LCG state
//
// so a sublattice of L^2/2 sites takes L^2/2 + 9 cycles (issue plus pipeline drain) and
// a step L^2 + 18 cycles plus two cycles of control. The pipeline is drained between
// sublattices because B trials read the angles A just wrote. No hazard can occur inside
// a sublattice: trials write only their own site and read only the other sublattice.
//
// Energy: during the B half of a step, each B site's accepted cosine sum covers its
// four bonds to final A angles, and every bond has exactly one B end, so the sum over B
// sites is -H of the configuration at the end of the step. step_energy holds that value
// for the last step and energy_sum the total over all steps of the run (Q.29 fixed
// point), from which the host forms U = <H> / L^2 as in the paper. Obtaining the energy
// this way, the counters and the host port are this design's choices.
//
// Host port (used while idle): host_we writes an angle and LCG seed to a site,
// host_raddr reads them back one cycle later. start (one cycle, while idle) runs
// n_steps MC steps at inverse temperature beta_q24 (unsigned Q8.24); done pulses at
// the end. L must be a power of two (the paper uses L = 8 ... 128).
module xy_mc_engine
  import xy_pkg::*;
#(
  parameter int L  = 128,
  parameter int AW = $clog2(L * L)
) (
  input  logic                clk,
  input  logic                rst_n,
  // run control
  input  logic                start,
  input  logic [31:0]         n_steps,
  input  logic [31:0]         beta_q24,
  output logic                busy,
  output logic                done,
  output logic [31:0]         steps_done,
  // host access to the lattice while idle
  input  logic                host_we,
  input  logic [AW-1:0]       host_addr,
  input  xy_angle_t           host_theta,
  input  lcg_state_t          host_seed,
  input  logic [AW-1:0]       host_raddr,
  output xy_angle_t           host_rtheta,
  output lcg_state_t          host_rseed,
  // results
  output logic signed [63:0]  step_energy,
  output logic signed [95:0]  energy_sum,
  output logic [63:0]         trial_count,
  output logic [63:0]         accept_count,
  output logic [31:0]         last_step_cycles
);

  localparam int LOG2L = $clog2(L);
  localparam int NHALF = L * L / 2;
  localparam int KW    = $clog2(NHALF);

  initial begin
    assert (L >= 4 && (1 << LOG2L) == L)
      else $error("xy_mc_engine: L must be a power of two, at least 4");
  end

  typedef enum logic [1:0] {S_IDLE, S_CHECK, S_ISSUE, S_DRAIN} state_t;
  state_t state;

  logic            sub;       // 0 = sublattice A, 1 = sublattice B
  logic [KW-1:0]   k;         // index of the next site within the sublattice
  logic [7:0]      pending;   // trials issued but not yet written back
  logic [31:0]     step_cyc;
  logic signed [63:0] e_acc;  // cosine sum over B sites of the current step

  // ---------------- site addressing ----------------
  logic [LOG2L-1:0] row, col;
  logic [AW-1:0]    site_addr;
  logic [AW-1:0]    nb_addr [4];

  always_comb begin
    row = LOG2L'(k >> (LOG2L - 1));
    col = LOG2L'({k[LOG2L-2:0], 1'b0}) | LOG2L'(row[0] ^ sub);
    site_addr  = AW'({row, col});
    nb_addr[0] = AW'({LOG2L'(row - 1'b1), col});           // up (wraps)
    nb_addr[1] = AW'({LOG2L'(row + 1'b1), col});           // down
    nb_addr[2] = AW'({row, LOG2L'(col - 1'b1)});           // left
    nb_addr[3] = AW'({row, LOG2L'(col + 1'b1)});           // right
  end

  // ---------------- memory ----------------
  logic            issue;
  logic            wb_en;
  logic [AW-1:0]   wb_addr;
  xy_angle_t       wb_theta;
  lcg_state_t      wb_seed;
  xy_angle_t       m_theta;
  lcg_state_t      m_seed;
  xy_angle_t       m_nb [4];

  logic            idle;
  assign idle = (state == S_IDLE);
  assign issue = (state == S_ISSUE);

  xy_spin_mem #(.L(L), .AW(AW)) u_mem (
    .clk,
    .rd_addr  (idle ? host_raddr : site_addr),
    .rd_theta (m_theta),
    .rd_seed  (m_seed),
    .nb_addr  (nb_addr),
    .nb_theta (m_nb),
    .wr_en    (idle ? host_we    : wb_en),
    .wr_addr  (idle ? host_addr  : wb_addr),
    .wr_theta (idle ? host_theta : wb_theta),
    .wr_seed  (idle ? host_seed  : wb_seed)
  );

  assign host_rtheta = m_theta;
  assign host_rseed  = m_seed;

  // ---------------- pipeline ----------------
  // Stage 0: read returns. Address and angles travel beside the datapath units.
  logic          rd_valid;
  logic [AW-1:0] addr_q [9];   // addr_q[i] = address i+1 cycles after issue

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_valid <= 1'b0;
    else        rd_valid <= issue;
  end

  always_ff @(posedge clk) begin
    addr_q[0] <= site_addr;
    for (int i = 1; i < 9; i++) addr_q[i] <= addr_q[i-1];
  end

  // Step 1: new angle and decision factor (4 cycles).
  logic       tg_valid;
  xy_angle_t  tg_theta_new;
  prob_t      tg_p;
  lcg_state_t tg_seed;

  xy_trial_gen u_trial (
    .clk, .rst_n,
    .in_valid (rd_valid),
    .seed_in  (m_seed),
    .out_valid(tg_valid),
    .theta_new(tg_theta_new),
    .p        (tg_p),
    .seed_out (tg_seed)
  );

  xy_angle_t th_q [4];
  xy_angle_t nb_q [4][4];
  always_ff @(posedge clk) begin
    th_q[0] <= m_theta;
    nb_q[0] <= m_nb;
    for (int i = 1; i < 4; i++) begin
      th_q[i] <= th_q[i-1];
      nb_q[i] <= nb_q[i-1];
    end
  end

  // Step 2: energy difference (2 cycles).
  logic       de_valid;
  xy_energy_t de_d_e, de_s_old, de_s_new;

  xy_delta_e u_de (
    .clk, .rst_n,
    .in_valid (tg_valid),
    .theta    (th_q[3]),
    .theta_new(tg_theta_new),
    .nb       (nb_q[3]),
    .out_valid(de_valid),
    .d_e      (de_d_e),
    .s_old    (de_s_old),
    .s_new    (de_s_new)
  );

  xy_angle_t  th2_q [2], thn_q [2];
  prob_t      p_q [2];
  lcg_state_t seed_q [4];
  always_ff @(posedge clk) begin
    th2_q[0]  <= th_q[3];
    thn_q[0]  <= tg_theta_new;
    p_q[0]    <= tg_p;
    th2_q[1]  <= th2_q[0];
    thn_q[1]  <= thn_q[0];
    p_q[1]    <= p_q[0];
    seed_q[0] <= tg_seed;
    for (int i = 1; i < 4; i++) seed_q[i] <= seed_q[i-1];
  end

  // Step 3: accept or reject (2 cycles).
  logic       ac_valid, ac_accept;
  xy_angle_t  ac_theta;
  xy_energy_t ac_s_final;

  xy_accept u_acc (
    .clk, .rst_n,
    .beta_q24,
    .in_valid (de_valid),
    .d_e      (de_d_e),
    .p        (p_q[1]),
    .theta    (th2_q[1]),
    .theta_new(thn_q[1]),
    .s_old    (de_s_old),
    .s_new    (de_s_new),
    .out_valid(ac_valid),
    .accept   (ac_accept),
    .theta_out(ac_theta),
    .s_final  (ac_s_final)
  );

  assign wb_en    = ac_valid;
  assign wb_addr  = addr_q[8];
  assign wb_theta = ac_theta;
  assign wb_seed  = seed_q[3];

  // ---------------- control (Fig. 2b/2c) ----------------
  logic last_k;
  assign last_k = (k == KW'(NHALF - 1));
  assign busy   = !idle;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state            <= S_IDLE;
      sub              <= 1'b0;
      k                <= '0;
      pending          <= '0;
      done             <= 1'b0;
      steps_done       <= '0;
      step_cyc         <= '0;
      e_acc            <= '0;
      step_energy      <= '0;
      energy_sum       <= '0;
      trial_count      <= '0;
      accept_count     <= '0;
      last_step_cycles <= '0;
    end else begin
      done <= 1'b0;
      pending <= pending + 8'(issue) - 8'(ac_valid);
      if (ac_valid) begin
        trial_count  <= trial_count + 64'd1;
        accept_count <= accept_count + 64'(ac_accept);
        if (sub) e_acc <= e_acc + 64'(ac_s_final);
      end
      if (!idle) step_cyc <= step_cyc + 32'd1;

      unique case (state)
        S_IDLE: if (start) begin
          state        <= S_CHECK;
          steps_done   <= '0;
          energy_sum   <= '0;
          trial_count  <= '0;
          accept_count <= '0;
        end
        // "Target MC steps reached?"
        S_CHECK: begin
          if (steps_done == n_steps) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            state    <= S_ISSUE;
            sub      <= 1'b0;
            k        <= '0;
            step_cyc <= 32'd1;
            e_acc    <= '0;
          end
        end
        S_ISSUE: begin
          k <= k + 1'b1;
          if (last_k) state <= S_DRAIN;
        end
        S_DRAIN: begin
          // pending reaches zero only after the last write of the sublattice
          if (pending == 8'd0) begin
            if (!sub) begin
              sub   <= 1'b1;
              k     <= '0;
              state <= S_ISSUE;
            end else begin
              steps_done       <= steps_done + 32'd1;
              step_energy      <= -e_acc;
              energy_sum       <= energy_sum - 96'(e_acc);
              last_step_cycles <= step_cyc;
              state            <= S_CHECK;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // pending is 0 one cycle after the last write: the issue and write-back streams of one
  // sublattice never overlap the next one.
  // checked from the first clock after reset
  logic chk_en = 1'b0;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) chk_en <= 1'b0;
    else        chk_en <= 1'b1;

  assert property (@(posedge clk) disable iff (!chk_en) pending <= 8'd10)
    else $error("xy_mc_engine: more trials in flight than pipeline stages");

endmodule
