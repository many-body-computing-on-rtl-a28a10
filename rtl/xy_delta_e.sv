// xy_delta_e: step 2 of a single-spin-flip trial ("calculate energy difference").
//
// For a site with present angle theta, trial angle theta' and the four nearest
// neighbour angles theta_n, it forms
//   s_old = sum_n cos(theta  - theta_n)
//   s_new = sum_n cos(theta' - theta_n)
//   dE    = E(theta') - E(theta) = s_old - s_new
// for H = -sum cos(theta_x - theta_x+delta). The paper's Eq. (S2) prints a "+" between
// the two cosine sums; with that sign dE would not be an energy difference of its own
// Hamiltonian (Eq. 1), so this block follows Eq. (1). Both sums are passed on, because
// the engine uses the accepted one to total the lattice energy.
//
// Angle differences are binary-angle subtractions (modulo 2*pi); the eight cosines come
// from eight CORDIC evaluations (cordic_pkg) in parallel. Two-cycle latency: the
// differences are registered, then the cosines and sums. One trial per cycle.
module xy_delta_e
  import xy_pkg::*;
  import cordic_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  xy_angle_t  theta,
  input  xy_angle_t  theta_new,
  input  xy_angle_t  nb [4],
  output logic       out_valid,
  output xy_energy_t d_e,
  output xy_energy_t s_old,
  output xy_energy_t s_new
);

  logic      v1;
  xy_angle_t diff_old [4];
  xy_angle_t diff_new [4];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1        <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      v1        <= in_valid;
      out_valid <= v1;
    end
  end

  always_ff @(posedge clk) begin
    for (int n = 0; n < 4; n++) begin
      diff_old[n] <= theta     - nb[n];
      diff_new[n] <= theta_new - nb[n];
    end
  end

  xy_energy_t sum_old_c, sum_new_c;
  always_comb begin
    word_t cx, cy;
    sum_old_c = '0;
    sum_new_c = '0;
    for (int n = 0; n < 4; n++) begin
      cordic_rotate(XY_ONE, 64'sd0, diff_old[n], cx, cy);
      sum_old_c = sum_old_c + xy_energy_t'(cx);
      cordic_rotate(XY_ONE, 64'sd0, diff_new[n], cx, cy);
      sum_new_c = sum_new_c + xy_energy_t'(cx);
    end
  end

  always_ff @(posedge clk) begin
    s_old <= sum_old_c;
    s_new <= sum_new_c;
    d_e   <= sum_old_c - sum_new_c;
  end

endmodule
