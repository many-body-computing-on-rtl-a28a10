// xy_trial_gen: step 1 of a single-spin-flip trial ("generate new angle").
//
// From the site's stored LCG state X it draws two consecutive values,
//   X1 = lcg(X)  -> trial angle  theta' = X1 / (m / 2*pi)  (the top 32 bits of X1)
//   X2 = lcg(X1) -> decision     p      = X2 / m           (the top 32 bits of X2)
// and returns X2 as the site's new state, so every site runs its own independent
// random sequence as in the paper. Two lcg48 stages in series give a latency of four
// cycles with one trial accepted per cycle. Taking two draws per trial, in this order,
// and keeping the top 32 bits are this design's choices: the paper says that a new
// angle and a new p are drawn per spin but not from which draws.
module xy_trial_gen
  import xy_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  lcg_state_t seed_in,
  output logic       out_valid,
  output xy_angle_t  theta_new,
  output prob_t      p,
  output lcg_state_t seed_out
);

  logic       v1;
  lcg_state_t x1;

  lcg48 u_draw_angle (
    .clk, .rst_n, .in_valid(in_valid), .x_in(seed_in), .out_valid(v1), .x_out(x1)
  );

  lcg48 u_draw_p (
    .clk, .rst_n, .in_valid(v1), .x_in(x1), .out_valid(out_valid), .x_out(seed_out)
  );

  // The angle draw is held two cycles so it leaves with its p.
  xy_angle_t ang_d1;
  always_ff @(posedge clk) begin
    ang_d1    <= x1[47:16];
    theta_new <= ang_d1;
  end

  assign p = seed_out[47:16];

endmodule
