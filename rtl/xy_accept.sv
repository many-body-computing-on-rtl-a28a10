// xy_accept: step 3 of a single-spin-flip trial ("accept or reject").
//
// Metropolis rule of the paper: with P(dE) = exp(-beta * dE), the spin takes its trial
// angle if p < P, otherwise it keeps its angle. For dE <= 0, P >= 1 > p and the trial is
// always accepted, so the exponential is only evaluated for dE > 0 (exp_neg).
//
// Two-cycle latency, one trial per cycle: cycle 1 registers y = beta * dE (clamped at
// zero) and the side data, cycle 2 evaluates P, compares and registers the result.
// beta is an input (unsigned Q8.24) so the temperature can be set at run time; the
// paper runs at T = 0.85. Besides the chosen angle the block returns s_final, the
// cosine sum belonging to the angle kept, which the engine totals into the energy.
module xy_accept
  import xy_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] beta_q24,
  input  logic        in_valid,
  input  xy_energy_t  d_e,
  input  prob_t       p,
  input  xy_angle_t   theta,
  input  xy_angle_t   theta_new,
  input  xy_energy_t  s_old,
  input  xy_energy_t  s_new,
  output logic        out_valid,
  output logic        accept,
  output xy_angle_t   theta_out,
  output xy_energy_t  s_final
);

  logic        v1;
  logic [47:0] y1;
  prob_t       p1;
  xy_angle_t   th1, thn1;
  xy_energy_t  so1, sn1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1        <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      v1        <= in_valid;
      out_valid <= v1;
    end
  end

  logic [71:0] y_full;
  always_comb y_full = 72'(d_e[38:0]) * 72'(beta_q24);   // used only when d_e > 0

  always_ff @(posedge clk) begin
    y1   <= (d_e > 0) ? y_full[24 +: 48] : '0;
    p1   <= p;
    th1  <= theta;
    thn1 <= theta_new;
    so1  <= s_old;
    sn1  <= s_new;
  end

  logic [32:0] prob;
  exp_neg u_exp (.y(y1), .p(prob));

  logic acc_c;
  assign acc_c = {1'b0, p1} < prob;

  always_ff @(posedge clk) begin
    accept    <= acc_c;
    theta_out <= acc_c ? thn1 : th1;
    s_final   <= acc_c ? sn1 : so1;
  end

endmodule
