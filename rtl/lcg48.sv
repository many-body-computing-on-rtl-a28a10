// lcg48: one step of the per-site linear congruential random number generator,
//   X_{n+1} = (a * X_n + c) mod 2^48,  a = 25214903917, c = 11,
// as the paper specifies (the same constants as java.util.Random).
//
// Two-stage pipeline, one new value accepted per cycle: stage 1 forms the low 48 bits
// of a * X_n (the modulus is a power of two, so only those bits matter), stage 2 adds c.
// The result appears two cycles after the input, the 20 ns (two 10 ns cycles) latency
// the paper reports for one random number. The paper gives the recurrence, constants
// and latency; the split into these two stages is this design's choice.
//
// Ports: in_valid/x_in enter a value; out_valid/x_out leave with it two cycles later.
// Reset clears only the valid flags.
module lcg48
  import xy_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  lcg_state_t x_in,
  output logic       out_valid,
  output lcg_state_t x_out
);

  logic       v1;
  lcg_state_t prod1;

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
    prod1 <= lcg_state_t'(x_in * LCG_A);
    x_out <= prod1 + LCG_C;
  end

endmodule
