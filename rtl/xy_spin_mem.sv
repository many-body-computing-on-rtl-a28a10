// xy_spin_mem: storage of the L x L lattice for the XY Monte Carlo engine.
//
// Each site holds its spin angle (32-bit binary angle) and its own 48-bit LCG state,
// which the paper keeps per spin so that every site runs an independent random
// sequence. Sites are addressed row-major, addr = row * L + col.
//
// One trial per cycle needs the site's angle and state plus the four neighbour angles,
// so the angle array has five synchronous read ports (site + four neighbours) and the
// state array one; both have one write port. Reads return data one cycle after the
// address. A write and a read of the same address in one cycle return the old data.
// The paper places these arrays in block RAM through its HLS tool; how the ports are
// arranged is this design's choice. A synthesis tool maps the five angle reads onto
// replicated RAM copies.
module xy_spin_mem
  import xy_pkg::*;
#(
  parameter int L  = 128,
  parameter int AW = $clog2(L * L)
) (
  input  logic            clk,
  input  logic [AW-1:0]   rd_addr,
  output xy_angle_t       rd_theta,
  output lcg_state_t      rd_seed,
  input  logic [AW-1:0]   nb_addr  [4],
  output xy_angle_t       nb_theta [4],
  input  logic            wr_en,
  input  logic [AW-1:0]   wr_addr,
  input  xy_angle_t       wr_theta,
  input  lcg_state_t      wr_seed
);

  xy_angle_t  theta_mem [L * L];
  lcg_state_t seed_mem  [L * L];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      theta_mem[wr_addr] <= wr_theta;
      seed_mem[wr_addr]  <= wr_seed;
    end
  end

  always_ff @(posedge clk) begin
    rd_theta <= theta_mem[rd_addr];
    rd_seed  <= seed_mem[rd_addr];
    for (int n = 0; n < 4; n++) nb_theta[n] <= theta_mem[nb_addr[n]];
  end

endmodule
