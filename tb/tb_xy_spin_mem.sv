// tb_xy_spin_mem: fills an 8 x 8 lattice store with random angles and LCG states, then
// reads every site through the site port and random sites through the four neighbour
// ports, comparing with a copy kept here; checks the one-cycle read latency and that a
// read in the cycle of a write to the same address returns the old data.
module tb_xy_spin_mem;
  import xy_pkg::*;

  localparam int L = 8, AW = 6;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [AW-1:0] rd_addr = '0, wr_addr = '0;
  logic [AW-1:0] nb_addr [4] = '{default: '0};
  xy_angle_t rd_theta, wr_theta = '0;
  xy_angle_t nb_theta [4];
  lcg_state_t rd_seed, wr_seed = '0;
  logic wr_en = 1'b0;
  int checks = 0, failures = 0;

  xy_spin_mem #(.L(L)) dut (.*);

  xy_angle_t  th_ref [L*L];
  lcg_state_t sd_ref [L*L];

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk);
    for (int a = 0; a < L*L; a++) begin
      th_ref[a] = $urandom(); sd_ref[a] = {$urandom(), $urandom()};
      wr_en = 1'b1; wr_addr = AW'(a); wr_theta = th_ref[a]; wr_seed = sd_ref[a];
      @(negedge clk);
    end
    wr_en = 1'b0;
    for (int a = 0; a < L*L; a++) begin
      int r [4];
      rd_addr = AW'(a);
      for (int n = 0; n < 4; n++) begin r[n] = $urandom_range(L*L-1); nb_addr[n] = AW'(r[n]); end
      @(negedge clk);
      checks += 6;
      if (rd_theta !== th_ref[a]) begin failures++; $display("FAIL theta %0d", a); end
      if (rd_seed  !== sd_ref[a]) begin failures++; $display("FAIL seed %0d", a); end
      for (int n = 0; n < 4; n++)
        if (nb_theta[n] !== th_ref[r[n]]) begin failures++; $display("FAIL nb %0d", n); end
    end
    // read-during-write returns old data; new data the cycle after
    rd_addr = 6'd5; wr_en = 1'b1; wr_addr = 6'd5; wr_theta = 32'hDEAD_BEEF; wr_seed = 48'h1;
    @(negedge clk);
    wr_en = 1'b0;
    checks++;
    if (rd_theta !== th_ref[5]) begin failures++; $display("FAIL read-during-write"); end
    @(negedge clk);
    checks++;
    if (rd_theta !== 32'hDEAD_BEEF || rd_seed !== 48'h1) begin failures++; $display("FAIL write"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
