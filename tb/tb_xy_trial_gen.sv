// tb_xy_trial_gen: checks that each site's seed X yields theta' = top 32 bits of lcg(X),
// p = top 32 bits of lcg(lcg(X)) and new state lcg(lcg(X)), computed here, with a
// latency of exactly four cycles (two 20 ns random draws) at one trial per cycle.
module tb_xy_trial_gen;
  import xy_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic in_valid = 1'b0, out_valid;
  lcg_state_t seed_in = '0, seed_out;
  xy_angle_t theta_new;
  prob_t p;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  xy_trial_gen dut (.*);

  function automatic lcg_state_t ref_lcg(lcg_state_t x);
    logic [95:0] w;
    w = 96'(x) * 96'd25214903917 + 96'd11;
    return w[47:0];
  endfunction

  lcg_state_t sent [$];
  int sent_cyc [$];

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (out_valid) begin
    lcg_state_t s, x1, x2;
    int c0;
    s = sent.pop_front(); c0 = sent_cyc.pop_front();
    x1 = ref_lcg(s); x2 = ref_lcg(x1);
    checks += 4;
    if (theta_new !== x1[47:16]) begin failures++; $display("FAIL theta' %h exp %h", theta_new, x1[47:16]); end
    if (p !== x2[47:16])         begin failures++; $display("FAIL p %h exp %h", p, x2[47:16]); end
    if (seed_out !== x2)         begin failures++; $display("FAIL seed %h exp %h", seed_out, x2); end
    if (cyc - c0 != 4)           begin failures++; $display("FAIL latency %0d", cyc - c0); end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int i = 0; i < 50; i++) begin
      lcg_state_t v;
      v = {$urandom(), $urandom()};
      in_valid <= (i % 5 != 2);
      seed_in  <= v;
      if (i % 5 != 2) begin sent.push_back(v); sent_cyc.push_back(cyc + 1); end
      @(posedge clk);
    end
    in_valid <= 1'b0;
    repeat (8) @(posedge clk);
    checks++;
    if (sent.size() != 0) begin failures++; $display("FAIL %0d outputs missing", sent.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
