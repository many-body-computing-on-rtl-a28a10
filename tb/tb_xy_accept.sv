// tb_xy_accept: drives random energy differences dE in [-6, 6] and decision factors p
// at T = 0.85 and checks accept == (p < exp(-dE / T)), with the exponential computed
// here in double precision, and that the kept angle and cosine sum follow the decision.
// Cases where p lies within 1e-5 of P (relative) are skipped.
// Also checks the two-cycle latency. Inputs change and outputs are sampled at the
// falling edge.
module tb_xy_accept;
  import xy_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [31:0] beta_q24 = BETA_T085_Q24;
  logic in_valid = 1'b0, out_valid, accept;
  xy_energy_t d_e = '0, s_old = '0, s_new = '0, s_final;
  prob_t p = '0;
  xy_angle_t theta = '0, theta_new = '0, theta_out;
  int checks = 0, failures = 0, cyc = 0, n_acc = 0, n_rej = 0;
  always @(posedge clk) cyc <= cyc + 1;

  xy_accept dut (.*);

  typedef struct { logic acc; logic skip; xy_angle_t th; xy_energy_t s; int c0; real de; real pp; real bp; } exp_t;
  exp_t q [$];

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (out_valid) begin
    exp_t e;
    e = q.pop_front();
    checks++;
    if (cyc - e.c0 != 2) begin failures++; $display("FAIL latency %0d", cyc - e.c0); end
    if (!e.skip) begin
      checks += 3;
      if (accept !== e.acc) begin failures++; $display("FAIL accept %b exp %b dE=%f p=%f P=%f", accept, e.acc, e.de, e.pp, e.bp); end
      if (theta_out !== e.th) begin failures++; $display("FAIL theta %h exp %h", theta_out, e.th); end
      if (s_final !== e.s) begin failures++; $display("FAIL s_final"); end
      if (e.acc) n_acc++; else n_rej++;
    end
  end

  task automatic drive(real de, real pr);
    exp_t e;
    real bigp, pq;
    xy_energy_t dq;
    dq = xy_energy_t'(longint'(de * 536870912.0));
    de = real'(dq) / 536870912.0;
    pq = pr;
    bigp = $exp(-de / 0.85);
    e.acc  = pq < bigp;
    e.skip = (pq - bigp < 1e-5 * bigp) && (bigp - pq < 1e-5 * bigp);
    in_valid = 1'b1;
    d_e = dq;
    p = prob_t'(longint'(pq * 4294967296.0));
    theta = $urandom(); theta_new = $urandom();
    s_old = xy_energy_t'($urandom()); s_new = xy_energy_t'($urandom());
    e.th = e.acc ? theta_new : theta;
    e.s  = e.acc ? s_new : s_old;
    e.c0 = cyc; e.de = de; e.pp = pq; e.bp = bigp;
    q.push_back(e);
    @(negedge clk);
    in_valid = 1'b0;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    drive(-1.0, 0.999);     // downhill: always accepted
    drive(0.0, 0.999);      // flat: accepted
    drive(8.0, 0.00005);    // P = 8.1e-5: accepted
    drive(8.0, 0.0002);     // rejected
    for (int i = 0; i < 500; i++) begin
      real de, pr;
      de = (real'($urandom_range(12000)) - 6000.0) / 1000.0;
      pr = real'($urandom()) / 4294967296.0;
      if (i % 3 == 0) pr = pr * $exp(-(de > 0 ? de : 0.0) / 0.85) * 2.0;
      if (pr >= 1.0) pr = 0.5;
      drive(de, pr);
    end
    repeat (5) @(negedge clk);
    checks += 2;
    if (q.size() != 0) begin failures++; $display("FAIL %0d outputs missing", q.size()); end
    if (n_acc < 10 || n_rej < 10) begin failures++; $display("FAIL too few accepts/rejects %0d %0d", n_acc, n_rej); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
