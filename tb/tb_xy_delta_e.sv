// tb_xy_delta_e: drives random site, trial and neighbour angles and compares s_old,
// s_new and dE = s_old - s_new with sums of cosines computed here in double precision
// ($cos); tolerance 1e-6. Inputs change and outputs are sampled at the falling edge. Also checks the two-cycle latency at one trial per cycle and
// two hand cases (all spins aligned; a trial reversing an aligned spin gives dE = +8).
module tb_xy_delta_e;
  import xy_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic in_valid = 1'b0, out_valid;
  xy_angle_t theta = '0, theta_new = '0;
  xy_angle_t nb [4] = '{default: '0};
  xy_energy_t d_e, s_old, s_new;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  xy_delta_e dut (.*);

  typedef struct { real so; real sn; int c0; } exp_t;
  exp_t q [$];
  localparam real TWO_PI = 6.283185307179586;

  function automatic real ang(xy_angle_t a);
    return TWO_PI * real'(a) / 4294967296.0;
  endfunction

  function automatic real fx(xy_energy_t v);
    return real'(v) / real'(64'd1 << XY_EF);
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (out_valid) begin
    exp_t e;
    real tol;
    e = q.pop_front();
    tol = 1e-6;
    checks += 4;
    if (fx(s_old) - e.so > tol || e.so - fx(s_old) > tol) begin failures++; $display("FAIL s_old %f exp %f", fx(s_old), e.so); end
    if (fx(s_new) - e.sn > tol || e.sn - fx(s_new) > tol) begin failures++; $display("FAIL s_new %f exp %f", fx(s_new), e.sn); end
    if (fx(d_e) - (e.so - e.sn) > tol || (e.so - e.sn) - fx(d_e) > tol) begin failures++; $display("FAIL dE %f exp %f", fx(d_e), e.so - e.sn); end
    if (cyc - e.c0 != 2) begin failures++; $display("FAIL latency %0d", cyc - e.c0); end
  end

  task automatic drive(xy_angle_t t, xy_angle_t tn, xy_angle_t n0, xy_angle_t n1,
                       xy_angle_t n2, xy_angle_t n3);
    exp_t e;
    xy_angle_t nn [4];
    nn = '{n0, n1, n2, n3};
    e.so = 0.0; e.sn = 0.0;
    for (int i = 0; i < 4; i++) begin
      e.so += $cos(ang(t) - ang(nn[i]));
      e.sn += $cos(ang(tn) - ang(nn[i]));
    end
    e.c0 = cyc;
    q.push_back(e);
    in_valid = 1'b1; theta = t; theta_new = tn; nb = nn;
    @(negedge clk);
    in_valid = 1'b0;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    drive(32'h1234_0000, 32'h1234_0000, 32'h1234_0000, 32'h1234_0000, 32'h1234_0000, 32'h1234_0000);
    drive(32'h0, 32'h8000_0000, 32'h0, 32'h0, 32'h0, 32'h0);
    for (int i = 0; i < 200; i++) begin
      drive($urandom(), $urandom(), $urandom(), $urandom(), $urandom(), $urandom());
      if (i % 9 == 4) @(negedge clk);
    end
    repeat (6) @(negedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL %0d outputs missing", q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
