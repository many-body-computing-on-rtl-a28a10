// tb_lcg48: checks the 48-bit LCG step against X' = (a X + c) mod 2^48 computed here in
// 96-bit arithmetic, for a back-to-back stream of random inputs, and checks that each
// result leaves exactly two cycles (20 ns at 100 MHz) after its input.
module tb_lcg48;
  import xy_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic in_valid = 1'b0, out_valid;
  lcg_state_t x_in = '0, x_out;
  int checks = 0, failures = 0;

  lcg48 dut (.*);

  lcg_state_t sent [$];
  int sent_cyc [$];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic lcg_state_t ref_lcg(lcg_state_t x);
    logic [95:0] w;
    w = 96'(x) * 96'd25214903917 + 96'd11;
    return w[47:0];
  endfunction

  always @(posedge clk) begin
    if (out_valid) begin
      lcg_state_t e;
      int c0;
      e = sent.pop_front();
      c0 = sent_cyc.pop_front();
      checks++;
      if (x_out !== ref_lcg(e)) begin
        failures++;
        $display("FAIL value: in=%h got=%h exp=%h", e, x_out, ref_lcg(e));
      end
      checks++;
      if (cyc - c0 != 2) begin
        failures++;
        $display("FAIL latency %0d", cyc - c0);
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int i = 0; i < 40; i++) begin
      lcg_state_t v;
      v = (i == 0) ? 48'd0 : (i == 1) ? 48'hFFFF_FFFF_FFFF : {$urandom(), $urandom()} ;
      in_valid <= (i % 7 != 3);
      x_in     <= v;
      if (i % 7 != 3) begin
        sent.push_back(v);
        sent_cyc.push_back(cyc + 1);
      end
      @(posedge clk);
    end
    in_valid <= 1'b0;
    repeat (5) @(posedge clk);
    checks++;
    if (sent.size() != 0) begin
      failures++;
      $display("FAIL %0d results missing", sent.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
