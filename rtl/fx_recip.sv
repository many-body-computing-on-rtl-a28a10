// fx_recip: reciprocal 1/d of a positive fixed-point number (itebd_pkg format, FX_F
// fraction bits) by restoring long division, one quotient bit per cycle.
//
// start (with d, sampled) begins the division of 2^(2 FX_F) by d; after 2 FX_F + 1
// cycles done pulses and q holds floor(2^(2 FX_F) / d), saturated to the largest
// positive value if it does not fit in 64 signed bits. d must be positive; the caller
// clamps small values first. A serial divider is this design's choice for the few
// reciprocals an iTEBD step needs (Db bond weights and one norm).
module fx_recip
  import itebd_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  fx_t  d,
  output logic busy,
  output logic done,
  output fx_t  q
);

  localparam int NUMW = 2 * FX_F + 1;         // bits of the dividend 2^(2 FX_F)

  logic [NUMW-1:0] num;                       // dividend bits, shifted out MSB first
  logic [NUMW-1:0] quo;
  logic [64:0]     rem;
  logic [63:0]     div;
  logic [6:0]      cnt;

  logic [64:0] r2;
  logic        ge;
  always_comb begin
    r2 = {rem[63:0], num[NUMW-1]};
    ge = (r2 >= {1'b0, div});
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0;
      num <= '0; quo <= '0; rem <= '0; div <= '0; cnt <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1;
        div  <= d;
        num  <= NUMW'(1) << (NUMW - 1);
        quo  <= '0;
        rem  <= '0;
        cnt  <= '0;
      end else if (busy) begin
        num <= num << 1;
        rem <= ge ? r2 - {1'b0, div} : r2;
        quo <= {quo[NUMW-2:0], ge};
        cnt <= cnt + 7'd1;
        if (cnt == 7'(NUMW - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign q = (|quo[NUMW-1:63]) ? fx_t'({1'b0, {63{1'b1}}}) : fx_t'(quo[62:0]);

endmodule
