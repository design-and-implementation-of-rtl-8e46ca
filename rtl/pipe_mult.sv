// pipe_mult -- pipelined 16 x 16 fixed-point multiplier.
//
// Three register stages (MULT_LAT in dpd_pkg), the way a fully pipelined
// DSP slice is used: operand registers, full 32-bit product register, and a
// register on the product rescaled back to one 16-bit word (shift right by
// FRAC_W, truncate, saturate). A product leaves three clocks after its
// operands were presented. The stage count is this design's choice.
module pipe_mult
  import dpd_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  word_t a,
  input  word_t b,
  output word_t p
);

  word_t                       a_q, b_q;
  logic signed [2*DATA_W-1:0]  prod_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      a_q    <= '0;
      b_q    <= '0;
      prod_q <= '0;
      p      <= '0;
    end else begin
      a_q    <= a;
      b_q    <= b;
      prod_q <= a_q * b_q;
      p      <= quant_prod(prod_q);
    end
  end

endmodule
