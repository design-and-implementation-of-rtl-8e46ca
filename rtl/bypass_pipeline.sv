// bypass_pipeline -- the linear bypass pipeline registers.
//
// The network adds its input sample straight onto the two output neurons
// (the identity linear bypass), so the hidden layers only have to learn the
// nonlinear part of the predistortion. The input must therefore be delayed
// by as many clocks as the neurons take; this block is that chain of
// registers, as in the paper. It also carries the sample-valid flag, which
// is this design's addition, so the flag stays aligned with the sample.
//
// Timing: out_* equals in_* from DELAY clocks earlier. Reset clears the
// chain (synchronous, active low).
module bypass_pipeline
  import dpd_pkg::*;
#(
  parameter int unsigned DELAY = 13
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  word_t in_re,
  input  word_t in_im,
  output logic  out_valid,
  output word_t out_re,
  output word_t out_im
);

  typedef struct packed {
    logic  valid;
    word_t re;
    word_t im;
  } stage_t;

  stage_t chain [DELAY];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int s = 0; s < DELAY; s++) chain[s] <= '0;
    end else begin
      chain[0] <= '{valid: in_valid, re: in_re, im: in_im};
      for (int s = 1; s < DELAY; s++) chain[s] <= chain[s-1];
    end
  end

  assign out_valid = chain[DELAY-1].valid;
  assign out_re    = chain[DELAY-1].re;
  assign out_im    = chain[DELAY-1].im;

endmodule
