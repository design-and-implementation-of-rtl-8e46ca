// bypass_adder -- the two output "Add" blocks of the predistorter.
//
// Forms the predistorted sample x_hat = z + x, adding the delayed input
// (linear bypass, weight matrix fixed to the identity as in the paper) to
// the real and imaginary output neurons. The additions saturate to 16 bits
// and are registered, so the result appears one clock after its operands;
// the valid flag is registered alongside. Saturation and the output
// register are this design's choices.
module bypass_adder
  import dpd_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  word_t nn_re,      // output neuron 1 (real part)
  input  word_t nn_im,      // output neuron 2 (imaginary part)
  input  logic  byp_valid,
  input  word_t byp_re,     // delayed Re(x)
  input  word_t byp_im,     // delayed Im(x)
  output logic  out_valid,
  output word_t y_re,
  output word_t y_im
);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y_re      <= '0;
      y_im      <= '0;
    end else begin
      out_valid <= byp_valid;
      y_re      <= sat_add(nn_re, byp_re);
      y_im      <= sat_add(nn_im, byp_im);
    end
  end

endmodule
