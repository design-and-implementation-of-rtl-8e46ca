// neuron_pe -- one neuron processing element (PE).
//
// Computes y = f(sum_i w_i * x_i + b) for one neuron, fully pipelined so a
// new input vector is accepted every clock. As in the paper it has one
// multiplier per input, so all products are formed in parallel; the
// products and the bias are then added, and in hidden neurons the sum passes
// through the ReLU, a single multiplexer that selects zero when the sign bit
// is set. Output-layer neurons (RELU = 0) skip the multiplexer. The weights
// and bias come from the neuron's own weights cache, filled from the weight
// broadcast bus.
//
// The adder tree's first operand is the bias and the next is the product of
// the last input, so for the two-input neuron of the first hidden layer the
// bias is added to the Im(x) product first and the Re(x) product afterwards,
// the order drawn in the paper's PE diagram. A hidden neuron's output is
// never negative, so its sign bit is constant zero after synthesis.
//
// Latency: MULT_LAT (3) + ceil(log2(NUM_IN+1)) + RELU clocks, i.e. 6 for a
// first-layer hidden neuron and 7 for an output neuron with 14 inputs. The
// pipeline depths are this design's choice.
module neuron_pe
  import dpd_pkg::*;
#(
  parameter int unsigned NUM_IN = 2,   // inputs (2 for hidden layer 1, N for the output layer)
  parameter bit          RELU   = 1'b1,// apply ReLU (hidden layers)
  parameter int unsigned BASE   = 0    // RAM address of this neuron's first weight
) (
  input  logic  clk,
  input  logic  rst_n,
  input  wbus_t wbus,
  input  word_t x [NUM_IN],
  output word_t y
);

  word_t w [NUM_IN];
  word_t bias;
  word_t prod [NUM_IN];
  word_t opnd [NUM_IN + 1];
  word_t acc;

  weights_cache #(.NUM_W(NUM_IN), .BASE(BASE)) u_cache (
    .clk, .rst_n, .wbus, .w, .bias
  );

  for (genvar i = 0; i < NUM_IN; i++) begin : g_mul
    pipe_mult u_mul (.clk, .rst_n, .a(x[i]), .b(w[i]), .p(prod[i]));
  end

  always_comb begin
    opnd[0] = bias;
    for (int i = 0; i < NUM_IN; i++) opnd[i + 1] = prod[NUM_IN - 1 - i];
  end

  adder_tree #(.NUM(NUM_IN + 1)) u_tree (.clk, .rst_n, .in(opnd), .sum(acc));

  if (RELU) begin : g_relu
    always_ff @(posedge clk) begin
      if (!rst_n) y <= '0;
      else        y <= acc[DATA_W-1] ? '0 : acc;   // ReLU multiplexer
    end
  end else begin : g_lin
    assign y = acc;
  end

endmodule
