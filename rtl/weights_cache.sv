// weights_cache -- the per-neuron register cache of weights and bias.
//
// Watches the weight broadcast bus. Whenever a valid word carries one of
// this neuron's addresses it is stored in the register dedicated to that
// parameter; the registers drive the neuron's multipliers and bias adder
// directly, so inference never waits on the RAM. This follows the paper.
// The neuron owns NUM_W+1 consecutive addresses starting at BASE: weights
// 0 .. NUM_W-1, then the bias (the address map of dpd_pkg).
//
// Timing: a word on the bus is visible at the outputs one clock later.
// Reset (synchronous, active low) clears all registers to zero, so an
// unloaded network outputs only its linear bypass.
module weights_cache
  import dpd_pkg::*;
#(
  parameter int unsigned NUM_W = 2,   // number of weights (= neuron inputs)
  parameter int unsigned BASE  = 0    // RAM address of weight 0
) (
  input  logic  clk,
  input  logic  rst_n,
  input  wbus_t wbus,
  output word_t w [NUM_W],
  output word_t bias
);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int k = 0; k < NUM_W; k++) w[k] <= '0;
      bias <= '0;
    end else if (wbus.valid) begin
      for (int k = 0; k < NUM_W; k++) begin
        if (wbus.addr == WADDR_W'(BASE + k)) w[k] <= wbus.data;
      end
      if (wbus.addr == WADDR_W'(BASE + NUM_W)) bias <= wbus.data;
    end
  end

endmodule
