// nn_dpd_top -- neural-network digital predistorter, fully parallel and
// pipelined: one complex baseband sample in and one predistorted sample out
// every clock.
//
// Structure (as in the paper's accelerator):
//   * weight_ram       all weights and biases, written by an outside host
//   * ram_controller   on `load_start`, walks the RAM and broadcasts every
//                      (address, word) pair to all neurons
//   * hidden layers    K layers of N neuron PEs with ReLU; layer 1 takes
//                      Re(x) and Im(x), layer l takes the N outputs of l-1
//   * output layer     two neuron PEs without ReLU (real, imaginary part)
//   * linear bypass    pipeline registers delaying x to the output layer
//   * bypass adders    x_hat = z + x (identity linear bypass)
// i.e. x_hat = W_{K+1} h_K + b_{K+1} + x with h_l = ReLU(W_l h_{l-1} + b_l).
// The paper's implemented configurations have K = 1 with N = 6 or N = 14;
// N = 14, K = 1 is the default here.
//
// Interface:
//   ram_we/ram_waddr/ram_wdata  host write port of the weight RAM
//   load_start                  pulse: copy RAM into the neuron caches
//   load_busy, load_done        copy in progress / one-cycle completion pulse
//   in_valid, x_re, x_im        input sample (16-bit Q4.12), one per clock
//   out_valid, y_re, y_im       predistorted sample, LATENCY clocks later
// The valid flag and the load handshake are this design's additions; the
// datapath accepts a sample every clock whether or not it is flagged valid.
//
// Timing: LATENCY = 6 + (K-1)*(4 + ceil(log2(N+1))) + 3 + ceil(log2(N+1)) + 1
// clocks, 14 for N = 14, K = 1 (the paper reports 14) and 13 for N = 6
// (paper: 12). A weight load takes num_params + 2 clocks; samples that meet
// the caches while they are being rewritten use a mixture of old and new
// weights. Reset is synchronous and active low and clears every register
// except the RAM contents.
module nn_dpd_top
  import dpd_pkg::*;
#(
  parameter int unsigned N = 14,   // neurons per hidden layer
  parameter int unsigned K = 1     // hidden layers
) (
  input  logic               clk,
  input  logic               rst_n,
  // weight RAM host port
  input  logic               ram_we,
  input  logic [WADDR_W-1:0] ram_waddr,
  input  word_t              ram_wdata,
  // cache load control
  input  logic               load_start,
  output logic               load_busy,
  output logic               load_done,
  // sample stream
  input  logic               in_valid,
  input  word_t              x_re,
  input  word_t              x_im,
  output logic               out_valid,
  output word_t              y_re,
  output word_t              y_im
);

  localparam int unsigned NPARAM  = num_params(N, K);
  localparam int unsigned L1_LAT  = MULT_LAT + tree_depth(3) + 1;
  localparam int unsigned LN_LAT  = MULT_LAT + tree_depth(N + 1) + 1;
  localparam int unsigned OUT_LAT = MULT_LAT + tree_depth(N + 1);
  localparam int unsigned LATENCY = L1_LAT + (K - 1) * LN_LAT + OUT_LAT + 1;

  // ---------------------------------------------------------------- weights
  logic [WADDR_W-1:0] raddr;
  word_t              rdata;
  wbus_t              wbus;

  weight_ram #(.DEPTH(NPARAM)) u_ram (
    .clk, .we(ram_we), .waddr(ram_waddr), .wdata(ram_wdata), .raddr, .rdata
  );

  ram_controller #(.DEPTH(NPARAM)) u_ctrl (
    .clk, .rst_n, .start(load_start), .raddr, .rdata, .wbus,
    .busy(load_busy), .done(load_done)
  );

  // ---------------------------------------------------------- hidden layers
  word_t x_vec [2];
  word_t h [K][N];

  assign x_vec[0] = x_re;
  assign x_vec[1] = x_im;

  for (genvar l = 1; l <= K; l++) begin : g_layer
    for (genvar i = 0; i < N; i++) begin : g_neuron
      if (l == 1) begin : g_first
        neuron_pe #(.NUM_IN(2), .RELU(1'b1), .BASE(hidden_base(N, 1, i))) u_pe (
          .clk, .rst_n, .wbus, .x(x_vec), .y(h[0][i])
        );
      end else begin : g_deep
        neuron_pe #(.NUM_IN(N), .RELU(1'b1), .BASE(hidden_base(N, l, i))) u_pe (
          .clk, .rst_n, .wbus, .x(h[l-2]), .y(h[l-1][i])
        );
      end
    end
  end

  // ----------------------------------------------------------- output layer
  word_t z [2];

  for (genvar j = 0; j < 2; j++) begin : g_out
    neuron_pe #(.NUM_IN(N), .RELU(1'b0), .BASE(output_base(N, K, j))) u_pe (
      .clk, .rst_n, .wbus, .x(h[K-1]), .y(z[j])
    );
  end

  // --------------------------------------------------------- linear bypass
  logic  byp_valid;
  word_t byp_re, byp_im;

  bypass_pipeline #(.DELAY(LATENCY - 1)) u_bypass (
    .clk, .rst_n, .in_valid, .in_re(x_re), .in_im(x_im),
    .out_valid(byp_valid), .out_re(byp_re), .out_im(byp_im)
  );

  bypass_adder u_add (
    .clk, .rst_n, .nn_re(z[0]), .nn_im(z[1]),
    .byp_valid, .byp_re, .byp_im, .out_valid, .y_re, .y_im
  );

  initial begin
    assert (K >= 1 && N >= 1) else $error("nn_dpd_top: N and K must be at least 1");
    assert (NPARAM <= (1 << WADDR_W)) else $error("nn_dpd_top: weight RAM exceeds address space");
  end

endmodule
