// dpd_pkg -- types, constants and fixed-point helpers shared by the
// neural-network predistorter.
//
// Every datapath wire carries one 16-bit two's-complement word, as in the
// published accelerator. The binary point is this design's choice: FRAC_W =
// 12 fractional bits (Q4.12, range -8 .. +8). Products are truncated
// (arithmetic shift right, i.e. rounding toward minus infinity) and every
// addition saturates to the 16-bit range instead of wrapping.
//
// The weight/bias address map (the order in which parameters sit in the RAM)
// is also this design's own: parameters are grouped per neuron.
//   neuron i (0..N-1) of hidden layer 1:
//                               3*i + 0 : weight on Re(x)
//                               3*i + 1 : weight on Im(x)
//                               3*i + 2 : bias
//   neuron i of hidden layer l (2..K), B = 3*N + (l-2)*N*(N+1) + i*(N+1):
//                               B + m   : weight on neuron m of layer l-1
//                               B + N   : bias
//   output neuron j (0 = Re, 1 = Im), B = 3*N + (K-1)*N*(N+1) + j*(N+1):
//                               B + m   : weight on neuron m of layer K
//                               B + N   : bias
//   total parameters: 3*N + (K-1)*N*(N+1) + 2*(N+1)
//                     (72 for N = 14, K = 1; 32 for N = 6, K = 1)
package dpd_pkg;

  localparam int unsigned DATA_W   = 16;  // word width of every datapath bus
  localparam int unsigned FRAC_W   = 12;  // fractional bits of a word
  localparam int unsigned WADDR_W  = 8;   // weight RAM address width (up to 256 parameters)
  localparam int unsigned MULT_LAT = 3;   // register stages of one multiplier

  typedef logic signed [DATA_W-1:0] word_t;

  // One word of the weight broadcast from the RAM controller to all PEs.
  typedef struct packed {
    logic               valid;
    logic [WADDR_W-1:0] addr;
    word_t              data;
  } wbus_t;

  localparam word_t WORD_MAX = word_t'({1'b0, {(DATA_W-1){1'b1}}});
  localparam word_t WORD_MIN = word_t'({1'b1, {(DATA_W-1){1'b0}}});

  // Clamp a wide signed value into one word.
  function automatic word_t sat_word(input logic signed [2*DATA_W-1:0] v);
    if (v > 32'(signed'(WORD_MAX))) return WORD_MAX;
    if (v < 32'(signed'(WORD_MIN))) return WORD_MIN;
    return word_t'(v);
  endfunction

  // Saturating addition of two words.
  function automatic word_t sat_add(input word_t a, input word_t b);
    logic signed [DATA_W:0] s;
    s = {a[DATA_W-1], a} + {b[DATA_W-1], b};
    if (s[DATA_W] != s[DATA_W-1]) return s[DATA_W] ? WORD_MIN : WORD_MAX;
    return word_t'(s);
  endfunction

  // Rescale a full-precision product back to one word (truncate, saturate).
  function automatic word_t quant_prod(input logic signed [2*DATA_W-1:0] p);
    return sat_word(p >>> FRAC_W);
  endfunction

  // Address map helpers (n neurons per hidden layer, k hidden layers).
  function automatic int unsigned num_params(input int unsigned n, input int unsigned k);
    return 3 * n + (k - 1) * n * (n + 1) + 2 * (n + 1);
  endfunction

  // First address of neuron i of hidden layer l (l = 1 .. k).
  function automatic int unsigned hidden_base(input int unsigned n, input int unsigned l,
                                              input int unsigned i);
    return (l == 1) ? 3 * i : 3 * n + (l - 2) * n * (n + 1) + i * (n + 1);
  endfunction

  // First address of output neuron j (0 = real part, 1 = imaginary part).
  function automatic int unsigned output_base(input int unsigned n, input int unsigned k,
                                              input int unsigned j);
    return 3 * n + (k - 1) * n * (n + 1) + j * (n + 1);
  endfunction

  // Number of register levels of a balanced two-input adder tree.
  function automatic int unsigned tree_depth(input int unsigned operands);
    return (operands <= 1) ? 0 : $clog2(operands);
  endfunction

endpackage
