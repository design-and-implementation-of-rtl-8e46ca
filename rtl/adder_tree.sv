// adder_tree -- balanced, fully pipelined tree of saturating adders.
//
// Sums NUM words. Level l pairs neighbouring results of level l-1 (an odd
// one out is passed on unchanged), and every level is registered, so the sum
// appears tree_depth(NUM) = ceil(log2(NUM)) clocks after the operands. Each
// addition saturates to 16 bits, keeping the datapath 16 bits wide
// throughout as in the paper; the tree shape is this design's choice.
module adder_tree
  import dpd_pkg::*;
#(
  parameter int unsigned NUM = 3
) (
  input  logic  clk,
  input  logic  rst_n,
  input  word_t in [NUM],
  output word_t sum
);

  localparam int unsigned DEPTH = tree_depth(NUM);

  // Number of values on level l.
  function automatic int unsigned count(input int unsigned l);
    return (NUM + (1 << l) - 1) >> l;
  endfunction

  for (genvar l = 0; l <= DEPTH; l++) begin : g_lvl
    localparam int unsigned CNT = count(l);
    word_t v [CNT];
    if (l == 0) begin : g_in
      always_comb v = in;
    end else begin : g_add
      localparam int unsigned PCNT = count(l - 1);
      for (genvar k = 0; k < CNT; k++) begin : g_node
        if (2 * k + 1 < PCNT) begin : g_pair
          always_ff @(posedge clk) begin
            if (!rst_n) v[k] <= '0;
            else        v[k] <= sat_add(g_lvl[l-1].v[2*k], g_lvl[l-1].v[2*k+1]);
          end
        end else begin : g_pass
          always_ff @(posedge clk) begin
            if (!rst_n) v[k] <= '0;
            else        v[k] <= g_lvl[l-1].v[2*k];
          end
        end
      end
    end
  end

  assign sum = g_lvl[DEPTH].v[0];

endmodule
