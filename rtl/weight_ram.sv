// weight_ram -- the "Weights and Biases RAM" of the predistorter.
//
// Holds every weight and bias of the network, one 16-bit word per parameter,
// at the addresses given by the map in dpd_pkg. An outside controller (the
// host that trains the network offline) writes it through a simple write
// port; the on-chip RAM controller reads it back word by word to fill the
// neuron caches. The inference datapath never reads this RAM directly.
//
// Interface and timing (this design's choice; the paper only says the RAM
// "can be written to from outside"):
//   * write: we/waddr/wdata sampled on the rising clock edge; addresses at
//     or beyond DEPTH are ignored.
//   * read:  synchronous, rdata holds mem[raddr] one cycle after raddr is
//     presented; an out-of-range address reads as zero.
// The contents have no reset, as in a block/distributed RAM.
module weight_ram
  import dpd_pkg::*;
#(
  parameter int unsigned DEPTH = 72   // 5*N+2 parameters, N = 14
) (
  input  logic               clk,
  input  logic               we,
  input  logic [WADDR_W-1:0] waddr,
  input  word_t              wdata,
  input  logic [WADDR_W-1:0] raddr,
  output word_t              rdata
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  word_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we && (32'(waddr) < DEPTH)) mem[AW'(waddr)] <= wdata;
  end

  always_ff @(posedge clk) begin
    rdata <= (32'(raddr) < DEPTH) ? mem[AW'(raddr)] : '0;
  end

endmodule
