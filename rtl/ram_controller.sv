// ram_controller -- copies the weight RAM into the neuron weight caches.
//
// Once the host has written the RAM it pulses `start`. A counter then walks
// through every RAM address 0 .. DEPTH-1, one per clock, and the address
// together with the word stored there is broadcast on `wbus` to every
// neuron PE. Each PE's weights cache picks out the addresses that belong to
// it. This counter-and-broadcast scheme is the one the paper describes;
// the start/busy/done handshake around it is this design's own.
//
// Timing: `start` is sampled while idle (ignored while busy). The counter
// runs for DEPTH cycles; because the RAM read is synchronous, wbus carries
// address a one cycle after the counter showed a. `done` pulses for one
// cycle in the cycle after the last word was on the bus, i.e. when every
// cache holds its new value. A complete load takes DEPTH + 2 cycles from the
// cycle `start` is seen to `done`. `busy` is high from the cycle after
// `start` until the last word has been broadcast. The data field of `wbus`
// is the RAM read data itself, unregistered here.
module ram_controller
  import dpd_pkg::*;
#(
  parameter int unsigned DEPTH = 72
) (
  input  logic               clk,
  input  logic               rst_n,     // synchronous, active low
  input  logic               start,
  output logic [WADDR_W-1:0] raddr,
  input  word_t              rdata,
  output wbus_t              wbus,
  output logic               busy,
  output logic               done
);

  typedef enum logic {IDLE, SCAN} state_t;

  localparam logic [WADDR_W-1:0] LAST = WADDR_W'(DEPTH - 1);

  state_t             state;
  logic [WADDR_W-1:0] cnt;
  logic               rd_valid;   // rdata holds a word requested last cycle
  logic [WADDR_W-1:0] rd_addr;    // the address that word came from
  logic               rd_last;    // ... and it is the last one

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= IDLE;
      cnt      <= '0;
      rd_valid <= 1'b0;
      rd_addr  <= '0;
      rd_last  <= 1'b0;
      done     <= 1'b0;
    end else begin
      rd_valid <= (state == SCAN);
      rd_addr  <= cnt;
      rd_last  <= (state == SCAN) && (cnt == LAST);
      done     <= rd_valid && rd_last;
      unique case (state)
        IDLE: if (start) begin
          state <= SCAN;
          cnt   <= '0;
        end
        SCAN: if (cnt == LAST) begin
          state <= IDLE;
        end else begin
          cnt <= cnt + 1'b1;
        end
      endcase
    end
  end

  assign raddr = cnt;
  assign busy  = (state == SCAN) || rd_valid;
  assign wbus  = '{valid: rd_valid, addr: rd_addr, data: rdata};

  // Broadcast rules: addresses are visited in order, one per clock, without
  // gaps, and `done` only follows the last word.
  a_in_order: assert property (@(posedge clk) disable iff (!rst_n)
    wbus.valid && !rd_last |=> wbus.valid && (wbus.addr == $past(wbus.addr) + 1'b1));
  a_done_after_last: assert property (@(posedge clk) disable iff (!rst_n)
    done |-> $past(wbus.valid && rd_last) && !busy);

endmodule
