// tb_ram_controller -- checks the weight broadcast: after `start` every
// address 0 .. DEPTH-1 appears once, in order, one per clock, with the word
// stored there; `busy` covers the scan, `done` pulses once DEPTH+2 clocks
// after `start`, and a `start` while busy is ignored. A small memory model
// with a one-clock synchronous read stands in for the weight RAM.
module tb_ram_controller;
  import tb_ref_pkg::*;
  import dpd_pkg::*;

  localparam int DEPTH = 72;

  logic       clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [7:0] raddr;
  word_t      rdata;
  wbus_t      wbus;
  logic       busy, done;

  ram_controller dut (.*);

  always #5 clk = ~clk;

  int mem[256];
  always @(posedge clk) rdata <= 16'(mem[raddr]);

  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc++;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0d: %s", cyc, what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_load(bit restart_midway);
    int t0, next_addr, n_done;
    next_addr = 0; n_done = 0;
    @(negedge clk); start = 1'b1; t0 = cyc;
    @(negedge clk); start = 1'b0;
    while (cyc - t0 < DEPTH + 10) begin
      if (restart_midway && cyc - t0 == 20) start = 1'b1;
      if (restart_midway && cyc - t0 == 21) start = 1'b0;
      if (wbus.valid) begin
        check(int'(wbus.addr) == next_addr, $sformatf("addr %0d expected %0d", wbus.addr, next_addr));
        check(wbus.data == 16'(mem[next_addr]), $sformatf("data at %0d", next_addr));
        check(busy, "busy while broadcasting");
        next_addr++;
      end
      if (done) begin
        n_done++;
        check(cyc - t0 == DEPTH + 2, $sformatf("done after %0d clocks", cyc - t0));
        check(!wbus.valid && !busy, "idle when done");
      end
      @(negedge clk);
    end
    check(next_addr == DEPTH, $sformatf("%0d words broadcast", next_addr));
    check(n_done == 1, "one done pulse");
  endtask

  initial begin
    for (int a = 0; a < 256; a++) mem[a] = rnd(32000);
    repeat (3) @(negedge clk);
    check(!busy && !wbus.valid && !done, "idle after reset");
    rst_n = 1'b1;
    repeat (3) @(negedge clk);
    check(!busy && !wbus.valid && !done, "idle without start");
    run_load(1'b0);
    for (int a = 0; a < 256; a++) mem[a] = rnd(32000);
    run_load(1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
