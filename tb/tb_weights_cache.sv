// tb_weights_cache -- checks that a neuron's cache captures exactly the
// broadcast words at its own addresses (weights BASE .. BASE+NUM_W-1, bias
// BASE+NUM_W), only while the bus is valid, and holds them otherwise; and
// that reset clears it.
module tb_weights_cache;
  import tb_ref_pkg::*;
  import dpd_pkg::*;

  localparam int NUM_W = 14;
  localparam int BASE  = 23;

  logic  clk = 1'b0, rst_n = 1'b0;
  wbus_t wbus = '0;
  word_t w [NUM_W];
  word_t bias;

  weights_cache #(.NUM_W(NUM_W), .BASE(BASE)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int mw[NUM_W], mb;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic compare(string when);
    for (int k = 0; k < NUM_W; k++) check(w[k] == 16'(mw[k]), $sformatf("%s: w[%0d]=%0d expected %0d", when, k, w[k], mw[k]));
    check(bias == 16'(mb), $sformatf("%s: bias=%0d expected %0d", when, bias, mb));
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < NUM_W; k++) mw[k] = 0;
    mb = 0;
    repeat (3) @(negedge clk);
    compare("reset");
    rst_n = 1'b1;
    for (int pass = 0; pass < 4; pass++) begin
      for (int a = 0; a < 256; a++) begin
        int d;
        bit v;
        d = rnd(32767);
        v = (pass == 2) ? 1'b0 : ($urandom_range(4) != 0);
        @(negedge clk);
        wbus = '{valid: v, addr: 8'(a), data: 16'(d)};
        @(negedge clk);
        wbus.valid = 1'b0;
        if (v && a >= BASE && a < BASE + NUM_W) mw[a - BASE] = d;
        if (v && a == BASE + NUM_W) mb = d;
        if (a >= BASE - 1 && a <= BASE + NUM_W + 1) compare($sformatf("pass %0d addr %0d", pass, a));
      end
      compare($sformatf("after pass %0d", pass));
    end
    @(negedge clk); rst_n = 1'b0;
    for (int k = 0; k < NUM_W; k++) mw[k] = 0;
    mb = 0;
    @(negedge clk);
    compare("second reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
