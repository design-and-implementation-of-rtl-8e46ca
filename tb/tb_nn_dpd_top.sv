// tb_nn_dpd_top -- end-to-end test of the predistorter at its default size
// (N = 14 neurons, K = 1 hidden layer, 72 parameters).
//
// The host port fills the weight RAM with random weights, a cache load is
// started and timed, and random complex samples are streamed through. Every
// output is compared with a bit-exact integer model of the network
// (tb_ref_pkg), and the clocks from input to output are checked against the
// 14-clock latency. The test exercises, and counts: the linear bypass alone
// (before any load, all weights zero), a cache load, RAM writes that must not
// disturb the caches until the next load, a reload with new weights,
// back-to-back samples (one per clock), bubbles in the input stream, ReLU
// clipping and passing, and saturation of the 16-bit arithmetic. A mechanism
// that never happened counts as a failure.
module tb_nn_dpd_top;
  import tb_ref_pkg::*;

  localparam int N   = 14;
  localparam int K   = 1;
  localparam int NP  = 5 * N + 2;
  localparam int LAT = 14;

  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  logic        ram_we = 1'b0;
  logic [7:0]  ram_waddr = '0;
  logic signed [15:0] ram_wdata = '0;
  logic        load_start = 1'b0;
  logic        load_busy, load_done;
  logic        in_valid = 1'b0;
  logic signed [15:0] x_re = '0, x_im = '0;
  logic        out_valid;
  logic signed [15:0] y_re, y_im;

  nn_dpd_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  int p_cur[$];                  // weights the caches hold
  int p_ram[$];                  // weights the RAM holds
  int exp_r[$], exp_i[$], exp_t[$];
  int n_out = 0, n_bypass_only = 0, n_loads = 0, n_hold = 0, n_bubbles = 0;
  int n_back_to_back = 0, last_out_cyc = -10;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL @%0d: %s", cyc, what);
    end
  endtask

  // Output monitor: compare each valid output with the oldest expectation.
  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      if (exp_r.size() == 0) begin
        check(1'b0, "output without a matching input");
      end else begin
        int er, ei, et;
        er = exp_r.pop_front(); ei = exp_i.pop_front(); et = exp_t.pop_front();
        check(y_re == 16'(er) && y_im == 16'(ei),
              $sformatf("y=(%0d,%0d) expected (%0d,%0d)", y_re, y_im, er, ei));
        check(cyc - et == LAT, $sformatf("latency %0d, expected %0d", cyc - et, LAT));
        if (cyc == last_out_cyc + 1) n_back_to_back++;
        last_out_cyc = cyc;
        n_out++;
      end
    end
  end

  task automatic write_ram(int mag);
    p_ram = {};
    for (int a = 0; a < NP; a++) begin
      @(negedge clk);
      ram_we    = 1'b1;
      ram_waddr = 8'(a);
      p_ram.push_back(rnd(mag));
      ram_wdata = 16'(p_ram[a]);
    end
    @(negedge clk);
    ram_we = 1'b0;
  endtask

  task automatic load_caches();
    int t0;
    @(negedge clk);
    load_start = 1'b1;
    t0 = cyc;
    @(negedge clk);
    load_start = 1'b0;
    check(load_busy, "load_busy after load_start");
    while (!load_done) @(negedge clk);
    check(cyc - t0 == NP + 2, $sformatf("load took %0d clocks, expected %0d", cyc - t0, NP + 2));
    @(negedge clk);
    check(!load_busy && !load_done, "load finished");
    p_cur = p_ram;
    n_loads++;
  endtask

  // Stream `count` samples of amplitude up to `mag`; with `bubbles` set,
  // about one clock in four carries no sample.
  task automatic stream(int count, int mag, bit bubbles);
    int sent = 0;
    while (sent < count) begin
      @(negedge clk);
      if (bubbles && $urandom_range(3) == 0) begin
        in_valid = 1'b0;
        x_re = 16'(rnd(mag)); x_im = 16'(rnd(mag));
        n_bubbles++;
      end else begin
        int yr, yi, xr, xi;
        xr = rnd(mag); xi = rnd(mag);
        in_valid = 1'b1;
        x_re = 16'(xr); x_im = 16'(xi);
        network(p_cur, N, K, xr, xi, yr, yi);
        exp_r.push_back(yr); exp_i.push_back(yi); exp_t.push_back(cyc);
        sent++;
      end
    end
    @(negedge clk);
    in_valid = 1'b0;
  endtask

  task automatic drain();
    repeat (LAT + 3) @(negedge clk);
    check(exp_r.size() == 0, $sformatf("%0d outputs missing", exp_r.size()));
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int s0, s1;
    for (int a = 0; a < NP; a++) p_cur.push_back(0);
    repeat (4) @(negedge clk);
    rst_n = 1'b1;

    // 1. Reset caches hold zeros: the output is the input (linear bypass).
    s0 = n_out;
    stream(40, 30000, 1'b0);
    drain();
    n_bypass_only = n_out - s0;

    // 2. Fill the RAM, load the caches, stream back-to-back samples.
    write_ram(6000);
    load_caches();
    stream(400, 3700, 1'b0);
    drain();

    // 3. Rewrite the RAM while streaming: the caches must keep the old set.
    fork
      write_ram(9000);
      begin
        s0 = n_out;
        stream(120, 3700, 1'b1);
      end
    join
    drain();
    n_hold = n_out - s0;

    // 4. Load the new set and stream with large samples (saturation).
    load_caches();
    s1 = int'(sat_events);
    stream(400, 16000, 1'b1);
    drain();

    check(n_bypass_only > 0,        "bypass-only samples seen");
    check(n_loads == 2,             "two cache loads");
    check(n_hold > 0,               "samples while the RAM was rewritten");
    check(n_back_to_back > 300,     "one sample per clock");
    check(n_bubbles > 0,            "bubbles in the input stream");
    check(relu_zeroed > 0,          "ReLU clipped a negative sum");
    check(relu_passed > 0,          "ReLU passed a positive sum");
    check(sat_events > s1,          "saturation happened");
    $display("mechanisms: bypass_only=%0d loads=%0d hold=%0d back_to_back=%0d bubbles=%0d relu_zeroed=%0d relu_passed=%0d saturations=%0d outputs=%0d",
             n_bypass_only, n_loads, n_hold, n_back_to_back, n_bubbles, relu_zeroed,
             relu_passed, sat_events, n_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
