// tb_dpd_run -- test harness for one predistorter configuration (N, K).
//
// Holds an nn_dpd_top of the given size, fills its RAM with random
// parameters, loads the caches (checking the load takes num_params+2 clocks),
// streams `SAMPLES` random samples one per clock and compares every output
// with the integer model of tb_ref_pkg, including the latency
// LAT = 6 + (K-1)*(4+ceil(log2(N+1))) + 3 + ceil(log2(N+1)) + 1.
// Reports its check and failure counts through ports and raises `finished`.
module tb_dpd_run
  import tb_ref_pkg::*;
#(
  parameter int N       = 6,
  parameter int K       = 1,
  parameter int SAMPLES = 300
) (
  input  logic clk,
  output int   checks,
  output int   failures,
  output logic finished
);

  localparam int D   = $clog2(N + 1);
  localparam int NP  = 3 * N + (K - 1) * N * (N + 1) + 2 * (N + 1);
  localparam int LAT = 6 + (K - 1) * (4 + D) + 3 + D + 1;

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

  nn_dpd_top #(.N(N), .K(K)) dut (.*);

  int cyc = 0;
  always @(posedge clk) cyc++;

  int p[$];
  int exp_r[$], exp_i[$], exp_t[$];

  initial begin
    checks = 0;
    failures = 0;
    finished = 1'b0;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL (N=%0d K=%0d) @%0d: %s", N, K, cyc, what);
    end
  endtask

  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      if (exp_r.size() == 0) check(1'b0, "unexpected output");
      else begin
        check(y_re == 16'(exp_r[0]) && y_im == 16'(exp_i[0]),
              $sformatf("y=(%0d,%0d) expected (%0d,%0d)", y_re, y_im, exp_r[0], exp_i[0]));
        check(cyc - exp_t[0] == LAT, $sformatf("latency %0d expected %0d", cyc - exp_t[0], LAT));
        void'(exp_r.pop_front()); void'(exp_i.pop_front()); void'(exp_t.pop_front());
      end
    end
  end

  initial begin
    int t0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // hidden weights kept small for deep networks so sums stay in range
    for (int a = 0; a < NP; a++) begin
      p.push_back(rnd(K > 1 ? 3000 : 6000));
      @(negedge clk);
      ram_we = 1'b1; ram_waddr = 8'(a); ram_wdata = 16'(p[a]);
    end
    @(negedge clk); ram_we = 1'b0; load_start = 1'b1; t0 = cyc;
    @(negedge clk); load_start = 1'b0;
    while (!load_done) @(negedge clk);
    check(cyc - t0 == NP + 2, $sformatf("load took %0d clocks", cyc - t0));
    for (int s = 0; s < SAMPLES; s++) begin
      int xr, xi, yr, yi;
      @(negedge clk);
      xr = rnd(3700); xi = rnd(3700);
      in_valid = 1'b1; x_re = 16'(xr); x_im = 16'(xi);
      network(p, N, K, xr, xi, yr, yi);
      exp_r.push_back(yr); exp_i.push_back(yi); exp_t.push_back(cyc);
    end
    @(negedge clk); in_valid = 1'b0;
    repeat (LAT + 3) @(negedge clk);
    check(exp_r.size() == 0, "all outputs seen");
    $display("N=%0d K=%0d: %0d parameters, latency %0d clocks, %0d samples", N, K, NP, LAT, SAMPLES);
    finished = 1'b1;
  end

endmodule
