// tb_nn_dpd_workloads -- runs the network sizes evaluated for the
// predistorter through the RTL: the two FPGA design points (N = 6 and
// N = 14 with one hidden layer), the largest one-layer network of the
// sweep (N = 31), and the largest two-layer network (N = 8, K = 2). Each
// configuration is checked sample by sample against the integer model.
module tb_nn_dpd_workloads;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int c[4], f[4];
  logic done[4];

  tb_dpd_run #(.N(6),  .K(1)) run_n6  (.clk, .checks(c[0]), .failures(f[0]), .finished(done[0]));
  tb_dpd_run #(.N(14), .K(1)) run_n14 (.clk, .checks(c[1]), .failures(f[1]), .finished(done[1]));
  tb_dpd_run #(.N(31), .K(1)) run_n31 (.clk, .checks(c[2]), .failures(f[2]), .finished(done[2]));
  tb_dpd_run #(.N(8),  .K(2)) run_k2  (.clk, .checks(c[3]), .failures(f[3]), .finished(done[3]));

  function automatic int total(int v[4]);
    return v[0] + v[1] + v[2] + v[3];
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", total(c), total(f) + 1);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    wait (done[0] && done[1] && done[2] && done[3]);
    $display("TB_RESULT checks=%0d failures=%0d", total(c), total(f));
    $finish;
  end

endmodule
