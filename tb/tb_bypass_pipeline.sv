// tb_bypass_pipeline -- checks that the linear bypass chain delays sample
// and valid flag by exactly DELAY (13) clocks, and that reset clears it.
module tb_bypass_pipeline;
  import tb_ref_pkg::*;

  localparam int DELAY = 13;

  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0, out_valid;
  logic signed [15:0] in_re = '0, in_im = '0, out_re, out_im;

  bypass_pipeline dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int hr[$], hi[$], hv[$];

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    check(!out_valid && out_re == 0 && out_im == 0, "cleared by reset");
    rst_n = 1'b1;
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      // history holds what was presented at each earlier clock
      if (t >= DELAY) begin
        check(out_re == 16'(hr[t-DELAY]) && out_im == 16'(hi[t-DELAY]) && out_valid == hv[t-DELAY][0],
              $sformatf("t=%0d out=(%0d,%0d,%0d)", t, out_re, out_im, out_valid));
      end
      hr.push_back(rnd(32000)); hi.push_back(rnd(32000)); hv.push_back($urandom_range(1));
      in_re = 16'(hr[t]); in_im = 16'(hi[t]); in_valid = hv[t][0];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
