// tb_bypass_adder -- checks the output adders: x_hat = z + x per component,
// clamped to 16 bits, registered one clock, valid flag carried along. Both
// positive and negative saturation must occur.
module tb_bypass_adder;
  import tb_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, byp_valid = 1'b0, out_valid;
  logic signed [15:0] nn_re = '0, nn_im = '0, byp_re = '0, byp_im = '0, y_re, y_im;

  bypass_adder dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, n_pos = 0, n_neg = 0;

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
    check(!out_valid && y_re == 0 && y_im == 0, "cleared by reset");
    rst_n = 1'b1;
    for (int t = 0; t < 1000; t++) begin
      int a, b, c, d, er, ei;
      bit v;
      a = rnd(32768 - 1); b = rnd(32768 - 1); c = rnd(32768 - 1); d = rnd(32768 - 1);
      if (t % 10 == 0) begin a = a / 64; b = b / 64; end
      v = 1'($urandom_range(1));
      @(negedge clk);
      nn_re = 16'(a); byp_re = 16'(b); nn_im = 16'(c); byp_im = 16'(d); byp_valid = v;
      er = a + b; ei = c + d;
      if (er > 32767 || ei > 32767) n_pos++;
      if (er < -32768 || ei < -32768) n_neg++;
      er = (er > 32767) ? 32767 : (er < -32768) ? -32768 : er;
      ei = (ei > 32767) ? 32767 : (ei < -32768) ? -32768 : ei;
      @(negedge clk);
      check(y_re == 16'(er) && y_im == 16'(ei) && out_valid == v,
            $sformatf("(%0d+%0d, %0d+%0d) gave (%0d,%0d)", a, b, c, d, y_re, y_im));
    end
    check(n_pos > 0 && n_neg > 0, "saturation in both directions");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
