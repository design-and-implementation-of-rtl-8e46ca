// tb_weight_ram -- checks the weight RAM: host writes to every address,
// synchronous read one clock later, writes and reads beyond DEPTH ignored
// (read as zero), and a read of an address written in the same clock
// returning the old word.
module tb_weight_ram;
  import tb_ref_pkg::*;

  localparam int DEPTH = 72;

  logic        clk = 1'b0;
  logic        we = 1'b0;
  logic [7:0]  waddr = '0, raddr = '0;
  logic signed [15:0] wdata = '0, rdata;

  weight_ram dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int model[DEPTH];

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic signed [15:0] nv;
    // fill every address
    for (int a = 0; a < DEPTH; a++) begin
      model[a] = rnd(32000);
      @(negedge clk); we = 1'b1; waddr = 8'(a); wdata = 16'(model[a]);
    end
    // out-of-range writes must not land anywhere
    for (int a = DEPTH; a < 256; a += 37) begin
      @(negedge clk); we = 1'b1; waddr = 8'(a); wdata = 16'h7abc;
    end
    @(negedge clk); we = 1'b0;
    // read back in random order, one clock latency
    for (int r = 0; r < 200; r++) begin
      int a;
      a = $urandom_range(DEPTH - 1);
      @(negedge clk); raddr = 8'(a);
      @(negedge clk);
      check(rdata == 16'(model[a]), $sformatf("mem[%0d]=%0d expected %0d", a, rdata, model[a]));
    end
    // out-of-range reads give zero
    for (int a = DEPTH; a < 256; a += 23) begin
      @(negedge clk); raddr = 8'(a);
      @(negedge clk);
      check(rdata == 0, $sformatf("read of %0d gave %0d", a, rdata));
    end
    // read-during-write to the same address returns the old word
    nv = 16'(model[5]) ^ 16'h00ff;
    @(negedge clk); raddr = 8'd5; we = 1'b1; waddr = 8'd5; wdata = nv;
    @(negedge clk); we = 1'b0;
    check(rdata == 16'(model[5]), "read during write returns old word");
    model[5] = int'(nv);
    @(negedge clk);
    check(rdata == 16'(model[5]), "new word visible on the next read");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
