// tb_neuron_pe -- checks two neuron PEs against the integer model: a
// first-hidden-layer neuron (2 inputs, ReLU, 6-clock latency) and an
// output-layer neuron (14 inputs, no ReLU, 7-clock latency). Weights arrive
// over the broadcast bus, random input vectors stream in one per clock, and
// each output is compared with the model result for the vector presented
// LATENCY clocks earlier. ReLU clipping and saturation must both occur.
module tb_neuron_pe;
  import tb_ref_pkg::*;
  import dpd_pkg::*;

  localparam int NH = 2,  BASE_H = 9,  LAT_H = 6;
  localparam int NO = 14, BASE_O = 40, LAT_O = 7;

  logic  clk = 1'b0, rst_n = 1'b0;
  wbus_t wbus = '0;
  word_t xh [NH];
  word_t xo [NO];
  word_t yh, yo;

  neuron_pe #(.NUM_IN(NH), .RELU(1'b1), .BASE(BASE_H)) dut_h (.clk, .rst_n, .wbus, .x(xh), .y(yh));
  neuron_pe #(.NUM_IN(NO), .RELU(1'b0), .BASE(BASE_O)) dut_o (.clk, .rst_n, .wbus, .x(xo), .y(yo));

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc++;

  int wh[$], wo[$], bh, bo;
  int exp_h[$], exp_o[$], t_h[$], t_o[$];

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0d: %s", cyc, what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(int a, int d);
    @(negedge clk);
    wbus = '{valid: 1'b1, addr: 8'(a), data: 16'(d)};
  endtask

  task automatic load(int mag);
    wh = {}; wo = {};
    for (int k = 0; k < NH; k++) begin wh.push_back(rnd(mag)); send(BASE_H + k, wh[k]); end
    bh = rnd(mag); send(BASE_H + NH, bh);
    for (int k = 0; k < NO; k++) begin wo.push_back(rnd(mag)); send(BASE_O + k, wo[k]); end
    bo = rnd(mag); send(BASE_O + NO, bo);
    @(negedge clk); wbus = '0;
  endtask

  // compare outputs against the expectations whose time has come
  always @(negedge clk) begin
    if (t_h.size() > 0 && cyc - t_h[0] == LAT_H) begin
      void'(t_h.pop_front());
      check(yh == 16'(exp_h[0]), $sformatf("hidden y=%0d expected %0d", yh, exp_h[0]));
      void'(exp_h.pop_front());
    end
    if (t_o.size() > 0 && cyc - t_o[0] == LAT_O) begin
      void'(t_o.pop_front());
      check(yo == 16'(exp_o[0]), $sformatf("output y=%0d expected %0d", yo, exp_o[0]));
      void'(exp_o.pop_front());
    end
  end

  task automatic stream(int count, int mag);
    for (int s = 0; s < count; s++) begin
      int vh[$], vo[$];
      @(negedge clk);
      for (int k = 0; k < NH; k++) begin vh.push_back(rnd(mag)); xh[k] = 16'(vh[k]); end
      for (int k = 0; k < NO; k++) begin vo.push_back(rnd(mag)); xo[k] = 16'(vo[k]); end
      exp_h.push_back(neuron(wh, bh, vh, 1'b1)); t_h.push_back(cyc);
      exp_o.push_back(neuron(wo, bo, vo, 1'b0)); t_o.push_back(cyc);
    end
    repeat (LAT_O + 2) @(negedge clk);
  endtask

  initial begin
    int s0;
    for (int k = 0; k < NH; k++) xh[k] = '0;
    for (int k = 0; k < NO; k++) xo[k] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    load(8000);
    stream(300, 8000);
    s0 = int'(sat_events);
    load(30000);
    stream(300, 30000);
    check(sat_events > s0, "saturation happened");
    check(relu_zeroed > 0 && relu_passed > 0, "ReLU both clipped and passed");
    check(exp_h.size() == 0 && exp_o.size() == 0, "all outputs compared");
    $display("relu_zeroed=%0d relu_passed=%0d saturations=%0d", relu_zeroed, relu_passed, sat_events);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
