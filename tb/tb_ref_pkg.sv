// tb_ref_pkg -- bit-exact reference arithmetic for the predistorter
// testbenches, written with plain integers independently of the RTL.
//
// Number format: 16-bit two's complement, 12 fractional bits. A product is
// floor(a*b / 4096) clamped to [-32768, 32767]; an addition is clamped the
// same way. Neuron sums are formed as a balanced pairwise tree over the
// operand list (bias, product of the last input, ..., product of input 0),
// neighbours paired left to right and an odd last element carried up.
package tb_ref_pkg;

  int unsigned sat_events = 0;    // how many clamps the model has applied
  int unsigned relu_zeroed = 0;   // how many negative hidden sums the ReLU cut
  int unsigned relu_passed = 0;   // how many positive hidden sums passed

  function automatic int sat16(longint v);
    if (v > 32767)  begin sat_events++; return 32767;  end
    if (v < -32768) begin sat_events++; return -32768; end
    return int'(v);
  endfunction

  function automatic int radd(int a, int b);
    return sat16(longint'(a) + longint'(b));
  endfunction

  function automatic int rmul(int a, int b);
    longint p;
    p = longint'(a) * longint'(b);
    return sat16(p >>> 12);
  endfunction

  function automatic int tree_sum(int ops[$]);
    int nxt[$];
    while (ops.size() > 1) begin
      nxt = {};
      for (int k = 0; k < ops.size(); k += 2) begin
        if (k + 1 < ops.size()) nxt.push_back(radd(ops[k], ops[k+1]));
        else                    nxt.push_back(ops[k]);
      end
      ops = nxt;
    end
    return ops[0];
  endfunction

  // One neuron: weights w[0..n-1], bias b, inputs x[0..n-1].
  function automatic int neuron(int w[$], int b, int x[$], bit relu);
    int ops[$];
    int s;
    ops.push_back(b);
    for (int i = x.size() - 1; i >= 0; i--) ops.push_back(rmul(x[i], w[i]));
    s = tree_sum(ops);
    if (relu) begin
      if (s < 0) begin relu_zeroed++; return 0; end
      relu_passed++;
    end
    return s;
  endfunction

  // Whole network, parameters p[] in the documented RAM order.
  function automatic void network(int p[$], int n, int k, int xr, int xi,
                                  output int yr, output int yi);
    int h[$], hn[$], w[$], x2[$], z[2];
    int a;
    x2 = '{xr, xi};
    a = 0;
    for (int i = 0; i < n; i++) begin
      w = '{p[a], p[a+1]};
      h.push_back(neuron(w, p[a+2], x2, 1'b1));
      a += 3;
    end
    for (int l = 2; l <= k; l++) begin
      hn = {};
      for (int i = 0; i < n; i++) begin
        w = {};
        for (int m = 0; m < n; m++) w.push_back(p[a+m]);
        hn.push_back(neuron(w, p[a+n], h, 1'b1));
        a += n + 1;
      end
      h = hn;
    end
    for (int j = 0; j < 2; j++) begin
      w = {};
      for (int m = 0; m < n; m++) w.push_back(p[a+m]);
      z[j] = neuron(w, p[a+n], h, 1'b0);
      a += n + 1;
    end
    yr = radd(z[0], xr);
    yi = radd(z[1], xi);
  endfunction

  // Uniform random integer in [-mag, mag].
  function automatic int rnd(int mag);
    return int'($urandom_range(2 * mag)) - mag;
  endfunction

endpackage
