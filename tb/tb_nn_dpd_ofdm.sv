// tb_nn_dpd_ofdm -- streams an LTE-like OFDM signal through the default
// predistorter (N = 14, K = 1) and checks every output sample.
//
// The signal is built here: 10 OFDM symbols, each with random QPSK data on
// 600 subcarriers (+-1 .. +-300 around an empty DC bin) of a 1024-point
// inverse DFT at 15 kHz spacing (15.36 MS/s, the usual rate of a 10 MHz LTE
// carrier), each preceded by a 72-sample cyclic prefix. It is scaled to an
// RMS of 0.25 (1024 LSB in Q4.12), which leaves the high peaks typical of
// OFDM well inside the number range. All 10960 samples stream back to back,
// one per clock, through random weights; each output is compared with the
// integer model and checked for the 14-clock latency. The peak-to-average
// power ratio of the generated signal is reported and must exceed 8 dB.
module tb_nn_dpd_ofdm;
  import tb_ref_pkg::*;

  localparam int N       = 14;
  localparam int K       = 1;
  localparam int NP      = 5 * N + 2;
  localparam int LAT     = 14;
  localparam int NFFT    = 1024;
  localparam int NCP     = 72;
  localparam int NSC     = 300;      // subcarriers each side of DC
  localparam int NSYM    = 10;
  localparam real PI     = 3.14159265358979323846;

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

  int checks = 0, failures = 0, cyc = 0, n_out = 0;
  always @(posedge clk) cyc++;

  int p[$];
  int sig_r[$], sig_i[$];
  int exp_r[$], exp_i[$], exp_t[$];

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0d: %s", cyc, what); end
  endtask

  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      if (exp_r.size() == 0) check(1'b0, "unexpected output");
      else begin
        check(y_re == 16'(exp_r[0]) && y_im == 16'(exp_i[0]),
              $sformatf("y=(%0d,%0d) expected (%0d,%0d)", y_re, y_im, exp_r[0], exp_i[0]));
        check(cyc - exp_t[0] == LAT, $sformatf("latency %0d", cyc - exp_t[0]));
        void'(exp_r.pop_front()); void'(exp_i.pop_front()); void'(exp_t.pop_front());
        n_out++;
      end
    end
  end

  // Build the OFDM waveform in Q4.12.
  task automatic make_signal(output real papr_db);
    real amp, pk, pw;
    real sr [NSC*2];
    real si [NSC*2];
    int  kk [NSC*2];
    int  r, i;
    amp = 0.25 / $sqrt(2.0 * NSC);
    pk = 0.0; pw = 0.0;
    for (int s = 0; s < NSYM; s++) begin
      int sym_r[$], sym_i[$];
      for (int c = 0; c < 2 * NSC; c++) begin
        kk[c] = (c < NSC) ? c - NSC : c - NSC + 1;      // -300..-1, 1..300
        sr[c] = ($urandom_range(1) != 0) ? amp : -amp;   // QPSK, unit power scaled
        si[c] = ($urandom_range(1) != 0) ? amp : -amp;
      end
      for (int n = 0; n < NFFT; n++) begin
        real xr, xi, ph;
        xr = 0.0; xi = 0.0;
        for (int c = 0; c < 2 * NSC; c++) begin
          ph = 2.0 * PI * real'(kk[c] * n % NFFT) / real'(NFFT);
          xr += sr[c] * $cos(ph) - si[c] * $sin(ph);
          xi += sr[c] * $sin(ph) + si[c] * $cos(ph);
        end
        r = int'($floor(xr * 4096.0 + 0.5));
        i = int'($floor(xi * 4096.0 + 0.5));
        sym_r.push_back(r); sym_i.push_back(i);
      end
      for (int n = NFFT - NCP; n < NFFT; n++) begin
        sig_r.push_back(sym_r[n]); sig_i.push_back(sym_i[n]);
      end
      for (int n = 0; n < NFFT; n++) begin
        sig_r.push_back(sym_r[n]); sig_i.push_back(sym_i[n]);
      end
    end
    foreach (sig_r[n]) begin
      real e;
      e = real'(sig_r[n]) * real'(sig_r[n]) + real'(sig_i[n]) * real'(sig_i[n]);
      pw += e;
      if (e > pk) pk = e;
    end
    pw = pw / real'(sig_r.size());
    papr_db = 10.0 * $log10(pk / pw);
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real papr;
    int t0, first_in, last_out;
    make_signal(papr);
    check(sig_r.size() == NSYM * (NFFT + NCP), "signal length");
    check(papr > 8.0, $sformatf("PAPR %0.1f dB", papr));
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int a = 0; a < NP; a++) begin
      p.push_back(rnd(6000));
      @(negedge clk); ram_we = 1'b1; ram_waddr = 8'(a); ram_wdata = 16'(p[a]);
    end
    @(negedge clk); ram_we = 1'b0; load_start = 1'b1; t0 = cyc;
    @(negedge clk); load_start = 1'b0;
    while (!load_done) @(negedge clk);
    check(cyc - t0 == NP + 2, "load time");
    first_in = cyc + 1;
    foreach (sig_r[n]) begin
      int yr, yi;
      @(negedge clk);
      in_valid = 1'b1; x_re = 16'(sig_r[n]); x_im = 16'(sig_i[n]);
      network(p, N, K, sig_r[n], sig_i[n], yr, yi);
      exp_r.push_back(yr); exp_i.push_back(yi); exp_t.push_back(cyc);
    end
    @(negedge clk); in_valid = 1'b0;
    while (exp_r.size() > 0 && cyc < first_in + sig_r.size() + 4 * LAT) @(negedge clk);
    last_out = cyc;
    check(exp_r.size() == 0, "all outputs seen");
    // sustained rate: all samples out within (samples + latency) clocks
    check(n_out == sig_r.size() && last_out - first_in <= sig_r.size() + LAT,
          $sformatf("%0d samples in %0d clocks", n_out, last_out - first_in));
    $display("OFDM: %0d symbols, %0d samples, PAPR %0.1f dB, %0d outputs checked",
             NSYM, sig_r.size(), papr, n_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
