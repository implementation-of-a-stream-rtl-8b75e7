// nist_workload_tb: the published statistical-test run on the keystream.
//
// The published evaluation took a 4,000,000-bit keystream with
// mu1 = 0.75, mu2 = 0.8 and initial values 1.2885e9 and 8.5899e8. In this
// design's formats these are mu1 = 8'hC0 (exactly 0.75), mu2 = 8'hCC
// (0.796875, the nearest 8-bit fraction below 0.8), seed1 = 32'h4CCCCCCD
// (1288490189) and seed2 = 32'h33333333 (858993459). The testbench runs
// the top for 500,000 clocks, checks every keystream byte against the
// reference model and computes, on the fly, four of the NIST SP 800-22
// statistics: frequency (monobit), block frequency (M = 128), runs and
// cumulative sums forward and reverse. Each P-value must reach 0.01, the
// suite's own pass level. erfc uses the Abramowitz-Stegun 7.1.26
// approximation (error below 1.5e-7) and the block-frequency chi-square
// tail uses the Wilson-Hilferty normal approximation, which is accurate at
// 31,250 degrees of freedom. The spectral (FFT) test is not computed.
// The bit sum and run count are also compared with values from an
// independent software model of the same keystream.
module nist_workload_tb;
  import bernoulli_ref_pkg::*;
  localparam int NBYTES = 500000;
  localparam int NBITS  = 8 * NBYTES;
  localparam int M      = 128;

  logic        clk = 1'b0, rst_n = 1'b0, en = 1'b0, close = 1'b0;
  logic [31:0] x1, x2;
  logic [7:0]  ks;
  logic        closed;
  int checks = 0, failures = 0;
  int cycle = 0;

  bernoulli_stream_cipher dut (
    .clk_i(clk), .rst_ni(rst_n), .en_i(en), .close_i(close),
    .seed1_i(32'h4CCCCCCD), .mu1_i(8'hC0), .seed2_i(32'h33333333), .mu2_i(8'hCC),
    .ks_o(ks), .x1_o(x1), .x2_o(x2), .closed_o(closed));

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin
    wait (cycle == NBYTES + 1000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real erfc_abs(input real x);
    real t, y;
    t = 1.0 / (1.0 + 0.3275911 * x);
    y = t * (0.254829592 + t * (-0.284496736 + t * (1.421413741
        + t * (-1.453152027 + t * 1.061405429))));
    return y * $exp(-x * x);
  endfunction

  function automatic real erfc(input real x);
    return (x >= 0.0) ? erfc_abs(x) : 2.0 - erfc_abs(-x);
  endfunction

  function automatic real phi(input real x);   // standard normal CDF
    return 0.5 * erfc(-x / $sqrt(2.0));
  endfunction

  function automatic real cusum_p(input real z, input real n);
    real s1, s2;
    int k0, k1;
    s1 = 0.0; s2 = 0.0;
    k0 = int'($floor((-n / z + 1.0) / 4.0)); k1 = int'($floor((n / z - 1.0) / 4.0));
    for (int k = k0; k <= k1; k++)
      s1 += phi((4.0*k + 1.0) * z / $sqrt(n)) - phi((4.0*k - 1.0) * z / $sqrt(n));
    k0 = int'($floor((-n / z - 3.0) / 4.0));
    for (int k = k0; k <= k1; k++)
      s2 += phi((4.0*k + 3.0) * z / $sqrt(n)) - phi((4.0*k + 1.0) * z / $sqrt(n));
    return 1.0 - s1 + s2;
  endfunction

  task automatic pcheck(input string name, input real p);
    checks++;
    $display("%-28s P-value %f", name, p);
    if (!(p >= 0.01)) begin
      failures++;
      $display("%s fails the 0.01 level", name);
    end
  endtask

  initial begin
    logic [31:0] m1, m2;
    longint ones, s, smax, smin, runs, blk, chi_num;
    int nbit;
    logic prev;
    real n, pi_, vobs, chi, wh, p_freq, p_runs, p_blk, p_fwd, p_rev;

    ones = 0; s = 0; smax = 0; smin = 0; runs = 0; blk = 0; chi_num = 0;
    nbit = 0; prev = 1'b0;
    m1 = 32'h4CCCCCCD; m2 = 32'h33333333;
    @(negedge clk) rst_n = 1'b1;
    en = 1'b1; close = 1'b1;
    for (int i = 0; i < NBYTES; i++) begin
      @(negedge clk);
      m1 = ref_step(m1, 8'hC0);
      m2 = ref_step(m2, 8'hCC);
      checks++;
      if (ks !== ref_ks(m1, m2)) begin
        failures++;
        if (failures < 10) $display("byte %0d: %h expected %h", i, ks, ref_ks(m1, m2));
      end
      for (int b = 7; b >= 0; b--) begin
        logic bit_v;
        bit_v = ks[b];
        ones += longint'(bit_v);
        s += bit_v ? 1 : -1;
        if (s > smax) smax = s;
        if (s < smin) smin = s;
        if (nbit == 0 || bit_v != prev) runs++;
        prev = bit_v;
        blk += longint'(bit_v);
        nbit++;
        if (nbit % M == 0) begin
          chi_num += (2 * blk - M) * (2 * blk - M);   // (4M)(pi-1/2)^2 * M
          blk = 0;
        end
      end
    end
    en = 1'b0;

    n = real'(NBITS);
    $display("bits=%0d ones=%0d S=%0d runs=%0d max|S|=%0d", nbit, ones, s, runs,
             (smax > -smin) ? smax : -smin);
    checks++;
    if (nbit != NBITS || s != -80 || runs != 1999552) begin
      failures++;
      $display("bit sum or run count differs from the software model (S=-80, runs=1999552)");
    end

    // Frequency (monobit).
    p_freq = erfc((s < 0 ? -real'(s) : real'(s)) / $sqrt(n) / $sqrt(2.0));
    pcheck("Frequency", p_freq);
    // Block frequency, M = 128: chi = 4M sum (pi_i - 1/2)^2 = sum (2k-M)^2 / M.
    chi = real'(chi_num) / real'(M);
    begin
      real dof;
      dof = real'(NBITS / M);
      wh = ($pow(chi / dof, 1.0/3.0) - (1.0 - 2.0 / (9.0 * dof))) / $sqrt(2.0 / (9.0 * dof));
      p_blk = 0.5 * erfc(wh / $sqrt(2.0));
    end
    pcheck("Block frequency (M=128)", p_blk);
    // Runs.
    pi_  = real'(ones) / n;
    vobs = real'(runs);
    p_runs = erfc((vobs - 2.0*n*pi_*(1.0-pi_) < 0 ? -(vobs - 2.0*n*pi_*(1.0-pi_))
                                                  :  (vobs - 2.0*n*pi_*(1.0-pi_)))
                  / (2.0 * $sqrt(2.0 * n) * pi_ * (1.0 - pi_)));
    pcheck("Runs", p_runs);
    // Cumulative sums: forward uses max |S_k|; reverse uses max |S_n - S_k|.
    p_fwd = cusum_p(real'((smax > -smin) ? smax : -smin), n);
    pcheck("Cumulative sums (forward)", p_fwd);
    p_rev = cusum_p(real'(((smax - s) > (s - smin)) ? (smax - s) : (s - smin)), n);
    pcheck("Cumulative sums (reverse)", p_rev);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
