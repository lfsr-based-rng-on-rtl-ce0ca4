// tb_lct_workload -- randomness workload: which generator variants survive
// the linear-complexity test.
//
// Ten generator variants are built from the RTL (one lfsr and nine xor_rng
// instances) and stepped every clock for NBITS = 1,000,000 bits each, the
// length of one NIST SP 800-22 test sequence. For each stream the testbench
// computes three of the NIST tests at significance 0.01:
//   * frequency (monobit):  pass if |S_n| / sqrt(n) <= 2.5758
//   * runs:                 pass if |V - 2n p(1-p)| / (2 sqrt(2n) p(1-p)) <= 1.8214
//   * linear complexity:    blocks of M = 500 bits, Berlekamp-Massey on each,
//                           T = L - 250 binned into 7 classes, chi-square with
//                           6 degrees of freedom; pass if chi2 <= 16.812
// and compares the verdicts with the published results for those variants:
// all ten pass the first two; only XOR(L(128),L(129)) and XOR(L(127),L(131))
// pass the linear-complexity test. The XOR of two maximal-length registers
// of lengths d1 != d2 has linear complexity d1 + d2 and that of two with the
// same length has d. A single XNOR register has d + 1: its output is the
// complement of a maximal-length sequence, and the constant adds one to the
// complexity (in an XOR of two registers the two constants cancel). When that
// number is below M/2 = 250 every block's Berlekamp-Massey result must equal
// it exactly, which is checked too.
module tb_lct_workload;

  localparam int NCFG  = 10;
  localparam int NBITS = 1_000_000;
  localparam int M     = 500;
  localparam int NBLK  = NBITS / M;

  // variant: d1, d2 (d2 = 0: single register), published LCT verdict
  localparam int  D1  [NCFG] = '{128, 128, 24, 32, 64, 128, 7,  11, 113, 127};
  localparam int  D2  [NCFG] = '{0,   128, 25, 33, 65, 129, 11, 13, 127, 131};
  localparam bit  LCT [NCFG] = '{0,   0,   0,  0,  0,  1,   0,  0,  0,   1};

  logic clk = 1'b0;
  logic rst;
  logic [NCFG-1:0] rb;
  int   checks = 0, failures = 0;

  always #5 clk = ~clk;

  for (genvar g = 0; g < NCFG; g++) begin : g_gen
    if (D2[g] == 0) begin : g_single
      logic [D1[g]-1:0] st;
      lfsr #(.WIDTH(D1[g]), .TAPS(rng_pkg::tap_mask(D1[g]))) dut (
        .clk, .rst, .step(1'b1), .state(st), .out_bit(rb[g]));
    end else begin : g_xor
      xor_rng #(.D1(D1[g]), .D2(D2[g])) dut (.clk, .rst, .step(1'b1), .rnd_bit(rb[g]));
    end
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // Per-variant state of the tests.
  typedef logic [M:0] poly_t;
  poly_t  c [NCFG], b [NCFG], hist [NCFG];
  int     lc [NCFG], mpos [NCFG];
  int     ones [NCFG], trans [NCFG];
  logic   last [NCFG];
  int     lc_hist [NCFG][7];
  int     exact_miss [NCFG];

  initial begin : watchdog
    repeat (NBITS + 1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real pi_k [7];
    pi_k = '{0.010417, 0.03125, 0.125, 0.5, 0.25, 0.0625, 0.020833};
    for (int k = 0; k < NCFG; k++) begin
      ones[k] = 0; trans[k] = 0; exact_miss[k] = 0;
      for (int j = 0; j < 7; j++) lc_hist[k][j] = 0;
    end
    rst = 1'b1;
    repeat (2) @(posedge clk);
    #1 rst = 1'b0;
    for (int n = 0; n < NBITS; n++) begin
      int pos;
      pos = n % M;
      for (int k = 0; k < NCFG; k++) begin
        logic s, d;
        // frequency and runs
        s = rb[k];
        ones[k] += int'(s);
        if (n > 0 && s != last[k]) trans[k]++;
        last[k] = s;
        // Berlekamp-Massey over the current block; hist[i] = bit pos-i
        if (pos == 0) begin
          c[k] = poly_t'(1); b[k] = poly_t'(1); hist[k] = '0;
          lc[k] = 0; mpos[k] = -1;
        end
        d = s ^ (^(c[k] & hist[k]));
        if (d) begin
          poly_t t;
          t = c[k];
          c[k] = c[k] ^ (b[k] << (pos - mpos[k]));
          if (2 * lc[k] <= pos) begin
            lc[k] = pos + 1 - lc[k];
            mpos[k] = pos;
            b[k] = t;
          end
        end
        hist[k] = (hist[k] << 1) | (poly_t'(s) << 1);
        if (pos == M - 1) begin
          int t_stat, bin, expect_lc;
          t_stat = lc[k] - 250;   // (-1)^M (L - mu) + 2/9 for M = 500
          bin = (t_stat <= -3) ? 0 : (t_stat >= 3) ? 6 : t_stat + 3;
          lc_hist[k][bin]++;
          expect_lc = (D2[k] == 0) ? D1[k] + 1 : (D2[k] == D1[k]) ? D1[k] : D1[k] + D2[k];
          if (expect_lc < M / 2 && lc[k] != expect_lc) begin
            exact_miss[k]++;
            if (exact_miss[k] < 4) $display("block %0d of variant %0d: L = %0d", n / M, k, lc[k]);
          end
        end
      end
      @(posedge clk);
      #1;
    end

    for (int k = 0; k < NCFG; k++) begin
      real sn, freq_stat, p, runs_stat, chi2;
      bit  freq_ok, runs_ok, lct_ok;
      int  expect_lc;
      string name;
      name = (D2[k] == 0) ? $sformatf("L(%0d)", D1[k]) : $sformatf("XOR(L(%0d),L(%0d))", D1[k], D2[k]);
      sn = 2.0 * ones[k] - NBITS;
      freq_stat = (sn < 0 ? -sn : sn) / $sqrt(real'(NBITS));
      freq_ok = freq_stat <= 2.5758;
      p = real'(ones[k]) / NBITS;
      runs_stat = (real'(trans[k] + 1) - 2.0 * NBITS * p * (1.0 - p));
      if (runs_stat < 0) runs_stat = -runs_stat;
      runs_stat = runs_stat / (2.0 * $sqrt(2.0 * NBITS) * p * (1.0 - p));
      runs_ok = runs_stat <= 1.8214;
      chi2 = 0.0;
      for (int j = 0; j < 7; j++)
        chi2 += (lc_hist[k][j] - NBLK * pi_k[j]) ** 2 / (NBLK * pi_k[j]);
      lct_ok = chi2 <= 16.812;
      $display("%-20s ones=%0d freq=%6.3f runs=%6.3f  LCT chi2=%10.2f lc_hist=%0d/%0d/%0d/%0d/%0d/%0d/%0d  -> freq %s runs %s LCT %s",
               name, ones[k], freq_stat, runs_stat, chi2,
               lc_hist[k][0], lc_hist[k][1], lc_hist[k][2], lc_hist[k][3], lc_hist[k][4], lc_hist[k][5], lc_hist[k][6],
               freq_ok ? "pass" : "FAIL", runs_ok ? "pass" : "FAIL", lct_ok ? "pass" : "FAIL");
      check(freq_ok, {name, " frequency test"});
      check(runs_ok, {name, " runs test"});
      check(lct_ok == LCT[k], {name, " LCT verdict as published"});
      expect_lc = (D2[k] == 0) ? D1[k] + 1 : (D2[k] == D1[k]) ? D1[k] : D1[k] + D2[k];
      if (expect_lc < M / 2) check(exact_miss[k] == 0, {name, " block linear complexity as predicted"});
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
