// tb_xor_rng -- self-checking testbench for xor_rng.
//
// Two generators: the default XOR(L(128,s1), L(129,s2)) and the alternative
// XOR(L(127,s1), L(131,s2)). Over 4000 steps, with step randomly held low,
// each output bit must equal the XOR of the two reference-model registers.
// The stream must also differ from either register alone and be roughly
// balanced (ones within 1800..2200 of 4000 bits, about 6 sigma).
module tb_xor_rng;
  import tb_ref_pkg::*;

  logic clk = 1'b0;
  logic rst;
  logic step;
  logic b_main, b_alt;
  int   checks = 0, failures = 0;

  always #5 clk = ~clk;

  localparam vec_t S1 = vec_t'(256'h243F6A88_85A308D3_13198A2E_03707344_A4093822_299F31D0_082EFA98_EC4E6C89);
  localparam vec_t S2 = vec_t'(256'hB7E15162_8AED2A6A_BF715880_9CF4F3C7_62E7160F_38B4DA56_A784D904_5190CFE6);

  xor_rng dut_main (.clk, .rst, .step, .rnd_bit(b_main));
  xor_rng #(.D1(127), .D2(131)) dut_alt (.clk, .rst, .step, .rnd_bit(b_alt));

  vec_t a1, a2, c1, c2;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ones_main = 0, ones_alt = 0, n = 0;
    int diff_a = 0, diff_b = 0;
    rst = 1'b1; step = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst = 1'b0;
    a1 = ref_seed(S1, 128); a2 = ref_seed(S2, 129);
    c1 = ref_seed(S1, 127); c2 = ref_seed(S2, 131);
    while (n < 4000) begin
      check(b_main == (ref_out(a1, 128) ^ ref_out(a2, 129)), "128/129 stream");
      check(b_alt  == (ref_out(c1, 127) ^ ref_out(c2, 131)), "127/131 stream");
      step = ($urandom_range(0, 4) != 0);
      @(posedge clk);
      #1;
      if (step) begin
        ones_main += int'(b_main);
        ones_alt  += int'(b_alt);
        a1 = ref_step(a1, 128); a2 = ref_step(a2, 129);
        c1 = ref_step(c1, 127); c2 = ref_step(c2, 131);
        if (b_main != ref_out(a1, 128)) diff_a++;
        if (b_main != ref_out(a2, 129)) diff_b++;
        n++;
      end
    end
    check(ones_main > 1800 && ones_main < 2200, "128/129 balance");
    check(ones_alt  > 1800 && ones_alt  < 2200, "127/131 balance");
    check(diff_a > 1000 && diff_b > 1000, "stream differs from each register");
    $display("ones 128/129 = %0d, ones 127/131 = %0d of %0d", ones_main, ones_alt, n);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
