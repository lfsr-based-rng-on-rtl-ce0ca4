// tb_lfsr -- self-checking testbench for lfsr.
//
// Checks, against the bit-serial reference model of tb_ref_pkg:
//  * the 128-bit default register (and 127, 129, 131-bit ones) follow the
//    model bit for bit over 3000 steps, with step randomly held low;
//  * step low holds the register; reset reloads the seed;
//  * an 8-bit register has period exactly 255 and visits 255 distinct
//    states, none of them the all-ones lock-up state.
module tb_lfsr;
  import tb_ref_pkg::*;

  logic clk = 1'b0;
  logic rst;
  logic step;
  int   checks = 0, failures = 0;

  always #5 clk = ~clk;

  localparam vec_t S = vec_t'(256'h243F6A88_85A308D3_13198A2E_03707344_A4093822_299F31D0_082EFA98_EC4E6C89);

  logic [127:0] st128; logic o128;
  logic [126:0] st127; logic o127;
  logic [128:0] st129; logic o129;
  logic [130:0] st131; logic o131;
  logic [7:0]   st8;   logic o8;

  lfsr #(.SEED(S)) dut128 (.clk, .rst, .step, .state(st128), .out_bit(o128));
  lfsr #(.WIDTH(127), .TAPS(rng_pkg::tap_mask(127)), .SEED(S)) dut127 (.clk, .rst, .step, .state(st127), .out_bit(o127));
  lfsr #(.WIDTH(129), .TAPS(rng_pkg::tap_mask(129)), .SEED(S)) dut129 (.clk, .rst, .step, .state(st129), .out_bit(o129));
  lfsr #(.WIDTH(131), .TAPS(rng_pkg::tap_mask(131)), .SEED(S)) dut131 (.clk, .rst, .step, .state(st131), .out_bit(o131));
  lfsr #(.WIDTH(8),   .TAPS(rng_pkg::tap_mask(8)),   .SEED(S)) dut8   (.clk, .rst, .step, .state(st8),   .out_bit(o8));

  vec_t m128, m127, m129, m131, m8;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic compare_all(string tag);
    check(vec_t'(st128) == m128 && o128 == ref_out(m128, 128), {tag, " 128"});
    check(vec_t'(st127) == m127 && o127 == ref_out(m127, 127), {tag, " 127"});
    check(vec_t'(st129) == m129 && o129 == ref_out(m129, 129), {tag, " 129"});
    check(vec_t'(st131) == m131 && o131 == ref_out(m131, 131), {tag, " 131"});
    check(vec_t'(st8)   == m8   && o8   == ref_out(m8, 8),     {tag, " 8"});
  endtask

  task automatic reset_models();
    m128 = ref_seed(S, 128); m127 = ref_seed(S, 127); m129 = ref_seed(S, 129);
    m131 = ref_seed(S, 131); m8 = ref_seed(S, 8);
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit seen [256];
    int period;
    logic [7:0] start8;
    rst = 1'b1; step = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst = 1'b0;
    reset_models();
    compare_all("after reset");

    // Random stepping against the model.
    for (int i = 0; i < 3000; i++) begin
      step = ($urandom_range(0, 3) != 0);
      @(posedge clk);
      if (step) begin
        m128 = ref_step(m128, 128); m127 = ref_step(m127, 127);
        m129 = ref_step(m129, 129); m131 = ref_step(m131, 131);
        m8 = ref_step(m8, 8);
      end
      #1 compare_all("step");
    end

    // Reset reloads the seed.
    step = 1'b1; rst = 1'b1;
    @(posedge clk);
    #1 rst = 1'b0; reset_models();
    compare_all("reload");

    // Period of the 8-bit register.
    start8 = st8; period = 0;
    foreach (seen[i]) seen[i] = 1'b0;
    step = 1'b1;
    do begin
      check(!seen[st8] && st8 != 8'hFF, "8-bit distinct states");
      seen[st8] = 1'b1;
      @(posedge clk); #1;
      period++;
    end while (st8 != start8 && period < 300);
    check(period == 255, "8-bit period 255");
    $display("8-bit period = %0d", period);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
