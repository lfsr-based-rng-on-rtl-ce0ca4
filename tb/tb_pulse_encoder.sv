// tb_pulse_encoder -- self-checking testbench for pulse_encoder.
//
// Random clock-pulse and bit inputs; one clock later clk_pin must equal the
// clock pulse and rng_pin must be high only when both the clock pulse and
// the bit were high. Reset must clear both pins.
module tb_pulse_encoder;

  logic clk = 1'b0;
  logic rst, clk_pulse, rnd_bit, clk_pin, rng_pin;
  int   checks = 0, failures = 0;
  int   ones = 0, zeros = 0;

  always #5 clk = ~clk;

  pulse_encoder dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic p, b;
    rst = 1'b1; clk_pulse = 1'b1; rnd_bit = 1'b1;
    @(posedge clk); #1;
    check(clk_pin == 1'b0 && rng_pin == 1'b0, "reset clears pins");
    rst = 1'b0;
    repeat (2000) begin
      p = 1'($urandom); b = 1'($urandom);
      clk_pulse = p; rnd_bit = b;
      @(posedge clk); #1;
      check(clk_pin == p, "clock pin");
      check(rng_pin == (p && b), "random pin");
      if (p && b) ones++;
      if (p && !b) zeros++;
    end
    check(ones > 0 && zeros > 0, "both codes seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
