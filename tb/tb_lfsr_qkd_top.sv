// tb_lfsr_qkd_top -- end-to-end testbench of lfsr_qkd_top at its defaults.
//
// The top runs with no parameter overrides: 100 MHz clock, 1 MHz bits,
// XOR(L(128,s1), L(129,s2)). A monitor plays the time tagger: at each rising
// edge of clk_pin it reads rng_pin as the slot's bit and compares it with an
// independent reference model of the two registers. It also checks that
// consecutive clock pulses are 100 cycles apart (1 MHz) and 50 cycles wide,
// that a random pulse never appears without a clock pulse, that at most one
// laser is on, and that in every even slot i >= 2 after reset exactly the
// laser addressed by {bit i-1, bit i-2} fires with the clock pulse.
//
// Mechanisms exercised and counted: '1' and '0' slots, each of the four
// lasers, slots without a laser, the enable switch turned off in mid-slot
// and back on (the stream must resume without a repeated or lost bit), and
// a reset in mid-run (the stream must restart from the seeds).
module tb_lfsr_qkd_top;
  import tb_ref_pkg::*;

  logic       clk = 1'b0;
  logic       rst, en_sw;
  logic       clk_pin, rng_pin;
  logic [3:0] laser;
  int         checks = 0, failures = 0;

  always #5 clk = ~clk;

  lfsr_qkd_top dut (.*);

  localparam vec_t S1 = vec_t'(256'h243F6A88_85A308D3_13198A2E_03707344_A4093822_299F31D0_082EFA98_EC4E6C89);
  localparam vec_t S2 = vec_t'(256'hB7E15162_8AED2A6A_BF715880_9CF4F3C7_62E7160F_38B4DA56_A784D904_5190CFE6);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // ---------------- monitor (time tagger model) ----------------
  vec_t       m1, m2;
  int         slot;              // slots since reset
  logic       bits [$];          // bits decoded since reset
  logic       prev_clk_pin;
  longint     cyc, last_rise;
  int         high_len;
  bit         paused_since_edge;
  int         n_one, n_zero, n_nolaser, n_rate;
  int         n_laser [4];

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst) begin
      m1 = ref_seed(S1, 128); m2 = ref_seed(S2, 129);
      slot = 0; bits.delete();
      prev_clk_pin = 1'b0; last_rise = -1; high_len = 0;
      paused_since_edge = 1'b0;
    end else begin
      // cycle-level rules
      if (rng_pin) check(clk_pin, "random pulse inside clock pulse");
      check($onehot0(laser), "one laser at a time");
      if (laser != '0) check(clk_pin, "laser only with clock pulse");
      if (clk_pin) high_len++;
      if (!clk_pin && prev_clk_pin) begin
        check(high_len == 50, "clock pulse 50 cycles wide");
        high_len = 0;
      end
      if (clk_pin && !prev_clk_pin) begin
        logic expb;
        // rate
        if (last_rise >= 0 && !paused_since_edge) begin
          check(cyc - last_rise == 100, "1 MHz bit slots");
          n_rate++;
        end
        last_rise = cyc;
        paused_since_edge = 1'b0;
        // bit
        expb = ref_out(m1, 128) ^ ref_out(m2, 129);
        check(rng_pin == expb, "decoded bit equals reference stream");
        if (rng_pin) n_one++; else n_zero++;
        bits.push_back(rng_pin);
        // laser
        if (slot >= 2 && slot % 2 == 0) begin
          logic [1:0] s;
          s = {bits[slot-1], bits[slot-2]};
          check(laser == (4'b0001 << s), "laser chosen by {s1, s0}");
          n_laser[s]++;
        end else begin
          check(laser == 4'b0000, "no laser in the first slot of a pair");
          n_nolaser++;
        end
        m1 = ref_step(m1, 128); m2 = ref_step(m2, 129);
        slot++;
      end
      prev_clk_pin = clk_pin;
    end
  end

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_pause = 0, n_reset = 0;

  initial begin
    int slots_before;
    cyc = 0; n_one = 0; n_zero = 0; n_nolaser = 0; n_rate = 0;
    foreach (n_laser[i]) n_laser[i] = 0;
    rst = 1'b1; en_sw = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst = 1'b0;
    // switch off: nothing comes out
    repeat (500) begin
      @(posedge clk); #1;
      check(clk_pin == 1'b0 && rng_pin == 1'b0 && laser == '0, "silent while disabled");
    end
    en_sw = 1'b1;
    repeat (100 * 120 + 37) @(posedge clk);
    // switch off in mid-slot, then back on
    for (int k = 0; k < 3; k++) begin
      #1 en_sw = 1'b0;
      slots_before = slot;
      repeat (700) @(posedge clk);
      check(slot - slots_before <= 1, "pulses stop after the current slot");
      paused_since_edge = 1'b1;
      n_pause++;
      #1 en_sw = 1'b1;
      repeat (100 * 40 + $urandom_range(0, 99)) @(posedge clk);
    end
    // reset in mid-run: stream restarts from the seeds
    #1 rst = 1'b1;
    repeat (2) @(posedge clk);
    #1 rst = 1'b0;
    n_reset++;
    repeat (100 * 150) @(posedge clk);
    check(slot > 100, "stream restarted after reset");

    // every mechanism must have happened
    check(n_one > 0,  "'1' slots seen");
    check(n_zero > 0, "'0' slots seen");
    foreach (n_laser[i]) check(n_laser[i] > 0, "each laser fired");
    check(n_nolaser > 0, "slots without a laser seen");
    check(n_pause > 0, "enable switch toggled");
    check(n_reset > 0, "mid-run reset");
    check(n_rate > 100, "rate measured");
    $display("ones=%0d zeros=%0d lasers H=%0d V=%0d D=%0d A=%0d no-laser=%0d pauses=%0d resets=%0d rate-checks=%0d",
             n_one, n_zero, n_laser[0], n_laser[1], n_laser[2], n_laser[3], n_nolaser, n_pause, n_reset, n_rate);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
