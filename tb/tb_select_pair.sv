// tb_select_pair -- self-checking testbench for select_pair.
//
// Feeds random bits with slot_end strobes at random spacing. After every
// second strobe, sel must equal {second bit, first bit} and sel_valid must
// be high; after every first strobe sel_valid must be low. Between strobes
// the outputs must hold. All four select values must occur.
module tb_select_pair;

  logic          clk = 1'b0;
  logic          rst, slot_end, rnd_bit, sel_valid;
  rng_pkg::pol_e sel;
  int            checks = 0, failures = 0;

  always #5 clk = ~clk;

  select_pair dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int   seen [4];
    logic first, b;
    logic [1:0] exp_sel;
    logic       exp_valid;
    foreach (seen[i]) seen[i] = 0;
    rst = 1'b1; slot_end = 1'b0; rnd_bit = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst = 1'b0;
    check(sel_valid == 1'b0, "valid low after reset");
    exp_valid = 1'b0; exp_sel = 2'd0;
    for (int k = 0; k < 1000; k++) begin
      // idle cycles between strobes: outputs hold
      repeat ($urandom_range(0, 3)) begin
        rnd_bit = 1'($urandom);
        @(posedge clk); #1;
        check(sel_valid == exp_valid && (!exp_valid || sel == exp_sel), "hold between strobes");
      end
      b = 1'($urandom);
      rnd_bit = b; slot_end = 1'b1;
      @(posedge clk); #1;
      slot_end = 1'b0;
      if (k % 2 == 0) begin
        first = b;
        exp_valid = 1'b0;
      end else begin
        exp_sel = {b, first};
        exp_valid = 1'b1;
        seen[exp_sel]++;
      end
      check(sel_valid == exp_valid, "valid after strobe");
      if (exp_valid) check(sel == exp_sel, "select = {s1, s0}");
    end
    foreach (seen[i]) check(seen[i] > 0, "every select value occurs");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
