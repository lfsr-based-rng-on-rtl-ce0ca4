// tb_laser_demux -- self-checking testbench for laser_demux.
//
// Random clock pulse, select and valid inputs; one clock later exactly the
// laser addressed by the select must be high when the pulse and valid were
// both high, and no laser otherwise. Every laser must fire at least once.
module tb_laser_demux;

  logic          clk = 1'b0;
  logic          rst, clk_pulse, sel_valid;
  rng_pkg::pol_e sel;
  logic [3:0]    laser;
  int            checks = 0, failures = 0;

  always #5 clk = ~clk;

  laser_demux dut (.*);

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
    int fired [4];
    logic p, v;
    logic [1:0] s;
    logic [3:0] exp_l;
    foreach (fired[i]) fired[i] = 0;
    rst = 1'b1; clk_pulse = 1'b1; sel_valid = 1'b1; sel = rng_pkg::POL_A;
    @(posedge clk); #1;
    check(laser == 4'b0000, "reset clears lasers");
    rst = 1'b0;
    repeat (3000) begin
      p = 1'($urandom); v = 1'($urandom); s = 2'($urandom);
      clk_pulse = p; sel_valid = v; sel = rng_pkg::pol_e'(s);
      @(posedge clk); #1;
      exp_l = (p && v) ? (4'b0001 << s) : 4'b0000;
      check(laser == exp_l, "laser pattern");
      if (p && v) fired[s]++;
    end
    foreach (fired[i]) check(fired[i] > 0, "every laser fires");
    $display("fired H=%0d V=%0d D=%0d A=%0d", fired[0], fired[1], fired[2], fired[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
