// tb_bit_clock -- self-checking testbench for bit_clock.
//
// Instantiates the 100 MHz board clock divided to 1 MHz (the hardware
// rate) and to 5, 10, 20 and 25 MHz (the other synthesised rates). For each:
// slot_end repeats every CLK_HZ/BIT_HZ cycles, the clock pulse is high for
// the first half of the slot and low for the rest, and slot_end falls in the
// last cycle of the slot. With en low at a boundary nothing is produced;
// dropping en in mid-slot lets that slot finish.
module tb_bit_clock;

  logic clk = 1'b0;
  logic rst;
  logic en;
  int   checks = 0, failures = 0;

  always #5 clk = ~clk;

  localparam int NR = 5;
  localparam int RATE_MHZ [NR] = '{1, 5, 10, 20, 25};

  logic [NR-1:0] pulse, send;

  for (genvar g = 0; g < NR; g++) begin : g_dut
    bit_clock #(.CLK_HZ(100_000_000), .BIT_HZ(RATE_MHZ[g] * 1_000_000)) dut (
      .clk, .rst, .en, .clk_pulse(pulse[g]), .slot_end(send[g]));
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    rst = 1'b1; en = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst = 1'b0;
    // Disabled: nothing at all.
    repeat (300) begin
      @(posedge clk); #1;
      check(pulse == '0 && send == '0, "idle while disabled");
    end
    // Enabled at cycle 0: cycle c of the run is position c mod DIV of a slot.
    en = 1'b1; #1;
    cyc = 0;
    repeat (1000) begin
      for (int g = 0; g < NR; g++) begin
        int div, pos;
        div = 100 / RATE_MHZ[g];
        pos = cyc % div;
        check(pulse[g] == (pos < div / 2), $sformatf("pulse shape %0d MHz", RATE_MHZ[g]));
        check(send[g]  == (pos == div - 1), $sformatf("slot_end %0d MHz", RATE_MHZ[g]));
      end
      @(posedge clk); #1;
      cyc++;
    end
    // cyc = 1000: every divider is at the start of a slot. Run 30 cycles
    // into the 1 MHz slot, drop en: the slot still ends at cycle 99.
    repeat (30) begin @(posedge clk); #1; cyc++; end
    en = 1'b0;
    begin
      int ends = 0, at = -1;
      for (int c = 30; c < 250; c++) begin
        if (send[0]) begin ends++; at = c; end
        @(posedge clk); #1;
      end
      check(ends == 1 && at == 99, "slot finishes after en drops");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
