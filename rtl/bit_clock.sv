// bit_clock -- bit-slot timing from the board clock.
//
// The board clock (CLK_HZ, 100 MHz on the target board) is divided down to
// the random-bit rate BIT_HZ (1 MHz in the hardware runs). A counter runs
// 0 .. DIV-1, DIV = CLK_HZ / BIT_HZ, and each pass is one bit slot. The
// reference clock pulse is high for the first DIV/2 cycles of every slot,
// a square wave at BIT_HZ. slot_end is high in the slot's last cycle and is
// used to step the generator, so a new random bit is present from the
// first cycle of the next slot and stays stable for the whole slot.
//
// en (already synchronised) is honoured only at slot boundaries: a slot
// starts in a cycle where the counter is at zero and en is high, and once
// started it always runs to its end, slot_end included. While en stays low
// at a boundary the counter rests at zero and no pulse or slot_end appears.
// Every clock pulse sent out therefore matches exactly one generator step,
// and switching the generator off and on never repeats or drops a bit. A counter divider is the simplest circuit
// that gives the bit rate; rates that do not divide CLK_HZ exactly are
// rounded down in DIV (an exact 15 MHz, for instance, would need a clock
// synthesiser ahead of this block). rst is synchronous, active high.
module bit_clock #(
  parameter int unsigned CLK_HZ = 100_000_000,
  parameter int unsigned BIT_HZ = 1_000_000
) (
  input  logic clk,
  input  logic rst,
  input  logic en,
  output logic clk_pulse,   // reference clock, high during first half of slot
  output logic slot_end     // one cycle, last cycle of each slot
);

  localparam int unsigned DIV   = CLK_HZ / BIT_HZ;
  localparam int unsigned HIGH  = DIV / 2;
  localparam int unsigned CNT_W = (DIV > 1) ? $clog2(DIV) : 1;

  if (DIV < 2) begin : g_bad_div
    $error("bit_clock: CLK_HZ / BIT_HZ must be at least 2");
  end

  logic [CNT_W-1:0] cnt;
  logic             active;   // inside a slot (started, or starting now)

  assign active = en || (cnt != '0);

  always_ff @(posedge clk) begin
    if (rst || !active) begin
      cnt <= '0;
    end else if (cnt == CNT_W'(DIV - 1)) begin
      cnt <= '0;
    end else begin
      cnt <= cnt + 1'b1;
    end
  end

  assign clk_pulse = active && (cnt < CNT_W'(HIGH));
  assign slot_end  = (cnt == CNT_W'(DIV - 1));

endmodule
