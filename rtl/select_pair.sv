// select_pair -- demultiplexer select lines s0, s1 from the random stream.
//
// The laser demultiplexer needs two random bits per laser pulse. Rather
// than reuse one bit in two consecutive selections (which would correlate
// successive polarisation states), this block cuts the bit stream into
// non-overlapping pairs: the first bit of a pair becomes s0, the second s1.
// It samples rnd_bit at slot_end, the last cycle of a bit slot. After the
// second bit of a pair, sel = {s1, s0} is loaded and sel_valid is high for the
// whole following slot; after the first bit sel_valid is low for the
// following slot. Laser pulses therefore come at half the bit rate, each
// from a fresh, independent pair. Only the names s0, s1 and the fact that
// they come from the LFSR bits are given; the pairing is this design's
// choice.
//
// rst (synchronous) clears sel_valid and starts a new pair.
module select_pair (
  input  logic          clk,
  input  logic          rst,
  input  logic          slot_end,
  input  logic          rnd_bit,
  output rng_pkg::pol_e sel,
  output logic          sel_valid
);

  logic have_first;   // first bit of a pair captured
  logic first_bit;

  always_ff @(posedge clk) begin
    if (rst) begin
      have_first <= 1'b0;
      first_bit  <= 1'b0;
      sel        <= rng_pkg::POL_H;
      sel_valid  <= 1'b0;
    end else if (slot_end) begin
      if (have_first) begin
        sel        <= rng_pkg::pol_e'({rnd_bit, first_bit});
        sel_valid  <= 1'b1;
        have_first <= 1'b0;
      end else begin
        first_bit  <= rnd_bit;
        sel_valid  <= 1'b0;
        have_first <= 1'b1;
      end
    end
  end

endmodule
