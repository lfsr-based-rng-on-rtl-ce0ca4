// pulse_encoder -- the two output pins read by the time tagger.
//
// Each bit slot produces one reference clock pulse on clk_pin. The random
// pin rng_pin carries a pulse at the same time as the clock pulse when the
// slot's random bit is 1 and stays low when it is 0, so a receiver reads a
// '1' for a coincident pair and a '0' for a lone clock pulse. This
// return-to-zero coding is the one the design's oscilloscope traces show;
// registering both pins in the same flip-flop stage, so the two pulses leave
// the chip aligned to the clock edge, is this design's choice.
//
// Timing: both pins follow clk_pulse / rnd_bit with one clock of latency.
// rst (synchronous) drives both pins low.
module pulse_encoder (
  input  logic clk,
  input  logic rst,
  input  logic clk_pulse,
  input  logic rnd_bit,
  output logic clk_pin,
  output logic rng_pin
);

  always_ff @(posedge clk) begin
    if (rst) begin
      clk_pin <= 1'b0;
      rng_pin <= 1'b0;
    end else begin
      clk_pin <= clk_pulse;
      rng_pin <= clk_pulse & rnd_bit;
    end
  end

  // A random pulse never appears without its clock pulse.
  a_rng_inside_clk : assert property (@(posedge clk) disable iff (rst) rng_pin |-> clk_pin)
    else $error("pulse_encoder: random pulse without clock pulse");

endmodule
