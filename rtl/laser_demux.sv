// laser_demux -- 1x4 demultiplexer driving the four laser-diode drivers.
//
// The reference clock pulse is routed to exactly one of four outputs,
// chosen by the select lines {s1, s0}; the other three stay low, so only one
// laser diode fires at a time. Output k drives the laser for polarisation
// state k of rng_pkg::pol_e: laser[0] = Laser 1 (H), laser[1] = Laser 2 (V),
// laser[2] = Laser 3 (D), laser[3] = Laser 4 (A). The 1x4 structure, the
// clock input, the select names s0, s1 and the four laser outputs are the
// design's; the order of the state codes and the sel_valid qualifier (no
// laser fires in a slot without a fresh select pair) are this design's
// choices.
//
// Timing: outputs are registered, one clock after clk_pulse, the same
// latency as pulse_encoder's pins, so laser pulses line up with the
// reference clock pulses. rst (synchronous) drives all outputs low.
module laser_demux (
  input  logic          clk,
  input  logic          rst,
  input  logic          clk_pulse,
  input  rng_pkg::pol_e sel,
  input  logic          sel_valid,
  output logic [3:0]    laser
);

  logic [3:0] laser_d;

  always_comb begin
    laser_d = '0;
    if (clk_pulse && sel_valid) begin
      laser_d[sel] = 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      laser <= '0;
    end else begin
      laser <= laser_d;
    end
  end

  // Never more than one laser at a time.
  a_one_laser : assert property (@(posedge clk) disable iff (rst) $onehot0(laser))
    else $error("laser_demux: more than one laser enabled");

endmodule
