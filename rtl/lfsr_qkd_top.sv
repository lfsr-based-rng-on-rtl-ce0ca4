// lfsr_qkd_top -- XOR-of-two-LFSRs random bit source for a BB84 transmitter.
//
// The chip turns a 100 MHz board clock into a 1 MHz stream of pseudo-random
// bits, XOR(L(D1,s1), L(D2,s2)), and presents it two ways:
//   * clk_pin / rng_pin: a reference clock pulse every bit slot and a random
//     pulse coincident with it for a '1' (none for a '0'), for a time tagger
//     that rebuilds the bit stream;
//   * laser[3:0]: a 1x4 demultiplexer that sends the clock pulse to one of four
//     laser-diode drivers (H, V, D, A polarisation) chosen by two random
//     select bits, so one laser fires at a time in random order.
// en_sw is the board slide switch that enables the generator. It is
// synchronised by two flip-flops and takes effect at the next bit-slot
// boundary (a slot in progress is finished); while it is off the generator
// holds its state and all outputs stay low.
//
// Structure: bit_clock -> (slot_end steps) xor_rng -> pulse_encoder and
// select_pair -> laser_demux. The generator, its D1/D2 = 128/129 default (the
// 127/131 configuration is selected by parameters), the 100 MHz and 1 MHz
// rates, the clock+random pulse coding and the 1x4 demultiplexer follow the
// design; the taps, seeds, reset, enable synchroniser, select pairing and
// state order are this design's choices.
//
// Timing: rst is synchronous and active high (it reloads the seeds). Output
// pins are registered; all of them change one clock after the internal slot
// timing, so they stay mutually aligned. Bit rate BIT_HZ, laser pulse rate
// BIT_HZ / 2.
module lfsr_qkd_top #(
  parameter int unsigned        CLK_HZ = 100_000_000,
  parameter int unsigned        BIT_HZ = 1_000_000,
  parameter int unsigned        D1     = 128,
  parameter int unsigned        D2     = 129,
  parameter rng_pkg::lfsr_vec_t SEED_1 = rng_pkg::SEED_A,
  parameter rng_pkg::lfsr_vec_t SEED_2 = rng_pkg::SEED_B
) (
  input  logic       clk,       // board clock, CLK_HZ
  input  logic       rst,       // synchronous reset, active high
  input  logic       en_sw,     // "enable RNG" switch, asynchronous
  output logic       clk_pin,   // reference clock pulses
  output logic       rng_pin,   // random pulses
  output logic [3:0] laser      // laser-driver triggers: H, V, D, A
);

  // Two-flip-flop synchroniser for the slide switch.
  logic [1:0] en_sync;
  logic       en;

  always_ff @(posedge clk) begin
    if (rst) begin
      en_sync <= '0;
    end else begin
      en_sync <= {en_sync[0], en_sw};
    end
  end
  assign en = en_sync[1];

  logic          clk_pulse;
  logic          slot_end;
  logic          rnd_bit;
  rng_pkg::pol_e sel;
  logic          sel_valid;

  bit_clock #(.CLK_HZ(CLK_HZ), .BIT_HZ(BIT_HZ)) u_bit_clock (
    .clk       (clk),
    .rst       (rst),
    .en        (en),
    .clk_pulse (clk_pulse),
    .slot_end  (slot_end)
  );

  xor_rng #(.D1(D1), .D2(D2), .SEED_1(SEED_1), .SEED_2(SEED_2)) u_xor_rng (
    .clk     (clk),
    .rst     (rst),
    .step    (slot_end),
    .rnd_bit (rnd_bit)
  );

  pulse_encoder u_pulse_encoder (
    .clk       (clk),
    .rst       (rst),
    .clk_pulse (clk_pulse),
    .rnd_bit   (rnd_bit),
    .clk_pin   (clk_pin),
    .rng_pin   (rng_pin)
  );

  select_pair u_select_pair (
    .clk       (clk),
    .rst       (rst),
    .slot_end  (slot_end),
    .rnd_bit   (rnd_bit),
    .sel       (sel),
    .sel_valid (sel_valid)
  );

  laser_demux u_laser_demux (
    .clk       (clk),
    .rst       (rst),
    .clk_pulse (clk_pulse),
    .sel       (sel),
    .sel_valid (sel_valid),
    .laser     (laser)
  );

endmodule
