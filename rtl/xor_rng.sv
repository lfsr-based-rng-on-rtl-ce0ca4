// xor_rng -- random bit generator XOR(L(D1, s1), L(D2, s2)).
//
// Two Fibonacci LFSRs of different, co-prime lengths D1 and D2 are seeded
// with different values and stepped together; the generator's bit is the XOR
// of their two serial outputs. The XOR of two sequences from registers of
// co-prime length has a far longer period and a far higher linear complexity
// than either register alone, which is what lets the stream pass the
// linear-complexity test that a single LFSR fails. The default
// D1 = 128, D2 = 129 is the main configuration built on the FPGA; D1 = 127,
// D2 = 131 is the second one (pass both widths as parameters; the taps
// follow from rng_pkg::tap_mask). Seeds s1, s2 default to rng_pkg::SEED_A/B.
//
// Interface and timing: rst (synchronous) loads both seeds. When step is high
// on a clock edge both registers advance by one bit, so rnd_bit changes to the
// next bit of the stream one clock later; with step low rnd_bit holds. rnd_bit
// is a combinational XOR of two flip-flop outputs (no output register), so
// the first stream bit SEED_A[D1-1] ^ SEED_B[D2-1] is valid right after reset.
module xor_rng #(
  parameter int unsigned        D1     = 128,
  parameter int unsigned        D2     = 129,
  parameter rng_pkg::lfsr_vec_t SEED_1 = rng_pkg::SEED_A,
  parameter rng_pkg::lfsr_vec_t SEED_2 = rng_pkg::SEED_B
) (
  input  logic clk,
  input  logic rst,
  input  logic step,
  output logic rnd_bit
);

  logic [D1-1:0] state_1;
  logic [D2-1:0] state_2;
  logic          bit_1, bit_2;

  lfsr #(.WIDTH(D1), .TAPS(rng_pkg::tap_mask(D1)), .SEED(SEED_1)) u_lfsr_1 (
    .clk     (clk),
    .rst     (rst),
    .step    (step),
    .state   (state_1),
    .out_bit (bit_1)
  );

  lfsr #(.WIDTH(D2), .TAPS(rng_pkg::tap_mask(D2)), .SEED(SEED_2)) u_lfsr_2 (
    .clk     (clk),
    .rst     (rst),
    .step    (step),
    .state   (state_2),
    .out_bit (bit_2)
  );

  // The single non-linear-complexity-raising combiner.
  assign rnd_bit = bit_1 ^ bit_2;

endmodule
