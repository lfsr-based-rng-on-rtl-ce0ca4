// lfsr -- d-bit Fibonacci linear-feedback shift register, L(d, s).
//
// A chain of WIDTH D flip-flops. Stage 1 (state[0]) takes the XNOR of the
// tap stages; every other stage k+1 takes stage k; the serial output out_bit
// is Q of the last stage (state[WIDTH-1]). This is the structure of the
// classic cascaded-flip-flop LFSR with an XNOR feedback gate: chain, XNOR
// feedback into the first D input and output from the last Q follow that
// structure. Which stages are tapped is not given there and is taken from
// rng_pkg::tap_mask (maximal-length XNOR taps), unless TAPS is overridden.
//
// With XNOR feedback the all-ones state is the one lock-up state, so the seed
// must not be all ones; the all-zeros state is part of the 2^WIDTH-1 cycle.
//
// Interface and timing: rst (synchronous, active high) loads SEED into the
// register. On a clock edge with step high the register shifts by one
// stage; out_bit then shows the next bit of the sequence. With step low it
// holds. The first bit of the sequence is SEED[WIDTH-1], visible right after
// reset. Reset style and the step enable are this design's choices.
module lfsr #(
  parameter int unsigned       WIDTH = 128,
  parameter rng_pkg::lfsr_vec_t TAPS = rng_pkg::tap_mask(WIDTH),
  parameter rng_pkg::lfsr_vec_t SEED = rng_pkg::SEED_A
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             step,
  output logic [WIDTH-1:0] state,
  output logic             out_bit
);

  localparam logic [WIDTH-1:0] TAP_BITS  = TAPS[WIDTH-1:0];
  localparam logic [WIDTH-1:0] SEED_BITS = SEED[WIDTH-1:0];

  // Elaboration-time sanity checks on the parameters.
  if (WIDTH < 2 || WIDTH > rng_pkg::MAXW) begin : g_bad_width
    $error("lfsr: WIDTH %0d outside 2..%0d", WIDTH, rng_pkg::MAXW);
  end
  if (TAP_BITS == '0 || !TAP_BITS[WIDTH-1]) begin : g_bad_taps
    $error("lfsr: no tap set for WIDTH %0d (the last stage must be a tap)", WIDTH);
  end
  if (SEED_BITS == '1) begin : g_bad_seed
    $error("lfsr: all-ones seed is the XNOR lock-up state");
  end

  logic feedback;

  // XNOR of all tapped stages.
  always_comb feedback = ~(^(state & TAP_BITS));

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= SEED_BITS;
    end else if (step) begin
      state <= {state[WIDTH-2:0], feedback};
    end
  end

  assign out_bit = state[WIDTH-1];

  // The register must never reach the lock-up state.
  a_no_lockup : assert property (@(posedge clk) disable iff (rst) state != '1)
    else $error("lfsr: register reached the all-ones lock-up state");

endmodule
