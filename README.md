# XOR of two LFSRs: a 1 Mbit/s random bit source for a BB84 transmitter

A BB84 transmitter has to choose, for every photon it sends, one of four
polarisation states (H, V, D, A) at random and without bias. This RTL makes
those random bits with very little logic. It runs two maximal-length linear
feedback shift registers of different, co-prime lengths side by side and
XORs their output bits. The main configuration uses 128 and 129 stages:
257 flip-flops, two XNOR gates and one XOR. The stream is then sent off the
chip in two forms:

* a **clock pin and a random pin** for a time tagger. Every bit slot has a
  clock pulse, and a random pulse appears with it when the bit is 1;
* **four laser-trigger pins**, one per laser diode. A 1×4 demultiplexer
  sends each clock pulse to exactly one of them, picked by two random bits.

The construction and the numbers (register lengths, 100 MHz board clock,
1 MHz bit rate, pulse coding, 1×4 demultiplexer) follow the FPGA design
described in *LFSR based RNG on low cost FPGA for QKD applications*
(Chandravanshi, Meka, Mongia, Singh, Prabhakar). That design was written in
VHDL, which was not available here. This is an independent SystemVerilog
implementation. Where the original description is silent, the choices made
here are listed under "Departures and choices" below.

## Why two registers, and why these lengths

A single d-bit LFSR repeats only after 2^d − 1 bits. Its output still looks
balanced and uncorrelated to most statistical tests. But it is *linear*: the
Berlekamp–Massey algorithm finds its feedback polynomial from only 2d output
bits. The NIST SP 800-22 linear-complexity test (LCT) is built on that
algorithm. It cuts the stream into blocks of M = 500 bits, computes the
linear complexity L of each block, and compares the spread of L − 250 with
what a truly random block would give. A block of a single LFSR always has
L ≈ d. Every register with d < 250 therefore fails at once, and so does a
128-bit register.

XOR two maximal-length registers whose lengths d1 ≠ d2 have irreducible
feedback polynomials, and the result has linear complexity d1 + d2. If
d1 + d2 is above M/2 = 250, a 500-bit block no longer holds enough bits to
expose the recurrence. Its L then spreads around 250 just as a random
block's does, and the LCT passes. This is why 128 + 129 = 257 and
127 + 131 = 258 pass while 113 + 127 = 240 and 64 + 65 = 129 fail. Two
registers of the *same* length help nothing: both follow the same
recurrence, so their XOR follows it too. The testbench `tb_lct_workload`
reproduces exactly these verdicts from the RTL:

| generator          | monobit | runs | LCT (M = 500, 2000 blocks) | block L |
|--------------------|---------|------|----------------------------|---------|
| L(128)             | pass    | pass | fail, χ² ≈ 1.9·10^5        | 129     |
| XOR(L128, L128)    | pass    | pass | fail                       | 128     |
| XOR(L7, L11)       | pass    | pass | fail                       | 18      |
| XOR(L11, L13)      | pass    | pass | fail                       | 24      |
| XOR(L24, L25)      | pass    | pass | fail                       | 49      |
| XOR(L32, L33)      | pass    | pass | fail                       | 65      |
| XOR(L64, L65)      | pass    | pass | fail                       | 129     |
| XOR(L113, L127)    | pass    | pass | fail                       | 240     |
| **XOR(L128, L129)**| pass    | pass | **pass, χ² = 5.96**        | ~250    |
| **XOR(L127, L131)**| pass    | pass | **pass, χ² = 5.05**        | ~250    |

(1 Mbit per generator; a test passes at significance 0.01: monobit
|S|/√n ≤ 2.576, runs z ≤ 1.821, LCT χ² ≤ 16.81 with 6 degrees of freedom.)

A single XNOR register has L = d + 1, not d. With XNOR feedback the output
is the bitwise complement of an m-sequence, and that constant term adds one
to the complexity. In the XOR of two registers the two constants cancel.

**How far to trust it.** Passing the LCT at M = 500 shows that the block is
shorter than twice the complexity. It does not make the generator
unpredictable. Berlekamp–Massey run on about 2 × 257 = 514 consecutive
output bits still recovers the whole XOR(128, 129) generator. The source
gives uniform, well-mixed bits for state preparation. It is not a
cryptographically secure generator, and it cannot replace a true or
quantum random source where an adversary can observe the output.

## Block diagram

```
            en_sw ──► 2-FF sync ──► en
                                    │
 clk 100 MHz ──► bit_clock ─────────┼── clk_pulse ─────────────┬──────────────┐
                 (÷100)    slot_end │                          │              │
                     │              ▼                          ▼              ▼
                     │      ┌──────────────────┐       pulse_encoder     laser_demux
                     └─────►│ xor_rng          │ rnd_bit  (registered)    (1×4, registered)
                      step  │  lfsr 128 ─┐     ├────────► clk_pin            ▲   │
                            │            XOR   │          rng_pin            │   ▼
                            │  lfsr 129 ─┘     │                      sel,   │  laser[3:0]
                            └──────────────────┘──► select_pair ──────valid──┘  H V D A
                                                    (pairs → s0,s1)
```

| file                  | role |
|-----------------------|------|
| `rtl/rng_pkg.sv`      | tap table `tap_mask(d)`, default seeds, polarisation enum `pol_e` |
| `rtl/lfsr.sv`         | one Fibonacci LFSR L(d, s) with XNOR feedback |
| `rtl/xor_rng.sv`      | XOR(L(D1, s1), L(D2, s2)) |
| `rtl/bit_clock.sv`    | bit slots: divider, reference clock pulse, `slot_end` step strobe |
| `rtl/pulse_encoder.sv`| clock pin and random pin |
| `rtl/select_pair.sv`  | cuts the stream into pairs {s1, s0} for the demultiplexer |
| `rtl/laser_demux.sv`  | 1×4 demultiplexer to the laser triggers |
| `rtl/lfsr_qkd_top.sv` | top level |

## The shift register

`lfsr` is the textbook Fibonacci register. Stages 1..d form a chain, and the
output is the last stage. The XNOR of the tapped stages is shifted into stage
1. In the code, stage k is `state[k-1]`. It steps only when `step` is high.
Taps come from the maximal-length XNOR tap table of Xilinx application note
XAPP052, held in `rng_pkg::tap_mask`:

| d   | taps              | d   | taps            |
|-----|-------------------|-----|-----------------|
| 127 | 127, 126          | 129 | 129, 124        |
| 128 | 128, 126, 101, 99 | 131 | 131, 130, 84, 83|

The table also holds 3–5, 7–9, 11, 13, 16, 17, 24, 25, 32, 33, 64, 65 and
113, the other widths of the original software study. Each tap set gives an
irreducible feedback polynomial, and for d ≤ 17 stepping through all states
shows the full period 2^d − 1. For d = 127, 2^127 − 1 is prime, so
irreducible already implies maximal length. For 128, 129 and 131 the
maximal-length property rests on the published table.

With XNOR feedback the all-ones state locks the register, and all-zeros is
an ordinary state. An elaboration check rejects an all-ones seed, and an
assertion watches for lock-up. To use another width, add a case to
`tap_mask` or pass `TAPS` directly, as a mask with bit t−1 set for tap t.
Widths up to `rng_pkg::MAXW` = 256 are supported.

Seeds are parameters (`SEED_1`, `SEED_2`, default `rng_pkg::SEED_A/B`,
truncated to the register width). Changing them needs a new build. A seed
input port would be the natural extension for reseeding at every power-up.

## Bit slots and the output pins

`bit_clock` counts 0 … DIV−1 with DIV = CLK_HZ / BIT_HZ (100 by default).
One pass is one bit slot:

```
cycle in slot   0 1 ... 49 50 ... 98 99 | 0 1 ...
clk_pulse       ‾‾‾‾‾‾‾‾‾‾‾__________ | ‾‾‾‾     (high for DIV/2 cycles)
slot_end        _____________________‾ | ____     (steps the generator)
rnd_bit         ======= bit k ========| bit k+1
clk_pin         (clk_pulse one clock later)
rng_pin         (clk_pulse AND rnd_bit, one clock later)
```

The generator steps in the last cycle of a slot, so each slot's bit is
stable for the whole slot. `pulse_encoder` registers both pins in the same
stage, and `laser_demux` registers its outputs in a parallel stage. So
`clk_pin`, `rng_pin` and `laser` all change on the same clock edge. A
receiver reads a slot as 1 if the random pulse coincides with the clock
pulse and as 0 if the clock pulse comes alone. The tests check the 1 MHz
rate and the 50-cycle pulse width at the defaults. Other rates come from
`BIT_HZ`. 5, 10, 20 and 25 MHz divide 100 MHz exactly. 15 MHz does not, and
the divider would give 16.7 MHz.

## Picking a laser

The demultiplexer needs two random bits {s1, s0} per laser pulse. Reusing
one bit in two successive selections would make consecutive polarisation
states depend on each other. `select_pair` therefore cuts the stream into
non-overlapping pairs instead. The first bit of a pair is s0 and the second
is s1. Once a pair is complete, `sel` is loaded and `sel_valid` is high for
the following slot, and the clock pulse of that slot goes to laser `sel`:

| {s1, s0} | output     | state |
|----------|------------|-------|
| 00       | `laser[0]` | H     |
| 01       | `laser[1]` | V     |
| 10       | `laser[2]` | D     |
| 11       | `laser[3]` | A     |

After reset, slots 0, 1, 2, 3, 4, … carry bits b0, b1, b2, …. The laser
addressed by {b1, b0} fires in slot 2, {b3, b2} in slot 4, and so on. Odd
slots and slot 0 fire no laser. Laser pulses therefore come at half the bit
rate (500 kHz at the defaults), and never more than one laser is on at a
time (asserted).

## Enable and reset

`en_sw` is the board's "enable" slide switch. It passes through a
two-flip-flop synchroniser, and `bit_clock` honours it only at slot
boundaries. A slot in progress when the switch goes off is finished,
including its generator step. After that the counter rests and every output
pin stays low, while the registers hold their state. When the switch goes
back on, the stream continues with the next bit. Each clock pulse that
leaves the chip therefore stands for exactly one generator step, and no bit
is lost or sent twice.

`rst` is synchronous and active high. It reloads both seeds, clears the
output pins and starts a new select pair.

## Parameters of `lfsr_qkd_top`

| parameter | default            | meaning |
|-----------|--------------------|---------|
| `CLK_HZ`  | 100 000 000        | board clock |
| `BIT_HZ`  | 1 000 000          | random bit rate |
| `D1`, `D2`| 128, 129           | register lengths; 127, 131 is the other published configuration |
| `SEED_1`, `SEED_2` | `rng_pkg::SEED_A/B` | seeds s1, s2 (not all ones within the width) |

At the defaults the design uses 277 flip-flops: 257 in the registers, 7 in
the divider, 2 in the synchroniser, 2 pin registers, 5 in the select logic
and 4 laser registers. Nothing else is clocked.

## Departures and choices

Taken from the original description: the Fibonacci register with XNOR
feedback, output from the last stage, XOR of two registers, 128/129 and
127/131, the 100 MHz clock, the 1 MHz bit rate, the clock-plus-random pulse
coding, and a 1×4 demultiplexer with select lines s0, s1 driving four
lasers.

Chosen here, because the original does not specify them:
* the tap sets and the seed values;
* the divider, and a 50 % duty cycle for the clock pulse;
* a synchronous reset;
* the enable synchroniser, with enable acting at slot boundaries;
* registered output pins;
* non-overlapping select pairs, which halve the laser rate;
* the order in which select values map to lasers and states;
* the clock/random pins and the laser pins working at the same time. The
  original shows them in separate set-ups.

The text of the original calls the feedback an XOR, while its register
diagram shows an XNOR gate. XNOR was used here. With the same taps, both
give maximal length.

Outside this RTL: the board oscillator, the switch, the Pmod-to-SMA adapter,
the time tagger, the laser-driver electronics, and the software (NIST suite,
post-processing) that tests the recorded stream.

## Simulation

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself
after a fixed number of cycles. Build any of them with plain Verilator 5.
List the packages first, and let `-y` find the modules:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/rng_pkg.sv tb/tb_ref_pkg.sv tb/tb_lfsr_qkd_top.sv --top-module tb_lfsr_qkd_top
./obj_dir/Vtb_lfsr_qkd_top
```

| testbench          | what it checks |
|--------------------|----------------|
| `tb_lfsr`          | 127/128/129/131-bit registers bit for bit against a separate reference model (`tb_ref_pkg`), with random stepping; hold and reload; the 8-bit register's period of 255 over 255 distinct states |
| `tb_xor_rng`       | 128/129 and 127/131 streams against the model; balance; differs from each register alone |
| `tb_bit_clock`     | pulse shape and `slot_end` at 1, 5, 10, 20 and 25 MHz; silence when disabled; a slot finishes after enable drops |
| `tb_pulse_encoder` | pin coding and latency |
| `tb_select_pair`   | pairing order {s1, s0}, validity, hold between strobes |
| `tb_laser_demux`   | one-hot routing, qualifier, every laser fires |
| `tb_lfsr_qkd_top`  | whole chip at the default parameters. A monitor decodes the pins the way a time tagger would and compares ~400 bits with the model. It checks the 1 MHz rate, pulse width and laser choice for every slot, and counts each mechanism: 0 and 1 bits, all four lasers, slots without a laser, enable toggled mid-slot (3×), and a reset mid-run |
| `tb_lct_workload`  | the ten-generator randomness comparison in the table above (1 Mbit each, about 2 s) |

The reference model in `tb_ref_pkg` lists its own tap positions and steps
bit by bit. It does not use `rng_pkg`, so a wrong entry in the RTL tap table
shows up as a mismatch.
