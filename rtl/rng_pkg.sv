// rng_pkg -- constants shared by the XOR-of-two-LFSRs random bit generator.
//
// The generator is built from Fibonacci LFSRs whose feedback is the XNOR of a
// few tap stages. Tap positions are numbered 1..d, stage d being the serial
// output, and follow the maximal-length XNOR tap table of Xilinx application
// note XAPP052 (Alfke, 1996). Every tap set below gives an irreducible
// feedback polynomial; for d <= 17 the full period 2^d-1 has also been
// confirmed by exhaustive stepping. The widths covered are those of the
// generator variants the design was evaluated with (d = 3 ... 131).
//
// The tap table and the seed values are this design's choice: the design
// only requires "taps which generate the maximum length bit-sequence" and
// "different seeds", without listing them.
package rng_pkg;

  // Widest LFSR this package can describe.
  localparam int unsigned MAXW = 256;

  typedef logic [MAXW-1:0] lfsr_vec_t;

  // Returns a mask with bit (t-1) set for every tap t of a d-bit LFSR.
  // Returns 0 for a width the table does not hold.
  function automatic lfsr_vec_t tap_mask(int unsigned d);
    lfsr_vec_t m;
    m = '0;
    case (d)
      3:   begin m[2] = 1'b1; m[1] = 1'b1; end
      4:   begin m[3] = 1'b1; m[2] = 1'b1; end
      5:   begin m[4] = 1'b1; m[2] = 1'b1; end
      7:   begin m[6] = 1'b1; m[5] = 1'b1; end
      8:   begin m[7] = 1'b1; m[5] = 1'b1; m[4] = 1'b1; m[3] = 1'b1; end
      9:   begin m[8] = 1'b1; m[4] = 1'b1; end
      11:  begin m[10] = 1'b1; m[8] = 1'b1; end
      13:  begin m[12] = 1'b1; m[3] = 1'b1; m[2] = 1'b1; m[0] = 1'b1; end
      16:  begin m[15] = 1'b1; m[14] = 1'b1; m[12] = 1'b1; m[3] = 1'b1; end
      17:  begin m[16] = 1'b1; m[13] = 1'b1; end
      24:  begin m[23] = 1'b1; m[22] = 1'b1; m[21] = 1'b1; m[16] = 1'b1; end
      25:  begin m[24] = 1'b1; m[21] = 1'b1; end
      32:  begin m[31] = 1'b1; m[21] = 1'b1; m[1] = 1'b1; m[0] = 1'b1; end
      33:  begin m[32] = 1'b1; m[19] = 1'b1; end
      64:  begin m[63] = 1'b1; m[62] = 1'b1; m[60] = 1'b1; m[59] = 1'b1; end
      65:  begin m[64] = 1'b1; m[46] = 1'b1; end
      113: begin m[112] = 1'b1; m[103] = 1'b1; end
      127: begin m[126] = 1'b1; m[125] = 1'b1; end
      128: begin m[127] = 1'b1; m[125] = 1'b1; m[100] = 1'b1; m[98] = 1'b1; end
      129: begin m[128] = 1'b1; m[123] = 1'b1; end
      131: begin m[130] = 1'b1; m[129] = 1'b1; m[83] = 1'b1; m[82] = 1'b1; end
      default: m = '0;
    endcase
    return m;
  endfunction

  // Default seeds s1 and s2. Any value other than all ones works with XNOR
  // feedback (all ones is the lock-up state); a register narrower than 256
  // bits takes the low bits. The low 128 bits of the two differ, and no
  // width from 3 to 256 sees an all-ones slice of either.
  localparam lfsr_vec_t SEED_A =
    256'h243F6A88_85A308D3_13198A2E_03707344_A4093822_299F31D0_082EFA98_EC4E6C89;
  localparam lfsr_vec_t SEED_B =
    256'hB7E15162_8AED2A6A_BF715880_9CF4F3C7_62E7160F_38B4DA56_A784D904_5190CFE6;

  // Laser / polarisation state addressed by the demultiplexer select {s1,s0}.
  typedef enum logic [1:0] {
    POL_H = 2'd0,   // Laser 1
    POL_V = 2'd1,   // Laser 2
    POL_D = 2'd2,   // Laser 3
    POL_A = 2'd3    // Laser 4
  } pol_e;

endpackage
