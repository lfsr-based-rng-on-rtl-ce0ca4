// tb_ref_pkg -- reference model of a Fibonacci XNOR LFSR for the testbenches.
//
// Written independently of the RTL: the tap positions are listed here as
// plain numbers (stages 1..d, stage d is the output, maximal-length XNOR taps
// of XAPP052) and the register is stepped one bit at a time. The model keeps
// the register in a 256-bit vector, stage k in bit k-1.
package tb_ref_pkg;

  typedef logic [255:0] vec_t;
  typedef int unsigned  tap_q_t[$];

  // Tap list of a d-bit LFSR.
  function automatic tap_q_t taps_of(int unsigned d);
    case (d)
      8:   return '{8, 6, 5, 4};
      16:  return '{16, 15, 13, 4};
      127: return '{127, 126};
      128: return '{128, 126, 101, 99};
      129: return '{129, 124};
      131: return '{131, 130, 84, 83};
      default: begin
        $fatal(1, "tb_ref_pkg: no taps for %0d", d);
        return '{};
      end
    endcase
  endfunction

  // One step: feedback = XNOR of the tapped stages, shifted into stage 1.
  function automatic vec_t ref_step(vec_t s, int unsigned d);
    tap_q_t t;
    logic   fb;
    vec_t   mask;
    t  = taps_of(d);
    fb = 1'b1;
    foreach (t[i]) fb = fb ^ s[t[i]-1];
    mask = (vec_t'(1) << d) - vec_t'(1);
    return ((s << 1) | vec_t'(fb)) & mask;
  endfunction

  // Output bit (last stage).
  function automatic logic ref_out(vec_t s, int unsigned d);
    return s[d-1];
  endfunction

  // Seed truncated to d bits.
  function automatic vec_t ref_seed(vec_t seed, int unsigned d);
    return seed & ((vec_t'(1) << d) - vec_t'(1));
  endfunction

endpackage
