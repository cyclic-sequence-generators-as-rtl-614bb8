// pc_pkg: types and constants shared by the program-counter modules.
//
// An MFSR (Multiple Feedback Shift Register) of width N is a ring of N flip-flops:
// stage 0 takes the output of stage N-1 and stage i takes stage i-1, except that up
// to two stages take the XOR of their ring predecessor and one further stage output
// (a "tap"). Each tap is written here as (src, dst):
//     d[dst] = q[dst-1] ^ q[src]
// Every stage then has a fan-in of at most 2 and every flip-flop a fan-out of at most
// 2, and the logic depth is one XOR gate whatever the width.
//
// mfsr_taps(N) returns a tap set whose state-transition matrix M over GF(2) has
// multiplicative order 2^N-1, i.e. the register runs through all 2^N-1 non-zero
// states (maximum cycle). The 8-bit entry is the counter drawn in the paper's 8-bit
// MFSR figure, with its stages numbered 0..7 from the left. The other entries are
// this design's own: for each width the first tap set, in order of increasing tap
// count and then increasing (src, dst), for which M^(2^N-1) = I and
// M^((2^N-1)/p) != I for every prime p dividing 2^N-1. The MFSR testbench repeats
// that proof on the hardware for every width in the table.
package pc_pkg;

  // Widths the tap table covers.
  localparam int unsigned MFSR_MIN_WIDTH = 4;
  localparam int unsigned MFSR_MAX_WIDTH = 32;

  // Cache line of the hybrid PC: 32-byte lines of 32-bit instructions hold eight
  // instructions, so the low three PC bits count radix-2 within the line.
  localparam int unsigned HYBRID_LOW_BITS = 3;

  typedef struct packed {
    int unsigned src;  // stage whose output is XORed in
    int unsigned dst;  // stage whose input gets the XOR
  } mfsr_tap_t;

  typedef struct packed {
    int unsigned count;  // number of taps used, 0..2
    mfsr_tap_t   tap1;
    mfsr_tap_t   tap0;
  } mfsr_taps_t;

  // Which counter sits in the feedback path of the PC circuit.
  typedef enum logic {
    PC_MFSR   = 1'b0,  // pure MFSR program counter
    PC_HYBRID = 1'b1   // radix-2 low bits + MFSR high bits
  } counter_kind_e;

  function automatic mfsr_taps_t mk_taps(int unsigned c, int unsigned s0, int unsigned d0,
                                         int unsigned s1, int unsigned d1);
    mfsr_taps_t t;
    t.count    = c;
    t.tap0.src = s0;
    t.tap0.dst = d0;
    t.tap1.src = s1;
    t.tap1.dst = d1;
    return t;
  endfunction

  // Maximal-cycle tap set for an N-bit MFSR; count = 0 marks an unsupported width.
  function automatic mfsr_taps_t mfsr_taps(int unsigned n);
    case (n)
      4:  return mk_taps(1, 0, 2, 0, 0);
      5:  return mk_taps(1, 0, 3, 0, 0);
      6:  return mk_taps(1, 0, 2, 0, 0);
      7:  return mk_taps(1, 0, 2, 0, 0);
      8:  return mk_taps(2, 3, 1, 6, 5);   // as drawn in the 8-bit MFSR figure
      9:  return mk_taps(1, 0, 5, 0, 0);
      10: return mk_taps(1, 0, 4, 0, 0);
      11: return mk_taps(1, 0, 3, 0, 0);
      12: return mk_taps(2, 0, 4, 4, 9);
      13: return mk_taps(2, 0, 2, 2, 6);
      14: return mk_taps(2, 0, 3, 3, 11);
      15: return mk_taps(1, 0, 2, 0, 0);
      16: return mk_taps(2, 0, 3, 3, 7);
      17: return mk_taps(1, 0, 4, 0, 0);
      18: return mk_taps(1, 0, 8, 0, 0);
      19: return mk_taps(2, 0, 2, 2, 8);
      20: return mk_taps(1, 0, 4, 0, 0);
      21: return mk_taps(1, 0, 3, 0, 0);
      22: return mk_taps(1, 0, 2, 0, 0);
      23: return mk_taps(1, 0, 6, 0, 0);
      24: return mk_taps(2, 0, 2, 2, 6);
      25: return mk_taps(1, 0, 4, 0, 0);
      26: return mk_taps(2, 0, 2, 2, 10);
      27: return mk_taps(2, 0, 2, 2, 10);
      28: return mk_taps(1, 0, 4, 0, 0);
      29: return mk_taps(1, 0, 3, 0, 0);
      30: return mk_taps(2, 0, 2, 2, 18);
      31: return mk_taps(1, 0, 4, 0, 0);
      32: return mk_taps(2, 0, 2, 2, 30);
      default: return mk_taps(0, 0, 0, 0, 0);
    endcase
  endfunction

endpackage
