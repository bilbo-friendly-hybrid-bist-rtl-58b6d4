// bist_pkg: types and constants shared by the hybrid BIST blocks.
//
// bilbo_mode_e encodes the two BILBO control lines as the pair {B2,B1}, with the
// four modes of a common BILBO: 10 clears the register, 01 makes it a MISR,
// 00 a serial shift register and 11 a parallel-load (normal) register.
// seg_t is one entry of the test program that the external tester hands to the
// controller: one deterministic vector (shifted in serially) followed by a run of
// pseudo-random patterns in Phase 1 or Phase 2. default_taps() gives a feedback
// tap mask for a Fibonacci LFSR/MISR of a given width; the widths listed use
// primitive polynomials (maximal period), other widths fall back to the taps
// q[1] and q[0], which give a working but not maximal-length register.
package bist_pkg;

  typedef enum logic [1:0] {
    B_SHIFT  = 2'b00,   // serial shift-in (MS=0) / one-cycle pattern generation (MS=1)
    B_MISR   = 2'b01,   // signature register / Phase 1 pattern mixing
    B_RESET  = 2'b10,   // clear all stages
    B_NORMAL = 2'b11    // parallel load of PPOs (functional mode)
  } bilbo_mode_e;

  typedef enum logic [1:0] {
    PI_HOLD  = 2'b00,
    PI_SHIFT = 2'b01,   // part of the scan chain
    PI_STEP  = 2'b10,   // advance the LFSR by one state
    PI_CLEAR = 2'b11
  } pi_mode_e;

  localparam int unsigned CNT_W = 16;   // width of per-segment pattern counters

  typedef struct packed {
    logic             phase2;   // 0: Phase 1 (MS=0, 2 cycles/pattern), 1: Phase 2 (MS=1, 1 cycle/pattern)
    logic [CNT_W-1:0] n_rand;   // pseudo-random patterns after the deterministic vector
    logic             last;     // last segment of the test program
  } seg_t;

  // Tap mask for a Fibonacci register q[N-1:0] that shifts toward q[0] and feeds
  // the XOR of the tapped stages into q[N-1].
  function automatic logic [63:0] default_taps_lo(input int unsigned n);
    case (n)
      3:  return 64'h3;      4:  return 64'h3;      5:  return 64'h5;
      6:  return 64'h3;      7:  return 64'h3;      8:  return 64'h1d;
      9:  return 64'h11;     10: return 64'h9;      11: return 64'h5;
      12: return 64'h941;    13: return 64'h1601;   14: return 64'h2a01;
      15: return 64'h3;      16: return 64'h100b;   17: return 64'h9;
      18: return 64'h81;     19: return 64'h62001;  20: return 64'h9;
      21: return 64'h5;      22: return 64'h3;      23: return 64'h21;
      default: return 64'h3;
    endcase
  endfunction

endpackage
