// ip_bilbo: irregular-polynomial BILBO (IP-BILBO), the state register of the
// circuit under test (CUT) with built-in pattern generation and compaction.
//
// The N stages replace the CUT's flip-flops: q drives the pseudo-primary inputs
// (PPI) and the CUT's next-state outputs (PPO) come back in. Stage N-1 is the
// scan input end, stage 0 the scan output end (so = q[0]).
// Modes, selected by {b2,b1} as in a common BILBO:
//   10  all stages cleared
//   11  normal: q <= ppo
//   01  MISR:   q[i] <= ppo[i] ^ q[i+1], q[N-1] <= ppo[N-1] ^ fb
//   00  shift:  q[i] <= q[i+1],          q[N-1] <= (ms ? fb : si)
// The feedback fb is the XOR of N terms. Stage 0 always contributes q[0]&TAPS[0];
// every stage i >= 1 contributes a 2:1 multiplexer output selected by ms:
// TAPS[i]&q[i] (the fixed polynomial) when ms=0, ppo[i] when ms=1. With ms=1 the
// CUT outputs therefore act as the polynomial's varying coefficients, and in
// shift mode the register produces a new pattern every cycle without being
// loaded directly from the PPOs, which breaks the state loops a plain
// PPO-reseeded BILBO can fall into. With ms=0 the block is a common BILBO.
// The mode list, the ms multiplexers per stage, the PPO-to-multiplexer wiring and
// the ms selection of the first-stage input follow the paper; which line selects
// between si and fb in the base BILBO (b1 here) and the tap mask are choices of
// this design, as is the clock enable ce, which freezes all stages so a
// controller can wait without losing a signature. One register stage per bit, no pipeline: every mode takes effect
// at the next rising clock edge.
module ip_bilbo
  import bist_pkg::*;
#(
  parameter int unsigned    N    = 638,
  parameter logic [N-1:0]   TAPS = N'(default_taps_lo(N))
) (
  input  logic         clk,
  input  logic         ce,     // clock enable (this design's addition)
  input  logic         b1,
  input  logic         b2,
  input  logic         ms,     // mode select: 0 regular polynomial, 1 PPO feedback
  input  logic         si,     // scan in
  input  logic [N-1:0] ppo,    // pseudo-primary outputs of the CUT
  output logic [N-1:0] ppi,    // pseudo-primary inputs of the CUT
  output logic         so      // scan out
);

  logic [N-1:0] q;
  logic [N-1:0] fb_terms;
  logic         fb;
  logic         ser_in;

  always_comb begin
    fb_terms[0] = q[0] & TAPS[0];
    for (int i = 1; i < int'(N); i++)
      fb_terms[i] = ms ? ppo[i] : (q[i] & TAPS[i]);
  end

  assign fb     = ^fb_terms;
  // ms multiplexer in front of the scan input, then the base BILBO's si/fb select.
  assign ser_in = b1 ? fb : (ms ? fb : si);

  always_ff @(posedge clk) begin
    if (ce) unique case ({b2, b1})
      B_RESET:  q <= '0;
      B_NORMAL: q <= ppo;
      B_MISR:   q <= ppo ^ {ser_in, q[N-1:1]};
      default:  q <= {ser_in, q[N-1:1]};          // B_SHIFT
    endcase
  end

  assign ppi = q;
  assign so  = q[0];

endmodule
