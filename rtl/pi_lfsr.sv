// pi_lfsr: pattern source for the CUT's primary inputs (PIs).
//
// A Fibonacci LFSR of N stages that also serves as the head of the scan chain,
// so that a deterministic vector can be shifted into the PIs together with the
// IP-BILBO. Stage N-1 takes the scan input, stage 0 is the scan output.
// Modes (pi_mode_e): PI_HOLD keeps the state, PI_SHIFT shifts si in, PI_STEP
// advances the LFSR once (q[N-1] <= XOR of the tapped stages), PI_CLEAR zeroes it.
// The paper only states that the PIs are fed by an LFSR; the shift path, the
// mode set, the tap mask and the moment it steps (once per new pseudo-random
// pattern, chosen by the controller) are this design's choices. An all-zero
// state stays all-zero in PI_STEP, as in any XOR LFSR. Changes take effect at
// the next rising clock edge.
module pi_lfsr
  import bist_pkg::*;
#(
  parameter int unsigned  N    = 62,
  parameter logic [N-1:0] TAPS = N'(default_taps_lo(N))
) (
  input  logic         clk,
  input  pi_mode_e     mode,
  input  logic         si,
  output logic [N-1:0] pi,
  output logic         so
);

  logic [N-1:0] q;

  always_ff @(posedge clk) begin
    unique case (mode)
      PI_SHIFT: q <= {si, q[N-1:1]};
      PI_STEP:  q <= {^(q & TAPS), q[N-1:1]};
      PI_CLEAR: q <= '0;
      default:  q <= q;
    endcase
  end

  assign pi = q;
  assign so = q[0];

endmodule
