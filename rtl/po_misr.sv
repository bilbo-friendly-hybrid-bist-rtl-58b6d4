// po_misr: multiple-input signature register on the CUT's primary outputs (POs).
//
// With en=1 it compacts one PO word per clock: q[i] <= po[i] ^ q[i+1] and
// q[N-1] <= po[N-1] ^ (XOR of the tapped stages). clr=1 zeroes it (clr wins over
// en). The signature is read in parallel on sig. The paper states only that the
// POs go to a MISR; the register form, tap mask, clear input and parallel read-out
// are this design's choices. Changes take effect at the next rising clock edge.
module po_misr
  import bist_pkg::*;
#(
  parameter int unsigned  N    = 152,
  parameter logic [N-1:0] TAPS = N'(default_taps_lo(N))
) (
  input  logic         clk,
  input  logic         clr,
  input  logic         en,
  input  logic [N-1:0] po,
  output logic [N-1:0] sig
);

  logic [N-1:0] q;

  always_ff @(posedge clk) begin
    if (clr)     q <= '0;
    else if (en) q <= po ^ N'({^(q & TAPS), q} >> 1);
  end

  assign sig = q;

endmodule
