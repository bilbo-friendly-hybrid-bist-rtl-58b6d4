// s27_comb: behavioural stand-in for a circuit under test, the combinational
// part of the ISCAS-89 benchmark s27 (4 PIs G0..G3, 1 PO G17, 3 flip-flops
// G5, G6, G7 whose next states are G10, G11, G13). Mapping: pi[k] = Gk,
// ppi = {G7, G6, G5}, ppo = {G13, G11, G10}, po = G17. When fault_en is 1, the
// net G8 is stuck at 0, to show that the BIST signatures expose a fault.
// Zero-delay combinational model; it is test equipment, not part of the design.
module s27_comb (
  input  logic [3:0] pi,
  input  logic [2:0] ppi,
  input  logic       fault_en,
  output logic [0:0] po,
  output logic [2:0] ppo
);
  logic g0, g1, g2, g3, g5, g6, g7;
  logic g8, g9, g10, g11, g12, g13, g14, g15, g16;
  assign {g3, g2, g1, g0} = pi;
  assign {g7, g6, g5}     = ppi;
  assign g14 = ~g0;
  assign g8  = fault_en ? 1'b0 : (g14 & g6);
  assign g12 = ~(g1 | g7);
  assign g15 = g12 | g8;
  assign g16 = g3 | g8;
  assign g9  = ~(g16 & g15);
  assign g11 = ~(g5 | g9);
  assign g10 = ~(g14 | g11);
  assign g13 = ~(g2 | g12);
  assign po  = ~g11;
  assign ppo = {g13, g11, g10};
endmodule
