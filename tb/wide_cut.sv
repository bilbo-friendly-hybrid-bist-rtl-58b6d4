// wide_cut: behavioural stand-in for a large circuit under test, sized like the
// ISCAS-89 circuit s13207.1 (62 PIs, 152 POs, 638 flip-flops) but with a
// synthetic function, since that netlist is not part of this design:
//   ppo[i] = ppi[(i+1)%F] ^ (ppi[(7i+3)%F] & pi[i%P]) ^ (ppi[(13i+5)%F] | ppi[(3i+1)%F])
//   po[j]  = ppi[(4j)%F] ^ (pi[j%P] & ppi[(9j+2)%F])
// With fault_en = 1, ppo[17] is stuck at 0. Zero-delay model, test equipment only.
module wide_cut #(
  parameter int P = 62,
  parameter int O = 152,
  parameter int F = 638
) (
  input  logic [P-1:0] pi,
  input  logic [F-1:0] ppi,
  input  logic         fault_en,
  output logic [O-1:0] po,
  output logic [F-1:0] ppo
);
  always_comb begin
    for (int i = 0; i < F; i++)
      ppo[i] = ppi[(i + 1) % F] ^ (ppi[(7 * i + 3) % F] & pi[i % P])
             ^ (ppi[(13 * i + 5) % F] | ppi[(3 * i + 1) % F]);
    if (fault_en) ppo[17] = 1'b0;
    for (int j = 0; j < O; j++)
      po[j] = ppi[(4 * j) % F] ^ (pi[j % P] & ppi[(9 * j + 2) % F]);
  end
endmodule
