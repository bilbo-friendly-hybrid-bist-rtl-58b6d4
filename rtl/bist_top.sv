// bist_top: the BIST-inserted system, a CUT in Huffman form whose flip-flops are
// replaced by an IP-BILBO, with an LFSR on the primary inputs, a MISR on the
// primary outputs and the BIST controller.
//
// The CUT's combinational part is outside this module: it receives cut_pi (from
// the PI LFSR) and cut_ppi (the IP-BILBO state) and returns cut_po (to the PO
// MISR) and cut_ppo (next state, to the IP-BILBO). The scan chain runs
// si -> PI LFSR (N_PI stages) -> IP-BILBO (N_FF stages) -> so, so a deterministic
// vector of N_PI+N_FF bits is shifted in N_PI+N_FF cycles: the first bit shifted
// in ends in IP-BILBO stage 0, the last in PI stage N_PI-1. The external tester feeds the segment program
// (seg_t, valid/ready), drives si while scan_en=1, compares so while so_sig=1
// against golden BILBO signatures and reads po_sig at the end. Timing and the
// test sequence are those of bist_controller. The overall structure (PI LFSR,
// PO MISR, BILBO-integrated state, controller) follows the paper; the chain
// order, the ports and the default sizes, those of the ISCAS-89 circuit
// s13207.1 (62 PIs, 152 POs, 638 flip-flops), are this design's choices.
module bist_top
  import bist_pkg::*;
#(
  parameter int unsigned N_PI = 62,
  parameter int unsigned N_PO = 152,
  parameter int unsigned N_FF = 638,
  parameter int unsigned P1_CYCLES = 2    // clocks per Phase 1 pattern
) (
  input  logic            clk,
  input  logic            rst_n,
  // tester
  input  logic            start,
  input  logic            seg_valid,
  output logic            seg_ready,
  input  seg_t            seg,
  input  logic            si,
  output logic            so,
  output logic            scan_en,
  output logic            so_sig,
  output logic            busy,
  output logic            done,
  output logic [N_PO-1:0] po_sig,
  output logic [31:0]     n_det,
  output logic [31:0]     n_ph1,
  output logic [31:0]     n_ph2,
  output logic [31:0]     n_cycles,
  output logic [31:0]     n_stall,
  // combinational part of the CUT
  output logic [N_PI-1:0] cut_pi,
  output logic [N_FF-1:0] cut_ppi,
  input  logic [N_PO-1:0] cut_po,
  input  logic [N_FF-1:0] cut_ppo
);

  logic     b1, b2, ms, bilbo_ce, po_en, po_clr, pi_so;
  pi_mode_e pi_mode;

  bist_controller #(.N_PI(N_PI), .N_FF(N_FF), .P1_CYCLES(P1_CYCLES)) u_ctrl (
    .clk, .rst_n, .start, .seg_valid, .seg_ready, .seg,
    .b1, .b2, .ms, .bilbo_ce, .pi_mode, .po_en, .po_clr, .scan_en, .so_sig,
    .busy, .done, .n_det, .n_ph1, .n_ph2, .n_cycles, .n_stall
  );

  pi_lfsr #(.N(N_PI)) u_pi (
    .clk, .mode(pi_mode), .si, .pi(cut_pi), .so(pi_so)
  );

  ip_bilbo #(.N(N_FF)) u_bilbo (
    .clk, .ce(bilbo_ce), .b1, .b2, .ms, .si(pi_so), .ppo(cut_ppo), .ppi(cut_ppi), .so
  );

  po_misr #(.N(N_PO)) u_po (
    .clk, .clr(po_clr), .en(po_en), .po(cut_po), .sig(po_sig)
  );

endmodule
