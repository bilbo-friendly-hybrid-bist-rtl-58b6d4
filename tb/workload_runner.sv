// workload_runner: runs one Table-I-style test schedule on a bist_top sized for
// one benchmark circuit, with a wide_cut stand-in of the same size.
// The schedule has PMDV deterministic vectors; the first half of them are Phase 1
// segments sharing PH1 pseudo-random patterns, the rest Phase 2 segments sharing
// PH2 patterns (spread as evenly as integers allow). Vector bits are random.
// The next segment is offered as soon as the previous one is taken, so the run
// has no stall. When the controller reports done, the runner compares the measured test cycles
// with PMTC and the counters with PMDV, PH1 and PH2, and raises finished.
module workload_runner
  import bist_pkg::*;
#(
  parameter int    N_PI = 4,
  parameter int    N_PO = 1,
  parameter int    N_FF = 3,
  parameter int    PMDV = 2,
  parameter int    PH1  = 1,
  parameter int    PH2  = 1,
  parameter int    PMTC = 16
) (
  input  logic clk,
  input  logic rst_n,
  output logic finished,
  output int   checks,
  output int   failures,
  output int   cycles,
  output int   stalls
);
  localparam int CHAIN = N_PI + N_FF;
  localparam int NP1   = (PMDV + 1) / 2;   // Phase 1 segments
  localparam int NP2   = PMDV - NP1;

  logic start = 1'b0, seg_valid = 1'b0, seg_ready, si = 1'b0, so;
  logic scan_en, so_sig, busy, done;
  seg_t seg = '0;
  logic [N_PO-1:0] po_sig, cut_po;
  logic [31:0] n_det, n_ph1, n_ph2, n_cycles, n_stall;
  logic [N_PI-1:0] cut_pi;
  logic [N_FF-1:0] cut_ppi, cut_ppo;

  bist_top #(.N_PI(N_PI), .N_PO(N_PO), .N_FF(N_FF)) u_sys (.*);
  wide_cut #(.P(N_PI), .O(N_PO), .F(N_FF)) u_cut (.pi(cut_pi), .ppi(cut_ppi), .fault_en(1'b0),
                                                  .po(cut_po), .ppo(cut_ppo));

  // scan data: a random bit in every cycle the chain shifts a vector in
  always @(negedge clk) if (scan_en) si <= 1'($urandom);

  function automatic int share(int total, int parts, int idx);
    return total / parts + ((idx < total % parts) ? 1 : 0);
  endfunction

  initial begin
    finished = 0; checks = 0; failures = 0; cycles = 0; stalls = 0;
    @(posedge rst_n);
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    for (int s = 0; s < PMDV; s++) begin
      seg.phase2 = (s >= NP1);
      seg.n_rand = CNT_W'(seg.phase2 ? share(PH2, NP2, s - NP1) : share(PH1, NP1, s));
      seg.last   = (s == PMDV - 1);
      seg_valid  = 1;
      #1;
      while (!seg_ready) begin @(negedge clk); #1; end
      @(negedge clk);
      seg_valid = 0;
    end
    while (!done) @(negedge clk);
    cycles = int'(n_cycles);
    stalls = int'(n_stall);
    checks = 4;
    if (n_cycles != 32'(PMTC)) failures++;
    if (n_det != 32'(PMDV))    failures++;
    if (n_ph1 != 32'(PH1))     failures++;
    if (n_ph2 != 32'(PH2))     failures++;
    finished = 1;
  end
endmodule
