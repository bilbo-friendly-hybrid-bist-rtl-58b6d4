// tb_bist_top_full: end-to-end test of the BIST-inserted system at its default
// size (62 PIs, 152 POs, 638 flip-flops, the size of ISCAS-89 s13207.1), with a
// synthetic stand-in CUT of that size. Same procedure as the small end-to-end
// test: a program of deterministic vectors followed by Phase 1 and Phase 2
// pseudo-random runs, with tester gaps (stalls); the BILBO signature bits on so
// and the final PO signature are compared with a golden model written here, the
// test cycle count with n_det*(PIs+PPIs) + 2*n_ph1 + n_ph2, and a second run with
// a stuck-at fault in the CUT must change the signatures.
module tb_bist_top_full;
  import bist_pkg::*;

  localparam int unsigned N_PI = 62, N_PO = 152, N_FF = 638, CHAIN = N_PI + N_FF;
  localparam logic [N_PI-1:0] T_PI = N_PI'(3);   // taps of the default polynomials
  localparam logic [N_FF-1:0] T_FF = N_FF'(3);
  localparam logic [N_PO-1:0] T_PO = N_PO'(3);
  localparam int NSEG = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0, seg_valid = 1'b0, seg_ready, si = 1'b0, so;
  logic scan_en, so_sig, busy, done;
  seg_t seg;
  logic [N_PO-1:0] po_sig, cut_po;
  logic [31:0] n_det, n_ph1, n_ph2, n_cycles, n_stall;
  logic [N_PI-1:0] cut_pi;
  logic [N_FF-1:0] cut_ppi, cut_ppo;
  logic fault_en = 1'b0;
  int checks = 0, failures = 0;

  bist_top dut (.*);
  wide_cut u_cut (.pi(cut_pi), .ppi(cut_ppi), .fault_en, .po(cut_po), .ppo(cut_ppo));

  always #5 clk = ~clk;

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- golden model ----------------
  function automatic void cut_model(input logic [N_PI-1:0] p, input logic [N_FF-1:0] s,
                              output logic [N_PO-1:0] o, output logic [N_FF-1:0] n);
    // golden (fault-free) CUT, the function of wide_cut
    for (int i = 0; i < int'(N_FF); i++)
      n[i] = s[(i + 1) % N_FF] ^ (s[(7 * i + 3) % N_FF] & p[i % N_PI])
           ^ (s[(13 * i + 5) % N_FF] | s[(3 * i + 1) % N_FF]);
    for (int j = 0; j < int'(N_PO); j++)
      o[j] = s[(4 * j) % N_FF] ^ (p[j % N_PI] & s[(9 * j + 2) % N_FF]);
  endfunction

  seg_t             prog [NSEG];
  logic [CHAIN-1:0] vecs [NSEG];
  logic             exp_so [$];
  logic [N_PO-1:0]  exp_po_sig;

  function automatic logic [N_PO-1:0] misr(logic [N_PO-1:0] m, logic [N_PO-1:0] o);
    return o ^ N_PO'({^(m & T_PO), m} >> 1);
  endfunction

  task automatic golden();
    logic [N_PI-1:0] mp = '0;
    logic [N_FF-1:0] mq = '0, ppo;
    logic [N_PO-1:0] mm = '0, po;
    logic fb;
    exp_so.delete();
    for (int s = 0; s < NSEG; s++) begin
      for (int j = 0; j < int'(CHAIN); j++) begin
        if (j < int'(N_FF)) exp_so.push_back(mq[0]);
        mq = {mp[0], mq[N_FF-1:1]};
        mp = {vecs[s][j], mp[N_PI-1:1]};
      end
      for (int k = 0; k < int'(prog[s].n_rand); k++) begin
        if (!prog[s].phase2) begin
          cut_model(mp, mq, po, ppo); mm = misr(mm, po); mq = ppo;                  // 11
          cut_model(mp, mq, po, ppo); mm = misr(mm, po);                            // 01
          mq = ppo ^ {^(mq & T_FF), mq[N_FF-1:1]};
          mp = {^(mp & T_PI), mp[N_PI-1:1]};
        end else begin
          cut_model(mp, mq, po, ppo); mm = misr(mm, po);                            // 00, MS=1
          fb = mq[0] & T_FF[0];
          for (int i = 1; i < int'(N_FF); i++) fb ^= ppo[i];
          mq = {fb, mq[N_FF-1:1]};
          mp = {^(mp & T_PI), mp[N_PI-1:1]};
        end
      end
    end
    for (int j = 0; j < int'(N_FF); j++) begin
      exp_so.push_back(mq[0]);
      mq = {mp[0], mq[N_FF-1:1]};
    end
    exp_po_sig = mm;
  endtask

  // ---------------- mechanism counters ----------------
  int m_clear, m_shift, m_ph1, m_ph2, m_switch, m_norand, m_stall, m_unload, m_detect;
  int sig_mismatch;

  task automatic run(input bit faulty);
    int idx = 0, np1 = 0, np2 = 0;
    logic got_so [$];
    fault_en = faulty;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    m_clear++;
    fork
      begin : tester
        for (int s = 0; s < NSEG; s++) begin
          if ($urandom_range(0, 2) == 0) repeat ($urandom_range(1, 3)) @(negedge clk);
          seg = prog[s];
          seg_valid = 1;
          #1;
          while (!seg_ready) begin @(negedge clk); #1; end
          @(negedge clk);
          seg_valid = 0;
          // drive the vector while the chain shifts it in
          for (int j = 0; j < int'(CHAIN); j++) begin
            si = vecs[s][j];
            #1;
            if (!scan_en) begin check(0, "scan_en low during shift-in"); end
            @(negedge clk);
          end
          si = 0;
        end
      end
      begin : monitor
        while (!done) begin
          if (so_sig) got_so.push_back(so);
          if (busy && !scan_en && so_sig) m_unload++;
          @(negedge clk);
        end
      end
    join
    sig_mismatch = 0;
    if (got_so.size() != exp_so.size()) sig_mismatch++;
    foreach (exp_so[i]) if (i < got_so.size() && got_so[i] != exp_so[i]) sig_mismatch++;
    if (po_sig != exp_po_sig) sig_mismatch++;
    foreach (prog[s]) if (prog[s].phase2) np2 += prog[s].n_rand; else np1 += prog[s].n_rand;
    check(n_det == NSEG, "deterministic vector count");
    check(n_ph1 == np1 && n_ph2 == np2, "pattern counts");
    check(n_cycles == NSEG * CHAIN + 2 * np1 + np2,
          $sformatf("test cycles %0d, expected %0d", n_cycles, NSEG * CHAIN + 2 * np1 + np2));
    m_stall += n_stall;
    m_shift += n_det;
    m_ph1   += n_ph1;
    m_ph2   += n_ph2;
    if (!faulty) begin
      check(got_so.size() == exp_so.size(), "signature length");
      foreach (exp_so[i]) begin
        checks++;
        if (i >= got_so.size() || got_so[i] != exp_so[i]) failures++;
      end
      check(po_sig == exp_po_sig, "PO signature");
      $display("fault-free: %0d signature bits, %0d test cycles, %0d stalls", got_so.size(), n_cycles, n_stall);
    end else begin
      if (sig_mismatch > 0) m_detect++;
      $display("stuck-at fault: %0d signature mismatches", sig_mismatch);
    end
  endtask

  initial begin
    seg = '0;
    for (int s = 0; s < NSEG; s++) begin
      prog[s].phase2 = (s >= NSEG / 2);
      prog[s].n_rand = CNT_W'($urandom_range(1, prog[s].phase2 ? 300 : 150));
      if (s == 3) prog[s].n_rand = 0;
      prog[s].last   = (s == NSEG - 1);
      for (int j = 0; j < int'(CHAIN); j++) vecs[s][j] = 1'($urandom);
      if (s > 0 && prog[s].phase2 && !prog[s-1].phase2) m_switch++;
      if (prog[s].n_rand == 0) m_norand++;
    end
    golden();
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(1'b0);
    run(1'b1);
    $display("mechanisms: clear=%0d shift-in=%0d ph1=%0d ph2=%0d switch=%0d no-random=%0d stall=%0d unload=%0d detect=%0d",
             m_clear, m_shift, m_ph1, m_ph2, m_switch, m_norand, m_stall, m_unload, m_detect);
    check(m_clear > 0, "clear never happened");
    check(m_shift > 0, "shift-in never happened");
    check(m_ph1 > 0, "Phase 1 pattern never happened");
    check(m_ph2 > 0, "Phase 2 pattern never happened");
    check(m_switch > 0, "phase switch never happened");
    check(m_norand > 0, "vector without random run never happened");
    check(m_stall > 0, "stall never happened");
    check(m_unload > 0, "signature unload never happened");
    check(m_detect > 0, "stuck-at fault not detected");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
