// tb_bist_controller: self-checking test of the BIST controller.
// Runs two test programs on a controller with a 3-bit PI register and a 5-stage
// BILBO (chain of 8): one offered with random gaps (stalls) and one offered
// without gaps. Each cycle's control outputs are decoded into an operation
// code; the sequence with stall cycles removed is compared with the sequence
// worked out from the program (clear, CHAIN shift cycles per vector, capture+mix
// per Phase 1 pattern, one cycle per Phase 2 pattern, N_FF unload cycles). The
// counters are checked against the program, and the test cycle count against
// n_det*CHAIN + P1*n_ph1 + n_ph2 with P1 = 2 cycles per Phase 1 pattern.
module tb_bist_controller;
  import bist_pkg::*;

  localparam int unsigned N_PI = 3, N_FF = 5, CHAIN = N_PI + N_FF;
  localparam int unsigned P1 = 2;   // cycles per Phase 1 pattern

  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0, seg_valid = 1'b0, seg_ready;
  seg_t seg;
  logic b1, b2, ms, bilbo_ce, po_en, po_clr, scan_en, so_sig, busy, done;
  pi_mode_e pi_mode;
  logic [31:0] n_det, n_ph1, n_ph2, n_cycles, n_stall;
  int checks = 0, failures = 0;

  bist_controller #(.N_PI(N_PI), .N_FF(N_FF), .P1_CYCLES(P1)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // operation code of the current cycle, from the outputs only
  function automatic byte op();
    if (!bilbo_ce)                                   return "W";
    if ({b2, b1} == 2'b10 && po_clr)                 return "C";
    if (scan_en && {b2, b1} == 2'b00 && pi_mode == PI_SHIFT) return "S";
    if ({b2, b1} == 2'b11 && po_en && !ms)           return "A";
    if ({b2, b1} == 2'b01 && po_en && pi_mode == PI_STEP && !ms) return "M";
    if ({b2, b1} == 2'b01 && po_en && pi_mode == PI_HOLD && !ms) return "m";
    if ({b2, b1} == 2'b00 && po_en && ms && pi_mode == PI_STEP) return "P";
    if ({b2, b1} == 2'b00 && so_sig && !scan_en)     return "U";
    return "?";
  endfunction

  seg_t prog [$];
  byte  exp_ops [$];
  byte  got_ops [$];
  int   stalls, sig_cycles, busy_cycles;

  task automatic run(input bit gaps);
    int np1 = 0, np2 = 0, nseg;
    prog.delete(); exp_ops.delete(); got_ops.delete();
    nseg = $urandom_range(3, 6);
    for (int s = 0; s < nseg; s++) begin
      seg_t g;
      g.phase2 = (s >= nseg / 2);
      g.n_rand = CNT_W'($urandom_range(0, 6));
      if (s == 0) g.n_rand = 0;               // a vector with no random run
      g.last   = (s == nseg - 1);
      prog.push_back(g);
    end
    exp_ops.push_back("C");
    foreach (prog[s]) begin
      repeat (CHAIN) exp_ops.push_back("S");
      for (int k = 0; k < int'(prog[s].n_rand); k++)
        if (prog[s].phase2) begin exp_ops.push_back("P"); np2++; end
        else begin
          if (P1 > 1) exp_ops.push_back("A");
          repeat (int'(P1) - 2) exp_ops.push_back("m");
          exp_ops.push_back("M");
          np1++;
        end
    end
    repeat (N_FF) exp_ops.push_back("U");
    stalls = 0; sig_cycles = 0; busy_cycles = 0;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    fork
      begin : tester
        foreach (prog[s]) begin
          if (gaps) repeat ($urandom_range(0, 3)) @(negedge clk);
          seg = prog[s];
          seg_valid = 1;
          #1;
          while (!seg_ready) begin @(negedge clk); #1; end
          @(negedge clk);
          seg_valid = 0;
        end
      end
      begin : monitor
        while (!done) begin
          if (busy) begin
            byte o = op();
            busy_cycles++;
            if (so_sig) sig_cycles++;
            if (o == "W") stalls++; else got_ops.push_back(o);
          end
          @(negedge clk);
        end
      end
    join
    check(got_ops.size() == exp_ops.size(),
          $sformatf("sequence length %0d exp %0d", got_ops.size(), exp_ops.size()));
    foreach (exp_ops[i])
      if (i < got_ops.size() && got_ops[i] != exp_ops[i]) begin
        check(0, $sformatf("op %0d is %c exp %c", i, got_ops[i], exp_ops[i]));
        break;
      end
    check(n_det == prog.size(), "n_det");
    check(n_ph1 == np1, "n_ph1");
    check(n_ph2 == np2, "n_ph2");
    check(n_cycles == prog.size() * CHAIN + P1 * np1 + np2,
          $sformatf("test cycles %0d exp %0d", n_cycles, prog.size() * CHAIN + P1 * np1 + np2));
    check(n_stall == stalls, "stall count");
    check(sig_cycles == (prog.size() + 1) * N_FF, "signature cycles");
    check(busy_cycles == 1 + int'(n_cycles) + stalls + N_FF, "busy cycles");
    if (!gaps) check(stalls == 0, "no stall without gaps");
    $display("program of %0d segments: %0d ph1, %0d ph2 patterns, %0d test cycles, %0d stalls",
             prog.size(), np1, np2, n_cycles, stalls);
  endtask

  initial begin
    seg = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 6; r++) run(r % 2 == 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
