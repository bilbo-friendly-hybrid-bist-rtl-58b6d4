// tb_table1_workloads: replays the test schedules of the six ISCAS-89 circuits
// of the evaluation table on systems sized for each circuit, all in parallel.
// Per circuit the table gives #PMDV (deterministic vectors), #PRTP (pseudo-random
// patterns, both phases) and #PMTC (test clocks); the Phase 1 / Phase 2 split is
// recovered from PMTC = PMDV*(PIs+PPIs) + 2*PH1 + PH2 with PH1 + PH2 = PRTP, so
// PH1 = PMTC - PMDV*(PIs+PPIs) - PRTP. The PI / PO / flip-flop counts are those of
// the published benchmarks (their PI+FF sums equal the table's PIs+PPIs). Each
// run must take exactly PMTC test cycles with no stall; the improvement over a
// serial-scan (RTS) test, (RTC-PMTC)/RTC with RTC = ADV*(PIs+PPIs), is printed
// and checked against the table's rounded percentage.
module tb_table1_workloads;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  localparam int NC = 6;
  //                      s1238 s1423 s1494 s5378  s13207.1 s15850.1
  localparam int PI  [NC] = '{14,   17,   8,    35,    62,     77};
  localparam int PO  [NC] = '{14,   5,    19,   49,    152,    150};
  localparam int FF  [NC] = '{18,   74,   6,    179,   638,    534};
  localparam int ADV [NC] = '{149,  69,   129,  263,   466,    448};
  localparam int PRTP[NC] = '{726,  916,  275,  5270,  4740,   2696};
  localparam int PMDV[NC] = '{58,   13,   48,   37,    185,    249};
  localparam int PMTC[NC] = '{2583, 2233, 966,  13189, 134241, 154840};
  localparam int IMP [NC] = '{46,   64,   47,   77,    59,     43};

  function automatic int ph1(int c);
    return PMTC[c] - PMDV[c] * (PI[c] + FF[c]) - PRTP[c];
  endfunction

  logic fin [NC];
  int   ck [NC], fl [NC], cy [NC], st [NC];

  for (genvar c = 0; c < NC; c++) begin : g_circ
    workload_runner #(
      .N_PI(PI[c]), .N_PO(PO[c]), .N_FF(FF[c]), .PMDV(PMDV[c]),
      .PH1(ph1(c)), .PH2(PRTP[c] - ph1(c)), .PMTC(PMTC[c])
    ) u_run (.clk, .rst_n, .finished(fin[c]), .checks(ck[c]), .failures(fl[c]),
             .cycles(cy[c]), .stalls(st[c]));
  end

  int checks = 0, failures = 0;

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int rtc, imp;
    bit all;
    repeat (2) @(negedge clk);
    rst_n = 1;
    do begin
      @(negedge clk);
      all = 1;
      foreach (fin[c]) all &= fin[c];
    end while (!all);
    for (int c = 0; c < NC; c++) begin
      rtc = ADV[c] * (PI[c] + FF[c]);
      imp = (200 * (rtc - cy[c]) + rtc) / (2 * rtc);   // rounded percentage
      $display("circuit %0d: PIs+PPIs=%0d PMDV=%0d PH1=%0d PH2=%0d cycles=%0d (table %0d) RTC=%0d improvement %0d%% (table %0d%%)",
               c, PI[c] + FF[c], PMDV[c], ph1(c), PRTP[c] - ph1(c), cy[c], PMTC[c], rtc, imp, IMP[c]);
      checks += ck[c] + 2;
      failures += fl[c];
      if (st[c] != 0) failures++;
      if (imp != IMP[c]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
