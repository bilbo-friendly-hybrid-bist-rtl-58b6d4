// tb_ip_bilbo: self-checking test of the IP-BILBO.
// Drives random modes, MS, clock enable, scan input and PPO words for 4000
// cycles on a 13-stage instance and compares the register after every clock
// with a bit-by-bit model of the four BILBO modes and of the MS feedback
// multiplexers written from the mode definitions. A second phase runs the
// MS=1 shift mode against a CUT stand-in whose PPOs invert the PPIs (a two-state
// loop for a plain BILBO in normal mode) and checks that MS=1 leaves that loop.
module tb_ip_bilbo;
  import bist_pkg::*;

  localparam int unsigned N = 13;
  localparam logic [N-1:0] T = 13'h1601;

  logic clk = 1'b0;
  logic ce, b1, b2, ms, si, so;
  logic [N-1:0] ppo, ppi, model;
  int checks = 0, failures = 0;

  ip_bilbo #(.N(N), .TAPS(T)) dut (.clk, .ce, .b1, .b2, .ms, .si, .ppo, .ppi, .so);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [N-1:0] next_state(logic [N-1:0] q, logic [N-1:0] p,
                                              logic c, logic bb2, logic bb1,
                                              logic m, logic s);
    logic f;
    logic [N-1:0] r;
    f = q[0] & T[0];
    for (int i = 1; i < N; i++) f ^= m ? p[i] : (q[i] & T[i]);
    if (!c) return q;
    if (bb2 && !bb1) return '0;
    if (bb2 && bb1) return p;
    for (int i = 0; i < N - 1; i++) r[i] = q[i + 1];
    if (bb1) begin
      r[N-1] = f;
      r ^= p;
    end else begin
      r[N-1] = m ? f : s;
    end
    return r;
  endfunction

  int distinct;
  logic [N-1:0] seen [$];

  initial begin
    // start from a known state
    ce = 1; b2 = 1; b1 = 0; ms = 0; si = 0; ppo = '0;
    @(negedge clk);
    model = '0;
    @(negedge clk);
    for (int k = 0; k < 4000; k++) begin
      ce  = ($urandom_range(0, 7) != 0);
      {b2, b1} = 2'($urandom_range(0, 3));
      if ($urandom_range(0, 15) == 0) {b2, b1} = 2'b10;
      else if ({b2, b1} == 2'b10) {b2, b1} = 2'b00;
      ms  = 1'($urandom);
      si  = 1'($urandom);
      ppo = N'($urandom);
      model = next_state(model, ppo, ce, b2, b1, ms, si);
      @(negedge clk);
      checks++;
      if (ppi !== model || so !== model[0]) begin
        failures++;
        if (failures < 10)
          $display("mismatch k=%0d mode=%b%b ms=%b ce=%b got %h exp %h", k, b2, b1, ms, ce, ppi, model);
      end
    end
    // loop breaking: PPO = ~PPI, MS=1 shift mode from a nonzero seed
    {b2, b1} = 2'b00; ms = 0; ce = 1;
    for (int i = 0; i < N; i++) begin si = 1'(i % 3 == 0); @(negedge clk); end
    ms = 1;
    distinct = 0;
    for (int k = 0; k < 60; k++) begin
      ppo = ~ppi;
      @(negedge clk);
      if (!(ppi inside {seen})) begin seen.push_back(ppi); distinct++; end
    end
    checks++;
    if (distinct < 10) begin
      failures++;
      $display("MS=1 produced only %0d distinct patterns", distinct);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
