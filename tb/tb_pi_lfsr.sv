// tb_pi_lfsr: self-checking test of the PI LFSR.
// Checks clear, serial shift of a random vector, hold, and that a 5-stage and
// an 8-stage instance with the default taps return to their seed after exactly
// 2^N-1 steps without repeating earlier (maximal period).
module tb_pi_lfsr;
  import bist_pkg::*;

  logic clk = 1'b0;
  pi_mode_e mode5, mode8;
  logic si5, si8, so5, so8;
  logic [4:0] pi5;
  logic [7:0] pi8;
  int checks = 0, failures = 0;

  pi_lfsr #(.N(5)) d5 (.clk, .mode(mode5), .si(si5), .pi(pi5), .so(so5));
  pi_lfsr #(.N(8)) d8 (.clk, .mode(mode8), .si(si8), .pi(pi8), .so(so8));

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [7:0] vec, seed8, exp_step;
  logic [4:0] seed5;
  int period;

  initial begin
    si5 = 0; si8 = 0;
    mode5 = PI_CLEAR; mode8 = PI_CLEAR;
    @(negedge clk);
    check(pi5 == 0 && pi8 == 0, "clear");
    // shift a vector into the 8-bit register: first bit ends in stage 0
    vec = 8'($urandom) | 8'h01;
    mode8 = PI_SHIFT;
    for (int i = 0; i < 8; i++) begin
      si8 = vec[i];
      @(negedge clk);
    end
    check(pi8 == vec, "shift-in");
    check(so8 == vec[0], "scan out");
    mode8 = PI_HOLD;
    repeat (3) @(negedge clk);
    check(pi8 == vec, "hold");
    // one step against the tap definition (taps 8,6,5,4 -> mask 0x1d)
    exp_step = {^(vec & 8'h1d), vec[7:1]};
    mode8 = PI_STEP;
    @(negedge clk);
    check(pi8 == exp_step, "single step");
    // period of the 8-bit register
    seed8 = pi8; period = 1;
    @(negedge clk);
    while (pi8 != seed8 && period < 1000) begin period++; @(negedge clk); end
    check(period == 255, $sformatf("period 8 = %0d", period));
    // period of the 5-bit register
    mode5 = PI_SHIFT; si5 = 1;
    @(negedge clk);
    mode5 = PI_STEP; seed5 = pi5; period = 1;
    @(negedge clk);
    while (pi5 != seed5 && period < 1000) begin period++; @(negedge clk); end
    check(period == 31, $sformatf("period 5 = %0d", period));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
