// tb_loop_example: the repeating-loop case that motivates the IP-BILBO, on a
// 3-stage IP-BILBO (taps q[1], q[0]) and a 3-bit CUT stand-in chosen so that
// PPI 101 gives PPO 110 and the BILBO's capture-and-mix step turns 110 back into
// 101 (CUT: f(101) = 110, f(110) = 010, otherwise f(x) = x ^ 011).
// With MS=0 (Phase 1: mode 11 then 01) every pattern is 101: the test is stuck.
// With MS=1 (mode 00) the same start gives 101, 110, 111, 011, 101, ...: four
// different patterns, worked out by hand from the feedback equation
// fb = q[0] ^ ppo[2] ^ ppo[1]. Both sequences are checked pattern by pattern.
module tb_loop_example;
  logic clk = 1'b0;
  logic ce = 1'b1, b1, b2, ms, si = 1'b0, so;
  logic [2:0] ppi, ppo;
  int checks = 0, failures = 0;

  ip_bilbo #(.N(3), .TAPS(3'b011)) dut (.clk, .ce, .b1, .b2, .ms, .si, .ppo, .ppi, .so);

  always_comb begin
    unique case (ppi)
      3'b101:  ppo = 3'b110;
      3'b110:  ppo = 3'b010;
      default: ppo = ppi ^ 3'b011;
    endcase
  end

  always #5 clk = ~clk;

  initial begin
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load(input logic [2:0] v);
    {b2, b1} = 2'b00; ms = 0;
    for (int i = 0; i < 3; i++) begin si = v[i]; @(negedge clk); end
  endtask

  localparam logic [2:0] MS1_SEQ [4] = '{3'b110, 3'b111, 3'b011, 3'b101};

  initial begin
    @(negedge clk);
    load(3'b101);
    checks++; if (ppi != 3'b101) begin failures++; $display("seed not loaded"); end
    // Phase 1 procedure, MS = 0
    for (int k = 0; k < 8; k++) begin
      {b2, b1} = 2'b11; @(negedge clk);
      {b2, b1} = 2'b01; @(negedge clk);
      checks++;
      if (ppi != 3'b101) begin failures++; $display("MS=0 pattern %0d = %b", k, ppi); end
    end
    $display("MS=0: the pattern stays at %b", ppi);
    // Phase 2 procedure, MS = 1
    ms = 1; {b2, b1} = 2'b00;
    for (int k = 0; k < 8; k++) begin
      @(negedge clk);
      checks++;
      if (ppi != MS1_SEQ[k % 4]) begin
        failures++;
        $display("MS=1 pattern %0d = %b, expected %b", k, ppi, MS1_SEQ[k % 4]);
      end
    end
    $display("MS=1: the pattern sequence leaves the loop");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
