// tb_po_misr: self-checking test of the PO MISR.
// Compacts random PO words on a 16-bit instance with random enable, compares
// with an independent model after every clock, checks clear priority and that a
// single flipped PO bit changes the final signature.
module tb_po_misr;
  import bist_pkg::*;

  localparam int unsigned N = 16;
  localparam logic [N-1:0] T = 16'h100b;

  logic clk = 1'b0;
  logic clr, en;
  logic [N-1:0] po, sig, model, sig_good;
  logic [N-1:0] words [200];
  int checks = 0, failures = 0;

  po_misr #(.N(N)) dut (.clk, .clr, .en, .po, .sig);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [N-1:0] step(logic [N-1:0] q, logic [N-1:0] p);
    logic f = 1'b0;
    for (int i = 0; i < N; i++) if (T[i]) f ^= q[i];
    return p ^ {f, q[N-1:1]};
  endfunction

  initial begin
    clr = 1; en = 1; po = '1;
    @(negedge clk);
    checks++; if (sig != 0) begin failures++; $display("clear priority"); end
    clr = 0; model = '0;
    for (int k = 0; k < 500; k++) begin
      en = ($urandom_range(0, 3) != 0);
      po = N'($urandom);
      if (en) model = step(model, po);
      @(negedge clk);
      checks++;
      if (sig != model) begin
        failures++;
        if (failures < 10) $display("k=%0d got %h exp %h", k, sig, model);
      end
    end
    // single-bit error detection
    for (int k = 0; k < 200; k++) words[k] = N'($urandom);
    for (int pass = 0; pass < 2; pass++) begin
      clr = 1; @(negedge clk); clr = 0; en = 1;
      for (int k = 0; k < 200; k++) begin
        po = words[k];
        if (pass == 1 && k == 77) po[5] = ~po[5];
        @(negedge clk);
      end
      if (pass == 0) sig_good = sig;
    end
    checks++;
    if (sig == sig_good) begin failures++; $display("single-bit error not detected"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
