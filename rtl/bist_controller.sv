// bist_controller: sequences the hybrid BIST test of one CUT.
//
// The test is a program of segments supplied by an external tester (seg_t over a
// valid/ready handshake). Each segment is one deterministic vector, shifted into
// the scan chain (PI register then IP-BILBO, CHAIN = N_PI + N_FF bits) in CHAIN
// cycles, followed by seg.n_rand pseudo-random patterns:
//   Phase 1 (seg.phase2=0, MS=0): P1_CYCLES (default 2) cycles per pattern, BILBO
//     mode 11 (capture the PPOs) then 01 (MISR: mix PPOs with the polynomial
//     feedback) for the remaining cycles; the PI LFSR steps on the last cycle.
//     More mix cycles give more random patterns; P1_CYCLES = 1 is a single mix.
//   Phase 2 (seg.phase2=1, MS=1): one cycle per pattern, BILBO mode 00 with PPO
//     feedback; the PI LFSR steps every cycle.
// The PO MISR compacts the POs in every pattern cycle. After start the controller
// clears the BILBO, the PI LFSR and the PO MISR for one cycle (mode 10). While a
// vector is shifted in, the previous BILBO signature leaves on so during the
// first N_FF cycles (so_sig=1). After the last segment the BILBO is shifted out
// once more (N_FF cycles, so_sig=1) and done rises.
// A segment is taken (seg_valid & seg_ready) in the last cycle of the previous
// segment or of the clear cycle, so a program that is always valid runs with no
// gap: the test cycles between the clear and the final unload are exactly
//   n_det*CHAIN + P1_CYCLES*n_ph1 + n_ph2
// as in the paper's test-time formula (PMTC). Without a valid segment the
// controller waits (stall cycles, counted separately) with the IP-BILBO frozen
// through bilbo_ce, so the pending signature is kept.
// What the hardware does per pattern follows the paper. The coverage and
// threshold decisions of the paper's flow (th1, th2, th3 = 2*th2) are made
// off-chip by fault simulation and arrive here only as the per-segment pattern
// counts; the handshake, the segment format and the counters are this design's.
module bist_controller
  import bist_pkg::*;
#(
  parameter int unsigned N_PI = 62,
  parameter int unsigned N_FF = 638,
  // cycles per Phase 1 pattern: one capture (mode 11) and P1_CYCLES-1 mix cycles
  // (mode 01); P1_CYCLES = 1 means a single mix cycle and no capture
  parameter int unsigned P1_CYCLES = 2
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        seg_valid,
  output logic        seg_ready,
  input  seg_t        seg,
  // BIST control
  output logic        b1,
  output logic        b2,
  output logic        ms,
  output logic        bilbo_ce,   // 0 freezes the IP-BILBO while waiting
  output pi_mode_e    pi_mode,
  output logic        po_en,
  output logic        po_clr,
  output logic        scan_en,    // tester drives si (deterministic vector bit)
  output logic        so_sig,     // so carries a BILBO signature bit
  output logic        busy,
  output logic        done,
  // statistics
  output logic [31:0] n_det,      // deterministic vectors applied
  output logic [31:0] n_ph1,      // Phase 1 pseudo-random patterns
  output logic [31:0] n_ph2,      // Phase 2 pseudo-random patterns
  output logic [31:0] n_cycles,   // test cycles (shift + pattern cycles)
  output logic [31:0] n_stall     // cycles spent waiting for a segment
);

  localparam int unsigned CHAIN = N_PI + N_FF;
  localparam int unsigned SC_W  = $clog2(CHAIN + 1);

  typedef enum logic [2:0] {
    S_IDLE, S_CLEAR, S_WAIT, S_SHIFT, S_CAP, S_MIX, S_PH2, S_UNLOAD
  } state_e;

  state_e           state, state_n;
  logic [SC_W-1:0]  sc;            // shift counter
  logic [CNT_W-1:0] rc;            // remaining pseudo-random patterns
  seg_t             cur;
  logic             ph2_seen;
  logic [7:0]       mc;            // mix cycles left in the current Phase 1 pattern
  logic             mix_last;      // last cycle of a Phase 1 pattern
  logic             at_end;        // last cycle of the current segment or of S_CLEAR
  logic             take;

  localparam state_e P1_FIRST = (P1_CYCLES > 1) ? S_CAP : S_MIX;
  localparam int unsigned N_MIX = (P1_CYCLES > 1) ? P1_CYCLES - 1 : 1;

  assign mix_last = (mc == 8'd1);

  // End of a segment: last shift cycle with no random patterns, or last pattern cycle.
  always_comb begin
    unique case (state)
      S_CLEAR: at_end = 1'b1;
      S_WAIT:  at_end = 1'b1;
      S_SHIFT: at_end = (sc == SC_W'(CHAIN - 1)) && (cur.n_rand == '0);
      S_MIX:   at_end = (rc == CNT_W'(1)) && mix_last;
      S_PH2:   at_end = (rc == CNT_W'(1));
      default: at_end = 1'b0;
    endcase
  end

  // Ask for a new segment at a segment boundary unless the current one was last.
  assign seg_ready = at_end && (state inside {S_CLEAR, S_WAIT} || !cur.last);
  assign take      = seg_valid && seg_ready;

  always_comb begin
    state_n = state;
    unique case (state)
      S_IDLE:   if (start) state_n = S_CLEAR;
      S_CLEAR, S_WAIT:
                state_n = take ? S_SHIFT : S_WAIT;
      S_SHIFT:  if (sc == SC_W'(CHAIN - 1)) begin
                  if (cur.n_rand != '0) state_n = cur.phase2 ? S_PH2 : P1_FIRST;
                  else if (cur.last)    state_n = S_UNLOAD;
                  else                  state_n = take ? S_SHIFT : S_WAIT;
                end
      S_CAP:    state_n = S_MIX;
      S_MIX, S_PH2:
                if (at_end) begin
                  if (cur.last) state_n = S_UNLOAD;
                  else          state_n = take ? S_SHIFT : S_WAIT;
                end else if (state == S_MIX && mix_last) state_n = P1_FIRST;
      S_UNLOAD: if (sc == SC_W'(N_FF - 1)) state_n = S_IDLE;
      default:  state_n = S_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      sc       <= '0;
      rc       <= '0;
      mc       <= '0;
      cur      <= '0;
      ph2_seen <= 1'b0;
      done     <= 1'b0;
      n_det    <= '0;
      n_ph1    <= '0;
      n_ph2    <= '0;
      n_cycles <= '0;
      n_stall  <= '0;
    end else begin
      state <= state_n;
      if (state == S_IDLE && start) begin
        done     <= 1'b0;
        ph2_seen <= 1'b0;
        n_det    <= '0;
        n_ph1    <= '0;
        n_ph2    <= '0;
        n_cycles <= '0;
        n_stall  <= '0;
      end
      // shift counter
      if (state_n != state || take) sc <= '0;
      else if (state inside {S_SHIFT, S_UNLOAD}) sc <= sc + SC_W'(1);
      // mix-cycle counter: loaded on entry to a Phase 1 pattern
      if (state_n == S_MIX && !(state == S_MIX && !mix_last)) mc <= 8'(N_MIX);
      else if (state == S_MIX) mc <= mc - 8'd1;
      if (state == S_MIX && mix_last) begin
        rc    <= rc - CNT_W'(1);
        n_ph1 <= n_ph1 + 32'd1;
      end
      if (state == S_PH2) begin
        rc    <= rc - CNT_W'(1);
        n_ph2 <= n_ph2 + 32'd1;
      end
      if (take) begin
        cur      <= seg;
        rc       <= seg.n_rand;
        ph2_seen <= ph2_seen | seg.phase2;
        n_det    <= n_det + 32'd1;
      end
      if (state inside {S_SHIFT, S_CAP, S_MIX, S_PH2}) n_cycles <= n_cycles + 32'd1;
      if (state == S_WAIT) n_stall <= n_stall + 32'd1;
      if (state == S_UNLOAD && state_n == S_IDLE) done <= 1'b1;
    end
  end

  // Control decode.
  always_comb begin
    {b2, b1} = 2'b11;           // normal mode when idle: the CUT runs functionally
    ms       = 1'b0;
    pi_mode  = PI_HOLD;
    po_en    = 1'b0;
    po_clr   = 1'b0;
    scan_en  = 1'b0;
    so_sig   = 1'b0;
    bilbo_ce = 1'b1;
    unique case (state)
      S_CLEAR:  begin {b2, b1} = B_RESET; pi_mode = PI_CLEAR; po_clr = 1'b1; end
      S_WAIT:   bilbo_ce = 1'b0;
      S_SHIFT:  begin {b2, b1} = B_SHIFT; pi_mode = PI_SHIFT; scan_en = 1'b1;
                      so_sig = (sc < SC_W'(N_FF)); end
      S_CAP:    begin {b2, b1} = B_NORMAL; po_en = 1'b1; end
      S_MIX:    begin {b2, b1} = B_MISR; po_en = 1'b1; if (mix_last) pi_mode = PI_STEP; end
      S_PH2:    begin {b2, b1} = B_SHIFT; ms = 1'b1; pi_mode = PI_STEP; po_en = 1'b1; end
      S_UNLOAD: begin {b2, b1} = B_SHIFT; pi_mode = PI_SHIFT; so_sig = 1'b1; end
      default:  ;
    endcase
  end

  assign busy = (state != S_IDLE);

  // The paper's flow runs Phase 1 before Phase 2 and never returns.
  a_phase_order: assert property (@(posedge clk) disable iff (!rst_n)
    (take && ph2_seen) |-> seg.phase2)
    else $error("Phase 1 segment after Phase 2");

endmodule
