# Hybrid BIST with an irregular-polynomial BILBO

Testing a sequential circuit from outside is slow: each test vector has to be shifted
serially into the circuit's flip-flops (a scan chain), so a test of `V` vectors costs about
`V × (PIs + flip-flops)` clock cycles. This design cuts that cost by letting the circuit's own
state register make most of the patterns. The flip-flops of the circuit under test (CUT) are
replaced by a BILBO (built-in logic block observer), a register that can also work as a
pattern generator and a signature compactor. Between two externally supplied deterministic
vectors, the BILBO turns the circuit's next-state outputs into fresh pseudo-random
patterns without any shifting. The tester only sends a new deterministic vector when the
pseudo-random patterns stop finding faults.

A plain BILBO used this way can lock into a loop: if the circuit maps the pattern
back onto itself, the same few states repeat forever. The modified register here, called an
IP-BILBO (irregular-polynomial BILBO), avoids this. It can use the circuit outputs as the
coefficients of its feedback polynomial instead of loading them into the stages. That mode
also makes one pattern per clock instead of one per two clocks.

The RTL follows the architecture and test procedure of E. Sadredini, M. Najafi, M. Fathy and
Z. Navabi, "BILBO-friendly Hybrid BIST Architecture with Asymmetric Polynomial Reseeding".
Where that description leaves details open, the choices made here are listed in
[Departures and choices](#departures-and-choices).

## System

```
                    +----------------------- bist_controller ------------------------+
  start, segment -->|  clear / shift / Phase 1 (capture, mix) / Phase 2 / unload     |--> done, counters
  program (v/r)     +---+------------------+---------------------+-------------------+
                        | pi_mode          | b2 b1 ms ce         | po_en po_clr
                        v                  v                     v
  si --> [ pi_lfsr  N_PI ] --so--> [ ip_bilbo  N_FF ] --so--> so     [ po_misr N_PO ] --> po_sig
              |  cut_pi               | cut_ppi   ^ cut_ppo            ^ cut_po
              v                       v           |                    |
          +------------- combinational part of the CUT (outside) -------------+
```

The CUT is drawn in Huffman form: its combinational logic sits outside `bist_top`, and its
state is held by `ip_bilbo`. `cut_ppi` (pseudo-primary inputs) is the present state and
`cut_ppo` (pseudo-primary outputs) the next state. The primary inputs come from `pi_lfsr`, and the
primary outputs go into `po_misr`. The scan chain is `si → pi_lfsr → ip_bilbo → so`, so
it is `N_PI + N_FF` bits long.

| file | module | role |
|---|---|---|
| `rtl/bist_pkg.sv` | package | BILBO mode encoding, PI LFSR modes, segment descriptor `seg_t`, default tap masks |
| `rtl/ip_bilbo.sv` | `ip_bilbo` | the IP-BILBO: state register, pattern generator, signature register |
| `rtl/pi_lfsr.sv` | `pi_lfsr` | LFSR on the primary inputs, head of the scan chain |
| `rtl/po_misr.sv` | `po_misr` | signature register on the primary outputs |
| `rtl/bist_controller.sv` | `bist_controller` | sequences the test program |
| `rtl/bist_top.sv` | `bist_top` | wires the above together; CUT logic on ports |

Default sizes are those of the ISCAS-89 benchmark s13207.1: 62 PIs, 152 POs and 638 flip-flops.

## The IP-BILBO

The register has `N` stages. Stage `N-1` is at the scan-input end and stage 0 at the
scan-output end. Two control lines, `b2 b1`, select one of the four modes of a common BILBO:

| `b2 b1` | mode | next state |
|---|---|---|
| `10` | clear | `q <= 0` |
| `11` | normal (functional) | `q <= ppo` |
| `01` | MISR | `q[i] <= ppo[i] ^ q[i+1]`, `q[N-1] <= ppo[N-1] ^ fb` |
| `00` | shift | `q[i] <= q[i+1]`, `q[N-1] <= ms ? fb : si` |

The extra input `ms` changes how the feedback bit is formed. Each stage `i ≥ 1` has a 2:1
multiplexer in front of the feedback XOR:

```
fb = (TAPS[0] & q[0])  ^  XOR_{i=1..N-1} ( ms ? ppo[i] : TAPS[i] & q[i] )
```

* **`ms = 0`** gives a common BILBO with a fixed polynomial `TAPS`. In Phase 1, a pattern takes
  two clocks. With `11`, the register captures the circuit's response. With `01`, it then
  XORs the next response into a shifted copy of itself. The result is the next pattern.
* **`ms = 1`** drops the fixed taps of stages `N-1..1` and uses the circuit's outputs in their
  place. The polynomial therefore changes from one pattern to the next, which is where the
  name "irregular polynomial" comes from. In shift mode (`00`), the scan input is also
  replaced by `fb`. The register then shifts by one stage per clock and takes in a single bit
  that depends on the whole response. This makes a new pattern every clock (Phase 2). The
  stages are never loaded directly from `ppo`. A circuit whose response leads back to an
  earlier state therefore no longer traps the register in that short loop. (Like any
  finite-state sequence, the pattern stream does repeat eventually.) A small example:
  take a 3-bit circuit that answers `101` with `110`, and taps for which the capture-and-mix
  step turns `110` back into `101`. With `ms = 0`, every Phase 1 pattern is then `101`. With
  `ms = 1`, the same start runs through four patterns (`tb_loop_example`). `tb_ip_bilbo`
  also uses a circuit that inverts its state. That circuit loops between two states in
  normal mode, but with `ms = 1` the sequence keeps moving.

In both modes, the register contents also carry a signature of everything that has passed
through it. This signature is shifted out and compared with the value from a fault-free
circuit.

Stage 0 has no multiplexer, so `q[0]` always takes part in the feedback when `TAPS[0]` is set.
The clock enable `ce` freezes all stages. The controller uses it only while it waits for the
tester.

## Test program and timing

The tester runs the test as a list of *segments*, passed to the controller as `seg_t`
descriptors over a valid/ready handshake:

```
seg_t = { phase2 : 1, n_rand : 16, last : 1 }
```

One segment is one deterministic vector followed by `n_rand` pseudo-random patterns:

```
start  CLEAR   SHIFT x (N_PI+N_FF)    Phase 1: (CAP MIX) x n_rand        ...   UNLOAD x N_FF   done
       b=10    b=00, ms=0, scan_en    CAP b=11, MIX b=01, ms=0                 b=00, so_sig
                                      Phase 2: P x n_rand, b=00, ms=1
```

* **CLEAR** (1 cycle) zeroes the IP-BILBO (mode `10`), the PI LFSR and the PO MISR.
* **SHIFT** (`N_PI + N_FF` cycles): the tester drives the vector on `si` while `scan_en = 1`.
  The first bit ends in IP-BILBO stage 0, and the last bit in PI stage `N_PI-1`. During the
  first `N_FF` of these cycles, the previous segment's BILBO signature leaves on `so`, and
  `so_sig = 1` marks those bits.
* **Phase 1 pattern** (`P1_CYCLES` cycles, 2 by default): CAP uses mode `11`, and MIX uses
  mode `01` with `ms = 0`. With more cycles per pattern, the extra cycles are further MIX
  cycles, which make each pattern more random. `P1_CYCLES = 1` leaves a single MIX cycle.
  The PI LFSR steps in the last MIX cycle.
* **Phase 2 pattern** (1 cycle): mode `00` with `ms = 1`. The PI LFSR steps every cycle.
* The PO MISR takes in the primary outputs in every pattern cycle.
* **UNLOAD** (`N_FF` cycles) follows the segment marked `last`. It shifts out the final BILBO
  signature with `so_sig = 1`. `done` then rises, and `po_sig` holds the PO signature.

The controller takes the next descriptor in the last cycle of the current segment. A tester
that always offers the next segment in time therefore gets a gap-free test. The test cycles
are then exactly

```
test cycles = n_det × (N_PI + N_FF) + P1_CYCLES × n_ph1 + n_ph2
```

These are the shift cycles plus `P1_CYCLES` (2) per Phase 1 pattern and 1 per Phase 2
pattern. The clear cycle and the final unload are not counted. The count is reported on `n_cycles`. If no
segment is offered, the controller waits in a stall state. There `bilbo_ce = 0` and all
registers hold, and the wait is counted on `n_stall`. Segments must run Phase 1 before
Phase 2, and an assertion flags a Phase 1 segment that comes after a Phase 2 one.

### What stays off-chip

The decisions of the test flow are made by software on the test host, not in this RTL:

* which deterministic vector comes next (produced by an ATPG tool and ranked by how many
  faults it detects);
* when the coverage threshold is reached and the test moves to Phase 2;
* when a run of pseudo-random patterns has found nothing new for too long. This limit is
  `th2` in Phase 1; in Phase 2 it is twice that, since a pattern there costs one cycle
  instead of two.

All of this needs fault simulation. Its result reaches the hardware only as the segment
list (the `n_rand` of each segment and its phase) and the vector bits on `si`. The tester
also compares the signatures on `so` and `po_sig` against those of the fault-free circuit.

## Reproducing the benchmark schedules

The evaluation reports, for six ISCAS-89 circuits, the number of deterministic vectors
(PMDV), the number of pseudo-random patterns (PRTP) and the total test clocks (PMTC).
The Phase 1/Phase 2 split is not reported. It follows from the cycle formula:
`PH1 = PMTC − PMDV·(PIs+PPIs) − PRTP`.

| circuit | PIs / POs / FFs | PMDV | PH1 | PH2 | test cycles | serial-scan cycles | saving |
|---|---|---|---|---|---|---|---|
| s1238 | 14 / 14 / 18 | 58 | 1 | 725 | 2583 | 4768 | 46 % |
| s1423 | 17 / 5 / 74 | 13 | 134 | 782 | 2233 | 6279 | 64 % |
| s1494 | 8 / 19 / 6 | 48 | 19 | 256 | 966 | 1806 | 47 % |
| s5378 | 35 / 49 / 179 | 37 | 1 | 5269 | 13189 | 56282 | 77 % |
| s13207.1 | 62 / 152 / 638 | 185 | 1 | 4739 | 134241 | 326200 | 59 % |
| s15850.1 | 77 / 150 / 534 | 249 | 5 | 2691 | 154840 | 273728 | 43 % |

The PI/PO/flip-flop split is that of the public benchmarks; only their sum PIs+FFs
appears with the results. `tb_table1_workloads` builds one `bist_top` per circuit at that
circuit's size, with a synthetic stand-in for the logic. It runs each schedule and checks
that the controller takes exactly the listed number of test cycles and that the rounded
saving matches. The schedules put the Phase 1 patterns into the first half of the vectors
and the Phase 2 patterns into the second half. How patterns were spread over vectors in the
original experiments is not known, and the spread does not change the count.

The defaults fit s13207.1 exactly. The IP-BILBO must have one stage per flip-flop, so any
other circuit needs its own `N_PI`, `N_PO` and `N_FF`. s15850.1 has 77 PIs, which is more than
the default 62.

## Departures and choices

What follows the published description: the four BILBO modes and their encoding; the `ms`
multiplexers on stages `N-1..1` that select between the fixed tap and the PPO; the `ms`
multiplexer on the scan input; the Phase 1 pattern of two cycles (capture, then MISR mix), with more cycles as an option; the
one-cycle Phase 2 in shift mode; the LFSR on the PIs and the MISR on the POs; the two-phase
test order; and the test-cycle formula.

Choices made here, where the description is silent:

* **Polynomials.** None are given. `bist_pkg::default_taps_lo` returns primitive
  polynomials for widths 3 to 23 (maximal period, checked in `tb_pi_lfsr` for 5 and 8
  bits). Every other width, including the defaults 62, 152 and 638, falls back to taps
  `q[1]` and `q[0]`. That register works but is not maximal-length. Pass `TAPS` explicitly
  for better patterns.
* **Base BILBO select line.** The line that chooses between `si` and `fb` is taken to be `b1`.
* **Clock enable** `ce` on the IP-BILBO, used only for stalls. A common BILBO has no hold mode.
* **Scan chain order** `si → PI register → IP-BILBO → so`. The PO signature is read in parallel.
* **Controller interface:** the segment descriptor, the valid/ready handshake, `scan_en`,
  `so_sig` and the statistics counters. Idle leaves the BILBO in normal mode.
* **PI LFSR** steps once per new pattern. Like any XOR LFSR, it stays at zero if a
  deterministic vector loads all zeros into the PIs.
* **PO MISR** compacts in every pattern cycle and not during shifting.
* A segment with `n_rand = 0` costs only its shift cycles, and its vector is never captured.
  The cycle formula counts it the same way.

## Verification

Every testbench checks itself. It prints `TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_ip_bilbo` | 4000 random cycles (mode, `ms`, `ce`, `si`, PPO) against a bit-level model of the mode table and the feedback equation; the `ms = 1` sequence escapes a two-state loop |
| `tb_loop_example` | a 3-bit circuit with the loop described above: with `ms = 0` every Phase 1 pattern is `101`, while with `ms = 1` the patterns run through `110, 111, 011, 101` |
| `tb_pi_lfsr` | clear, shift-in, hold, one step against the tap definition, period 2^N−1 for N = 5 and 8 |
| `tb_po_misr` | 500 random cycles against a model, clear priority, detection of a single flipped PO bit |
| `tb_bist_controller` | the per-cycle operation sequence decoded from the control outputs, against the sequence worked out from random programs, with and without stalls; counters; the cycle formula |
| `tb_bist_controller_p1x3`, `tb_bist_controller_p1x1` | the same with 3 and 1 cycles per Phase 1 pattern |
| `tb_bist_top` | end to end on s27 (`tb/s27_comb.sv`): BILBO signatures and PO signature against a golden model of the whole system, the cycle formula, a stuck-at fault that must change the signatures, and a count of every mechanism (clear, shift-in, Phase 1, Phase 2, phase switch, vector without random run, stall, unload, fault detection) |
| `tb_bist_top_full` | the same at the default size (62/152/638) with the synthetic stand-in `tb/wide_cut.sv` |
| `tb_table1_workloads` | the six benchmark schedules above, each at its own size |

The stand-in circuits (`s27_comb`, `wide_cut`) are test equipment. The real CUT logic is
not part of this design.

Running a testbench with Verilator 5:

```
verilator --binary --timing --assert -Wall -Wno-fatal -y rtl -y tb +libext+.sv \
          --top-module tb_bist_top rtl/bist_pkg.sv tb/tb_bist_top.sv
./obj_dir/Vtb_bist_top
```

Use any other testbench name in `--top-module` and the file name. Every run takes a few
seconds at most.

## Changing the design

* **Sizes:** set `N_PI`, `N_PO` and `N_FF` on `bist_top` to the circuit's primary inputs, primary
  outputs and flip-flops.
* **Polynomials:** `TAPS` on `ip_bilbo`, `pi_lfsr` and `po_misr`. Bit `i` set means stage `i`
  feeds the XOR. `bist_top` uses the defaults.
* **Phase 1 pattern length:** `P1_CYCLES` on `bist_top` (1 to 256).
* **Run lengths:** `bist_pkg::CNT_W` (16) bounds `n_rand` per segment.
* The controller's mode decode is a single `always_comb` block at the end of
  `bist_controller`. A different pattern procedure means new states there and a matching
  change to the `n_cycles` count.
