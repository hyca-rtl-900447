# HyCA: a fault-tolerant deep-learning accelerator with a recompute unit

## Design idea

A deep-learning accelerator spends most of its area on a large, regular
2-D array of multiply-accumulate processing elements (PEs). A few
permanently broken PEs in that array would normally force you to switch
off whole rows or columns, or to add spare PEs in fixed places (row,
column or diagonal spares). Spares in fixed places only help when the
faults happen to fall where the spares can reach.

HyCA adds a small **dot-product processing unit (DPPU)** next to the
array. The DPPU **recomputes the outputs of the faulty PEs**, wherever they
are in the array. The array keeps running at full speed and writes all its
results, including the wrong ones, to the output buffer. The DPPU follows
**D cycles behind** the array, works on a copy of the same operands, and
then overwrites the wrong output features with correct ones.

Each faulty PE in an output-stationary array produces one output feature
per iteration. That feature is a dot product of length K = c·k·k. The
DPPU is D multipliers wide, so it computes one D-long slice of that dot
product per cycle. It can therefore keep up with up to D faulty PEs
without stalling the array.

The same hardware also runs **runtime fault detection**. One DPPU group
recomputes a short slice of a PE's work, and that result is compared with
the change in the PE's accumulator over the same slice. PEs that mismatch
are entered into the faulty-PE table, and from then on the DPPU repairs
them.

## Block diagram

```
 host ──► input buffer (128 KB) ──┐ one line of COLS inputs / cycle
 host ──► weight buffer (512 KB) ─┤ one line of ROWS weights / cycle
                                  │
             hyca_ctrl ───────────┤ addresses, window / iteration marks
                                  ▼
     ┌──────────── pe_array (ROWS x COLS, output stationary) ─────────┐
     │  column write-back, one column per cycle ───────────────┐      │
     └─────────────── acc_o (all accumulators) ──► fault_detect│      │
                                  │                 (CLB)      │      │
          same lines also written ▼                    ▲  ▼    │      │
       WRF / IRF (ping-pong, D tuples per bank)        │  FPT  │      │
            │ rotating row read ports                  │   │   │      │
            ▼                                          │   ▼   ▼      │
      DPPU: NG groups x GS multipliers ◄── rows/tags ── AGU   output buffer (128 KB)
            │ partial dot products (group 0 → detector)        ▲
            ▼                                                  │
      ORF (ping-pong) ── single-feature writes when the port is free
```

## How it works

**Array dataflow** (`pe_array`, `pe`). In every cycle the array takes one
operand tuple: ROWS weights (one per array row) and COLS inputs (one per
array column). Weights move to the right one PE per cycle. Each input is
broadcast down its column with a matching skew of c cycles. PE(r,c)
therefore accumulates Σ_t W_r(t)·X_c(t) over the K tuples of one
output-feature iteration.

A tuple applied in cycle T reaches PE(r,c)'s accumulator at the end of
cycle T+c+2. Column c finishes in cycle T_last+c+3. The columns are written
to the output buffer one per cycle, as a line of ROWS 32-bit features.

**Operand copies** (`pingpong_rf`, used as WRF and IRF). The controller
groups the stream into windows of D tuples. During a window, each tuple
is also written as one column of the write bank of the weight register
file (ROWS rows) and the input register file (COLS rows). At the end of
the window the banks swap. The DPPU then reads the finished bank while the
next window is being written.

A faulty PE(r,c) needs all D entries of WRF row r and IRF row c. To avoid
one D-wide read port per group, every row of the read bank is a circular
shift register that rotates by GS entries per cycle. Each group has a
fixed GS-wide window into each row. In cycle p after the swap, group g
sees segment (g+p) mod NG of its rows, so in NG cycles it has seen the
whole row.

**DPPU** (`dppu`, `dppu_group`, `redundant_ring`). There are NG groups of
GS multipliers, each followed by a pipelined adder tree. The latency is
2 + log2(GS) cycles (4 for GS = 4).

The AGU (`agu`) deals the faulty-PE table (FPT) entries out round-robin.
In cycle p, group g works on entry (p/NG)·NG + g, on segment phase
p mod NG. Each group therefore finishes one faulty PE's window in NG
cycles, and the DPPU covers all D entries of the table in one window.

Every result carries a tag that holds:
- the ORF bank;
- the entry;
- whether this is the first partial sum of the iteration;
- whether it is the last window;
- whether it is a detection result.

**Redundancy inside the DPPU** (`redundant_ring`). Each group of four
multipliers has a fifth, spare multiplier, and each group of three adders
has a spare adder. The units form a chain: spare U0, then U1..UN. Normally
slot i uses unit i+1. If slot f's unit is faulty, slots 0..f each move one
unit upstream (slot i uses unit i), so the faulty unit is left idle. The
setting is one enable and one slot index per ring, from the top-level
inputs `mul_fault_*` and `add_fault_*`.

**Output register file** (`orf`). Partial results are accumulated per FPT
entry. There is one bank per iteration parity. The first window of an
iteration overwrites the entry, and later windows add to it. When the
last window's results are in, the bank is closed and drained: the
lowest-numbered written entry goes first, one feature per cycle, to
output-buffer line `out_base + iteration·COLS + column`, with a one-hot
row mask.

The array's column write-backs have priority on the output-buffer port,
and the ORF waits while the port is busy (`ev_stall_o`). The array itself
never stalls. If an iteration is so short that the next clearing write
reaches a bank that has not finished draining, `orf_overrun_o` is set.

**Runtime fault detection** (`fault_detect`, `clb`). A pass starts with
`det_start_i` and scans one array column per window, left to right. For
row j of the column under test, the check covers segment j mod NG of the
window (GS tuples). That is the segment that group 0, which is reserved
for detection during a pass, sees for row j.

- A delay line of stream positions captures the PE's accumulator into the
  checking list buffer (CLB) just before the segment (BAR) and just after
  it (AR).
- Group 0 computes the segment's dot product (PR) from the register-file
  copy one window later.
- The PE is faulty if AR ≠ BAR + PR.
- The check is made when the later of AR and PR arrives.
- Faulty PEs are inserted into the FPT, one per cycle. An insert skips a
  PE that is already listed and uses only entries that group 0 does not
  serve. `det_faults_found_o` counts the inserts.

A full pass over a square array takes COLS windows plus one recompute
window, about ROWS·COLS + COLS cycles (1056 at 32×32; 1063 measured).

**Degraded mode** (`hyca_ctrl`). Array columns at or beyond
`active_cols_i` are not written back. The host sets this when there are more
faulty PEs than the DPPU can repair: the array then shrinks to the columns
left of the first column holding a fault that is not repaired, so the
surviving array stays attached to the buffers.

## Parameters (defaults = the paper's main configuration)

| parameter | default | meaning | source |
|---|---|---|---|
| ROWS, COLS | 32, 32 | array size | paper, 32×32 |
| D | 32 | DPPU delay / register-file depth per bank | paper, D = Col |
| GS, NG | 4, 8 | multipliers per DPPU group, groups | paper Fig. 6 (G1..G8, four multipliers + spare) |
| FPT entries | D = 32 | one per DPPU multiplier | paper: FPT size = DPPU size |
| IBUF/WBUF/OBUF_DEPTH | 4096 / 16384 / 1024 lines | 128 KB / 512 KB / 128 KB | paper |
| DW / PW / AW | 8 / 16 / 32 bits | operand / product / accumulator | AW = 4 bytes from the paper; the rest are this design's choice |

The design assumes ROWS = D, D = GS·NG and D = COLS (square array):
- D = GS·NG is checked at elaboration.
- ROWS = D gives full row coverage in detection.
- NG ≥ 4 avoids a CLB capture collision (`det_timing_err_o`).

## Top-level use (`hyca_top`)

1. Load operands through `ibuf_*` / `wbuf_*`. Each input line holds COLS
   bytes (one tuple for all columns), and each weight line holds ROWS
   bytes.
2. Fill the FPT with `fpt_we_i` / `fpt_idx_i` / `fpt_entry_i` (valid, row,
   column), or clear it with `fpt_clear_i`.
3. Start an operation with `start_i`, `n_iter_i` iterations and
   `k_win_i` windows per iteration (K = k_win·D tuples). Iteration i reads
   lines `base + i·stride + t`, and its outputs go to output-buffer lines
   `out_base + i·COLS + c`.
4. `busy_o` stays high until the array's last write-back. Allow a few
   more cycles for the ORF drain.
5. Optional: assert `det_start_i` for one cycle before or during an
   operation. `det_scan_done_o` pulses when the pass is finished, and the
   FPT then holds what was found.
6. Read results through `obuf_re_i` / `obuf_raddr_i`. The data arrives one
   cycle later.

Event outputs for measurement:
- `ev_swap_o`: register-file swap.
- `ev_dppu_wr_o`: recomputed feature written.
- `ev_stall_o`: ORF waiting for the port.
- `cols_discarded_o`: array write-backs dropped by degraded mode.
- `orf_overrun_o`: an ORF bank was overwritten before it finished draining.
- `det_timing_err_o`: the detector's capture timing failed.

The inputs `fi_*` (stuck-at bits in chosen PEs) and `*_inj_*` (inverted
DPPU unit outputs) exist only for fault-injection experiments.

**Operating limit.** Iteration i's ORF bank has to finish draining before
iteration i+2 first writes to the same bank, about K cycles later. The
drain takes one cycle per listed fault, plus up to COLS cycles of waiting
while the array writes back. This gives K ≳ F + COLS + 5. At the default
size, k_win = 2 (K = 64) therefore handles up to about 27 faults, and a
full FPT of 32 needs k_win ≥ 3. The paper assumes long iterations
(K = c·k·k), for which this is not a restriction.

## Verification

Every testbench checks its own results against a model and ends with a
`TB_RESULT checks=… failures=…` line.

| testbench | covers |
|---|---|
| `tb_pe` | dot products, restart on `first`, done in cycle T+3, weight forwarding, stuck-at bits |
| `tb_pe_array` | back-to-back iterations of random length; each column written in cycle T_last+c+3, in order; a faulty PE |
| `tb_line_buffer`, `tb_out_buffer` | registered reads, hold without read enable, masked writes |
| `tb_pingpong_rf` | segment (g+p) mod NG seen by group g in cycle p after the swap; bank swapping while the other bank is refilled |
| `tb_redundant_ring` | every bypass setting with the bypassed unit broken; no bypass with a regular or spare unit broken |
| `tb_dppu_group` | one result per cycle, latency 2+log2(GS), random bypass with broken units |
| `tb_fpt`, `tb_clb`, `tb_orf` | table insert rules; CLB flags and clears; ORF accumulate, drain order, random port grants, overrun |
| `tb_hyca_top` (16×16, D = 16, NG = 4) | FPT repair; a nearly full FPT causing write-back stalls; DPPU ring bypass and a negative check; runtime detection (the faults the model predicts are found in ROWS·COLS+COLS+7 cycles and then repaired); degraded mode. Each mechanism is counted, and a mechanism that never occurs is a failure |
| `tb_hyca_full` (all defaults: 32×32, D = 32, 8 groups) | repair of 8 faulty PEs over two iterations; a 17-iteration detection pass over all 1024 PEs with rerun repair |

`tb_hyca_top` also serves as the test of `dppu`, `agu`, `fault_detect` and
`hyca_ctrl`, which are only meaningful with the rest of the datapath
around them.

For each module, a copy with one deliberate bug was run against its
testbench, and every copy was caught (from 1 failing check for the ORF
overrun flag to several thousand).

Synthesis: at the default size, the full top (1024 PEs and
multi-megabit buffers written as arrays) takes more than 10 minutes in
yosys. The same RTL at 8×8 (D = 8, two groups, small buffers) synthesises
in yosys in about 13 s with no warnings, and the full-size design passes
Verilator lint and slang elaboration.

## Differences from the paper and open points

- **Group size.** The text says each DPPU group has 8 PEs and finishes a
  faulty PE in 4 cycles. Fig. 6 and the configuration section instead
  give eight groups of four multipliers, each with a redundant
  multiplier, and three adders with a redundant adder. This design uses
  GS = 4, NG = 8, and each group finishes a faulty PE's window in NG = 8
  cycles.
- **Array orientation.** The paper says PEs in one column compute
  different output features of the same output channel. Here array rows
  take weight streams (output channels) and columns take input streams
  (pixels), so one column holds one pixel across channels. The DPPU
  still reads one WRF row and one IRF row per faulty PE.
- **ORF size.** The paper gives a 64-byte ORF. Here the ORF holds 2 × 32
  entries of 32-bit accumulators (256 bytes), because partial sums are
  accumulated over windows at full width.
- **IRF depth.** The paper gives the IRF depth as 2·D·Row. Here the IRF
  has one row per array column (COLS), which is the same value for the
  default square array.
- **Detection details.** The paper's Fig. 8 (CLB) and its detection
  timing are not available in the text. The scan order, the segment
  choice (S = GS cycles between BAR and AR), the reservation of group 0,
  and storing PR in the CLB are this design's own choices.
- **Detection coverage.** A stuck-at fault is found only if it changes
  the checked segment's accumulator. A stuck bit that already had the
  stuck value during the checked segment is invisible in that pass. The
  testbenches predict which faults are visible and check exactly those.
- **FPT index width.** The FPT's 5-bit row and column fields (from the
  paper) limit the array to 32×32. The paper's 64×64 and 128×128 array
  sizes (Table I) would need wider fields.
- **Not built:**
  - the left-priority repair planner (choosing which faults to repair
    and which columns to discard when faults exceed the DPPU); the host
    fills the FPT and sets `active_cols_i` instead;
  - the power-on self-test, which the paper only names; the host writes
    the FPT instead;
  - ECC on the buffers;
  - external memory;
  - the RR/CR/DR baselines that the paper compares against;
  - splitting one output feature's K across operations.
- **Workloads.** With the input buffer at 4096 lines, an iteration needs
  K = c·k·k ≤ 4096. Layers with K = 512·3·3 = 4608 (late VGG and ResNet
  stages) or K = 9216 (AlexNet FC6, YOLO 1024-channel 3×3) do not fit one
  operation, because partial sums cannot be carried between operations.
  The layer sizes here are the published networks', not from the paper.
