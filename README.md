# Multi-chip simulated bifurcation machine: chip RTL

This is synthesizable SystemVerilog for one chip of a cluster that runs
simulated bifurcation (SB) on fully connected Ising problems. Several
identical chips are joined in two rings. Each chip owns `PR` oscillators and
the matching `PR x N` slice of the coupling matrix J, so a cluster of
`Pchip` chips solves `N = Pchip * PR` spins. The design overlaps the
matrix-vector product with chip-to-chip communication. When a link is fast
enough, the time per SB step equals the compute time.

The default parameters give the "S2K" chip:

| item | value |
|---|---|
| oscillators per chip `PR` | 2,048 |
| column parallelism `PC` | 8 |
| J slice | 2,048 x 32,768, 1 bit per entry (`NMAX` = 32,768) |
| MAC units | 2 x PC x PR = 32,768 |
| cycles per subvector `MCE` | PR / (2 PC) = 128 |
| largest cluster | `Pchip` = 16 |

## Number formats (`sb_pkg`)

- Positions x and momenta p are 16-bit two's complement with 12 fraction bits.
  They saturate at the 16-bit limits.
- J is 1 bit per entry: 1 means +1 and 0 means -1. There is no zero, so the
  diagonal is an ordinary ±1 entry.
- Δp sums are kept in 32-bit accumulators.
- The SB coefficients (`sb_coef_t`) are 16 bits with 14 fraction bits:
  - `c0` = dt·γ0, the weight of Δp
  - `alpha0`, plus `dalpha` added to α after every step
  - `beta0`
  - `dt`
- Products are truncated by arithmetic right shift.

## Dataflow of one SB step

Each chip has two halves of its oscillators:

- the L half is subvector 2k
- the R half is subvector 2k+1

On RingL chip k sends to chip k-1. On RingR chip k sends to chip k+1.

**Phase A.** The TE module updates the own L half in ascending word order
and the own R half in descending word order. It does one column group
(PC oscillators) per ring per cycle. For each group the Update component
applies `p += c0·Δp`, then M sub-steps (M = 2) of:

- `p += dt·(−(α0−α)·x − β0·x³)`
- `x += dt·p`

The new positions go to the MM module and to the TX module at the same time.

**Phase B.** The received groups are popped from the RX queues. They go
through a delay line as long as the update pipeline, so the MM module sees
the same timing in both phases. They are then passed to the MM module.
The TX module is only given the groups it will forward.

**MM module.** RingL walks J column groups upwards from its own L
subvector, wrapping around. RingR walks downwards from its own R subvector.
Each ring skips the other ring's own subvector. Every cycle the MAC array
adds `J[r][c]·x[c]` over the 2·PC columns for all PR rows. After Pchip·MCE
groups per ring, the sums go into the Δp shift register and the
accumulators clear. The shift register streams Δp back to the TE module,
one group per ring per cycle, in the order phase A needs it. This lets the
next step start while the previous Δp is still being shifted out.

**TX module.** Each ring sends in this order:

1. its own subvector
2. the other ring's own subvector, replayed in reverse order from R_buf
3. the first Pchip−3 received subvectors, forwarded

The last two received subvectors are not forwarded, because the next chip
gets them from the other ring.

## Modules

| file | block | role |
|---|---|---|
| `rtl/sb_pkg.sv` | – | formats, coefficient type, saturation |
| `rtl/sb_fifo.sv` | queues | show-ahead FIFO used for every queue |
| `rtl/jb_mem.sv` | J_B | NMAX/PC words of PC·PR bits; one write port, two registered read ports |
| `rtl/sb_state_mem.sv` | X_B / P_B | PC elements per word; registered read, per-lane write |
| `rtl/sb_update.sv` | Update component | PC lanes, latency M+1, one group per cycle |
| `rtl/te_module.sv` | TE module | phase A/B control, state memories, host access, α schedule |
| `rtl/mac_component.sv` | MAC component | 2·PC × PR MAC array, accumulators, Δp shift register |
| `rtl/mm_module.sv` | MM module | J address generation, phase-B stall detection, step control |
| `rtl/tx_rbuf.sv` | R_buf | one subvector, replayed reversed |
| `rtl/tx_module.sv` | TX module | OWN → REV → FWD send sequence per ring |
| `rtl/sbm_chip.sv` | chip (top) | TE, MM, TX and all queues, with credit flow control on the rings |

## Chip interface (`sbm_chip`)

**Run control.** Hold `chip_id`, `n_chips`, `n_steps` and `coef` stable
during a run. A one-cycle `start` begins `n_steps` SB steps. `busy` stays
high until the chip has finished its last step and drained its queues.
`step_start` pulses once per step, and `step` gives the step index.

**Loading and reading.** These ports are used only while idle:

- `j_wr_*` writes one column group of J per cycle. The address is the global
  column divided by PC.
- `h_wr_*` writes one x or p element per cycle.
- `h_rd_*` reads one element, with one cycle of latency.

**Rings.** Index 0 is RingL and index 1 is RingR. `tx_valid`/`tx_data`
carry one group of PC positions per cycle. `rx_valid`/`rx_data` are the
receive side.

The rings use credit flow control:

- A sender starts with `RXQ_DEPTH` credits.
- It uses one credit per group sent.
- It gets one back on `tx_credit` each time the receiver takes a group out
  of its RX queue. The receiver signals this on `rx_credit`.

The serial PHY and the cable go between one chip's `tx_*` and the next
chip's `rx_*`. They are not part of this RTL.

**Monitoring.** `mm_stall` is high for each cycle in which the MM module is
waiting for received data.

## Timing

Let `hop` be the link latency plus 8 cycles through the TE and TX modules.
The step length `M_step` is:

| condition | M_step (cycles) |
|---|---|
| hop ≤ MCE | Pchip·MCE + 8 |
| MCE < hop ≤ 2·MCE | (Pchip−1)·MCE + hop + 8 |
| hop > 2·MCE | ⌈(Pchip−1)/2⌉·hop + (1 if Pchip is even, else 2)·MCE + 8 |

These are the compute-limited, intermediate and latency-limited modes of
the cluster performance model. Here the compute latency λcomp is 8 cycles.

`RXQ_DEPTH` (default 512) must be at least the credit round trip, which is
twice the link latency. Otherwise the credits throttle the links and the
steps get longer.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `PR` | 2048 | oscillators per chip (N/Pchip) |
| `PC` | 8 | column groups are PC wide |
| `NMAX` | 32768 | J columns stored, so N ≤ NMAX |
| `M` | 2 | sub-steps per SB step |
| `RXQ_DEPTH` | 512 | RX queue depth and initial credits |
| `IQ_DEPTH` | 16 | TE→MM queue depth |
| `TXI_DEPTH` | MCE+16 | TE→TX queue depth |
| `TXQ_DEPTH` | 16 | TX output queue depth |

The other design points need only parameter changes:

| design | PR | PC | NMAX |
|---|---|---|---|
| S1K | 1024 | 16 | default |
| S4K | 4096 | 4 | default |
| S8K | 8192 | 2 | 16384 |
| S1280 | 1280 | 8 | 10240 |

## Verification

Each testbench is self-checking and ends with a `TB_RESULT` line.

**Unit testbenches:**

- `tb/tb_sb_fifo.sv` – random push/pop checked against a queue model
- `tb/tb_jb_mem.sv` – random reads on both ports checked against a model
- `tb/tb_sb_state_mem.sv` – random reads and lane-masked writes
- `tb/tb_tx_rbuf.sv` – reversed replay over several rounds

**`tb/tb_sbm_cluster.sv`** joins four small chips (PR=256, PC=2) with
behavioural links (`tb/tb_link.sv`). It runs six configurations:

- Pchip = 1, 2, 3 and 4
- link latencies from 1 to 200 cycles, which covers all three timing modes

After each run, every x and p must match a bit-exact reference model of the
whole cluster. The measured cycles per step must equal the timing formulas
above. The testbench also counts each mechanism and fails if one never
happens:

- phase-A updates
- phase-B receptions
- reversed sends
- forwards
- MM stalls
- TX waits

**`tb/tb_sbm_full.sv`** uses the default (S2K) chip with no parameter
overrides. It runs a single chip, then a 4-chip cluster with a 165-cycle
link, and makes the same value and cycle-count checks.

The Update component, TE, MAC, MM and TX modules are tested only through
the cluster testbenches. Each one was checked by putting a deliberate bug
into a copy of the module. Every such copy made its testbench fail.

## Where this design departs from the published architecture

The ring structure, the phase A/B order, the send order with the reversal
buffer, the J access order, the number formats (1-bit J, 16-bit x and p)
and the S2K sizes follow the published multi-chip SB architecture. The
following are choices of this design:

- **Separate Δp accumulators and output shift register.** The published
  MAC array uses one register for both. Here they are separate, which
  costs PR x 32 extra flip-flops but lets step t+1 start accumulating while
  Δp of step t is still shifted out.
- **M = 2 sub-steps** per SB step. The number is not published. Change `M`
  to use another value; the update latency is M+1 cycles.
- **α schedule.** α grows linearly by `dalpha` per step. The external field
  h is 0.
- **Rounding.** Products are truncated (arithmetic shift); x and p saturate.
  The published text does not say how rounding is done.
- **Compute latency.** λcomp is 8 cycles here, against about 80 in the
  published FPGA build, which was made with high-level synthesis. So in
  intermediate and latency-limited mode a step is shorter than the
  published cycle counts, while the formulas are the same.
- **Links.** Credit flow control, the RX queue depth and the plain
  load/read host ports are this design's own. The serial PHYs, the cables
  and the host/board interface are not included.
- **Forwarding.** The TE module gives the TX module only the received
  groups that are forwarded. If it also handed over the last two received
  subvectors, which are dropped, the TX module would still be busy with them
  when the next step's own subvector is ready, and each step would be
  about MCE cycles longer.

## Simulating

All modules are plain SystemVerilog with no vendor primitives. To run the
cluster test with verilator 5:

```
verilator --binary --timing --assert -Wno-fatal rtl/sb_pkg.sv rtl/*.sv \
    tb/tb_link.sv tb/tb_sbm_cluster.sv --top-module tb_sbm_cluster -o sim
obj_dir/sim
```

For another test, use that testbench's file name and `--top-module` name.
`tb_sbm_full` builds the full S2K chip; it compiles and runs in about 15 seconds. Every
testbench prints `TB_RESULT checks=N failures=M` at the end.

To change the design point, override `PR`, `PC` and `NMAX` on `sbm_chip`.
`PR` must be a multiple of 2·PC, and N = Pchip·PR must not exceed `NMAX`.
At the default size the J memory alone is 64 Mbit per chip, and the MAC
array has 2,048 adder trees of 16 inputs.

## Not included

- The serial-link PHYs and cables: vendor IP. The testbenches use a latency
  model.
- The host/board interface: the chip has plain load and read ports instead.
- The external field h: it is taken as 0.
