# SACHI: an Ising machine inside the CPU's caches

An Ising machine solves a combinatorial optimisation problem (max-cut, number
partitioning, a travelling-salesman decision problem, lowest-energy spin states of a
molecule) by encoding its variables as spins σ ∈ {−1, +1} joined by signed interaction
coefficients J_ij, plus an external field h_i. It then repeatedly moves every spin to the
sign of its local field:

    -H_σ(i) = h_i + Σ_j J_ij·σ_j            σ_i ← +1 if that is > 0, else −1

Simulated annealing occasionally overrules that greedy choice so that the search can
climb out of local minima.

SACHI computes the local fields with the memory that a general-purpose processor already
has, rather than with an analogue coupling network:

- The **L1 data cache** (8T SRAM) becomes a compute array. One row holds the whole
  neighbourhood of one spin.
- A row read whose two read word lines carry σ_i and ¬σ_i returns, in every column, the
  stored bit XNOR σ_i.
- A little digital logic next to the L1 turns that one read into the complete sum above.
- The **L2** becomes the storage array that keeps the problem between sweeps.

This RTL implements the *mixed-stationary* organisation of SACHI:

- every neighbour and every coefficient bit of a spin is computed in the same cycle;
- 16 tiles work in parallel;
- one result per tile comes out every cycle.

## Encoding: why one XNOR read is a multiplication

Spins are stored as one bit: 1 means +1 and 0 means −1. Coefficients are R-bit two's
complement. The product J·σ_j must be formed without a multiplier. In two's complement,
−J = ¬J + 1, so only an inversion and a possible +1 are needed.

The array does the inversion. Each row is stored twice in the same columns: the row
itself and its bitwise complement. Activating the true row's word line with σ_i and the
complement row's with ¬σ_i makes each read bit line sense

    (bit ∧ σ_i) ∨ (¬bit ∧ ¬σ_i) = bit XNOR σ_i

So when σ_i = +1 the row comes out unchanged, and when σ_i = −1 it comes out inverted.
The same read also turns the stored σ_j column into σ_ij = σ_i XNOR σ_j, which says
whether target and neighbour agree.

The word X read for a neighbour slot is therefore J or ¬J. A 4:1 multiplexer per slot,
selected by {σ_ij, σ_i}, picks the product (`reuse_aware_decode`):

| σ_ij (agree) | σ_i | X read | product J·σ_j | mux output |
|---|---|---|---|---|
| 1 | +1 | J  | +J | X      |
| 1 | −1 | ¬J | −J | X + 1  |
| 0 | +1 | J  | −J | ¬X + 1 |
| 0 | −1 | ¬J | +J | ¬X     |

Products are R+1 bits wide, so −(−2^(R−1)) is exact. An adder tree initialised with h_i
sums the products into −H_σ (`hsigma_adder`). This is the reuse the design is named for:
one fetched row serves every neighbour and every coefficient bit of one spin at once.

## Data layout

**Tuple.** Every spin i owns one tuple:

```
 tuple (TUPLE_W = 1 + H_W + NBR*(R+1) bits, 413 at the defaults)
 ┌──────┬───────────┬──────────────────┬─────┬──────────────────┬──────────────────┐
 │ σ_i  │ h_i (16b) │ slot NBR-1       │ ... │ slot 1           │ slot 0           │
 └──────┴───────────┴──────────────────┴─────┴──────────────────┴──────────────────┘
 slot k = bits [k*(R+1) +: R+1] = { σ_j , J_ij[R-1:0] }   (σ_j in the top bit)
```

- Only the slot part, the row of NBR·(R+1) = 396 bits, goes into a compute tile row and
  its complement.
- σ_i and h_i of each row sit in a small header register file beside the tile. They
  drive the word lines and initialise the adder.
- Unused slots hold J = 0, which adds nothing.
- An IC of fewer than R bits is stored sign-extended to R bits.

**Tile placement.** Tuple t is placed in tile t mod 16, row (t div 16) mod 100. The 1600
tuples of a full array are spread over all 16 tiles, so one row activation computes 16
spins.

**Replicas and adjacency.** Each spin also appears as a σ_j slot in the tuple of every
neighbour. That copying is what makes the computation independent of the graph shape.
To update those copies, the storage array holds a second region, the adjacency rows.
Adjacency row i lists up to NBR entries `{valid, tuple index, slot index}`, one per place
where σ_i is replicated. At the defaults an entry is 1 + 11 + 6 = 18 bits and a row is
792 bits.

**Storage array address map.** This is the address used when packets arrive from DRAM:

| address | contents |
|---|---|
| 0 .. NT−1 | tuple rows |
| NT .. 2·NT−1 | adjacency rows of spins 0 .. NT−1 |

## One sweep, cycle by cycle

A sweep is one XNORM instruction over tuples `src1 .. src1+src2−1`. It is normally
preceded by a storage-to-compute transfer of the same range.

- **Transfer.** One tuple per cycle is read from storage port A and written into its
  tile row. The complement row is written at the same time, and σ_i and h_i go into the
  header.
- **Sweep.** Each cycle, row r is activated in all 16 tiles at once. Every tile then runs
  a four-stage pipeline:

| stage | cycle | work |
|---|---|---|
| 1 | t   | word lines = σ_i / ¬σ_i, the row is sensed into the row buffer (in-memory XNOR) |
| 2 | t+1 | per-slot 4:1 mux gives J_ij·σ_j |
| 3 | t+2 | adder, initialised with h_i, gives −H_σ |
| 4 | t+3 | comparator (greedy spin) and annealer (accept or overrule) give the new spin |

So a tile produces one updated spin per cycle. A sweep of n tuples takes about
⌈n/16⌉ + 4 cycles of compute, plus whatever the write-back adds.

**Write-back (`spin_update_unit`).** Each cycle's 16 results enter a FIFO as one entry,
with a mask of the lanes whose spin *changed*. Unchanged spins cost nothing. For each
changed spin t the unit:

1. writes the σ_i bit of tuple t and reads adjacency row t;
2. takes the adjacency entries;
3. makes one masked one-bit write per valid entry into the σ_j bit of that replica.

That costs 2 + degree cycles per changed spin. The unit uses storage read port B and the
masked write port, so it runs alongside a sweep. When fewer than 5 of its 8 FIFO entries
are free, it raises `almost_full` and the sweep stops activating rows until there is
room. The stall cycles are counted.

**Update order.** The compute array keeps the spin values it was loaded with until the
next transfer. All spins of a sweep therefore see the previous sweep's values: a Jacobi
(synchronous) update. The storage array receives every change and is always the current
state. Synchronous updates of neighbouring spins can oscillate on some graphs. The
annealer, or sweeping subsets of the tuples (`src1`/`src2`), breaks such cycles.

## The annealer arithmetic

Stage 4 follows the simulated-annealing procedure:

    T          = initT / iterNum
    likelihood = exp(−(H(updS) − H(currS)) / T)
    currS      = updS  if l < likelihood  else  −updS

- **Greedy spin.** updS = +1 only when −H_σ > 0. A zero field gives −1.
- **Energy.** H(s) = −s·(−H_σ) is the local energy of the target spin, so ΔH is 0 when
  the spin keeps its value and −2·|H_σ| when the greedy step flips it.
- **Temperature.** `iterNum` starts at 1 after reset and increments after every XNORM.
  `initT` and `l` are configuration inputs: `cfg_init_t`, and `cfg_l_q8` in unsigned
  Q8.8.
- **Exponential.** It is evaluated as 2^(y), with y = −ΔH·iterNum·log2(e)/initT in Q.8
  and log2 e ≈ 369/256. The integer part of y is a shift. The top four fraction bits
  index a 16-entry table of 2^(f/16) in Q1.15. The result saturates below 256, and the
  error stays within about 4.4 %.
- **Disabling annealing.** initT = 0 turns annealing off: the greedy spin is always
  taken.
- **Forcing the opposite.** With a very high temperature the likelihood is about 1 for
  every spin. An l above that then makes every spin take the opposite of its greedy
  choice. The end-to-end testbenches use this to show the mechanism.

`l` is a value the host supplies. A host that wants randomised annealing writes a fresh
random `cfg_l_q8` before each sweep.

## Host interface and instructions

The CPU drives the machine with decoded instructions, one at a time:

- `ins_valid` while `ins_ready`, then wait for `done`;
- fields are primary opcode, secondary opcode, `src1`, `src2`, `bits`, `dest`, and a
  packet `data` for DRAM-to-storage fills.

A one-bit special-purpose register (`spr_we`, `spr_mode`) switches the L1 between normal
cache use and Ising compute. The cache works in one mode at a time.

| instruction | PO | SO | mode | action |
|---|---|---|---|---|
| FIST, DRAM write | 0xDB | 0x00 | any | pulses `dram_wr_valid` with `src1`/`data` (the DRAM is outside) |
| FIST, DRAM → storage | 0xDB | 0x01 | any | writes `data` to storage address `src1` (map above) |
| FIST, storage → compute | 0xDB | 0x10 | compute | transfers tuples `src1 .. src1+src2−1` into the tiles |
| XNORM | 0x30 | – | compute | one sweep over tuples `src1 .. src1+src2−1`; `bits` = IC resolution, 1..R |

- **Illegal instructions** do nothing, raise `illegal` for one cycle and then complete
  with `done` like any other. These are any
  other opcode, a compute-side instruction in normal mode, or `bits` outside 1..R.
- **Status after a sweep.** `done` pulses with the instruction's `dest`. `flips` gives
  the number of spins that changed.
- **Counters.** `stall_cycles`, `spins_written` and `anneal_flips` count the stall, the
  write-back and the annealer's interventions.
- **Normal mode.** The `l1_*` ports read and write raw tile rows, as the cache would.
  `st_rd_*` reads either storage region.

**DRAM prefetch counter.** At the start of a sweep the counter is loaded with the number
of rows the sweep will activate. It counts down one per activated row. When the
remaining count reaches `cfg_pf_threshold` and the host signals more data
(`cfg_dram_more`), it asks once for the next round (`dram_prefetch_req`). The threshold
should cover the DRAM → storage → compute latency, so the next part of a large graph can
arrive in time.

## Parameters

All defaults are in `rtl/sachi_pkg.sv`. `sachi_top` takes `L`, `ROWS`, `N`, `R` and `FD`
as parameters, with these defaults.

| name | default | meaning |
|---|---|---|
| `NUM_TILES` (L) | 16 | compute tiles (repurposed L1) |
| `TILE_ROWS` (ROWS) | 100 | tuples per tile; 1600 spins in all |
| `IC_BITS` (R) | 8 | coefficient resolution |
| `NBR` (N) | 44 | neighbour slots per tuple. 2 × 100 × 44 × 9 bits ≈ 9.9 KB, which fills a 10 KB tile |
| `H_W` | 16 | external field width |
| `ACC_W` | 24 | adder width |
| `PAR_W` | 16 | width of initT and iterNum |
| FD | 8 | write-back FIFO depth (stall margin 5) |

At the defaults, synthesis gives about 8.3 k cells plus 3.2 Mbit of arrays. The arrays
are the tiles, the tuple storage and the adjacency storage.

## Where this RTL goes beyond, or falls short of, the source design

These are choices of this implementation:

- The operand meanings (`src1` = first tuple, `src2` = count).
- The storage address map.
- The adjacency entry format.
- The FIFO and stall.
- The pipeline registers between phases.
- All number formats of the annealer.
- The placement of σ_i/h_i in a header beside each tile.
- The illegal-instruction rules.

These are not built:

- **Transfer/compute overlap.** The spin write-back to the storage array runs alongside
  the sweep. The storage-to-compute transfer, however, is a separate instruction before
  it, so that part of the data movement is not hidden behind compute.
- **Multi-row tuples.** A spin with more than 44 neighbours (dense graphs such as a
  complete graph) has no row format here.
- **Large graphs.** Graphs above 1600 spins would need round-by-round streaming from
  DRAM. The prefetch counter raises the request, but no sequencing of partial graphs
  exists.
- **Resolution as a run-time choice.** R is fixed when the design is elaborated. Smaller
  resolutions run sign-extended and save no memory. 32-bit coefficients need `R = 32`.
- **Compact adjacency.** The adjacency is stored as a list, 158 KB beside 82.6 KB of
  tuples. That is more than a 160 KB L2.
- **Physical SRAM behaviour.** The 8T bit cell, precharge and sensing are modelled only
  as their logic function (a wired OR of the two word-line paths). Timing and the analog
  behaviour are outside the RTL.

Two points of the source material were read in the way the arithmetic requires:

- **Where the +1 goes.** The two's-complement +1 is added in the "spins differ,
  σ_i = +1" and "agree, σ_i = −1" cases, the ones where the product is −J.
- **Spin encoding.** 1 encodes +1, as in the worked example values.

## Files

| module | role |
|---|---|
| `sachi_pkg` | default sizes, opcodes, instruction struct |
| `compute_tile` | one 8T tile: normal read/write and XNOR compute read into a row buffer |
| `reuse_aware_decode` | per-slot 4:1 product mux |
| `hsigma_adder` | h-initialised sum of the products |
| `sim_annealer` | comparator and annealing decision |
| `sachi_tile` | tile + σ/h header + the four-stage pipeline |
| `storage_array` | 2-read, 1-masked-write array (used for tuples and adjacency) |
| `spin_update_unit` | write-back of changed spins to all replicas |
| `dram_prefetch_ctrl` | remaining-rows counter and prefetch request |
| `sachi_decoder` | mode register and instruction decode |
| `sachi_ctrl` | sequencer for fill, transfer and sweeps |
| `sachi_top` | the whole machine |

Each module has a testbench `tb/tb_<module>.sv`. Every testbench computes its expected
values independently, with integer models, the table of the encoding or `$exp`. Each ends
with a `TB_RESULT checks=… failures=…` line and has a watchdog.

**`tb_sachi_top`.** This testbench runs the machine end to end at a reduced size: 4 tiles
× 8 rows, 8 slots. It plays the CPU and DRAM:

- normal-mode access;
- an illegal instruction;
- filling a King's-graph problem with random couplings and fields (the graph of the
  molecular-dynamics workload);
- greedy sweeps checked spin by spin, including every replica, against a Jacobi model;
- a sweep where the annealer overrules every spin;
- a sweep with the prefetch counter armed;
- a return to normal mode.

Each of these mechanisms is counted, and one that never happens is reported as a
failure. So is a sweep that never stalls.

**`tb_sachi_top_full`.** This is the same test at the default sizes: 1600 spins on a
40 × 40 King's graph with 8-bit couplings.

**`tb_sachi_workloads`.** This runs the default-size machine on three problem shapes
that fit it:

- a 1000-spin sparse random graph, as in number partitioning or asset allocation, with
  1 to 12 neighbours, 4-bit couplings, and annealing at a finite temperature with a new
  `l` per sweep;
- a 500-atom King's graph with 2-bit couplings;
- a 1000-atom King's graph with 4-bit couplings.

Only the first n tuples are loaded and swept. Decisions whose `l` lies within 6 % of the
exact likelihood are accepted either way, because the hardware exponential is
approximate. Every other spin, every replica, the flip count and the override count
must match the model.

## Simulating

With Verilator 5 (two-state, `--timing` for the testbench delays), from the directory
that holds `rtl/` and `tb/`:

```sh
# one block, e.g. the tile pipeline
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl +libext+.sv \
    rtl/sachi_pkg.sv tb/tb_sachi_tile.sv --top-module tb_sachi_tile -Mdir obj_tile
./obj_tile/Vtb_sachi_tile

# the whole machine at its default size (about 20 s to build, under a second to run)
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl +libext+.sv \
    rtl/sachi_pkg.sv tb/tb_sachi_top_full.sv --top-module tb_sachi_top_full -Mdir obj_full
./obj_full/Vtb_sachi_top_full
```

`-y rtl` lets Verilator find each module in the file of the same name; `-Wno-fatal`
keeps the remaining width and unused-signal warnings from stopping the build. The package must
be listed first.

Useful changes:

- Change the sizes in `sachi_pkg`, or through the parameters of `sachi_top`.
- In the end-to-end testbenches, change `GW` (grid width), `SWEEPS`, and the seeds of
  `$urandom`.
- Verilator warns about a few unused parameters and signals, which are harmless.
