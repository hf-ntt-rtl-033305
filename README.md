# HF-NTT: a stall-free dataflow engine for the negacyclic NTT

Lattice-based and fully homomorphic encryption spend most of their time multiplying
polynomials of thousands of coefficients modulo `x^N + 1` and a prime `q`. The number
theoretic transform (NTT) turns such a product into a point-wise one:
`a*b = INTT(NTT(a) (.) NTT(b))`. An NTT has `log2 N` stages of `N/2` butterflies. A
hardware engine keeps many butterfly units busy only if two things hold:

* all operands a cycle needs sit in **different memory banks**, and
* a stage never reads a value the previous stage has **not yet written back**.

Engines that miss either property stall. This design meets both by construction.
Coefficients are stored in a skewed ("diagonal") bank layout. The butterflies are
visited in an order in which every cycle touches each bank at most once. The order also
leaves enough time between producing a value and consuming it that the pipeline never
waits. The same datapath is reused for the forward NTT, the inverse NTT and the
point-wise product, by switching the butterfly unit between three modes. Several
residue moduli (RNS) run side by side in lock step.

The RTL is parameterised. The defaults are the main configuration:

| Parameter | Default | Meaning |
|---|---|---|
| `N` | 4096 | polynomial length (power of two, `log2 N` even, 16 .. 65536) |
| `W` | 32 | coefficient width; every modulus `q < 2^W` |
| `NPE` | 32 | number of butterfly units per modulus (`1 .. sqrt(N)/2`) |
| `NQ` | 1 | number of RNS moduli (lanes) |

## 1. Arithmetic

The forward transform is a negacyclic Cooley-Tukey (CT) NTT:

* input is in natural order and output in bit-reversed order;
* each butterfly computes `(a + b*w, a - b*w) mod q`.

The inverse is a Gentleman-Sande (GS) transform:

* input is in bit-reversed order and output in natural order;
* each butterfly computes `((a + b)/2, (a - b)*w/2) mod q`.

The division by two in every inverse stage adds up to the final `1/N` factor, so no
separate scaling pass is needed.

Both transforms use one table of twiddles per direction. `psi` is a primitive `2N`-th
root of unity mod `q`, and `brv` reverses `log2 N` bits.

```
TF_NTT[i]  = psi^brv(i)            i = 1 .. N-1
TF_INTT[i] = psi^(2N - brv(i))     (= psi^-brv(i))
```

A butterfly of stage `s` (`s = 0` is the first forward stage, with distance `N/2`) whose
lower operand is coefficient `i` uses entry `2^s + (i >> (log2 N - s))`. The inverse
uses the same entry of the inverse table.

Modular reduction is Barrett reduction with a shortened second multiplier. Let
`k = ceil(log2 q)` and `m = floor(2^(2k)/q)`. Then:

```
t1 = a*b
t2 = ((t1 >> (k-1)) * m) >> (k+1)
t4 = t1 - t2*q                       (0 <= t4 < 3q)
z  = t4 - 2q, t4 - q or t4           (first one that is non-negative)
```

`k` and `m` are per-modulus inputs, so one build serves any prime below `2^W`. Every
product uses a "step" multiplier: both operands are split into high and low halves,
four partial products are formed, and they are added after shifting. Halving mod `q` is
`x >> 1` for even `x`, and `(x >> 1) + (q+1)/2` for odd `x`.

## 2. The skewed memory layout

With `n = sqrt(N)`, think of the polynomial as an `n x n` matrix: coefficient `i` has
row `i / n` and column `i % n`. Each polynomial RAM is `n` banks of `n` words. Cell
`(row, col)` is stored in

```
bank = (row + col) mod n,   address = row
```

Every row and every column of the matrix is therefore spread over all `n` banks. The
host port does the same mapping, so software sees plain coefficient indices.

## 3. The schedule (what makes it hazard-free)

A **slot** is the set of `n/2` butterflies (`n` operands) that would be done in one
cycle if `NPE = n/2`. With fewer butterfly units, a slot is spread over `n/(2*NPE)`
consecutive cycles. Unit `p` then takes butterfly `P = sub*NPE + p`. Every stage has
exactly `n` slots.

**Phase 0: stages `s < log2 n`, distance `t >= n`.** The two operands of a butterfly
lie in the same column, `t/n` rows apart. The stage is cut into `2^s` rounds, each
covering a horizontal band of `n/2^s` rows. In slot `c` of a round, the columns
`c + j*n/2^s` (for `j < 2^s`) are processed. Within each column, rows `x` and `x + h`
of the band are paired, with `h = n/2^(s+1)`. Because of the skew, the `n` cells of a
slot form diagonals that hit every bank exactly once. For `N = 64` the first slot of
stage 1 reads columns 0, 4 (rows 0 to 3) and the next reads columns 1, 5, matching the
diagonal picture of the published design.

**Phase 1: stages `s >= log2 n`, distance `t < n`.** Both operands are in one row.
Slot `c` processes row `c`, pairing columns `(P/t)*2t + P%t` and that plus `t`. A row is
spread over all banks by construction.

**Point-wise product (MULT).** Row by row, `NPE` coefficients per cycle. The same
position is read from both RAMs, and the product goes back to RAM 0.

**Inverse.** The inverse walks the stages from `log2 N - 1` down to 0 with the same slot
geometry. Only the butterfly mode and the twiddle table change.

**Why nothing ever stalls.** A slot's results are written back to the cells they were
read from. The first slot of a stage needs data written by slots of the previous stage.
With the orders above, the earliest such dependency is at least `(n/2)*(n/(2*NPE))`
cycles old. The pipeline from read to write-back takes `RD_LAT + CBU latency + 1`
cycles, which is 12 cycles in the slowest mode (INTT). As long as

```
RD_LAT + CBU_LAT_INTT + 1  <  (n/2) * (n / (2*NPE))
```

the read always finds the new value. The controller checks this inequality at
elaboration and refuses parameter sets that break it, for example `N = 256` with
`NPE = 8`. It holds for every `N >= 1024`. There is therefore no hazard detection and
no stall logic in the RTL; one slot (or sub-slot) is issued every cycle from the first
stage to the last.

## 4. The configurable butterfly unit (CBU)

One Barrett multiplier, one modular adder, one modular subtractor and two halvers are
connected by multiplexers into three paths:

| mode | multiplier operands | outputs | latency |
|---|---|---|---|
| `OP_NTT` (CT) | `b`, `w` | `x = a + bw`, `y = a - bw` | 8 |
| `OP_INTT` (GS) | `(a-b)` (registered), `w` | `x = (a+b)/2`, `y = (a-b)w/2` | 9 |
| `OP_MULT` | `b`, `a` | `y = a*b` (`x` = `a`, not written) | 8 |

In INTT mode the add and subtract come before the multiplier and are registered. That
is why the inverse is one cycle longer. The value that bypasses the multiplier (`a`, or
`a+b` in INTT mode) travels in a delay line tapped at the right depth for each mode. A
new butterfly is accepted every cycle. The Barrett unit has 7 register stages: three
step multipliers of 2 stages each, plus the correction.

## 5. Pipeline and timing

For a slot issued in cycle `t`:

| cycle | what happens |
|---|---|
| `t` | the controller issues `{op, sel, stage, slot, sub}` |
| `t+1` | the data address generator registers bank/address per operand; the twiddle address generator registers a table index per CBU; the RAM and twiddle reads start |
| `t+2` | read data is gathered through the crossbar and enters the CBUs |
| `t+2+L` | results return (`L` = 8, or 9 for INTT) and are scattered to the cells they came from |

The bank map of each slot travels beside the CBUs in a delay line and steers the
write-back. One command, from the `start` cycle to the `done` pulse, takes:

| command | cycles | at the defaults | published |
|---|---|---|---|
| NTT | `N*log2(N)/(2*NPE) + 11` | 779 | 787 |
| INTT | `N*log2(N)/(2*NPE) + 12` | 780 | 788 |
| MULT | `N/NPE + 11` | 139 | 146 |

The published figures carry 7 to 8 more cycles of fixed overhead, from extra pipeline
registers that are not detailed. The data-dependent part is identical: one slot per
cycle, no bubbles.

## 6. Structure

```
hf_ntt_top            command interface, host ports, write-back delay line
 |- controller        IDLE / RUN / DRAIN, stage-slot-sub counters, Eq.-2 check
 |- data_agu          slot -> (bank, address) of every CBU operand
 |- tf_agu            slot -> twiddle index per CBU
 '- ntt_lane  x NQ    one per RNS modulus, all in lock step
     |- poly_ram x 2  RAM 0 and RAM 1: n banks (mem_bank) of n words, 1 read + 1 write port each
     |- tf_mem        NPE banks, each holding the NTT and INTT tables (2N words)
     |- bus_xbar      read-address scatter, read-data gather, write-back scatter
     '- cbu_array     NPE x cbu -> barrett_mulmod -> 3 x step_mult, 2 x half_mod
```

`hf_pkg` holds the command encoding (`op_t`), the issue record (`issue_t`), the
latencies and the bank mapping function.

## 7. Using it

1. Per lane, set `cfg_q`, `cfg_k = ceil(log2 q)` and `cfg_m = floor(2^(2k)/q)`. They
   must stay stable while a command runs.
2. Load the twiddle tables. For each `i = 1 .. N-1`, write `t_idx = i`:
   * with `t_inv = 0`, `t_wdata = psi^brv(i)`;
   * with `t_inv = 1`, `t_wdata = psi^(2N-brv(i))`.

   One write fills every CBU's copy of the table.
3. Load the operands: `h_we` writes coefficient `h_idx` of RAM `h_ram` in lane `h_lane`.
4. Run the commands. Pulse `start` for one cycle with `op`/`sel`, and wait for the
   one-cycle `done` pulse. A product is NTT(RAM 0), NTT(RAM 1), MULT, INTT(RAM 0).
   The NTT output is in bit-reversed order. This is harmless for MULT and is exactly
   what INTT expects.
5. Read the result: set `h_lane`, `h_ram` and `h_idx`; `h_rdata` shows that coefficient
   one cycle later.

Use the host ports only while `busy` is low. All lanes execute every command.

## 8. Verification

Every block has a self-checking testbench in `tb/`. Each compares against an
independent integer model (`tb_ref_pkg`: schoolbook negacyclic product, reference
CT/GS NTT, Barrett constants) and prints `TB_RESULT checks=.. failures=..`.

| testbench | what it covers |
|---|---|
| `tb_step_mult`, `tb_barrett_mulmod`, `tb_half_mod` | arithmetic, edge operands, latency |
| `tb_cbu`, `tb_cbu_array` | all three modes against the formulas, latency per mode |
| `tb_mem_bank`, `tb_poly_ram`, `tb_tf_mem` | storage, parallel reads with an independent address per bank, broadcast table load |
| `tb_data_agu` | every CBU gets a true butterfly pair, no cycle uses a bank twice, each butterfly occurs once per stage; the published N = 64 diagonal reads |
| `tb_tf_agu` | twiddle index of every CBU in every slot against `2^s + i >> (log2 N - s)`; the first-stage labels of the published N = 16 example |
| `tb_bus_xbar`, `tb_controller`, `tb_ntt_lane` | steering; slot order, stage order and `done` timing; one lane driven by hand |
| `tb_hf_ntt_top` | N = 256, NPE = 2, two moduli (32 and 30 bits): full polynomial product and an INTT(NTT(b)) = b round trip, every coefficient, exact cycle counts; counts each mechanism (NTT, INTT, MULT, phase-0 and phase-1 slots, split slots, mode switches, use of RAM 1, bubbles = 0) |
| `tb_hf_ntt_full` | the same flow at the default parameters (N = 4096, NPE = 32, 32-bit prime) |
| `tb_workloads` | N = 1024 with a 14-bit prime and NPE = 16; N = 4096 with two 30-bit moduli (60 bits) at NPE = 8 and NPE = 1; N = 4096 with six 30-bit moduli (180 bits) at NPE = 32; N = 16384 at NPE = 64; N = 65536 at NPE = 16 |

The primes in the testbenches are chosen with `q = 1 mod 2N`; the published evaluation
does not name its primes.

To simulate with Verilator 5, run for example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/hf_pkg.sv tb/tb_ref_pkg.sv tb/tb_hf_ntt_top.sv --top-module tb_hf_ntt_top
./obj_dir/Vtb_hf_ntt_top
```

Replace `tb_hf_ntt_top` with any other testbench name. `tb_workloads` takes a few
minutes to compile because it elaborates six configurations, the largest with 256
banks.

## 9. Where this RTL departs from or adds to the published design

* **INTT lower output.** One description of the inverse butterfly gives `(a-b)/2` and the
  datapath drawing gives `(a-b)w/2`. The RTL uses `(a-b)w/2`, which a GS butterfly needs.
* **Round length.** The prose says each phase-0 round takes `n` cycles. The worked example
  shows a whole stage taking `n` slots, split into `2^s` rounds of `n/2^s` slots. The RTL
  follows the example; the total work per stage is the same.
* **Twiddle order.** The example transform prints some later-stage twiddle labels in an
  order that is not bit-reversed. The RTL uses the standard bit-reversed table, which
  gives correct transforms, and matches the labels of the first two stages.
* **Twiddle memory shape.** The published memory has `n/2` banks of depth `N/2` per table,
  without saying how entries are packed. Here each of the `NPE` banks holds a full copy
  of both tables (`2N` words). This is simple and any CBU can read any entry, at the
  price of more storage (8 Mbit per lane at the defaults).
* **Crossbar.** The bus between memory and CBUs is described only by its role. It is
  built as a full crossbar indexed by bank number, with an assertion that no two
  operands of a cycle share a bank.
* **Fewer units than `n/2`.** The split of a slot into `n/(2*NPE)` cycles and the
  butterfly numbering `P = sub*NPE + p` are this design's choices, as is the MULT order
  (row by row).
* **Lane sharing.** One controller and one pair of address generators serve all RNS
  lanes, since every modulus follows the same schedule.
* **Pipeline depth and overhead.** The depths are this design's: Barrett 7, CBU 8/9, read
  2. They give 7 to 8 fewer fixed cycles than published.
* **Host interface.** The command handshake (`start`/`busy`/`done`), the load and read
  ports, and run-time `q`/`m`/`k` are this design's own. They are not described.
* **Result placement.** The MULT result overwrites RAM 0.
* **Not modelled.** The FPGA block RAMs and DSP slices the published implementation maps
  to are left to synthesis inference. Resource, frequency and area-time figures are not
  reproduced.

## 10. Changing it

* `N`, `NPE`, `NQ` and `W` are top-level parameters. `N` must have an even `log2`
  between 4 and 16. The controller rejects sets that break the hazard inequality of
  section 3.
* Changing a latency in `hf_pkg` also changes the write-back taps and the drain length,
  which follow automatically. Keep the hazard inequality in mind.
* `issue_t` sizes `stage`, `slot` and `sub` for `N <= 65536`.
