# APACHE DIMM: near-memory processing for multi-scheme FHE

Fully homomorphic encryption programs that mix schemes use CKKS for
arithmetic on packed vectors and TFHE for logic and comparisons, and they
produce two very different kinds of work:

* **compute-heavy** operators: bootstrapping, homomorphic multiplication,
  rotation and the TFHE `CMUX` chain. They spend their time in number-theoretic
  transforms (NTT), modular multiply/add and coefficient permutations.
* **data-heavy** operators: TFHE public and private key switching (`PubKS`,
  `PrivKS`). They do almost no arithmetic but touch keys of tens of megabytes
  to gigabytes (79 MB for PubKS, 1.8 GB for PrivKS at 128-bit security).

The design puts both kinds of work on the memory module. Each DIMM gets one
*near-memory computing (NMC) module* on its buffer chip, which holds register
files, configurable arithmetic units and a configurable interconnect. One rank
of the DIMM uses *modified DRAM chips* whose banks can add key rows into an
accumulator beside the sense amplifiers. Key switching then never moves a key
across any bus. The NMC streams one bit per key row to the banks and reads
back only the accumulated sum.

This repository gives synthesizable SystemVerilog for one such DIMM, top
module `apache_dimm`, with a self-checking testbench for every unit and an
end-to-end testbench for the whole DIMM.

```
             instr_* (operator queue)          ext_* (rank data buses / host)
                    |                                   |
   +----------------v-----------------------------------v------------------+
   | nmc_module                                                             |
   |  nmc_controller --config--> nmc_core <--rows--> data buffer (24 MB)    |
   |        |                     | RF8 8 MB: (I)NTT -> MMult -> MAdd  (R1) |
   |        |                     | RF1 1 MB:           MMult -> MAdd  (R2) |
   |        |                     | 2x automorphism, 2x decomposition       |
   +--------|---------------------|-----------------------------------------+
            | KS commands (1 bit) ^ accumulator rows
   +--------v---------------------|---------+
   | 4 x ks_dram (16 x ks_bank each)        |  <- key_* preload
   +----------------------------------------+
```

## Words and lanes

Every datapath word is 64 bits wide and holds either one residue below a
62-bit modulus (`MODE64`) or two independent residues below 30-bit moduli
(`MODE2X32`: bits 31:0 hold lane 0 and bits 63:32 hold lane 1). TFHE works on
a 32- or 64-bit torus and CKKS on residues of up to 32 bits, so one datapath
serves both schemes. Packing two CKKS residues per word doubles throughput.
The mode travels with each row through the pipelines. The modulus pair, its
Barrett constants and the twiddles are per-module settings that change only
when the pipelines are empty.

Three primitives make the mode switch cheap:

* **`karatsuba_mul`**: a 64x64 multiplier built from three sub-products,
  `z0 = a0*b0`, `z2 = a1*b1` and `z1 = (a0+a1)(b0+b1) - z0 - z2`. In
  `MODE2X32` only `z0` and `z2` are used, and they are exactly the two lane
  products, so the middle multiplier idles.
* **`cfg_addsub`**: a 64-bit adder/subtractor whose carry into bit 32 is cut
  in `MODE2X32`. It reports a carry out per lane, which the modular units use
  as a "no borrow" flag.
* **`cfg_mmult`**: a Barrett modular multiplier with a latency of 4 cycles
  (product, quotient estimate, `q*p`, correction). It is set by a
  `modulus_t`, which holds `p`, `u = floor(4^k / p)` and one `k` per lane.
  It computes `q = ((x >> (k-1)) * u) >> (k+1)` and `r = x - q*p`, then picks
  `r`, `r-p` or `r-2p`. This needs `p < 2^62` for a 64-bit lane and
  `p < 2^30` for a 32-bit lane. In dual mode the two lanes have separate
  moduli and `k` values.
* **`cfg_madd`**: modular add, subtract, reverse subtract or pass-through,
  with one register stage.

## The (I)NTT kernel

`ntt64` is a fully pipelined 64-point radix-2 decimation-in-time transform
that accepts one vector per cycle:

* 6 stages of 32 butterflies each.
* In each butterfly a `cfg_mmult` forms `w*hi`, and two `cfg_madd` form
  `lo + w*hi` and `lo - w*hi`.
* Each stage takes 4 + 1 cycles, so the latency is 30 cycles.
* Inputs are bit-reversed and outputs come out in natural order:
  `X[k] = sum_j x[j] w^(jk)`.

The kernel holds no constants. Its twiddles `w^0..w^31` arrive on a port, and
an inverse transform is the same circuit fed with powers of `w^-1`. The
`1/64` scaling is left to the MMult that follows in routine 1.

`ntt_fu` cuts a 256-word row into four 64-word vectors and runs four kernels
side by side. It keeps a forward and an inverse twiddle table, both loaded
from one register-file row: words 0..31 hold the forward powers and words
32..63 the inverse powers. In 2x32 mode each twiddle word holds the two
lanes' roots.

## Two routines and the link

This is the core idea of the NMC interconnect, and the part of the RTL that
needs the most care. Most FHE work is "transform, multiply, accumulate", so
`nmc_core` wires the units into two fixed pipelines that work at the same
time:

| routine | path | register file | use |
|---|---|---|---|
| R1 | RF8 -> (I)NTT -> MMult -> MAdd -> RF8 | 8 MB (4096 rows) | CMUX, CMult, key-switch inner products, (I)NTT |
| R2 | RF1 -> MMult -> MAdd -> RF1 | 1 MB (512 rows) | HAdd, PMult, other element-wise work |

Each routine takes one row of 256 words per cycle. A row carries its own
control word (`row_ctl_t`) down a shift register:

* its lane mode;
* whether it uses the NTT;
* whether it uses the MMult (otherwise a delay line bypasses the multiplier
  with the same latency);
* its MAdd operation;
* whether it is a link row;
* its three source rows `a`, `b`, `c` and its destination row.

The operands are read when the row reaches the unit that needs them, not at
issue time:

| age of an R1 row (cycles after issue) | action |
|---|---|
| 0 | read `a` from RF8 into the NTT (if the NTT is used) |
| 30 | NTT result ready; read `b` (and `a`, if the NTT is skipped) |
| 31 | MMult input: `a'` x `b` |
| 34 | read `c` |
| 35 | MAdd input: `a'*b` op `c` |
| 36 | result written to RF8 |

An R2 row reads `a` and `b` at age 0 and `c` at age 4, and is written at
age 6.

Reading late costs no storage for the operands. It also keeps every register
file at a small, fixed set of ports:

* RF8: five read ports (NTT input, late `a`, `b`, `c`, auxiliary) and two
  write ports (R1, auxiliary).
* RF1: four read ports and two write ports.

The **link** is a switchable wire from the NTT output to routine 2's MMult.
A linked R1 row still goes through the transform on R1's timing. It then
takes `b` and `c` from RF1, uses R2's MMult and MAdd, and is written to RF1.
This is how `NTT(x)*key + acc` chains are built without a round trip through
RF8. While link rows are in flight, R2 cannot issue its own rows, because it
would collide with them in its units. The controller holds R2 off until the
last link row is written.

## Automorphism

`automorph` performs the two permutations the schemes need:

* TFHE's rotation merged with the subtraction: `X^a * ACC - ACC` in the
  negacyclic ring.
* CKKS's automorphism, `out[j] = +/- in[j * g^-1 mod 2N]`.

A polynomial of N = 2048 coefficients is held in an array of 32 rows by 64
columns, with coefficient `c*32 + r` at row `r`, column `c`. A TFHE rotation
by `a` takes two steps:

1. It reads one row per cycle and rotates it by `a mod 32` rows, carrying
   wrapped words into the next column.
2. It shifts by `(a mod N)/32` columns.

Wrapped words are negated, and `a >= N` negates everything.

The read-out subtracts the original polynomial, which is kept in a third
buffer. Two ping-pong buffers let the next rotation load while the previous
one is read out. In CKKS mode the read-out simply visits the original
buffer in the permuted order. The first result row leaves 37 cycles after
`start` for TFHE and 2 cycles after it for CKKS. One row leaves per cycle
after that. The core has two automorphism units.

## Gadget decomposition

`decomp` splits each coefficient into `L` signed digits of `beta` bits, most
significant first, as TFHE's external product needs:

* The value is rounded to its top `L*beta` bits.
* `2^(beta-1)` is added per digit, so every digit is a plain bit field minus
  `2^(beta-1)`.
* A negative digit `d` is written as `p + d`, so it can go straight into the
  NTT.
* In 2x32 mode each half-word is its own 32-bit torus value.

Level `i` appears `i` cycles after the row is taken, and a new row is taken
every `L` cycles. The core has two decomposition units.

## Key switching inside the DRAM chips

TFHE key switching sums key rows selected by the bits of the decomposed
input: `n*t` bits for PubKS and `p*(n+1)*t` for PrivKS. A `ks_bank` is a DRAM
bank with a row of `cfg_addsub` adders and an accumulator behind its sense
amplifiers, and it handles one bit at a time:

* **bit = 1**: the bank opens the addressed key row and adds it into the
  accumulator. The adders are 64-bit for PrivKS and 2x32-bit for PubKS, and
  wrap as torus arithmetic does. Timing is open-page: an already-open row
  costs `tCAS`, a different row costs `tRP + tRCD + tCAS`, and the first
  access costs `tRCD + tCAS`. The add takes one more cycle.
* **bit = 0**: the bank accepts it in one cycle and does not touch the array.

A mux sends either the sensed row or the accumulator to the chip's output.

`ks_dram` groups 16 banks into a chip (four bank groups of four). The
controller spreads the bit stream: bit `g` goes to chip `g mod 4`, bank
`(g/4) mod 16` and key row `base + g/64`. Consecutive bits therefore land on
different banks, and bank-level parallelism hides the row-access time. When
the addressed bank is still busy the stream stalls; the controller counts
these stall cycles. `KSREAD` moves one bank's accumulator into RF8, and
`KSCLR` clears all accumulators.

## Controller and instruction set

`nmc_controller` holds a 16-entry queue of operator instructions
(`apache_pkg::instr_t`) and three sequencers: R1, R2 and an auxiliary one for
moves, automorphism, decomposition, twiddle loads and key switching.

Instructions leave the queue in order, and one whose sequencer is busy waits
at the head. R1 and R2 instructions overlap freely, with these exceptions:

* An R1 whose lane mode or transform direction differs from the previous one
  waits for R1 to drain.
* A linked R1 waits for both routines to drain.
* `SETCSR`, `LOADTW` and `SYNC` wait until everything is idle.

Data dependencies between instructions are left to the host's scheduler, as
in the paper.

| op | fields used | effect |
|---|---|---|
| `SETCSR` | `dst` = CSR index, `imm` | `P`, `U`, `K` (`[6:0]` k of lane 0 / the 64-bit lane, `[14:8]` k of lane 1), `ROT` (TFHE `a` or CKKS `g^-1`), `DEC` (`[5:0]` beta, `[11:8]` L), `KS` (`[5:0]` t, `[31:16]` key-row base) |
| `MOVE` | `src_sp`, `ma_op` = destination space, `src_a`, `dst`, `count` | copy rows between the data buffer, RF8 and RF1 |
| `R1` | `mode`, flags `NTT_EN`, `NTT_INV`, `MM_EN`, `LINK`, `ma_op`, `src_a/b/c`, `dst`, `count` | `count` rows through routine 1: `row i = op(T(a+i) * b+i, c+i)` |
| `R2` | `mode`, `MM_EN`, `ma_op`, `src_a/b/c`, `dst`, `count` | the same on routine 2, without the transform |
| `AUTO` | `unit`, flag `CKKS`, `src_a`, `dst` | automorphism of one polynomial held in RF8 |
| `DECOMP` | `unit`, `src_a`, `dst`, `count` | `count` rows decomposed into `count*L` rows |
| `LOADTW` | `src_a` | load both twiddle tables from an RF8 row |
| `KSBITS` | `src_a`, `count`, `mode` | send the low `t` bits of `count` coefficients of an RF8 row to the KS banks |
| `KSREAD` | `unit` = chip, `src_b` = bank, `dst` | bank accumulator to an RF8 row |
| `KSCLR`, `SYNC`, `NOP` | | clear accumulators / wait for idle / nothing |

`perf[0..7]` count:

0. R1 rows
1. R2 rows
2. cycles in which both routines issued
3. link rows
4. KS stall cycles
5. KS bits sent
6. automorphisms
7. decomposed rows

## Top-level interface

`apache_dimm` contains one `nmc_module` (controller, core and the 24 MB data
buffer) and four `ks_dram` chips. All of them run on one clock, and the DRAM
timing is counted in cycles of that clock. Parts outside the RTL reach it
through plain ports:

* `instr_valid/instr/instr_ready`, `busy`: the operator queue from the host.
* `ext_re/raddr/rdata`, `ext_we/waddr/wdata`: the data buffer's outer port.
  It stands for the DQ buses of the DIMM's standard DRAM ranks and for the
  host channel, neither of which is modelled. Reads take one cycle.
* `key_we/chip/bank/row/data`: evaluation-key preload into the KS chips.
* `perf`, `ks_acc_total`, `ntt_busy`, `r2_busy`: observation.

## Parameters

| parameter | default | origin |
|---|---|---|
| `LANES` | 256 | words per row and per FU; the paper's unit width |
| `NPT` | 64 | NTT kernel size, four kernels per FU (paper) |
| `RF8_ROWS`, `RF1_ROWS` | 4096, 512 | 8 MB and 1 MB register files (paper) |
| `BUF_ROWS` | 12288 | 24 MB data buffer (paper) |
| `AROWS` x `ACOLS` | 32 x 64 | automorphism array (paper's figure) |
| `KS_CHIPS`, `KS_BANKS` | 4, 16 | KS chips per DIMM (paper's figure); banks per chip (4 bank groups, assumed) |
| `KS_ROWS`, `KS_WORDS` | 8192, 128 | bank size: 8192 pages of 1 KB (assumed) |
| `T_RCD/T_CAS/T_RP` | 22 | DRAM timing 22-22-22 (paper) |

The parameters `QDEPTH` (16), `N_AUTO` (2), `N_DEC` (2) and `LMAX` (8) are
this design's.

## Verification

Every module has a testbench in `tb/` that compares its outputs with a
software model written in the testbench. Each testbench ends with a
`TB_RESULT checks=... failures=...` line and has a watchdog.

* **Arithmetic units and kernels**: `tb_karatsuba_mul`, `tb_cfg_addsub`,
  `tb_cfg_mmult`, `tb_cfg_madd`, `tb_mmult_fu` and `tb_madd_fu` check random
  and boundary operands in both lane modes. The kernel and FU testbenches
  check `X[k]` against a direct O(n^2) sum: `tb_ntt64` at full size, and
  `tb_ntt_fu` with two 16-point kernels side by side. Both check the latency.
* **Memories and permutation units**:
  * `tb_regfile`: port conflicts and read-during-write.
  * `tb_automorph`: ten rotation amounts, including `a >= N`; CKKS
    permutations; back-to-back rounds; the 37-cycle latency.
  * `tb_decomp`: digits against an independent decomposition, per-level
    latency.
* **Key-switching banks**:
  * `tb_ks_bank`: the hit, miss and conflict access times.
  * `tb_ks_dram`: bank parallelism and stalling.
* **`tb_apache_dimm`**: drives the DIMM only through its ports. It checks:
  * NTT*b+c on R1 with R2 running at the same time;
  * NTT and MMult bypass;
  * NTT followed by INTT and the `1/64` multiply, which restores the input;
  * the link path;
  * a TFHE rotation and a CKKS automorphism of a 2048-coefficient polynomial;
  * a decomposition;
  * a 64-bit key-switch stream with read-back of all 16 bank accumulators;
  * a switch to 2x32-bit lanes with NTT and R2 in that mode;
  * that R1 issues one row per cycle.

  It counts each mechanism (overlap cycles, link rows, KS stalls, lane-mode
  and direction switches, bypasses, automorphisms, decompositions) and fails
  if any of them never happened. It runs at reduced sizes: 64 lanes (one NTT
  kernel), 256/64/256-row register files and buffer, 4 banks of 16 rows per
  KS chip, and 6-cycle DRAM timing.

To run a testbench with Verilator, compile the package first:

```
verilator --binary --timing --assert -Irtl rtl/apache_pkg.sv tb/tb_ntt64.sv \
          --top-module tb_ntt64 -o sim && ./obj_dir/sim
```

For `tb_apache_dimm`, list all of `rtl/*.sv` after `rtl/apache_pkg.sv`. At
64 lanes the C++ build takes about a minute and a half on four cores and the
run a few seconds. The reference loops in that testbench take their bounds
from variables, because Verilator would otherwise unroll the O(n^2) NTT
reference into one enormous function.

The largest configuration simulated end to end is the one above: 64 lanes,
with the full-size NTT kernel, MMult, automorphism array and decomposition.
No testbench runs the top with every parameter at its default. At 256 lanes
the core has about 1,300 Barrett multipliers and 8 MB + 1 MB + 24 MB of
simulated storage, plus 512 MB of KS-chip rows, which is beyond a practical
simulation.

## Where this design departs from the paper

* **Large transforms and automorphisms are not composed.** The paper
  transforms polynomials of up to 2^16 coefficients with its 64-point
  kernels. The RTL gives the kernels, the twiddle tables and the routines,
  but not the transposition steps of a four-step NTT, nor a way to apply the
  2048-entry automorphism array to larger rings. CKKS HRot, HMult and
  bootstrapping, and the TFHE blind rotation at N = 1024, are therefore not
  runnable end to end.
* **The instruction set, queue and dispatch rules are this design's own.**
  The paper describes the controller only as configuring the interconnect.
  The same holds for the register-file port counts, the late-operand timing,
  the KS bit-to-bank mapping and the encodings of all control fields.
* **The host, the standard DRAM ranks and the DDR PHY are outside the RTL.**
  The host software scheduler (data-flow analysis, dependency breaking,
  LWE-to-RLWE packing) is not included. The standard DRAM ranks and the DDR
  PHY are replaced by the buffer's external port.
* **The KS chips are reduced to their banks.** Inside a KS chip only the
  bank array, adders, accumulator and read mux are modelled. Row and column
  decoders, the I/O FIFO and the x8 serialisation are folded away, and the
  read port is one page wide.
* **One clock drives the whole DIMM.** The DRAM timings are counted in
  cycles of that clock rather than a separate DRAM clock.

The MMult, the divisible adder, the Karatsuba split, the two-routine
topology with the link, the three-buffer automorphism with the merged
subtraction, and the in-bank accumulate-on-bit key switching follow the
paper. How each unit works inside is this design's where the paper says only
what the unit does.
