# FHECore: a modulo matrix-multiply unit for GPU streaming multiprocessors

Homomorphic encryption schemes such as CKKS spend most of their compute time
in two kernels, the number theoretic transform (NTT) and base conversion.
Both are *modulo-linear*: a matrix of residues times a matrix of residues,
reduced modulo a word-sized modulus. A GPU Tensor Core can do the
multiply-accumulate part only on narrow integers. That forces 32-bit
residues to be split into 8-bit pieces, multiplied piece by piece, put back
together and reduced with long chains of ordinary instructions.

FHECore is a functional unit placed next to the Tensor Cores in each
streaming multiprocessor (SM). It does the whole job in one instruction:

    FHEC.16816:  D[r][c] = ( sum_k A[r][k] * B[k][c]  +  C[r][c] )  mod q[c]
                 A: 16x16, B: 16x8, C and D: 16x8, 32-bit residues

It is a 16 x 8 systolic array of processing elements (PEs). Each PE holds one
element of D and performs a 32-bit modular multiply-accumulate per cycle,
reducing every product with a built-in Barrett reducer. Every column of the
array carries its own modulus. One operation can therefore serve an NTT tile
(one modulus everywhere) or a base-conversion tile (a different target
modulus in each column). The unit talks only to the register file, and it
borrows the Tensor Core's register ports instead of having its own.

This repository holds synthesizable SystemVerilog for the unit, its PEs and
Barrett reducer, the register-port sharing logic, and the FHECore part of one
SM (four units). Each block has a self-checking testbench. There is also an
end-to-end test of the SM slice and a test that runs real NTT and
base-conversion tiles.

## Block map

| File | Block |
|---|---|
| `rtl/fhecore_pkg.sv` | widths, array shape, beat layout, `modcfg_t`, `beat_t`, `bitlen`/`barrett_k` |
| `rtl/barrett_reduce.sv` | 4-stage pipelined Barrett reduction, x mod q |
| `rtl/fhecore_pe.sv` | one PE: multiplier, Barrett reducer, modular accumulator (6 stages) |
| `rtl/fhecore_array.sv` | 16 x 8 grid of PEs, output-stationary, per-column modulus |
| `rtl/fhecore_unit.sv` | one FHECore unit: operand capture, skew feeder, array, write-back |
| `rtl/rf_port_share.sv` | mux that lets a Tensor Core and an FHECore unit share one read and one write register port |
| `rtl/fhecore_sm.sv` | top: four `rf_port_share` + `fhecore_unit` pairs, one per Tensor Core of the SM |

Hierarchy: `fhecore_sm` → `rf_port_share`, `fhecore_unit` → `fhecore_array`
→ `fhecore_pe` → `barrett_reduce`.

The register file, the Tensor Cores, the warp scheduler, CUDA cores and the
memory hierarchy are existing GPU blocks. They are not part of this RTL. The
register-file and Tensor Core sides of each shared port are ports of
`fhecore_sm`.

## The processing element

A PE computes `R <- (R + h*v) mod q`. Here `h` is the operand that moves
horizontally along its row and `v` the one that moves down its column. Both
operands, each with a valid bit, are registered and passed to the right-hand
and lower neighbour every cycle. The PE never holds an operand back while its
own pipeline works. That is what makes the output-stationary dataflow fast:
in an operand-stationary array a partial sum would have to travel the full
PE pipeline before the PE below could start.

The six stages:

| stage | work |
|---|---|
| 1 | 32 x 32 → 64-bit product `x = h*v` |
| 2 | `p = x * mu` |
| 3 | `t = p >> k`, `tq = t * q` |
| 4 | `r = x - tq` |
| 5 | pick whichever of `r`, `r - q`, `r - 2q` lies in `[0, q)` |
| 6 | `R + r`, minus `q` if that is at least `q` |

Stages 2 to 5 are `barrett_reduce`. One MAC enters per cycle, and its
contribution shows in the accumulator six cycles after the operands were
sampled. The accumulator is loaded with the C operand (`acc_load`) before the
first product reaches stage 6.

### Barrett constants

Software supplies `q` and `mu` for each column. The unit derives the shift
from `q` itself: `k = 2 * bitlen(q)`, and `mu` must be `floor(2^k / q)`.
Every product of two residues is below `q^2 < 2^k`. The estimate
`t = floor(x*mu / 2^k)` is then at most one below `floor(x/q)`, so `r < 2q`.
The `r - 2q` leg of the selector is kept as well: it also makes the result
exact when `mu` is one too small, and the testbench checks that case.

**Operand contract.** `2 <= q < 2^31`, and every A, B and C entry must be
below the modulus of the column it is used in. For base conversion, where the
columns differ, A entries must be below every column's modulus. The 31-bit
limit keeps `mu` (which has `bitlen(q)+1` bits) inside a 32-bit register.

## The array and the 44-cycle operation

Row `r` of A enters the left edge `r` cycles late, and column `c` of B enters
the top edge `c` cycles late. Term `k` of output `(r, c)` then meets in
PE(r,c) in cycle `r + c + k`. With the paper's 16 x 8 array and K = 16, the
corner PE (15,7) takes its last term in cycle 37. Its accumulator is final
six cycles later, in cycle 43. The run takes **44 cycles**. That equals the
scale-sim output-stationary count `2*S_R + S_C + T - 2` with `T = 6` that the
paper quotes. For this shape the two agree because `K = S_R = 16`. In
general the RTL takes `K + S_R + S_C - 2 + 6` cycles.

The skew is produced in `fhecore_unit` by indexing the operand buffers with
`step - r` and `step - c`, so the array itself has no skew registers. Only
the left and top edges are driven. The right and bottom edges spill out
unused.

## One FHEC operation on the register port

An operation travels as valid/ready *beats* of 32 words x 32 bits (one warp
register, `beat_t`, with a `last` flag).

| read beat | content |
|---|---|
| 0 | words 0–7: `q[0..7]`, words 8–15: `mu[0..7]` |
| 1–8 | A, row-major, two rows of 16 per beat |
| 9–12 | B, row-major over k, four rows of 8 per beat |
| 13–16 | C, row-major, four rows of 8 per beat (`last`) |

| write beat | content |
|---|---|
| 0–3 | D, row-major, four rows of 8 per beat (`last` on beat 3) |

Sequence in `fhecore_unit`: in state LOAD it accepts 17 beats. In state RUN
it runs 44 cycles, with C loaded in the first and `mmm_done` pulsing in the
last. In state WB it offers the four result beats, holding each until it is
taken. The first write beat is offered 45 cycles after the cycle that
accepted the last read beat. A new operation is accepted only after the
previous result has been written. At full rate an operation occupies the
unit for 17 + 44 + 4 = 65 cycles.

A 16x16x16 product, which is what the CUDA-level `fhe_sync` works on, is two
FHEC.16816 operations, one for each half of the B/C/D columns.

## Sharing the Tensor Core's register ports

The unit has no register-file ports of its own. `rf_port_share` sits between
one read port and one write port and the pair {Tensor Core, FHECore}:

* **Read.** Each burst from the register file carries a destination tag
  (`rf_rd_dst`), which is sampled on the first beat. The burst goes to that
  unit, and the port stays locked to it until its `last` beat is accepted.
  The tag is ignored on later beats.
* **Write.** Either unit may offer a result burst. A free port is granted to
  whichever unit asks. If both ask in the same cycle, the grant goes to the
  unit that did not start the previous burst. The grant is held until the
  burst's `last` beat. The other unit sees `ready` low, and `wr_stall` is
  high in those cycles.

The two units therefore never move data over the port at the same time.
Because FHE and plaintext ML workloads do not mix, this costs nothing in
practice. The multiplexer is combinational and adds no cycles.

`fhecore_sm` instantiates `NUM_UNITS = 4` such pairs, one per Tensor Core of
an A100-class SM.

## Where this RTL departs from, or adds to, the source design

Taken from the source design: the 16 x 8 array, the 16x8x16 operation, the
32-bit operands, the six-stage PE with multiplier, Barrett reducer and
accumulator, the Barrett operator chain (`×mu`, `>>k`, `×q`, subtract, select
among `r`, `r-q`, `r-2q`), the output-stationary forwarding of both operands,
one modulus per column, the 44-cycle run, shared TC/FC register ports, and
four units per SM.

Choices made here, where the source is silent:

* where the pipeline registers fall inside the six PE stages;
* `k = 2*bitlen(q)`, derived in hardware, and the limit `q < 2^31`;
* the C operand loaded into the accumulators, so that D = A·B + C (the
  intrinsic takes the C fragment as input and output);
* A flowing horizontally and B vertically, which gives each output column
  one modulus;
* the 32-word beat, the 17-beat operand order and the 4-beat result;
* operand buffers inside the unit, which stand in for the GPU's operand
  collector;
* strictly serial load, run and write-back, with no overlap between
  operations;
* the port protocol: valid/ready, burst tags, burst locking and alternating
  write grant;
* reset clears only control state, valid bits and accumulators; data
  pipeline registers are not reset.

**Modulus width.** The paper's end-to-end parameter sets (logN = 16,
logQP ≈ 1675–1743 over 33–38 RNS limbs) average 44–53 bits per modulus. A
32-bit datapath cannot run them as given: it needs a parameter set built
from primes of at most 31 bits. The NTT and base-conversion tile shapes
themselves fit. A 2^16-point NTT decomposed into 16x16 matrices is 1024
16x16x16 products, that is 2048 FHEC operations. Base conversion over up to
16 source limbs and any number of targets (8 per pass) maps directly.

Not built: the Tensor Core, register file, warp scheduler and the rest of the
GPU; the instruction decode of FHEC (it appears here as a tagged read burst);
the physical figures (frequency, area).

## Verification

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself with
a watchdog. Reference values are computed in the testbench with plain 64-bit
`%`, never with Barrett reduction (`tb/fhecore_tb_pkg.sv`).

| testbench | what it checks |
|---|---|
| `tb_barrett_reduce` | 3480 reductions over fixed and random 2–31-bit moduli, products near `q^2` and near `2^k`, `mu` one low; latency exactly 4 |
| `tb_fhecore_pe` | random dot products with idle gaps; value at `c+5` (one term short) and `c+6` (final); operand forwarding |
| `tb_fhecore_array` | 12 full 16x8x16 products, half with eight different moduli; corner PE one term short in cycle 42, all 128 results final in cycle 43 |
| `tb_fhecore_unit` | 16 operations via the ports, with and without gaps and back-pressure; 44-cycle run; one `mmm_done` per operation |
| `tb_rf_port_share` | 60 read bursts with a scrambled tag after the first beat; 40+40 competing write bursts; no interleaving, ordering, `wr_stall`, alternating grant |
| `tb_fhecore_sm` | whole top at default size: 4 units x 6 FHEC (NTT-style and mixed-moduli) interleaved with Tensor Core traffic; checks results, the 44-cycle run per operation, and counts Tensor Core routing, write-port stalls and read-port back-pressure, each of which must occur |
| `tb_fhecore_kernels` | a 16-point NTT of 8 vectors modulo 998244353 followed by the inverse NTT (round trip must return the input), and a 4-to-8-moduli base-conversion tile checked against the exact CRT sum |

### Running a test with Verilator

```sh
verilator --binary --timing --assert -Irtl -Itb \
    rtl/fhecore_pkg.sv tb/fhecore_tb_pkg.sv tb/tb_fhecore_sm.sv \
    --top-module tb_fhecore_sm -Mdir obj_sm
./obj_sm/Vtb_fhecore_sm
```

Swap in any testbench name (`tb_rf_port_share` needs no `fhecore_tb_pkg.sv`,
but including it does no harm). Verilator finds the other modules in `rtl/`
by file name through `-Irtl`. The full-size SM test takes well under a
minute to build and a fraction of a second to run. Lint with
`verilator --lint-only -Wall -Irtl rtl/fhecore_pkg.sv rtl/<module>.sv`.

### Changing the design

* Array shape: `R_N`/`C_N` on `fhecore_array`. The unit uses the package
  constants `ROWS`, `COLS`, `KDIM`, `LANES`. The beat layout assumes that
  `2*COLS <= LANES` and that each matrix is a whole number of beats.
* Units per SM: the `NUM_UNITS` parameter of `fhecore_sm`.
* Pipeline split: `BR_LAT` in the package must match the number of register
  stages in `barrett_reduce`. `PE_LAT` (and with it `MMM_CYCLES`) must be
  `BR_LAT + 2`.
