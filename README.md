# A number-theoretic transform core that checks its own multiplier and its own addressing

Lattice cryptosystems such as Kyber spend most of their hardware on the
number-theoretic transform (NTT), and a fault injected into it can leak key
material. This RTL implements the NTT architecture described in
*Lightweight Fault Detection Architecture for NTT on FPGA* (R. Paul, P. Baidya,
K. Guha). It adds two cheap detectors that run next to the transform:

* **REMO** (recomputation with a modular offset) protects the butterfly's
  modular multiplier. Every Montgomery product is computed twice, word by
  word. The second computation uses the multiplicand words offset by a
  multiple of the modulus (`aw + K*q`). Both results must agree modulo `q`.
  If they do not, `mmrfd_fault` is raised.
* **Memory rule checkers** protect the addressing. The loop indices behind
  every RAM and ROM address must stay inside bounds fixed by the stage index:
  `k <= (n-1) >> (i+1)` for the RAM and `j <= 2^i - 1` for the ROM. A
  corrupted index raises `ram_fault` or `rom_fault`.

The default configuration is Kyber's: n = 256 coefficients of l = 12 bits,
q = 3329, and a Montgomery word of w = 4 bits. Everything is written in
synthesizable SystemVerilog with parameters.

## What the core computes

The core transforms one polynomial `a[0..n-1]` in place. The polynomial is
held in a RAM of `n` words. Let `omega` be a primitive n-th root of unity
mod q (17 for n = 256, q = 3329). After a forward run (`inv` = 0), RAM word
`m` holds

    A[m] = sum_t a[t] * omega^(t * bitrev(m))  mod q

This is a cyclic NTT with natural-order input and bit-reversed output. After
an inverse run (`inv` = 1) on such a result, word `m` holds `n * a[m] mod q`,
in natural order. Both directions take log2(n) stages of n/2 Cooley–Tukey
butterflies, so 8 x 128 = 1024 butterflies for n = 256.

### Forward walk

For stage `i`, group `j` and butterfly `k`:

    len   = n >> (i+1)
    addr0 = j*2*len + k         ("alpha[j+k]")
    addr1 = addr0 + len         ("alpha[j+k+i/2]")
    rom   = 2^i + j             (twiddle address)
    V     = alpha[addr1] * omega_(i,j) mod q
    alpha[addr0], alpha[addr1] <- U + V, U - V   (mod q, U = alpha[addr0])

The twiddle at ROM address `2^i + j` is `omega^(bitrev_i(j) * len)`. Because
of this layout, the ROM rule `j <= 2^i - 1` says exactly that stage `i` reads
only its own slice of the ROM.

### Inverse walk

The inverse uses the same butterfly, so it must start from bit-reversed
input, which is what the forward walk leaves behind. The butterfly span then
grows from 1 to n/2 instead of shrinking:

    span  = 2^i
    addr0 = k*2*span + j        (j = twiddle index 0 .. 2^i-1, k = block 0 .. n/2^(i+1)-1)
    addr1 = addr0 + span
    rom   = n + 2^i + j         twiddle omega^(-j * n / 2^(i+1))

In this walk `j` and `k` trade roles: `j` picks the twiddle and `k` the block.
Their ranges are the same as in the forward walk, so the same index counters
and **the same two rules** apply. The ROM has 2n words: the forward twiddles
in the lower half and the `omega^-1` twiddles in the upper half.

The inverse does not multiply by `n^-1`. That scaling is left to the block
that consumes the result, where it can merge with a constant multiplication
it already does. The paper mentions neither the scaling nor the inverse
ordering.

## REMO: the self-checking Montgomery multiplier (`mmrfd`)

This is the least obvious part of the design.

### The word-wise Montgomery product

`mmrfd` computes `V = alpha * beta * R^-1 mod q`, with `R = 2^(w*NW)` and
`NW = ceil(l/w)`. With the defaults, `NW = 3` and `R = 4096`. The multiplicand
`alpha` is zero-padded to `NW*w` bits and held in register `alpha'`. The
twiddle `beta` is held in register `omega'`. Each clock, a right shift selects
the next w-bit word `aw` of `alpha'`, and `gamma_gen` updates its accumulator:

    mu    = ((gamma mod 2^w) + aw * (beta mod 2^w)) * q'  mod 2^w     q' = -q^-1 mod 2^w
    gamma = (gamma + aw*beta + mu*q) / 2^w

Taking `mod 2^w` just keeps w bits. The division by `2^w` drops w bits that
are always zero, and an assertion checks this. After NW words,
`gamma < 2q`, and one conditional subtraction gives V. The twiddle ROM stores
`omega^e * R mod q`, so the `R^-1` cancels and `V = alpha * omega^e mod q`.

### The recomputation

`remo_gamma_f` runs the same step on encoded words:
`aw_f = aw + K*q`, formed by `remo_encoder`. Since `aw_f ≡ aw (mod q)`, the
encoded accumulator `gamma_f` stays congruent to `gamma` after every word.
The two are **not equal as integers**, because `gamma_f` carries extra
multiples of q. The comparator `mmrfd_comp` therefore reduces both values
mod q before comparing. A plain equality test would flag every product.
One flag `f_i` is kept per word, and `mmrfd_fault` is their OR.

### Why the second computation runs one clock late

A recomputation can only catch what hits the two computations differently.
The paper runs the detector on a clock delayed against the datapath.
Here that delay is a one-clock skew:

* the REMO datapath processes word `i` one clock after `gamma_gen`;
* it reads `alpha'` and `omega'` itself at that later clock.

So an upset of an operand register or word bus that lasts one clock corrupts
only one of the two results. Such an upset is always detected when
`beta != 0 mod q`, because the results then differ by a non-zero multiple of
`beta` mod q. The testbenches inject such upsets on either path, and every
one is flagged.

What REMO cannot see:

* a fault already present in the coefficient read from RAM, since both
  computations then start from the same wrong value (content protection is
  outside this design);
* a fault in the final subtraction or in the add/subtract stage.

### Timing of one product

| clock | event |
|---|---|
| 0 | `start` accepted (`ready` = 1); operands loaded; accumulators cleared |
| 1 .. NW | `gamma_gen` steps words 0 .. NW-1 |
| 2 .. NW+1 | REMO steps words 0 .. NW-1 |
| 3 .. NW+2 | per-word comparison (against `gamma` delayed one clock) |
| NW+3 | `done` pulses with `v`, `f` and `mmrfd_fault`; a new start may be accepted |

With the defaults this is 6 clocks per product.

### Measured coverage at the larger operand size

`tb_mmrfd_coverage` runs `mmrfd` at l = 24, with q = 8380417 (Dilithium's
modulus) and word sizes w = 2, 4 and 8. It flips 1 to 23 bits of alpha, of
omega, or of both, in random or burst mode. Only the plain path sees the
corrupted operands. The check is exact: `mmrfd_fault` must rise exactly
when V is wrong. Every cell of that sweep comes out at 100 %.

This is expected from the algebra. A fault that changes one path's operand
changes that path's product mod q, unless the operand difference times omega
is a multiple of q. Reported figures below 100 % for small eta therefore
depend on where the faults are injected. A fault that reaches both paths the
same way, for example one already in the RAM word, is not detectable by
recomputation at all.

## The memory rule checkers (`memory_rc`)

The index generator `ijk_gen` produces `i, j, k`. The RAM and ROM addresses
are derived from these indices, and the checkers see the same indices:

* `ik_rc`: `ram_fault` when `k > (n-1) >> (i+1)`, the largest k of stage `i`.
  The bound loses one bit per stage.
* `ij_rc`: `rom_fault` when `j > 2^i - 1`.

The control unit checks the indices of every butterfly it issues. The flags
are registered, so they appear one clock after the read.
`memory_fault = ram_fault | rom_fault`. The rules catch a corrupted index
that leaves the stage's legal range. They cannot catch one that lands on
another legal value. That is why coverage depends on which bits flip.

### Measured coverage

`tb_memory_rc_coverage` drives the generator's real index stream, forward and
inverse, through the checkers. It flips eta bits of j, of k, or of both, in
every butterfly. In random mode the eta bit positions are distinct random
ones. In burst mode they are eta adjacent bits. It checks every flag against
the rules and prints the share of corrupted butterflies that were flagged.
Each cell below is 2048 faulty butterflies with one random seed:

| eta | j&k random | j&k burst | j random | j burst | k random | k burst |
|---|---|---|---|---|---|---|
| 1 | 89.3 | – | 56.2 | – | 56.0 | – |
| 2 | 98.6 | 95.4 | 75.6 | 64.8 | 75.1 | 62.7 |
| 3 | 100 | 98.9 | 84.2 | 67.9 | 85.2 | 68.9 |
| 4 | 100 | 100 | 89.3 | 75.7 | 89.5 | 75.1 |
| 7 | 100 | 100 | 98.4 | 94.7 | 98.7 | 94.0 |

Flips in a single field are caught only about half the time when eta is
small. A low-order flip usually leaves the index inside the stage's range.
The early stages have small j bounds and the late stages have small k
bounds, so corrupting both fields together is nearly always caught. These
figures are of the same order as the published Kyber-768 results (for
example 87.8 % for one flipped bit in j and k). The index width and the way
bits are chosen differ, so they are not a reproduction.

## Butterfly pipeline and control

`ct_bu` has the three stages of the paper:

1. **buffer**: U, the second operand, the twiddle and both write-back
   addresses are registered;
2. **V**: the buffered pair goes into `mmrfd` as soon as it is ready;
3. **update**: `U+V` and `U-V` mod q are registered and written back with the
   butterfly's `mmrfd_fault`.

Stage 1 of one butterfly overlaps stage 2 of the previous one, so the unit
completes one butterfly per multiplier period (6 clocks).

`ctrl_unit` issues a read when both of these hold:

* the butterfly buffer is free;
* no read is in flight.

Before the first butterfly of each stage it waits until the pipeline is
empty. Without that wait, a new stage could read a coefficient that the
previous stage has not yet written. A whole transform at the defaults takes
**6179 clocks** in either direction: 1024 x 6, plus the drains and the final
write-back.

The results are written back even when `mmrfd_fault` is raised. Deciding what
to do with a fault is left to the system.

## Top level (`ntt_fd_top`)

    ntt_fd_top
    ├── ctrl_unit        sequencing, memory-mux select
    ├── ijk_gen          i, j, k and the RAM / ROM addresses
    ├── mem_mux          RAM port muxes and read-data demux (NTT or external port)
    ├── coeff_ram        n x l, two read ports and two write ports, synchronous read
    ├── twiddle_rom      2n x l (forward and inverse halves), contents computed at elaboration
    ├── ct_bu            three-stage butterfly
    │   └── mmrfd        word-wise Montgomery multiplier with REMO
    │       ├── gamma_gen
    │       ├── remo_gamma_f  (remo_encoder + a wider gamma_gen)
    │       └── mmrfd_comp
    └── memory_rc        ik_rc, ij_rc, registered flags

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock; synchronous active-low reset |
| `start` | in | one-clock pulse while `busy` = 0 starts a transform |
| `inv` | in | sampled with `start`: 0 forward, 1 inverse |
| `busy`, `done` | out | running; one-clock pulse when the last result is written |
| `ext_rd_en`, `ext_ra`, `ext_rd` | in/in/out | RAM read by other blocks while idle; data one clock later |
| `ext_we`, `ext_wa`, `ext_wd` | in | RAM write by other blocks while idle |
| `mmrfd_fault` | out | pulse: REMO mismatch in the butterfly being written |
| `ram_fault`, `rom_fault`, `memory_fault` | out | pulses from the rule checkers |
| `fault` | out | `mmrfd_fault \| memory_fault` |
| `mmrfd_fault_seen`, `memory_fault_seen` | out | sticky from `start` until the next `start` |

To use the core:

1. Load n coefficients (each < q) through `ext_we`.
2. Pulse `start` (with `inv` set to the direction) and wait for `done`.
3. Read the result back through `ext_rd_en`.
4. Check the `*_seen` flags.

| parameter | default | meaning |
|---|---|---|
| `N` | 256 | polynomial length (power of two) |
| `L` | 12 | coefficient width |
| `W` | 4 | Montgomery word size |
| `Q` | 3329 | modulus (odd) |
| `KW`, `K` | 4, 3 | width and value of the REMO constant |
| `OMEGA` | 17^(256/N) mod 3329 | primitive N-th root of unity; give it explicitly for another `Q` |

`W` may be any width that divides into the word loop. Padding is handled when
`W` does not divide `L`. `q'` and the ROM contents follow from the
parameters. The shared constants and elaboration-time functions are in
`ntt_pkg`.

## Where this RTL departs from, or fills in, the paper

* **Comparison mod q.** The algorithm tests `gamma_i != gamma_i^f`, while the
  proof shows that the two differ by multiples of q. The comparator compares
  residues.
* **Encoder constant.** The architecture figure labels the encoder product
  `k·q'`, while the algorithm and the proof use `K·q`. `K·q` is built, because
  only it preserves congruence. The paper does not give a value for K; K = 3
  is used.
* **The `q'` product.** The figure shows three multipliers in `gamma_i Gen`,
  with no `q'` product. The algorithm multiplies by `q'`, and that is written.
  For q = 3329 and w = 4, `q' = 15`, so the product is a negation mod 16.
* **Skew.** The "delayed clock" is a one-clock skew. The paper claims zero
  extra cycles. Here a product takes `NW + 3` clocks:
  * one to load the operands;
  * `NW` word steps;
  * one for the skew;
  * one to compare the last word and register the result.
* **Loop order and rules.** The paper's loop listing does not produce the
  1024 iterations it quotes for n = 256. Its RAM rule says the bound shifts
  "every 256 iterations". The generator here walks 8 stages of 128
  butterflies, and the bound shifts once per stage. Both printed rules hold
  for this walk and are tight.
* **Transform.** A cyclic n-point NTT, as the paper's algorithm describes,
  not Kyber's 7-layer negacyclic NTT. The twiddles are stored in Montgomery
  form.
* **Memories.** The Kyber system in the paper has 10 polynomial RAMs; one is
  built. The other blocks sharing them (polynomial multiplier, adder, and so
  on) are not described in the paper and are represented by the `ext_*` port.
* **Inverse NTT.** The walk, the upper ROM half and the unscaled output
  described above are this design's choice. The paper only says that the
  same checkers serve the inverse.
* **Not built.** The `n^-1` scaling; the surrounding Kyber / Dilithium / Falcon /
  NTRU systems.
* **Not reproduced.** The FPGA resource, power and timing figures.
* **Own choices.** The hazard drain between stages, the valid/ready handshake
  in the butterfly, the register stage on the checker outputs and the sticky
  flags are choices of this design.

## Verification

Each module has a self-checking testbench in `tb/`. Each compares against
arithmetic written independently (`tb/tb_ref_pkg.sv`, plain 64-bit modular
arithmetic) and ends with a `TB_RESULT checks=… failures=…` line.

| testbench | what it establishes |
|---|---|
| `tb_gamma_gen`, `tb_remo_gamma_f` | every word step against an integer model; the final value ≡ alpha·beta·R^-1 |
| `tb_remo_encoder`, `tb_mmrfd_comp` | exhaustive encoder; comparator on congruent and random pairs |
| `tb_mmrfd` | 1000+ random products, 6-clock latency, no false alarms, 300 injected one-clock upsets on either path all flagged |
| `tb_ct_bu` | 400 streamed butterflies, 6-clock interval, upsets reach the right butterfly's flag |
| `tb_coeff_ram`, `tb_twiddle_rom` | RAM against a model; every forward and inverse twiddle against repeated multiplication |
| `tb_ijk_gen`, `tb_ctrl_unit`, `tb_mem_mux` | both index walks against nested loops; legal issue and drain behaviour; mux and demux routing |
| `tb_ik_rc`, `tb_ij_rc`, `tb_memory_rc` | exhaustive rules; registered flags |
| `tb_mmrfd_coverage` | `mmrfd` at l = 24, q = 8380417, w = 2/4/8: clean products, then 1–23 flipped operand bits on one path; the flag must match exactly whether V is wrong |
| `tb_memory_rc_coverage` | index stream of both walks with 1–7 flipped bits in j and k; every flag against the rules, no false alarm, detection table |
| `tb_ntt_fd_top` | full size (n = 256): one clean forward transform checked word by word against a direct O(n²) evaluation, with the clock count; the inverse of that result, which must give back n·a; then an injected multiplier upset, a corrupted k and a corrupted j, each of which must raise its flag; a count of each mechanism (forward and inverse run, external load/read, multiplier stall, stage drain, each flag) that fails if one never occurred |

The full-size test takes well under a second. To run a testbench with
Verilator 5:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
        rtl/ntt_pkg.sv tb/tb_ref_pkg.sv tb/tb_ntt_fd_top.sv --top-module tb_ntt_fd_top
    ./obj_dir/Vtb_ntt_fd_top

Any other testbench runs the same way. Replace the last file and the top
module name; `tb_memory_rc_coverage` and `tb_mmrfd_coverage` print their
detection tables. `-Wno-fatal` keeps the width warnings of the testbench
arithmetic from stopping the build.

The fault-injection tests use `force`/`release` on internal signals. The
simulator has two states only: every register that is read is reset, or is
written before it is read.

How far to trust it:

* The arithmetic and the transform are checked exhaustively or against
  independent references at the default size.
* The multiplier is also checked at l = 24 with w = 2, 4 and 8. The whole
  core is checked only at its default size.
* The design has not been through FPGA timing closure.
* Fault coverage has been measured only for the injections described above.
