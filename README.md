# HE-LT accelerator: limb-level datapath for triple-hoisted BSGS linear transforms over CKKS

Multiplying an encrypted CKKS vector by a plaintext matrix (a homomorphic linear
transform, HE-LT) costs mostly ciphertext rotations. Each rotation is an
automorphism of the ring Z_Q[X]/(X^N+1) followed by a key switch. A key switch
decomposes the ciphertext, raises it to a larger modulus (ModUp), takes inner
products with a switching key and lowers it again (ModDown). The baby-step
giant-step (BSGS) method already reduces an n-diagonal transform to about
n1 + n2 rotations, and "hoisting" shares one decomposition among all rotations of
the same input. The triple-hoisted variant splits the baby step once more,
n = n1'·n2'·n3'. Its first layer of n1' rotations shares one decomposition. Each
of its outputs feeds a second layer of n2' rotations, and the n1'·n2' rotated
ciphertexts are multiplied by the plaintext diagonals. A third layer of n3'
giant-step rotations sums the result. ModDown is postponed as far as it can be.
The algorithm is split into six phases, each of which keeps its working set on
chip, so that off-chip traffic is mostly switching keys and matrix diagonals.

All of that reduces to a small set of operations on one RNS limb: a
polynomial of N coefficients modulo one 54-bit prime. The operations are the
forward and inverse negacyclic NTT, coefficient-wise products, sums and
scalings, and the automorphism X -> X^g in the NTT domain. This RTL is the
hardware that runs those limb operations at d_p coefficients per clock:

* a row of d_p processing elements (PEs) with eight operating modes;
* a scratchpad of d_p memory blocks that share one address;
* a twiddle scratchpad and a register file for moduli, constants and PE results;
* an automorphism unit that permutes a limb in place, one row per clock, with
  a single d_p-input permutation network;
* three controllers: a top controller plus NTT and coefficient-wise
  sequencers.

The defaults are the largest parameter set: N = 2^16, d_p = 256,
54-bit words, 44 moduli (L+1 = 32 ciphertext primes and α = 12 special primes).

## Storage layout

A limb occupies a *slot* of ROWS = N/d_p consecutive rows (256 rows at the
defaults). Coefficient k lives in memory block k mod d_p, at row
slot·ROWS + k/d_p. The blocks share the row address, so one access moves d_p
coefficients. No permutation is needed for the NTT because the sequencers
generate the addresses that each stage needs.

A limb in the NTT domain is kept in bit-reversed order, because the forward NTT
produces that order. Row i, block j then holds the evaluation with logical index
l = bitrev(i·d_p + j). Index l is the evaluation at ψ^(2l+1), where ψ is a
primitive 2N-th root of unity.

The data scratchpad has 16384 rows per block, which is 64 limbs of 2^16
coefficients. That depth matches the ultra-RAM part of the FPGA build: 768
URAMs at three per four 4K×54 blocks give 1024 blocks, i.e. four groups of 256
blocks, each group 4K deep. The block-RAM groups of that build are not modelled.
Each `mem_block` has one write port and two registered read ports. A read of
the address being written returns the old word (read-before-write).

## The processing element

Each PE (`pe.sv`) contains:

* an upper modular adder and a lower modular adder/subtractor;
* two ×1/2 units;
* one Barrett multiplier;
* an accumulator register D.

Nine select bits s0..s8 route the values. The bits come from a fixed table per
mode (`helt_pkg::pe_ctrl_of`), with don't-care entries driven as 0:

| mode     | s0 | s1 | s2 | s3s4 | s5 | s6 | s7s8 | out0              | out1            |
|----------|----|----|----|------|----|----|------|-------------------|-----------------|
| NTT      | 1  | 1  | 0  | 00   | 0  | 1  | 00   | a0 + a1·tf        | a0 − a1·tf      |
| INTT     | 0  | 1  | 1  | 01   | 0  | 0  | 10   | (a0 + a1)/2       | ((a0 − a1)/2)·tf |
| CWPM     | 0  | 0  | 0  | 10   | 1  | 0  | 01   | a0·a1             |                 |
| CWPA     | 0  | 1  | 1  | 00   | 0  | 0  | 00   | a0 + a1           |                 |
| CM       | 0  | 0  | 0  | 10   | 0  | 0  | 01   | c·a0              |                 |
| CWPA-CM  | 0  | 0  | 0  | 11   | 0  | 0  | 01   | c·(a0 − a1)       |                 |
| CM-ACC   | 0  | 0  | 0  | 10   | 0  | 0  | 00   | D + c·a0          |                 |
| CWPM-ACC | 0  | 0  | 0  | 10   | 1  | 0  | 00   | D + a0·a1         |                 |

The meaning of each select value is listed in `helt_pkg.sv`. It was chosen so
that every row of the table gives the formula beside it. The first term of an
accumulation raises `acc_clr`, so the upper adder adds 0 instead of the stale D.
The multiplier reaches a0 − a1 through its own subtractor. This keeps the
multiplier → lower adder → multiplier path from forming a combinational loop;
no single mode uses that path.

The Barrett multiplier (`mod_mul.sv`) needs a precomputed μ = ⌊2^(2W)/q⌋ per
modulus and requires 2^(W−1) < q < 2^W. It ends with at most two conditional
subtractions. The PE is combinational except for D.

## Automorphism in place, one row per clock

This is the least obvious part of the design. In the NTT domain, X -> X^g
permutes the evaluations: logical index l goes to l' = ((g·(2l+1) mod 2N) − 1)/2.
Done naively, that is an N-point permutation. Two facts make it cheap.

1. **Rows map to whole rows.** Write the stored position of l as
   b·(N/d_p) + a, with a = bitrev(i) and b = bitrev(j). Define
   x = (g·a + (g−1)/2) mod N and split it as x = t·(N/d_p) + u. Then every
   coefficient of row i lands in row i' = bitrev(u). Inside that row, lane j
   goes to lane j' = bitrev((g·b + t) mod d_p). One row is therefore permuted
   by one d_p-input network, with no mixing between rows.
2. **The lane permutation routes itself.** In bit-reversed lane numbering,
   the map b -> g·b + t (with g odd) has a triangular property: bit s of the
   output depends only on bits 0..s of the input. `perm_network.sv` has
   log2(d_p) stages of d_p two-way multiplexers, d_p·log2(d_p) in total. Stage
   s exchanges lanes 2^s apart whenever bit s of the destination tag disagrees
   with the lane position. The triangular property means no two lanes ever
   compete for one output. An assertion checks this during simulation.

`auto_unit.sv` works along the cycles of the row permutation i -> i':

* **Each clock:** the row read in the previous clock (row i) is permuted and
  written to row i'. In the same clock, row i' is read. The memory is
  read-before-write, so no row is lost and no second buffer is needed.
* **Flags:** each row has a flag, set when the row is read.
* **End of a chain:** when i' is already flagged, the chain has closed. A
  two-level priority encoder (`prio_enc2.sv`, groups of 16) then supplies the
  lowest unflagged row, and a new chain starts there.
* **Timing:** the unit takes ROWS + 1 clocks, plus one clock for each new chain
  whose first read cannot overlap a write.

The map moves the value at l to position l'. With the ordering above, limb
b(X) becomes b(X^(g^−1)). For the rotation φ_r: b(X) -> b(X^(5^r)), pass
g = 5^(−r) mod 2N in the command's `galois` field. The exponent bits above
log2(2N) are ignored.

## NTT scheduling

`ntt_fsm.sv` runs an in-place negacyclic NTT:

* **Forward:** Cooley–Tukey butterflies. Input in natural order, output in
  bit-reversed order.
* **Inverse:** Gentleman–Sande butterflies. The PE's INTT mode halves in every
  stage, so the 1/N factor needs no extra pass.

Stage s has butterfly distance t = N/2^(s+1). The stage walks ROWS/2 row
pairs. Pair p uses h = max(t/d_p, 1), r0 = (p div h)·2h + (p mod h) and
r1 = r0 + h.

* When t ≥ d_p, the two butterfly inputs sit in the same lane of rows r0 and r1.
* When t < d_p, both inputs are in one row. `ntt_router.sv` then gathers lane
  pairs (b, b+t) from the two rows onto the PE inputs and scatters the results
  back. Both rows are still processed in one step.

Every pair takes four clocks, and the step is not pipelined:

1. Read r0, r1 and the twiddle row.
2. The PEs compute; the register file captures the two result rows.
3. Write r0.
4. Write r1.

A full NTT therefore takes 4·log2(N)·ROWS/2 clocks, plus two. At the defaults
that is 8192 clocks (8194 with the two extra), or about 27 µs at 300 MHz.

Twiddles are stored pre-expanded: one d_p-wide row per (stage, pair), at row
tw_slot·ROWS + s·ROWS/2 + p. Lane b of that row holds the twiddle of its
butterfly. For the forward transform that is ψ_rev[N/(2t) + j/(2t)], where j
is the butterfly's first coefficient index. The inverse table uses ψ^−1 in the
same places. One table has log2(N)·N/2 words, which is 2048 rows at the
defaults. Forward plus inverse tables for one modulus fill the 4096-row twiddle
scratchpad. Other moduli need their tables reloaded.

## Coefficient-wise operations and accumulation

`cw_fsm.sv` streams one row per clock through the PE array. It reads A from
slot_a and B from slot_b, uses constant `const_idx` from the register file, and
writes to slot_d.

The accumulate modes sum `nterms` terms. Term k reads slots slot_a+k and
slot_b+k and uses constant const_idx+k. The PE accumulator adds one product per
clock, and only the last term is written back. A command takes nterms·ROWS + 1
clocks (plus a few for handshakes).

Key-switching inner products, plaintext-diagonal products and basis-conversion
sums are all this pattern.

## Commands and top-level ports

`helt_accel` takes one `cmd_t` at a time over valid/ready and pulses `cmd_done`
when the command finishes. The fields:

| field | use |
|---|---|
| `op` | `OP_NTT`, `OP_INTT`, `OP_CW`, `OP_AUTO` |
| `mode` | PE mode for `OP_CW` |
| `slot_a`, `slot_b`, `slot_d` | limb slots: operand A (also the in-place slot for NTT and automorphism), operand B, destination |
| `nterms` | number of accumulated terms (ACC modes) |
| `tw_slot` | first twiddle slot of the table (NTT/INTT) |
| `mod_idx` | modulus and Barrett constant in the register file |
| `const_idx` | first constant |
| `galois` | odd Galois element for `OP_AUTO` |

`top_fsm` turns slots into physical rows (slot·ROWS) and starts one of three
engines. It hands that engine the scratchpad ports and the PE array, and it
counts finished commands per operation (`n_cmd`). `n_auto_chain` counts chain
restarts in the automorphism unit.

In the FPGA design, the off-chip side is HBM (two stacks behind 32 AXI
channels) with ping-pong buffers. Here that side is replaced by row-wide host
ports:

* `host_we/host_waddr/host_wdata` and `host_re/host_raddr/host_rdata` access
  the data scratchpad;
* `tw_we/...` loads the twiddle scratchpad;
* `mod_we/...` loads the moduli and μ values;
* `const_we/...` loads the constants.

All control registers take an asynchronous active-low `rst_n`; the memories are not reset. Use the host ports only while no command runs. Host reads return data one
clock after `host_re`.

The six phases of the linear transform become a command stream. The host or a
sequencer issues it: moving limbs in and out, ModUp/ModDown as NTT, CM-ACC and
INTT commands, automorphisms, and inner products as CWPM-ACC. The controller
itself does not sequence phases.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `W` | 54 | coefficient width |
| `N` | 65536 | ring dimension (power of two) |
| `DP` | 256 | lanes, PEs and memory blocks (power of two, N/DP ≥ 4) |
| `DEPTH` | 16384 | data scratchpad rows |
| `TW_DEPTH` | 4096 | twiddle scratchpad rows |
| `NMOD` | 44 | moduli in the register file |
| `NCONST` | 256 | constants in the register file |

The other published parameter sets use N = 2^13 or 2^15 with d_p = 128. They
need an instance with those values, because N and d_p are fixed at
elaboration. The small testbenches run the whole design at N = 64, d_p = 8,
W = 17 (q = 65537).

## Simulation

Every file in `tb/` is self-checking and prints
`TB_RESULT checks=<n> failures=<m>`. The reference arithmetic is in
`tb/tb_ref_pkg.sv` (128-bit modular helpers). To build and run one testbench
with plain Verilator:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/helt_pkg.sv tb/tb_ref_pkg.sv tb/tb_helt_accel.sv --top-module tb_helt_accel -Mdir obj
obj/Vtb_helt_accel
```

Module testbenches: `tb_mod_mul`, `tb_pe`, `tb_pe_array`, `tb_perm_network`,
`tb_auto_unit`, `tb_scratchpad`, `tb_reg_file`, `tb_ntt_fsm`, `tb_cw_fsm`,
`tb_top_fsm`. What the two top-level testbenches check:

* **`tb_helt_accel`** (small parameters):
  * NTT against direct evaluation;
  * negacyclic convolution through NTT, CWPM and INTT;
  * chained automorphisms against b(X^(g^−1)), including multi-chain
    permutations;
  * every coefficient-wise mode.

  It counts each mechanism: every mode used, in-row and cross-row butterfly
  stages, automorphism chain restarts, multi-term accumulation.
* **`tb_helt_accel_full`** (the default 2^16 × 256 instance): one NTT with its
  latency, spot-checked against direct evaluation; an automorphism checked at
  every position; the inverse automorphism; the INTT round trip; and a
  two-term CM-ACC into the top slot. It takes under a minute.
* **`tb_helt_lt_step`** (default size): one limb of a plaintext-matrix step
  of the transform. It copies a limb four times, rotates the copies by
  φ_0..φ_3, and sums them against four diagonals with one CWPM-ACC. It then
  rotates the sum by φ_4 and adds it to a running total. Every coefficient is
  checked against a software model of the index map, as are the cycle counts.

## Where this departs from the published design, and how far to trust it

The following follow the published design: the PE modes and select table, the
row-major layout, the (I)NTT without a permutation network, the row/lane
decomposition of the automorphism, in-place writing with per-row flags and a
two-level priority encoder, and a network of d_p·log2(d_p) multiplexers
controlled by j'.

The following are this design's own choices:

* **PE multiplexer meaning.** Which input each select value picks was derived
  from the formulas; the figure gives only the select names.
* **Multiplier and PE timing.** The Barrett multiplier and a fully
  combinational PE.
* **NTT step.** A four-clock, unpipelined NTT step and the pre-expanded
  twiddle table.
* **Scratchpad.** A single scratchpad address space with two read ports, in
  place of several memory groups with separate addresses.
* **Permutation network.** The butterfly half of a Beneš network, which has
  the multiplier count given for the network. A full Beneš network has
  2·log2(d_p) − 1 stages and is not needed for this permutation.
* **`acc_clr` and the command format.**

The following are not built:

* the HBM/AXI side and ping-pong transfers that overlap with computation;
* the phase schedule of the top controller;
* the block-RAM memory groups.

So the RTL cannot run a whole linear transform on its own. The largest
published parameter set needs up to 128 limbs on chip during one phase; the
scratchpad holds 64.

The arithmetic has been checked against an independent 128-bit model at
N = 64 and at full size. Every testbench was also run against a deliberately
broken copy of its module, and each one detected the fault. Throughput numbers
(clocks per NTT, automorphism, accumulation term) are checked in the
testbenches. Nothing has been run on an FPGA or checked for timing closure.
A single-cycle 54-bit Barrett multiplication would need pipelining to reach
the published clock rates.
