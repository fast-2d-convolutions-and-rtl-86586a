# 2D convolution and cross-correlation through the Discrete Periodic Radon Transform

This is synthesizable SystemVerilog for a scalable 2D convolver/correlator.
It does not slide the kernel over the image. It moves both operands into
the Discrete Periodic Radon Transform (DPRT) domain. There a 2D circular
convolution falls apart into N+1 independent 1D circular convolutions, one per
projection direction. Those are computed in parallel by an array of J
pipelined 1D convolvers. The result is then brought back with the inverse DPRT.

Two knobs trade area for speed:

- **H**: how many image rows the forward and inverse DPRT units process at a time.
- **J**: how many 1D convolvers work in parallel.

The defaults are N = 41, H = 32, J = 32, with 8-bit pixels and 8-bit kernel taps.
This build convolves a 21 × 21 image block with a 21 × 21 kernel exactly, with 34-bit
results. It takes 539 clock cycles from the first image row to the finished
result. With H = N and J = N + 1 the same RTL is the fastest member of the
family ("FastConv"). With H = 2 and J = 1 it is the smallest.

The architecture follows a published design: DPRT-based "FastScaleConv /
FastScaleXCorr". The 1D convolver, the overall data flow, the bit-width rules
and the signal names are taken from it. The insides of the forward and inverse
DPRT units are published separately. They are not reproduced here but built
in a simpler way of this design's own; see *Where this design departs*.

## 1. The mathematics

### The DPRT

Let N be prime and f an N × N array. The DPRT has N + 1 directions m. Each
direction has N rays d:

    F(m, d) = Σ_i f(i, <d + m·i>_N)        m = 0 … N-1
    F(N, d) = Σ_j f(d, j)                   (row sums)

Here `<x>_N` is the non-negative remainder. Every direction sums all N² pixels
once, so every row of F adds up to the same total S.

The inverse is exact:

    f(i, j) = ( Σ_{m<N} F(m, <j - m·i>_N)  -  S  +  F(N, i) ) / N

The division by N always leaves no remainder.

### Convolution property

Take h of the same size, and let y be the 2D *circular* convolution of g and h.
Then for every direction m:

    Y(m, ·) = G(m, ·) ⊛ H(m, ·)        (1D circular convolution of length N)

Linear convolution needs zero padding. Pad a P1 × P2 image block and a Q1 × Q2
kernel into N × N with N ≥ max(P1+Q1-1, P2+Q2-1), N prime. The circular result
then equals the linear one. At the default N = 41 this allows, for example, a
21 × 21 block with a 21 × 21 kernel, or a 23 × 23 block with a 19 × 19 kernel.

The complete operation is therefore:

1. Take G = DPRT(g).
2. For m = 0 … N, form Y(m,·) = G(m,·) ⊛ H(m,·). H = DPRT(h) is precomputed, since the kernel is known in advance.
3. Take y = DPRT⁻¹(Y).

### Word widths

Let n = ⌈log₂ N⌉; n = 6 at N = 41. Every sum of N terms grows by n bits.

| quantity | width | default |
|---|---|---|
| image pixel g | B, unsigned | 8 |
| kernel tap h | C, two's complement | 8 |
| G = DPRT(g) | B' = B + n, unsigned | 14 |
| H = DPRT(h) | C' = C + n, signed | 14 |
| Y, one 1D convolution | B + C + 3n, signed | 34 |
| inverse DPRT before the division | B + C + 4n, signed | 40 |
| result y | B + C + 3n, signed | 34 |

The results are exact: no rounding or truncation happens anywhere.

## 2. Block structure

```
              G_DRi ──► sfdprt_system ──port A (G rows)──► ┐
     (N rows, MODE)     forward DPRT +  ◄─port X (Y rows)──┤  J × conv1d_circ
                        (N+1)×N memory ──port X──┐          │   (1D circular
 H_DRi ──► sfdprt_memory ──(H rows)─────────────┼────────► ┘    convolvers)
  (precomputed kernel DPRT)                      ▼
                                          isfdprt_system ──► oRAM_Fo
                                          inverse DPRT,        (result rows)
                                          ÷N, N×N memory
          fastscaleconv_fsm: schedule, convolver enables, write-back, hand-over
```

| module | role |
|---|---|
| `fastscaleconv_top` | The whole system: wiring and the host interface. |
| `sfdprt_system` | Takes image rows and runs the forward DPRT. Its memory holds G and later Y. |
| `sfdprt_memory` | Holds the precomputed DPRT of the kernel, N + 1 rows. |
| `conv1d_circ` | One pipelined 1D circular convolver of length N (J copies). |
| `isfdprt_system` | Inverse DPRT, normalisation, and the result memory. |
| `fastscaleconv_fsm` | Controller of the convolution phase and of the hand-over to the inverse DPRT. |
| `dprt_engine` | Strip-wise projection engine shared by the forward and inverse DPRT. |
| `adder_tree` | Pipelined adder tree with a valid bit. |
| `fsc_pkg` | Width helpers and the modular inverse used for the division. |

The memory inside `sfdprt_system` is used twice:

- It receives the image DPRT G.
- The convolvers overwrite it, direction by direction, with the convolved rows Y.
  Port A gives G rows to the convolvers. Port X takes the results back.

The inverse DPRT then reads Y through port X. This is why that memory is
B + C + 3n bits wide even though G needs only B + n.

## 3. The 1D circular convolver (`conv1d_circ`)

This is the heart of the design and its subtlest part. We want

    F(d) = Σ_k G(k) · H(<d - k>_N),   d = 0 … N-1

with N multipliers working in parallel, so one output appears per clock cycle.

### Structure

- **G register.** Loaded in parallel and held for the whole operation.
- **Kernel register.** Loaded *flipped*, by wiring alone: register k takes
  H(N-1-k). After that it rotates by one position per cycle.
- **Multipliers.** N multipliers form G(k) · kernel(k) every cycle, with one register stage.
- **Adder tree.** A pipelined tree of ⌈log₂ N⌉ registered levels sums the products.
- **Output register.** The sums enter at index 0 and move up one place per new
  sum. The outputs come in the order F(N-1), F(N-2), …, F(0). After N sums,
  F(d) sits at `Fo[d]`.

### Rotation direction

The rotation direction decides whether the result is right. Directly after the
flipped load, register k holds H(N-1-k) = H(<(N-1) - k>). That is the kernel
alignment needed for output d = N-1.

The next output needed is d = N-2. So each rotation must make register k hold
H(<d-k>) for the next smaller d. That means register k takes the old value of
register k+1 (mod N):

    h[k] <= h[(k + 1) mod N]

In the published figure this is a "right shift", because the register array is
drawn with index N-1 on the left, with the feedback running from the index-0
end. Applying the published algebraic shorthand literally, as a shift towards
higher indices, gives the mirror-image order and wrong results.

### Timing

- The load edge and the N-1 shift edges give N products.
- The last sum reaches the output register N + n + 1 edges after the load.
- `v` pulses on that edge.
- The whole operation spans **N + ⌈log₂ N⌉ + 2 cycles**, the published latency.

A new load may follow directly after the N kernel positions have been issued.
This happens when the groups overlap. The previous result keeps draining
through the pipeline.

## 4. The DPRT units

### Strip engine (`dprt_engine`)

Both DPRT units use one engine. It computes, for all m, d < N:

    Y(m, d) = Σ_r X(r, <d + S·m·r>_N),     S = +1 (forward) or -1 (back-projection)

The rows of X are taken in strips of H. For each strip starting at row r0:

1. The H rows are read one per cycle into H row registers (H cycles), plus one capture cycle.
2. The engine then runs N steps, one per direction m.
3. At step m, row register k has been rotated by S·m·k positions. Each column j
   therefore holds the pixels X(r0+k, <j + S·m·k>).
4. N adder trees, one per column with H inputs each, sum these.
5. The column sums are ray sums of direction m, but for rays d = j − S·m·r0.
   A single output rotator by <S·m·r0> puts them in place.

The engine does not own a memory. For every direction of every strip it issues
an accumulate request. The owner stores the data on the first strip and adds it
on the following ones.

Timing is ⌈N/H⌉·(H + N + 1) + ⌈log₂ H⌉ + 1 cycles from `start` to `done`.
The hardware has:

- H · N row-register words;
- N adder trees of H inputs;
- one N-word rotator.

### Forward DPRT (`sfdprt_system`)

- `start` resets the row counter.
- The image then arrives as N rows of N pixels, one row per cycle with `iwr`.
  Rows beyond the real block must be zeros: the host pads them.
- As soon as the N-th row is stored, the transform starts.
- The row-sum direction m = N is formed by an extra adder tree while the engine
  reads the rows.
- `done` pulses after N + ⌈N/H⌉(H+N+1) + ⌈log₂ H⌉ + 2 cycles, counted from the first row.

### Inverse DPRT (`isfdprt_system`)

The unit works in three passes:

1. Read direction N. Keep it, and sum it with an adder tree to get S.
   This takes 3 + n cycles.
2. Run the engine with S = −1 over directions 0 … N-1. This accumulates
   Σ_m F(m, <j − m·i>) into an N × N memory of B + C + 4n bits.
3. Normalise one row per cycle: subtract S, add F(N, i), divide by N.

The division is exact. The design therefore multiplies by the inverse of N
modulo 2^(B+C+4n) and keeps the low bits. That gives the exact signed quotient
without a divider. N is odd, so the inverse exists. It is computed at
elaboration time by Newton iteration in `fsc_pkg::inv_mod_pow2`.

The result is kept in B + C + 3n bits, which is enough for every linear
convolution of the stated sizes. It is read one row per cycle with `oRAM_rd`
and `oRAM_xaddr`.

## 5. Scheduling the convolvers (`fastscaleconv_fsm`)

The N + 1 directions are processed in L = ⌈(N+1)/J⌉ groups.

- In group p, direction pJ + i goes to convolver i.
- One direction is read per cycle from both memories. Convolver i loads one
  cycle after its read and then shifts for N-1 cycles.
- The loads are staggered by one cycle, so the J convolvers finish one after
  another. Their results go back through port X one per cycle, without conflicts.
- A group lasts J + N cycles.
- Directions beyond N in the last group are skipped.
- The controller does not wait out the last group. Two cycles after the
  (N+1)-th write-back it starts the inverse DPRT and hands port X to it.

When J < n + 1, a convolver is reloaded before its previous result has left
the pipeline. The write-back address is therefore derived from how many results
*that* convolver has produced (pJ + i), not from a stored load address.

### Cycle counts per block

Cycles are counted from the first image row to `done`.

| phase | cycles | default (41/32/32) |
|---|---|---|
| forward DPRT | N + ⌈N/H⌉(H+N+1) + ⌈log₂H⌉ + 2 | 196 |
| convolutions | (L−1)(J+N) + r + N + n + 3, where r = N+1−(L−1)J | 133 |
| inverse DPRT | 3 + n + ⌈N/H⌉(H+N+1) + ⌈log₂H⌉ + 2 + N + 2 | 207 |
| hand-over | 3 | 3 |
| **total** | | **539** |

Other builds of the same RTL (counts from the formulas above; every row except 41/2/1 is also run in simulation, see section 8):

| N / H / J | cycles here | published implementation |
|---|---|---|
| 41 / 32 / 32 | 539 | 658 |
| 41 / 8 / 8 | 1003 | 1094 |
| 41 / 2 / 1 | 3723 | 3817 |
| 17 / 2 / 1 | 745 | 799 |
| 37 / 37 / 38 (FastConv) | 338 | 291 |

The differences come from the DPRT units. The published scalable DPRT has its
own pipeline (⌈N/H⌉(N+3H+3) + N + ⌈log₂H⌉ + 1 cycles); the strip engine here
differs from it. The convolution phase also does not wait out the last group.

### Resources at the defaults

- J · N = 1312 multipliers, of 14 × 14 bits.
- J adder trees of 41 inputs.
- Three N-row memories (image/result DPRT, kernel DPRT, inverse accumulator).
- The row registers and adder trees of the two strip engines.

## 6. Cross-correlation

Cross-correlation is convolution with a kernel flipped in both directions. There are two ways to get it:

- **Flipped kernel.** Load the DPRT of the flipped kernel into `sfdprt_memory`
  and run with MODE = 0. This is the method of the published algorithm: flip h,
  then store its DPRT.
- **`MODE = 1`.** The forward DPRT unit stores the image block flipped instead:
  the rows in reverse order, each row reversed. The published design drives the
  same row-order and element-order flips with its MODE signal, but applies them
  while loading the kernel. Here the kernel DPRT is a precomputed constant, so
  the flip is applied to the image. With the unflipped kernel DPRT loaded, the
  result is

      y(k, l) = c(<k+1>_N, <l+1>_N),   c(u, v) = Σ_{a,b} g(a,b) · h(<a+u>_N, <b+v>_N)

  This is the circular cross-correlation with its indices shifted by one. The
  shift comes from the flip mapping index i to N-1-i rather than to −i.

## 7. Using the top level

1. Assert `rst` (synchronous, active high) for one cycle or more. Reset clears
   the control state only; the memories are not cleared and need not be.
2. Write the kernel DPRT, N + 1 rows of N signed C'-bit words: pulse `start`,
   then give the rows in direction order 0 … N on `H_DRi`, one per cycle with
   `owrH = 1`. The kernel memory has no write address; `start` rearms its row
   counter. It is shared with the image path, which only begins working when
   image rows arrive. The kernel stays valid
   for any number of blocks.
3. For each block:
   - Pulse `start`, with `MODE` set.
   - Give the N zero-padded rows on `G_DRi` with `iwr = 1`, one per cycle.
4. Wait for the `done` pulse. The fixed latency in section 5 can be used instead.
5. Read result row i by setting `oRAM_rd = 1` and `oRAM_xaddr = i`. The row
   appears on `oRAM_Fo` on the next cycle.
6. Start the next block with `start`. No reset is needed between blocks.

`done_G`, `v_conv` and `done_inv` are status outputs.

Larger images are handled by overlap-and-add outside the design. The image is
split into P × P blocks and each block is convolved. Neighbouring N × N results
overlap by Q − 1 and are added. As an example, a 640 × 480 frame with a 19 × 19
kernel uses 23 × 23 blocks at N = 41:

- 28 × 21 = 588 blocks;
- 588 × 539 = 316,932 cycles per frame;
- 30 frames/s therefore needs about 9.5 MHz.

## 8. Verification

Each module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=… failures=…` at the end.

| testbench | what it checks |
|---|---|
| `tb_conv1d_circ` | Back-to-back operations at N = 41 against a direct circular convolution; extreme operands; latency N+n+2. |
| `tb_sfdprt_system` | Random, all-maximum and flipped (MODE=1) images at N=41, H=32. Every direction is read through both ports and compared with the DPRT definition. Cycle count; port-X write/read. |
| `tb_sfdprt_memory` | All rows, including extreme values, in scrambled order; read latency; hold when not enabled. |
| `tb_isfdprt_system` | Random, extreme-checkerboard and impulse blocks are reconstructed exactly from their DPRT. Cycle count. |
| `tb_fastscaleconv_fsm` | Controller at N=41, J=32 with timing-only convolver models: every direction read once, N-1 shifts per load, write-back addresses, the time of the last write-back, the hand-over. |
| `tb_fastscaleconv_top` | End to end at N=7/H=2/J=3, N=7/H=7/J=8 (FastConv) and N=13/H=4/J=5, running side by side. Every output pixel is compared with a direct linear convolution or cross-correlation, and every block's cycle count is checked. It also counts that each mechanism occurred: strip changes in both DPRT units, convolver reloads across groups, a partial last group, MODE=1, blocks without reset in between. |
| `tb_fastscaleconv_full` | The default build (N=41, H=32, J=32, B=C=8, no parameter overrides). Three 41 × 41 results (extreme values, random convolution, random cross-correlation) are checked pixel by pixel, with the 539-cycle latency. |
| `tb_fastscaleconv_workloads` | The other published configurations, end to end: FastConv at N=37/H=37/J=38, N=41/H=8/J=8 and N=17/H=2/J=1. Every pixel and every block's cycle count (338, 1003 and 745) is checked. |

`fsc_driver` is the shared host model and checker of the last two testbenches.
It computes the kernel DPRT from its definition and the reference result by
direct summation.

To simulate with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/fsc_pkg.sv tb/tb_fastscaleconv_full.sv \
          --top-module tb_fastscaleconv_full -o sim && ./obj_dir/sim
```

Replace the testbench name to run another one. The full-size build takes a few
minutes to compile and well under a second to run. The smaller testbenches
compile in seconds.

## 9. Where this design departs from the published one

- **DPRT internals.** The forward and inverse scalable DPRT units use the strip
  engine of section 4, not the published scalable DPRT architecture. The
  function and the H trade-off are the same. The cycle counts differ (section 5).
- **Normalisation.** The inverse DPRT divides exactly, by multiplying with the
  inverse of N mod 2^W, and returns B + C + 3n bits. The published text leaves
  extra fractional precision bits as an option; an exact integer result needs none.
- **Write-back.** Convolution results overwrite the image DPRT in the
  forward-DPRT memory, through its second port. The published diagram connects
  the convolver outputs to that port, but where the results are stored is not
  spelled out.
- **End of the convolution phase.** The controller starts the inverse DPRT as
  soon as the last direction has been written. It does not wait for a full final group.
- **Cross-correlation.** `MODE = 1` flips the image, not the kernel, with the
  one-index shift of section 6. Loading a flipped kernel's DPRT gives the
  unshifted cross-correlation.
- **Kernel width.** The published text gives the kernel width both as 12 bits
  and as 8 bits for the FPGA implementations. The 8-bit value is used: it is the
  one that agrees with the 34-bit outputs quoted for N = 41. C is a parameter.
- **Kernel DPRT.** The kernel DPRT is assumed precomputed and written row by
  row in direction order. Computing it on chip, for kernels that change, would need a
  second forward-DPRT unit or a time-shared one. That is not included.
- **Not included.** The low-rank (SVD/LU-based) convolver family described
  alongside this design is a different architecture, with its own linear
  convolvers and custom memories. It is not part of this RTL.
