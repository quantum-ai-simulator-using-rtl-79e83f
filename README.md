# A streaming quantum-kernel engine for block-product feature maps

A quantum support vector machine needs the kernel
K(x, x') = |<psi(x)|psi(x')>|^2. Here |psi(x)> is the state a quantum circuit
prepares from a feature vector x. On a general quantum simulator this costs
matrix products of size 2^n x 2^n for every pair of samples. This design
picks a circuit shallow enough that each state can be written down directly,
in O(2^n) complex multiplications. It then builds the whole pipeline in
16-bit fixed point, so that one kernel entry comes out every two clock
cycles.

The feature vector (d features) is cut into blocks of n features, and each
block drives its own n-qubit register with no entanglement between blocks.
The kernel is then a product over blocks:

    K(x, x') = prod_b |<psi_b(x_b)|psi_b(x'_b)>|^2

The hardware computes the kernel matrix of one block: all K_ij for i <= j over
up to 1024 samples. The host runs it once per block and multiplies the
per-block matrices element by element. The default build has n = 6 qubits.
At 250 MHz it computes a 1000-sample kernel matrix (500,500 entries) in about
4.0 ms.

## The circuit and why it is cheap

For one block with angles x_1 .. x_n (qubit 1 first):

    |psi> = (Rz(x_1) (x) ... (x) Rz(x_n)) · CNOT(n-1,n) ··· CNOT(1,2) · (U_1 (x) ... (x) U_n) |0...0>
    U_q = Ry(x_q) Rz(x_q) H

Three observations turn this into a short list of multiplications.

1. **Only one column of U is needed.** The input is |0...0>, so U|0..0> is the
   tensor product of the first columns of the U_q. Write c = cos(x/2) and
   s = sin(x/2). Then the first column of U_q is (chi1, chi2)/sqrt2, with

       chi1 = (c^2 - s c) - i (c s + s^2)
       chi2 = (s c + c^2) + i (c s - s^2)

   The 1/sqrt2 of the Hadamard gate is left out here and put back later
   (see *The tensor tree*).
2. **The final Rz layer is diagonal.** Its diagonal is the tensor product of
   (phi1, phi2) = (c - i s, c + i s) over all qubits.
3. **The CNOT chain is a permutation.** Each row of the chain's matrix holds
   exactly one 1, so applying it just reorders entries:

       f_k = v_k · u_xi(k)

   Here u is the product-state vector, v is the Rz diagonal, and xi(k) is
   the column of the 1 in row k (see *The entanglement index*).

The per-block kernel is then |sum_k conj(f_k(x_i)) f_k(x_j)|^2. For n = 6 the
work per sample is 2 x 62 complex multiplications to build u and v, plus 64
to form f. A pair then needs 64 more multiplications and two squares.

## Dataflow

```
s_axis ──► data_divider ──► angle RAM ×n ──► cordic_sincos ×n ──► uv_gen ×n ──► chi/phi RAM ×n
                                                                                   │ (read x_i, then x_j)
                                 ┌────────────── tensor_tree (U side, ×1/2 scaling) ◄┤
                                 │               tensor_tree (V side)              ◄┘
                                 ▼
                             qstate (f = v · u_xi) ──► inner_product ──► square_norm ──► kfifo ──► m_axis
                                                         ▲
                              qk_ctrl: phases, pair order, back-pressure
```

| Module | Job |
|---|---|
| `qk_pkg` | Number formats, complex and gate types, rounding/saturation, conjugation |
| `data_divider` | Sends word q of sample s to the angle RAM of qubit q at address s; checks `tlast` |
| `qk_ram` | Simple dual-port RAM with a registered read (angle RAMs and chi/phi RAMs) |
| `cordic_sincos` | Pipelined CORDIC: cos and sin of the half angle |
| `uv_gen` | chi1, chi2, phi1, phi2 from c and s (8 real products) |
| `cmult` | Complex multiplier with 3 real multipliers |
| `tensor_unit` | (a1, a2) ⊗ (b1, b2): four complex multipliers |
| `tensor_tree` | n−1 layers of tensor units: u (first column of U) or v (diagonal of V) |
| `qstate` | f_k = v_k · u_xi(k) |
| `inner_product` | Stores conj(f(x_i)), then sums conj(f(x_i)) · f(x_j) |
| `square_norm` | K = Re² + Im² |
| `kfifo` | Output FIFO, first-word-fall-through, AXI4-Stream master side |
| `qk_ctrl` | LOAD / PREP / PAIRS / DRAIN sequencing, upper-triangle walk, credit back-pressure |
| `qk_top` | All of the above |

## Number formats

All datapath values are signed 16-bit.

| Quantity | Format | Range | Why |
|---|---|---|---|
| Feature x on the input stream | Q4.12 | [−8, 8) | Room for scaled features |
| Half angle x/2 in the angle RAM | Q3.13 | [−4, 4) | The same 16 bits as x, read with one more fractional bit, so the halving is free |
| c, s, chi, phi, u, v, f, inner product, K | Q2.14 | [−2, 2) | chi entries reach about 1.21 in magnitude |

Each arithmetic step keeps its products at full precision (36 bits). It
rounds once, half up, and saturates (`fx_round_sat`). The inner product sums
its 64 full-precision products before rounding. Saturation never triggers on
valid data. |chi|² = 1 ∓ sin(2x)/2, so |chi| < 1.23, and with the 1/2
scaling in the tensor tree no intermediate magnitude exceeds 1.5.

## The tensor tree

This is the part that needs the most care. Qubit 1 is the most
significant bit of the 2^n-entry index, so

    u[b_1 b_2 ... b_n] = chi_{b_1}^(1) · chi_{b_2}^(2) ··· chi_{b_n}^(n).

The tree starts from the least significant end.

* **Layer 1** is one tensor unit. It forms the 4-vector of qubits n−1 and n:
  chi^(n-1) ⊗ chi^(n).
* **Layer k ≥ 2** prepends qubit n−k. Entry a·2^k + j of the new vector is
  pair[n−k][a] · w[j], where w is the 2^k-entry vector from layer k−1. It
  uses 2^(k−1) tensor units. Each unit takes two neighbouring entries
  w[2p], w[2p+1] and writes entries 2p, 2p+1, 2^k+2p and 2^k+2p+1.
* The total is 4·(2^(n−1) − 1) complex multipliers: 124 per tree for n = 6.
  Each layer is one register stage, so the latency is n−1 clocks. The input
  pairs of later qubits pass through matching delay lines.

**Where the Hadamard factors go.** Each qubit drops a factor 1/√2. Applying
1/√2 in fixed point would cost a multiplier and lose precision. Instead, on
the U side only (parameter `HADAMARD = 1`), every layer that closes an even
number of qubits shifts its products right by one more bit. Those are layers
1, 3, 5, …, and the shift is `cmult`'s `EXTRA_SHIFT`. That is an exact ×1/2
inside the existing rounding. Two effects follow:

* the magnitudes stay near 1 all the way up the tree;
* for odd n, u leaves the tree too large by exactly √2.

Both states of a pair carry that √2, so their inner product is twice too
large. For odd n, `inner_product` therefore halves its real and imaginary
sums before the squaring. The V tree (`HADAMARD = 0`)
needs no scaling, since Rz is unitary with entries of modulus 1.

## The entanglement index

The CNOT chain's matrix is built by a block recursion. U_2 = I and Y_2 = X
(the bit flip), and for larger sizes

    U_{2^(m+1)} = [ U_{2^m}   0      ]     Y_{2^(m+1)} = [ 0        U_{2^m} ]
                  [ 0         Y_{2^m} ]                  [ Y_{2^m}  0       ]

`qstate` walks this recursion at elaboration time to find, for each row k,
the column xi(k) that holds the 1. Reading the index bits from the top down,
the top bit chooses a quadrant. Being in a Y block flips the column's next
bit. So each column bit is the XOR of the row bit and the row bit above it:
**xi(k) = k XOR (k >> 1)** for 0-based k, a binary-reflected Gray code. For
n = 2 this gives 1, 2, 4, 3 in 1-based terms. No matrix is stored, and the
permutation costs only wiring. The gate-level reference in the testbenches
applies CNOT(1,2) first, then CNOT(2,3), and so on. It confirms this ordering
entry by entry.

## Pair scheduling and throughput

A run goes through four phases in `qk_ctrl`:

1. **LOAD.** The stream brings n_samples × n words, sample by sample, with
   qubit 1 first. `tlast` must be on the final word, otherwise `tlast_err`
   goes high and stays high. At one word per clock this takes n_samples × n
   cycles.
2. **PREP.** Each sample's angles are read once and go through the CORDIC
   (18 clocks) and `uv_gen` (1 clock). The resulting chi/phi of each qubit
   is stored in that qubit's chi/phi RAM as one 128-bit word. Sines and
   cosines are therefore never recomputed per pair. This takes about
   n_samples + 20 clocks.
3. **PAIRS.** The controller walks the upper triangle in row order:
   (0,0), (0,1), …, (0,N−1), (1,1), …, (N−1,N−1). A single feature-map
   pipeline serves both samples of a pair:
   * beat 0 reads the chi/phi of x_i;
   * beat 1 reads the chi/phi of x_j;
   * `inner_product` stores conj(f(x_i)) at beat 0 and finishes the sum at
     beat 1.

   So a pair takes 2 clocks, and N(N+1)/2 pairs take N(N+1) clocks. From the
   beat-1 read to the FIFO write there are 1 (RAM) + (n−1) (tree) + 1 (state)
   + 2 (inner product) + 1 (norm) clocks.
4. **DRAIN.** The controller waits for the last entry to reach the FIFO,
   pulses `done` and returns to LOAD.

**Back-pressure.** A pair may start only while
`fifo_count + pairs_in_flight < FIFO_DEPTH`. Otherwise the controller holds
and raises `stall`, so the FIFO can never overflow on its own. `fifo_overflow`
is a sticky safety flag. Full rate needs FIFO_DEPTH > (n+4)/2. The default of
512 entries (one block RAM) is far above that.

**Measured at the defaults** (n = 6, N = 1000, sink always ready):
PREP + PAIRS + DRAIN take 1,002,033 clocks, which is 4.01 ms at 250 MHz.
Loading adds 6000 clocks at one word per clock.

## Stream interface

| Port | Width | Meaning |
|---|---|---|
| `n_samples` | log2(MAX_SAMPLES)+1 | Samples in this run, 1..MAX_SAMPLES. Keep it stable while `busy` is high |
| `s_axis_tdata/tvalid/tready/tlast` | 16 | Features x in Q4.12. `tready` is high only in LOAD |
| `m_axis_tdata/tvalid/tready/tlast` | 16 | K_ij in Q2.14, row order of the upper triangle. `tlast` is on (N−1, N−1) |
| `busy` | 1 | High outside LOAD |
| `stall` | 1 | A pair is held back for lack of FIFO room |
| `done` | 1 | One-clock pulse at the end of a run |
| `tlast_err`, `fifo_overflow` | 1 | Sticky error flags, cleared by reset |

The reset is asynchronous and active low. The host is expected to:

* scale the features (any factor lambda is applied before sending), so that
  |x| < 8;
* send one block at a time;
* mirror the upper triangle;
* multiply the block matrices together.

## CORDIC

`cordic_sincos` is a plain rotation-mode CORDIC with 16 iterations on
20-bit internal values. The arctangent table and the gain 1/K are constants
computed from atan(2^−i). Angles with |θ| > π/2 are first folded by ±π, and
both results are negated afterwards. It is fully pipelined with a latency of
ITER + 2 clocks. Its outputs are rounded to Q2.14. Its testbench holds them
within 4 LSB (2.4·10⁻⁴) of the exact values over [−4, 4).

## Accuracy

Every testbench compares against a double-precision simulation that applies
the gates one by one to a 2^n-entry state vector. It shares no code or
shortcut with the RTL: no chi formula, no tree, no index map.

| Test | Largest error in K |
|---|---|
| n = 6, N = 1000, all 500,500 entries | 0.0023 |
| n = 2 and n = 3, N = 1000 | 0.0011 / 0.0015 |
| Per-block K over 130 blocks (d = 780 features) | 0.0026 |

The per-block errors compound when the host multiplies many blocks. At
d = 780 (130 blocks) the diagonal entries come out as about
(1 − 5·10⁻⁴)^130 ≈ 0.94 instead of 1. This is a property of 16-bit per-block
results, not of the datapath. Off-diagonal products at that size are tiny,
around 10⁻¹⁸⁶: that is the kernel concentration that input scaling is meant
to counter.

## Resources

For n = 6 the design has:

* 2 × 124 complex multipliers in the two trees;
* 64 in `qstate` and 64 in `inner_product`;
* 3 real 16×16 multipliers per complex multiplier, 1128 in all;
* 48 more in the six `uv_gen` instances and 2 in `square_norm`.

That is about 1180 DSP-sized multipliers. The 2-qubit build needs 66.
Memories for the 6-qubit build:

* 6 angle RAMs of 1024 × 16 bits;
* 6 chi/phi RAMs of 1024 × 128 bits;
* 64 × 32 bits of conjugate storage in `inner_product`;
* a 512 × 17-bit FIFO.

## What follows the source and what does not

These follow the published design:

* the circuit;
* the three-multiplier complex multiplier;
* the tensor-unit structure and its count 4·(2^(n−1) − 1);
* the Hadamard factor applied every second step, with a final 1/2 for odd n;
* the permutation f_k = v_k u_xi(k) from the block recursion;
* conjugation by negating the imaginary part;
* the K = (ΣRe)² + (ΣIm)² output stage;
* the chain divider → RAM → CORDIC → U/V generator → tensor product →
  feature map → squared norm → memory → host;
* 16-bit fixed point, 6 qubits (2 in the small build), 1024 training samples
  and a 250 MHz target.

These are this design's own choices:

* **Binary points** (Q2.14, Q3.13, Q4.12), and round-half-up with saturation.
* **Two beats per pair through one pipeline.** It could also be two pipelines
  at one clock per pair. The single pipeline matches both the published DSP
  count for 6 qubits and the published 4.1 ms for N = 1000. Two pipelines
  would need about twice the multipliers and would take about 2 ms.
* **Preparing chi/phi once per sample into RAM.** In the source, each qubit's
  RAM sits before the CORDIC, and a RAM follows the gate generator. The
  chi/phi values of a qubit share one 128-bit word here, instead of one
  memory per value.
* **The CORDIC itself.** The source uses a vendor core. This one is written
  out and its parameters are assumed.
* **No target device.** The source names two different AMD Virtex
  UltraScale+ parts for the same build. The RTL uses no device primitives;
  the RAMs are plain arrays that infer block RAM.
* **The phases, row order, credit back-pressure, FIFO depth, the tlast check,
  the sticky flags and reset.**
* **The odd-n 1/2.** It is applied to the inner product before squaring,
  which makes K exact. The source places this 1/2 "at the end" of the
  squared-norm calculation. Applied after the squaring, a single 1/2 would
  leave K twice too large.

Not built:

* the host program (PCA, feature scaling, block loop, SVM training);
* the PCIe shell;
* the AXI infrastructure of the FPGA platform. `s_axis`/`m_axis` are where
  they connect.

There is also no mode that computes a kernel between two different sample
sets (a test kernel), and no run larger than 1024 samples. Sizes such as
N = 4000 need splitting by the host, and the design gives no support for
that.

## Parameters

| Module | Parameter | Default | Meaning |
|---|---|---|---|
| `qk_top` | `NQ` | 6 | Qubits per block (2 and 3 tested too) |
| `qk_top` | `MAX_SAMPLES` | 1024 | Depth of the angle and chi/phi RAMs |
| `qk_top` | `FIFO_DEPTH` | 512 | Output FIFO entries; must exceed (NQ+4)/2 for full rate |
| `qk_top` | `CORDIC_ITER` | 16 | CORDIC iterations (latency ITER + 2) |

## Simulating

Every testbench is self-checking and ends with a line
`TB_RESULT checks=<n> failures=<m>`. With Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
    -y rtl -y tb +libext+.sv -Irtl -Itb \
    rtl/qk_pkg.sv tb/qk_ref_pkg.sv tb/tb_qk_top_full.sv --top-module tb_qk_top_full
./obj_dir/Vtb_qk_top_full
```

Replace `tb_qk_top_full` with any testbench below.

| Testbench | What it runs |
|---|---|
| `tb_qk_top_full` | Default build, one full run of N = 1000 samples (about 10 s) |
| `tb_qk_top` | n = 3 with a 4-entry FIFO and a sink that is ready 40% of the time (stalls), a wrong tlast, and two runs back to back; plus n = 6 with 32 samples |
| `tb_qk_blocksizes` | n = 2 and n = 3 builds at N = 1000 |
| `tb_qk_bps_d780` | 780 features = 130 blocks of 6, N = 60; multiplies the block kernels as a host would |
| `tb_<module>` | One per module, against independent references: real arithmetic, direct formulas, and CNOT gates applied bit by bit |

`qk_tb_agent` (stimulus and scoreboard) and `qk_ref_pkg` (the gate-by-gate
reference) are shared by the system-level testbenches. All test data are
generated inside the testbenches, from fixed seeds.
