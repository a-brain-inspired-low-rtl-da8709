# LDC: a low-dimensional computing classifier in hardware

Hyperdimensional computing (HDC) classifies a sample by turning it into a very
long binary vector (thousands of bits) and picking the stored class vector
closest to it in Hamming distance. The low-dimensional computing (LDC)
classifier keeps that inference structure but trains the vectors like the
weights of a binary neural network. That lets them shrink by two orders of
magnitude: an MNIST model uses 4-bit value vectors and 64-bit feature and
class vectors instead of 8000-bit hypervectors. All of its trained state fits
in 6480 bytes, and one inference needs only XORs, counters and a tree adder.

This repository holds synthesizable SystemVerilog for an LDC inference
accelerator sized for a small FPGA. It processes the features one per cycle
through a single vector multiplier, then compares the query with the class
vectors one per cycle. At the default MNIST size an inference takes 798
cycles, which is 3.99 µs at 200 MHz.

## 1. What is computed

A sample has N features. Each is quantized to an 8-bit value `f_i` in
[0, 255]. Three trained tables are stored, all of them bipolar (elements ±1):

| table | entries | width | addressed by |
|---|---|---|---|
| value table `V` (output of the trained "ValueBox" for every possible value) | 256 | D_V | feature value `f_i` |
| feature vectors `F` | N | D_F | feature index `i` |
| class vectors `C` | K | D_F | class index `k` |

D_F is a multiple of D_V, and n = D_F / D_V. The value vector is repeated n
times to span D_F. Equivalently, `F_i` is cut into n sub-vectors of D_V bits,
and each sub-vector is multiplied element-wise with the same `V_{f_i}`.

Encoding produces the query vector

    S_q[d] = sgn( sum over i of  F_i[d] * V_{f_i}[d mod D_V] ),   sgn(0) = +1

and the classifier's answer is the class with the smallest Hamming distance

    hd_k = number of d with S_q[d] != C_k[d].

Picking the smallest of the K distances is left to the host processor. The
accelerator streams out the K distances.

**Bit encoding.** +1 is stored as bit 0 and -1 as bit 1. A bipolar product is
then an XOR, and a bipolar dot product is D_F − 2·(Hamming distance). So the
smallest distance is the same as the largest dot product. Bit `d` of a stored
vector is element `d+1`. Sub-vector `j` of `F_i` (j = 1..n) occupies bits
`[(j-1)·D_V +: D_V]`. Element `d` therefore meets value-vector bit `d mod D_V`.

## 2. Datapath

```
            host load port (ld_en, ld_sel, ld_addr, ld_data)
               |            |                 |              |
          +---------+  +----------------------------+   +---------+
 i ------>| sample  |  | item memory                |   | assoc.  |<----- k
(global   | buffer  |  |  value table   V[256]      |   | memory  |  (global
 counter) | f[N]    |  |  feature vecs  F[N]        |   | C[K]    |   counter)
          +---------+  +----------------------------+   +---------+
               | f_i ------> V addr       | F_i, V_{f_i}     | C_k
               |                          v                  v
               |                    XOR (V stacked n×)      XOR  ---> reg
               |                          |                  |
               |                   + D_F counters m_d     tree adder -> reg
               |                   ("non-binary S")          |
               |                          |                  v
               |                  2·m_d > N ?  ---- S_q ---->|   hd_valid, hd_k, hd
```

| block | file | role |
|---|---|---|
| global counters | `ldc_controller.sv` | counts `i` over the features, then `k` over the classes; every other strobe is a delayed copy |
| sample buffer | `ldc_sample_buffer.sv` | N × 8-bit feature values, written by the host |
| item memory | `ldc_item_memory.sv` | value table and feature vectors, two synchronous read ports |
| associative memory | `ldc_assoc_memory.sv` | K class vectors |
| multiplier | `ldc_mult.sv` | XOR with operand stacking; used for binding (D_F × D_V) and for similarity (D_F × D_F) |
| accumulator | `ldc_accumulator.sv` | D_F counters, each adding one bit per feature |
| binarizer | `ldc_binarize.sv` | threshold τ = N/2 comparator, one per dimension |
| tree adder | `ldc_popcount_tree.sv` | balanced adder tree counting the ones of a D_F-bit vector |
| similarity unit | `ldc_similarity.sv` | XOR → register → tree adder → register, one class per cycle |
| top | `ldc_top.sv` | wiring, load-port decoding, `done` |
| shared package | `ldc_pkg.sv` | default sizes, load-select and state enums |

All memories are plain arrays with a registered read, so an FPGA flow maps
them to block RAM.

## 3. The threshold, and why the counters count -1s

Each accumulator counter `m_d` counts the XOR outputs that are 1 in dimension
`d`, which are the bipolar products equal to -1. After N features, the bipolar
sum in that dimension is `N − 2·m_d`. The sign rule with sgn(0) = +1 becomes
"+1 when the agreements `N − m_d` reach τ = N/2". In bits:

    S_q[d] = 1  exactly when  2·m_d > N.

The comparator uses `2·m_d` against `N` rather than `m_d` against a rounded
τ. That keeps the threshold exact for an odd N: the CTG model has N = 21,
where τ = 10.5. For an even N, a tie (`m_d = N/2`) gives bit 0 (+1). The
end-to-end testbenches steer two dimensions onto the threshold to check this.

Counters are `$clog2(N+1)` bits wide (10 bits for N = 784), so they cannot
overflow.

## 4. Timing

Cycle 0 is the cycle in which `start` is high while `ready` is high.

| cycles | what happens |
|---|---|
| 0 | accumulator cleared |
| 1 … N | sample buffer read at `i = c−1` |
| 2 … N+1 | item memory read: `F_i` at address `i`, `V` at address `f_i` (just read) |
| 3 … N+2 | `F_i XOR stack(V_{f_i})` added to the counters |
| N+2 … N+K+1 | associative memory read at `k = c−N−2` |
| N+3 … N+K+2 | `C_k` meets the final `S_q`; XOR registered |
| N+5+k | `hd_valid`, `hd_k = k`, `hd` = distance to class k |
| N+K+4 | last distance, `done` |
| N+K+5 | `ready` again; a new `start` may be given in this cycle |

The latency from `start` to `done` is therefore **N + K + 4 cycles**:

* MNIST (N = 784, K = 10): 798 cycles, or 3.99 µs at 200 MHz;
* cardiotocography (CTG, N = 21, K = 3): 28 cycles, or 0.14 µs.

Both figures equal the latencies reported for the original FPGA
implementation. The pipeline depth behind them is this design's own: the
original gives only the block structure, the 200 MHz clock and the
latencies. Encoding occupies N+2 cycles here (first read to last addition).
The original quotes N+1; the extra cycle is the sample-buffer read (see
section 7). Throughput is one inference per N+K+5 cycles. The encoder and the
similarity unit do not overlap across inferences.

## 5. Using it

**Loading.** While `ready` is high, drive `ld_en` with `ld_sel`, `ld_addr`
and `ld_data` (the low bits are used). One word is written per cycle:

| `ld_sel` (`ldc_pkg::ld_sel_e`) | target | address | data |
|---|---|---|---|
| `LD_SAMPLE` | sample buffer | feature index i (0-based) | 8-bit value f_i |
| `LD_VALUE` | value table | feature value f (0..255) | D_V-bit V_f |
| `LD_FEATURE` | feature vectors | feature index i | D_F-bit F_i |
| `LD_CLASS` | class vectors | class index k | D_F-bit C_k |

The trained tables are written once. Each new sample then needs only its N
`LD_SAMPLE` words. Memory contents survive reset. An assertion in `ldc_top`
flags a load while an inference is running. One in `ldc_controller` flags a
`start` while `ready` is low, which is ignored.

**Running.** Pulse `start` for one cycle while `ready` is high. Read K results
from `hd_valid`/`hd_k`/`hd`, in class order, one per cycle. The host takes
the argmin.

**Parameters** of `ldc_top`: `N`, `K`, `DV`, `DF`, `VAL_BITS`. The defaults
are the MNIST model (784, 10, 4, 64, 8). The other evaluated models are
parameter overrides:

| model | N | K | D_V | D_F | stored vectors | latency |
|---|---|---|---|---|---|---|
| MNIST, Fashion-MNIST (default) | 784 | 10 | 4 | 64 | 6480 B | 798 cycles |
| CTG | 21 | 3 | 4 | 64 | 320 B | 28 cycles |
| UCIHAR | 561 | 6 | 4 | 128 | 9200 B | 571 cycles |
| ISOLET | 617 | 26 | 4 | 128 | 10416 B | 647 cycles |

The 6480 B and 320 B figures match the model sizes reported for MNIST and CTG
(6.48 KB, 0.32 KB). The sample buffer (N bytes) is not counted in them.

## 6. Verification

Every block has a self-checking testbench in `tb/`. Each compares the block
with an independent model and prints `TB_RESULT checks=… failures=…`:

* memories: write random contents, read back in a different order, check the
  one-cycle latency and that data hold while the read enable is low;
* `ldc_mult`: products checked as ±1 integer multiplications, for both
  the stacked and the plain form;
* `ldc_accumulator`: N random additions with random enable gaps, then
  all-ones vectors to reach the maximum count N;
* `ldc_binarize`: counts around N/2 for an even N (784) and an odd N (21);
* `ldc_popcount_tree`: widths 64, 21 and 1;
* `ldc_similarity`: bursts with and without gaps, distances 0 and D_F,
  two-cycle latency;
* `ldc_controller`: every strobe and address against the timeline above,
  over three inferences.

The end-to-end testbenches share `tb/ldc_e2e_body.svh`, which plays the host.
It loads random tables and computes the expected query with ±1 integer
arithmetic. It builds the class vectors so that one class lies three bits
from the query, then checks each distance, the cycle in which it appears,
the N+K+4 latency and the host's argmin. It repeats every inference back to
back with the next `start` given in the cycle `ready` returns. It also counts
the mechanisms it exercised (both query-bit values, threshold cases,
back-to-back starts, loads into each memory) and fails if any never happened.

| testbench | size |
|---|---|
| `tb_ldc_top` | CTG: N = 21, K = 3, six samples |
| `tb_ldc_top_full` | defaults (MNIST): N = 784, K = 10, no parameter override |
| `tb_ldc_top_isolet` | ISOLET: N = 617, K = 26, D_F = 128 (also covers the UCIHAR size) |

No trained model or dataset comes with the design. The tests therefore check
that the hardware computes the LDC function exactly, not any accuracy figure.

Running a testbench with Verilator 5 from the repository root:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_ldc_top_full \
          -y rtl -y tb +libext+.sv -Irtl -Itb rtl/ldc_pkg.sv tb/tb_ldc_top_full.sv
./obj_dir/Vtb_ldc_top_full
```

Lint a module with `verilator --lint-only -Wall -y rtl rtl/ldc_pkg.sv
rtl/<module>.sv --top-module <module>`. The remaining lint warnings are
unused package constants, and the reset being used both in the flops and
in the `disable iff` of the assertions.

## 7. Departures from the original design, and choices made here

Follows the original:

* one vector multiplier for encoding, with the features processed
  sequentially;
* an adder feeding back into a non-binary sample register;
* a threshold comparator with τ = N/2;
* a pipelined pass over the class vectors: XOR, then a tree adder;
* Hamming distances returned to the host for the argmin;
* bipolar +1/-1 stored as 0/1, with XOR as the multiplication;
* one value table shared by all features;
* the MNIST and CTG sizes and the 200 MHz clock.

Choices made here, where the original is silent:

* **Sample buffer.** The original architecture shows the sample entering the
  item memory directly. Here it is held in a host-written buffer. That adds
  one read stage, so encoding takes N+2 cycles instead of N+1.
* **Host interface.** The single word-wide load port, the `start`/`ready`
  handshake and the streamed distance outputs are this design's own. How the
  processor is attached (AXI or otherwise) is not described and not built.
* **Pipeline registers.** The similarity unit has two register stages, after
  the XOR and after the tree adder. With them the total latency is N+K+4
  cycles, equal to the reported latencies for both evaluated models. The
  actual register placement of the original is not known.
* **Memory organisation.** This design has four arrays (sample, value,
  feature, class). The original reports 5 block RAMs and 1 DSP for MNIST,
  and 3 block RAMs and 1 DSP for CTG. How its memories are split, and what
  the DSP does, are not given.
* **Reset.** Asynchronous active-low reset of all control and pipeline
  registers. Memories are not reset.
* **Compile-time sizes.** N and K are parameters. A smaller model cannot run
  on an instance built for a larger one, because τ = N/2 and the counter
  lengths follow N.

Not built:

* The argmin on the FPGA. The original mentions it only as an alternative to
  the host argmin.
* Training, including the ValueBox network (FC, batch norm, tanh, FC, sign).
  It runs offline, and only its 256-entry output table is used for inference.
* Running several LDC classifiers with a majority vote. This is suggested,
  not designed.
