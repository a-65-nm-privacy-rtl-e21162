# Compute-in-entropy HDC encoder: SystemVerilog model

Hyperdimensional computing (HDC) classifies a signal by first mapping its
feature vector onto a long random vector, a hyper-vector. Usually the random
"basis" vectors for that mapping sit in an item memory. That memory is large.
It is also a privacy risk: anyone who reads it can invert the encoding and
recover the raw data.

This encoder stores no basis vectors. Each basis element is the current
mismatch of a pair of identical transistors, set during manufacture. The
differential cell (two discharge transistors, two word-line gates) is called a
compute-in-entropy (CIE) cell. Multiplying a feature by the basis happens in
the analog domain: a word-line pulse as long as the feature value lets each
cell discharge its bit lines, and the resulting voltage difference is the
weighted sum. Every die has its own basis, so an encoded vector means nothing
without that die. The chip encodes 64 six-bit features into a 1024-element
hyper-vector, learns class vectors by adding encodings, and predicts by cosine
similarity.

This RTL gives all of the chip's digital logic as synthesizable
SystemVerilog. It also gives behavioural models of the analog signal chain,
so the whole chip can be simulated end to end with plain Verilator.

## 1. Structure

```
            SPI ──► spi_slave ──► control_logic ──────────────► similarity_check
                                  │  feature buffer (8 grams x 64 x 6 bit)   ▲
                                  │  sequencer, power-gate mask              │
                                  ▼                                          │
             64 x dtc  (one per row, shared by all tiles)                    │
                                  │ word-line pulses                         │
     ┌────────────────────────────┼────────────── 32 x cie_tile ─┐           │
     │  cie_tile_array 64x32 ─► 32 x cdf_unit ─► cd_permutator ─► 32 x vtc ─► bundler
     └────────────────────────────────────────────────────────────┘   h[1024] x 10 bit
                                  │                                          │
                                  └──────────► hv_sram 28 KB ◄───────────────┘
                                               (class vectors)
     dft_ring_counter ─► dft_column: 16 stand-alone test cells ─► dft_pulse
```

| module | role | kind |
|---|---|---|
| `cie_hdc_top` | the chip | structural |
| `spi_slave` | host access, 40-bit frames | logic |
| `control_logic` | registers, feature buffer, sequencer, SRAM arbitration | logic |
| `dtc` | feature code to word-line pulse width | logic |
| `cie_tile` | one group of 32 hyper-vector elements | structural |
| `cie_tile_array` | 64x32 entropy cells, pre-charger, row power gates | behavioural model |
| `cdf_unit` | variable-gain amplifier "CDF" + voltage-to-time pulse | behavioural model |
| `cd_permutator` | charge-domain N-gram multiply-and-shift | behavioural model |
| `vtc` | final voltage-to-time converter | behavioural model |
| `bundler` | 10-bit pulse-width counters | logic |
| `hv_sram` | 28 KB class-vector buffer | logic (memory array) |
| `similarity_check` | argmax of cosine similarity | logic |
| `dft_ring_counter` | one-hot 16-cell selector of the test column | logic |
| `dft_column` | 16 test cells, sense amplifier and VTC | behavioural model |
| `cie_pkg` | shared sizes, register map, bus types | package |

The behavioural models stand for analog circuits. They compute in integers
and are deterministic, and they lint cleanly, but they are not circuits you
would synthesize. Their first comment says so.

## 2. One encoding, step by step

An encoding runs N "grams" (N = 1..8, programmable). Gram n has its own
feature vector `f_n` of up to 64 features. For each gram the sequencer runs:

| phase | cycles | what happens |
|---|---|---|
| PRE | 1 | bit lines pre-charged (difference cleared); each DTC loads `f_n[i]` |
| DTC | 63 | row i's word line is high for `f_n[i]` cycles; the cells discharge |
| PHI1 | 1 | each column's CDF samples its amplifier output |
| PHI2 | 1 | each CDF starts its time pulse |
| CONV | 64 | the permutator integrates (pulse) x (neighbour's bias) onto C_M |
| LATCH | 1 | the holding capacitors swap: the new product becomes the bias |

After the last gram there is one VTC cycle (start the converters) and 1024
COUNT cycles, in which the bundler counters measure the pulses. An encoding
takes **1026 + 131·N cycles**: 1157 for N = 1, 1288 for N = 2.

The models compute the following for column j of tile t:

* **Bit-line difference.** `dv_j = Σ_i w(t,i,j) · f_n[i]`, summed over
  powered rows i. The weight `w` is the cell's current mismatch. It comes
  from a hash of (die seed, tile, row, column): four bytes summed, minus 510.
  That is roughly Gaussian with zero mean and a standard deviation near 148.
  Changing `DIE_SEED` gives another die.
* **CDF.** `V = clamp(0.5 + dv·2^g / 2^20, 0, 1)`. The gain code g (0..7)
  stands for the amplifier bias. Low codes keep the distribution narrow and
  normal. Middle codes spread it towards uniform. High codes push most values
  to the rails, giving a bimodal shape. The real amplifier follows a sigmoid
  family; a clamped line is the simplest curve with the same knob. Voltages
  are 16-bit fixed point with 65535 = 1.0.
* **Time pulse.** `T_j = round(V · 64)` cycles.
* **Permutator** (section 3). `p_j ← round(p_{j-1} · T_j / 64)`, where p
  starts at 1.0.
* **Count.** `h_j = round(p_j · 1023)`, read by a 10-bit counter.

## 3. The charge-domain N-gram product

N-gram encoding binds the N prototypes `p_n = f_n·B` as
`h = Π_n ρ^n p_n`. Here ρ is a one-place circular shift. The chip does this
without converting anything to digital. Each column has a current source.
The column's own CDF pulse gates it, and the voltage held by the *adjacent*
column sets its current. So the charge that collects on the column's main
capacitor C_M is proportional to (own pulse width) × (neighbour's previous
product): one multiply and one shift.

Each column has two more capacitors, C_L and C_R, that take turns. While one
of them holds the previous product and biases the neighbour, the other
follows C_M. When the step ends they swap, and the fresh product becomes the
bias for the next gram. Both start at the NMOS threshold, the model's unity.
After N steps:

```
p_j = Π_{n=0..N-1} T_{j-(N-1-n)}^{(n)} / 64      (column indices mod 32)
```

The last gram is unshifted and the first is shifted furthest. This is the
paper's product with the gram order reversed, which does not matter for HDC.

The shift wraps within one tile of 32 columns. That follows the wrap-around
wire drawn in the tile diagram; it is not a 1024-element rotation. The
direction (column j takes its bias from column j−1) is this design's choice.
`cd_permutator` exposes `hold_r` to show which capacitor is holding.

Products of numbers in [0, 1] shrink by about half per gram. With N = 2 the
counts average around 250 instead of 512. For this reason the centring offset
used in learning (below) is a register, not a constant.

## 4. Learning and prediction

**Training (one-shot, continual).** `TRAIN k` encodes the loaded features,
then adds `h_j − offset` to element j of class vector k in SRAM, with 16-bit
signed saturation. This is one read-modify-write per SRAM word, 64 cycles in
all. Class vectors are therefore running sums of centred encodings. Any
number of samples can be added at any time.

**Prediction.** `INFER` encodes, then `similarity_check` streams each class
vector from SRAM. It takes 32 elements per cycle, together with the matching
32 centred query elements straight from the bundler counters. It accumulates
`dot_k = <c_k, q>` and `n_k = ||c_k||²`. The winner is
`argmax_k dot_k / sqrt(n_k)`, the cosine rule. To avoid a divider and a
square root, two classes are compared by cross-multiplication:
`a` beats `b` when `dot_a·|dot_a|·n_b > dot_b·|dot_b|·n_a`. This keeps both
the sign and the exact order. Ties keep the lower index, and an all-zero class
scores 0. The check takes `32·classes + 3` cycles, and INFER as a whole takes
`1030 + 131·N + 32·classes` cycles.

**SRAM layout.** A word holds one tile's 32 elements at 16 bits (512 bits).
Class k occupies words `32k … 32k+31`. The 28 KB holds 448 words, which is 14
class vectors of 1024 elements.

**Federated learning.** In the paper's scheme each client bundles its data
into a shared model. A server sums the client models weighted by their
dataset sizes and sends back a global model. Each client maps the global
model onto its private basis with a pseudo-inverse matrix. None of this
arithmetic runs on the chip. The chip's part is that the host can read and
write every class-vector element over SPI, to export a local model or import
a converted global one.

## 5. Host interface

SPI mode 0, MSB first, one 40-bit frame per access with CS_N low:

```
[39:32] command  bit 7: 1 = write, 0 = read
[31:16] address
[15:0]  data     (write data; on a read, the data comes back on MISO here)
```

SCLK must be at most clk/8: the pins are sampled by the system clock. Writes
take effect after bit 40. Reads are issued after bit 24 and answered in time
for the data phase.

| address | access | content |
|---|---|---|
| 0x0000 | W | command: [1:0] 1 ENCODE, 2 TRAIN, 3 INFER; [7:4] class for TRAIN (ignored while busy) |
| 0x0001 | R/W | N of the N-gram, 1..8 (0 → 1, larger → 8) |
| 0x0002 | R/W | number of classes compared by INFER |
| 0x0003 | R/W | CDF gain code, 0..7 |
| 0x0004 | R/W | centring offset subtracted from every count |
| 0x0005 | R/W | feature length M, 1..64; rows ≥ M stay power-gated |
| 0x0006 | R | status: [0] busy, [1] done, [7:4] predicted class |
| 0x0007 | R | cycles taken by the last command |
| 0x0100 + 64n + i | R/W | feature i of gram n (6 bits) |
| 0x4000 + j | R | count h_j of the last encoding, j = 0..1023 |
| 0x8000 + e | R/W | SRAM element e = 1024k + j (class k, element j); only while idle |

A typical use: write the configuration, write the N·M features, write
the command, poll status until `busy` clears, then read the predicted class,
or read the counts or class vectors.

**Power gating.** Every row's footer is off while no encoding runs. During an
encoding, rows at or beyond the feature length M stay off. The cells hold
nothing volatile, so turning them off loses nothing.

**Test column.** `dft_ring_counter` is the 16-bit one-hot ring counter that
switches on the 16 cells of the separate test column one after another. Its
outputs leave the top as `dft_sel`. `dft_column` models the column itself:
cell k has its own mismatch w (drawn from the same die model as the array,
as if it were a 33rd tile), and the sense amplifier and converter turn it into
a pulse on `dft_pulse` of round(clamp(0.5 + w·72/65536, 0, 1) · 64) clock
cycles. The paper tunes the silicon so the widths follow a normal
distribution over 0–200 ns with a 100 ns mean. The model keeps that shape:
the mean is at half scale and the spread fills the range. The pulse starts
when the select changes. The ring counter may run on its own slow clock, but
each cell must stay selected for at least 66 system-clock cycles.

## 6. Parameters

| parameter | default | origin |
|---|---|---|
| tiles × columns | 32 × 32 (d = 1024) | paper |
| rows per tile (max features) | 64 | paper |
| feature width | 6 bits | paper |
| count width | 10 bits | paper |
| SRAM | 28 KB | paper |
| DFT cells | 16 | paper |
| N-gram maximum | 8 | this design |
| CDF full-scale pulse TMAX | 64 cycles | this design |
| final VTC full scale | 1023 cycles | this design (fills the 10-bit counter) |
| class element width | 16 bits signed | this design |
| similarity lanes | 32 | this design |

Module parameters default to these values. `DIE_SEED` on `cie_hdc_top`
selects the modelled die.

**Capacity against the paper's benchmarks.** The EMG task (64 channels,
5 gestures, d = 1024) fits completely. `tb_emg_workload` runs a synthetic
task of that shape (5 gesture prototypes over 64 channels, N = 2,
3 training samples each) and classifies all 10 noisy queries correctly. UCI-HAR (561 features), ISOLET
(617 features), MNIST (784 pixels) and language recognition (21 classes) all
exceed either the 64 features of a gram or the 14 class slots. These dataset
sizes are general knowledge; the paper does not give them. Running those
benchmarks would need feature reduction, or spreading features over several
grams, and the paper does not describe either.

## 7. How far to trust it, and where it departs

* The digital blocks are complete and tested. The analog blocks are
  functional stand-ins. They reproduce the order of operations and the
  arithmetic the circuits are meant to perform (weighted sum, CDF reshaping,
  multiply-and-shift, pulse-width conversion), not their voltages, noise,
  temperature drift or energy. Accuracy figures measured on silicon cannot be
  reproduced with them.
* All pulses are counted in whole system-clock cycles. At 20 MHz an N = 2
  prediction of 3 classes takes about 1.4 k cycles (≈ 70 µs). The silicon
  reports 435 k predictions/s, so its converters must run far faster than a
  clock-counted model.
* Training accumulates in the SRAM. The 10-bit counters only measure one
  encoding.
* The permutator's shift wraps within a tile (section 3).
* The SPI protocol, register map, command set, centring offset, SRAM word
  layout and cycle schedule are this design's own; the paper names these
  blocks without detailing them.
* Pseudo-inverse conversion and model aggregation for federated learning are
  off-chip.

## 8. Simulating

Every testbench is self-checking, prints `TB_RESULT checks=N failures=M` and
stops itself. Example with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/cie_pkg.sv tb/tb_ref_pkg.sv tb/tb_cie_hdc_top.sv --top-module tb_cie_hdc_top
./obj_dir/Vtb_cie_hdc_top
```

| testbench | covers |
|---|---|
| `tb_cie_hdc_top` | whole chip at full size through SPI: encodes, 6 training updates, 3 predictions, power gating, gain change, SRAM access, DFT counter and test-cell pulses; ~30 s |
| `tb_emg_workload` | synthetic EMG-shaped task at full size: 5 classes, 64 channels, 15 training updates, 10 predictions; ~90 s |
| `tb_cie_tile` | one full tile against the reference chain, N = 1..4 |
| `tb_control_logic` | schedule, strobes, power-gate mask, cycle counts, training arithmetic |
| `tb_similarity_check` | cosine argmax against floating point, ties, latency |
| `tb_cie_tile_array`, `tb_cdf_unit`, `tb_cd_permutator`, `tb_vtc`, `tb_dft_column` | the analog models |
| `tb_dtc`, `tb_bundler`, `tb_hv_sram`, `tb_spi_slave`, `tb_dft_ring_counter` | the remaining blocks |

`tb/tb_ref_pkg.sv` restates the encoder chain in plain testbench code
(section 2 gives the formulas). The tile and top testbenches compare every
count against it.
