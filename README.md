# A block-circulant GRU accelerator in SystemVerilog

A recurrent layer spends almost all of its time multiplying matrices with
vectors. If each weight matrix is cut into square blocks and every block is
constrained to be *circulant* (each row is the row above rotated by one
place), a block of size N is fully described by N numbers instead of N², and
its product with a vector becomes a circular correlation that an FFT computes
in O(N log N). This RTL implements an FPGA accelerator for one such layer: a
GRU with 1024 hidden units, block size 16, 12-bit fixed-point data and
weights, laid out as a set of compute units (CUs), each built from
processing elements (PEs) that do the FFT arithmetic.

The design follows the E-RNN architecture (Li et al., "E-RNN: Design
Optimization for Efficient Recurrent Neural Networks in FPGAs"). Everything
below is a description of this RTL; where it departs from, or fills gaps in,
that architecture it says so.

## 1. The arithmetic

### 1.1 Circulant blocks

A weight matrix of size (p·N) × (q·N) is stored as p × q vectors w_ij of length
N. Block (i, j) is

    W_ij[r][c] = w_ij[(c − r) mod N]

so output row block a_i = Σ_j W_ij x_j, with
(W_ij x_j)[r] = Σ_c w_ij[(c − r) mod N] · x_j[c]: a circular
cross-correlation. In the frequency domain this is

    a_i = IFFT( Σ_j conj(FFT(x_j)) · FFT(w_ij) )

where the multiplication is element-wise. Three things make this cheap:

* **The weight spectra are stored, not the weights.** FFT(w_ij) is computed
  off-line and loaded into the BRAMs.
* **Each input block is transformed once.** FFT(x_j) is the same for every
  output row block i, so a layer with p × q blocks needs q forward transforms
  and p inverse transforms (the sum is taken before the inverse), not p·q of
  each.
* **Real signals have Hermitian spectra.** Only bins 0 … N/2 are kept. Bins 0
  and N/2 are real, so a spectrum is exactly N real words and the
  element-wise product costs 2N − 2 real multiplications (2 for bins 0 and
  N/2, 4 for each of the N/2 − 1 complex bins).

### 1.2 No IFFT

The PE has two identical forward FFTs and no IFFT. For real data,
FFT(Y)/N = conj(IFFT(Y)) when Y is Hermitian, so the product is formed as
conj(X)·W. The conjugate moves to the input side, and the second forward FFT
then yields the real correlation directly. The imaginary output of the
second FFT is zero up to rounding and is discarded.

### 1.3 Number formats

| quantity | width | fraction bits | note |
|---|---|---|---|
| activations, x, c, biases | 12 (DW) | 8 (FRAC) | the 12-bit quantisation of the reference design |
| weight spectra | 12 | 8 (WFRAC) | a per-layer scale can be folded into the stored spectra |
| input spectra | 18 (SW) | 12 (SFRAC) | FFT/N of the input block |
| accumulator | 40 (ACCW) | | spectra summed over the q input blocks |
| PE result / pre-activation | 16 (PW) | 8 | |
| FFT twiddles | | 14 (TWF) | computed in SystemVerilog with `$cos`/`$sin` at elaboration |

Every FFT stage shifts right by one, so a transform returns FFT/N and can
never overflow. The accumulated product is therefore scaled by 1/N² and by
2^(SFRAC+WFRAC). A final right shift by SFRAC + WFRAC − FRAC − log2 N = 8
restores 8 fractional bits. All widths, fraction counts and rounding choices
are this design's own; the reference gives only the 12-bit quantisation and
the per-stage shift.

### 1.4 Activations

`ernn_act` is a piecewise-linear sigmoid with four segments per side:

| \|x\| | value |
|---|---|
| ≥ 5 | 1 |
| 2.375 … 5 | \|x\|/32 + 0.84375 |
| 1 … 2.375 | \|x\|/8 + 0.625 |
| < 1 | \|x\|/4 + 0.5 |

It is mirrored for negative x, and tanh(x) = 2σ(2x) − 1. All slopes are powers
of two, so it needs only shifts and adds. The maximum error against the true
functions is about 0.02 for σ and 0.04 for tanh. The reference design uses
piecewise-linear activations but does not give its segments; these are the
widely used PLAN segments.

## 2. The processing element (`ernn_pe`)

```
fin_data ─► FFT/N ─► conj ─► fout_spec ───────► (stored by the CU)
mac_spec ─┐
mac_w ────┴► 2N−2 multipliers ─► accumulate ─► Hermitian unpack ─► FFT/N ─► >>8 ─► res_data
```

The PE has two independent halves:

* **Front half.** Transforms one time-domain block per cycle. The conjugated
  half spectrum comes out on `fout_spec` one cycle after `fin_valid`.
* **Back half.** Takes one (input spectrum, weight spectrum) pair per cycle.
  `mac_first` restarts the accumulator. On `mac_last` it transforms the sum,
  and `res_data` appears two cycles after the `mac_last` beat.

Both FFTs are combinational radix-2 decimation-in-time networks. Each one
handles a full transform per clock cycle (`ernn_fft`).

Packed half-spectrum layout (N words):

| word | content |
|---|---|
| 0 | Re[0] |
| 1 | Re[N/2] |
| 2k | Re[k], for k = 1 … N/2 − 1 |
| 2k + 1 | Im[k], for k = 1 … N/2 − 1 |

Weight spectra loaded by the host use the same layout.

## 3. The GRU compute unit (`ernn_gru_cu`)

One time step computes

    z  = σ(W_z·[x; c'] + b_z)          r = σ(W_r·[x; c'] + b_r)
    c~ = tanh(W_c~x·x + W_c~c·(r ⊙ c') + b_c~)
    c  = (1 − z) ⊙ c' + z ⊙ c~

with c' the state of the previous step. It is zero after `clear`.

### 3.1 Memories

| memory | content | organisation |
|---|---|---|
| BRAM 1 | x (QX = DX/N blocks) and c' (QH = H/N blocks) | time samples |
| BRAM 2 | [W_r; W_z] over [x; c'], then W_c~x | one bank per PE, half spectra |
| BRAM 3 | b_r, b_z, b_c~ | 3·QH blocks |
| BRAM 4 | W_c~c | one bank per PE |
| spectrum buffer | conj(FFT(·))/N of the current job's input blocks | Q = QX + QH entries |
| r⊙c', z | stage-3 results for stage 2 and the update | QH blocks each |

Output row block g·NPE + k is computed on PE k, so the weights of a PE are
only those rows. The bank addresses are:

| memory | rows | address |
|---|---|---|
| BRAM 2 | [W_r; W_z] (2·QH rows, GA = 2QH/NPE groups) | g·Q + j |
| BRAM 2 | W_c~x (QH rows, GB = QH/NPE groups) | GA·Q + g·QX + j |
| BRAM 4 | W_c~c | g·QH + j |
| BRAM 3 | r bias | 0 … |
| BRAM 3 | z bias | QH … |
| BRAM 3 | c~ bias | 2·QH … |

The reference text puts W_c~x in BRAM 4, while its architecture drawing
labels BRAM 4 with W_c~c. This design follows the drawing. W_c~c is the only
matrix applied to r ⊙ c', so it gets its own BRAM. W_c~x is multiplied with x
like the first-stage matrices, so it sits with them in BRAM 2.

### 3.2 Three coarse pipeline stages

The step runs as three stages.

1. **Job A (stage 1).** All Q input blocks [x; c'] go through the front FFTs,
   NPE blocks per cycle, into the spectrum buffer. Then GA groups of NPE row
   blocks each stream Q spectra through the back halves of the PEs, one
   block per cycle.
2. **Job B (stage 2, on the same PEs).** Once all r blocks exist, only the QH
   blocks of r ⊙ c' are transformed. The x spectra from job A are reused.
   GB groups then stream the QX x-spectra against W_c~x and the QH
   (r ⊙ c')-spectra against W_c~c.
3. **Stage 3.** PE results land in a double buffer (`ernn_dbuf`, one bank =
   one group of NPE row blocks). Stage 3 drains one bank while the PEs fill
   the other:
   * it adds the bias and applies σ or tanh (`ernn_act`);
   * for r it writes r ⊙ c', and for z it stores z;
   * for c~ it forms z ⊙ c~ and then (1 − z) ⊙ c' through one shared,
     multiplexed multiplier, and writes c into BRAM 1 and to `out_*`.

Flow control works on credits. A group is issued to the PEs only if the
double buffer has a free bank for it after the groups already in flight.
So stage 3 can stall the PEs, but results are never lost. The new c is
written only in the last phase. All reads of c' in job B (for r ⊙ c') happen
in stage 3 of job A, before any c is written. The assertion `a_collect_room`
guards the buffer.

### 3.3 Timing

Cycles per step are roughly

    ⌈Q/NPE⌉ + GA·(Q + 1) + ⌈QH/NPE⌉ + GB·(Q + 1) + 2 · (stage-3 drain)

The drain appears twice: job B waits until stage 3 has produced all of r,
and the step ends only when stage 3 has written all of c. Stage 3 spends
about three cycles per block, i.e. about 3·NPE cycles per group. At the
defaults (N = 16, H = 1024, DX = 160, NPE = 16) that is GA = 8, GB = 4 and
Q = 74: 909 PE cycles plus two drains of about 50 cycles, roughly 1000
cycles per step. The published implementation of this configuration reports
6.5–6.7 µs per step at 200 MHz, i.e. 1300–1340 cycles. At the largest
simulated size (Q = 6, NPE = 2, GA = 4, GB = 2) the formula gives 47 PE
cycles and the measurement is 84–86 cycles per step. There the drains weigh
much more, because a group is only 7 cycles long.

### 3.4 Interface

* **Loading.** `wr_en`, `wr_tgt`, `wr_bank` and `wr_addr` load one 192-bit
  block per cycle while the CU is idle.
* **Running.** `clear` zeroes c'. `start` runs one step. `busy` stays high
  during the step and `done` pulses for one cycle at its end.
* **Output.** Each new block of c appears on `out_valid` / `out_idx` /
  `out_data`.

## 4. The system (`ernn_top`)

```
host ─ data bus ─┬─► input buffer ─► controller ─► CU 0 … CU NCU−1 ─► output buffer ─► data bus
                 └─► weight/bias BRAMs of the CUs (broadcast or per CU)
```

The CUs do not split one sequence between them. Each CU runs its own input
sequence through the same layer, all CUs in lock step. This is how the
throughput scales with the number of CUs.

* **`ernn_in_buf`** holds TMAX frames per CU. All CUs read the same frame and
  block at once, and the result is registered.
* **`ernn_ctrl`** runs the sequence:
  * on `run` it clears every CU's state;
  * for each step it copies x_t block by block into BRAM 1 of every CU,
    starts all CUs and waits until all are done;
  * after `num_steps` steps it pulses `done`.
* **`ernn_out_buf`** keeps c_t of every CU and step for the host.

Bus writes (`bus_wr_en`, one block per cycle) are ignored while `busy`:

| `bus_wr_tgt` | destination |
|---|---|
| `TGT_W_XC` | BRAM 2 of the selected CU |
| `TGT_W_CC` | BRAM 4 of the selected CU |
| `TGT_BIAS` | BRAM 3 of the selected CU |
| `TGT_INPUT` | the input buffer, at frame `addr / QX`, block `addr % QX` |

`bus_wr_cu = NCU` broadcasts a write to every CU. Reads use
`bus_rd_addr = t·QH + block`, and the data appears one cycle later.

The PCIe endpoint, host CPU and host memory of a real system are not part of
the RTL; the top-level bus is where they would attach.

## 5. Parameters

| parameter | default | meaning |
|---|---|---|
| `N` (`LB`) | 16 | block size = FFT length |
| `H` (`HID`) | 1024 | hidden units |
| `DX` (`DIN`) | 160 | input features, padded to a multiple of N |
| `NPE` | 16 | PEs per CU; must divide H/N |
| `NCU` | 2 | compute units |
| `TMAX` | 8 | frames per run held in the buffers |

The default input dimension comes from the published parameter count. A
GRU-1024 layer with 153 inputs has 3·1024·(153 + 1024)/16 ≈ 0.23 M stored
weights at block size 16, which is the reported figure. 153 is padded to
160. NPE, NCU and TMAX are this design's choices. Sixteen PEs of sixteen
points match the parallelism the reference describes.

Resource estimate per CU at the defaults:

* **Weights.** 14 208 spectra × 192 bits = 2.7 Mbit, about 144 BRAM36.
* **Multipliers.** 512 general multipliers: 16 PEs × 30, plus 32 in stage 3.
  The FFT twiddle products are constant multiplications.

Two CUs fit a Kintex UltraScale KU060 or a Virtex-7 690T class device.

## 6. Verification

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=… failures=…` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_ernn_fft` | the 16-point transform against a floating-point DFT/N for an impulse, a constant and random complex vectors |
| `tb_ernn_pe` | against direct block-circulant products, including the 4 × 4 example with block size 2 (N = 4 PE) from the reference; the PE latency is checked |
| `tb_ernn_act` | against the true sigmoid/tanh and against the segment formulas |
| `tb_ernn_dbuf` | random-speed producer and consumer: banks complete and in order, the fill level, and the writer filling one bank while the reader drains the other |
| `tb_ernn_gru_cu` | several GRU steps at H = 64, DX = 32, NPE = 2 against a floating-point GRU with the same activation segments; the cycles per step are checked |
| `tb_ernn_in_buf`, `tb_ernn_out_buf`, `tb_ernn_ctrl` | addressing, per-CU separation, sequencing and load order |
| `tb_ernn_top` | the whole system through its bus at H = 64, DX = 32, NPE = 2, NCU = 2 (see below) |

`tb_ernn_top` runs as follows:

* it broadcasts the weights to all CUs;
* it runs two sequences with different inputs per CU, and compares every c_t
  with the floating-point model;
* it counts the mechanisms and fails if any never occurs: stage 3
  overlapping PE work, job B on the shared PEs, reuse of the x spectra (the
  number of job-B forward transforms is checked), state clear, all CUs busy
  together, and broadcast writes.

Simulate any testbench with plain Verilator, for example:

```
verilator --binary --timing --assert -Wno-fatal -o sim --top-module tb_ernn_top \
    -y rtl -y tb +libext+.sv rtl/ernn_pkg.sv tb/tb_ernn_top.sv
obj_dir/sim
```

The largest configuration simulated end to end is N = 16, H = 64, DX = 32,
NPE = 2, NCU = 2 (84–86 cycles per step, as the formula of §3.3 predicts).
The default configuration elaborates and lints, but its Verilator model
(32 PEs, each with two unrolled 16-point FFTs) produces several gigabytes of
C++ and is impractical to build; the default-size cycle count of §3.3 is
therefore an estimate from the schedule, not a measurement.

## 7. Departures and limits

* **GRU only.** The same PEs would serve an LSTM layer with peepholes and a
  projection; that compute unit is not included.
* **BRAM 4 holds W_c~c**, following the architecture drawing rather than
  the text (§3.1).
* **Activation segments, number formats and rounding** are this design's
  (§1.3–1.4). The end-to-end error against floating point is below 0.06 on
  values of order 1.
* **The FFT is a fully parallel combinational network.** It gives one
  transform per cycle but is long; at 200 MHz it would need pipeline
  registers between stages. The latency figures above assume one cycle per
  transform.
* **Host interface.** The host side is a plain synchronous bus, not PCIe.
  The number of CUs and the buffer depth are free parameters.
