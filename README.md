# Block-circulant LSTM layer in SystemVerilog

A recurrent network spends almost all of its arithmetic and storage on weight
matrix times vector products. This design replaces each weight matrix by a
*block-circulant* matrix: the matrix is cut into K x K blocks and every block
is circulant, so it is fully described by one K-element vector. That cuts the
weights by a factor of K, and it turns every block product into a circular
convolution, which an FFT computes in O(K log K) instead of O(K^2):

    W_ij x_j = IFFT( FFT(w_ij) o FFT(x_j) )          (o = element-wise product)
    a_i      = sum_j W_ij x_j

The weight spectra FFT(w_ij) are computed offline and kept in on-chip block
RAM, so inference needs only one FFT per input block, K complex multiplies
per weight block, one inverse FFT and an accumulation. The RTL here builds one
LSTM layer of this kind — 1024 cells with peephole connections and a
recurrent projection to 512 outputs, block size 16, 12-bit fixed point — the
top layer of the speech-recognition LSTM (TIMIT) that this method was
demonstrated on, at a 200 MHz FPGA clock.

## The circulant convention

A circulant block is fixed by its first column c: `W[r][col] = c[(r - col) mod K]`.
Each row is the row above rotated right by one. With this convention
`W x` is the circular convolution of c and x, so the FFT identity above holds
with `w_ij = c`. (Describing the block by its first *row* would turn the
product into a correlation and need a conjugated spectrum.) A 4 x 4 example:
first column (1.14, -2.26, 0.83, -0.69) times x = (0.78, -1.11, 0.95, 0.39)
gives (1.56, -3.36, 3.97, -3.16). `tb/tb_circ_mvm.sv` checks the engine on
this example.

## What one frame computes

With x_t the input (153 values, zero-padded to 160 = 10 blocks), y_{t-1} the
previous projected output (512 values) and c_{t-1} the cell state:

    a        = W_g [x_t ; y_{t-1}]                 4096 x 672, 256 x 42 blocks
    i        = sigmoid(a_i + b_i + p_i * c_{t-1})
    f        = sigmoid(a_f + b_f + p_f * c_{t-1})
    g        = tanh   (a_g + b_g)
    c_t      = f * c_{t-1} + i * g
    o        = sigmoid(a_o + b_o + p_o * c_t)
    m_t      = o * tanh(c_t)                       1024 values
    y_t      = W_p m_t                             512 x 1024, 32 x 64 blocks

Both matrices are block-circulant and share one product engine. The layer
holds 12,800 circulant blocks, i.e. 204,800 weight values (about 0.20 M
instead of 3.3 M for the dense layer).

## Hardware structure

```
             +------------------- bc_lstm_top ----------------------------+
 x_we ------>| vector BRAM  [x_t | y_{t-1} | m_t]  (K values per word)    |
             |      |  read port                     ^ write-back         |
             |      v                                | (serialiser)       |
             |  +---------------- circ_mvm ------------------+            |
             |  | FFT (fft_k) -> spectrum buffer (vec_ram)   |            |
             |  |                  | FFT(x_j), shared        |            |
             |  | weight_bram --> lane 0..7: cmul_array ->   |            |
             |  |  (FFT(w_ij))        IFFT (fft_k) -> accum  |            |
             |  +------------------------|--------------------+           |
             |            gate pass      | 8 result blocks per row group  |
             |  bias/peephole/cell RAMs -> lstm_elem (32 cells, act_unit)|
             |            projection pass -> y_valid/y_addr/y_data ------>|
             +------------------------------------------------------------+
```

| module        | role |
|---------------|------|
| `bc_pkg`      | number formats, twiddle table, rounding/saturation helpers |
| `fft_k`       | pipelined K-point radix-2 FFT; `INVERSE=1` gives the IFFT |
| `cmul_array`  | K complex multipliers, FFT(w_ij) o FFT(x_j) |
| `accum`       | sums the K-wide IFFT outputs over j, rounds to 12 bits |
| `weight_bram` | one bank of weight spectra per lane, common read address |
| `vec_ram`     | simple dual-port RAM used for every vector memory |
| `circ_mvm`    | the block-circulant product engine |
| `act_unit`    | piecewise-linear sigmoid / tanh |
| `lstm_elem`   | element-wise peephole LSTM update |
| `bc_lstm_top` | the layer: memories, engine, sequencer, interface |

### The product engine (`circ_mvm`)

A run computes `a = W v` for a q-block input vector and G row groups of
LANES = 8 block rows each, in two phases:

1. **Input spectra.** The q input blocks are read from the vector BRAM one per
   cycle, transformed by a single forward FFT and written to a spectrum
   buffer. Each FFT(v_j) is computed once and reused by every block row.
2. **Multiply-accumulate.** Every cycle, all 8 lanes read the same FFT(v_j) and
   their own FFT(w_ij) (lane l serves block row `g*8 + l`), multiply
   element-wise, inverse-transform and accumulate. After the q-th block the 8
   result blocks of the group leave together and the next group follows
   without a gap.

So phase 2 retires 8 circulant blocks (8 x 16 x 16 = 2048 dense-equivalent
multiply-adds) per clock. The pipeline from weight read to result is
1 (RAM) + 1 (multiply) + 4 (IFFT) + 1 (accumulate) cycles.

Weight layout: lane l, word `wbase + g*q + j` holds block row `g*8 + l`,
block column j. The gate matrix occupies words 0..1343 of each lane, the
projection matrix words 1344..1599.

### Gate interleaving and the element-wise stage

Gate rows are stored interleaved: block row `4h + gt` is gate gt (0 input,
1 forget, 2 candidate, 3 output) of cells `16h .. 16h+15`. A row group of 8
block rows therefore carries all four gates of 2 cell blocks (32 cells), and
`bc_lstm_top` passes each group result straight into `lstm_elem` while the
engine goes on with the next group. Bias, peephole and cell-state RAMs are
addressed by the group number, one 32-cell word each. `lstm_elem` has three
pipeline stages (gates i, f, g; new cell state; output gate and m_t). The
m_t blocks are written back to the vector BRAM by a serialiser, one block per
cycle; since a new group result comes only every q >= 8 cycles, it never
overflows (an assertion checks this).

### Frame sequence

`start` -> gate pass (q = 42, 32 groups) -> element-wise updates stream out
during it -> projection pass (q = 64, 4 groups, reading m_t) -> y_t blocks are
written over y_{t-1} in the vector BRAM and streamed on `y_valid/y_addr/y_data`
-> `frame_done`. A frame takes 1749 cycles, 8.7 us at 200 MHz; the published
FPGA implementation of this layer reports 7.4 us and 8.3 us on its two boards.

## Number formats

| quantity | format |
|----------|--------|
| inputs, weights (time domain), biases, peepholes, states, outputs | 12-bit Q4.8 (range -8 .. +7.996) |
| input and weight spectra | 16-bit Q.8 per real/imaginary part |
| element-wise products, IFFT, accumulator | Q.12 (28-bit products, 32-bit accumulator) |
| twiddles | Q1.14 |

The forward FFT is unscaled (16-point sums of 12-bit values fit 16 bits); the
inverse FFT halves after every stage. Products are kept with four guard bits
and rounded to Q4.8 once per block row: rounding each block's IFFT output to
Q4.8 would add a bias of about half an LSB per block, which over 42 to 64
blocks shifts every output by 0.1 and more. Every stored value is saturated.

The activations use the PLAN piecewise-linear sigmoid (segments at |x| = 1,
2.375 and 5, slopes 1/4, 1/8, 1/32) and tanh(x) = 2 sigmoid(2x) - 1; both need
only shifts and adds and stay within 0.02 (sigmoid) and 0.04 (tanh) of the
exact functions.

## Interface (`bc_lstm_top`)

All loads happen while `busy` is low, one word per cycle:

* `w_we, w_lane, w_addr, w_data`: one weight spectrum (16 real parts in the
  low 256 bits, element n at `[16n +: 16]`, then 16 imaginary parts).
  The spectrum is the 16-point DFT of the block's first column, rounded to Q.8.
* `b_we, b_addr, b_data`: biases of gate group g: `[gate][32 cells]`, cell c of
  gate gt at `[(gt*32 + c)*12 +: 12]`; the cells of group g are 32g .. 32g+31.
* `p_we, p_addr, p_data`: peepholes of group g, `[input, forget, output][32]`.
* `x_we, x_addr, x_data`: input block 0..9 (element n at `[12n +: 12]`).
* `clear_state`: zeroes y and c (start of an utterance); takes 33 cycles.
* `start` begins a frame; `frame_done` pulses at the end. y_t leaves on
  `y_valid` with the block index in `y_addr` (0..31).

## Sizes and parameters

`bc_lstm_top` parameters: `K` (block size, a power of two up to 16), `LANES`
(a multiple of 4 that divides the gate and projection row blocks), `N_IN`,
`N_CELL`, `N_PROJ`; everything else is derived. The same RTL builds the
block-size-8 variant (`K=8`, 51,200 blocks, about 6,600 cycles per frame with
8 lanes). One instance is one layer; a stacked network uses one instance per
layer (the second layer of a 1024-1024 network has a 512-wide input).

## Verification

Every module has a self-checking test bench in `tb/` that compares against
values computed independently in floating point (DFT, direct circulant
product, LSTM equations) and checks latencies:

* `tb_fft`, `tb_ifft`: transforms against a direct DFT, 4-cycle latency.
* `tb_cmul_array`, `tb_accum`, `tb_vec_ram`, `tb_weight_bram`: exact checks.
* `tb_act_unit`: all 4096 inputs against the approximation and the exact functions.
* `tb_lstm_elem`: the peephole equations, 3-cycle latency.
* `tb_circ_mvm`: random 4 x 3-block matrix and the worked example above, cycle count.
* `tb_bc_lstm_top`: the layer with K = 16, 8 lanes, 20 inputs, 128 cells,
  128 outputs, 4 frames and a restart; counts that each mechanism ran
  (state clear, gate pass, element-wise groups, m_t write-back, projection
  pass, y_t beats, recurrent input).
* `tb_bc_lstm_full`: the same test at the full default size, 2 frames and a restart.

The layer benches share `tb/lstm_tb_body.svh`. Its model uses the same
sigmoid approximation on Q4.8 arguments and rounds where the hardware stores a
value; outputs must match within 0.04 (small layer) and 0.086 (full layer),
bounds that grow with the square root of the projection fan-in. Observed
errors are about half of that (largest 0.023 and 0.047).

To run one with plain Verilator:

    verilator --binary --timing --assert -Irtl -Itb rtl/bc_pkg.sv \
        tb/tb_bc_lstm_top.sv --top-module tb_bc_lstm_top
    ./obj_dir/Vtb_bc_lstm_top

Each bench prints `TB_RESULT checks=N failures=M`. The full-size bench takes
about three minutes to build and a second to run.

## Where this departs from, or goes beyond, the published description

The published description gives the block-circulant representation, the
FFT -> element-wise multiply -> IFFT -> accumulate datapath with pre-stored
weight spectra, block RAM storage of weights, inputs and biases, the layer
sizes (1024 cells, projection 512, peepholes), block sizes 8 and 16, 12-bit
fixed point and the 200 MHz clock. Everything else is this design's own:

* the first-column circulant convention (the text defines blocks by their
  first row, the accompanying figure transforms the first column; the column
  form is the one for which the FFT identity holds);
* the input width 153 (taken from the comparable ESE design; with it the
  layer has exactly the published 0.20 M parameters);
* the radix-2 pipelined FFT, the 8 parallel lanes, the reuse of input
  spectra, the gate interleaving, the memory map and the frame schedule;
* the Q4.8 format, guard bits, rounding and saturation;
* the PLAN activations;
* the load/clear/start interface.

Not built: the offline FFT of the weights (done by the loader; the test
benches compute it), training, the host/PCIe side, and the second layer of the
two-layer network (a second instance). Full complex spectra are stored, twice
the K/2+1 independent values a real block needs. Timing closure at 200 MHz has
not been checked.
