# A block-circulant neural-network layer engine in SystemVerilog

A fully-connected layer computes `y = ReLU(W x + b)`. If the `m x n` weight
matrix `W` is built from `k x k` **circulant** blocks, each block is fixed by
one vector of `k` numbers rather than `k^2`. A circulant matrix times a
vector is a circular convolution, and a circular convolution is a pointwise
product in the frequency domain:

    W_ij x_j = IFFT( FFT(w_ij) o FFT(x_j) )

So storage drops from O(n^2) to O(n), and work drops from O(n^2) to
O(n log n). A convolutional layer becomes the same kind of problem once it
is rewritten as a matrix product (`Y = X F`, one row of `X` per output pixel).

The engine here is an RTL design of the CirCNN architecture (Ding et al.,
MICRO 2017). The FFT is the one computing kernel. A fixed array of
butterflies, `P` lanes wide and `D` levels deep, runs FFTs and IFFTs of any
power-of-two size up to `K` by making several passes over a small working
buffer. Around it sit:

- a peripheral block for the pointwise products, bias, ReLU and max pooling;
- RAMs for the weight spectra `FFT(w_ij)`;
- a ROM of twiddle factors;
- input and output buffers;
- a controller that sequences one layer.

Default sizes are `P = 32`, `D = 2` and `K = 128`, with a 4 MB weight RAM.

## How one layer is computed

The host first writes the weight spectra `FFT(w_ij)` into the weight RAM, one
per circulant block. They are computed offline: the engine never transforms
weights. It also writes the biases, fills in a layer descriptor and pulses
`start`. For each of `n_vec` input vectors, the controller (`layer_controller`) then does this:

1. **Input spectra.** For `j = 0 .. q-1` it reads `k` samples from the input
   buffer and loads them into the FFT working buffer in bit-reversed order.
   It runs a forward FFT and stores `FFT(x_j)` in the spectrum RAM. This RAM
   holds up to 128 block spectra, so inputs up to 16 384 wide. Only half of
   each spectrum is kept (see below).
2. **Multiply-accumulate.** For each output block `i`, it streams
   `FFT(x_j)` and `FFT(w_ij)` for all `j`, `P` bins per cycle, through the
   peripheral block. That block keeps `acc = sum_j FFT(w_ij) o FFT(x_j)` in
   48-bit accumulators, at the full precision of the products.
3. **Inverse transform.** It loads `acc`, rounded and saturated to 16 bits, into the
   working buffer, `P` words per cycle, and runs an inverse FFT. The real
   parts are `a_i = sum_j W_ij x_j`.
4. **Post-processing.** One element per cycle gets its bias added and passes
   through ReLU (if enabled) and max pooling. It then goes into the output
   buffer.

**Half spectra.** Inputs and weights are real, so their spectra are
conjugate-symmetric: `X[k-f] = conj(X[f])`. Bins `0 .. k/2` carry all the
information, and bins `0` and `k/2` are real. When `k >= 2P`, the engine
keeps only bins `0 .. k/2-1`, in `k/(2P)` words, and puts the real bin
`k/2` into the unused imaginary part of bin 0. The sequencer's read port
does this packing when the spectrum is stored. In the multiply-accumulate,
lane 0 of the first word multiplies the two real parts separately. When the
IFFT is loaded, the peripheral block rebuilds each upper bin as
`conj(acc[k-f])`. This halves:

- spectrum RAM;
- weight RAM;
- multiply-accumulate cycles.

With `k = P` a spectrum is a single word, which cannot be halved, so full
spectra are kept. The symmetry is used only on these final spectra. Inside
the FFT, every butterfly output of every level is still computed.

The sum over `j` is taken in the frequency domain, so each output block
needs one IFFT instead of `q`. The published algorithm puts the IFFT inside
the `j` loop. Both give the same result, because the transform is linear.

**CONV layers** run with `n_vec` = the number of output pixels. The host
supplies each row of `X`, i.e. each output pixel's receptive field flattened
to `C*r*r` values (zero-padded to a multiple of `k`). The weight matrix
`F` (`C*r*r x P`) is block-circulant in the same way. **Pooling** takes the
element-wise maximum over `pool_n` consecutive output vectors, so the host
must order the pixels so that each pooling window is consecutive.
Overlapping windows are not supported.

## The FFT kernel: lanes, levels and passes

`basic_computing_block` is a radix-2, decimation-in-time butterfly network
cut down to `P` lanes and `D` levels. Level `j` pairs lane `l` with lane
`l + 2^j`. Each level is followed by a register bank, so a group of `P`
points enters every cycle and leaves `D` cycles later. This is inter-level
pipelining.

For a faster clock, the parameter `INTRA = 1` adds intra-level pipelining.
Each butterfly is split into three parts:

- Mult1: the four real partial products of `W*b`;
- Mult2: combining them into the complex product, with rounding;
- Add: the sum and difference.

A register sits between Mult1 and Mult2. The bypass data, indices and
command of each level are delayed to match. The block latency `L` becomes
`2D`, and the throughput stays one group per cycle. The default,
`INTRA = 0`, keeps the butterflies combinational. That is enough at about
200 MHz. The block and sequencer tests run both settings. `tb_circnn_top`
also passes with `INTRA = 1` set on `circnn_top`; only the FFT drain
bubbles grow.

`fft_sequencer` maps a size-`k` transform (`log2 k` stages) onto this
network:

- **Passes.** The stages are split into `ceil(log2 k / D)` passes of `D`
  stages. Each pass feeds all `k/P` groups, one per cycle.
- **Index mapping.** In a pass that starts at stage `s0`, lane `l` of group
  `g` carries the point whose index has the bits of `l mod 2^D` at
  positions `s0 .. s0+D-1`. The remaining index bits come from
  `{g, l >> D}`. Two points that meet in stage `s0+j` differ only in bit
  `s0+j` of the index, so they sit on lanes that differ only in bit `j`.
  That is exactly what level `j` pairs.
- **Twiddles.** Each point's index travels with it. In stage `s`, a
  butterfly whose upper point has index `a` uses `W_(2^(s+1))^(a mod 2^s)`.
  It reads this from its level's copy of the twiddle ROM at address
  `(a mod 2^s) << (log2 K - 1 - s)`.
- **Short last pass (bypass).** If fewer than `D` stages remain, the last
  pass starts at `s0 = log2 k - D`. Its levels for the stages already done
  pass their data through unchanged.
- **Drain.** A pass reads what the previous pass wrote. The sequencer
  therefore waits for the pipeline to empty before starting the next pass.

Timing: `done` rises `npass * (k/P + L + 2)` cycles after `start` is taken,
where `L = D*(1+INTRA)` is the block latency. For example, with
`INTRA = 0`:

- `k = 128` (the defaults): 4 passes of 8 cycles, 32 cycles per transform.
- `k = 32`: 3 passes of 5 cycles, 15 cycles per transform.

The design needs `P <= k <= K` and `D <= log2 k`.

The working buffer is a `K`-word register array with `P` read and `P` write
ports. It is not a banked SRAM, so any lane permutation costs nothing.

## Numbers and scaling

All stored data are 16-bit two's complement.

| quantity | format | scaling |
|---|---|---|
| inputs, biases, outputs | 8 fractional bits (range +/-128) | |
| weight spectra `FFT(w_ij)` | 8 fractional bits | unscaled |
| twiddles | 14 fractional bits, rounded | |
| forward FFT | | each butterfly halves its outputs; the result is `FFT(x)/k`, which cannot overflow |
| inverse FFT | conjugated twiddles | no scaling |
| pointwise product | kept at full precision (16 fractional bits) | |
| accumulators | 48 bits; rounded to 8 fractional bits and saturated to 16 bits before the IFFT | |

The `1/k` of the forward FFT cancels the `k` of the unscaled inverse, so the
output is `W x + b` at the input's scale. All rounding is to nearest, and
every 16-bit result saturates.

The products are summed unrounded and rounded once per bin. Rounding every
product instead adds `q` rounding errors per bin. For a 9216-wide layer
(`q = 72`) that gave an rms error of about 15% of the output.

Measured errors against exact arithmetic, in LSB (2^-8):

| test | inputs, weights | rms error | largest error | typical output |
|---|---|---|---|---|
| end-to-end, `n = 384` | [-1, 1], [-0.1, 0.1] | 4.3 | 43 | 170 |
| 9216 -> 4096 | [-1, 1], [-0.02, 0.02] | 9.3 | 42 | 160 |

Half spectra cost about a factor `sqrt(2)` in rms error. The rounding error
of a lower bin reappears, conjugated, in its mirror bin, and the two add up
in the real output. With full spectra, the independent errors of the two
bins partly cancel into the discarded imaginary part.

What remains comes mostly from quantizing `FFT(x)/k`: the forward scaling
leaves few significant bits in the spectrum of a 128-point block. If more
accuracy is needed, the first thing to change is the fractional split
(`FRAC_W` in `circnn_pkg`).

## Host interface

| port | use |
|---|---|
| `cfg` (`layer_cfg_t`) | `log2k`, `p_blk` (output blocks), `q_blk` (input blocks), `n_vec`, `relu_en`, `pool_n` (0/1 = off), `w_base`, `b_base` |
| `start`, `busy`, `done` | start a layer; `done` pulses after the last result has entered the output buffer |
| `w_we`, `w_waddr`, `w_wdata[P]` | weight RAM write while idle; one word = `P` complex bins |
| `b_we`, `b_waddr`, `b_wdata` | bias RAM write while idle |
| `in_valid/in_ready/in_data` | input samples: vector by vector, input block by block, in natural order |
| `out_valid/out_ready/out_data` | results: output block by output block |
| `in_stall`, `out_stall`, `fft_bubble`, `relu_hit` | one-cycle status flags for profiling |

The weight spectrum of block `(i, j)` occupies `S` words,
`w_base + (i*q_blk + j)*S + g` for `g = 0 .. S-1`. Lane `l` of word `g`
holds frequency bin `g*P + l`. `S` depends on `k`:

- For `k >= 2P`, `S = k/(2P)` (half spectra). Lane 0 of word 0 holds
  `{re: W[0], im: W[k/2]}`; both bins are real.
- For `k = P`, `S = 1` and all bins are stored. The bias for output `i*k + e` is at
`b_base + i*k + e`. Block `(i, j)` is the circulant matrix whose **first
column** is `w_ij`, i.e. `W_ij[r][c] = w_ij[(r - c) mod k]`. This is the
convention for which the FFT identity above holds exactly.

Several layers can stay in the weight RAM at once, at different `w_base`.
The engine runs one layer per `start`; chaining layers is up to the host.

Cycle budget per input vector, without stalls (`T` = FFT time above):
`q*(k + T + S + 3) + p*(q*S + k/P + T + k + 4)`, approximately. The
output stage (one element per cycle) and the input stage (one sample per
cycle) dominate for `k = 128`.

## Files

| file | contents |
|---|---|
| `rtl/circnn_pkg.sv` | widths, `cplx_t`, `layer_cfg_t`, `bcb_cmd_t`, saturation and bit reversal |
| `rtl/butterfly.sv` | radix-2 butterfly: complex multiply, add/subtract, scaling, optional internal register |
| `rtl/twiddle_rom.sv` | coefficient ROM, computed at elaboration, `NPORT` read ports |
| `rtl/basic_computing_block.sv` | `P` x `D` butterfly network with level registers and bypass |
| `rtl/fft_sequencer.sv` | working buffer, pass and group sequencing, fetch and write-back, half-spectrum read |
| `rtl/peripheral_computing_block.sv` | pointwise MAC, rebuilding of the upper half spectrum, bias, ReLU, max pooling |
| `rtl/wide_ram.sv` | single-port RAM (weights, input spectra, biases) |
| `rtl/io_fifo.sv` | input and output buffers |
| `rtl/layer_controller.sv` | layer sequencing |
| `rtl/circnn_top.sv` | the whole engine |

Each `rtl/X.sv` has a self-checking testbench `tb/tb_X.sv`. The reference
values are computed in the testbench in real arithmetic: DFTs and the
block-circulant matrix product. They are not a copy of the RTL's
fixed-point steps. `tb_circnn_top` runs three layers at the default
parameters:

- an FC layer with `k = 128`;
- a CONV-style layer with `k = 32`, 20 vectors and pooling;
- an FC layer with `k = 64` and no ReLU.

Inputs arrive with random gaps, and the output is held back until the
engine stalls. The testbench checks that input stalls, output stalls, FFT
drain bubbles, ReLU clamps and pooling all occur.

`tb_alexnet_fc` runs layers of AlexNet's fully-connected sizes at the
default parameters with `k = 128`:

- 9216 -> 4096 with ReLU (72 x 32 blocks);
- 4096 -> 1000, padded to 1024 (32 x 8 blocks).

Both layers' weights are loaded first and stay in the weight RAM together.
The weights are random, so this tests size and accuracy, not a trained
network. The first layer takes 21 661 cycles per input vector. It runs in
about 10 seconds.

`tb_lenet5` runs LeNet-5's layer shapes in the same way, one layer after
another. The CONV layers run in matrix form, with 2x2 pooling over 4
consecutive vectors:

- CONV1: 576 pixels, 25 inputs padded to 32;
- CONV2: 64 pixels, 150 inputs padded to 160;
- FC: 256 -> 120 -> 84 -> 10.

The five layers take 78 553 cycles, with an rms error of 2.4 LSB.

To simulate, for example the top-level test:

    verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
        rtl/circnn_pkg.sv tb/tb_circnn_top.sv --top-module tb_circnn_top
    ./obj_dir/Vtb_circnn_top

Each test prints `TB_RESULT checks=N failures=M`. The top-level test takes
a few seconds.

## Relation to the published architecture

Taken from the publication:

- the FFT -> pointwise multiply -> IFFT -> ReLU flow;
- the basic computing block with parallelism `p` and depth `d`;
- its inter-level pipeline registers;
- the optional intra-level register between the two multiplier parts;
- the peripheral block's duties;
- the twiddle ROM and the weight RAM holding `FFT(w_ij)`;
- the input and output buffers;
- 16-bit fixed point;
- the example point `p = 32`, `d = 2`, block size 128;
- about 4 MB of weight storage for AlexNet;
- a single-level memory, as prescribed for about 200 MHz;
- using the conjugate symmetry of real-input spectra to save storage and
  arithmetic.

Choices made here, where the publication gives no detail:

- the pass/index mapping and the drain between passes;
- the register working buffer;
- the number formats and scaling;
- frequency-domain accumulation;
- applying the symmetry to the final spectra, with bin `k/2` packed into
  bin 0;
- the weight layout and the layer descriptor;
- pooling over consecutive vectors;
- FIFOs with valid/ready handshakes;
- host-side im2col for CONV layers;
- asynchronous active-low reset of the control state.

Not built:

- **Skipping conjugate-symmetric partial results inside the FFT.** The
  publication also skips the butterfly outputs of each level that are
  conjugates of others. Here the symmetry is used only on the final spectra
  (half spectra, above). Every butterfly of every level still computes.
- **The optional cache hierarchy** for about 800 MHz operation.
- **Transform sizes smaller than `P`.** These need zero padding of the
  block.
- **Narrower words.** The datapath is 16-bit only. The 4-bit representation
  that the publication uses as a comparison point is not provided.

Fit of the evaluated networks at the default sizes (layer sizes from the
usual definitions of these networks):

- **AlexNet FC6-FC8 with `k = 128`** needs 7 168 of the 32 768 weight
  words (0.875 MB, half spectra). `q` is at most 72 of the 128 spectrum
  slots.
- **AlexNet CONV layers in matrix form** fit, given host-side im2col.
  AlexNet's overlapping 3x3/2 pooling must be done outside.
- **LeNet-5** fits with padding to `k >= 32` (`tb_lenet5`).
