# BlockGNN accelerator in SystemVerilog

Graph neural networks repeat two steps for every node. First they gather
the feature vectors of the node's neighbours (aggregation). Then they push
the result through a dense layer, `h' = W h` (combination). The dense layers
dominate the arithmetic.

This accelerator constrains every weight matrix to be **block-circulant**.
Such a matrix is cut into `p x q` square blocks of size `n`. Each block is
circulant: every row is the row above it rotated one place, so the whole
block is defined by a single length-`n` vector. A circulant block times a
vector is a circular convolution. That convolution becomes an element-wise
product in the frequency domain:

    W_ij h_j = IFFT( FFT(w_ij) o FFT(h_j) )

A full `N x M` layer (`p = N/n`, `q = M/n`) therefore needs:

* `q` FFTs, one per input sub-vector `h_j`;
* `p*q` element-wise complex products, against weights that are stored
  already transformed;
* `p` IFFTs, one per output sub-vector.

The `p` IFFTs are possible because the sums over `j` are formed while the
data are still spectral. The cost drops from `O(NM)` to about
`O(pq n log n)`, and storage drops by a factor of `n`. With `n = 128`, a
512x512 layer needs 16 circulant blocks instead of 262,144 weights.

The hardware is organised around that formula. A three-stage pipeline,
**CirCore**, computes block-circulant matrix-vector products:

    FFT unit -> systolic array of complex multiply-accumulate PEs -> IFFT unit

A **vector processing unit (VPU)** does the element-wise work of the
aggregation step: sums, max pooling, bias, activations. An on-chip
**global buffer** holds the transformed weights and the node features. A
host CPU drives everything through a command FIFO.

The defaults give the fixed "base" configuration:

* 16 FFT channels and 16 IFFT channels;
* a 4x4 PE array, one complex MAC per PE;
* one SIMD-16 VPU lane;
* block size 128, 32-bit fixed point;
* a 256 KB weight buffer and a 512 KB node-feature buffer (two banks).

## Numbers

All values are 32-bit signed fixed point with 16 fractional bits (Q16.16).
`blockgnn_pkg` defines them as `fix_t`.

Spectral values are complex: `cplx_t` is a `{re, im}` pair of `fix_t`
words. A complex multiply keeps the full product and then shifts right by
16 (`cmul`).

The forward FFT is unscaled, so a 128-point transform can grow its values
by up to a factor of 128 (7 bits). The inverse FFT halves its values after
each of its 7 stages, which gives the `1/n` of the inverse DFT. Inputs
should therefore stay well inside ±2^8 to leave headroom. The testbenches
use values of order one.

## CirCore, stage by stage

### FFT channels (`fft_core`, `fft_unit`)

`fft_core` transforms one sub-vector of `NPT` points at a time:

* It works in place, as a radix-2 decimation-in-time transform.
* It loads the samples in bit-reversed order, one per cycle.
* It runs one butterfly per cycle, `(NPT/2)·log2 NPT` cycles in all.
* It unloads the spectrum in natural order, one sample per cycle.

At `NPT = 128` the first output appears 576 cycles after the first input.
The core is busy for 704 cycles per transform. `INVERSE=1` selects the
conjugate twiddles and the per-stage halving. Twiddles are computed at
elaboration time from `$cos` and `$sin`.

Every core carries a **tag** from its input to its output. The tag is 24
bits, `{vector[15:0], sub-vector[7:0]}`, and it is how later stages know
what they are looking at.

`fft_unit` groups `LANES` cores:

* Incoming sub-vectors are dealt out round-robin. Sub-vector `s` of the
  stream goes to core `s mod LANES`, counting across vector boundaries.
* A layer with fewer sub-vectors than channels (`q < X`) therefore starts
  the next vector's sub-vectors on the idle channels.
* Outputs are collected in the same round-robin order, so results leave in
  input order.

The IFFT unit is the same module with `INVERSE=1`.

### MAC input buffer (`mac_input_buf`)

This buffer holds the spectra of one whole input vector, `q` sub-vectors of
`NPT` complex values. It has two banks; a vector's bank is bit 0 of its
vector number. While the systolic array reads one vector, the FFT unit
fills the other bank with the next. A bank becomes *full* when the last
element of sub-vector `q-1` arrives. The MAC sequencer releases the bank
after its last read.

Reads return `R` sub-vectors at once, one per array row. Any sub-vector at
index `q` or beyond reads as zero. This is how a layer whose `q` is not a
multiple of `R` is zero-padded.

### Systolic array (`pe`, `systolic_array`)

The `R x C` PEs are weight-stationary.

* PE `(row i, column j)` holds the transformed blocks `W_ab` with
  `b mod R = i` and `a mod C = j`. That is all blocks whose input sub-vector
  enters on row `i` and whose output sub-vector leaves on column `j`.
* Each PE keeps up to `TILES` such blocks. The weights stay loaded for as
  long as the layer runs.
* A **pack** is `L` consecutive frequency bins. Feature packs move left to
  right and partial sums move top to bottom, one hop per cycle.
* Each PE multiplies its feature pack by the weight pack that the weight
  index selects. It then adds the partial sum from above.
* The weight index travels along with the features, so every PE in a row
  uses the same address.
* Row `i` is delayed by `i` cycles on the way in. Column `j` is delayed by
  `C-1-j` cycles on the way out. As a result, one issue cycle gives one
  aligned row of `C` column sums `R + C - 1` cycles later.
* A sideband shift register carries control bits alongside:
  * first tile, last tile, pack number;
  * vector number, first output sub-vector, number of columns in use.

### MAC sequencing (in `circore`)

For each full input bank, the sequencer walks through the output tiles and
input tiles:

    for pt in 0 .. ceil(p/C)-1          -- output tile: C output sub-vectors
      for qt in 0 .. ceil(q/R)-1        -- input tile:  R input sub-vectors
        for k in 0 .. NPT/L-1           -- pack
          issue rows qt*R .. qt*R+R-1, pack k, weight (pt*ceil(q/R)+qt)*NPT/L + k

So a vector takes `ceil(q/R)·ceil(p/C)·ceil(NPT/L)` issue cycles.

### MAC output (`mac_output`)

This stage holds one spectral output sub-vector per column. It adds up the
input tiles:

* the first input tile overwrites the stored value;
* each later input tile adds to it.

This is the spectral-domain accumulation that saves IFFTs. When the last
pack of the last input tile arrives, the stage streams the `C` (or fewer)
sums to the IFFT unit, one element per cycle, tagged
`{vector, output sub-vector}`.

There is only one set of accumulators. The sequencer therefore waits for a
drain to finish before it starts the next output tile.

### IFFT and output

The IFFT unit returns the real part of each output sub-vector. Outputs come
out in order: vector by vector, sub-vector by sub-vector. They arrive on a
valid/ready stream, so a slow consumer stalls the whole pipeline back to
the input.

## Buffers, VPU and control

* **Weight buffer** (`weight_buffer`): 32768 complex words (256 KB). The
  host writes the weights already transformed: the FFT of each block's
  defining vector, block `(i, j)` at `base + (i·q + j)·NPT`. The
  controller reads it when it preloads the PEs.
* **Node-feature buffer** (`nfb`): two banks of 4096 words. A word is 16·M
  elements, 256 KB per bank. The accelerator owns one bank and the host
  owns the other, and a `SWAP` command exchanges them. The host can load
  the next batch of features, and collect results, while the accelerator
  works.
* **VPU** (`vpu`): 16·M lanes, purely combinational. Its operations:
  * `ADD`, `MUL`, `MAX`, `RELU`, `COPY`;
  * `SCL` (times a scalar from the command);
  * `EXP`, computed as `2^(x·log2 e)` with a quadratic fraction;
  * `SIG`, a four-segment piecewise-linear sigmoid;
  * `ELU`.
* **Command FIFO** (`cmd_fifo`): 16 entries of the 132-bit `cmd_t`.
* **Controller** (`controller`): runs one command at a time.
  * `LDW`: moves a `p x q` layer from the weight buffer into the PEs.
  * `GEMV`: streams `len` vectors of `q·NPT` elements from the NFB into
    CirCore. At the same time it packs the `p·NPT`-element results back
    into NFB words. The feeder and the write-back run concurrently, so
    successive vectors overlap in the pipeline.
  * `VPU`: applies one operation word by word (read a, read b, write),
    three cycles per word.
  * `SWAP`: exchanges the NFB banks.

  The vector counter that forms CirCore's tags is never reset, so the bank
  alternation stays consistent across commands.
* **Host interface** (`host_if`): a valid/ready word bus with a 2-bit
  region select.

  | region | write | read (answers next cycle) |
  |---|---|---|
  | 0 | push a command (low 132 bits of the bus word) | status: element 0 = commands done, 1 = {busy, FIFO level}, 2 = accelerator's NFB bank |
  | 1 | weight word: re = element 0, im = element 1 | zero |
  | 2 | host-side NFB word | host-side NFB word |

  The bus stalls (`h_ready` low) on a command write while the FIFO is
  full.

### A GS-Pool layer as commands

GS-Pool computes `a = max_u ReLU(W_pool h_u + b)` over the `S` sampled
neighbours `u`. It then computes `h' = ReLU(W (a | h_v))`. As commands:

    SWAP                                  -- features loaded by the host become visible
    LDW   W_pool (p1 x q1)
    GEMV  S neighbour vectors -> Z
    VPU ADD  Z_s + b        (S times)
    VPU RELU Z
    VPU COPY Z_0 -> A;  VPU MAX A, Z_s -> A   (S-1 times)
    VPU COPY h_v -> right after A         -- the concatenation (a | h_v)
    LDW   W    (p2 x (p1 + q1))
    GEMV  1 vector (a | h_v) -> OUT
    VPU RELU OUT
    SWAP                                  -- results to the host side

`tb_blockgnn_top` and `tb_blockgnn_full` run exactly this sequence through
the host bus. They check the result against a real-arithmetic model of the
layer.

## Layer shapes that fit

A layer fits in one weight load when:

* `q ≤ QMAX` (default 40);
* `ceil(p/C)·ceil(q/R)` tiles ≤ `TILES` (default 16);
* its transformed weights fit the weight buffer, with `p·q·128` words ≤
  32768.

With 512 hidden units and `n = 128`:

* Every GCN and GS-Pool layer of the four standard citation and social
  graphs fits (Cora, Citeseer, Pubmed, Reddit). The largest is GS-Pool's
  second matrix on Citeseer: 33 input sub-vectors, 9 tiles.
* G-GCN's two `F x F` gate matrices do not fit on Cora or Citeseer. They
  need to be split into row groups (separate `LDW`/`GEMV` pairs) or column
  groups (GEMVs followed by a VPU `ADD`).
* GAT's attention softmax needs a sum across lanes and a division. The VPU
  has neither, so only GAT's matrix products can run here.

## Where this design departs from the paper

* **FFT core.** The paper's prototype uses a vendor FFT core, which takes
  484 cycles per 128-point transform. Here it is a simple iterative radix-2
  core: 704 cycles of occupancy, one butterfly per cycle.
* **One element per cycle.** All streams move one element per cycle,
  including NFB to CirCore and CirCore to NFB. With 16 channels the FFT
  unit could absorb about 2.9 samples per cycle. A GEMV therefore runs at
  about `max(q, p)·128` cycles per vector rather than at the rate of the
  paper's cycle model.
* **Dispatch is staggered.** The paper sends the sub-vectors of one vector
  to different FFT channels simultaneously. Here they reach their channels
  one after another, `NPT` cycles apart, because the input is one
  element-per-cycle stream. The channels still work in parallel once
  loaded.
* **Accumulators.** There is a single accumulator bank in the MAC output
  stage, so drains and the next output tile do not overlap.
* **VPU timing.** VPU commands take three cycles per word, not one.
* **Own choices.** The paper does not describe these, so they are this
  design's own:
  * the command set and the host bus;
  * the Q16.16 binary point;
  * the way sub-vectors are tagged and banked.
* **Not built.** The paper's performance and resource model, which searches
  for the best channel counts and array shape, is a design-time tool and is
  not built. Its parameters are simply this RTL's parameters. The paper's
  per-dataset optimal settings (for example 18/7/6/4/1/1 for Cora) can be
  passed to `blockgnn_top`. Only the base configuration has been simulated.
* **Outside the design.** The host CPU and DRAM are outside the design. The
  host bus is the top's port list.

## Files

`rtl/` has one module or package per file:

* `blockgnn_pkg` — shared types and fixed-point helpers;
* `fft_core`, `fft_unit` — the FFT and IFFT stages;
* `mac_input_buf`, `pe`, `systolic_array`, `mac_output` — the MAC stage;
* `circore` — the three-stage pipeline;
* `vpu`, `weight_buffer`, `nfb`, `cmd_fifo`, `controller`, `host_if` — the
  rest of the accelerator;
* `blockgnn_top` — the top.

`tb/` has one self-checking testbench per module (`tb_<module>`), plus:

* `tb_ifft_unit`, for the inverse configuration;
* `tb_blockgnn_top`, the end-to-end run at reduced size;
* `tb_blockgnn_full`, the same run at the default size.

Each testbench prints `TB_RESULT checks=N failures=M`. The end-to-end
testbenches also count every mechanism they must exercise:

* a full command FIFO and the NFB swap;
* PE weight writes;
* FFT channels shared between vectors;
* zero-padded tiles and accumulation over input tiles;
* use of the second input bank;
* pipeline stalls;
* each VPU operation used.

A mechanism that never happens counts as a failure.

## Simulating

Verilator 5 (IEEE 1800-2017, `--timing`):

    verilator --binary --timing --assert -Wno-fatal -y rtl \
        rtl/blockgnn_pkg.sv tb/tb_blockgnn_full.sv --top-module tb_blockgnn_full
    ./obj_dir/Vtb_blockgnn_full

Any other testbench builds the same way: give the package and the
testbench, and let `-y rtl` find the modules. The full-size run takes a few
seconds to compile and well under a second to simulate.

All sizes are parameters of `blockgnn_top`:

* `X`, `Y` — FFT and IFFT channels;
* `R`, `C`, `L` — array rows, array columns and MACs per PE;
* `M` — VPU lanes of 16;
* `NPT` — block size, a power of two;
* `TILES`, `QMAX`, `NFB_WORDS`, `WB_DEPTH`, `FIFO_DEPTH`.

The reduced-size testbenches show settings known to work:

* `tb_circore` uses `X=4 Y=2 R=C=2 L=2 NPT=16`;
* `tb_blockgnn_top` uses `X=Y=4 R=C=2 NPT=16`.
