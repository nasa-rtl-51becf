# A three-chunk accelerator for hybrid multiplication / shift / adder networks

Multiplication-free network layers trade the multiplier for something cheaper.
A *shift layer* restricts every weight to a signed power of two, `w = s * 2^p`, so a product becomes an arithmetic shift.
An *adder layer* replaces the dot product by a negative L1 distance, `y = sum -|x - w|`, so a product becomes a subtraction and an absolute value.
Networks that mix ordinary convolutions with these layers keep their accuracy while using far fewer multiplications.
A plain multiplier array runs such a network badly, though: the cheap layers either waste the multipliers or need hardware of their own.

This design gives each layer type its own array of processing elements (PEs), called a *chunk*:

| chunk | PE arithmetic | PEs (default) |
|-------|---------------|---------------|
| CLP (convolution layer processor) | 8-bit x 8-bit multiply-accumulate | `N_CLP = 24` |
| SLP (shift layer processor)       | 6-bit activation shifted right by a 6-bit power-of-two code, accumulated | `N_SLP = 24` |
| ALP (adder layer processor)       | `-abs(x - w)` on 6-bit operands, accumulated | `N_ALP = 8` |

All three chunks work at the same time, each on a different input frame.
The chunk sizes are chosen in proportion to the number of operations of each type in the network.
That way all three finish a pipeline step at about the same time.

## Block diagram

```
             weights                    +-------------------------------+
   DRAM ----------------------------->  |             NoC               |
    ^  \                                |  round-robin over 3 chunks:   |
    |   \  frame input                  |  - global-buffer port         |
    |    v                              |  - DRAM weight reads          |
    |  +---------+   port B   +------+  +--+-----------+-----------+----+
    +--| io_dma  |<---------->|  GB  |<-A->|  CLP      |  SLP      |  ALP
 frame +---------+            +------+     |  24 x MAC |  24 x >>  |  8 x |x-w|
 output                                    +-----------+-----------+------
                   pipe_sched: layer table, step barrier, job and DMA commands
```

* `nasa_accel` is the top. It holds the scheduler, three `chunk` instances, the NoC, the global buffer (GB) and the DRAM transfer engine.
* DRAM is outside the design. Its two ports come out of the top:
  * `dw_*` carries weight reads from the NoC.
  * `dio_*` carries frame input and output traffic from `io_dma`.
* `global_buffer` is a dual-port array of 8-bit words (`GB_DEPTH = 65536`).
  * Port A serves the chunks through the NoC.
  * Port B serves `io_dma`.
  * Reads return one cycle after the request.
* `noc` arbitrates two shared resources between the chunks, each with its own round-robin arbiter:
  * The GB port.
  * The DRAM weight port, which allows up to `W_OUTSTANDING` reads in flight.
  
  It sends each response to the chunk that asked for it. `gb_conflict` is high in every cycle in which two or more chunks want the buffer.

## Layers as the hardware sees them

A layer reads an `in_h x in_w` map with `n_in` channels and writes `n_pix = out_h*out_w` pixels with `n_out` channels.
Each output is a reduction over a `K x K` window. The window is zero-padded by `(K-1)/2` on each side ("same" padding) and moves with stride `s` (1 or 2):

```
dense:     Y[oy][ox][o] = requant( sum_{ky,kx,c} f(X[oy*s+ky-pad][ox*s+kx-pad][c], W[o][ky][kx][c]) )
depthwise: Y[oy][ox][o] = requant( sum_{ky,kx}   f(X[oy*s+ky-pad][ox*s+kx-pad][o], W[o][ky][kx]) )
f = x*w  (conv)     x * 2^-q with sign, or 0  (shift)     -|x - w|  (adder)
```

Special cases:
* With `K = 1` a layer is a pointwise convolution.
* A 1x1 layer on a 1x1 map is a fully connected layer.
* An inverted-residual block (1x1 expand, KxK depthwise, 1x1 project) is three consecutive layers.
* Any of the three layer types can take any of these shapes.
* Zero padding means a padded tap contributes `f(0, w)`. For an adder layer that is `-|w|`, not 0.

A layer is described by a `layer_desc_t` (in `nasa_pkg`):

| field | meaning |
|-------|---------|
| `ltype` | `LT_CONV`, `LT_SHIFT` or `LT_ADDER`; this picks the chunk |
| `order` | loop order, `LO_WS` or `LO_OS` (see below) |
| `k_size`, `stride`, `dw` | window size K (1, 3, 5, 7), stride (1, 2), depthwise (requires `n_out == n_in`) |
| `in_h`, `in_w`, `n_in` | input map and channels |
| `out_w`, `n_pix`, `n_out` | output width `(in_w-1)/s+1`, output pixels `out_h*out_w`, output channels |
| `w_base` | DRAM word address of the weights: `R = K*K*(dw ? 1 : n_in)` words per output channel, `c` innermost, at `w_base + o*R + (ky*K+kx)*(dw ? 1 : n_in) + c`; `R <= RF_DEPTH` (256) |
| `out_shift`, `relu`, `out_bits` | requantisation: arithmetic right shift, optional ReLU, then saturation to `out_bits` signed bits |

Maps in the GB are stored row-major with the channel innermost: `X[y][x][c]` at `base + (y*in_w + x)*n_in + c`.
Outputs are stored the same way: `Y[p][o]` at `base + p*n_out + o`, where `p = oy*out_w + ox`.

### Number formats

* Conv layers use 8-bit signed weights and activations.
* Shift and adder layers use 6-bit signed values.
  * A chunk of those kinds saturates each 8-bit word it reads from the buffer to 6 bits.
  * A layer that feeds a shift or adder layer should set `out_bits = 6`.
* Shift weight code, 6 bits:
  * bit 5 = zero flag (the weight is 0)
  * bit 4 = sign
  * bits 3:0 = `q`, the weight being `±2^-q`
* The shift term is `±((x << 15) >>> q)`. The shift PE therefore accumulates with 15 fractional bits, and `out_shift` must remove them (typically `out_shift >= 15`).
* Partial sums are 32 bits wide.
* Requantisation rounds toward minus infinity, because it is a plain arithmetic shift.

Only right shifts are built. A shift weight of magnitude above 1 needs to be folded into `out_shift`.

## How a chunk runs a layer

Output channels are cut into tiles of `N_PE`. PE `i` of a tile owns channel `tile*N_PE + i`, and each PE holds the whole weight row `W[o][*]` in its own weight register file. A chunk repeats three phases:

1. **LOADW** reads the tile's weights from DRAM through the NoC, `R` words per PE, keeping several requests in flight. It writes them into the PEs' register files.
2. **COMP** walks the window of the current output pixel. The loop runs over `ky`, then `kx`, then channel `c` innermost, with one GB read per cycle.
   * Dense layer: each word is broadcast to every PE of the tile. All PEs share the reduction index `(ky*K+kx)*n_in + c`.
   * Depthwise layer: the channel loop runs over the tile's own channels only, and word `c` goes to PE `c` alone. This costs `K*K*n_act` reads per pixel and keeps only one PE busy per cycle. It is simple, but depthwise layers run at 1/N_PE of the chunk's peak.
   * A tap that falls in the padding still issues a read to the region base, which keeps responses in order. Its data are replaced by zero on arrival.
   * Each PE adds `f(x, W[k])` to its partial sum, and the first term of a pixel restarts the sum.
3. **WRITE** requantises the tile's partial sums and writes them to the GB, one per cycle.

The two loop orders differ only in how the tile and pixel loops nest:

* **WS (weight stationary)**: the tile loop is outer. Weights are loaded once per tile, and the inputs are read once per tile.
* **OS (output stationary)**: the pixel loop is outer. For every pixel the chunk finishes every tile's outputs, and it reloads weights for each tile. This costs more weight traffic but keeps every output's work together.

The descriptor picks the order per layer. The offline search that would make that choice is not part of the hardware.

Timing of one PE: a broadcast word is registered in the PE's input register, and its term is added to the partial sum on the next edge. A partial sum is therefore final two cycles after its last input.

## The pipeline schedule

This is the part that makes the three chunks useful together.
`pipe_sched` splits time into **steps** and gives each layer `l` of an `L`-layer network one frame per step:

```
layer l works in step j on frame f = j - 1 - l      (if 0 <= f < n_frames)
steps j = 0 .. n_frames + L
```

In each step:
* Each chunk runs its own layers one after another, in network order.
* The three chunks run at the same time.
* `io_dma` loads frame `j` into the GB and stores the finished frame `j-1-L` to DRAM.

A step ends when all three chunks and the DMA are done. This barrier is what lets layer `l+1` read, in step `j+1`, what layer `l` wrote in step `j`.

Example with layers `Conv1 Shift2 Adder3 Shift4 Conv5` and step `j`:
* CLP runs Conv1 on frame `j-1`, then Conv5 on frame `j-5`.
* SLP runs Shift2 on frame `j-2`, then Shift4 on frame `j-4`.
* ALP runs Adder3 on frame `j-3`.

Once the pipeline is full, throughput is one frame per step, and a step lasts as long as the busiest chunk. The first `L` steps fill the pipeline and the last `L` drain it.

### Buffer layout

Each boundary `b` between layers has two equal halves in the GB, and frame parity picks the half:
* `b = 0` is the network input.
* `b = L` is the network output.

A layer therefore writes frame `f` into one half while its consumer reads frame `f-1` from the other.
* The half size is `in_h*in_w*n_in` for `b = 0` and `n_pix*n_out` of the producing layer otherwise.
* The regions are packed from address 0 by a setup pass before the first step, which handles one boundary per clock.

The setup pass refuses a configuration and raises `cfg_err` (with `done`) if any of these holds:
* a size is zero
* `K` is even, or the stride is not 1 or 2
* `out_w` or `n_pix` does not match the input map
* a depthwise layer changes the channel count
* `R > RF_DEPTH`
* the type is unknown
* a layer's input map (`in_h`, `in_w`, `n_in`) does not match the previous layer's output
* all regions together exceed `GB_DEPTH`

Frame `f` is read from DRAM at `in_dram_base + f*(input size)`, and its output is written to `out_dram_base + f*(output size)`.

## Using it

1. Hold `rst_n` low, then high. Reset is asynchronous and active low; it clears control state only, not memories.
2. Write `n_layers` descriptors with `cfg_we`/`cfg_idx`/`cfg_desc`.
3. Put the weights and input frames in DRAM.
4. Set `n_layers`, `n_frames` and the two DRAM bases, and pulse `start`. `busy` stays high until the one-cycle `done` pulse.

Status outputs for performance counting:
* `step_evt`, with `step_cycles` giving that step's length in clocks
* `chunk_busy[2:0]`
* `wload_evt[2:0]`, one pulse per weight-tile load
* `sat_evt[2:0]`, one pulse per saturated output
* `gb_conflict`

### DRAM port protocol

* Requests use valid/ready. A request is taken on a cycle where both are high, and it must be held until then.
* Read data come back in request order on `*_rsp_valid`/`*_rsp_data`, after any latency.
* The design never refuses a response.

Chunk-to-NoC and DMA-to-GB traffic use the same rules. Assertions in `chunk` and `noc` check that a request is held until it is taken and that no response arrives without a request.

## Simulating

The testbenches in `tb/` are self-checking. Each prints `TB_RESULT checks=N failures=M` at the end and has a watchdog.

| testbench | what it checks |
|-----------|----------------|
| `tb_mac_unit`, `tb_shift_unit`, `tb_adder_unit` | every operand pair against the arithmetic above |
| `tb_requant` | random sums, shifts, widths, ReLU, saturation flag |
| `tb_pe` | random sums for all three PE kinds |
| `tb_clp`, `tb_slp`, `tb_alp` | 16 random layers each (both loop orders, K = 1/3/5, stride 1/2, dense and depthwise, reductions up to 256) on a chunk with a stalling buffer and DRAM; outputs, untouched neighbours, weight-load count, a cycle lower bound |
| `tb_global_buffer`, `tb_noc`, `tb_io_dma` | random traffic against reference models |
| `tb_pipe_sched` | job order, frame-to-region mapping, DMA commands, step lengths and counts with stand-in chunks; refusal of eight kinds of bad configuration |
| `tb_nasa_accel` | the top at its default sizes: 5 layers on a 5x5x8 input (3x3 stride-2 Conv, 1x1 Shift, 3x3 depthwise Adder, 1x1 Shift, 3x3 Conv), 4 frames, DRAM with random stalls; every output word against a reference model; counts of concurrent chunk activity, buffer conflicts, saturations, DRAM stalls, fill/drain steps and weight loads |
| `tb_hybrid_block` | the top at its default sizes on two inverted-residual blocks of the kind the searched networks are built from, on an 8x8x16 map: Conv 1x1 16->96, Shift 3x3 depthwise, Adder 1x1 96->24, then Conv 1x1 24->72, Adder 5x5 depthwise stride 2, Shift 1x1 72->32; 2 frames, every output checked |

`tb/dram_model.sv` is a behavioural DRAM with fixed latency and random back-pressure.
`tb/nasa_ref_pkg.sv` holds the reference arithmetic, and `tb/chunk_harness.sv` is the shared body of the three chunk tests.

Example with plain Verilator (5.x):

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb --top-module tb_nasa_accel \
  rtl/nasa_pkg.sv rtl/*.sv tb/nasa_ref_pkg.sv tb/dram_model.sv tb/tb_nasa_accel.sv
./obj_dir/Vtb_nasa_accel
```

For the chunk tests, add `tb/chunk_harness.sv`. Packages must come before the files that import them.

The end-to-end test runs the top with every parameter at its default and finishes in about a second.

## Where this departs from the source architecture

Taken from the architecture this follows:
* three chunks for convolution, shift and adder layers
* PEs with their own weight, input and partial-sum registers and an accumulator fed back into itself
* a global buffer between DRAM and the chunks for inputs and outputs
* a NoC that links the buffer to the PEs and reads weights straight from DRAM
* 8-bit quantisation, and 6-bit for shift and adder layers
* PE counts in proportion to each layer type's operation count
* the step-by-step schedule in which a layer's output in one step is the next layer's input in the next step
* a choice of loop order per layer

This design's own choices:
* **Sizes.** 24/24/8 PEs come from the operation mix of a representative hybrid network: about 24M multiplications, 24M shifts and 8M adder-layer terms per image. The other sizes were chosen here: 64 KiB buffer, 256-entry weight register file, 72-layer table.
* **Window walk.**
  * Windows are walked by the chunk controller, one buffer word per cycle, with no line buffer or input reuse between neighbouring outputs.
  * Depthwise layers use one PE at a time.
  * A reduction longer than the weight register file (`R > 256`) is refused, not split into passes.
  * A full CIFAR-size searched network needs more buffer than the default 64 KiB: a 32x32 map expanded to 96 channels takes 192 KiB once double-buffered.
* **Loop orders.** Only WS and OS. Row- and input-stationary orders are not built.
* **Dataflow details.** The broadcast of inputs to a whole tile, the shift-weight code, the requantisation by shift and saturation, the double-buffered region layout, the setup checks, the DMA engine and all handshakes.
* **Shifts.** Only right shifts, that is weights of magnitude at most 1.
* **Buffer.** The buffer is one array with one port for all chunks. Contention between chunks for it is real in this design and is counted, not hidden.
