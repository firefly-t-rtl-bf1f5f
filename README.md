# A dual-engine spiking-transformer accelerator in SystemVerilog

Spiking transformers mix two kinds of work. Convolutions and linear layers
multiply sparse binary spike maps by multi-bit weights. Self-attention
multiplies binary matrices (Q, K and V) with each other. This design gives
each kind its own engine:

* The **sparse engine** skips zero spikes. A spike costs one accumulate, and
  a position with no spike costs nothing.
* The **binary engine** computes attention with AND and population count.

An orchestrator turns stored input maps into sliding-window beats. A small
register file configures each layer. Every layer is one *run*, started by
the host.

Default parallelism:

* 4 time steps × 2 pixels (8 grid points), 16 input channels and 64 output
  channels are processed side by side.
* Each grid point has 2 workers, and each worker has a 2-lane decoder. That
  gives G = 4 non-zero spikes per grid point per cycle.
* The binary engine is an 8 × 8 array. Each processing element (PE) reduces
  16 bits per cycle.
* Weights are 4-bit signed numbers.

## Data path of a run

```
host write port ─► config_regs
                ─► orchestrator (input banks) ─► sparse_engine ─┬─► output_packer ─► out_*
                ─► weight / bias RAMs ──────────┘               └─► binary_engine ─┘
                                     residual RAM ◄─► sparse_engine
```

1. The host writes the configuration, the weights, the biases and the input
   pixels through `host_we/host_sel/host_addr/host_data`. Config register 0
   must come before the pixels, because the pixel address depends on the map
   width and on the slice count.
2. A write to config register 4 starts the run.
3. The orchestrator walks the output map. The order is: output rows, then
   groups of 2 output columns, then kernel rows, kernel columns and 16-channel
   slices.
4. For every step the orchestrator sends one beat: 2 pixels × 4 time steps ×
   16 spikes. Each beat carries the weight address k of its kernel position
   and slice.
5. The last k of an output group closes a *tile*. For each pixel and each of
   the 64 channels, the current is the sum of the weights of the set spikes
   over the whole tile.
6. The neurons process one output channel of the tile per cycle, all 8 grid
   points at once. They then feed the max pool, which can be bypassed.
7. The output packer collects 16 channels into one 128-bit beat.
8. A run ends with the `done` pulse. For an ordinary layer, `done` comes when
   the last output beat has been accepted.

### Sparse engine (`sparse_engine`, `balance_unit`, `sparse_decoder`, `weight_memory`)

There is one weight RAM per output channel. All 64 RAMs are read at address
k and broadcast to the 8 grid points.

A grid point (`balance_unit`) gives the beat to one of its 2 workers:

* Each worker has a 2-entry FIFO. The choice is round-robin, skipping a
  worker whose FIFO is full. A worker stuck on a dense vector therefore does
  not block the other one.
* A worker's `sparse_decoder` yields up to M = 2 set-bit positions per
  cycle. It uses look-ahead carries: lane m finds the first set bit above
  the one lane m−1 found.
* A vector with p spikes occupies the decoder for max(1, ⌈p/M⌉) cycles.
* The same indices pick weights out of all 64 channel vectors. Each channel
  adds the picked weights to its accumulator.

A beat is accepted only when all 8 grid points can take it. While it waits,
`stall` is high. This is the load imbalance that the worker FIFOs are there
to absorb.

At the end of a tile a grid point works as follows:

1. It waits until both workers are empty.
2. It adds the two partial sums of each channel into a result register.
3. It clears the accumulators.

The engine then reads the 8 result registers channel by channel.

### Neurons (`neuron_dynamics`), pooling (`max_pool`), residual

Every neuron is a leaky integrate-and-fire neuron. For each time step t, in
order:

* X = I + bias[c] + R, where R is the residual input (added only when
  `res_en` is set).
* H = V − (V >>> leak_sh) + X
* The neuron spikes when H ≥ vth. After a spike V becomes 0; otherwise
  V = H.

X is also the residual output. With `res_store` set, X is written in order
into an on-chip residual RAM. A later run with `res_en` reads it back in the
same order, so both runs must have the same output shape.

The max pool ORs 2 × 2 windows. It uses a row buffer, and it repacks the
pooled pixels into full 2-pixel beats.

### Orchestrator (`orchestrator`)

The input is held in 2 banks. Pixel column x is stored in bank x mod 2. The
2 pixels of a beat are neighbouring columns, so they always lie in different
banks. Each bank is read once per cycle. The two outputs are then rotated by
the kernel's column offset.

A pixel outside the map reads as zero, which gives zero padding. Only stride
1 is supported. One beat leaves per cycle when the downstream is ready.

### Binary engine (`binary_engine`, `bin_systolic_array`, `and_popcount`)

A run can have the role K, Q or V. Its spikes then go to the binary engine
instead of the host:

* Q and K are stored as rows of D bits, one per time step and token.
* V is stored transposed, as rows of L bits, one per time step and channel.
  The channel-serial beat order delivers V in exactly this form.

The last beat of the V run starts the attention. For each time step:

* Phase 1: A[l][j] = popcount(Q[l] & K[j]) ≥ thr_s
* Phase 2: O[l][d] = popcount(A[l] & Vᵀ[d]) ≥ thr_o

Both phases run tile by tile on the 8 × 8 array, with the reduction
dimension fed 16 bits per cycle. The array is output-stationary:

* Row i and column j are delayed by i and j cycles respectively.
* Operands then move one PE per cycle.
* Each PE holds its own count.

A tile takes ⌈R/16⌉ + 16 cycles, where R = D in phase 1 and R = L in
phase 2. Tiles do not overlap.

`and_popcount` uses the same reduction structure throughout:

1. A first stage ANDs three bit pairs and counts them into 2 bits.
2. Further stages use 6-input, 3-output counters.
3. A final adder sums the last two rows.

O is sent through the output packer as a 1 × L map of D channels.

## Host interface (`firefly_t`)

| `host_sel` | write |
|---|---|
| 0 | config register `host_addr[2:0]` (map below) |
| 1 | weight vector: `host_addr[14:9]` channel, `[8:0]` address k = (ky·kw+kx)·ci_blk+cb, data = 16 × 4-bit weights |
| 2 | bias of channel `host_addr[5:0]` |
| 3 | input pixel: `[7:0]` x, `[15:8]` y, `[23:16]` slice; data bit t·16+ci |

Config registers:

| reg | fields |
|---|---|
| 0 | fh, fw, ci_blk |
| 1 | kh, kw, pad, co, res_en, pool_en, leak_sh, res_store |
| 2 | vth |
| 3 | role, seq_len, thr_s, thr_o |
| 4 | start |

Output beats are `out_data[t][x][ci]`, with `out_pix` (the first pixel,
row-major), `out_cb` (the channel slice) and `out_last`.

## Where the design departs from the source architecture

* The split of the 8 grid points into 4 time steps × 2 pixels is this
  design's choice. So are the neuron equations, the residual RAM, the
  register map and all buffer depths.
* Decoder clearing rule: the published formula, read literally, would keep
  the bit just reported. This design clears it.
* Attention is reduced to binary matrices with two thresholds. The source
  architecture does not give its attention arithmetic.
* The interleaved, bank-rotating transpose buffer for V is not built. V is
  written transposed directly into a register array.
* Attention tiles are not overlapped with sparse-engine work. The latency
  hiding of the source architecture is missing.
* The binary PE is a plain LUT popcount. The DSP-based accumulation is not
  modelled.
* The Q, K, V and A buffers are flip-flop arrays (about 330 kbit at the
  defaults), not block RAM. Synthesis of the top level is slow because of
  this.
* The DMA, interconnect, processor and DRAM are not built. The host is a
  plain write port, and layers larger than the input banks (2 × 512 words)
  must be tiled by the host.

## Sizes against the evaluated networks

* Attention up to 256 tokens with a head dimension of up to 64 fits both
  Spikingformer variants: 64 tokens × 16 per head, and 196 tokens × 64 per
  head.
* Their 512- and 1024-channel linear layers need more input words than the
  banks hold, so the host must split them. For example, 196 tokens × 32
  slices / 2 banks = 3136 words against 512.
* One attention head of Spikingformer-8-512 takes
  4 × (25² × (4+16) + 25·8 × (13+16)) = 73 200 cycles.

## Simulating

Every block has a self-checking testbench `tb/tb_<block>.sv`, which prints
`TB_RESULT checks=N failures=M`. For example:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_firefly_t \
  -y rtl -y tb +libext+.sv -Irtl rtl/fft_pkg.sv tb/tb_firefly_t.sv && obj_dir/Vtb_firefly_t
```

`tb_firefly_t` runs the full-size top level with five runs:

1. a padded 3 × 3 convolution;
2. the same convolution with the residual added and pooling on;
3. three 1 × 1 runs producing K, Q and V, followed by attention.

It compares every output bit with a software model. It also requires every
mechanism to occur: stall, back-pressure, padding, residual, pooling on and
off, each role, and the hand-over between the engines.
