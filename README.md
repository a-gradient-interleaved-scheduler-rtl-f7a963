# Gradient-interleaved backpropagation on a configurable systolic array

Training a fully-connected layer `z = W a` needs two matrix products in the backward pass,
and both use the same error vector `delta` that arrives from the layer above:

```
dE/da(l-1) = W^T * delta            (error sent to the layer below)
G^T        = a(l-1) * delta^T       (weight gradient, written transposed)
W          <- W - lr * G            (update)
```

A conventional accelerator runs these as separate matrix operations. It reads `delta`
from memory twice, writes `G` out and reads it back for the update. This design runs both
products in one pass through the same P x Q systolic array, alternating between them
every cycle:

* **Weight-stationary (WS) step.** Each PE holds one weight. The column sums of
  `W^T delta` build up as partial sums that climb the columns.
* **Output-stationary (OS) step.** Each PE accumulates one element of `G^T = a delta^T`
  in place over the mini-batch.

Writing the gradient transposed means that `G(y,x)` builds up in the PE that already holds
`W(y,x)`. The array can therefore apply the update itself, and `G` never goes to memory.
Each `delta` vector is read once and used by both steps.

The default configuration is a 128 x 128 array (P = Q = 128).

## What each PE holds and does

The array has columns x = 0..P-1 (west to east) and rows y = 0..Q-1 (south to north).
PE(x,y) stores:

| register | contents |
|---|---|
| `w` | `W(y,x)`: row y of the layer's weight matrix, column x |
| `g` | `G(y,x)` summed over the samples issued so far |
| `h_reg` | the `delta` and tag passed on to the east neighbour |
| `v_reg` | the word passed on to the north neighbour |

A row carries one output neuron's error `delta(y)` eastward. A column carries input
neuron x's activation `a(x)`, or the partial sum of `dE/da(x)`, northward. A tag bit
`os` travels with `delta` and picks the step. All PEs therefore switch mode on a per-cycle
basis, with no global mode signal.

| step | tag | vertical input | PE action | passed north |
|---|---|---|---|---|
| OS | `os=1` | `a(x,n)` | `g += delta(y,n) * a(x,n)` | `a(x,n)` |
| WS | `os=0` | `res(x,y-1)` | none | `res(x,y-1) + delta(y,n) * w` |

In both steps `delta` and its tag go east through `h_reg`. A sample `n` is two consecutive
steps with the same `delta`: OS first, then WS. This gives the following inputs at
PE(x,y) and at its north neighbour:

| PE | input | T0 | T1 | T2 | T3 |
|---|---|---|---|---|---|
| PE(x,y) | from the west | δ(y,n) | δ(y,n) | δ(y,n+1) | δ(y,n+1) |
| PE(x,y) | from the south | a(x,n) | res(x,y-1) | a(x,n+1) | res(x,y-1) |
| PE(x,y+1) | from the west | – | δ(y+1,n) | δ(y+1,n) | δ(y+1,n+1) |
| PE(x,y+1) | from the south | – | a(x,n) | res(x,y) | a(x,n+1) |

The vertical link therefore alternates between an activation and a partial sum. The
bottom row gets `0` as its partial sum on WS steps. On a WS step, the top row's output is
`dE/da(x)` for sample n, summed over the Q rows of the tile.

Two more controls go to every PE at once:

* `update_en` applies `w <= w - (g >>> (FRAC + lr_shift))` and clears `g`.
* `shift_en` turns each column into a shift register. `w` takes `v_in`, and the old `w`
  appears on `v_out` in the same cycle. Loading P words per cycle for Q cycles fills the
  array and pushes the previous contents out of the north edge.

## Wavefront timing

This is the part that needs care when the design is changed.

**Staggering.** The edge streams are staggered so that sample data meets in the right PE:

* Row y's `delta`/tag stream is delayed by y cycles.
* Column x's `a`/0 stream is delayed by x cycles.
* Each hop then adds one register. The west data reaches PE(x,y) after x more hops and
  the south data after y more hops.

So a step issued at edge cycle `s` is seen by PE(x,y) at cycle `s + x + y`, from both
directions. Both staircases are triangular shift registers (`gis_skew`).

**Re-alignment.** North outputs come out as a staircase too: column x's result leaves x
cycles after column 0's. A reversed staircase delays column x by `P-1-x`, so one complete
`dE/da` vector appears per sample, with `grad_valid`.

**Per-sample latency.** From the cycle a sample's `delta`/`a` are taken (`xd_req`) to the
cycle its `grad_out` is valid is **P + Q cycles**:

* 1 cycle to the WS step,
* Q-1 cycles of row skew to the top row,
* 1 cycle for the top register,
* P-1 cycles in total across the column skew and the re-alignment.

**Drain and update.** The last OS step reaches the far corner PE(P-1,Q-1) P+Q-2 cycles
after it is issued, and the last WS step one cycle later. After the issue phase the
scheduler therefore waits P+Q-2 cycles, then pulses `update_en` for one cycle. At that
cycle every accumulation has finished and every WS step has used the old weight. The last
`grad_out` vector is valid in the same cycle.

**Operation length.** An `OP_TRAIN` with batch B runs these phases:

| phase | cycles | what happens |
|---|---|---|
| LOAD | Q | `w_req` is high; P words per cycle go in, and the previous weights come out on `w_out` |
| ISSUE | 2B | OS and WS steps alternate; `xd_req` is high on each OS step |
| DRAIN | P+Q-2 | the last wavefront crosses the array |
| UPDATE | 1 | in-place SGD update |

The ISSUE phase spends two cycles per sample, one for each product, as two separate
passes would. The savings are elsewhere. There is no Q-cycle unload of `G`, no separate
update pass, and no second read of `delta`.

`done` pulses in the next cycle. From the start cycle to `done` this is
`Q + 2B + (P+Q-2) + 2` cycles: 384 + 2B for the default 128 x 128 array. `OP_SHIFT` runs
only LOAD and finishes Q+1 cycles after start. Use it to read out the final weights, or to
load weights without training.

## Interface of `gis_top`

Vectors are packed arrays. Element i is column i (`w_in`, `w_out`, `a_in`, `grad_out`) or
row i (`delta_in`).

| port | dir | meaning |
|---|---|---|
| `start`, `op`, `batch[15:0]`, `lr_shift[4:0]` | in | start an operation. Taken only when idle, and all are captured. The learning rate is `2^-lr_shift`. |
| `busy`, `done` | out | busy during the phases; one-cycle `done` right after them |
| `w_req` | out | P weights are taken from `w_in` in this cycle |
| `w_in[P]` | in | on the k-th request (k = 0..Q-1), row `Q-1-k` of W |
| `w_out[P]` | out | while `w_req` is high, the weights that leave the top. On the k-th cycle this is row `Q-1-k` of the previous contents, already updated. |
| `xd_req` | out | one sample's `delta_in[Q]` and `a_in[P]` are taken in this cycle |
| `grad_valid`, `grad_out[P]` | out | `dE/da(l-1)` of one sample, in issue order |

Inputs are taken in the same cycle as the request. A memory or FIFO in front of the
engine must therefore present its next word ahead of time (show-ahead). Every output is
registered, except that `w_out` comes from the top-row weights through a multiplexer.

## Number format and update rule

| quantity | format |
|---|---|
| operands `w`, `a`, `delta` | 16-bit signed, 8 fractional bits (Q8.8) |
| products, partial sums, `g`, `grad_out` | 32-bit signed Q16.16 |

The widths are set in `gis_pkg` (`DATA_W`, `FRAC`, `ACC_W`). Arithmetic wraps around and
has no saturation. With full-range Q8.8 inputs, a column sum over 128 rows, or a gradient
over many samples, can overflow 32 bits. Scale the data, or widen `ACC_W`, for such
ranges.

The update is plain SGD with a power-of-two learning rate. `G` is shifted down to Q8.8 and
by `lr_shift`, and the low bits are dropped. The 1/B factor of a batch average is meant to
be folded into `lr_shift`.

## Source files

| file | contents |
|---|---|
| `rtl/gis_pkg.sv` | widths, `hbus_t` (valid, os, delta), `op_e` |
| `rtl/gis_pe.sv` | the configurable PE |
| `rtl/gis_array.sv` | the P x Q grid of PEs |
| `rtl/gis_skew.sv` | triangular staircase, forward or reversed |
| `rtl/gis_edge_feeder.sv` | turns one sample into an OS/WS pair; holds `delta` for the WS step |
| `rtl/gis_scheduler.sv` | LOAD / ISSUE / DRAIN / UPDATE sequencer |
| `rtl/gis_top.sv` | the engine: scheduler, feeder, staircases, array, north re-alignment |

The testbenches are in `tb/`: one per module (`tb_<module>.sv`), plus `tb_gis_top_full.sv`.
The two top-level benches share a stimulus and checker module, `tb_gis_top_driver.sv`. It
acts as a show-ahead memory and runs three operations:

1. train on W1, whose load shifts out the reset zeros;
2. train on W2, whose load shifts out the updated W1;
3. a shift that brings out the updated W2.

It compares every `grad_out` vector and every weight that leaves the array with integer
reference arithmetic. It also checks the P+Q result latency and the length of every
operation. It counts each mechanism and fails if one never happened: load, unload, OS
step, WS result, `delta` reuse, update and shift-only operation.

`tb_gis_layer_tiled.sv` runs whole layers that are larger than the array, in the way a host
would. It uses an 8 x 8 array and a batch of 4, with two layers:

* 16 x 16, which is 2 x 2 tiles;
* 20 outputs x 24 inputs, which is 3 x 3 tiles with zero-padded edge tiles.

For each layer it checks the summed `dE/da` and the updated weights. It also prints the
words that crossed the array edges: each `delta` word is read once per tile, and no
gradient words appear at all.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl rtl/gis_pkg.sv rtl/gis_pe.sv rtl/gis_array.sv \
  rtl/gis_skew.sv rtl/gis_edge_feeder.sv rtl/gis_scheduler.sv rtl/gis_top.sv \
  tb/tb_gis_top_driver.sv tb/tb_gis_top.sv --top-module tb_gis_top -Mdir obj_top
obj_top/Vtb_gis_top
```

Each bench prints `TB_RESULT checks=N failures=M`. Swap in `tb_gis_top_full.sv` and
`--top-module tb_gis_top_full` to run the default 128 x 128 array with a batch of 4. It
simulates in about a second, but Verilator's C++ build of 16,384 PEs takes around 12
minutes on a 4-core machine. The benches for the single blocks need only `gis_pkg.sv`,
the module and the modules it instantiates.

To change the array size, set `P` and `Q` on `gis_top`. All the timing above follows from
them. To change the number format, edit `gis_pkg`. The testbenches take `FRAC` from it.

## Where the design goes beyond the source, and what it leaves out

The following come from the description this design is based on:

* the two PE modes and their alternation on every cycle;
* the dataflow table above;
* the one-register hops in both directions;
* staggered west and south edges, and 0 entering at the south on WS steps;
* Q cycles to load P words per cycle;
* in-place accumulation of `G` and in-place update of `W`;
* the 128 x 128 default size.

These are this design's own choices:

* the tag bit that selects the mode, and OS before WS within a pair;
* the number format and SGD as the update rule;
* weights entering at the south edge and leaving at the north, reusing the vertical link
  as the shift chain;
* the re-aligning staircase at the north edge;
* the drain length;
* the request-based interface and the start/done handshake.

Not part of this RTL:

* **Layers larger than one tile.** A layer with `N_out` outputs and `N_in` inputs runs as
  `ceil(N_out/128) x ceil(N_in/128)` tile operations. The host must sequence them, and
  it must add the per-tile `grad_out` vectors of tiles that share a column range. A
  4096 x 4096 layer is 1024 tiles. The fully-connected layers of VGG16
  (25088→4096→4096→1000) take 7,552 tiles, and those of AlexNet
  (9216→4096→4096→1000) take 3,584. Each tile operation takes 384 + 2B cycles.
* **The forward pass** `z = W a`, and the element-wise steps `a = f(z)` and
  `delta(l-1) = dE/da(l-1) ⊙ f'(z)`. They are handled outside the engine, and no
  activation function is assumed.
* **The on-chip memories** that hold W, a and delta. Their organisation is not specified.
  `gis_top` exposes the request and data ports where they would connect.
* **Multi-layer scheduling across several tiles or arrays.** This is host software
  issuing operations.
