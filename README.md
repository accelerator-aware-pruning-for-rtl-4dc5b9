# A sparse CNN accelerator built around balanced, group-wise pruning

A pruned convolutional network has most of its weights set to zero. An
accelerator can skip those multiplications, but only if it can find, for
every remaining weight, the activation that weight multiplies. When pruning
is unconstrained, the non-zero weights fall anywhere. Then three things go
wrong:

* Each multiplier must be able to pick its activation from a very wide
  window of fetched activations, which takes wide multiplexers.
* Some weights have no partner in the current fetch, so padding zeros must
  be inserted.
* Processing elements (PEs) that get more non-zeros than others hold the
  rest up.

*Accelerator-aware pruning* (H.-J. Kang, "Accelerator-Aware Pruning for
Convolutional Neural Networks") removes the cause in training. The
activations that are fetched together are split into small **pruning
groups**. Pruning then leaves **exactly the same number of non-zero weights
in every pruning group**. This RTL is the accelerator that this constraint
allows. It is a sparse, channel-axis PE array in the style of Cambricon-X,
reduced as the paper proposes:

| symbol | meaning | default |
|---|---|---|
| `NPAR`   | activations fetched per cycle: one pixel, 64 consecutive input channels | 64 |
| `NGROUP` | activations per pruning group | 16 |
| `NMUL`   | multipliers per PE | 16 |
| `NPE`    | PEs, one output filter each | 16 |
| data     | signed fixed point, activations and weights | 16 bit |

With `NGROUP`=16 and 12 of every 16 weights pruned (75 %), each 64-channel
fetch carries exactly 4 non-zeros in each of its 4 pruning groups: 16 in
all, one per multiplier. The results are:

* **Narrow multiplexers.** A multiplier only ever needs an activation from
  its own pruning group, so it needs a 16-to-1 multiplexer, not a 64-to-1 or
  256-to-1 one.
* **Small indices.** A weight's index is its position inside its group, 4
  bits wide ("direct indexing"). Indices are not run lengths, so no filler
  zeros are needed.
* **Lockstep PEs.** Every fetch takes the same number of cycles in every
  PE, so all PEs share one weight-buffer address, never wait for each other,
  and need no padding zeros.

## Datapath

```
            host writes                               host reads
                |                                          ^
   +--------+   v    64 x 16 b / cycle                     |
   |  NBin  |-------------------------+              +-----------+
   +--------+                         |              |   NBout   |<-- 16 results,
                                      v              +-----------+    one slice
   +--------+  per PE: 16 x          +----+                          of a row
   |   SB   |  (weight, 4-b index)   | IM |  16 PEs x 16 lanes of
   | 16 banks|---------+------------>|    |  16-to-1 multiplexers
   +--------+          |  indices    +----+
                       |                | selected activations
                       | weights        v
                       |     +---------------------------+
                       +---->| PE 0..15: 16 multipliers, |-- quantise --> NBout
                             | adder tree, accumulator   |   (>>> shift,
                             +---------------------------+    saturate 16 b)
          controller: loop nest, addresses, first/last flags
```

* `nbin`: the input activation buffer. A 64 x 16-bit row holds one
  fetching group. One row is read per cycle and broadcast to all PEs.
* `sb`: the weight buffer. It has one bank per PE, and every row is read at
  the same address in all banks.
* `im`: the indexing module. For every PE and lane it has one `NGROUP`-to-1
  multiplexer, steered by that lane's index.
* `pe`: 16 multipliers, a registered adder tree (`adder_tree`) and an
  accumulator.
* `nbout`: the output buffer. It has the same 64 x 16-bit row width as NBin.
  The 16 results of one output position and one block of 16 filters go into
  one of the 4 slices of a row.
* `controller`: sequences one convolution layer.
* `aap_accel`: the top. It also carries the output shift and saturation, and
  the pipeline that delays the NBout address.
* `aap_pkg`: the default sizes, the layer descriptor `layer_cfg_t` and the
  quantisation function.

## The weight format: how pruning groups map onto lanes

This is the one part of the design that the software which prepares weights
must get exactly right.

Take the 64 activations of a fetch. With G = NPAR/NGROUP = 4 pruning groups,
activations 0-15 form group 0, 16-31 group 1, and so on. Lane `l` of every PE
is hard-wired to pruning group `l / (NMUL/G)`. With the defaults, lanes 0-3
serve group 0, lanes 4-7 group 1, lanes 8-11 group 2 and lanes 12-15 group 3.
Each lane can only reach the 16 activations of its own group.

An SB row of a PE has 16 entries `{weight[15:0], index[3:0]}`. Lane `l` holds
one non-zero weight of its group, and `index` is that weight's channel
offset inside the group (0-15). Suppose each pruning group keeps `nnz`
non-zeros. The fetch then needs `R = ceil(nnz*G / NMUL)` SB rows, and the
controller spends `R` cycles on it, rereading the same NBin row. In row `r`,
lane `l` carries the non-zero numbered `r*(NMUL/G) + l mod (NMUL/G)` of its
group, counting them in any fixed order. Lanes with nothing left to carry
hold weight 0, and their index does not matter:

| pruning ratio | nnz per group (of 16) | R (cycles per fetch) | padding lanes per row |
|---|---|---|---|
| 87.5 % | 2  | 1 | 8 |
| 75 %   | 4  | 1 | 0 |
| 50 %   | 8  | 2 | 0 |
| 0 % (dense) | 16 | 4 | 0 |

The 75 % point fills the multipliers exactly, which is the case the
hardware is sized for. A layer whose channel count is not a multiple of 64 is
padded with zero weights in the same way; a 48-channel layer, for example,
leaves group 3 empty.

## Running a layer

A layer is a K x K convolution with stride S. Its input has `in_w` columns
and `cch` x 64 channels. It produces `out_h` x `out_w` positions, for
`mblocks` blocks of 16 filters. The PE with number `p` computes filter
`b*16 + p` of block `b`. The host lays out the buffers as follows:

* **NBin row** `((h*in_w + w)*cch + chunk)` holds channels `chunk*64 ...
  chunk*64+63` of pixel (h, w).
* **SB row** `(((b*K + i)*K + j)*cch + chunk)*R + r` of bank `p` holds row
  `r` of the non-zeros of filter `b*16+p` at kernel position (i, j) and that
  channel chunk. The same SB contents serve every output position.
* **NBout** `row = (y*out_w + x)*ceil(mblocks/4) + b/4`, `slice = b mod 4`.
  Element `slice*16 + p` of the row is output channel `b*16+p` at (y, x).

The host then sets `cfg` (`layer_cfg_t` in `aap_pkg`) and pulses `start` for
one cycle while `busy` is low, and waits for the one-cycle `done` pulse.
Buffers must not be written while `busy` is high; an assertion checks this.
Each output is `saturate16(acc >>> out_shift)`.

The controller loops, from innermost outward, over: SB row `r`, channel
chunk, kernel column `j`, kernel row `i`, filter block `b`, output column
`x`, output row `y`. Every step is one issue, a cycle that reads one NBin row
and one SB row in all banks. The first issue of an output restarts the
accumulators, and the last one triggers the NBout write.

### Timing

* A fetch takes `R` cycles. In the 75 % case that is one fetching group per
  cycle at 256 useful multiplications per cycle.
* A layer takes exactly `N + PIPE_LAT + 2` cycles, counted from the edge that
  samples `start` to the first edge at which `done` is seen high. Here
  `N = out_h*out_w*mblocks*K*K*cch*R` and `PIPE_LAT` = 4.
* The pipeline has four stages: buffer read; IM and multipliers into product
  registers; adder tree into a sum register; accumulator. The 16 results of
  an output are written 4 cycles after its last issue.
* All PEs finish in the same cycle; an assertion checks this.

## Parameters and sizes

The top `aap_accel` takes `NPE`, `NPAR`, `NGROUP`, `NMUL` and the three
buffer depths. The other sizes the paper synthesises (`NPAR/NGROUP/NMUL` =
64/8/16, 64/32/16, 128/16/16, 64/16/8) are legal settings, because the only
structural rule is that `NMUL` is a multiple of `NPAR/NGROUP`. An
elaboration-time `$error` enforces that rule. `NGROUP` is meant to be a power
of two.

The buffer capacities are not taken from the paper and are this design's
own:

* NBin and NBout: 64 rows each, 8 KB.
* SB: 128 rows per PE. That is enough for one block of 16 filters of a 3x3
  layer with 512 input channels at 75 % pruning, which needs 72 rows.
* Accumulator: 48 bits.

## What follows the published design and what does not

**Taken from the paper:**

* The datapath structure: the activation buffer, the weight buffer of
  non-zero weights with direct indices, an IM of `NGROUP`-to-1 multiplexers,
  and PEs of `NMUL` multipliers with an adder tree and accumulator.
* The rule of `ceil(non-zeros / NMUL)` cycles per fetching group.
* The default sizes.
* The lane-to-group wiring, generalised from the paper's eight-activation,
  two-multiplier drawing.

**This design's own.** The paper does not describe these:

* the controller and its loop order;
* the buffer depths, port arrangement and buffer layouts;
* the shared SB address;
* the pipeline registers;
* the output shift and saturation;
* the host interface, which stands in for a DMA engine and control
  processor.

**Not included:**

* Bias, ReLU and pooling.
* Accumulation of partial sums across several passes. A block of 16
  filters must fit SB, and a layer with 9216 inputs such as AlexNet's first
  fully connected layer does not.
* Tiling of large inputs. NBin holds 64 pixel-chunks, so the host reloads it
  per output tile.
* The filter-axis (MWSA) and spatial-axis variants. They need a different
  PE.

## Simulation

Every module has a self-checking testbench in `tb/`, named `tb_<module>.sv`.
Each prints `TB_RESULT checks=N failures=M` and has a watchdog.

* `tb_aap_accel` runs the full-size top on four random layers, each checked
  against a dense reference convolution:
  * 75 %, 50 %, 87.5 % and 0 % pruning;
  * 1x1, 2x2 and 3x3 kernels;
  * stride 2;
  * two channel chunks;
  * four output slices;
  * saturation.

  It also checks the exact cycle count of every layer.
* `tb_aap_variants` runs the same kind of layers through four other sizes
  of the top in parallel (`NPAR/NGROUP/NMUL` = 64/8/16, 64/32/16,
  128/16/16, 64/16/8). Each size has its own `aap_harness`.
* `tb_cnn_tiles` runs real layer shapes at the default sizes, 75 % pruned:
  one tile of each AlexNet convolution layer conv2 to conv5, and one of a
  ResNet-50 1x1 layer with 2048 input channels. Each tile has its layer's
  kernel size and channel count, with as many blocks of 16 filters as SB
  holds. The testbench prints the multiplier utilisation of each tile.
  conv2's 48 channels leave one pruning group of every fetch empty, which
  gives 73 %. The other layers reach 95-98 %; the remainder is the pipeline
  fill.
* `tb_controller` compares the issue sequence with a reference loop nest.
* The unit testbenches check the buffers, the IM selection and the PE
  arithmetic and latency.

To build and run one with plain Verilator:

```
verilator --binary --timing --assert -Irtl -y rtl --top-module tb_aap_accel \
    rtl/aap_pkg.sv tb/tb_aap_accel.sv
./obj_dir/Vtb_aap_accel
```

Replace `tb_aap_accel` with any other testbench name. The full-size
end-to-end test takes well under a minute to build and a fraction of a
second to run.
