# A heterogeneous multi-core row-stationary DNN accelerator

No single array-based accelerator configuration has near-minimal energy-delay product for every
network. A network whose layers produce large partial-sum planes wants a big partial-sum buffer.
A network with many channels per layer wants a wide array and a large input buffer. This design
therefore puts two kinds of processing core on one chip and runs each network on the kind that
suits it:

| group | cores | PE array (rows x cols) | GB_psum | GB_ifmap | networks intended for it |
|---|---|---|---|---|---|
| A | 3 | 32 x 32 | 54 KB | 54 KB | AlexNet, DenseNet and ResNet families |
| B | 4 | 12 x 14 | 216 KB | 54 KB | VGG, MobileNet, NASNet, Xception, GoogLeNet |

Inception-v3 and Inception-ResNet-v2 are near-optimal on either kind. Inside a group, the layers of
one network can be cut into consecutive runs with one run per core. The cores then work as a
pipeline (model parallelism): each core writes its layer outputs to DRAM, and the next core reads
them from there. The cut points are computed off-chip with a branch-and-bound search over the
estimated latency of each layer. That search is not hardware and is not part of this RTL.

The published description of this chip is architectural. It gives the group and core counts, the
array and buffer sizes, the row-stationary dataflow, the per-core global buffer split by data
type, and the rule that a (sub-)array starts computing only once its last PE has its data.
Everything below the block level is this design's own choice: word widths, register-file depths,
command format, handshakes, arbitration and bus format. The choices are marked as such below and
in each file's header.

## Chip structure

```
              group A (hmc_top.g_a[0..2])                 group B (hmc_top.g_b[0..3])
  cmd ports -> array_core 32x32 x3                cmd ports -> array_core 12x14 x4
                 |  dram_req / dram_rsp                          |
              group_ctrl (3 ports)                            group_ctrl (4 ports)
                 |                                               |
           DRAM channel A (top ports)                      DRAM channel B (top ports)
```

* `hmc_top` instantiates the two groups and brings out each core's command port and each group's
  DRAM channel. DRAM is off-chip. The command sequencer (host) is not described, so the command
  ports are top-level inputs.
* `group_ctrl` shares a group's DRAM channel among its cores. It arbitrates round-robin, one word
  per grant, and holds the grant while the DRAM stalls. A FIFO of requester numbers sends each
  in-order read response back to the core that asked for it. The published description places
  this controller between the global buffers and DRAM but does not say how it works. The
  mechanism here is this design's.
* `array_core` contains a global buffer (`global_buffer`), a PE array (`pe_array`, which holds the
  bus decoder `noc_bus` and the PEs) and the dataflow controller.

## The row-stationary mapping

This is the part that takes most care to follow. One **pass** computes one or more 2-D
convolutions on the array. Each PE does one-dimensional work:

* a PE holds one **filter row** (kw weights) and one **ifmap row strip** (win elements);
* it computes `psum[e] = sum_k w[k] * x[e*s + k]` for `e = 0 .. eout-1`, where
  `eout = (win - kw)/s + 1`. This takes one MAC per cycle, so eout*kw cycles.

The array puts the 1-D pieces together:

* **Rows carry filter rows.** Every PE of an array row gets the same filter row, so the bus sends
  each filter row once and the whole row takes it.
* **Diagonals carry ifmap rows.** The PE in column c that holds filter row kr needs ifmap row
  `c*s + kr`. One ifmap row is therefore taken by every PE on its diagonal (multicast).
* **Columns add.** The psum rows of the PEs of one column are added bottom to top. The top PE of
  the column ends up with output row c of the convolution.

Two ways of filling the array come from the published study:

* **Channel stacking** (the array's "processing capacity"). If the array has more rows than the
  filter has, `nch` channels are stacked in one column, kh rows each. Their partial sums are
  added inside the array, so one pass covers nch input channels.
* **Bands** (sub-arrays). The rows can be split into `nband` bands of `kh*nch` rows. Each band is
  an independent convolution with its own filters, ifmaps and outputs. Each band starts as soon
  as its own data has arrived; it does not wait for the whole array. So the first band computes
  while the next one is still loading. This follows the published delivery-timing example, in
  which the upper half of a divided array finishes long before the lower half.

Row identities (band, channel group, filter row kr, top-of-band, chain) are computed in
`pe_array` from `kh`, `nch` and `nband` with running counters. The bus decoder compares each bus
word's tag with them:

| bus word | tag_a | tag_b | taken by |
|---|---|---|---|
| weight | array row r | - | all PEs of row r |
| ifmap | channel group g = band*nch + ch | row number i within the group | PEs with grp = g, kr + c*s = i, c < ncol |

### Timing of one pass (cycles, as built)

For each band in turn:

1. **Filter rows:** `kh*nch*kw` cycles, one weight per cycle from the weight partition.
2. **Ifmap rows:** `nch*nidx*win` cycles, where `nidx = kh + (ncol-1)*s` rows per channel.
3. **Start:** 3 cycles of bus and RF latency. Then the band's PEs start, and loading of the next
   band begins.

After the last band has started:

4. **Compute:** `eout*kw` MAC cycles.
5. **Column stream:** `eout` cycles, plus `kh*nch - 1` cycles of hop delay up the column.
6. **Drain:** `nband*ncol*eout` words go from the band tops into the psum partition. Each word
   takes 1 cycle, or 2 cycles when `acc=1` (read-modify-write).

The core testbench checks the total cycle count of each pass against this formula:

`1 + nband*(kh*nch*kw + nch*nidx*win + 3) + eout*kw + eout + kh*nch - 1 + 1 + nband*ncol*eout*(1+acc) + 1`

## The memory hierarchy and the commands

Each core moves data DRAM -> global buffer -> PE register files, and psums back the other way.
The core executes commands (`hmc_pkg::core_cmd_t`, valid/ready, with a `cmd_done` pulse):

| op | effect |
|---|---|
| `OP_LD_IFMAP`, `OP_LD_WEIGHT`, `OP_LD_PSUM` | copy `len` DRAM words from `dram_addr` to a partition at `gb_addr`; reads are pipelined |
| `OP_ST_PSUM` | copy `len` psum words to DRAM |
| `OP_RUN` | one pass (`hmc_pkg::pass_t`) |

Two psum mechanisms from the study are covered by these commands:

* **Accumulation across passes.** When a layer has more channels than one pass holds, a later
  pass with `acc=1` adds its outputs to the psums already in the buffer.
* **Spilling.** When the psum partition cannot hold a layer's partial sums, they are stored to
  DRAM with `OP_ST_PSUM`. They are later read back with `OP_LD_PSUM`, and the next pass
  accumulates onto them.

The core does not decide any of this on its own. The tiling of a layer into strips, channel
groups and passes, and the choice of when to spill, belong to the off-chip schedule, as in the
published work. Data layouts that the schedule must follow:

* **Weights:** row-major from `w_base` in (band, channel, kr, k) order.
* **Ifmaps:** from `i_base` in (band, channel, row i, element) order.
* **Outputs:** from `p_base` in (band, column, e) order.

With one band and one channel, the output layout is the ifmap layout of a following layer whose
`win` equals this `eout`. That is how one core's output becomes the next core's input without
reformatting.

## Sizes and word formats

| item | value | origin |
|---|---|---|
| ifmap / weight element | 16-bit signed | this design |
| partial sum | 32-bit signed, wraps | this design |
| PE register files | 12 weights, 16 ifmap, 16 psum words | this design |
| GB_ifmap, GB_psum | 54 KB; 54 KB (A) / 216 KB (B), 1 KB = 1024 bytes | published |
| GB weight partition | 4 KB (2048 words) | this design; the source only says "large enough" |
| DRAM word | 32 bits, one element per word | this design |

These sizes limit a single pass:

* kw <= 12, win <= 16, eout <= 16 and s <= 7;
* `kh*nch*nband` must fit in the array rows, and `ncol` in the array columns.

Wider layers are cut into strips by the schedule. The largest filters of the evaluated networks
fit (AlexNet 11x11, stride 4; 7x7 stems elsewhere). Pooling and other non-convolution layer types
have no hardware here. The description evaluates networks only on the convolution path.

## Files

* `rtl/hmc_pkg.sv`: word widths, limits, bus word, pass and command structs, DRAM request and
  response structs.
* `rtl/pe_rf.sv`, `rtl/mac.sv`, `rtl/pe.sv`: register file, MAC, processing element.
* `rtl/noc_bus.sv`, `rtl/pe_array.sv`: bus decoder and array.
* `rtl/global_buffer.sv`, `rtl/array_core.sv`: buffer and core with controller.
* `rtl/group_ctrl.sv`, `rtl/hmc_top.sv`: group controller and chip.
* `tb/tb_<module>.sv`: one self-checking testbench per module.
* `tb/dram_model.sv`: behavioural DRAM channel with random back-pressure and fixed read latency.
* `tb/tb_hmc_top.sv`: the whole chip at reduced array and buffer sizes.
* `tb/tb_hmc_top_full.sv`: the same test with every parameter at its default.
* `tb/tb_workloads.sv`: layer tiles from the evaluated networks on a full-size core of each
  type:
  * AlexNet conv1 (11x11, stride 4, third channel accumulated by a second pass);
  * a ResNet-50 3x3 layer with ten channels stacked;
  * a VGG16 3x3 layer;
  * a MobileNet depthwise 3x3 layer at stride 2, with one band per channel;
  * a MobileNet pointwise 1x1 layer with twelve channels stacked;
  * a fully-connected slice, mapped as 1x1 filters on rows one element wide. The 32 inputs
    are stacked as channels, and each column computes one neuron's dot product for its own
    sample.

Both chip tests run all seven cores at once. Core A0 computes a layer with channels stacked over
its rows. Core A1 takes that layer's output from DRAM and computes the next layer. Core A2 runs
two-band passes, accumulates a second pass, then spills its psums, reloads them and accumulates
a third pass. The four B cores run their own layers at the same time. Every result that reaches
DRAM is checked against a direct convolution. The test also counts that each mechanism occurred:
channel stacking, bands, accumulation, spill and reload, hand-over between cores, contention on
both DRAM channels, DRAM back-pressure, and runs on both core types.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and ends with `$finish`. Build one with
plain Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl -Itb rtl/hmc_pkg.sv tb/tb_array_core.sv \
          --top-module tb_array_core -o sim && ./obj_dir/sim
```

Replace the testbench name to run another. The full-size chip test (`tb_hmc_top_full`) builds
3744 PEs and about 0.9 MB of buffer arrays. Its Verilator build takes about 8 minutes on one
core, and it then runs in about 15 seconds. The reduced test (`tb_hmc_top`) builds in seconds.

To change the chip, set `hmc_top`'s parameters: core counts, array rows and columns, and
partition sizes in words. The per-PE limits and word widths are in `hmc_pkg`.

## Departures from the published description

* **Data delivery.** The published delivery-timing example puts one whole filter row or ifmap
  row on the shared bus per time step. Here the bus carries one element per cycle, so a row
  takes kw or win cycles. The order is the same: filter rows, then ifmap rows, band by band.
  The start rule is also the same: a band starts only when its last PE has its data.
* **Psum re-read.** The study charges psums that come back from the buffer or from DRAM as a
  re-read that is added to the array's new results. Here that addition is done by the
  controller as the outputs are written (`acc=1`). The alternative would inject the old psums
  at the bottom of each column.
* **Scheduling.** The layer-to-core split and the tiling of layers into passes are inputs (the
  command stream). They are not computed on chip.
* **Memory models.** Buffer sizes are those published. The memories themselves are register
  arrays rather than characterised SRAM macros. No energy or latency model of the memories is
  part of the RTL.

## How far to trust it

* **What the testbenches establish.** Every module has a self-checking testbench with results
  computed independently of the RTL. For every module, a deliberately broken copy is caught by
  its testbench. Both chip tests pass, and so do the layer tiles of `tb_workloads`, at full core
  sizes.
* **What follows the published description:** the chip organisation, group and core counts,
  array and buffer sizes, the row-stationary data placement, channel stacking, sub-array bands
  with per-band start, accumulation and spilling through the psum buffer, and layer hand-over
  between cores through DRAM.
* **What is invented here:**
  * the PE micro-sequencing (all MACs first, then a column stream);
  * the bus format and tag matching;
  * every handshake and the command format;
  * the arbitration policy;
  * widths and register-file depths.

  Another implementation of the same description could differ in any of these.
* **What is not hardware here:**
  * the search that picks the core configurations;
  * the branch-and-bound layer partitioner;
  * the energy and latency estimator;
  * DRAM, apart from the testbench model.
* **Known limits:**
  * one element per bus cycle and one DRAM word per element, so load phases are long compared
    with compute;
  * no pooling or activation hardware, since the published design describes none;
  * the psum arithmetic wraps at 32 bits, with no saturation.
