# CNN-MERP forward-propagation super layer in SystemVerilog

A convolutional layer reads every input feature-map element many times: once
for every output map, and once for every window position that covers it. If
those reads go to DRAM, the memory interface — not the arithmetic — sets the
speed. CNN-MERP is a memory-efficient CNN processor for FPGAs. It arranges
on-chip storage and the order of computation so that each input element and
each output element crosses the chip boundary exactly once. Convolution,
ReLU activation and average pooling of a layer run together as one
"super layer", so intermediate maps never leave the chip. All arithmetic is
32-bit floating point, because the processor is meant for training as well
as inference.

This RTL implements the forward-propagation super layer, the configuration the
CNN-MERP paper presents as its main one. Its default sizes are the paper's
mapping of AlexNet's second layer:

| parameter | default | meaning |
|---|---|---|
| `K` | 5 | kernel size (K x K) |
| `NCU` | 16 | computational units |
| `MAX_N` | 48 | input feature maps supported |
| `MAX_M` | 128 | output feature maps supported |
| `IN_H`, `IN_W` | 31 | input map size, i.e. 27 x 27 plus a zero border of 2 |
| `R` | 2 | parallel ReLU / pooling lanes |
| `P` | 2 | pooling window (P x P, non-overlapping) |
| `MIN_DWELL` | 2 | minimum cycles a window is held (see below) |

## The four reuse mechanisms

1. **Kernels stay on chip.** Each computational unit (CU) has a kernel SRAM
   that holds every kernel the CU will use in the layer: 384 kernels of 25
   words per CU, 614.4 KB in total. Kernels are loaded before a batch, so only
   feature maps travel to and from DRAM.
2. **One window serves all output maps.** A K x K window of input map *i*
   at position (r0, c0) is loaded once into a window register. It is then
   shared by all NCU CUs for G = ceil(m/NCU) consecutive cycles. In cycle j,
   CU number *cu* applies the kernel of output map o = j·NCU + cu.
3. **Partial sums stay on chip.** The controller next moves to the same
   position in input map i+1, and then i+2, up to the last map. Each CU's
   accumulators add up the partial results. Only the finished output of a
   position leaves the accumulators.
4. **Rows stay on chip.** The input memory keeps K rows of every input map.
   The window moves left to right and then down. After the first K−1 rows,
   each new position needs only one new element per map.

So a position takes n·G cycles: 48 · 8 = 384 cycles at the defaults. In that
time the CUs produce 128 finished outputs, and 48 new input elements arrive
(one per map).

## Block diagram

```
 in_valid/in_data ──► input_mem ──win[K*K]──► cu[0..NCU-1] ──► acc_bank[0..NCU-1]
 (row, col, map)     (K*K banks,              ▲  (K*K mul,        (sum over
                      rotation)               │   K*K-1 add)       input maps)
                                         kernel_sram[cu]                │
                     conv_ctrl ──positions, maps, groups────────────────┤
                     (n_act, m_act)                                     ▼
                                                                   po_buffer
                                                                  (m outputs,
                                                                   R per cycle)
                                                                        ▼
                                                         act_pool: R x (relu → pool_unit)
                                                                        ▼
                                                           act_* and pool_* streams
```

The DRAM, its controller, the soft processor and the configuration logic of
the FPGA lie outside this RTL. The top-level ports are where they connect.

## Input memory hierarchy (`input_mem`)

This is the part that is hardest to follow. Element (r, c) of map i is
written into bank (r mod K, c mod K), at address i·CB + c div K, where
CB = ceil(IN_W/K). Any K x K window covers each residue pair exactly once. So
all K·K elements of a window sit in different banks and can be read in one
cycle, one element per bank.

Because the banks are indexed by absolute coordinates, the bank outputs for
window (r0, c0) come out rotated. Window element (u, v) is in bank
((u + r0) mod K, (v + c0) mod K). The read address of bank column b is
i·CB + c0 div K, plus 1 when b < c0 mod K. The controller keeps r0 mod K,
c0 mod K and c0 div K as counters, so no division happens at run time.

A new element (r, c) overwrites (r − K, c) of the same map. The write port
(the "bank router") accepts it only when one of these holds:

* r < K, or
* the reader has passed window position (r − K, min(c, OW − 1)).

A read of window (r0, c0) for map i is allowed (`win_avail`) once element
(r0 + K − 1, c0 + K − 1, i) has been written. The last element of the stream
is needed by the last window, so the two sides cannot deadlock. The writer
runs up to about K rows ahead of the reader.

The input stream order is: row, then column, then map, with the map index
changing fastest. Only maps 0..n_act−1 are sent.

## Controller and logic-based reconfiguration (`conv_ctrl`)

The loop nest is: position (raster order), then input map i < n_act, then
output group j < dwell. `n_act` and `m_act` are run-time registers, sampled
at `start`. A layer with fewer maps than the hardware supports therefore runs
only the cycles it needs. The paper gives an example for a 48-CU layer-3 build
that also runs layers 4 and 5: per-layer CU use of 100%, 100% and 88.9%,
where padding invalid maps with zeros would give 100%, 37.5% and 25%.

`dwell = max(G, MIN_DWELL)`. When G = 1, the next partial result for the same
accumulator would arrive one cycle later, while the adder's sum is still in
flight. Holding each window at least two cycles, plus forwarding in the
accumulator, keeps the sums correct. This padding is a choice of this design.

There are two stall causes, each available as a top-level status output:

* `stall_in`: the window is not yet in the input memory. This happens while
  the first K−1 rows load, and when the input stream falls behind.
* `stall_out`: the last input map of a position is about to start, but the
  parallel-out buffer still holds the previous position. The buffer is
  claimed when the last map starts and freed after its last beat. With the
  defaults this never triggers: 384 cycles per position against 64 drain
  beats. It does trigger when n·G is small.

## Arithmetic

* `fp_mul`, `fp_add` are IEEE-754 single-precision units with two pipeline
  stages each, as in the paper. They round to nearest-even. Subnormal inputs
  and results are flushed to zero, and overflow gives infinity. An exact
  cancellation in `fp_add` gives +0.
* `cu` multiplies the K·K pairs in parallel and reduces them in a tree of
  K·K − 1 adders. Neighbours are paired at each level (0+1, 2+3, ...). An odd
  operand waits two cycles and joins the next level. Latency is
  2 + 2·ceil(log2 K²) cycles: 12 for K = 5.
* `acc_bank` is one adder per CU plus MG = 8 registers, one per output group
  the CU serves. It starts from zero on map 0 and emits the sum on the last
  map. The total is 128 x 32 bits of accumulators, as in the paper.
* Floating-point addition is not associative, so results depend on the
  order of summation. The order here is: tree order inside a window, then
  input maps in increasing order. The testbenches reproduce this order
  exactly and compare results bit for bit.

## Activation and pooling (`po_buffer`, `act_pool`, `relu`, `pool_unit`)

When the last map of a position finishes, the accumulators write their sums
into the parallel-out buffer, one group of NCU outputs per cycle. The buffer
then drains R maps per cycle: beat b carries maps b·R .. b·R+R−1. Lane g
always receives maps ≡ g (mod R), so each pooling unit serves a fixed set of
ceil(MAX_M/R) = 64 maps.

A pooling unit keeps one running sum per (map, pooled column) in its pooling
cache. Each activated element is added to its entry. At the last element of
its P x P window, the sum is scaled by 1/(P·P) and sent out, and zero is
written back. That leaves the entry ready for the window below, as the
paper's figure of the pooling unit shows. Elements beyond the last whole
window are dropped: with 27 x 27 outputs and P = 2, the result is 13 x 13.

`act_*` carries every ReLU output. `pool_*` carries pooled outputs when
`pool_en` was set at `start`. Layers without pooling, such as AlexNet layers
3 and 4, use `act_*` only.

## Interface and timing of `cnn_merp`

1. Load kernels: pulse `ker_we` with `ker_cu` = o mod NCU,
   `ker_addr` = i·MG + o div NCU (MG = ceil(MAX_M/NCU) = 8), `ker_elem` = u·K + v
   and `ker_data`. The write port is independent of the layer logic.
2. Apply `n_act`, `m_act` and `pool_en`, and pulse `start` while `busy` is
   low.
3. Stream the input maps on `in_valid`/`in_ready`/`in_data` in row, column,
   map order. `in_ready` is held low in the cycle after `start`; begin the
   stream after that cycle.
4. Collect `act_*` and `pool_*`. They have no back-pressure. Output map
   number = `*_beat`·R + lane. `act_r`/`act_c` give the conv position, and
   `pool_r`/`pool_c` the pooled position.
5. `done` pulses once the last pooled output has left. `busy` then falls.

At the defaults, one layer takes 286,166 cycles from `start` to `done` with a
full-rate input stream. The ideal is 279,936 (729 positions x 384); the
difference is the fill of the first four rows.
A batch of 128 images therefore takes 36.6 million cycles: 0.7 s at a clock of
about 52 MHz. The DRAM traffic per image is one pass over the inputs
(48 x 31 x 31 words) and one over the outputs, as the four reuse mechanisms
intend.

## Where this RTL departs from, or goes beyond, the paper

* **Pooling size.** The paper's layer table prints a 3 x 3 pooling kernel but
  a 13 x 13 output from 27 x 27. Its text describes averaging of p x p
  neighbours, copied back to p x p outputs in the backward pass. This RTL
  uses non-overlapping P = 2, which gives the printed 13 x 13. Overlapping
  3 x 3 pooling with stride 2 is not implemented.
* **Padding and stride.** Stride 1 only, as in AlexNet layers 2–5. The input
  stream must already contain the zero border; the paper does not say where
  padding happens.
* **Backward propagation and kernel update.** The paper runs these as
  separate FPGA bitstreams but does not describe their datapaths. They are
  not implemented.
* **Reconfiguration between kernel sizes.** The paper loads a new bitstream
  (multiboot) when the kernel size changes. Here that corresponds to
  elaborating the design with a different `K` and sizes.
* **Own choices.** The following are not in the paper: the number format
  details, the tree pairing order, all handshakes, the claim/busy protocol
  of the parallel-out buffer, `MIN_DWELL`, the two output streams with
  `pool_en`, and the address layouts.

## Verification

Every module has a self-checking testbench in `tb/`. Each ends with
`TB_RESULT checks=N failures=F` and has a cycle watchdog. Floating-point
references come from `tb/tb_fp_pkg.sv`, which computes in double precision
and rounds to single. Since double has more than twice the precision of
single, this gives the correctly rounded result.

| testbench | what it covers |
|---|---|
| `tb_fp_mul`, `tb_fp_add` | 17k random operations each, special cases, 2-cycle latency |
| `tb_cu` | K = 5 dot products against the same tree order, 12-cycle latency |
| `tb_kernel_sram` | full 384 x 25 fill, reads, hold behaviour |
| `tb_acc_bank` | sums over maps, group counts below and above the adder latency |
| `tb_input_mem` | every window of two layers against the reference maps, with overwrite protection and availability both exercised |
| `tb_conv_ctrl` | exact loop order, flags, residues, cycle counts, both stalls |
| `tb_po_buffer`, `tb_relu`, `tb_pool_unit`, `tb_act_pool` | buffering, lanes, averages, `pool_en` |
| `tb_cnn_merp` | reduced size (K = 3, 2 CUs, 3→5 maps, 7 x 7): three layers back to back; counts each mechanism (input stall, output-buffer stall, reduced map counts, group padding, pooling off) |
| `tb_alexnet_l345` | AlexNet layers 3, 4, 5 in one build, switched only through `n_act`/`m_act`: real 3 x 3 / 13 x 13 geometry, map and CU counts divided by 16 (3 CUs; 16→24, 12→12, 12→8 maps); checks the 100%, 100%, 88.9% CU use through the cycle count |
| `tb_cnn_merp_full` | all defaults, one full AlexNet layer-2 pass (48→128 maps), every output checked bit for bit |

To run one with plain Verilator (the package is listed first and only once):

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/cnn_merp_pkg.sv tb/tb_fp_pkg.sv $(ls rtl/*.sv | grep -v _pkg) \
  tb/tb_cnn_merp.sv --top-module tb_cnn_merp -o sim && obj_dir/sim
```

This builds without warnings. The full-size test (`tb_cnn_merp_full`) takes
about three minutes to compile and 16 seconds to run.
