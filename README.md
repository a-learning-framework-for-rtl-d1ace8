# A shift-based convolution coprocessor for n-bit power-of-two weight networks

When every weight of a convolutional network is either zero or a signed power of two,
multiplying an activation by a weight needs no multiplier: the product is the activation
shifted and perhaps negated. On an FPGA this matters because multipliers live in the
scarce DSP slices, while shifters and adders are built from the far more plentiful LUTs.
If the multipliers go, the number of convolvers that fit on a device is set by LUTs rather
than DSPs. This RTL builds a convolution coprocessor on that principle, for "n-BQ-NN"
networks: 16-bit activations and n-bit weights taken from

    { +-2^0, +-2^-1, ..., +-2^-(r-1), 0 },   r = 2^(n-1) - 1      (n = 1: only +-1)

The default build uses n = 3, so a weight is one of {+-1, +-1/2, 0}. It has 32 x 8 convolvers
of size 3 x 3 working in parallel. Each convolver is a shift vector processing element (SVPE)
array: a k x k grid of shift-and-add cells in place of multiply-accumulate units.

The only adders that a synthesis tool would normally put in DSP slices are the k adders at
the right edge of each array. That makes k * Pn * Pm = 3 * 8 * 32 = 768 DSP adders for the
whole default build, against (k^2 + k) * Pn * Pm for a conventional MAC array of the same
parallelism.

## Default build at a glance

| quantity | value | note |
|---|---|---|
| weight bits `NBIT` | 3 | 1 to 5 supported |
| activations, data buses | 16-bit signed | |
| kernel `K` | 3 | 11 gives the universal 3/5/11 array |
| clusters `PM` (input channels in parallel) | 32 | |
| arrays per cluster `PN` (output channels in parallel) | 8 | |
| shift-add cells | 32 x 8 x 9 = 2304 | |
| largest feature map `MAX_W x MAX_H` | 32 x 32 | 34 x 34 with padding |
| accumulator `ACC_W` | 32 bits for n = 3 | `16 + FRAC + 14` |
| throughput | one padded pixel position per clock | covers all PM x PN channel pairs |

## Weight code and fixed point

A weight is packed into n bits as `{sign, magnitude}`:

- The magnitude field has n-1 bits. Magnitude 0 means the weight is zero.
- Magnitude m >= 1 means 2^-(m-1).
- For n = 1 the single bit is the sign of a +-1 weight: 0 means +1, 1 means -1.

Multiplying by 2^-i is a right shift, and a right shift would throw away low bits on every
product. Instead, every product is scaled by 2^FRAC, with FRAC = r - 1, and formed with a
*left* shift only:

    prod = +-( x << (FRAC - (m-1)) )      (svpe_shift)

FRAC is 0 for n <= 2, 2 for n = 3, 6 for n = 4 and 14 for n = 5. As a result:

- All partial sums are exact integers.
- The 2^FRAC scale is removed once, when a final result leaves the chip. The load/store unit
  does an arithmetic right shift by FRAC, which rounds toward minus infinity, then saturates
  to 16 bits.
- The accumulator has 14 guard bits above 16 + FRAC. That is enough for 16384 full-scale
  products, far more than k*k*M for any layer that fits in the memories.

A change of the weight code is local to `svpe_shift` and `nbq_pkg::frac_bits`.

## The SVPE array

```
 image row 1 (oldest) -> [<< +]-[<< +]-[<< +]--> (+)  register
 image row 2          -> [<< +]-[<< +]-[<< +]--> (+)  register
 image row k (newest) -> [<< +]-[<< +]-[<< +]--> (+) --> window sum
                          w11    w12    w13       k chained adders
```

Each row of the array is a weight-stationary systolic 1D convolver:

- The row's pixel is broadcast to all k cells.
- Cell j shifts the pixel by weight w(r,j), adds the registered partial sum of cell j-1, and
  registers the result (`svpe_pe`).
- A pixel stream x[c] therefore leaves sum_j w(r,j) x[c-k+1+j] in the last cell after the pixel
  of column c has arrived.

The right-hand column of k adders sums the k row results into the window sum. Its result is
registered once.

An array sees a whole column of the window at once, from the line buffer (`svpe_line_buffer`).
That buffer keeps k-1 image rows of one channel, addressed by column. For every incoming pixel
it presents the k vertically aligned pixels, oldest row first, plus a `win_ok` flag that is set
once the window is complete. Window sums for windows that wrap around the frame edge are
computed but not flagged as valid.

Latency, pixel in to window sum out:

- Line buffer: 1 cycle.
- Array: 2 cycles (PE register, then adder column register).
- Total 3 cycles (`LB_LAT + ARR_LAT` in `nbq_pkg`).

**Weight banks.** Each array keeps its k*k weight codes in two banks (`svpe_weight_buf`).
Writes always go to the idle bank, and `w_bank` selects the active one. New weights for the
next job can therefore be loaded while the current job is still streaming.

**Universal array.** Build with `K = 11` and every array becomes the universal array for
kernels of 3, 5 and 11. The run-time `ksize` input does three things:

- It taps each row after column `ksize`.
- It sums only the first `ksize` rows.
- It feeds those rows from the newest `ksize` rows of the line buffer, so that no output rows
  are lost.

The weights of a smaller kernel sit in the corner w(1..ksize, 1..ksize). Any ksize from 1 to K
works, but 3, 5 and 11 are the intended ones.

## Clusters and the cluster interface

The channel mapping is as follows:

- A cluster (`svpe_cluster`) handles one input channel. It holds that channel's line buffer
  and PN arrays, one per output channel of the current group.
- Each cluster's adders add its PN window sums to the PN partial sums from the previous
  cluster.
- The cluster interface (`svpe_cluster_if`) chains PM clusters this way, so the last cluster
  outputs, for each of PN output channels, the convolution summed over PM input channels.

The interface has three buses:

- **DATA IN**: PM pixels per cycle, one per cluster, plus the row and column in the padded
  frame.
- **CTRL**: kernel size, the active bank, and the weight write port (cluster, array, codes).
- **DATA OUT**: the PN sums and their output coordinates, delayed by 3 cycles to line up with
  the data.

One pixel per cycle on every lane means an H x W layer with M input and N output channels
takes (H x W) x ceil(M/PM) x ceil(N/PN) cycles, apart from the padding border and command
overhead.

**Timing caveat.** The cascade is combinational through all PM clusters: 32 adders of 32 bits
in the default build. Every cluster sees the same pixel timing, which keeps the control trivial
and the behaviour easy to check. A build aiming at 200 MHz on a real FPGA would register the
cascade every few clusters and skew the pixel lanes to match. No timing closure has been done
on this RTL.

## One command, end to end

The processor sets the layer shape, then writes a command word to CTRL. The fetch unit
(`fetch_unit`) runs up to two engines at the same time:

- **Weight loader** (`wload_en`). Reads the PM*PN words of the weight memory and writes each
  into the idle bank of one array. Word m*PN+n goes to cluster m, array n.
- **Pixel streamer** (`stream_en`).
  - Walks the padded frame in raster order, one position per cycle.
  - Reads one image-memory word per position: PM lanes of 16 bits, lane m being input channel
    m, word y*W+x.
  - With `pad_en`, the border of (ksize-1)/2 pixels is generated as zeros without a memory
    read.

When both engines are done, the unit waits 16 cycles (`DRAIN`) for the pipeline to empty. It
then flips the weight bank if weights were loaded and pulses `done`. Loaded weights therefore
take effect from the *next* command. That gives two ways to run a job:

1. A weight-only command first, then a streaming command. Loads and computation strictly
   alternate.
2. Every streaming command loads the weights of the next one. The load then hides under the
   computation.

The load/store unit (`load_store_unit`) receives the PN window sums at every valid output
position and handles them in three steps:

1. **Accumulate.** Unless `first_pass` is set, it reads the partial sums of that position from
   the partial-sum memory and adds them. Then it writes the new sums back.
2. **Requantise.** On `last_pass` it also applies the FRAC shift and the 16-bit saturation
   described above.
3. **Store.** It writes the PN results to the output memory:
   - without pooling, at word orow*Wo+ocol;
   - with `pool_en`, through the 2x2/2 max-pooling unit (`pool_unit`) at word
     prow*(Wo/2)+pcol.

Consecutive positions always have different addresses, so the read-add-write needs no bypass.
`sat_flag` pulses whenever a value saturated.

Command length, which the CYCLES register reports:

| command | cycles |
|---|---|
| streams a frame | (H+2p)(W+2p) + 18 |
| loads weights only | PM*PN + 18 |

### Running a layer with M input and N output channels

For each group of PN output channels:

1. Load the group's weights, either with a weight-only command or overlapped with the previous
   command.
2. For each group of PM input channels:
   1. Write the PM input maps into the image memory.
   2. Stream. Set `first_pass` on the first channel group and `last_pass` on the last, plus
      `pool_en` if a pooling layer follows.
3. Read back the PN output maps.

Channels beyond M in the last group are simply zero lanes.

## Register map (AXI4-Lite, 32-bit data)

| offset | name | contents |
|---|---|---|
| 0x00 | CTRL | write: [0] start, [1] stream_en, [2] wload_en, [3] first_pass, [4] last_pass, [5] pool_en, [6] pad_en |
| 0x04 | STATUS | [0] busy, [1] done (sticky, cleared by the next start), [2] active weight bank |
| 0x08 | IMG_W | unpadded image width |
| 0x0C | IMG_H | unpadded image height |
| 0x10 | KSIZE | kernel size (3; 3, 5 or 11 in a K = 11 build) |
| 0x14 | CYCLES | length of the last command in clock cycles |

The memories are written and read directly through the top's host ports:

- `img_*` and `wt_*` are write ports.
- `out_raddr`/`out_rdata` is a read port with one cycle of latency.

These ports stand where a DMA from the processor's high-performance AXI port would connect.
`irq_done` pulses at the end of every command.

## Files

| module | role |
|---|---|
| `nbq_pkg` | widths, latencies, command struct, register offsets, `frac_bits`/`acc_bits` |
| `svpe_shift` | the multiplier replacement |
| `svpe_pe` | one shift-add cell |
| `svpe_weight_buf` | two-bank weight store of one array |
| `svpe_line_buffer` | k image-row FIFOs of one channel |
| `svpe_array` | k x k convolver, universal for K > 3 |
| `svpe_cluster` | line buffer + PN arrays + cascade adders |
| `svpe_cluster_if` | PM chained clusters, DATA IN / CTRL / DATA OUT |
| `pool_unit` | 2x2/2 max pooling on a raster stream |
| `fetch_unit` | weight loader, pixel streamer with padding, command sequencing |
| `load_store_unit` | partial-sum accumulation, requantisation, output store |
| `reg_if` | AXI4-Lite register file, command pulse, cycle counter |
| `bram_dp` | simple dual-port RAM with synchronous read |
| `nbq_accel_top` | the coprocessor |

## Where this design departs from, or adds to, the published architecture

- **Left shifts only.** The source describes a multiplication by 2^-i as "<<i" and also says
  that all shifts are left shifts. This design keeps the left-shift-only datapath by carrying
  a 2^FRAC scale, as described above.
- **Pooling placement.** The original block diagram draws a pooling block inside every
  cluster. A pooling unit can only act on complete sums, so here there is one pooling unit, on
  the store path after the last accumulation pass. It does max pooling; the source does not
  say which kind.
- **Padding, requantisation, accumulation.** These follow from the network (32x32 maps kept
  through 3x3 convolutions), but the source gives no hardware for them. The padding generator,
  the floor-and-saturate requantisation and the partial-sum read-add-write are this design's.
- **Channel mapping.** The mapping of a cluster to an input channel and of an array to an
  output channel, the shared line buffer per cluster, and the cascade between clusters are this
  design's reading of the architecture.
- **Bank use.** The two weight banks, loads into the idle bank and the swap at the end of a
  command are this design's interpretation of the double buffer drawn in the array.
- **Not built.** Batch normalisation, the activation function, average and global pooling,
  softmax, shortcut additions and fully connected layers. These belong to the processor or to
  a later stage.
- **Strides.** Only stride 1 is supported.
- **System around the coprocessor.** The ARM processing system, DDR, the AXI interconnect and
  the DMA masters are not part of this RTL.

## What runs on it

In the default build:

- The whole convolution part of the 3-bit CIFAR/SVHN/MNIST network fits. It has 32x32, 16x16
  and 8x8 maps with up to 1024 channels, 3x3 and 1x1 kernels, and 2x2 max pooling. A 1x1
  kernel is a 3x3 kernel with only the centre tap non-zero and padding on. It needs about
  636,000 convolution cycles per image, about 3.2 ms at 200 MHz.
- The convolutions of ResNet-110 and DenseNet-100 on 32x32 images fit. ResNet's stride-2
  layers run at stride 1, with every second output kept.
- Of AlexNet, only conv3 to conv5 fit. A K = 11 build adds conv2. Conv1 would need a
  227-pixel line buffer and stride 4, which are not built.

## Verification

Every module has a self-checking testbench in `tb/` that compares it with an independent
reference and prints `TB_RESULT checks=N failures=M`. The reference arithmetic is in
`tb_ref_pkg`. Each testbench has a watchdog. What the testbenches cover:

- **Single modules.**
  - `tb_svpe_shift`: all codes for n = 1, 3 and 5.
  - `tb_svpe_array`: K = 3, and K = 11 at ksize 11, 5 and 3. It checks against a direct
    convolution and checks the latency and the bank swap.
  - The remaining modules are checked with random streams that include idle cycles.
- **End to end** (`tb_nbq_accel_top`, with PM = 4, PN = 2 and 8x8 maps). It includes an
  AXI4-Lite driver and a reference model of the whole layer. It runs two layers:
  - a two-pass padded convolution, with a weight-only command and weights loaded during
    streaming;
  - a pooled layer with saturating outputs.

  It counts each mechanism (weight-only command, overlapped load, bank swap, padding pixels,
  partial-sum accumulation, pooled outputs, saturation) and fails if any of them never happens.
  It also checks CYCLES against the timing formulas.
- **Workloads.**
  - `tb_wl_tbqnn` runs a scaled-down version of the 3-bit CIFAR network layer after layer, the
    way a processor would drive it: 3x3 convolutions with one and two output groups, a
    two-pass convolution followed by pooling, and a 1x1 convolution. Each layer's outputs are
    compared and become the next layer's input.
  - `tb_wl_alexnet_universal` builds the top with K = 11 and runs 11x11, 5x5 and 3x3
    convolutions, switching the size through the KSIZE register.
- **Full size** (`tb_nbq_accel_full`). The same test with the top at its default parameters
  (PM = 32, PN = 8, 32x32 maps). It takes about 20 s in verilator.

To run a testbench with plain verilator:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
        rtl/nbq_pkg.sv $(ls rtl/*.sv | grep -v nbq_pkg) \
        tb/tb_ref_pkg.sv tb/tb_svpe_array.sv --top-module tb_svpe_array -o sim
    ./obj_dir/sim

The package must come first on the command line; every `rtl/` file can be given for any
testbench, since unused modules are simply not elaborated.

Simulations start from reset, and nothing that is read is left uninitialised, so a
two-state simulator gives the same result as a four-state one.

## Known limits

- The chain of PM cascade adders is combinational (see above).
- The line buffer's FIFOs and the weight banks are written as arrays of registers. Whether a
  tool maps them to LUT RAM is left to it.
- The image memory is one 512-bit-wide RAM; on an FPGA it is 32 block RAMs side by side.
- The top has been simulated end to end with n = 3 weights, at K = 3 and K = 11. Other NBIT
  values are checked at the shift-unit level only.
