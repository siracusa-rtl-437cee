# A convolution engine that reads its weights straight out of MRAM

This is synthesizable SystemVerilog for the accelerator side of a heterogeneous RISC-V cluster
built for extended-reality (XR) sensing. It follows the Siracusa SoC. The central idea is to keep
all DNN weights on chip in 4 MiB of non-volatile STT-MRAM, placed right next to the convolution
engine. The engine's processing elements read a 256-bit weight word from that memory every
cycle. They do not first copy weights into the shared L1 scratchpad. The L1 holds only
activations, and the RISC-V cores can work on them at the same time ("zero-copy" cooperation).

The RTL contains:

* **N-EUREKA** (`neureka`), a bit-serial convolution engine with 6x6 processing elements. It
  supports 3x3 dense, 1x1 (pointwise) and 3x3 depthwise convolutions, with 8-bit activations and
  2- to 8-bit weights.
* **The Neural Memory Subsystem** (`neural_mem_subsystem`). It contains:
  * 8 MRAM cuts of 512 KiB;
  * a 4 MiB tile SRAM of the same shape;
  * a page manager that lets the SRAM stand in for an MRAM page when a network is larger than
    4 MiB.
* **The heterogeneous L1 interconnect**. It has:
  * 16 TCDM banks;
  * a logarithmic crossbar for the cores, the DMA and an external port;
  * a "shallow" 288-bit branch for N-EUREKA;
  * a conflict manager between the two branches.
* **The top level** `siracusa_cluster`, which wires these together.

The eight RISC-V cores, the cluster DMA, the fabric controller, L2, the peripherals, the clocks
and the pads are not part of the RTL. Their connections to the accelerator side are ports of
`siracusa_cluster`:
* the TCDM master ports;
* the accelerator's configuration port;
* the 64-bit port into the weight memories;
* the interrupt lines.

## 1. How a layer runs on N-EUREKA

### Tiling

A layer is cut into tiles and walked in this order:
1. output-channel tile (32 channels, or 28 for depthwise);
2. spatial tile row;
3. spatial tile column;
4. input-channel tile (innermost).

A spatial tile is the 6x6 block of output pixels, one per PE. To produce it, the engine needs an
8x8 block of input pixels (6 plus a halo of 1 on each side). The input channels are split into
chunks:
* 28 channels per chunk in the 3x3 modes;
* 32 channels per chunk in 1x1 mode.

The chunk sizes come from the weight word: a 3x3 filter needs 9 bits per input channel, and 28 x 9
= 252 bits is the most that fits in a 256-bit word.

### Phases of one tile

1. **Prefetch.** The 8x8x32-byte input tile is read from L1, one pixel (256 bits) per access.
   It goes into one of two input buffers. The prefetcher runs ahead and fills the second buffer
   while the PEs work on the first. The L1 streamer turns each 256-bit request into a 288-bit
   access of nine consecutive 32-bit words. It then picks out the 32 bytes that start at the
   requested byte address, so pixels do not have to be word aligned.
2. **Execution.** The weight streamer asks the weight memory for the tile's weight words at
   consecutive line addresses. Every returned word goes to all 36 PEs in the same cycle. The
   dispatcher gives each PE the nine window pixels of its output pixel (only the centre pixel in
   1x1 mode). The word and the accumulator it updates depend on the mode:

   | mode | words per input-channel tile | one word carries | bit of column c, row r | accumulator updated |
   |------|------|------|------|------|
   | 3x3 dense | 32 x qw | one output channel, one bit plane, 28 channels x 9 taps | `c*9 + r` | the one for that output channel |
   | 1x1 dense | 32 | one output channel, all qw bit planes of 32 channels | `c*8 + r` (r = bit) | the one for that output channel |
   | depthwise | qw | one bit plane of 28 channels x 9 taps | `c*9 + r` | 28 accumulators at once, one per channel |

3. **Normalization and quantization.** After the last input-channel tile, each PE runs its
   32-bit accumulators through its NormQuant unit, one channel per cycle, and keeps the result:
   `q = clip((acc*scale + bias) >>> shift, 0, 255)`.
   * Scale, shift and bias are per channel.
   * They are read from L1 as 192 bytes per output-channel tile: 32 scales, 32 shifts and 32
     32-bit biases.
   * This phase is skipped when 32-bit outputs are selected.
4. **Streamout.** Each PE's results are written back to L1:
   * one 256-bit beat per pixel for 8-bit outputs;
   * four beats per pixel for 32-bit outputs.

### Inside a PE

A PE has 32 columns of nine 1-bit x 8-bit multipliers (gated adders). Each column works like
this:
* it adds its nine products;
* it shifts the sum left by the bit position of the current weight plane;
* it negates the sum for the sign plane, because weights are two's complement and activations
  are unsigned.

The column output is 20 bits. In the dense modes a PE adder sums the 32 columns into one of the
32 accumulators. In depthwise mode the adder is bypassed and each column updates its own
accumulator. As a result, a 3x3 job with qw-bit weights takes 32*qw cycles per input-channel tile
and output tile, and lower weight precision runs proportionally faster.

### Jobs

A job is programmed through a 32-bit register port, with word offsets:

| offset | register | contents |
|--------|----------|----------|
| 0 | TRIGGER | a write starts the job |
| 1 | STATUS | busy, number of queued jobs |
| 4 | MODE | bits [1:0] mode, [7:4] weight bits, [8] 32-bit output |
| 5 | W_BASE | weight base, in 256-bit lines |
| 6–11 | input addressing | base, pixel stride, row stride, channel-tile stride, spatial-tile strides |
| 12–17 | output addressing | same layout as the input |
| 18 | NORM_BASE | base of the normalization parameters |
| 19 | TILES | n_kin, n_h, n_w, n_kout, one byte each |

There are two register contexts:
* The cores can program the next job while the current one runs.
* While both contexts hold jobs, further writes are held off (grant low) until one finishes.
* `evt_done_o` pulses when a job has been written back completely.

## 2. Weight memory timing: 256 bits per cycle from a slow memory

Each MRAM cut delivers one 64-bit word per MRAM cycle, with three MRAM cycles of latency. The
MRAM clock runs at half the cluster clock. It is modelled as an isochronous clock enable
(`mram_ce`).

To still deliver one 256-bit line per cluster cycle, the eight cuts form two halves of four:
* A line is one word from each of the four cuts of a half.
* Even lines live in the left half and odd lines in the right half.
* In every MRAM cycle both halves start a read, which gives two lines per MRAM cycle, i.e. one
  line per cluster cycle.

The interface between the cluster-clock requests and the MRAM-rate cuts works as follows:
* A request is parked in a slot belonging to its half.
* The slot is launched at the next enabled edge.
* The port stalls only when two requests for the same half arrive within one MRAM cycle.

Responses come back after different delays, depending on where in the MRAM cycle a request
arrived. A 16-entry reorder buffer and a 9-stage delay line therefore release every response
exactly **9 cluster cycles** after its request was accepted, in order. Nine cycles is the worst
case: 2 x 2 + 2 x 3 - 1.

The tile SRAM reads in one cycle but is padded to the same 9 cycles. This keeps N-EUREKA's weight
streamer unaware of which memory it is reading.

Both memories are also reachable from the cluster through a 64-bit port, with one access
outstanding. This port is used to program the MRAM and to load the SRAM:

| byte address | target |
|--------------|--------|
| `0x000000–0x3FFFFF` | MRAM |
| `0x400000–0x7FFFFF` | tile SRAM |
| `0x1000000` | paging enable |
| `0x1000008` | MRAM page register |
| `0x1000010` | SRAM page register |

## 3. Paging weights through the tile SRAM

Weight line addresses are virtual. The bits above the lowest 17 bits select a 4 MiB page. Two
page registers say which page currently sits in the MRAM and which in the tile SRAM.

* With paging off (after reset), page 0 is the MRAM and page 1 the SRAM.
* With paging on, a request to a page that is in neither memory stalls the weight port and
  raises `irq_page_miss_o`. Software loads the page, writes the page register, and the stalled
  request proceeds.
* `irq_page_switch_o` pulses when an accepted request goes to the other memory than the one
  before it. This is the moment at which the page just left can be refilled ahead of time,
  because DNN weight access order is known in advance.

## 4. Sharing L1 between cores and the engine

* **Banks and crossbar.** The L1 is 16 word-interleaved banks of 4096 x 32 bit (256 KiB). Ten
  narrow masters (8 cores, DMA, external port) reach it through a logarithmic crossbar with
  round-robin arbitration per bank.
* **Shallow branch.** N-EUREKA's 288-bit access always covers nine consecutive banks, starting
  anywhere and wrapping around.
* **Conflict manager.** It compares the two branches bank by bank:
  * Without a common bank, both are served.
  * On a conflict the branch selected by `cm_prio_shallow_i` wins.
  * The other branch loses at most `cm_max_stall_i` conflicts in a row. After that it wins once
    and the counter restarts.
  * The wide access is granted all-or-nothing. When N-EUREKA wins, cores on the other seven banks
    still proceed in the same cycle.

## 5. What is this design's own, and where it departs

The paper describes most of the structure but not the interfaces or encodings. These are choices
made here:
* the register map;
* the tile addressing by base and strides;
* the weight bit layouts;
* the normalization parameter layout;
* the NormQuant widths (8-bit unsigned scale, 32-bit bias, 5-bit shift, no rounding);
* the slot/reorder-buffer scheme;
* all handshakes;
* the conflict-manager counter.

Known departures:

* **Bubble between weight tiles.** The next input-channel tile's weight stream starts only after
  the previous tile's last word has returned. This costs about 9 cycles per input-channel tile.
  The published engine overlaps these and reports about 85 % use of the MRAM bandwidth on its
  dense 3x3 benchmark; this RTL will reach somewhat less.
* **No stride or padding.** Only stride-1 convolutions are supported, with no implicit padding:
  the input tensor in L1 must include the 1-pixel halo. Stride-2 and first-layer (3-channel)
  convolutions of networks such as MobileNet-V2 need software help.
* **Flip-flop buffers.** The input buffers are flip-flop arrays, not latch-based memories.
* **Behavioural MRAM.** `mram_cut` is a behavioural model of the MRAM macro: a 3-stage pipeline
  on the clock enable. Analog read timing, slow writes and endurance are not modelled.
* **Flip-flop register file and accumulators.** The two job contexts and the per-PE
  accumulators are flip-flops; the published engine uses latch-based standard-cell memories.
* **Simple buses in place of AXI.** The Neural Memory Subsystem's 64-bit cluster port is a
  plain request/grant bus, and the engine's configuration port is a plain register bus. The
  MRAM clock divider is modelled as a clock enable at half rate in the same clock domain, so
  there is no clock-domain crossing in the RTL.
* **Plain memory arrays.** All SRAMs (TCDM banks, tile SRAM) are plain arrays in place of
  compiled macros. The TCDM banks have no reset.

## 6. Files

Only files whose role is not obvious from the sections above are listed.

| file | what it is |
|------|------------|
| `rtl/neureka_pkg.sv` | shared types, register map, address map |
| `rtl/nk_col.sv`, `rtl/nk_pe.sv` | column and PE |
| `rtl/nk_dispatch.sv` | dispatcher |
| `rtl/nk_regfile.sv`, `rtl/nk_addrgen.sv` | controller pieces |
| `rtl/rr_arbiter.sv` | round-robin arbiter used by the logarithmic crossbar |
| `tb/nk_tb_pkg.sv` | reference model: random layers, memory images and expected outputs |
| `tb/tb_cluster_body.svh` | end-to-end test shared by the reduced and full-size cluster testbenches |

Every other `rtl/<module>.sv` has a self-checking testbench `tb/tb_<module>.sv`. Every file begins
with a comment on its function, interface and timing.

## 7. Simulating

Each testbench prints `TB_RESULT checks=<n> failures=<m>` and stops. A cycle watchdog counts a
failure if the run hangs. The simulator needs only the RTL, the testbench package and the
testbench:

```
verilator --binary --timing --assert -Itb --top-module tb_neureka \
    rtl/neureka_pkg.sv $(ls rtl/*.sv | grep -v neureka_pkg) tb/nk_tb_pkg.sv tb/tb_neureka.sv
./obj_dir/Vtb_neureka
```

What the main testbenches cover:

* **`tb_neureka`** runs four layers on the engine (PE_DIM reduced to 2) and compares every output
  byte with an integer reference. It uses a behavioural L1 and a 9-cycle weight memory. The
  layers are:
  * 3x3, 3-bit weights;
  * 1x1 with 32-bit output;
  * depthwise, 2-bit weights;
  * 3x3, 8-bit weights with 32-bit output.
* **`tb_siracusa_cluster`** (reduced: PE_DIM 2, 1024-word cuts) and
  **`tb_siracusa_cluster_full`** (all parameters at their defaults) do the following:
  * load four layers through the cluster ports;
  * keep the cores hammering L1 with checked random traffic;
  * run the layers with both conflict-manager priorities, across an MRAM/SRAM page boundary and
    from an unmapped page;
  * check all outputs;
  * check that every weight response comes exactly 9 cycles after its request;
  * count each mechanism and fail if one never occurred: job queueing, prefetch overlap, L1
    stalls, conflicts won by each side, the starvation bound, weight back-pressure, page miss
    and page switch.

  The full-size run takes under a minute of simulation time after about 30 s of compilation.

Unit testbenches shrink memory depths where that shortens the run. The interfaces and timing are
unchanged.
