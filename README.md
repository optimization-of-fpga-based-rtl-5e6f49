# Multi-CLP convolution accelerator (FP32, AlexNet on a Virtex-7 485T)

The convolutional (CONV) layers of a CNN differ widely in shape. AlexNet's
first layer has 3 input maps and an 11x11 kernel; its third has 256 input maps
and a 3x3 kernel. A single convolution engine with fixed unrolling factors
fits some layers well and wastes multipliers on others. This design instead
splits the FPGA's arithmetic into several **convolutional layer processors
(CLPs)** of different shapes. Each CLP owns a fixed subset of the layers and
runs them back to back. All CLPs work at the same time, each on a different
image, in lock-step **episodes**: what one layer produced in one episode is
consumed by the next layer in the next episode.

The shapes and the layer-to-CLP mapping come from a design-space search by
simulated annealing. The RTL here implements the accelerator that search
produced for AlexNet on a Virtex-7 VX485T with single-precision floating-point
data. Every size is a parameter, so other results of the search can be built
too.

## The default instance

| CLP | Tn x Tm | MACs | layers (AlexNet, two groups a/b) | issue cycles (Eq. 3) |
|-----|---------|------|----------------------------------|----------------------|
| 0   | 3 x 24  | 72   | 1a, 4a                           | 732,050 + 778,752 = 1,510,802 |
| 1   | 3 x 24  | 72   | 1b, 4b                           | 1,510,802 |
| 2   | 16 x 11 | 176  | 2a, 2b, 5a                       | 1,312,200 + 219,024 = 1,531,224 |
| 3   | 16 x 8  | 128  | 3a, 3b, 5b                       | 2 x 584,064 + 292,032 = 1,460,160 |

That is 448 FP32 multiply-accumulate lanes. An episode is bounded by the
slowest CLP, about 1.53 M cycles, or 15.3 ms at 100 MHz. **Eq. 3** is the
cycle count of one layer on a CLP when the engine never waits:

    cycles = ceil(N/Tn) * ceil(M/Tm) * R * C * K^2

Here N and M are the input and output map counts, R x C is the output map
size, K is the kernel size and S is the stride.

The unrolling factors, the mapping and the cycle counts are the search's.
The search does not publish tile sizes (Tr x Tc output pixels per tile), so
this design chooses them. It uses Tr = Tc = 8 for layer 1, 27 for layer 2 and
13 for layers 3 to 5. The buffer depths follow from these choices. Depths are
counted in 32-bit words per ping-pong set; each bank holds two sets.

| CLP | IF_DEPTH | W_DEPTH | OF_DEPTH |
|-----|----------|---------|----------|
| 0, 1 | 1521 = 39 x 39 (layer 1 input tile) | 121 = 11 x 11 | 169 = 13 x 13 |
| 2   | 961 = 31 x 31 | 25 | 729 = 27 x 27 |
| 3   | 225 = 15 x 15 | 9  | 169 |

In 512 x 36 block RAMs this comes to about 653 RAMB18s. The search's own
budget for this design was 644.

## How a CLP computes a layer

A CLP runs the tiled loop nest below. The two innermost loops are unrolled in
hardware: Tm tiles of Tn multipliers each.

    for r0 in 0..R step Tr, c0 in 0..C step Tc:       // output tile
      for m0 in 0..M step Tm:                          // output-map tile
        for n0 in 0..N step Tn:                        // input-map tile = one "stage"
          load IF tile, W tile (and biases if n0 == 0)
          for i, j in K x K:  for rt, ct in tile:      // one engine issue per cycle
            for mt < Tm, nt < Tn (in parallel):
              OF[mt][rt][ct] += W[mt][nt][i][j] * IF[nt][S*rt+i][S*ct+j]
        write OF tile back

Edge tiles are smaller than Tr x Tc x Tm x Tn. The controller computes the
real extents. Unused multiplier lanes feed +0 into the adder tree. Unused
output lanes are not written.

**Compute engine.** `compute_engine` holds Tm `mac_tree_tile`s. All of them
get the same Tn input features. Each gets its own Tn weights. A tile has:
- Tn multipliers, then a register;
- a balanced adder tree over the next power of two of lanes, with a register
  per level;
- one more adder that adds the tree's sum to the old output value read from
  OF_BUF.

**Bias.** On the first kernel position of the first input-map tile, the
accumulator adds the bias instead of the old output. The old word is ignored.
This gives the same sums as preloading the biases into the output buffer, and
saves a pass over OF_BUF. The biases sit in small per-set registers next to
the weight buffer.

**Operation order.** The FP32 operations happen in a fixed order:
1. per kernel position, the balanced tree of Tn products;
2. then the running sum: bias first, then input-map tiles in order, and within
   each tile, kernel positions row by row.

The testbenches' reference model follows exactly this order. So results are
compared bit for bit, not within a tolerance.

## Double buffering

Every buffer has two sets (ping-pong). One set is filled or drained by the
off-chip side while the engine uses the other.

- **IF_BUF**: Tn banks, one per input map of the tile. It holds
  (K+S(Tr-1)) x (K+S(Tc-1)) words per set.
- **W_BUF**: Tn x Tm banks, K x K words per set, plus Tm bias registers per
  set.
- **OF_BUF**: Tm banks, Tr x Tc words per set. One set is read and written by
  the accumulators, while the other is read by the writer.

The controller runs three processes that meet only through "set full" flags:

- **Load sequencer.** It walks the loop nest ahead of the engine. When an
  IF/W set is free, it fills it with the next stage's data through
  `clp_loader`.
- **Compute.** It waits until the current IF/W set is full. On the first
  stage of an output tile, it also waits until the OF set it will accumulate
  into has been drained. It then issues K·K·tr·tc cycles back to back. It
  frees the IF/W set after the last read and flips to the other set. After
  the last input-map tile, it lets the pipeline empty, marks the OF set full
  and flips OF sets.
- **Write-back.** `clp_writer` drains each full OF set to memory.

IF/W sets therefore change every stage, and OF sets every ceil(N/Tn) stages.
The engine issues exactly the Eq. 3 number of cycles. Any extra time appears
as counted idle cycles:
- `cnt_stall_in`: the next input set is not loaded yet;
- `cnt_stall_of`: no drained OF set is available;
- `cnt_pad`: see below.

## Engine timing and the pad cycle

Say an issue happens in cycle t, and let LV = ceil(log2 Tn). Then:

| cycle    | what happens |
|----------|--------------|
| t        | IF and W read addresses |
| t+1      | operands at the multipliers |
| t+1+LV   | tree sum ready; OF read address presented |
| t+2+LV   | old value arrives; accumulator adds |
| t+3+LV   | result written to OF_BUF |

OF_BUF is write-first. So a word can be read again for its next update two
cycles after its previous read, and no sooner. Consecutive issues go to
consecutive output pixels, so this always holds, except when a tile is a
single pixel (tr = tc = 1). In that case every kernel position hits the same
word. The controller then inserts one idle issue slot (a **pad**) after each
one. Such tiles occur at the bottom-right corner of layers whose R or C is
not a multiple of Tr or Tc.

## Episodes and the shared memory port

`episode_ctrl` starts all CLPs together, collects each CLP's done pulse, and
ends the episode when the last one finishes. It reports the episode count and
its length in cycles.

The CLPs share one off-chip memory port through `mem_arbiter`:
- **Reads:** round-robin among the CLPs that are requesting. Each request
  carries the CLP's id. The memory must return the id with the data, in
  request order, after any latency.
- **Writes:** round-robin as well.

No CLP waits for more than G-1 others.

## Programming

Each CLP has a table of up to `MAX_LAYERS` (3) layer descriptors
(`clp_pkg::layer_desc_t`). The host writes them through `cfg_clp`, `cfg_idx`,
`cfg_desc`, plus the layer count through `cfg_num`, and then pulses `start`.

A descriptor holds N, M, R, C, K, S, Tr, Tc and four word base addresses.
Memory is word addressed (one FP32 value per address) and laid out as:

    IF[n][x][y]    = if_base + (n*IH + x)*IW + y   IH = S(R-1)+K, IW = S(C-1)+K
    W[m][n][i][j]  = w_base  + ((m*N + n)*K + i)*K + j
    B[m]           = b_base  + m
    OF[m][r][c]    = of_base + (m*R + r)*C + c

Input maps are stored with their zero padding already in place.

For AlexNet's grouped layers, each group is a separate descriptor ("1a",
"1b", ...), whose base addresses point at the group's half of the maps.

The chosen Tr and Tc must satisfy these limits for every layer in a CLP's
table:
- (K+S(Tr-1))(K+S(Tc-1)) ≤ IF_DEPTH;
- K² ≤ W_DEPTH;
- Tr·Tc ≤ OF_DEPTH.

## Arithmetic

`fp32_mul` and `fp32_add` are combinational IEEE-754 single-precision units:
- rounding is to nearest even;
- subnormal inputs and results are flushed to zero;
- overflow gives infinity;
- NaN is not produced or propagated, since the CNN data has none.

The adder aligns with guard, round and sticky bits. On the FPGA each would
map onto DSP slices: 3 for the multiplier and 2 for the adder, i.e. 5 per
MAC lane.

## Verification

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<n>`.

| testbench | what it checks |
|-----------|----------------|
| tb_fp32_mul, tb_fp32_add | random and corner-case operands against double-precision results rounded to single |
| tb_mac_tree_tile, tb_compute_engine | every result bit-exact and exactly LV+2 cycles after issue; lane masks; bias select |
| tb_if_buf, tb_w_buf, tb_of_buf | random reads and writes across both sets against a shadow copy, including write-first reads |
| tb_layer_table | reset clearing, readback, count clamping |
| tb_mem_arbiter | every response goes to the right requester with the right data; every write lands; no requester waits more than G-1 grants |
| tb_episode_ctrl | done exactly one cycle after the last CLP, episode count and length |
| tb_clp | one small CLP (Tn=3, Tm=4) running two layers with partial tiles, stride 2 and a 1x1 corner tile: every output word, the issue count against Eq. 3, pads and stalls |
| tb_multi_clp_top | the full-size accelerator, default parameters, two episodes (below) |
| tb_alexnet_layers | four real AlexNet layers on the full-size accelerator (below) |

**End-to-end test.** `tb_multi_clp_top` runs the full-size accelerator with
its default parameters. Each CLP gets small layers that fit its buffers. The
test runs two episodes, with new input maps for the second, against a memory
model with random back-pressure. It checks:
- every output word;
- each CLP's issue count against Eq. 3.

It also counts these mechanisms and fails if any never happened:
- input stalls;
- output-buffer stalls;
- pad cycles;
- cycles where several CLPs requested memory at once;
- cycles where finished CLPs waited at the barrier;
- completed episodes.

**Real AlexNet layers.** `tb_alexnet_layers` runs four AlexNet layers at
full size on the default accelerator in one episode, one layer per CLP:
- CLP0: layer 1a;
- CLP1: layer 4b;
- CLP2: layer 2a;
- CLP3: layer 3a.

The data is random. The test checks:
- every issue count against Eq. 3: 732,050, 778,752, 656,100 and 584,064;
- 200 sampled output words per layer, bit for bit.

The episode takes 4.51 M cycles, while the slowest CLP issues only 0.78 M.
The difference is load time: all four CLPs share one port that delivers at
most one word per cycle. A wider memory path is what a real board would add.
The test runs in about a minute of simulation time.

The other layers of each CLP (1b/4a, 2b/5a, 3b/5b) are the same shapes with
other data, so they were not simulated separately.

**Running a test** with Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb rtl/clp_pkg.sv \
        tb/fp_ref_pkg.sv tb/conv_ref_pkg.sv tb/tb_multi_clp_top.sv \
        --top-module tb_multi_clp_top -Mdir obj
    obj/Vtb_multi_clp_top

Other testbenches build the same way. Include only the packages they import.

## Where this design departs from the published accelerator

- **Bias handling.** Bias goes through the accumulator, not a broadcast into
  OF_BUF (see above).
- **OF_BUF memories.** OF_BUF is built from two simple-dual-port memories per
  bank, one per set, instead of one true-dual-port memory in write-first
  mode. The ports per set are the same.
- **Tile sizes and depths.** Tr, Tc and the buffer depths are this design's
  choice.
- **Memory interface.** It is a word-wide valid/ready port with tagged reads,
  not a DDR3 controller. Loads move one word per cycle at best, so on real
  layers the episode takes longer than Eq. 3. The difference shows in
  `cnt_stall_in`.
- **Host, DRAM and search.** The host processor, the DRAM and the
  design-space search (simulated annealing, tabu search and the analytical
  cost model) are outside this RTL. The top exposes the ports the host and
  memory would drive.
- **Precision.** Only the FP32 datapath is built. The 16-bit fixed-point
  accelerators for SqueezeNet, VGGNet and GoogLeNet would need a fixed-point
  MAC and other CLP shapes.
- **Synthesis run time.** Synthesising the full 448-lane FP32 instance with
  the open-source flow takes longer than ten minutes. The individual blocks
  synthesise quickly.

## Source map

- `rtl/clp_pkg.sv`: shared types and the tile-span helper.
- `rtl/fp32_mul.sv`, `rtl/fp32_add.sv`: the FP32 arithmetic units.
- `rtl/mac_tree_tile.sv`, `rtl/compute_engine.sv`: the compute engine.
- `rtl/sdp_ram.sv`, `rtl/if_buf.sv`, `rtl/w_buf.sv`, `rtl/of_buf.sv`: the
  buffers.
- `rtl/clp_loader.sv`, `rtl/clp_writer.sv`, `rtl/clp_controller.sv`,
  `rtl/layer_table.sv`, `rtl/clp.sv`: one CLP.
- `rtl/mem_arbiter.sv`, `rtl/episode_ctrl.sv`, `rtl/multi_clp_top.sv`: the
  accelerator.
- `tb/`: the testbenches, plus:
  - `fp_ref_pkg`: reference FP32 arithmetic;
  - `conv_ref_pkg`: the reference convolution and Eq. 3;
  - `mem_model`: a behavioural off-chip memory.
