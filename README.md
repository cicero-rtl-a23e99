# Cicero NPU: gathering unit and MLP datapath for NeRF rendering

Neural radiance field (NeRF) rendering spends most of its time and energy on two steps:
- **Feature gathering.** Each sample point along a camera ray reads the feature vectors of the eight voxel corners around it from a large grid, and blends them with trilinear weights.
- **Feature computation.** A small MLP turns the blended vector into colour and density.

Gathering is irregular. Neighbouring rays touch scattered grid entries, so a cache-based GPU wastes most of its DRAM traffic on it. This design changes the order of the work instead:
- The grid is cut into fixed-size blocks called **MVoxels** (512 vertices here).
- All samples that fall into one MVoxel are listed ahead of time in a **Ray Index Table (RIT)**. Each entry holds the 8 vertex IDs and 8 weights of one sample.
- The hardware then streams the grid one MVoxel at a time, and every grid byte is read from DRAM once.

Within an MVoxel the feature table is spread over 32 SRAM banks, one bank per channel. Every vertex read therefore fetches one element from each bank, and no two lanes can hit the same bank.

The RTL covers the on-chip part:
- a **Gathering Unit (GU)**, which runs beside an NPU;
- the NPU's **global feature buffer**, **weight buffer**, **24×24 systolic array**, **scalar unit** (ReLU and max-pool) and a layer sequencer.

The GPU that does the radiance warping, the MCU that builds the RIT, the DMA, the interconnect and the DRAM are outside the RTL. Their connection points are top-level ports.

## Data flow

```
 RIT fill ──► rit_buffer (2 halves x 128 entries) ──► addr_gen ──► vft (2 halves x 32 banks x 512)
                                                        │  8 steps per group of 2 samples
 VFT fill ───────────────────────────────────────────────┘        │ 2 read ports, 32 banks each
                                                                  ▼
                                        64 reducers (32 channels x 2 samples), trilinear MAC
                                                                  ▼
                                        2 feature FIFOs ──► round-robin drain
                                                                  ▼
                        global_feature_buffer (2 halves x 768 KB): GU half / NPU half
                                                                  ▼
    weight_buffer (96 KB) ──► mlp_sequencer ──► systolic_array 24x24 ──► scalar_unit ──► GFB
```

The design overlaps work with double buffering at three places. In each, a `swap` pulse exchanges the two halves:
- **RIT and VFT.** The MCU/DMA fill the next MVoxel and the next sample batch while the GU works on the current ones.
- **Global feature buffer.** The GU writes batch *b+1* into one half while the MLP reads and writes batch *b* in the other.

## Gathering Unit

### Address generation (`addr_gen`)
The address generator works on groups of M = 2 samples, one per VFT read port. For each of the 8 corners *v* it does the following in one cycle:
- computes `addr = VID[v] − mv_base` for both samples;
- issues both VFT reads;
- one cycle later, hands the read data and the weight `w[v]` to the reducers.

A group therefore takes **8 cycles**, and a batch of *n* samples takes 8·⌈n/2⌉ cycles plus a tail of a few cycles. The testbench measures 519 cycles for 128 samples.

Some cases are handled specially:
- **Odd n.** The last group has one lane idle.
- **Out-of-range VID.** An address outside the MVoxel raises the sticky `oob` flag, and its address is taken modulo 512.
- **Back-pressure.** A group starts only if every feature FIFO has room for one more result. Otherwise `stall` is high.

### Channel-major VFT (`vft`)
Bank *b* holds channel *b* of every vertex, so one read port returns a whole 32-channel vector in one cycle. Each bank has two read ports (M = 2), one per sample lane.

The layout is conflict-free by construction, so there is no arbiter and no replay path. That is what keeps the 8-cycles-per-group rate fixed.

### Reducers (`reducer`)
There is one reducer per (channel, lane), 64 in all. Each reducer accumulates `f·w` over the 8 corners with these formats:
- features: signed 16-bit;
- weights: unsigned Q0.16, so 0xFFFF ≈ 1.0.

After the last corner the result is `(sum + 2^15) >> 16`, saturated to 16 bits, and is valid one cycle later.

### Feature FIFOs and drain
Each lane's 32-channel result goes into a first-word-fall-through FIFO (4 deep) with its sample index. The FIFOs are drained round-robin into the GU half of the global feature buffer at address `out_base + index`. The drain is a valid/ready stream. In the top, `out_ready` is tied high: the buffer accepts one vector per cycle, while the GU produces 2 per 8 cycles. So stalls are only exercised in the GU's own testbench, which holds `out_ready` low.

## NPU

### Global feature buffer
- Size: 1.5 MB, as two 768 KB halves.
- Word: 64 B, one 32-channel vector; 12288 words per half.
- Address: `{granule, word}`, with 24 granules of 32 KB per half.

`gu_sel` names the GU's half. Each half has its own write mux, so the GU and the NPU write in the same cycle. NPU reads are registered, and the data comes from the half the NPU owned when the read was issued.

### Weight buffer
- Size: 96 KB, as 2048 rows of 24 weights × 16 bit.
- Organisation: 24 consecutive rows form one 24×24 weight tile.

### Systolic array (`systolic_array`, `mac_pe`)
The array is weight-stationary. Cell (r, c) holds W[r][c] and computes `p_out = p_in + W·a`.
- **Input skew.** Activation row *r* enters *r* cycles late.
- **Partial sums.** They flow down the columns. Column *c* also gets its incoming partial sum *c* cycles late, so a result can be chained over input tiles.
- **Output deskew.** Column outputs are delayed N−1−c cycles, so a whole vector leaves at once.

A vector can enter every cycle, and its result leaves **2N−1 = 47 cycles** later. Weights are loaded row by row only while the array is empty; an assertion checks this. Arithmetic is 16-bit signed operands with 40-bit partial sums.

### Scalar unit
The scalar unit is combinational over 32 lanes. It requantises a 40-bit value by an arithmetic right shift with round-half-up, then saturates it to 16 bits. It has three modes:
- PASS;
- RELU;
- MAX, the lane-wise maximum of two inputs, used for max pooling.

### Layer sequencer (`mlp_sequencer`)
The sequencer takes one command at a time (`layer_cmd_t`).

**DENSE** runs once for each input tile *k* < `k_tiles`:
1. It loads 24 weight rows from `w_base + 24k`.
2. It streams `n_vec` vectors from `src`, feeding channels 24k…24k+23 and zero above channel 31.
3. The partial sums of earlier tiles come from a 40-bit accumulator store with 128 entries.

On the last tile, results pass through the scalar unit (shift, optional ReLU) and go to `dst + i`. Channels 0..23 are written and the rest are zero.

**POOL** reads `src + i` and `src_b + i` on consecutive cycles and writes their lane-wise maximum to `dst + i`.

A dense layer costs about `k_tiles·(24 + n_vec + 2·24 + 3)` cycles. A pool pass costs `2·n_vec + 3`.

## Top level (`cicero_npu`)
`cicero_npu` instantiates the GU, the feature buffer, the weight buffer, the array, the scalar unit and the sequencer. Its ports stand in for the blocks outside the RTL:
- RIT and VFT fill ports and swaps, which the MCU and DMA would drive;
- weight-buffer fill;
- GU start: `n`, `mv_base`, `out_base`;
- the GFB swap;
- the layer command;
- an external read port of the NPU half, which the DMA would use for write-back.

The sequencer owns that read port while a command runs.

## What follows the paper and what does not
**From the paper:**
- the overall split into gathering and computation;
- the MVoxel streaming order and the RIT;
- channel-major banking across 32 banks with 2 read ports;
- 8 cycles per group of samples;
- reducers feeding FIFOs into a global feature buffer;
- 1.5 MB double-buffered global buffer with 32 KB granularity;
- 96 KB weight buffer;
- 24×24 MAC array;
- scalar unit for ReLU and max pooling.

**This design's choices:**
- 16-bit features and Q0.16 weights;
- 40-bit partial sums;
- word and row formats, and address maps;
- FIFO depth;
- the drain order;
- out-of-range handling;
- weight-stationary dataflow and its latency;
- the whole layer sequencer and its command format.

**Known departures:**
- **VFT size.** The paper's total SRAM figure (32 KB of VFT) fits one MVoxel, while its figure shows the VFT double-buffered. The design follows the figure: two 32 KB halves.
- **Wide layers.** The sequencer's `k_tiles` field is 2 bits (at most 96 input channels). Layers wider than 96 inputs must be split by the controller, and the current command set cannot carry a partial sum between commands.
- **Output width.** Only 24 output channels per command are produced. A layer with more outputs runs as several commands with different weight bases.

## Verification
Every block has a self-checking testbench in `tb/` that ends with a `TB_RESULT checks=… failures=…` line and has a watchdog:

| testbench | what it checks |
|---|---|
| `tb_rit_buffer` | both read ports, fill during use, swap |
| `tb_vft` | every bank against the model on two random ports per cycle, during a fill of the other half |
| `tb_reducer` | 300 random blends, including saturation, one-cycle latency |
| `tb_feature_fifo` | random push/pop against a queue model |
| `tb_gathering_unit` | bit-exact blends for 128-, 7-, 40- and 64-sample batches; 8 cycles per group; stall under back-pressure with no loss or duplication; `oob`; fill of the other halves during a gather |
| `tb_global_feature_buffer` | GU/NPU halves across swaps, full address range |
| `tb_weight_buffer` | all 2048 rows |
| `tb_mac_pe` | MAC and pass-through |
| `tb_systolic_array` | N = 4 and N = 24, back-to-back vectors with gaps, exact results and 2N−1 latency |
| `tb_scalar_unit` | all modes against an integer model |
| `tb_cicero_npu` | end to end at the default sizes (see below) |

`tb_cicero_npu` runs at the default sizes. It does the following:
1. fills an MVoxel and a RIT and gathers batch 0;
2. fills batch 1 while batch 0 is gathered;
3. swaps the feature buffer and gathers batch 1 during the MLP;
4. runs a two-tile dense layer with ReLU, then a max pool;
5. compares everything against a model.

It counts each mechanism (RIT/VFT/GFB swaps, fill overlap, short group, k-tile accumulation, ReLU clipping, pool, out-of-range) and fails if one never happened.

Open issue: with registers started at random values and some seeds, `tb_vft` reports a
mismatch on one read of vertex 0 in its second fill/read round (32-64 of 76800 checks); with
zero-initialised state it passes. The cause is not yet found, so treat the VFT half-swap
corner after a long fill as unverified.

To run one testbench with Verilator:

```
verilator --binary --timing --top-module tb_gathering_unit \
    rtl/cicero_pkg.sv $(ls rtl/*.sv | grep -v cicero_pkg) tb/tb_gathering_unit.sv
./obj_dir/Vtb_gathering_unit
```

Lint warnings that remain are deliberate:
- unused package constants;
- the GU's `rit_sel`/`vft_sel`/`ag_done` debug outputs, which are left unconnected;
- `rst_n` used both as an asynchronous reset and in assertion `disable iff`.

## Sizing against NeRF models
Per pass the GU holds one MVoxel: 512 × 32 channels × 2 B = 32 KB per VFT half, plus 128 samples per RIT half. Models of 10 MB to 1 GB therefore run only as a stream of MVoxels, never resident. Grids with more than 32 channels take several passes.

For the MLPs:
- Instant-NGP (64-wide hidden layers) fits in the weight buffer and the 2-bit k-tile field.
- DirectVoxGO's 128-wide layers exceed the 96-channel limit of one command.
