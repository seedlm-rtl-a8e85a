# SeedLM matrix-vector engine in SystemVerilog

Generating tokens from a large language model is limited by memory bandwidth. Each weight is
read from DRAM once per token and used in a single multiply-accumulate. SeedLM trades memory
traffic for arithmetic. A block of C weights is not stored. What is stored is a seed for a
linear feedback shift register (LFSR) and a few small coefficients. The hardware runs the
LFSR to regenerate a pseudo-random C x P matrix U and rebuilds the block as w ≈ U·t. At 4 bits
per weight, one 64-byte DRAM beat carries 128 weights instead of 32 FP16 weights. An engine
with 128 multipliers then does four times as much useful work per byte read.

This repository holds RTL for such an engine: a matrix-vector unit of the kind used to
benchmark SeedLM on an FPGA. It reads compressed weights from DDR, decompresses 128 weights per
cycle, and multiplies them with an FP16 activation vector held on chip. It writes the FP16 result
vector back to the same on-chip memory. A bypass mode streams plain FP16 weights instead. This
is the uncompressed reference the 4x figure is measured against.

## 1. The compressed weight format

The default configuration is K = 16, C = 8, P = 3:

| field | bits | meaning |
|---|---|---|
| `seed` | [15:0] | LFSR start state s, non-zero |
| `e` | [19:16] | shared exponent, 4-bit two's complement (−8..7) |
| `q0`, `q1`, `q2` | [23:20], [27:24], [31:28] | coefficients, 4-bit two's complement (−8..7) |

That gives 32 bits per 8 weights, so 4 bits per weight. The block's weights are

    w_i = 2^e · Σ_p q_p · (V[i][p] − 2^(K−1)) / (2^(K−1) − 1),   i = 0..C−1, p = 0..P−1

Here V[i][p] is LFSR state number i·P + p + 1 after the seed, so the matrix fills row by row.
The seed itself is not used as an entry. The subtraction and division map the LFSR's unsigned
states 1..2^K−1 onto [−1, 1].

**The LFSR.** The register has K bits. Bit 0 is the oldest. At each step every bit moves one
place towards bit 0. The new bit enters at bit K−1 and is the XOR of the tapped bits. For
K = 16 the taps are bits 0, 1, 3 and 12. `seedlm_pkg::lfsr_taps` holds the tap sets for
K = 2..24, all of maximal length. A small example with K = 3 and taps (0, 1), seed 4, shows
the convention. The states that follow are 2, 5, 6, 7, 3, 1, 4, 2. As a 4 x 2 matrix this is
V(4) = [[2,5],[6,7],[3,1],[4,2]]. The testbench checks exactly this sequence.

Finding the seed and coefficients is an offline search. The compressor tries every seed,
projects the block onto that seed's matrix, quantises the result and keeps the best. That step
is software and is not part of this RTL. The testbenches use random records. The hardware rebuilds any record exactly,
however good or bad the record is as an approximation.

## 2. Rebuilding a block in hardware

`seedlm_block_decoder` rebuilds one record per cycle, with a latency of two cycles:

1. **States.** `seedlm_lfsr` chains C·P = 24 copies of the one-step next-state logic (a shift
   and a 4-input XOR). All 24 states of a block are ready in one cycle. They are registered.
2. **Integer sums.** For each weight, n_i = Σ_p q_p · (V[i][p] − 32768) is formed exactly. It
   is at most 3 · 8 · 32767 in magnitude. The division by 2^(K−1) − 1 = 32767 becomes a
   multiplication by 2^(K−1) + 1 = 32769 and a scale of 2^−30. Since
   1/(2^15 − 1) = 2^−15 / (1 − 2^−15) ≈ 2^−15 (1 + 2^−15), the relative error is 2^−30. The
   output is a signed 40-bit integer `wfix` = n_i · 32769, plus one scale per block,
   `wshift` = e − 30. The weight is wfix · 2^wshift.

`lfsr_weight_decompress` places 16 decoders side by side. Record b of a 512-bit beat (bits
32b+31..32b) produces the weights of lanes 8b..8b+7.

The FPGA build this design follows spends 144 block RAMs on decompression. Those are probably
tables of LFSR states. The table organisation is not published, so this design computes the
states in logic and uses no RAM for them.

## 3. Number formats: fixed point in, FP16 out

All activations and results are IEEE half precision (FP16). Fixed-point to FP16 conversion
happens in two places, both done by `fix2fp16`:

* **Before the multipliers.** 128 converters turn the decompressed fixed-point weights into
  FP16 (W = 40, scale = wshift).
* **After the multipliers.** 128 more converters turn the finished accumulators into FP16
  for the activation SRAM (W = 96, scale = −48).

`fix2fp16` rounds to nearest, ties to even. It produces subnormals and overflows to ±infinity.
Stage 1 takes the magnitude and its leading-one position. Stage 2 finds the exponent
E = lead + shift and clamps it at −14. It shifts the magnitude so its LSB weighs
2^(max(E,−14)−10), rounds, and packs the result as `((max(E,−14)+14) << 10) + significand`.
Written that way, a carry out of the rounding and the step from subnormal to normal need no
special case.

**Exact accumulation.** `mac_lane` multiplies the two 11-bit significands into a 22-bit
product. It shifts the product left by (exponent_a + exponent_b − 2), with subnormals counting
as exponent 1. This makes a signed fixed-point number whose LSB is 2^−48, the smallest product
of two FP16 subnormals. The lane adds it into a 96-bit accumulator. No rounding happens until
the output converter, so the result is the exactly rounded FP16 dot product. The 96 bits allow
more than 2^15 maximum-size products. Infinities and NaNs on the inputs are not treated
specially.

## 4. The engine

```
            +--------------+   req (valid/ready, byte address)   +------------------+
            | ddr_req_if   | ----------------------------------> |  DDR controller  |<--> DRAM
            +--------------+                                     |  (outside)       |
                                                                 +------------------+
                                                                          | 512-bit beats
                                                                          v
  act_sram ---x[col]--> delay 3 --+        +-----------------------------------------+
    ^                             |        | ddr_resp_if: register, tag col/tile/    |
    |                             |        | first/last                              |
    |                             |        +-----------------------------------------+
    |                             |              | SeedLM records          | FP16 weights (bypass)
    |                             |              v                         v
    |                             |   lfsr_weight_decompress (16 x block decoder)   delay 4
    |                             |              v                         |
    |                             |   128 x fix2fp16 (pre-MAC)             |
    |                             |              v                         v
    |                             +------> mac_array (128 lanes, x broadcast) <-- mux by mode
    |                                            v
    +------ row write (masked, rotated) <-- 128 x fix2fp16 (output)
```

**Tiles.** Each MAC lane owns one output row. In every cycle one input column j is processed.
x[j] is read from the SRAM and broadcast to all lanes, and each lane receives its own weight
W[row][j]. A *tile* is the group of rows computed together. It is 128 rows in SeedLM mode and
32 rows in bypass mode, because a beat carries only 32 FP16 weights, so lanes 32..127 get zero
weights. A tile takes `cols` beats. Tiles run back to back, and a tile's `first` beat restarts
the accumulators the cycle after the previous tile's `last` beat.

**Weight layout in DRAM.** Beats are stored tile by tile, and within a tile column by column,
starting at `w_base`. In SeedLM mode the beat for (tile t, column j) holds 16 records. Record
b covers rows 128t + 8b .. 128t + 8b + 7 of column j, so a SeedLM block runs *down* a column
of W. In bypass mode, bits 16k+15..16k of the beat hold W[32t + k][j].

**Pipeline timing.** Cycles are counted from R, the cycle a beat leaves `ddr_resp_if`:

| cycle | event |
|---|---|
| R | beat, column and tile tags valid; SRAM read of x[x_base + col] issued |
| R+1 | x available (then delayed three more cycles) |
| R+2 | decompressed fixed-point weights |
| R+4 | FP16 weights (or delayed bypass weights), x and tags meet at the MAC inputs |
| R+5 | products registered |
| R+6 | accumulators updated; after a tile's last column, `acc_valid` |
| R+8 | FP16 results; one masked SRAM row write at y_base + tile·tile_rows |

The datapath never stalls. If DDR delivers a beat every cycle, the engine takes one cycle per
beat. A run costs beats + DDR latency + about 10 cycles.

**Result placement.** The activation SRAM is organised as rows of 128 words. A 128-row tile is
written into one SRAM row. A 32-row bypass tile starts at a lane offset of 0, 32, 64 or 96.
The controller rotates the results to that offset and masks the other lanes. For this reason
`y_base` must be a multiple of 128.

## 5. Interface of `seedlm_top`

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock; synchronous active-low reset |
| `start` | in | one-cycle pulse; samples the configuration below |
| `bypass` | in | 0: SeedLM records, 1: FP16 weights |
| `rows`, `cols` | in | matrix shape; rows a multiple of 128 (SeedLM) or 32 (bypass) |
| `w_base` | in | byte address of the first weight beat (64-byte aligned) |
| `x_base`, `y_base` | in | SRAM word addresses of x and y; y_base a multiple of 128 |
| `busy`, `done` | out | run in progress; one-cycle pulse at the end |
| `cycles` | out | cycles from the first DDR read request to the final result write |
| `ddr_req_valid/ready/addr` | out/in/out | read requests, one 64-byte beat each |
| `ddr_rsp_valid`, `ddr_rsp_data` | in | read data in request order, no backpressure |
| `host_rd_*`, `host_wr_*` | | single-word SRAM access while not busy (read data one cycle later) |

To run it, write x through the host port. Place the weights in DRAM and pulse `start`. Wait
for `done`, then read y through the host port. The number of DDR reads in flight is not
limited. The DDR side must accept the requests at its own pace with `ddr_req_ready` and return
the data in order.

Default parameters: `LANES` = 128, `K` = 16, `C` = 8, `P` = 3, `DEPTH` = 16384 SRAM words
(256 Kbit), `ADDR_W` = 32. `seedlm_pkg` holds the shared constants (512-bit beat, 40-bit
weights, 96-bit accumulator).

## 6. Performance against the published FPGA numbers

The full-size testbench runs the three published matrix sizes at default parameters. Its DDR
model has a fixed read latency of 20 cycles and never refuses a request.

| matrix | SeedLM cycles (published) | FP16 cycles (published) | speed-up (published) |
|---|---|---|---|
| 512 x 512 | 2078 (2341) | 8222 (8593) | 3.96 (3.67) |
| 1024 x 1024 | 8222 (8723) | 32798 (34201) | 3.99 (3.92) |
| 2048 x 2048 | 32798 (34331) | 131102 (136559) | 4.00 (3.98) |

The counts here are lower because the DDR model is ideal. A real DDR3 controller adds refresh,
row misses and a longer start-up, which the published counts include. The shape is the same:
one beat per cycle, and a 4x ratio once start-up cost is amortised.

## 7. What follows the published design, and what is this design's own

Taken from the published design:

* the SeedLM formula and normalisation;
* the K/C/P configuration for 4 bits per weight, the LFSR tap table and shift direction, and
  the record fields;
* 128 multipliers;
* the 64-byte beat per 200 MHz cycle;
* the FP16 bypass that uses 32 of the 128 multipliers;
* 128 pipelined fixed-to-FP16 converters ahead of the multipliers, and a "fixed point to FP16"
  stage between the multipliers and the activation SRAM;
* the block set: DDR request and response interfaces, decompression, MAC array, converter and
  activation SRAM.

This design's own choices:

* the record bit order, the DRAM beat layout and the tiling;
* computing the LFSR states in logic rather than tables;
* the reciprocal trick;
* the exact 96-bit accumulator, the rounding mode and subnormal handling;
* all pipeline depths;
* the SRAM size (16384 words) and its row organisation;
* the valid/ready and response handshakes, the controller and its host port.

The published material is inconsistent about where the converters sit. Its resource table
calls them pre-MAC and puts them on the SeedLM path only. Its block diagram draws the converter
after the multipliers. This design has both banks, and uses the one exact accumulator format
for both modes.

Departures and limits:

* The DDR3 controller and the DRAM are vendor parts and are not included. The top exposes a
  generic read port. The testbenches use `tb/ddr_model.sv`, an in-order fixed-latency model
  with optional random request refusal.
* No block RAMs are used for decompression, and resource use will differ from the published
  FPGA figures.
* Only the 4-bit configuration is supported end to end. The 3-bit configuration
  (C = 12, P = 4) needs 36-bit records, which do not pack into a 512-bit beat for 128 lanes.
  `seedlm_lfsr` and `seedlm_block_decoder` themselves are parameterised and accept other
  C, P and K.
* The reciprocal trick is accurate to 2^−(2K−2). That is 2^−30 at K = 16 but poor for small K.
  The decoder is meant for K around 16.
* The activation SRAM holds 16384 words. A product whose x and y together exceed that must be
  split by the host, as for the largest layers of 13B-and-up models.

## 8. Files

`rtl/`:

| file | contents |
|---|---|
| `seedlm_pkg.sv` | constants, tap table, LFSR step function |
| `seedlm_lfsr.sv` | 24 LFSR states after a seed, in one cycle |
| `seedlm_block_decoder.sv` | one record to 8 fixed-point weights |
| `lfsr_weight_decompress.sv` | 16 decoders per beat |
| `fix2fp16.sv` | fixed-point to FP16 converter |
| `mac_lane.sv`, `mac_array.sv` | FP16 multiply, exact accumulate, 128 lanes |
| `act_sram.sv` | activation SRAM |
| `ddr_req_if.sv`, `ddr_resp_if.sv` | DDR request generator and response tagging |
| `seedlm_ctrl.sv` | run sequencing, address generation, result placement, cycle counter |
| `delay_line.sv` | register chain used for alignment |
| `seedlm_top.sv` | the engine |

`tb/` holds one self-checking testbench per module, `tb_<module>.sv`. Each prints
`TB_RESULT checks=N failures=M`. The end-to-end tests are:

* `tb_seedlm_top`: small matrices at default parameters. It exercises both modes, mode
  switches, rotated bypass writes, single-column tiles and DDR request stalls.
* `tb_seedlm_full`: the three published sizes in both modes, with the cycle and speed-up checks
  above. It takes about 10 seconds.

Both include `tb_top_body.svh` and use the reference models in `tb_ref_pkg.sv`. Those models
are FP16 rounding in real arithmetic, a bit-serial LFSR and the weight formula.

## 9. Simulating

With Verilator 5, from the repository root:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/seedlm_pkg.sv tb/tb_ref_pkg.sv rtl/*.sv tb/ddr_model.sv tb/tb_seedlm_full.sv \
    --top-module tb_seedlm_full -Mdir obj_full
./obj_full/Vtb_seedlm_full
```

For a unit test, replace the last two files with `tb/tb_<module>.sv` and the matching top
module name. Files in `tb/` are found through `-Itb`. Testbenches that lower a parameter say so
in their header: `tb_mac_array` uses 8 lanes and `tb_act_sram` 256 words.

To change the configuration, override `K`, `C` and `P` on `seedlm_top`. `LANES / C` records of
`K + 4 + 4P` bits must fit in 512 bits, which an elaboration-time check enforces. Also update
the record layout in `tb_ref_pkg.sv` and `tb_top_body.svh`, which assume K = 16, C = 8, P = 3.
