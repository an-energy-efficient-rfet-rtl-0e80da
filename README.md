# A stochastic-computing CNN accelerator with NAND/NOR-chain number generators

Stochastic computing (SC) represents a number as the density of ones in a bit
stream. A multiplier then shrinks to one gate and an adder to a bit counter.
What stays expensive is the conversion from binary to streams: every value
needs a *stochastic number generator* (SNG), which pairs a random number
source with a *probability conversion circuit* (PCC). The PCC usually
dominates the area of an SC neural network.

This design is an SC accelerator for convolutional and fully connected layers.
Its PCC is a chain of reconfigurable NAND/NOR gates. In a reconfigurable-FET
(RFET) technology such a gate takes three transistors, and one input selects
the NAND or the NOR function. The RTL here describes the logic of that chain
and of the rest of the accelerator. It does not describe transistors, and it
synthesises to ordinary cells. The architecture follows the RFET-based SCNN
accelerator of Lu, Qu, Jung, Liang and Pan ("An Energy-Efficient RFET-Based
Stochastic Computing Neural Network Accelerator"). Section 8 lists what is
taken from that paper and what this implementation decided for itself.

Default configuration:

* 8 channels (`L`), each computing one output feature map or one neuron;
* 16 MAC units per channel (`M`), each with 25 multipliers (`NIN`, a 5x5 kernel);
* 8-bit values (`W`) and 32-bit bitstreams (`K`);
* bipolar encoding;
* 9.6 kB of ping-pong buffers, plus a 128-byte output buffer.

## 1. Numbers and streams

A value is an 8-bit unsigned number `v`. A PCC turns `v` into a stream whose
bits are 1 with probability `v/256`. Activations and weights are read as
bipolar: a stream of density `p` stands for `2p-1`, so `v = 128` is zero,
`v = 0` is -1 and `v = 255` is almost +1. In this encoding the product of two
independent streams is their bitwise XNOR.

Each cycle, every SNG takes one random number from a shared 8-bit LFSR and
gives one bit per value. A tile runs for `K = 32` cycles, which gives one
32-bit stream per value.

## 2. The NAND/NOR probability conversion circuit (`rfet_pcc`)

The classic MUX-chain PCC has stages `O_i = R_i ? X_i : O_(i-1)`, with
`O_0 = 0`. `X_1` is the least significant bit of `X`, and the `R_i` are
independent fair random bits. The output is 1 with probability `X / 2^N`.

Fix `X_i` and each stage becomes a two-input gate:

* `X_i = 0` gives `O_(i-1) AND NOT R_i`;
* `X_i = 1` gives `O_(i-1) OR R_i`.

That is almost a gate whose function is chosen by a programming input. The
reconfigurable RFET gate offers exactly this choice, but between NAND (program
input 0) and NOR (program input 1). Mapping one form directly onto the other
would need extra inverters on the random inputs and on the output.

The chain used here avoids those inverters. It inverts only some of the
programming inputs:

```
stage i:  O_i = prog_i ? NOR(O_(i-1), R_i) : NAND(O_(i-1), R_i),   O_0 = 0
          prog_i = X_i, inverted when i has the same parity as N
          (N even: invert even-numbered X_i; N odd: invert odd-numbered X_i)
```

The reason is that a NAND or NOR stage computes `1 - m/2` or `(1 - m)/2`
from the probability `m` of its other input. Each stage therefore flips the
sign of everything before it. Alternating inverters on `X` undo the flips, so
bit `i` ends up with weight `2^(i-1)/2^N`:

* For even `N` the output probability is exactly `X / 2^N`.
* For odd `N` a constant `2^-N` is added. For example, `N = 3` gives
  `(X + 1)/8`.

The testbench `rfet_pcc_tb` checks both facts exhaustively. It applies every
`X` with every random number and counts the ones: `X` for N = 8, `X + 1` for
N = 3.

Converting the same value with two different random numbers gives two
different bit patterns. Converting two values with the same random number
gives streams that are strongly, but not perfectly, correlated.

## 3. Counting ones with full adders (`apc`, `rfet_full_adder`)

The accumulative parallel counter (APC) adds up the 25 product bits of a MAC
each cycle. Its only building block is the full adder. In RFET technology the
full adder is one three-input XOR gate (the sum) and one three-input majority
gate (the carry). `rfet_full_adder` keeps that split.

`apc` is recursive. An `N`-input counter consists of:

* a counter of `(N-1)/2` inputs;
* a counter of the remaining `N-1-(N-1)/2` inputs;
* a ripple of full adders that adds the two counts, taking the last input as
  carry-in.

Up to three inputs need a single full adder. For 15 inputs this gives the
textbook structure (7 + 7 + 1). For 25 it gives 12 + 12 + 1.

The same full adders build `rfet_ripple_adder` and the adder tree.

## 4. One channel

```
weight rows ─► shift_reg ─hold─► sng (RNG W) ─┐
                                              ▼
shared activation streams ───────────► M x mac (25 XNOR + apc)
                                              │ counts (5 bit)
                                   DFF stage (also delays RNG X)
                                              │
                        adder_tree (FC: sum of all M counts, 9 bit)
                                              │
                   M x b2s (PCC of the sum, PCC of "zero", both RNG X)
                                              │
                     relu_pool (OR with zero stream, OR of 4 lanes)
                                              │
                           M x s2b (count ones over K cycles)
```

* **MAC.** Lane `m` multiplies 25 activation streams by 25 weight streams
  and counts the agreeing bits: 0..25 per cycle.
* **Adder tree.**
  * In *conv mode* the tree is bypassed, and each lane is one output pixel of
    the channel's filter.
  * In *FC mode* the tree adds the 16 counts, so lane 0 carries one neuron
    with 400 inputs.
* **B2S (binary-to-stochastic).** The sum goes back into a stream for the
  nonlinear stages. Every sum is scaled to the PCC's 8 bits on one common
  scale:
  * a conv count `c` becomes `8c`;
  * an FC sum `s` becomes `s/2`.

  On that scale the bipolar zero of the sum (half the inputs agreeing) is
  always 100. Each B2S also converts the constant 100. It uses the same
  activation random number for both conversions.
* **ReLU and pooling.** The sum stream and the zero stream come from one
  random number, so they are correlated, and an OR of the two approximates
  `max(x, 0)`. This is the ReLU. Max pooling ORs the ReLU streams of lanes
  `4j..4j+3` into result `j`. Either stage can be turned off. Pooling is
  ignored in FC mode.
* **S2B (stochastic-to-binary).** Each lane counts the ones of its output
  stream over the 32 cycles. The result is `min(8 x count, 255)`, an 8-bit
  value that the next layer reads in the same offset-binary form.

Timing inside a channel: the bitstream of a tile occupies cycles `1..K` after
`hold`. The counts are registered once. `res_valid` pulses `K+1` cycles after
the first bit, and the results then hold until the next tile's first bit is
counted.

## 5. Buffers, tiles and the controller

Every buffer is organised in rows of 25 bytes, one MAC's worth of data:

| buffer | organisation | size |
|---|---|---|
| activation ping-pong (`pingpong_buf`) | 2 banks x 64 rows | 3200 B |
| weight ping-pong, one per channel | 2 banks x 16 rows | 800 B each, 6400 B in all |
| output buffer | 8 x 16 results | 128 B |

Off-chip data arrive on the `ext_*` port at 8 rows (200 B) per beat.

A **tile** is one pass of the datapath, started by one command
(`scnn_pkg::tile_cmd_t`):

| field | meaning |
|---|---|
| `a_bank`, `a_addr` | activation bank and first row; rows `a_addr..a_addr+15` feed MACs 0..15 |
| `w_bank`, `w_addr` | the same for every channel's weight buffer |
| `o_addr` | first result row, written into the *other* activation bank |
| `fc_mode`, `relu_en`, `pool_en` | datapath configuration |

The `controller` has two engines:

1. **Load.** After a command is accepted (valid/ready), the load engine reads
   one row per cycle from the activation buffer and from all weight buffers
   into the shift registers. The 16 reads take `M+1` cycles.
2. **Compute.** When a tile is loaded, the compute engine pulses `hold`. The
   shift registers copy into their hold registers, which drive the SNGs. It
   then streams `K` bits, waits for `res_valid` and pulses `cap` into the
   output buffer.

The output buffer then writes the results back, one row per cycle. Result `j`
of channel `c` sits at byte `j*L + c`, counted from row `o_addr`, and the last
row is zero-padded. Per tile this is 6 rows in conv mode, 2 rows with pooling
and 1 row in FC mode.

Writing back into the other bank is the link between layers. A later tile
can read those rows as activations.

### Pipelining

`pipe_en` chooses the flow:

* **`pipe_en = 0`: sequential.** Load, bitstream and write-back of one tile
  happen one after another. The interval between accepted commands is
  `M + K + 5 = 53` cycles plus the time the output buffer is busy writing
  back.
* **`pipe_en = 1`: pipelined.** The load engine takes the next command as soon
  as its previous tile has moved into the hold registers. Loading tile n+1
  therefore overlaps the bitstream of tile n. With the defaults the load
  (17 cycles) is shorter than the bitstream, so tiles follow every `K + 3 = 35`
  cycles.

With a short bitstream or a slow fill from off-chip memory, loads become the
limit. Four counters show where time goes:

* `perf_starve`: the compute engine is idle during a load;
* `perf_wait`: a loaded tile waits for the compute engine;
* `perf_overlap`: a load and a bitstream run in the same cycle;
* `perf_tiles`: the number of tiles completed.

The host must not start a tile that reads rows an unfinished tile is still
writing back. Wait for `busy` to fall between layers.

## 6. Top-level interface (`scnn_top`)

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock, asynchronous active-low reset |
| `ext_we`, `ext_tgt`, `ext_bank`, `ext_addr`, `ext_data[8][25][8]` | in | off-chip fill: `ext_tgt` 0 selects the activation buffer, `c+1` selects channel c's weight buffer; 8 rows from row `ext_addr` |
| `pipe_en` | in | 1 = pipelined flow |
| `cmd_valid`, `cmd_ready`, `cmd` | in/out/in | tile command handshake; hold `cmd_valid` until accepted |
| `tile_done`, `busy` | out | pulse when a tile is written back; any work in flight |
| `hr_bank`, `hr_addr`, `hr_row[25][8]` | in/in/out | read back one activation row, one cycle later |
| `perf_starve`, `perf_wait`, `perf_overlap`, `perf_tiles` | out | 32-bit counters, see section 5 |

Each LFSR advances only while a bitstream runs. Results are therefore a
deterministic function of the data and of the order of the tiles since reset.
The end-to-end testbench relies on this to check them bit for bit.

Seeds:

* the shared activation LFSR ("RNG X") starts at `E1`;
* channel `c`'s weight LFSR ("RNG W") starts at `5A + 3c`;
* the feedback polynomial is `x^8+x^6+x^5+x^4+1`.

## 7. Mapping a network

The default sizes hold the LeNet-5 layers used for MNIST. The layer sizes
below are the usual LeNet-5 ones.

* **conv1** (5x5x1 kernels, 6 maps): one tile computes 16 output pixels (or 4
  pooled ones) of 8 maps. The host lays out the 16 receptive fields as 16
  activation rows and repeats the 25 weights in each of a channel's 16 weight
  rows.
* **conv2** (5x5x6 kernels, 150 inputs per neuron): more inputs than one MAC
  has. It runs in FC mode, one neuron per channel. Unused inputs are padded
  with the bipolar zero 128. Pooling then needs its own pass.
* **FC 400-120, 120-84 and 84-10**: FC mode. The 400 inputs of the first
  layer fill the 16 x 25 multipliers exactly.

## 8. What follows the paper and what does not

Taken from the paper:

* the NAND/NOR chain PCC and its inverter rule;
* full adders as one XOR3 gate and one MAJ3 gate;
* the APC made of full adders;
* one shared random source for all activations, reused for B2S and the ReLU
  zero, and another for the weights;
* XNOR multiplication in bipolar encoding;
* OR-based ReLU and max pooling on correlated streams;
* the channel order SNG, MACs, DFF, selectable adder tree, B2S,
  ReLU/pooling, S2B;
* ping-pong buffers, activation and weight shift registers and an output
  buffer that feeds the next layer;
* the sizes: 8 channels, 16 MACs of 25 inputs, 8-bit values, 32-bit streams;
* the idea of overlapping loads with bitstream computation.

This design's own choices, where the paper gives no detail:

* the LFSR polynomial and seeds; every PCC of one SNG uses the same random
  number, with no bit shuffling;
* the scaling into and out of the streams (B2S input `sum*256/512`, zero
  reference 100, S2B output `min(8 x count, 255)`);
* the adder tree only sums all 16 MACs or none; no partial groupings;
* the mapping of MAC lanes to output pixels and of pooling windows to lanes
  `4j..4j+3`;
* the row organisation of the buffers, their sizes (9.6 kB plus 128 B for the
  paper's "10 kB") and the off-chip port of 8 rows per beat (the paper quotes
  224 B/ns from GDDR5);
* the command format, the handshake, the result layout and the performance
  counters;
* pipelining as a run-time switch between a sequential flow and a
  load/compute overlap.

The paper's analysis of the pipelining distinguishes non-pipelined,
partially pipelined and fully pipelined layers. It also staggers groups of
neurons by one load cycle each. This RTL has a single group of MACs and
overlaps only at tile level, so the finer stagger is not modelled.

Not in the RTL:

* the RFET transistor-level cells and their electrical behaviour;
* the off-chip GDDR5 memory, which sits outside the `ext_*` port;
* any host or network scheduler. Tiles are issued by whatever drives the
  command port.

## 9. Simulating

Every module has a self-checking testbench in `tb/<module>_tb.sv`. Each one
ends by printing `TB_RESULT checks=<n> failures=<n>`. For example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/scnn_pkg.sv tb/scnn_top_tb.sv --top-module scnn_top_tb -o sim
./obj_dir/sim
```

`scnn_top_tb` runs the whole accelerator at its default size. It fills all
buffers, then runs these tiles:

* conv with ReLU and pooling, plain conv, and FC with ReLU, one after another;
* four pipelined conv tiles;
* a second-layer tile that reads results written back by the earlier tiles.

It compares every byte read back with a bit-exact model of the datapath. It
also checks the 35-cycle pipelined tile interval and that every mode and
every counter occurred. The build takes about three minutes, and the run
takes seconds.

The block testbenches check the following:

* the PCC and B2S against exhaustive probability counts;
* the LFSR for maximum period;
* the counters against population counts;
* the channel bit-exactly, including the `K+1` result latency;
* the controller's cycle-exact sequencing in both flows.

## 10. Files

| file | contents |
|---|---|
| `rtl/scnn_pkg.sv` | sizes and the tile command type |
| `rtl/rfet_full_adder.sv`, `rtl/rfet_ripple_adder.sv` | XOR3/MAJ3 full adder, ripple adder |
| `rtl/apc.sv` | recursive full-adder parallel counter |
| `rtl/lfsr_rns.sv`, `rtl/rfet_pcc.sv`, `rtl/sng.sv` | random source, NAND/NOR PCC, SNG bank |
| `rtl/mac.sv`, `rtl/adder_tree.sv`, `rtl/adder_tree_sum.sv` | XNOR MAC, selectable adder tree |
| `rtl/b2s.sv`, `rtl/relu_pool.sv`, `rtl/s2b.sv` | stream conversion and nonlinear stages |
| `rtl/shift_reg.sv`, `rtl/pingpong_buf.sv`, `rtl/output_buffer.sv` | storage |
| `rtl/channel.sv`, `rtl/controller.sv`, `rtl/scnn_top.sv` | channel, sequencer, top level |
