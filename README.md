# FineQ accelerator: 2.33-bit cluster-quantized weights on a multiplier-free PE array

Large language models lose most of their accuracy below 3 bits per weight
because a few outlier weights get clipped. FineQ's answer is to quantize
weights in tiny clusters of three neighbouring values along an input
channel. A cluster with no outlier stores three 2-bit values. A cluster whose
largest magnitude is more than four times its smallest stores its two
largest values with 3 bits and drops the smallest one to zero. A 2-bit tag
says which of the four shapes a cluster has. Neighbouring clusters share a
tag, and four tags fit in one byte, so eight clusters (24 weights) take
exactly 7 bytes: 2.33 bits per weight, always byte-aligned.

The hardware side makes use of the fact that these weights are tiny. After
decoding, a weight is a sign and a magnitude of 0..3. The magnitude is sent
to the array as a *temporal code*: a stream of up to three 1-bit pulses with
as many ones as the magnitude. A processing element (PE) then only has to
pass its stored activation or a zero. Each row's accumulator adds the
passed activations, with the weight signs applied, over the pulse cycles.
The result is a multiply-accumulate without any multiplier.

This repository holds synthesizable SystemVerilog for that accelerator. It
follows the architecture described in the FineQ paper (Xie et al.,
"FineQ: Software-Hardware Co-Design for Low-Bit Fine-Grained Mixed-Precision
Quantization of LLMs"): scratch pad, decoder unit, weight, input and output
buffers, a 64 x 64 temporal-coding PE array, a vector (SIMD) unit, a DMA on
an AXI port, and a control unit. The paper describes the decoder, encoder,
PE and accumulator in detail. For everything around them it gives little
more than block names. The section "What comes from the paper and what does
not" lists the choices made here.

## 1. The packed weight format

### Cluster shapes

| tag | meaning                                  | data bits used (6 per cluster)              |
|-----|------------------------------------------|---------------------------------------------|
| 00  | three 2-bit values                       | v0 = bits 1:0, v1 = bits 3:2, v2 = bits 5:4 |
| 01  | v0 = 0, v1 and v2 are 3-bit              | v1 = bits 2:0, v2 = bits 5:3                |
| 10  | v1 = 0, v0 and v2 are 3-bit              | v0 = bits 2:0, v2 = bits 5:3                |
| 11  | v2 = 0, v0 and v1 are 3-bit              | v0 = bits 2:0, v1 = bits 5:3                |

Every value is sign-magnitude, with the sign in the field's top bit. This
matches the per-channel symmetric scale s = |x_max| / (2^(b-1) - 1): a
2-bit value is -1, 0 or +1 and a 3-bit value is -3..+3. The decoder pads a
2-bit {s, m} to the 3-bit {s, 0, m}, so every decoded weight has the type
`wq_t = {sign, mag[1:0]}` (`rtl/fineq_pkg.sv`).

### Groups and rows

A *group* is 7 bytes (56 bits): first the tag byte, then 48 data bits. Tag i
(bits 2i+1:2i of the tag byte) covers clusters 2i and 2i+1. Cluster c sits
at bits 6c+5:6c of the data.

The decoder unit takes 8 groups at once: 64 clusters, 192 weights, 448 bits,
which is seven 64-bit words. Group g occupies bits 56g+55:56g of that
448-bit *decoder row*.

One decoder row becomes one 192-weight row of the weight buffer. The row is
read back as three 64-weight vectors, one per K-tile of the array. For that
to work, each output channel's weights are padded offline to a multiple of
192. A 4096-wide channel, for example, is stored as 4224 weights (3 %
overhead). The offline quantizer has to choose the tags and fill the zero
slots. That software step is outside this RTL.

## 2. Temporal coding and the PE array

`parallel_temporal_encoder` holds one register pair (sign, magnitude) per
column and one shared counter. On the counter's cycle t (t = 0, 1, 2),
column c carries `mag[c] > t`, so a magnitude v gives v ones, starting with
the first cycle. A stream is normally 3 cycles long. The control unit raises
`stop` on the cycle where the counter reaches the vector's largest magnitude.
A vector made only of 2-bit clusters (largest magnitude 1) therefore streams
for one cycle instead of three. This early stop is the design's main source
of speed-up on typical weights.

The array is *input-stationary*. Before a K-tile is used, every PE (r, c)
loads the activation X[k0+c][r] by shifting columns in from the left, entry
COLS-1 first. The weight vector of output channel m is then broadcast as one
bitstream wire per column. PE (r, c) outputs its activation while its
column's bit is 1, otherwise 0. The accumulator (`tc_acc`) at the end of row
r negates each output whose weight sign is 1 and adds the 64 terms with a
balanced adder tree. It adds that sum to its register on each pulse cycle.
After the stream, row r holds

    psum[r] = sum over c of w[m][k0+c] * X[k0+c][r]

as a 17-bit signed value. The paper's worked example, weights [1 1 2 2]
against a 4 x 4 input matrix, is replayed in `tb/tb_tc_pe_array.sv`. It
gives 25 21 17 23 after the first pulse and 35 29 26 37 after the second.

### Timing of one vector

| clock | what happens |
|---|---|
| n-1 | weight buffer and output-buffer row addressed (`S_WRD`) |
| n | vector loaded into the encoder (`enc_load`); stream length L = max(1, largest magnitude) computed |
| n+1 .. n+L | pulse cycles; `enc_stop` on cycle n+L unless L = 3 |
| n+L+1 | `psum_valid`; the vector unit adds the sums to the output-buffer row read at n-1 |
| n+L+2 | result row written to the output buffer |

A vector therefore takes L + 4 clocks. One output channel of one K-tile is
64 results.

## 3. One layer, stage by stage

`control_unit` runs the six stages the paper lists. Decoding overlaps the
input load. Every other stage waits for the one before it:

1. **Load**: the DMA copies the packed weights to scratch-pad word 0 upward
   and the inputs to word SPAD_DEPTH/2 upward.
2. **Decode**: seven words per decoder row are read from the scratch pad and
   fed through the 64 cluster decoders into the weight buffer. This takes 7
   clocks per row, pipelined. Decoding starts once the weights are in and
   runs while the DMA is still loading the inputs. The scratch pad has
   separate read and write ports, so the two do not collide. Preload starts
   when both have finished.
3. **Preload**, for each K-tile: 512 scratch-pad words fill the input buffer
   (taking 512 clocks), then the array takes 64 clocks to shift the tile in.
4. **Matrix multiply**, for each output channel: the array cycle of section
   2, L + 4 clocks.
5. **Vector processing**: the vector unit (`simd_unit`) adds the partial
   sums to those of earlier K-tiles in the output buffer. On the last K-tile
   it applies the activation function (identity or ReLU).
6. **Write-back**: the DMA writes the output buffer, 32 words per channel.

The loop order is K-tile outer, channel inner. Each input tile is loaded
once and used by every output channel, and the vector unit adds up across
K-tiles.

## 4. Programming interface and memory layout

`fineq_top` ports:

- **Control:** `start` (one clock, while `busy` is low). The `cfg_*` values
  are sampled at `start`:
  - `cfg_w_addr`, `cfg_x_addr`, `cfg_o_addr`: byte addresses, 8-byte aligned
  - `cfg_m`: output channels, 1..64
  - `cfg_kt`: K-tiles of 64, a multiple of 3, at most 6 at default sizes
  - `cfg_act`: `ACT_NONE` or `ACT_RELU`
- **Completion:** `done` pulses once the last output word has been
  acknowledged on AXI. `dma_err` flags a non-OKAY AXI response.
- **Event counters:** `n_early_stop` and `n_full_stream` count bitstreams
  that were stopped early and ones that ran the full three cycles.
- **AXI:** an AXI4-Lite style master with a 32-bit address and 64-bit data.
  Transfers are single beats, one outstanding at a time.

Off-chip layout (K = 64 * KT, ROWS = 64):

| data | address of element |
|---|---|
| weights, decoder row j of channel m | `cfg_w_addr + 56 * (m*KT/3 + j)`; covers weights 192j .. 192j+191 of the channel |
| inputs X[k][r], signed 8-bit | `cfg_x_addr + 64*k + r` |
| outputs O[m][r], signed 32-bit | `cfg_o_addr + 4 * (64*m + r)` |

At the defaults, one run covers 64 output channels x up to 384 inputs x 64
columns. A larger layer has to be tiled over several runs by a host:

- Channel tiles and column tiles are independent runs.
- Partial sums over more than 384 inputs are *not* added up across runs.
  The host has to add them.

For LLaMA-2 sized layers (K = 3200 .. 13824) this is the main limit of this
implementation.

## 5. Parameters

| parameter | default | from |
|---|---|---|
| `ROWS` x `COLS` (PE array) | 64 x 64 | paper (4096 PEs) |
| `N_DEC` (cluster decoders) | 64 | paper |
| bitstream length `TC_LEN` | 3 | largest 3-bit magnitude |
| activation width `ACT_W` | 8 | this design |
| accumulator width | 17 | this design (exact for 64 x 8-bit x 3) |
| result width `PSUM_W` | 32 | this design |
| `SPAD_DEPTH` | 8192 x 64 bit (64 KiB) | this design |
| `WBUF_DEPTH` | 128 rows x 192 weights | this design |
| `OBUF_DEPTH` | 64 rows x 64 x 32 bit | this design |

Constraints:

- `COLS` must be a power of two.
- `N_DEC` must be a multiple of 8.
- `3*N_DEC` must be a multiple of `COLS`.
- `ROWS*8` must be a multiple of 64.

The testbenches run the top at 8 x 8 with 8 decoders
(`tb_fineq_top`) and at the full default size (`tb_fineq_full`).

## 6. What comes from the paper and what does not

Taken from the paper:

- the cluster size of three
- the four cluster encodings and one tag byte per eight clusters
- three 3-bit outputs per cluster decoder, with zero padding and a
  register in front of the multiplexers
- the encoder built from sign and value registers, a counter, a comparator
  and a stop register
- the termination input of the encoder
- a PE that is a register and a two-way selector
- an accumulator that applies the weight signs, uses an adder tree and
  accumulates over pulses
- the 64 x 64 array and 64 decoders
- input-stationary dataflow
- the list of blocks and the six pipeline stages

Choices made here, where the paper is silent:

- Sign-magnitude bit placement inside each field, and padding 2-bit values
  in the middle ({s,0,m}).
- The order of the fields and tags inside a group, and of the groups inside
  a 448-bit decoder row.
- The index is registered together with the data. The paper's figure shows
  a register only on the data path.
- One counter is shared by all encoder lanes.
- `stop` marks the last pulse cycle. The rule that sets it, "largest
  magnitude of the vector", is also this design's.
- Channels are padded to multiples of 192 weights so that a decoder row
  splits into whole K-tiles.
- Activations are 8-bit. The paper only mentions an "8 x 2" multiplication
  as an example.
- The vector unit adds up K-tile partial sums. Of activation functions it
  implements only identity and ReLU. The paper names no function, and the
  SiLU used by LLaMA is not implemented.
- All buffer sizes, port counts and the scratch-pad split (weights low
  half, inputs high half).
- The DMA is the simplest AXI master possible: single beats, no bursts,
  no outstanding transactions.
- Only decode and the input load overlap. The paper calls the six stages a
  pipeline but does not say how they overlap.
- The configuration is given on plain ports.
- Resets are asynchronous and active-low everywhere.

Not built:

- the off-chip memory (a behavioural AXI model, `tb/axi_mem_model.sv`, is
  used in simulation)
- any bus fabric beyond the single AXI port
- the offline quantizer as a tool of its own. A testbench version of it
  is in `tb/tb_fineq_llm_tile.sv`.
- the per-channel scale factor. Outputs come out in units of the channel's
  scale s, and multiplying by s is left to the host, since the paper does
  not say where it happens.

## 7. Simulation

Each block has a self-checking testbench in `tb/`. Each ends by printing
`TB_RESULT checks=N failures=M`.

- **`tb_fineq_top`** builds a random layer in the AXI memory model. Its
  first 24 weights are the quantized example rows from the paper, tag byte
  00 10 00 11. It runs the layer with ReLU and again without, and checks
  every output against a plain integer reference. It also requires each of
  these to happen at least once:
  - all four cluster encodings
  - early and full-length streams, with counts matching a prediction from
    the weights
  - K-tile accumulation
  - ReLU clamping
  - AXI back-pressure
- **`tb_fineq_full`** does the same at the default size: 64 x 64 array,
  M = 4, K = 192. It takes about two minutes to build and under a second to
  run.
- **`tb_fineq_llm_tile`** runs, at the default size, the largest slice of an
  LLM layer that fits one run: 64 channels x K = 384 x 64 tokens. The
  testbench draws roughly normal float weights with a few outlier channels.
  It quantizes them itself: it picks a scale per channel and tests each
  cluster for an outlier (max > 4 x min). Pairs of neighbouring clusters
  share one tag, chosen by least squared error, and the tags and values are
  packed into 7-byte groups. Every output must equal the integer reference
  exactly. The testbench also prints the error of the quantized layer
  against the float product, about 0.36 relative RMS on this data.

With Verilator 5:

    verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
        rtl/fineq_pkg.sv tb/tb_fineq_top.sv --top-module tb_fineq_top
    ./obj_dir/Vtb_fineq_top

Replace `tb_fineq_top` with any other testbench name, for example
`tb_tc_pe_array` or `tb_cluster_decoder`. Verilator has only two signal
states, so every register that is read has a reset or an initial write.

## 8. Files

| file | block |
|---|---|
| `rtl/fineq_pkg.sv` | shared constants and types: `wq_t`, `cluster_enc_e`, `act_e` |
| `rtl/cluster_decoder.sv`, `rtl/decoder_unit.sv` | weight decoding |
| `rtl/scratch_pad.sv`, `rtl/weight_buffer.sv`, `rtl/input_buffer.sv`, `rtl/output_buffer.sv` | on-chip memories |
| `rtl/temporal_encoder.sv`, `rtl/parallel_temporal_encoder.sv` | bitstream generation |
| `rtl/tc_pe.sv`, `rtl/tc_acc.sv`, `rtl/tc_pe_array.sv` | the PE array |
| `rtl/simd_unit.sv` | vector unit |
| `rtl/dma.sv` | AXI DMA |
| `rtl/control_unit.sv` | sequencer |
| `rtl/fineq_top.sv` | top level |
| `tb/tb_*.sv` | one testbench per block, plus `tb_fineq_full` and `tb_fineq_llm_tile` |
| `tb/axi_mem_model.sv` | off-chip memory model |
