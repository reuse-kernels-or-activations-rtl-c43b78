# A sparse spectral convolution engine with a per-layer dataflow

A convolution layer can be computed in the frequency domain. Each input feature
map is cut into small tiles, and each tile is turned into a K x K spectrum with a
2D FFT. The spectrum is multiplied element by element with the spectrum of each
kernel. The products are summed over the input channels, and the result goes
back through an inverse FFT. Pruned spectral kernels are sparse: with a
compression factor of 4, an 8 x 8 spectral kernel keeps 16 of its 64 weights.

Such an engine has to decide what to keep on chip, because it rarely has room
for everything:

- keep the kernels and stream the input tiles many times, or
- keep the input tiles and stream the kernels many times.

No single choice is best for every layer. This engine leaves the choice to two
numbers per layer:

- **Ns** is how many kernels are held on chip while input tiles are swept past them.
- **Ps** is how many input tiles are held while kernels are swept past them.

The partial sums of an Ns x Ps block of outputs always stay on chip until every
input channel has been added in. Only then is the block inverse-transformed and
written out. Changing Ns and Ps from layer to layer moves the engine between
the two extremes without any change to the hardware.

The second idea deals with sparsity. N' kernels work in parallel on the same
tile, and each kernel wants a different tile position in the same cycle. A
block RAM serves one read per cycle, so each input tile is stored in r identical
copies (replicas). A schedule, computed offline, groups the kernels' non-zero
weights into cycles so that each cycle needs at most r distinct positions.

## Sizes

The defaults are those of the main configuration:

| parameter | default | meaning |
|---|---|---|
| `K` | 8 | FFT size; tiles are 8 x 8 |
| `NP` (N') | 64 | kernels processed in parallel |
| `PP` (P') | 9 | tiles processed in parallel |
| `R` (r) | 10 | replicas of each input tile |
| `NS_MAX` | 512 | largest Ns; the kernel buffer holds NS_MAX/N' = 8 kernel groups |
| `PSUM_DEPTH` | 2048 | words per partial-sum bank |

The design has N' x P' = 576 complex multiply-accumulate units. Data are 16-bit
fixed point. Every value is Q8.8 (`spec_pkg::FRAC_W = 8`), and a complex value
is a pair of them (`cplx_t`). Products are shifted back by 8 bits, and sums
saturate.

## Data path

```
 input stream ─► input_streamer ─► fft2d x P' ─► input_buffer x P' (r replicas each)
                                                        │  r read addresses per cycle
 kernel stream ─► kernel_streamer ─► kernel_buffer ─────┤  (INDEX row, VALUE row)
                                                        ▼
                                   pe_array: N' x P' PEs with replica selector
                                                        │
                                              psum_buffer (N' x P' banks)
                                                        │  drained column by column
                                       psum_drain ─► fft2d (inverse) x P'
                                                        │
                                         output_writer ─► output stream
 stream_ctrl sequences all of it
```

Off-chip memory is not part of the RTL. `spec_cnn_top` has three streams, each
with a request handshake and a valid/ready data channel:

- **Input.** One request (`in_req_ch`, `in_req_tile`) asks for P' consecutive
  tiles of one channel. The answer is P'·K beats of one spatial row each (K
  samples), tile after tile.
- **Kernels.** One request (`k_req_ch`, `k_req_kernel`) asks for the schedule of
  N' kernels of one channel. The answer is one beat per schedule row, with
  `k_last` on the final row. Kernels arrive already in the frequency domain and
  already scheduled.
- **Output.** Each beat is one spatial row of a finished output tile, tagged
  `out_kernel`, `out_tile` and `out_y`. It is the real part of the inverse
  transform, 8 x 8 per tile.

The overlap-and-add of neighbouring output tiles, ReLU, pooling and fully
connected layers are left to the host. So are the choice of Ns/Ps per layer and
the offline schedule.

## The controller: which data moves when

`stream_ctrl` runs one layer, given M input channels, N kernels, P tiles, Ns
and Ps. Its states are IDLE, READ INPUT, READ KERNEL, PROC CONV, DONE CONV,
PROC IFFT, WRITE OUT and DONE. It executes this loop nest:

```
for each output block (Ns kernels x Ps tiles; tile blocks innermost)
  for each input channel m                       (one channel at a time)
    for each group of P' tiles in the block      READ INPUT      (Ps += P')
      for each group of N' kernels in the block  READ KERNEL     (Ns += N')
        play that group's schedule               PROC CONV, DONE CONV
  inverse FFT the block and write it             PROC IFFT, WRITE OUT
```

What the counters decide in DONE CONV:

- **Kernel groups remain** ("!Ns"). Go back to READ KERNEL.
- **All Ns kernels are done, tile groups remain.** Go to READ INPUT. The kernels
  already on chip are kept.
- **All Ps tiles of this channel are done.** Clear the "kernel group loaded"
  flags (the kernel buffer is flushed), move to the next channel, then go to
  READ INPUT.
- **The last channel is done** ("Ms"). Go to PROC IFFT.

After WRITE OUT the engine either starts the next block or finishes the layer.

READ KERNEL fetches a group from memory only if that group is not yet loaded
for the current channel. So, within one channel, a kernel group is fetched once
and reused by every tile group of the block. When a block has exactly one
kernel group and it is already loaded, READ INPUT goes straight to PROC CONV.

The traffic this gives per layer:

| traffic | requests | M=2, N=8, P=8, Ns=8, Ps=4 |
|---|---|---|
| input | M·(P/P')·⌈N/Ns⌉ | 8 |
| kernel | M·(N/N')·⌈P/Ps⌉ | 8 |
| schedule playbacks | M·(N/N')·(P/P') | 16 |

The third column uses the reduced test sizes (N' = 4, P' = 2), with the
formulas worked out. The testbenches check these counts. So:

- large Ns means inputs are read few times;
- large Ps means kernels are read few times;
- the price is partial-sum storage of (Ns/N')·(Ps/P')·K² words per bank.

Rules on the configuration, checked by an assertion:

- Ns, Ps, N and P are multiples of N' and P'. Pad P with zero tiles if needed.
- Ns/N' ≤ 8.
- (Ns/N')·(Ps/P')·K² ≤ `PSUM_DEPTH`.

The last block of a layer may be smaller than Ns x Ps.

## Sparse kernels: the INDEX/VALUE schedule and the replicas

This is the least obvious part of the design.

Each kernel group of each channel arrives as a list of schedule rows. One row
is one cycle of the PE array and holds:

- **INDEX**: r tile positions `rep_0 .. rep_{r-1}`. Replica j of every input
  tile is read at position `rep_j` in that cycle.
- **VALUE**, for each of the N' kernels: `valid` (does this kernel work this
  cycle), `sel` (which replica holds the position it needs) and its complex
  weight at that position.

`kernel_buffer` holds these rows for up to 8 groups, 64 rows each. It also
holds a row count per group. The VALUE part is split into N' banks, one per
kernel. When PROC CONV starts, the buffer plays one group's rows, one per
cycle. Then, in the PE array (`pe_array`):

1. The INDEX row goes, unchanged, to the r read ports of all P' input buffers.
   All tiles are processed by the same kernels at the same positions.
2. One cycle later, PE (n, p) takes the value that replica `sel[n]` of tile p
   returned. It multiplies that value by kernel n's weight.
3. The PE adds the product into its partial-sum bank at address
   `base + rep_{sel[n]}`, where `base` selects the (kernel group, tile group)
   slice of the current block.
4. Each PE (`pe`) reads the old partial sum one cycle before it writes the new
   one. In the first input channel it writes the bare product instead.

A small example with N' = 4, r = 2 and 4 non-zeros per kernel:

| cycle | INDEX (rep_0, rep_1) | kernel 0 sel | kernel 1 sel | kernel 2 sel | kernel 3 sel |
|---|---|---|---|---|---|
| 0 | (3, 3) | 0 | 0 | 1 | 1 |
| 1 | (2, 6) | 0 | 0 | 0 | 1 |
| 2 | (0, 4) | 0 | 1 | 1 | 1 |
| 3 | (1, 5) | 0 | 0 | 1 | 1 |

Reading it:

- Every kernel is busy in every one of the 4 cycles.
- Kernel 3 uses positions 3, 6, 4 and 5.
- Kernel 0 uses positions 3, 2, 0 and 1.

`tb_kernel_buffer` and `tb_pe_array` use this example, with its weights.

A schedule may have idle slots (`valid = 0`). PE utilisation is the fraction of
PE-cycles doing work, and it depends only on how well the schedule packs the
non-zeros into rows of r distinct positions. `pe_active` reports the number of
busy PEs each cycle.

A schedule row needs no more than K² = 64 entries per group. A schedule with
one position per row always exists, and the offline scheduler is expected to do
better. The schedule must not give the same kernel the same position twice in
one group. The PE assertion catches back-to-back accesses to the same
partial-sum address.

## Partial-sum layout and the drain

Bank (n, p) of `psum_buffer` stores, for kernel group g and tile group t of the
block, output tile (kernel g·N'+n, tile t·P'+p). The word address is:

```
(g · Ps/P' + t) · K² + u·K + v
```

Here (u, v) is the spectral position, row-major. After the last channel,
`psum_drain` walks the block in this order:

1. kernel group g;
2. kernel n;
3. tile group t;
4. row u.

For each step it reads K words from column n of all P' tiles. It then hands the
P' rows to the P' inverse FFT units in one beat.

Each word read during the drain is cleared in the same cycle. The next block
therefore starts from zero even at positions that no kernel of the first
channel touches. After reset, every bank is zeroed by a sweep of
`PSUM_DEPTH` cycles. A `start` that arrives during the sweep is held until the
sweep ends, so `cfg_*` must stay stable until `busy` rises.

`output_writer` collects the inverse FFT outputs in the same
order, tile by tile and row by row, and tags them.

## FFT units

`fft2d` accepts K rows. It transforms each row as it arrives, then transforms
the K columns one per cycle, then sends K rows.

- **Forward transform.** It is not scaled, so an 8 x 8 spectrum can be up to 64
  times the input. Keep inputs small enough, or scale them beforehand.
- **Inverse transform.** It divides by K² with rounding.
- **Internals.** Internal widths grow by one bit per stage (20 bits after rows,
  24 after columns). Twiddles are Q1.14 constants computed at elaboration.
- **Building block.** A combinational radix-2 K-point transform (`fft_1d`).

## Timing

All blocks are synchronous to `clk`. The reset `rst_n` is synchronous and
active low, and it clears control state only.

| step | time |
|---|---|
| input tile group | P'·K beats; the P' FFT units fill in parallel with the stream, then need K column cycles and K output cycles |
| kernel group | one beat per schedule row |
| PROC CONV | one cycle per schedule row, plus a 4-cycle pipeline tail |
| drain, per output row | K read cycles, 1 wait cycle, 1 push |

Each PROC CONV therefore applies up to N' x P' multiply-accumulates per cycle.
Loading is not overlapped with computing: the controller waits for each step to
finish before the next.

## Departures from the architecture, and limits

- **Host functions.** Overlap-and-add, activation, pooling, fully connected
  layers, the choice of Ns/Ps and the schedule itself are not in the RTL.
- **Padding.** The tile count per layer must be a multiple of P'. Layers with,
  for example, 100 tiles are run as 108, with zero tiles.
- **Chosen details.** The exact loop order, the stream formats and the
  condition for skipping READ KERNEL are design choices. So are the number
  format (Q8.8), the FFT scaling and the read-and-clear drain.
- **No overlap.** There is no double buffering. Streaming and computing take
  turns, so the latency figures of a pipelined implementation will not be met
  cycle for cycle.
- **Only M' = 1 is built.** Input channels are processed serially.

## Fitting VGG16

With K = 8 and 3 x 3 kernels, each tile carries 6 x 6 new output pixels.

| layer | tiles | Ns/N' | Ps/P' | partial-sum words per bank |
|---|---|---|---|---|
| conv1_2 (224 x 224) | 38² = 1444, padded to 1449 | 1 | 27 | 1728 |
| conv2_* (112 x 112) | 361, padded to 369 | 2 | 14 | 1792 |
| conv3_* (56 x 56) | 100, padded to 108 | 2 | 12 | 1536 |
| conv4_* (28 x 28) | 25, padded to 27 | 8 | 3 | 1536 |
| conv5_* (14 x 14) | 9 | 8 | 1 | 512 |

- Ns runs from 64 to 512, which is at most 8 kernel groups.
- Partial sums per bank stay at or below 1792 words, within the 2048 provided.
- Every VGG16 layer from conv1_2 on fits at the default sizes.

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_fft2d` | forward FFT against a floating-point DFT; inverse gives the tile back |
| `tb_input_buffer` | random reads on all r replicas |
| `tb_kernel_buffer` | the example schedule above, a random group and a 1-row group played back |
| `tb_pe` | accumulate and overwrite against a bit-exact model |
| `tb_pe_array` | the example schedule on 2 tiles, then a random schedule with idle kernels |
| `tb_psum_buffer` | PE ports, drain port, clear on drain |
| `tb_input_streamer`, `tb_kernel_streamer` | request, routing, buffer writes, completion |
| `tb_psum_drain`, `tb_output_writer` | order, addresses, tags, back-pressure |
| `tb_stream_ctrl` | fetch counts from the formulas above; each pass once; first-channel flag; the READ KERNEL skip, for four layer shapes |
| `tb_spec_cnn_top` | whole engine at N' = 4, P' = 2, r = 2 over three layers; every output row against a floating-point model |
| `tb_spec_cnn_full` | the engine at its default sizes (no parameter overrides), one layer: 2 channels, 64 kernels, 18 tiles, Ps = 18 |

The shared environment `tb_cnn_env` drives the two end-to-end tests:

- **Memory models.** It models memory with random stalls on all three streams.
- **Schedules.** It generates a random sparse kernel set (16 non-zeros of 64)
  and schedules it greedily into rows of at most r distinct positions.
- **Expected results.** It computes every expected output tile in floating
  point and compares each output row within 3 LSB.
- **Mechanism counts.** It counts each mechanism and fails the run if one never
  occurs: kernel reuse without a fetch, the READ INPUT -> PROC CONV skip, a
  channel change, a block change, idle kernel slots, stalls and output
  back-pressure.
- **Report.** It prints the PE utilisation during PROC CONV.

To run one with Verilator (the package first):

```
verilator --binary --timing --assert rtl/spec_pkg.sv $(ls rtl/*.sv | grep -v spec_pkg) \
    tb/tb_cnn_env.sv tb/tb_spec_cnn_top.sv --top-module tb_spec_cnn_top -Mdir obj
./obj/Vtb_spec_cnn_top
```

Unit tests need only the package, the RTL and their own file. The full-size
test takes about three minutes to compile and seconds to run.
