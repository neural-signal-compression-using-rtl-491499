# RAMAN encoder: SystemVerilog for a sparse tinyML compressor of neural signals

An implant that records many neural channels produces far more data than a
low-power radio can carry. One fix is to compress each window of samples on the
implant with the encoder half of a small convolutional autoencoder. Only the
short latent code is transmitted; the decoder runs off the implant. This
repository is synthesizable RTL for such an encoder accelerator, modelled on the
RAMAN architecture. Its reference workload is the DS-CAE1 model: one window of
96 channels x 100 samples (8-bit) goes in, a 64-byte latent code comes out, and
the compression ratio is 150.

Three ideas keep the accelerator small, and the RTL is organised around them:

* **Stochastic, balanced weight pruning with regenerated indices.** Pointwise
  weights are pruned so that every 1x16 slice of the weight matrix keeps exactly
  THETA non-zeros (4, 8 or 12 for 75/50/25 % pruning). Which positions survive
  is decided by a pseudo-random sequence from tiny LFSRs. The parameter memory
  holds only the surviving values, with no index bits, and the same LFSRs
  regenerate the positions at run time.
* **Zero-activation skipping.** While an input tile is fetched, a sparsity
  engine notes which reduction rows are entirely zero. The compute loop then
  never visits those rows.
* **Input/output activation overlap.** A job's whole input tile is copied into a
  local cache before it is computed. A layer may therefore write its outputs over
  its own inputs, so the activation memory needs only the largest single tensor
  pair, not a separate input and output region per layer.

## Block map

```
             inst_wr_*                 xa_* / xp_* (load inputs+params, read latent)
                 |                          |
         +---------------+        +-------------------+
         | raman_inst_mem|        | raman_global_mem  |  activation 48 kB (bytes)
         +-------+-------+        | param 4 banks x   |  640 x 32b
                 |                +----+---------+----+
         +-------v----------+          |act      |param (4 words / cycle)
         | raman_controller |----------+         |
         +--+----+----+-----+     +----v-----+   |
            |    |    |           |raman_cache|  |   3 tile rows x 576 B
            |    |    |           +----+-----+   |
            |    |    +---------->|raman_ase |   |   non-zero row list
            |    |                +----------+   |
            |  +-v--------------+     acts       |weights
            |  |raman_lfsr_block|--idx--> +------v--------+
            |  +----------------+         |raman_pe_array |  3 x 4 PEs, 4 MACs each,
            |                             | (raman_pe x12)|  16 x 24b psum RF per PE
            |                             +------+--------+
            |                                    | psum readout
            +--------------------------->+-------v-------+
                                         |   raman_ppm   |  bias, requant, residual,
                                         +---------------+  ReLU, pooling
```

`raman_top` wires these together. All blocks share one clock and an
asynchronous active-low reset. Types and constants live in `raman_pkg`.

## How a layer is computed

The controller executes a program of layer instructions (`instr_t` in
`raman_pkg`), one instruction per layer, until an `OP_END`. The supported layers
are standard 3x3 convolution (`OP_CONV`), 3x3 depthwise (`OP_DW`), pointwise or
fully connected (`OP_PW`), average pooling and max pooling. CONV and DW use
padding 1 and stride 1 or 2.

Activations are stored as bytes in HWC order: the address of
`(y, x, c)` is `base + (y*W + x)*C + c`. A convolution-type layer runs as a
sequence of **jobs**. A job is three consecutive output pixels, one per PE row.

1. **Fill.** For each of the three pixels, every input byte it needs is copied
   into that PE row's line of the cache, indexed by the *reduction row*
   `i = tap*M + m` (for PW, `i = m`). Out-of-image taps are written as zero
   without a memory read. The sparsity engine watches the bytes. For each `i` it
   records whether any of the three lines is non-zero, and builds the list of
   rows to visit. Skipping is turned off for depthwise layers.
2. **Per group of 64 output channels** (4 PE columns x 16 RF entries):
   * *Bias*: 16 reads of the four parameter banks load 64 biases into the PPM.
   * *Clear* the psum register files.
   * *Compute*. For CONV, PW and FC, the controller takes each listed row `i`
     and spends THETA/4 cycles on it (4 for dense layers). Each cycle it reads
     one 32-bit word (four weights) from every bank; bank `c` feeds PE column
     `c`. The cache broadcasts activation `A[row][i]` to all MACs of a PE row.
     MAC `k` multiplies it by weight `k` of its column's word and adds the
     product into RF entry `idx[k]`, supplied by the LFSR block. The four
     columns thus compute 64 output channels of three pixels at once, and
     partial sums never leave the PEs.

     Depthwise layers run each tap in 4 dense cycles. MAC `k` of column `c`
     reads its own channel, `i + 16c + k`, from the cache, so a column's 16 RF
     entries are 16 channels.
   * *Write-back*: each psum is read out through the PPM and written to
     `oa_base + p*N + n`. This costs 2 cycles per output byte, or 3 when a
     residual byte is read first. RFs that hold no channel of the layer are
     passed over in one cycle.
3. Pooling layers read each window byte by byte into the PPM's pooling
   accumulator and write one byte per window and channel.

### The pruned-weight index generator

This part is the least obvious. A pointwise weight matrix `W[M][N]` is cut into
1x16 tiles: row `i`, output channels `16t .. 16t+15`. A tile is the set of
weights one PE column accumulates into its 16-entry RF for one input row. After
pruning, every tile holds exactly THETA non-zeros, and the same number is
stored for every tile. Every PE column therefore does the same amount of work
and none waits for a heavier neighbour.

The positions come from the 15-state cycle of the 4-bit LFSR
`x^4 + x^3 + 1`, starting at the layer's seed (`next = {s[2:0], s[3]^s[2]}`).
With `q = THETA/4`, the tile of row `i` uses the THETA consecutive states
starting `q*i mod 15` steps into the cycle. LFSR `k` of the four covers the
`k`-th run of `q` states, so each cycle yields four indices, one per MAC, and
the tile is done in `q` cycles. The index is the LFSR state minus one (0..14),
so within a tile all THETA indices differ.

The pattern shifts from row to row. It is computed from `i`, not from a running
count, so skipping a zero row does not change the positions used for later
rows. When a tile begins, the four LFSRs are loaded with their start states
(`raman_lfsr_block`, `load`). They then shift once per cycle (`step`). A
trained model must be pruned with exactly this rule. The testbenches contain a
direct software description of it (`tile_idx` in `tb/tb_raman_top.sv`).

Weight storage follows from this. For PW layers, bank `c` word
`w_base + (g*K + i)*q + s` holds, in bytes 0..3, the weights for MACs 0..3 at
step `s` of row `i`, for tile `4g + c`. `K` is the number of reduction rows.
CONV layers use the same layout with `THETA = 16`, `i = tap*M + m` and index
`4s + k`. DW layers store, at `w_base + (g*9 + tap)*4 + s`, the weights of
channels `64g + 16c + 4s + 0..3`. Biases are 32-bit words at
`b_base + 16g + e` in bank `c`, for channel `64g + 16c + e`. A layer's output
channel count must be a multiple of 16.

### Post-processing arithmetic

For each output, with the layer's `qmul` (16-bit unsigned) and `qshift` (0..31):

```
y   = psum + bias                                    (32-bit)
q   = sat8( (y*qmul + 2^(qshift-1)) >>> qshift )     (no rounding term if qshift = 0)
q   = sat8( q + residual )      if res_en            (residual read at res_base + p*N + n)
out = max(q, 0)                 if relu
```

Average pooling sums the window and applies the same `qmul/qshift` scaling, so
`qmul/2^qshift` should approximate `1/(kh*kw)`. Max pooling keeps the running
maximum.

### Activation overlap rules

The fill copies a whole job's input into the cache before anything is written,
and output pixel `p` of a PW layer is written only after job `p/3` has been
filled. A 1x1 layer with `N <= M` may therefore use `oa_base == ia_base`: every
byte it overwrites belongs to a pixel already fetched. For 3x3 layers, the
windows of later jobs reach back into earlier rows, so the output must not
overlap input that is still to be read. The program must place tensors so that
this holds. The DS-CAE1 program in `tb/tb_raman_dscae1.sv` is a worked example:
its peak is the 9,600-byte input plus the 38,400-byte first-layer output, which
fits in 48 kB.

## Using the top level

1. Hold `start` low. Write the program through `inst_wr_en/addr/data` (32
   entries). Write weights and biases through `xp_*` (bank, word address, 32-bit
   data). Write the input window through `xa_*`.
2. Pulse `start`. `busy` stays high until the `OP_END` instruction. `done` then
   pulses for one cycle.
3. Read the latent code through `xa_*` (read data on `xa_rdata` one cycle
   later).

The external ports take priority over the controller and must only be used
while `busy` is low. The `stat_*` outputs count total cycles, MAC cycles,
skipped zero rows and completed layers.

## Parameters and sizes

| Parameter | Default | Meaning |
|---|---|---|
| `PE_ROWS x PE_COLS`, `NMAC` | 3 x 4, 4 | PE array and MACs per PE |
| `RF_DEPTH`, `PSUM_W` | 16, 24 | psum register file per PE |
| `ACT_W`, `WGT_W` | 8, 8 | activation and weight width |
| `ACT_BYTES` | 49152 | activation memory (48 kB) |
| `PBANK_WORDS` | 640 | words per parameter bank (4 x 640 x 32b = 10 kB) |
| `MAX_I` | 576 | cache line length, i.e. the longest reduction (9 x 64 for a 64-channel 3x3 depthwise) |
| `IDEPTH` | 32 | instruction memory entries |

The PE array, precisions, RF size, THETA values and the 48 kB activation figure
follow the published design. The bank organisation, cache length, instruction
format, job schedule, requantization formula and LFSR start-state rule are this
design's own.

DS-CAE1 fits these defaults. It needs 484 words per parameter bank in the
layout above (3,952 weight bytes and 384 biases), a peak of 48,000 activation
bytes, and a longest reduction of 576. DS-CAE2 (one fewer 64-channel block) also
fits: 352 words per bank, and 536,254 cycles per window. The MobileNetV1-based encoders do not: even the 0.25x model needs about
76 kB of pruned parameters.

## Performance, and where this departs from the reference design

The reference design encodes a DS-CAE1 window in 90,940 cycles (45.47 ms at
2 MHz). This RTL needs **683,333 cycles** for the same model, measured in
`tb_raman_dscae1`: 341.7 ms at 2 MHz. It meets the 50 ms real-time window from
about 14 MHz up. Only about 48,000 of those cycles do MACs. The rest goes to:

* filling tiles one byte per cycle, with no reuse of the overlapping 3x3
  windows of neighbouring jobs. Depthwise layers suffer most.
* writing back one byte every two cycles through the single byte-wide
  activation port.

Closing the gap would need a wider activation memory and a fill that keeps
window overlap between jobs. The paper gives neither its memory widths nor its
tile schedule, so both are left open here. Other simplifications:

* The cache holds activations only. Weights stream from the banks every cycle.
  Only the activation half of the reference "activation/parameter cache" is
  therefore built.
* The PE row/column routers are plain broadcast wiring plus a psum readout
  multiplexer.
* The 24-bit psums wrap on overflow. Saturation happens only in the PPM.
* Kernels are 3x3 (CONV/DW) or 1x1 (PW/FC). Pooling windows have no padding
  and step by the instruction's stride.
* The neural front end (amplifiers, ADC), the radio and the off-chip decoder are
  outside this RTL. The input window and the latent code pass through the
  activation-memory port.

## Files

* `rtl/raman_pkg.sv`: constants, `instr_t`, LFSR step function.
* `rtl/raman_lfsr_block.sv`: pruned-index generator.
* `rtl/raman_pe.sv`, `rtl/raman_pe_array.sv`: MAC units, RFs, array and readout.
* `rtl/raman_ase.sv`: activation sparsity engine (non-zero row list).
* `rtl/raman_cache.sv`: activation tile cache with broadcast and per-MAC reads.
* `rtl/raman_ppm.sv`: bias, requantization, residual, ReLU, pooling.
* `rtl/raman_global_mem.sv`: activation memory and parameter banks.
* `rtl/raman_inst_mem.sv`: program memory.
* `rtl/raman_controller.sv`: layer sequencer.
* `rtl/raman_top.sv`: top level.

## Verification

Every block has a self-checking testbench in `tb/`. Each compares the block
against an independent model written in the testbench, has a watchdog, and
prints `TB_RESULT checks=N failures=M`.

* `tb_raman_top` runs a nine-layer program at the default sizes. The layers are
  CONV stride 2, DW stride 1 and 2, PW at THETA 4/8/12, an in-place (overlapped)
  layer, a residual with ReLU, average and max pooling, and a dense FC layer.
  All used activation memory is compared with a behavioural model that rebuilds
  the pruning masks from its own LFSR table. The test also counts how often each
  mechanism occurred (saturation, overlap, multi-group layers, partial jobs,
  padding, zero-row skipping, and so on) and fails if one never did.
* `tb_raman_dscae1` runs the complete DS-CAE1 encoder, then DS-CAE2, each on a
  random 96 x 100 window with random weights. It compares the latent code and
  the last pointwise layer's output bit-exactly, and checks the cycle count.
* `tb_raman_lfsr_block`, `tb_raman_pe`, `tb_raman_pe_array`, `tb_raman_ase`,
  `tb_raman_cache`, `tb_raman_ppm`, `tb_raman_global_mem` and
  `tb_raman_inst_mem` test the blocks on their own.

To run one with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl rtl/raman_pkg.sv rtl/raman_top.sv \
          tb/tb_raman_dscae1.sv --top-module tb_raman_dscae1 -Mdir obj
./obj/Vtb_raman_dscae1 +verilator+rand+reset+2
```

Verilator finds the other modules through `-Irtl`; `-Wno-fatal` keeps its
width warnings about the testbenches' integer arithmetic from stopping the build. For a block testbench,
replace the top file and module names, e.g. `rtl/raman_ppm.sv` with
`tb/tb_raman_ppm.sv`.
