# A stable diffusion accelerator with compressed attention maps and text-guided mixed precision

Text-to-image stable diffusion runs the same UNet dozens of times per image. On a
mobile-class chip, two costs dominate each of those iterations:

- **Moving self-attention scores off chip.** A 4096-pixel latent has a 4096 x 4096
  score matrix per head and layer.
- **Full-precision FFN arithmetic.** The FFN layers run at full precision on every
  pixel, although most pixels matter little to the prompt.

This RTL describes an accelerator that attacks both costs:

1. **Patch similarity-based sparsity augmentation (PSSA).** After pruning, the score
   map's nonzero pattern repeats from one patch to its neighbour. The chip XORs each
   patch's bitmap with the neighbouring patch, which turns repeated structure into zeros.
   It then stores every patch in its own small CSR (compressed sparse row) record. The
   attention core reverses the XOR as it reads, and it skips every zero score.
2. **Text-based important pixel spotting (TIPS).** In cross-attention, every pixel
   attends to the CLIP text tokens. The first of these is the class (CLS) token.
   - Softmax makes each pixel's scores sum to one. So a pixel that attends strongly to
     the real words gives a *small* CLS attention score (CAS).
   - The chip finds the smallest CAS in the image and flags every pixel whose CAS is
     below that minimum plus a margin. Flagged pixels are the important ones.
   - Important pixels enter the next FFN as 12-bit integers. All other pixels enter as
     6-bit integers.
3. **Dual-mode bit-slice cores (DBSC).** Each processing element cuts its 12-bit input
   into two slices. Each slice is 6 bits of magnitude with a zero sign bit, and each
   feeds its own 7x8-bit multiplier. Two adder trees per column sum the two slices
   separately. The column then either shifts the high tree left by 6 and adds
   (INT12), or uses only the low slice (INT6). The array also switches between two
   stationary modes:
   - weight-stationary, for transformer layers;
   - input-stationary, for convolutions.

The design follows a published 28 nm stable diffusion processor (PSSA, TIPS and DBSC
are its terms). This RTL is an independent implementation from that description. Where
the description stops, this design makes its own choices, and they are listed below.

## Chip organisation

| Unit | RTL | Contents |
|---|---|---|
| 4 DBSC clusters | `dbsc_cluster` | 4 `dbsc` cores and an `aggregation_core` each |
| DBSC core | `dbsc` | 16x16 PE array; IMEM 6 KB, WMEM 2.25 KB, OMEM 12 KB; pass sequencer |
| PE array | `dbsc_pe_array` → `dbsc_pe_column` → `dbsc_pe` → `dbsc_bspe` | 16 columns of 16 PEs; each PE has 2 bit-slice PEs; each column has 2 adder trees (`dbsc_adder_tree`) and a bit-slice adder |
| PSXU | `psxu` → `psxu_bgu` (`psxu_big`), `psxu_rxu`, `psxu_csr_encoder` | 64 nonzero detectors, reconfigurable XOR, patch-wise CSR encoder |
| IPSU | `ipsu` | threshold register, comparator, important-index register |
| Global memory | `global_memory` | 192 KB in two banks |
| Attention core | `attention_core` (`attn_csr_decoder`) | QK dot products; score x V with CSR decode and zero skipping |
| SIMD core | `simd_core` (`simd_softmax`, `simd_mpq`, `simd_requant`) | softmax + min CAS, CAS buffer, INT12/INT6 quantizer, requantizer |
| Top | `sd_processor` | wiring along the data flow below; command ports |

`sd_pkg` holds the shared widths:

| Name | Width | Format |
|---|---|---|
| activation | 12 b | unsigned |
| weight | 8 b | signed |
| slice | 7 b | |
| product | 15 b | |
| partial sum | 24 b | |

It also holds three enums:

- `stat_mode_e`: `MODE_IS`, `MODE_WS`
- `prec_e`: `PREC_LO` = INT6, `PREC_HI` = INT12
- `patch_mode_e`: `PATCH_64`, `PATCH_32`, `PATCH_16`

It also holds the compressed column index struct `csr_col_t` = {segment, column}.

## Data flow of one denoising step

```
cross-attention:
  attention core QK ──scores──> SIMD softmax ──probabilities──> global memory
                                    │ CAS of each pixel + running min CAS
                                    v
                           CAS buffer ──(min, then CAS 0..N-1)──> IPSU
                                                                   │ index list
FFN:                                                               v
  global memory ──activations──> SIMD mixed-precision quantizer ──> dispatcher ──> IMEM
  DBSC passes (INT12 pass, INT6 pass) ──> aggregation core ──> SIMD requantizer ──> global memory

self-attention:
  pruned scores ──> PSXU ──> (CSR column stream + row pointers: ports)
  (compressed stream: ports) ──> attention core SV engine <── value rows from global memory
```

There is no top controller and no network-on-chip in the RTL. They are described
under *What is not here*. Every unit's command inputs are ports of `sd_processor`, so a
host or a testbench plays the controller's role.

## PSSA: how the score map is compressed and read back

**Input.** A pruned score row arrives at the PSXU as 64 values of 12 bits each. Pruned
values are already zero; pruning against a fixed threshold happens upstream.

**BGU.** Each of the 64 detectors ORs the 12 bits of its value in a 12→6→3→2→1 tree.
The result is a 64-bit bitmap, registered.

**RXU.** The 64-bit word is treated as four 16-bit segments. Four registers keep the
previous word. One 3:1 multiplexer per segment picks which earlier segment counts as
the "left neighbour" for the patch size in use:

| mode | patches per word | segment k is XORed with |
|---|---|---|
| `PATCH_64` | 1 | segment k of the previous word |
| `PATCH_32` | 2 | low half: upper half of the previous word; upper half: low half of this word |
| `PATCH_16` | 4 | segment k-1 of this word; segment 0: segment 3 of the previous word |

`row_start` marks the first word of a row. That word has no neighbour, so it passes
unchanged.

**CSR encoder.** For each patch row in the word, the encoder produces:

- a row pointer, which is the count of nonzeros in the earlier rows of that patch;
- the row's own nonzero count, on `rp_*` the cycle after the word is taken;
- a stream of column indices, one per cycle on `col_valid`/`col_ready`. Each index is
  {segment, column in patch}, lowest bit first.

The row pointers come from a 64-entry table of running counts, one entry per patch
position. `band_start` restarts the counts for a new band of patches.

**Back-pressure.** A word with k set bits keeps the encoder busy for max(k, 1) cycles.
During that time `sas_ready` is low.

**Decoding** happens in the attention core (`attn_csr_decoder`).

1. Beats of {has, column, last} rebuild the augmented bitmap of one word.
2. On the last beat, the XOR is undone with the same neighbour rule:
   - `PATCH_64` uses the previous decoded word;
   - the 32- and 16-wide modes chain through the segments of the word.
3. The SV engine then visits only the set bits of the decoded bitmap. For each set bit
   it does the following:
   - takes the next nonzero score value from the `val_*` stream;
   - reads the value row `V[sv_v_base + 64*word + bit]` from the global memory;
   - adds score x V into 16 32-bit accumulators.
4. After the word marked `sv_row_last`, the output row appears on `sv_out_valid` and
   the accumulators clear.

Zero scores cost no cycle and no memory read.

## TIPS: from softmax to a precision per pixel

**Softmax.** `simd_softmax` takes one pixel row of scores, one per cycle. Scores are in
signed Q8.8, and the first score belongs to the CLS token. The row takes three passes:

1. The row is buffered while its maximum is found.
2. The unit forms `2^((s - max) * log2 e)` and their sum.
3. The unit emits `p = e / sum` as unsigned Q0.12, one per cycle.

The exponential is built as `2^-n * (1 - f/2)`, where n is the integer part and f the
fraction, and log2 e is taken as 369/256. A row of L scores takes 3L + 1 cycles. The
first probability of each row is that pixel's CAS. The unit keeps the minimum CAS since
the last `sm_clear`.

**CAS buffer.** The SIMD core stores every CAS in a buffer of 4096 entries. The minimum
is only known after the last pixel. So on `cas_send` the core first sends the minimum to
the IPSU, then replays the CAS values in pixel order.

**IPSU.** `ipsu_start` clears the counts. The minimum sets `Th = min CAS + margin`. Each
replayed CAS below `Th` is important, and its pixel number goes into the index register
at address `imp_count`, which then increments. `pix_count` counts every replayed pixel.

**Mixed-precision quantizer.** `simd_mpq` handles the FFN activations of each pixel as
the global memory delivers them, in pixel order:

1. It compares the pixel number with the next entry of the index list.
2. An important pixel goes out unchanged as INT12.
3. Any other pixel goes out as `min(63, (x + 32) >> 6)`. That keeps the top 6 bits,
   rounded.
4. With `tips_en = 0`, every pixel is INT12.

The top's dispatcher writes INT12 words upward from IMEM word 0 of the selected core.
It writes INT6 words upward from `disp_lo_base`. A layer then runs as two DBSC passes,
one per precision.

## DBSC: bit slicing and the two stationary modes

**PE.** A PE receives a 12-bit unsigned activation x and an 8-bit signed weight:

- the high slice is `{0, x[11:6]}`;
- the low slice is `{0, x[5:0]}`.

Each slice is a non-negative 7-bit signed number. In INT6 passes the high slice is held
at zero, and the 6-bit code rides in the low slice.

**BSPE.** Each bit-slice PE holds an 8-bit operand in a register and multiplies 7 x 8 bits:

- in weight-stationary mode the register holds the weight;
- in input-stationary mode it holds the slice.

**Column.** A column sums the 16 left products (high slices) and the 16 right products
(low slices) in two trees. The bit-slice adder then outputs:

- `(left << 6) + right` for INT12;
- `left + right` for INT6, where left is zero.

**Core.** Each core runs a *pass* of N steps, started by `start` with a
command (`mode`, `prec`, `acc`, `wset`, `in_base`, `out_base`, `n_steps`):

- **WS pass:**
  1. The 16x16 weights of WMEM set `wset` load into the PEs.
  2. IMEM words `in_base ...` stream through, one per cycle.
  3. Step t writes, or with `acc` adds, 16 column sums at OMEM word `out_base + t`.
- **IS pass:**
  1. IMEM word `in_base` loads into the PEs.
  2. Weight sets `wset, wset+1, ...` (mod 9, for instance the 9 taps of a 3x3 kernel)
     stream through.

The memory shapes match the stated capacities exactly:

| Memory | Shape | Size |
|---|---|---|
| IMEM | 256 words x 16 x 12 b | 6 KB |
| WMEM | 9 sets x 16x16 x 8 b | 2.25 KB |
| OMEM | 256 words x 16 x 24 b | 12 KB |

OMEM accumulation saturates at 24 bits. `done` pulses N + 5 cycles after `start`. That
is N streaming cycles plus load, memory read, array, accumulate and write stages.

**Cluster.** The 4 cores of a cluster share one command. Each core has its own write
ports, selected by `core_sel`, and so works on its own slice of input channels. The
aggregation core adds the four OMEM read-outs lane by lane. The 26-bit result appears
two cycles after `agg_re`. `simd_requant` turns it back into a 12-bit activation:

- a rounding arithmetic shift by `rq_shift`;
- a clamp to 0..4095.

With `rq_to_gm` set, the result is written to the global memory at successive
addresses.

## The top, `sd_processor`

The top has these parameters, with these defaults:

| Parameter | Default |
|---|---|
| `NCLUSTER` | 4 |
| `NCORE` | 4 |
| `IMEM_DEPTH` | 256 |
| `OMEM_DEPTH` | 256 |
| `GMEM_KB` | 192 |
| `NPIX` | 4096 (a 64x64 latent) |
| `LMAX` | 128 (longest softmax row; the 77-token CLIP context fits) |

**Global memory write port.** Priority goes host (`gm_we`), then requantizer, then the
softmax packer. The packer stores 16 probabilities per word, and each row starts a new
word at `sm_gm_base` and upward.

**Global memory read port.** When `sv_active` is set, the port belongs to the
attention core. Otherwise it belongs to the host. With `gm_to_mpq`, the word read is
fed to the quantizer.

**Softmax back-pressure.** Scores must not reach a busy softmax. The host paces the QK
stream with `sm_ready`, and an assertion checks this.

## Simulating

Everything is plain SystemVerilog 2017 for verilator 5. This command runs any of the
testbenches:

```
verilator --binary --timing --assert -Irtl -Itb rtl/sd_pkg.sv tb/<tb>.sv \
          --top-module <tb> -o sim && obj_dir/sim +verilator+rand+reset+2
```

Each testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.

| Testbench | What it checks |
|---|---|
| `tb_psxu_bgu`, `tb_psxu_rxu`, `tb_psxu_csr_encoder`, `tb_psxu` | bitmaps, XOR for all three patch modes, row pointers and column order against a model; input stalls |
| `tb_ipsu` | threshold, count and index list against a model |
| `tb_dbsc_bspe`, `tb_dbsc_pe`, `tb_dbsc_pe_column`, `tb_dbsc_pe_array` | products and sums, both modes and both precisions, bit-exact |
| `tb_dbsc` | WS and IS passes, accumulate/overwrite, saturation, `done` latency N + 5 |
| `tb_aggregation_core`, `tb_dbsc_cluster`, `tb_global_memory` | aggregated sums; both banks |
| `tb_simd_core` | softmax within 10 % + 8 lsb of the exact softmax and row sums near one, 3L + 1 latency, min CAS, CAS replay, quantizer, requantizer (bit-exact) |
| `tb_attention_core` | QK scores; SV rows on compressed input in all three patch modes, with skip count and a cycle bound |
| `tb_sd_processor` | end to end at reduced size (details below) |
| `tb_sd_processor_full` | the top at its default size (details below) |

**`tb_sd_processor`** runs 2 clusters of 2 cores, 16 pixels and 4-token rows. It
takes the whole step above through the real units, then checks the result against a
model:

1. softmax rows sum to one;
2. the important count is right;
3. the HI/LO dispatch counts are right;
4. the DBSC sums of an INT12 pass and an INT6 pass are bit-exact;
5. the requantized words in the global memory are right;
6. with TIPS off, every pixel is INT12;
7. PSXU compression is below the raw nonzero count, and its input stalls;
8. the SV output with zero skipping is right.

Every mechanism is counted, and a mechanism that never happened counts as a failure.

**`tb_sd_processor_full`** leaves every parameter of the top at its default, so it
simulates 4096 PEs. It runs:

- 77-token softmax rows;
- the CAS replay into the IPSU;
- an INT12 pass on the last core of the last cluster, read back through aggregation
  and requantization into the upper global memory bank.

Its verilator build takes a few minutes.

## Departures from the described chip, and choices made here

**Chosen here; the source gives no detail:**
- **Handshakes.** Every handshake and latency is this design's:
  - valid/ready on the PSXU input and its column stream;
  - beat format of the compressed stream;
  - one column index per cycle;
  - the pass command of a DBSC;
  - 2-cycle aggregation read.
- **Number formats.** Q8.8 scores, Q0.12 probabilities and CAS, and 24-bit saturating
  partial sums are assumptions.
- **Softmax.** It uses a linear-fraction exp2, about 6 % worst-case error per term
  before normalisation, and a true divider. A silicon version would likely use a
  table or a reciprocal instead.
- **Placement.** How INT6 values sit in the PE (low slice, high slice gated) and the
  INT6 rounding rule are not given.
- **Memory shapes.** IMEM/WMEM/OMEM shapes are chosen to hit the stated byte counts
  exactly. The global memory's 16 x 12-bit word and bank-by-top-address-bit split are
  also choices.
- **RXU.** The RXU's mux input assignment is not printed, so the table above is this
  design's reading of "XOR with the horizontally adjacent patch".
- **TIPS margin.** The margin is an input. The source does not give a value.

**Simplifications at the top:**
- The units are joined point to point, not through a mesh network.
- The PSXU output and the SV engine input are separate ports: compressed scores would
  normally go off chip and come back.

## What is not here

- **Top controller.** Only its name is known, so there is no instruction set or
  sequencing. The command ports of `sd_processor` take its place.
- **2-D mesh network-on-chip.** Its routers, packet format and routing are not
  described, so the units are wired directly.
- **External interfaces.** Pads and the off-chip protocol are not described. The
  top's ports stand in for them.
- **SIMD activation functions and group normalization.** They are named as SIMD
  functions but not specified (which functions, which approximations). Only softmax,
  min CAS, mixed-precision quantization and requantization are built.
- **Energy and throughput.** Power, clock rate (250 MHz in the original) and area are
  properties of the silicon and are not modelled.

## How far to trust it

**What is verified:**
- Every block is checked in simulation against an independent model, bit-exact where
  the arithmetic is exact.
- For every block, a deliberately broken copy was shown to fail its testbench.
- Both top-level testbenches pass.

**What is not verified:**
- No model trained with this precision split was run through it.
- The softmax approximation and the INT6 rounding have not been tied to image-quality
  results.
- No timing closure was attempted. The combinational paths are plain:
  - 16-term adder trees;
  - a 64-bit priority encoder;
  - a row softmax divider.
