# FDAS: a frequency domain acceleration search pipeline in SystemVerilog

A pulsar in a binary orbit changes its apparent spin frequency during an
observation, so its power is smeared over many neighbouring frequency bins.
Frequency domain acceleration search (FDAS) undoes this smearing. The spectrum of
one de-dispersed time series is correlated with a bank of templates, one per trial
acceleration. That gives a plane of powers, the filter-output plane or FOP, with one
row per template and one column per frequency bin. Harmonics are then added up
across stretched copies of that plane, and every sum above a threshold is reported
as a candidate.

This RTL puts the whole chain on one FPGA as a three-stage pipeline working on
buffers in off-chip memory:

```
            input array (N_CHAN complex samples, written by the host)
                 |
   [1] aols_fdfir    overlap-save FIR with N_TEMP templates, one FFT engine,
                 |   power |y|^2  -> raw plane (chunks still carry overlap)
   [2] fop_prep      discard overlap and padding, transpose -> FOP (column-major)
                 |
   [3] harmonic_sum  HP_k = HP_{k-1} + SP_k for k = 1..N_HP, point by point
                 |
       cand_detect   HP_k(i,j) > TA(k,i)  -> up to N_CAND candidates per plane
```

`buffer_ctrl` runs the three stages on `N_BUF` buffers, so that consecutive input
arrays overlap in time. `mem_arbiter` gives the three stage kernels one shared port
to off-chip memory. `fdas_top` wires it all together.

The structure is the best-performing combination of a published design-space
study of FDAS on Intel Arria 10 boards. That combination is an area-efficient
overlap-save FFT filter with 2048-point chunks, a discard-and-transpose step, and
"naive multiple-harmonic-plane" summing, run with double buffering. The study's
kernels were written in OpenCL and are not public. Everything below the block
level here (arithmetic, loop orders, memory layouts, handshakes) is this design's
own. The section "Where this departs from the reference design" lists these
choices.

## Sizes

All defaults are the sizes of the reference design. Parameters of `fdas_top`:

| parameter | default | meaning |
|-----------|---------|---------|
| `N_CHAN`  | 2^21    | complex samples (frequency channels) per input array |
| `N_TAP`   | 421     | maximum FIR template length |
| `N_FFT`   | 2048    | overlap-save chunk / FFT length |
| `N_TEMP`  | 42      | templates per run: one half of the 85-row FOP |
| `N_HP`    | 8       | harmonic planes |
| `N_CAND`  | 200     | candidates kept per harmonic plane |
| `N_BUF`   | 2       | buffers (2 = double, 3 = triple buffering) |
| `H_SHIFT` | 14      | fraction bits of the template spectra |
| `P_SHIFT` | 0       | right shift applied to powers |

A full FOP has 85 rows. The reference design processes it as two halves of 42
rows, and its timings are quoted per half, so one run here is one half. The
harmonic-summing row index `i` runs 0..`N_TEMP`-1 within that half.

At the defaults each buffer takes 203,692,032 64-bit words:

| region | words |
|--------|-------|
| input array | 2,097,152 |
| spectra | 1289 chunks x 2048 = 2,639,872 |
| raw plane | 42 x 2,639,872 = 110,874,624 |
| FOP | 42 x 2^21 = 88,080,384 |

Two buffers plus the template spectra come to 3.26 GB. That fits the 8 GB of
DDR3 on the Arria 10 board the reference design used, and the addresses fit the
32-bit word address space. Triple buffering needs 4.9 GB. On-chip storage is
small: one 2048-word FFT working memory, the 8 x 200 candidate lists and the
8 x 42 threshold array.

## Overlap-save filtering with one FFT engine (`aols_fdfir`, `fft_engine`)

This is the densest part of the design.

**The chunks.** A template of `N_TAP` taps, filtered by FFT, needs chunks that
overlap by `N_TAP`-1 samples. Each `N_FFT`-point chunk therefore yields
`L = N_FFT - N_TAP + 1` valid outputs: 1628 at the defaults. So there are
`N_CHUNK = ceil(N_CHAN / L)` chunks: 1289 at the defaults.

- Chunk `c` covers input samples `c*L - (N_TAP-1)` to `c*L + L - 1`.
- Positions before sample 0 are the zero padding of the first chunk.
- Positions past `N_CHAN`-1 also read as zero.
- In the circular convolution of a chunk, output `n` is valid for
  `n >= N_TAP-1`. It is then the true filter output `y[c*L + n - (N_TAP-1)]`.

**Two phases.** The engine is time-shared, like the area-efficient kernel of
the reference design, which is launched once for the input transform and then
once per template.

1. *Forward phase.* Each chunk is loaded into the FFT engine (zeros come from
   the address check, not from memory) and transformed. Its spectrum `X_c` is
   written to the buffer's spectrum area. The input is transformed only once,
   whatever the number of templates.
2. *Filter phase.* For each template `t` and each chunk `c`, the kernel reads
   `X_c[k]` and the template spectrum `H_t[k]`. It loads
   `(X_c[k] * H_t[k]) >>> H_SHIFT` into the engine and runs the inverse
   transform. It then writes the power of all `N_FFT` outputs to the raw plane.

The template spectra are the `N_FFT`-point DFTs of the zero-padded taps, scaled
by 2^`H_SHIFT`. The host computes them once and stores them at the bottom of
memory. The overlap points stay in the raw plane. The next stage removes them.

**The FFT engine** is an in-place iterative radix-2 decimation-in-time FFT. It
does one butterfly per clock on a single `N`-word memory, reading and writing
two words per cycle.

- Samples are written in natural order to bit-reversed addresses.
- A transform takes `(N/2)*log2(N)` cycles: 11,264 at `N` = 2048.
- Twiddles are a Q1.14 cosine/sine table computed at elaboration.
- The forward transform is unscaled. Inputs must leave `log2(N)` bits of
  headroom in the 32-bit components: 11 bits at the defaults, so inputs up to
  about 2^20 in magnitude.
- The inverse uses conjugate twiddles and halves every butterfly output. It
  returns `(1/N) * sum X[k] e^{+j 2 pi k n / N}`, so filter outputs come out at
  the input's scale.

**Power.** `power_calc` forms `re^2 + im^2`, shifts it right by `P_SHIFT` and
saturates it to 32 bits. A filter output up to about 46,000 in magnitude fits
without saturation.

## From raw plane to FOP: discard and transpose (`fop_prep`)

The raw plane is template-major and chunk-major:

```
raw_base + (t*N_CHUNK + c)*N_FFT + n       n < N_TAP-1 : overlap, invalid
                                           c*L + n-(N_TAP-1) >= N_CHAN : padding
```

`fop_prep` visits the FOP column by column: column `j` is chunk `c` = `j / L`,
position `m` = `j mod L`, kept as two counters. For each column it goes through
all rows `t` and copies word `(t*N_CHUNK + c)*N_FFT + (N_TAP-1) + m` to
`fop_base + j*N_TEMP + t`. The result is the standard FOP, with invalid slices
removed, stored column-major. The harmonic summing reads down columns, so the
`N_TEMP` values of one column sit at consecutive addresses.

## Harmonic summing and detection (`harmonic_sum`, `cand_detect`)

For every point `(i, j)` of the FOP the harmonic planes are

```
SP_k(i,j) = FOP(floor(i/k), floor(j/k))        k = 1..N_HP  (SP_1 = FOP)
HP_k(i,j) = HP_{k-1}(i,j) + SP_k(i,j)          HP_0 = 0
```

A frequency `f` in plane `k` collects the power at `f`, `f/2`, ..., `f/k`. So a
signal whose harmonics fall on those bins adds up. The stretch here is an integer
division of both row and column by `k`. That is this design's reading of
"stretching the plane by integers"; the source does not give the formula.

All `N_HP` planes are formed together, point by point. No harmonic plane is ever
stored: only the FOP is read. The kernel keeps one running sum and issues
`N_HP` reads per point. It emits `HP_k(i,j)` as soon as each read returns, so
`cand_detect` gets one value per read. The order is column `j` outermost, then
row `i`, then plane `k`.

**Sharing the summing between devices.** The harmonic summing is the slowest
of the three stages. It can be shared by several boards that each run this
design on the same input array. Every board computes the whole FOP, but sums
only the columns `hm_col_lo <= j < hm_col_hi`.

- The range is an input, not a parameter, so all boards can load the same
  configuration.
- With the whole range (`0`, `N_CHAN`) a single board does all the summing.
- The kernel starts at column 0 and steps its counters one column per cycle up
  to `hm_col_lo`, without memory accesses. That takes at most `N_CHAN` cycles.
- The host merges the candidate lists of the boards.

The quotients `floor(i/k)` and `floor(j/k)` are never divided out. For each `k`
a quotient/remainder counter pair steps with `i` and another with `j`.

`cand_detect` compares each value with `TA(k, i)`, the threshold of its plane and
row, using a strict `>`.

- Each plane has a list of `N_CAND` entries `{plane, row, col, power}`, filled in
  arrival order.
- Once a list is full, further candidates of that plane are dropped and counted
  in `cand_dropped`. The lists therefore hold the first `N_CAND` candidates in
  scan order, not the strongest.
- The lists are cleared when a harmonic-summing run starts.

## Multiple buffering and the shared memory port (`buffer_ctrl`, `mem_arbiter`)

Each buffer moves through these states:

```
FREE -> FILLED -> FT_DONE -> FOP_DONE -> HM_DONE -> FREE
     host        stage 1    stage 2     stage 3   host ack
```

Each stage takes buffers in ring order. It starts on its next buffer when that
buffer is in the state the stage needs and the stage is idle. With two buffers,
the FT convolution of array n+1 runs while array n is being prepared or summed.
With three, all three stages can be busy at once. The steady-state period then
approaches the slowest stage rather than the sum of the three.

Harmonic summing also waits until the host has acknowledged the previous
results, because there is only one set of candidate lists. `buf_full_cycles`
counts cycles with no free buffer. `overlap_cycles` counts cycles with two or
more stages running.

The stages make one memory access at a time, and they share one off-chip port.

- `mem_arbiter` chooses round-robin among the waiting requests and forwards one
  to the memory.
- It queues the owner of every granted read (up to 8 outstanding) and steers
  the in-order read data back to that owner.
- When stages overlap they compete for this port. This is the global-memory
  bandwidth contention that limits the pipeline in practice.
- `mem_conflicts` counts cycles with more than one request waiting.

## Memory port, memory map and host protocol

Memory port (`fdas_pkg::mem_req_t` / `mem_rsp_t`, 64-bit words, 32-bit word
addresses):

- A master holds `valid`, `we`, `addr` and `wdata` until `gnt`. An assertion in
  `mem_arbiter` checks this.
- A read returns one `rvalid` pulse with `rdata` some cycles later, in request
  order.
- Any DDR controller with an in-order read path can sit behind the port.

Memory map:

```
0                                   template spectra H_t[k], t*N_FFT + k (cplx_t)
SLOT0 + b*SLOT_SZ                   buffer b:  input array     (N_CHAN words, cplx_t)
                    + N_CHAN                   chunk spectra   (N_CHUNK*N_FFT)
                    + N_CHUNK*N_FFT            raw plane       (N_TEMP*N_CHUNK*N_FFT, power)
                    + ...                      FOP             (N_TEMP*N_CHAN, power, column-major)
SLOT0 = N_TEMP*N_FFT
```

A complex word holds `{re[63:32], im[31:0]}`, both signed. A power word holds
an unsigned value in bits 31:0.

Host side, with the host CPU and DDR controller outside this RTL:

1. Write the template spectra, then the thresholds through `thr_we`,
   `thr_plane`, `thr_row` and `thr_value`. Set `hm_col_lo` and `hm_col_hi`:
   `0` and `N_CHAN`, or this board's share. The range is sampled when a
   harmonic-summing run starts. That is never before `res_ack` for the previous
   array, so it can be changed just before the acknowledgement.
2. For every input array: wait for `fill_ready`, write the array at
   `fill_addr`, then pulse `fill_done`.
3. When `res_valid` is set, read `cand_count[k]` and the entries through
   `cand_rd_plane` and `cand_rd_idx`. `cand_rd_data` follows one cycle later.
   Then pulse `res_ack`.

All control inputs are sampled on the rising clock edge. `rst_n` is an
asynchronous active-low reset.

## Where this departs from the reference design

- **Arithmetic.** The reference design uses single-precision floating point
  throughout. Here the samples are 32-bit fixed-point complex values, the
  twiddles are Q1.14 and the powers are 32-bit unsigned. Harmonic sums are 40
  bits. Fixed-point error is small compared with the candidate thresholds of a
  real search, but results are not bit-identical to a float implementation.
- **FFT.** The reference kernel uses a pipelined radix-4 feed-forward FFT that
  takes samples every cycle. This engine is a memory-based radix-2 FFT. It gives
  the same transform but takes 11,264 cycles per 2048 points.
- **Throughput.** Every stage makes one memory access at a time, with no
  bursts, vectorisation or parallel filters. The design shows the structure and
  the data movement of the pipeline, not the reference design's latencies. The
  reference design took about 0.57 s per half FOP on one board with double buffering, and 0.19 s with the summing shared by three boards.
- **Raw plane width.** Powers are stored one per 64-bit word. A packed layout
  would halve the raw plane and FOP.
- **Stretch, row indexing, list overflow policy, memory map, handshakes.** The
  source does not give these; the choices are described above.
- **Not included:** the host CPU, PCIe/QPI links and board DDR (outside the
  FPGA design), and the alternative methods the study compared. Those
  alternatives are time-domain FIR, single-plane and reordered-plane harmonic
  summing, and the reorder transform. Running several boards, on one shared
  array or on different arrays, is done by the host. On-chip, the only support
  is the column range of the harmonic summing.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog.

| testbench | what it checks |
|-----------|----------------|
| `tb_fft_engine` | forward and inverse transforms at N = 64 against a floating-point DFT; transform time (N/2)log2 N |
| `tb_power_calc` | re^2+im^2 and saturation against 64-bit integers; one-cycle latency |
| `tb_aols_fdfir` | every valid raw-plane point (50 channels, 5 taps, 16-point chunks, 3 templates) against direct time-domain convolution |
| `tb_fop_prep` | every FOP word from a tagged raw plane; no invalid word copied; write count |
| `tb_harmonic_sum` | every HP_k(i,j) and the output order against the definition above, 8 planes; whole plane, three column shares, empty range |
| `tb_cand_detect` | list contents, counts and dropped counts against a scoreboard, with overflowing lists |
| `tb_mem_arbiter` | three random masters: read-after-write data per master, all served, conflicts occur |
| `tb_buffer_ctrl` | stage order, buffer reuse and acknowledgement rules with double and triple buffering; overlap and full-buffer stalls occur |
| `tb_fdas_top` | end to end, 3 arrays, double buffered, reduced size (below) |
| `tb_fdas_chunk2048` | end to end, 3 arrays, default sizes except 4000 channels (below) |

`tb_fdas_top` runs the whole pipeline on three input arrays at a reduced size:
24 channels, 5 taps, 16-point chunks, 4 templates, 4 planes, 3 candidates per
plane. The templates are pure delays and the inputs are sparse impulses, so the
ideal FOP is known exactly. Thresholds at half-way values make the expected
candidate lists independent of fixed-point error.

The testbench compares every list entry, count and dropped count. It also fails
if any of the design's mechanisms never happened: a full-buffer stall of the
host, overlap of stages, memory-port contention, and candidate-list overflow.

`tb_fdas_chunk2048` runs the same flow with every default size except the
array length. It uses 2048-point chunks, 421-tap templates, 42 templates, 8
planes, 200 candidates per plane and double buffering, on 4000 channels: three
chunks, the last one padded.

- Templates are delays from 0 to 420 samples, so the full tap span is used.
- Some impulses sit on either side of a chunk boundary.
- The first array is summed over all columns.
- The second and third arrays are summed over the middle and last thirds of
  the columns, as two of three boards sharing an array would do.
- It checks all 862 candidate entries of the three arrays.
- It also requires the same stalls, overlap, contention and list overflow as
  `tb_fdas_top`.
- It needs about 14 million cycles per array, under a minute of Verilator time
  for the three arrays.

That is the largest size simulated. The time per array grows with the number of
channels. At the full 2^21 channels it would be about 7 x 10^9 cycles per array
with this one-access-at-a-time datapath, so no full-size simulation was run.
Both the FFT and the top level compile and synthesize at the default sizes.

`tb/ddr_model.sv` is a behavioural memory model, not synthesizable. It grants
requests on a pseudo-random subset of cycles and returns reads after a fixed
latency.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_fdas_top \
    rtl/fdas_pkg.sv rtl/*.sv tb/ddr_model.sv tb/tb_fdas_top.sv -o sim
./obj_dir/sim
```

Lint a module with
`verilator --lint-only -Wall -Irtl rtl/fdas_pkg.sv rtl/fdas_top.sv`.
The testbenches take their sizes from localparams at the top, so they are easy
to change.

## Files

- `rtl/fdas_pkg.sv`: widths, default sizes, memory-port and candidate types
- `rtl/fdas_top.sv`: top level and memory map
- `rtl/aols_fdfir.sv`, `rtl/fft_engine.sv`, `rtl/power_calc.sv`: FT convolution
- `rtl/fop_prep.sv`: discard and transpose
- `rtl/harmonic_sum.sv`, `rtl/cand_detect.sv`: harmonic summing and detection
- `rtl/buffer_ctrl.sv`: multiple buffering
- `rtl/mem_arbiter.sv`: memory port sharing
- `tb/`: testbenches and the memory model
