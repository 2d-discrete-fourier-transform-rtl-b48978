# 2D FFT with simultaneous edge-artifact removal (OPSD)

A 2D discrete Fourier transform assumes the image repeats periodically. Real
images do not: the left edge does not match the right edge, nor the top the
bottom. The jumps show up in the spectrum as a bright cross through the origin
(edge artifacts). This design computes, for an N x N image, the 2D DFT of the
image's *periodic component* instead, so the cross is gone. It does this at
the same time as the ordinary 2D FFT and with little extra work.

The method is periodic-plus-smooth decomposition (PSD). Any image I splits into
I = P + S, where P is periodic (no edge jumps) and S is smooth. The spectrum of
S can be written directly from the image border alone:

* Build the *boundary image* B. It is zero except on the border. On the
  border it holds the jump between opposite edges: for example
  B(1,j) = I(N,j) - I(1,j) and B(N,j) = -B(1,j) for the rows, and likewise
  for the columns, with both terms added at the corners.
* Transform B: Bhat = 2D DFT of B.
* Divide: Shat(s,t) = Bhat(s,t) / (2cos(2 pi s/N) + 2cos(2 pi t/N) - 4),
  with Shat(0,0) = 0.
* Subtract: Phat = Ihat - Shat.

Done naively, this needs a second full 2D FFT, of B. The *optimized* PSD
(OPSD) saves most of it. B's columns are almost all alike. Interior column j
holds only b(1,j) at the top and -b(1,j) at the bottom. Its 1D DFT is therefore
b(1,j) times one fixed vector:

    nu_s = 1 - exp(+i 2 pi s/N) = (1 - cos(2 pi s/N)) - i sin(2 pi s/N)

The first column needs a real FFT, Bhat1 = FFT(B(.,1)). The last column is
-Bhat1 + (b(1,1) + b(1,N)) * nu, because of the corners. So the whole column
pass of B costs **one** 1D FFT plus one complex multiply per element. Only
the row pass of B needs N real FFTs. The host sends just two vectors of B per
frame, not the whole B.

## Data flow and phases

```
 host ──16b──> dma_fifo(h2f) ──> control_unit ──> external memory (region 0: image)
                                    │  └──> boundary_bram: B(.,1), B(1,.)
 COL    ext mem ─> local_memory(read) ─> image FFT core ─> local_memory(write) ─> ext mem region 1
        boundary_bram B(.,1) ─> boundary FFT core ─> boundary_bram Bhat(.,1)
 ROW    ext mem region 1 ─> local_memory(read) ─> image FFT core ──┐
        boundary_bram ─> nu_synth ─> boundary FFT core ────────────┴> psd_combine ─> local_memory(write) ─> region 0
 UNLOAD ext mem region 0 ─> dma_fifo(f2h) ─32b─> host
```

`opsd_fft2d` (the top) runs one frame in four phases. The phase is shown on
its `phase` output.

| phase  | what happens | cycles (ideal) |
|--------|--------------|----------------|
| LOAD   | N*N pixels go to external memory, row-major, at word 0 (region 0). Then N words of B(.,1) and N words of B(1,.) go to block RAM. | N*N + 2N |
| COL    | Image column FFTs: column j is read from region 0 (addresses i*N + j). It is transformed and written to region 1 at s*N + j, so region 1 holds the column spectra row-major. Meanwhile the boundary core transforms B(.,1), and the result Bhat1 goes back to block RAM. | N * (2N + log2(N)*N/(2*BFLY)) |
| ROW    | Rows of region 1 are read in order, and the image core does the row FFTs. In lockstep, `nu_synth` rebuilds row s of B's column spectrum. The boundary core row-transforms it. `psd_combine` takes both row spectra, forms Phat and writes it to region 0. | same as COL |
| UNLOAD | Region 0 is read in order and streamed to the host. | N*N |

At N = 512 and BFLY = 4 the ideal total is 2,163,712 cycles per frame. The
full-size simulation, with random memory stalls and random host stalls,
takes about 2.31 M cycles.

## Blocks

| module | role |
|--------|------|
| `opsd_pkg` | phase enum; integer Taylor-series sin/cos used to build every twiddle, nu and cosine table at elaboration |
| `butterfly` | radix-2 DIT butterfly, (a ± w*b)/2 with rounding and saturation |
| `fft1d_ilut` | N-point iterative in-place FFT core; each stage runs BFLY butterflies per cycle (inner-loop unrolling) |
| `dma_fifo` | two FIFOs: host→FPGA (16-bit words), FPGA→host (32-bit results) |
| `sync_fifo` | first-word-fall-through FIFO used by the two above |
| `local_memory` | read part (FIFO OUT, with credit accounting for reads in flight) and write part (FIFO IN) between external memory and the image core |
| `boundary_bram` | B(.,1), B(1,.) and Bhat(.,1), each with a synchronous read port |
| `nu_synth` | streams B's column spectrum row by row from Bhat1, B(1,.) and the nu table |
| `psd_combine` | denominator from a cosine table, divider, Phat = Ihat - Shat, saturation flag |
| `control_unit` | phase sequencer, external memory address generator and arbiter (writes before reads), DMA credit in UNLOAD |
| `opsd_fft2d` | top; two FFT cores (image and boundary) plus the blocks above |

### FFT core (`fft1d_ilut`)

The core takes N samples on a valid/ready stream. It stores each at its
bit-reversed address in a register array. It then runs log2(N) stages, and
each stage takes N/(2*BFLY) cycles. The twiddle of butterfly k in stage p is
W^((k mod 2^p) * N/2^(p+1)). Results leave in natural order. From the last
input to the first output takes log2(N)*N/(2*BFLY) + 1 cycles. Load, compute
and unload do not overlap. Each stage halves its outputs, so the result is
DFT/N, and a full 2D pass gives DFT/(N*N). No input can overflow this way.

### Number formats

| signal | format |
|--------|--------|
| pixels, image spectrum, results | 16-bit two's complement Q1.15, {imag, real} in 32 bits |
| boundary vectors from the host | 16-bit Q1.15 |
| boundary path (core, nu_synth, Bhat) | BDW = 32 bits, Q1.31 |
| image twiddles | Q2.16 (18 bits); boundary twiddles Q2.30 (32 bits) |
| nu | Q2.30 in 33 bits (its real part reaches 2.0) |
| cosine table / denominator | Q2.28 / Q4.28 |

The boundary path is wider because Shat is Bhat divided by a denominator. Near
(0,0) that denominator is as small as about (2 pi/N)^2. So Bhat's rounding
error is multiplied by up to about N^2/40 (about 6600 at N = 512). With 32 bits,
the end-to-end error stays within a few LSB of Q1.15.

`psd_combine` computes q = (Bhat << 28) / den in full precision. The scales
match because both spectra carry the same 1/(N*N). Then P = I - q is rounded
and saturated to 16 bits, and `sat_event` marks every saturated word. The
divider is a single combinational division with an output register. In a real
FPGA it would be pipelined.

### nu_synth

Columns are numbered from 0 here. After `row_start`, it first reads b(1,0) and b(1,N-1) (two cycles) to form the
corner coefficient. It then emits N*N words, row s outer and column j inner:

* j = 0: Bhat1(s);
* 0 < j < N-1: b(1,j) * nu_s / N;
* j = N-1: (b(1,0) + b(1,N-1)) * nu_s / N - Bhat1(s).

The 1/N matches Bhat1, which the core already delivered divided by N. It
produces one word per cycle, and the boundary core's input ready throttles
it.

### Control unit and memory port

The external memory is not part of the design. The top has a simple port for
it:

* A request (`mem_req`, `mem_we`, `mem_addr`, `mem_wdata`) is taken in a cycle
  with `mem_gnt` high.
* Read data returns later, in order, with `mem_rvalid`. Any latency is
  allowed.

The control unit never issues a read whose data could not be accepted. In
COL/ROW this is the local memory's credit; in UNLOAD it is the free space in
the FPGA→host FIFO. Write-backs from the local memory's write part have
priority over reads. The memory holds 2*N*N 32-bit words: region 0 at word 0
and region 1 at word N*N. Loaded pixels are stored as {16'b0, pixel}.

## Interface of the top

Host stream in, 16-bit words, per frame:

1. the N*N pixels, row-major;
2. then N words of B(.,1), the first column of the boundary image;
3. then N words of B(1,.), the first row.

The host computes these two vectors from the image border (the formula is
above). Results come out as N*N 32-bit words {imag, real}, row-major over
(s,t), each Q1.15 and scaled by 1/(N*N). Frames may follow back to back;
`frame_done` pulses at the end of each. Status outputs:

* `phase`;
* `sat_event`;
* `cores_busy` (boundary core, image core);
* `host_in_level`, the host→FPGA FIFO fill level.

Parameters, with their defaults: N = 512, BFLY = 4, BDW = 32,
DMA_DEPTH = 64, LM_DEPTH = 32. N must be a power of two.

## Where this departs from, or goes beyond, the source description

* **Column pass first, for both images.** The algorithm's derivation uses the
  column FFT of B, which the shortcut above describes. One sentence in the
  architecture description instead speaks of the *row-wise* FFTs of the
  boundary image being the shortcut. The two are the same by symmetry once
  rows and columns are swapped. This design follows the derivation: columns
  first, rows second.
* **Two FFT cores.** The architecture shows n parallel 1D FFT cores without a
  number. Here there is one core for the image and one for the boundary
  image, working in parallel as the description intends.
* **Shat and Phat are computed on the FPGA.** The description does not say
  where the division and subtraction happen. Here they happen in
  `psd_combine`, on the fly during the row pass, so the host receives Phat
  directly. The original image spectrum Ihat is not returned.
* **Widths.** Only the 16-bit fixed-point image precision is given. The 32-bit
  boundary path, the twiddle widths, per-stage halving, rounding and
  saturation are this design's choices.
* **Square images only** (N x N). The derivation also covers N x M.
* **No overlap between phases** or between load, compute and unload inside a
  core. This keeps the control simple. It costs about 2x against a pipelined
  core, so the published frame rate would need a faster clock or more
  overlap.
* Shat(0,0) is set to 0, since the division is undefined there.
* The local memory and the FIFOs are built from registers and flops. Depths
  are choices: DMA FIFO 64 words, local memory 32 words.

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<n>` and has a cycle watchdog.

* `tb_butterfly`: random inputs against a real-valued model (±1 LSB), and
  saturation.
* `tb_fft1d_ilut` (N = 64, BFLY = 4): random vectors and impulses against a
  floating-point DFT/N; checks the latency in cycles.
* `tb_dma_fifo`, `tb_local_memory`: scoreboards with random stalls, the fill
  level, and the credit rule against a memory model with latency.
* `tb_boundary_bram`: write and read-back of all three arrays.
* `tb_nu_synth` (N = 16): compares against the real column FFT of a full
  boundary image.
* `tb_psd_combine`: compares against a real-valued Shat and Phat over two
  frames, including a forced saturation.
* `tb_control_unit` (N = 8): FFT cores replaced by identity models. The
  image must come back unchanged. It also checks the column read order, the
  Bhat1 write-back and the row_start pulse.
* `tb_opsd_fft2d` (N = 16, BFLY = 2), `tb_opsd_fft2d_full` (top at its
  defaults, N = 512) and `tb_opsd_fft2d_1024` (N = 1024, BFLY = 4):
  * Two frames are sent back to back through a DRAM model with 6-cycle latency
    and random grant stalls, and the host stalls at random.
  * Each result word is compared with a floating-point 2D FFT of I and B,
    followed by Shat/Phat. The tolerance is 6 + 2*log2(N) LSB; the observed
    worst case is 5 LSB at N = 512 and 6 LSB at N = 1024.
  * The frame cycle count must stay within 1.6x of the ideal. Measured:
    about 2.31 M cycles per frame at N = 512 and 9.56 M at N = 1024.
  * Each mechanism must occur at least once: memory stalls, host-side
    backpressure both ways, credit stalls, Bhat1 write-back, nu words,
    saturation, and every phase.

`tb/opsd_frame_checker.sv` is the shared harness of the three top-level tests.
`tb/ext_mem_model.sv` models the external DRAM, and `tb/opsd_ref_pkg.sv` holds
the floating-point reference FFT.

## Simulating with verilator

Every module is in a file of its own name, so verilator can find it with
`-I`. For example, for the small end-to-end test:

```
verilator --binary --timing -Wno-fatal -Irtl -Itb \
    rtl/opsd_pkg.sv tb/opsd_ref_pkg.sv tb/tb_opsd_fft2d.sv --top-module tb_opsd_fft2d
./obj_dir/Vtb_opsd_fft2d
```

Use the same command for any other testbench: give its file and its name as
the top module. `opsd_ref_pkg.sv` is needed only by testbenches that import
it. The full-size test (`tb_opsd_fft2d_full`) simulates two 512 x 512 frames
(about 4.6 M cycles). It runs in well under a minute and needs about 50 MB. The 1024 x 1024
test takes about a minute and 170 MB.
Add `+verilator+rand+reset+2` to the run to start every unreset flop at a
random value.

To change the size, override `N` (and `BFLY`) on `opsd_fft2d`. The tables
(twiddles, nu, cosines) are computed at elaboration, so no data files need to
be regenerated.
