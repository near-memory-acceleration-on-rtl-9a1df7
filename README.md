# A near-memory 2D FFT engine for radio-astronomy imaging

Image-domain gridding, a radio-astronomy imaging algorithm, turns
measured visibilities into a sky image. Most of its steps run close to a
processor's peak, but the 2D FFT over the whole grid does not. The grid is
4096 to 32768 points on a side, with 64-bit complex samples. Its FFT makes
few operations per byte and is bound by memory bandwidth on a CPU, and the
CPU's share of the run time grows with the image size. The remedy studied in
"Near Memory Acceleration on High Resolution Radio Astronomy Imaging" is to
do the 2D FFT next to the memory, on an FPGA. There an *Access Processor*
(AP) controls every memory access and feeds a set of 1D FFT accelerators.
It does so in an order that keeps the memory busy all the time. The 2D FFT
then runs at the speed of the memory port and no slower.

This repository gives SystemVerilog RTL for that engine: the Access
Processor's schedule, its on-chip transpose buffer, its programmable address
mapping and the 1D FFT accelerators. It also has self-checking testbenches.
The paper describes the engine at block level. Wherever it gives no details
(number formats, FFT internals, protocols, the number of accelerators), this
RTL makes its own choices. The comment at the head of each file says which
parts are which. The main departures are collected at the end.

## The idea: two passes, each one transposing as it writes

A 2D FFT is a 1D FFT along every row followed by a 1D FFT along every column.
In row-major memory, reading a column means one access per sample, and each
access fetches a whole wide vector of which a single sample is used. The engine
avoids column reads altogether. Every read is a row read, and the transposes
are built into the writes:

```
source --row FFTs, write transposed--> temporary --row FFTs, write transposed--> destination
```

The second pass reads rows of the temporary matrix, which are columns of the
original. Its transposed write puts the result back in the source's
orientation. The destination therefore holds the 2D FFT of the source, laid
out the same way.

A memory access is a 256-bit vector, which holds **K = 4** samples. A
transposed write can only fill a whole vector if it has K samples that are
adjacent in the *transposed* matrix. Those are K samples of one column, taken
from K consecutive rows. So the engine processes the matrix in *groups* of K
consecutive rows:

1. Read rows `gK .. gK+3`. They are contiguous in memory: N vectors starting
   at `base + g*N`.
2. Transform each row in its own accelerator.
3. Collect the four results in the transpose buffer, one bank per row.
4. Read the buffer column by column. Column `c` is a complete vector
   `{row gK+3, ..., row gK}` of the transposed matrix. Write it to vector
   address `c*N/K + g`.

Each pass reads and writes every vector exactly once. A whole 2D FFT
therefore moves `4*N*N/K` vectors over the memory port. For N = 4096 that is
16.8 million 32-byte transfers (537 MB). No other cost matters once the FFT
arithmetic is hidden behind the transfers.

Matrix layout (all three matrices): row-major, N/K vectors per row, and
sample `m` of a vector in bits `[64m +: 64]`. Base addresses count vectors.
Element `(r, c)` is sample `c % 4` of vector `base + r*N/4 + c/4`.

## Keeping the memory port busy

One accelerator needs `log2(N)*N/2` clocks to transform a row (one butterfly
per clock). The port moves the row in and out in `2*N/K` clocks. At N = 4096
that is 24576 clocks of work against 2048 clocks of transfer. The engine
keeps the port busy by having many rows in flight. It has **NSETS = 5 sets of
K = 4 accelerators**. Group `g` goes to set `g mod NSETS`, with row `i` of the
group in accelerator `i` of the set.

`access_processor` runs four activities at once. Each has its own counters:

| activity | runs when | does |
|---|---|---|
| load  | groups are left in this pass and the next group's set has been drained (`ld_grp < dr_grp + NSETS`) | issues the N reads of the group |
| route | read data arrives (in order) | sends each vector to the accelerator of its row; that accelerator starts computing on its last beat |
| drain | a loaded group is waiting and the transpose buffer is empty | moves the group's four results into the buffer, which frees the set |
| write | the buffer holds a whole group | reads columns and writes them to memory |

There is one memory port, which carries reads for `load` and writes for
`write`. Writes have priority, because a full buffer holds up draining and so
the reuse of accelerators. A request that the memory does not accept is held
unchanged until it is accepted. Draining needs no memory traffic, so it
overlaps with the loading of later groups. Computation overlaps with
everything.

A pass ends only when all N/K groups have been written. The column pass
cannot start earlier, because its first group reads vector 0 of every row of
the temporary matrix, and those vectors come from every group of the row
pass. At that boundary the pipeline drains empty, which costs a few
thousand clocks per 2D FFT.

**How many accelerators are enough.** In steady state each set must finish
its row FFT, `log2(N)*N/2` clocks, by the time the other sets' groups have
gone through the port. That takes `(NSETS-1) * 2N` clocks, so the condition
is NSETS - 1 ≥ log2(N)/4. Four sets would be just enough up to N = 2^12. For
the largest size, N = 2^15, the condition needs 3.75 and so five sets, which
is the default. The paper asks only for "enough" accelerators and gives no
number.

Measured (random memory back-pressure on, in-order read latency 7 clocks):

| N | clocks for one 2D FFT | of which memory stall | transfers `4N²/K` | port busy outside stalls |
|---|---|---|---|---|
| 32   (LOG2_NMAX = 6 build) | 1 396      | 253     | 1 024      | 90% |
| 64   (LOG2_NMAX = 6 build) | 5 385      | 1 013   | 4 096      | 94% |
| 4096 (default build)       | 17 708 017 | 884 347 | 16 777 216 | 99.7% |

The paper estimates 0.05 s for a 4k 2D FFT on one HBM2 channel at 10 GB/s.
One 32-byte vector per clock equals 10 GB/s at 312.5 MHz. At that clock the
16.8 million working clocks above take 0.054 s. This is the data movement
alone, which is also what the paper's estimate counts.

## The 1D FFT accelerator (`fft1d_acc`)

Each accelerator holds one row, up to NMAX = 2^15 samples, in a local memory.
It has three phases:

* **load**: N/4 beats of four samples. Sample `i` is stored at
  `bitreverse(i)`, ready for an in-place decimation-in-time FFT.
* **compute**: `log2(N)` radix-2 stages of N/2 butterflies, one butterfly per
  clock, `log2(N)*N/2` clocks in all. The twiddle table holds
  `exp(-2πij/NMAX)` for `j < NMAX/2`, and a length-N transform reads every
  (NMAX/N)-th entry. The inverse transform conjugates the twiddles.
* **unload**: N/4 beats in natural order.

Numbers are fixed point. Real and imaginary parts are 32-bit signed integers
and twiddles are 18-bit Q2.16. Every butterfly computes `(a ± b·w) / 2` with
rounding. A transform of length N therefore returns `X[k]/N`, and the full
2D FFT returns `X[k,l]/N²`. This keeps every stage in range for inputs of up
to about ±2^29. The absolute rounding error stays within a few LSBs plus the
twiddle quantisation (2^-17 relative per stage). The testbenches hold the
engine to those bounds against a double-precision reference.

The length (`cfg_log2n`, 3 to 15) and the direction are sampled on the first
load beat, so different rows may use different sizes.

## Programmable address mapping (`addr_map`)

Every logical vector address goes through a mapping that can be changed at
run time before it reaches the memory. The mapping picks a 5-bit bank (or
channel) index from the address, starting at bit `cfg_bank_pos`. It can
optionally XOR that index with a second 5-bit field starting at
`cfg_xor_pos`, which spreads the column-order writes (stride N/K) over
banks. The bank field is then cut out of the address. What remains is the
address inside the bank, and the physical address is `{bank, local}`. The
mapping is one-to-one as long as the XOR field does not overlap the bank
field. A mapping that reduces bank conflicts is one of the AP's two key
features in the paper. This particular scheme is the RTL's own.

## Interfaces of `ap_fft2d_top`

Reset is synchronous and active low. All handshakes are valid/ready: data
moves on a clock edge where both are high.

*Host control.* This is where the CAPI/OCAPI host link would attach. Set
`cfg_log2n`, `cfg_dir` (0 forward, 1 inverse), `cfg_src_base`,
`cfg_tmp_base`, `cfg_dst_base` (vector addresses) and `cfg_bank_pos`,
`cfg_xor_en`, `cfg_xor_pos`. Then pulse `start` for one clock while `busy`
is low. `done` pulses for one clock once the destination is complete. The
temporary matrix must not overlap the other two. The destination may equal
the source, since the column pass no longer reads it (the testbenches do not
exercise this case).

*Memory port.* This is where a DDR4 or HBM2 controller would attach.
`mem_req_valid/ready` carry one request per clock: `mem_req_we`,
`mem_req_addr` (physical vector address) and, for writes, `mem_req_wdata`
(256 bits). Read data must come back in request order on
`mem_rsp_valid`/`mem_rsp_data`, one vector per clock, with any latency. There
is no back-pressure on responses: whenever read data arrives, its
accelerator is in its load phase. An assertion checks this.

Parameters: `LOG2_NMAX = 15` (largest N is 32768), `BANK_BITS = 5` (one of
32 banks or channels), `NSETS = 5` (20 accelerators). On-chip storage at the
defaults is 20 × 2 Mbit of accelerator memory plus an 8 Mbit transpose
buffer, 48 Mbit in all. The twiddle tables, one per accelerator, add
20 × 16384 × 36 bits, about 12 Mbit. Both FPGA boards the paper names have
more block and ultra RAM than that (115 and 341 Mbit).

K comes from `ACCESS_W` in `ap_pkg` (256 bits, as for one HBM2 channel). The
RTL is written for any power-of-two K, but only K = 4 has been simulated.

## Files

| file | content |
|---|---|
| `rtl/ap_pkg.sv` | sample, vector and memory-request types; K = 4 |
| `rtl/fft1d_acc.sv` | 1D FFT accelerator |
| `rtl/fft_butterfly.sv`, `rtl/twiddle_rom.sv` | its butterfly and twiddle table |
| `rtl/transpose_buffer.sv` | K-row buffer, row-wise writes, column-wise reads |
| `rtl/addr_map.sv` | programmable bank mapping |
| `rtl/access_processor.sv` | the schedule: load, route, drain, write, two passes |
| `rtl/ap_fft2d_top.sv` | AP plus 20 accelerators |
| `tb/tb_*.sv` | one self-checking testbench per block, `tb_ap_fft2d_top` end to end at a small NMAX, `tb_ap_fft2d_full` a 4096 × 4096 2D FFT at the default parameters |
| `tb/mem_model.sv` | behavioural memory: sparse, in-order, fixed latency, random back-pressure |
| `tb/acc_model.sv` | stand-in accelerator for testing the AP alone |
| `tb/tb_ref_pkg.sv` | double-precision reference FFT |

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
    rtl/ap_pkg.sv tb/tb_ref_pkg.sv tb/tb_ap_fft2d_top.sv --top-module tb_ap_fft2d_top
./obj_dir/Vtb_ap_fft2d_top
```

Substitute any other testbench name. Each testbench prints
`TB_RESULT checks=N failures=M` and has a watchdog. `tb_ap_fft2d_full`
takes about 1.5 minutes and 1.5 GB of memory. Change `FULL_LOG2N` in it to
run another size. What the testbenches establish:

* `tb_fft1d_acc`: forward and inverse transforms of 8 to 128 points are
  checked against a DFT, and compute takes exactly `log2(N)*N/2` clocks.
* `tb_transpose_buffer`: every column vector is checked after shuffled row
  writes.
* `tb_addr_map`: 4000 random addresses and mappings are checked bit by bit,
  and the inverse mapping is checked too.
* `tb_access_processor`: uses stand-in accelerators that tag each sample
  with its index. It checks the temporary and destination matrices element
  by element, the read and write counts, and that loads overlap with
  computation.
* `tb_ap_fft2d_top`: runs real 2D FFTs of 8 to 64 points, forward and
  inverse, with plain and XOR mappings. It checks the temporary (row pass)
  and final matrices against the reference, and counts that each mechanism
  happened: concurrent rows, back-pressure, the column pass, transposed
  writes, inverse mode, XOR mapping and memory-bound runs.

## How this RTL relates to the paper

Taken from the paper: the system structure (memory, Access Processor,
several 1D FFT accelerators, a host link). Also the 2D FFT as row FFTs, an
on-the-fly transpose, column FFTs and a second transpose; K = 4 samples of
64 bits per 256-bit access; buffering of K rows on chip with transposed
write-back; overlap of transfers with computation on other accelerators;
support for inverse transforms; a programmable address mapping against bank
conflicts; and sizes up to 32k × 32k.

The RTL's own choices:

* **Number format.** The samples are 32+32-bit fixed point, with a 1/2 scale
  per stage. The paper's CPU and GPU baselines use single-precision floating
  point, and the paper gives no format for the FPGA.
* **FFT internals.** The paper takes its 1D FFT from earlier work and does
  not describe it. This RTL uses a plain radix-2 core, one butterfly per
  clock, with 20 of them to hide their latency.
* **The Access Processor's control.** The paper's AP is programmable through
  a *B-FSM*, a programmable state-machine engine whose design it does not
  give. Here the schedule is fixed in hardware, so the AP is not
  programmable beyond its configuration inputs.
* **Only one memory port.** The paper's estimates include two DDR4 DIMMs and
  32 HBM2 channels used together. How the transpose would be split across
  channels is not described, so this RTL has a single 256-bit port. The bank
  index in the physical address says which bank or channel a vector belongs
  to.
* **Parts not built.** The host link (CAPI/OCAPI), the DDR4/HBM2 controllers
  and PHYs, and the memories themselves are outside the RTL. The top brings
  out plain ports where they would connect.
* **Twiddle table.** It is computed with `$cos`/`$sin` in an `initial` block.
  Simulators and most FPGA flows accept this as a ROM initialiser, but a
  flow that cannot evaluate real arithmetic needs a precomputed table
  instead.
