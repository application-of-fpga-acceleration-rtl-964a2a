# Streaming floating-point FFT accelerator for ADC spectrum analysis

The dynamic figures of merit of an ADC — SNR, SINAD, ENOB, THD and SFDR — are
all read off a spectrum of a captured record, and the Fourier transform is by
far the most expensive step of that calculation. This design moves the
transform into an FPGA attached to the PC over PCI Express. The host program
puts a record (a *group* of 1024 points) into a buffer in its memory; a DMA
engine on the FPGA fetches it, a pipelined single-precision FFT transforms it
at one point per clock, and the spectrum is written back into a second host
buffer, from which the host goes on to compute the ADC figures.

The architecture follows Yuan, Cao, Wang, Liu and An, *Application of FPGA
Acceleration in ADC Performance Calibration* (USTC). That description fixes
the overall structure (host read buffer → PCIe → spectrum analysis → PCIe →
host write buffer), the group size of 1024 64-bit points, floating-point
arithmetic, a pipeline of log2 N butterfly levels holding several groups at
once, and a 250 MHz clock with a bus rate of 2 GB/s, i.e. one 64-bit point per
clock. Everything below that level — number format, FFT architecture, control,
interfaces — is this design's own, and is marked as such in each file header.

```
             host memory                         FPGA (fpga_accel_top)
   +------------------------+     +-----------------------------------------------+
   | read buffer  (src_addr)|---->| dma_engine: read requests, 32-point read FIFO |
   |                        |     |        |                         ^            |
   | write buffer (dst_addr)|<----|  writes |                         | results    |
   +------------------------+     |        v                         |            |
        (PCIe core, not in        | fft_core: 10 x fft_sdf_stage -> fft_reorder    |
         this RTL: its user       +-----------------------------------------------+
         side is the rd/wr ports)
```

## Points and numbers

A point is 64 bits: a complex number made of two IEEE-754 binary32 values,
real part in bits 63:32 and imaginary part in bits 31:0 (`accel_pkg::cplx_t`).
Real ADC samples are sent with a zero imaginary part. The arithmetic units
(`fp32_add`, `fp32_mul`, and `fp32_cmul` built from them) round to nearest,
ties to even, and are bit-exact with IEEE-754 for normal numbers. They read
subnormal inputs as zero and flush results below the normal range to zero;
overflow gives infinity and invalid operations give the quiet NaN
`0x7FC00000`. They are combinational; every FFT stage registers its result,
so a stage contains a butterfly (four adders) and a complex multiplier (four
multipliers, two adders) between its input and its output register. That is a
long path: to reach 250 MHz on a real device the adders and multipliers would
have to be pipelined internally, with the stage counters shifted to match
(see *Changing the design*).

## The delay-feedback pipeline

`fft_core` is a radix-2 decimation-in-frequency FFT built as a single-path
delay-feedback (SDF) pipeline: log2 N = 10 stages in a row, each taking and
giving one point per step. Stage `s` works on blocks of `2D` points with
`D = N / 2^(s+1)` (512, 256, ..., 1) and has a D-point delay line that feeds
back into its butterfly. A counter `c` runs over the block:

* **first half** (`c < D`): the incoming point `x[c]` goes into the delay
  line. What leaves the stage is the difference the butterfly stored during
  the previous block, multiplied by the twiddle factor `W_N^(c·2^s)`.
* **second half** (`c >= D`): the butterfly meets the stored `x[c-D]` with the
  incoming `x[c]`. The sum leaves the stage at once; the difference goes into
  the delay line, to leave one half-block later.

Each block of `2D` therefore leaves as `D` sums followed by `D` weighted
differences: two independent half-size transforms, which the next stage (with
half the block length) treats in the same way. After ten stages each group has
become its spectrum in bit-reversed order. A group spends N − 1 + log2 N steps
in the stages, so while one group is still leaving the later stages the next
is already entering stage 0, and a third can be read out of the reorder
buffer at the same time.

Three details make this work with real traffic:

* **Counter phase.** A stage's counter must be at 0 when the first point of a
  group reaches it. The group reaches stage `s` after
  `sum_{j<s} (D_j + 1)` steps (each stage delays by its `D` plus its output
  register), so `fft_core` computes at elaboration the reset value `CNT_INIT`
  of each stage's counter so that it is 0 at that step.
* **Valid bits.** Every point carries a valid bit. Groups always fill whole
  blocks, so a difference that leaves in a block's first half carries the
  valid bit of the block before (`prev_valid`), and a sum carries that of the
  incoming point. Results are written into the reorder buffer only when valid.
* **Twiddle tables.** Each stage holds the `D` factors it needs, computed at
  elaboration with `$cos`/`$sin` and rounded to binary32
  (`accel_pkg::twiddle`). Stage 0 has 512 entries, the last stage one.

## Keeping the pipeline moving

All registers of all stages advance together on one clock enable, `ce`, which
`fft_core` derives each clock:

| situation | what happens |
|---|---|
| a group is being taken and `in_valid` is high | one step, point taken |
| a group is half taken and `in_valid` drops | **stall**: no step until the next point arrives |
| between groups, no input, valid points still inside | **padding**: steps with invalid points, so the last group drains out |
| between groups, input arrives during padding | padding continues until the group boundary (`in_cnt = 0`), then the group is taken |
| the pipeline is empty but not at a group boundary | **realign**: all stage counters return to their reset phase in one clock, so the next group can start at once |
| the point leaving the last stage is valid and both reorder banks are full | **back-pressure stall** |

A new group may only start at a group boundary because the stage counters are
periodic in N. `in_ready` is high exactly on the clocks where a point is
taken, and it depends on `in_valid` (as valid/ready allows; the converse would
not be allowed).

## Natural-order output

`fft_reorder` holds two N-point banks. The p-th result of a group is written at
address `bitrev(p)` of the bank being filled, while the other bank is read out
in address order as X(0) … X(N−1) with `out_last` on X(N−1). A bank is free
again once it has been read out completely. The read port is combinational
(`out_data` is the bank word at the read address), which maps to distributed
RAM or, with one more register stage, to block RAM.

## DMA engine and host side

`dma_engine` runs one *job*: a `start` pulse while idle latches `src_addr`,
`dst_addr` (byte addresses) and `n_groups`. A job of one group is the
one-group-at-a-time use; a job of several groups is the continuous stream
that keeps the FFT full. The engine

* issues one read request per point (`rd_req_valid/ready/addr`, address
  `src_addr + 8·i`), but only while requests outstanding plus points in its
  32-entry read FIFO leave room, so that read data (`rd_rsp_valid/data`, in
  request order, never refused) always fits;
* feeds the FFT from the FIFO;
* writes every result in order to `dst_addr + 8·i` (`wr_valid/ready/addr/data`);
  a write that is not accepted stalls the FFT through its output handshake;
* drops `busy` and pulses `done` after the last write.

These ports are where the PCIe endpoint's memory-request interface would
connect; the endpoint itself (a vendor hard block with its transceivers), the
host memory and the host software are outside this RTL. In a real system the
control inputs would come from registers the host writes over PCIe, and the
one-point requests would be packed into PCIe read and write transactions.

## Timing

All in one clock domain (250 MHz in the reference system). Measured in
simulation at N = 1024:

| quantity | clocks |
|---|---|
| first point taken → first result available (no stalls) | 2N + log2 N − 1 = 2057 |
| one-group job, `start` → `done`, ideal host | 3100 (12.4 µs at 250 MHz) |
| four-group job, ideal host | 6172 = 4·1024 + 2076 (one point per clock) |
| sustained rate | one 64-bit point per clock in and out = 2 GB/s at 250 MHz |

## How this relates to the published description

* The source states that a 1024-point FFT needs 4258 clocks. This pipeline
  needs 2057 clocks to the first result and 3080 to the last; what the 4258
  clocks include is not stated, so that figure is not reproduced.
* The source measured 18 µs per group on the full system, host software and
  PCIe transfers included; the 12.4 µs above covers only the FPGA side with an
  ideal host interface.
* The source speaks both of N lines working in parallel, with one group per
  butterfly level, and of a 2 GB/s FFT bus at 250 MHz. The two do not agree
  (N parallel lines would move N points per clock); this design follows the
  bus rate, one point per clock, so the levels hold parts of about two
  groups at a time rather than one group each.
* Its pipeline figure labels the outputs X(0), X(N−2), X(1), X(N−1), which is
  neither natural nor bit-reversed order; this design delivers natural order.
* The number format is not given beyond "floating point" and "64-bit points";
  the complex binary32 reading is this design's choice, and one that matches
  one point per clock at the stated 2 GB/s.
* Not built: the PCIe endpoint, host memory and host program; the suggestion
  to instantiate several FFTs, and to compute the ADC figures themselves in the
  FPGA, which the source mentions only as future work.

## Files

| file | content |
|---|---|
| `rtl/accel_pkg.sv` | point type, binary32 constants, real→binary32 rounding, twiddle factors |
| `rtl/fp32_add.sv`, `rtl/fp32_mul.sv`, `rtl/fp32_cmul.sv` | floating-point units |
| `rtl/fft_delay_line.sv` | enabled D-step delay (memory + pointer) |
| `rtl/fft_sdf_stage.sv` | one butterfly level |
| `rtl/fft_reorder.sv` | bit-reversal ping-pong buffer |
| `rtl/fft_core.sv` | the FFT pipeline and its stall / padding / realign control |
| `rtl/stream_fifo.sv` | FIFO used for read returns |
| `rtl/dma_engine.sv` | job control, read credits, writes |
| `rtl/fpga_accel_top.sv` | top level: DMA engine and FFT |
| `tb/tb_pkg.sv` | binary32→real and random-value helpers |
| `tb/host_mem_model.sv` | behavioural host memory with random latency and ready |
| `tb/tb_*.sv` | one self-checking testbench per module |

## Verification

Every testbench checks against values it works out itself, prints
`TB_RESULT checks=N failures=M`, and has a watchdog.

* `tb_fp32_add`, `tb_fp32_mul`: 20 000 random operands each, bit for bit
  against double-precision arithmetic rounded to binary32, plus zeros,
  infinities, NaN, rounding ties and flush-to-zero.
* `tb_fft_sdf_stage`: stages 0 and 1 of a 16-point FFT on a random clock
  enable, against the butterfly equations, with latency D + 1.
* `tb_fft_reorder`: natural order, `out_last`, bank-full back-pressure.
* `tb_fft_core` (N = 64): single group with exact latency check, four groups
  back to back at one point per clock, then random input gaps and output
  back-pressure; every bin against a double-precision DFT; stalls, padding,
  back-pressure and realign must all occur.
* `tb_dma_engine` (N = 16): against the host model with random latency and
  ready and an FFT stand-in; addresses, data, `busy`/`done`, no writes beyond
  the job, FIFO overflow assertion.
* `tb_fpga_accel_top`: the whole design at its default size (N = 1024) on the
  test signal `0.7 cos(2π·50 MHz·t) + sin(2π·12 MHz·t) + 0.1·noise` sampled at
  1 GS/s: a one-group job, a four-group continuous job (rate check), and a
  three-group job behind a slow host. Every bin against a DFT; the two largest
  bins must be 12 and 51 (amplitudes about 0.88 and 0.66 of N/2, the
  familiar picket-fence loss of tones between bins). It runs in well under a
  second after a build of about 15 s.

To build and run one, with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/accel_pkg.sv tb/tb_pkg.sv rtl/*.sv tb/host_mem_model.sv \
    tb/tb_fpga_accel_top.sv --top-module tb_fpga_accel_top -Mdir obj_top
./obj_top/Vtb_fpga_accel_top
```

Replace the testbench file and top name for the others. Verilator is a
two-state simulator; the data memories are not reset and are never read
before they are written with valid data.

## Changing the design

* `N` (a power of two) sets the transform size everywhere; the
  stage count, counter phases and twiddle tables follow from it.
* `RD_FIFO_DEPTH` must exceed the host's read latency in clocks for the FFT
  to run at full rate.
* Pipelining the floating-point units: the complex multiplier sits after the
  multiplexer, outside the feedback loop, so register stages can be added
  around it freely; change the `+ 1` per stage in `fft_core`'s `cnt_init` to
  the new stage latency. The butterfly adders are inside the loop (delay line
  → adder → delay line); registering them means shortening the delay line by
  the same number of steps.
* The testbenches exercise N = 16, 64 and 1024.
