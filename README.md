# A streaming single-precision 3D FFT for an FPGA with on-chip cube storage

Plane-wave electronic-structure codes, such as those used for ab-initio molecular dynamics,
spend much of their time in 3D FFTs over modest cubes (16^3 to 64^3 points). This RTL computes
such a transform in IEEE single precision instead of double. It follows a published OpenCL
design for an Intel Stratix 10 board.

    F(kx,ky,kz) = sum_{x,y,z} f(x,y,z) W^(x kx) W^(y ky) W^(z kz),   W = exp(-2 pi i / N)

The transform is split into three passes of N-point 1D FFTs, one per dimension, with a transpose
between passes. The cube is read from DDR memory and the result is written back to DDR:

    fetch -> 1D FFT (x) -> 2D transpose -> 1D FFT (y) -> 3D transpose -> 1D FFT (z) -> store

Every link carries one *beat* per clock: eight complex single-precision points, 512 bits. Eight
points per cycle is the throughput of the FFT engines, so an N-point transform takes N/8 cycles.
The cube is small enough to keep on chip (64^3 points is 2 MiB), so the z-direction transpose is
also done on the FPGA. That single cube buffer is both what makes the design possible and what
limits it, as the next section explains.

## Where the time goes: the cube buffer

The 2D transpose handles one z-plane at a time. It has two plane buffers: while one is filled
with x-transformed rows, the other is read out as y-rows. At full rate it never holds up the
pipeline; it only adds one plane of latency (N*N/8 cycles).

The 3D transpose cannot do this, because its first z-row needs the last plane of the cube. Two
cube buffers would double the largest memory in the design, so there is only one. The buffer
alternates between two phases:

* **fill**: N^3/8 beats of y-rows come in while the z-pass FFT waits (status `st_t3d_wait`);
* **drain**: N^3/8 beats of z-rows go out while the input is refused.

So one transform costs about **2 x N^3/8 cycles** plus the pipeline latencies. At 64^3 the
simulated count is 66,302 cycles with an ideal memory, against 65,536 for 2 x 32,768. The fetch,
x and y passes overlap each other completely; the z pass and the store overlap each other but
not the first two passes. Removing this serialisation would be the next step to speed up the
design, and it is outside this RTL. The design runs one cube per `start` and does not pipeline
consecutive transforms.

## Data order through the pipeline

The order of the points is the hardest part to follow. Each stage writes its buffer in the
order it receives the data and reads it out in the order the next stage needs.

| link | a row is | rows arrive in order | inside a row (beat b, lane l) |
|---|---|---|---|
| DDR -> fetch -> FFT x | N points along x | y inner, z outer | x = 8b+l |
| FFT x -> 2D transpose | spectrum along x | same | kx = bitrev(8b+l) |
| 2D transpose -> FFT y | N points along y | kx inner, z outer | y = 8b+l |
| FFT y -> 3D transpose | spectrum along y | same | ky = bitrev(8b+l) |
| 3D transpose -> FFT z | N points along z | kx inner, ky outer | z = 8b+l |
| FFT z -> store | spectrum along z | same | kz = bitrev(8b+l) |
| store -> DDR | line of 8 points | natural | kx = 8*(line mod N/8) + l |

* **Memory layout.** In memory, point (x,y,z) of the input and (kx,ky,kz) of the output both sit
  at point address x + N*y + N*N*z. One 512-bit line holds eight consecutive x. `src_base` and
  `dst_base` are line addresses.
* **Bit reversal.** Each FFT takes natural order and produces bit-reversed order, which is what
  a radix-2 decimation-in-frequency pipeline gives. There is no separate bit-reversal stage: the
  next buffer undoes it through its write address.
* **The store unit.** The store unit must turn z-rows back into x-lines. It collects eight
  consecutive rows (kx = 8a..8a+7, same ky) into one bank of a two-bank buffer. From the other
  bank it writes N lines, one per kz, one line per cycle.

## The 1D FFT engine (`fft1d`)

**Input and output.** A frame of N points enters over N/8 cycles. A new frame can enter every
N/8 cycles.

**Structure.** The engine has log2(N) radix-2 decimation-in-frequency stages (`fft_stage`).
Stage S pairs point i with point i + N/2^(S+1) and multiplies the difference by a twiddle factor
W_N^m. Each stage owns a two-bank frame memory. In every *slot* of N/8 cycles, three things
happen:

* the input writes a frame into stage 0;
* each stage reads the frame that its predecessor wrote in the previous slot;
* each stage runs four butterflies per cycle (`fft_bfly`) and writes eight results, at their
  own indices, into the next memory.

**Latency.** The result comes out (log2 N + 1) x N/8 cycles after its first input beat: 56
cycles for N = 64.

**Twiddle factors.** They are computed when the design is elaborated: a Taylor series in double
precision, rounded to single precision, with exact values at 0 and -i.

**Drain and stall rules.** A slot carries data if `in_valid` is high on its first beat.
Otherwise, while frames are still inside, the slot is an empty *bubble* slot (`bubble`). Bubble
slots let the last frames leave without more input. If the output holds a frame and `out_ready`
is low, the whole engine stops.

## Floating point

`fp_add` and `fp_mul` are combinational IEEE-754 binary32 units:

* rounding is to nearest, ties to even;
* subnormals are flushed to zero, as FPGA floating-point DSP blocks do;
* a NaN result is the quiet NaN 0x7fc00000.

Each butterfly uses four adders (a sum and a difference) and a complex multiply of four
multipliers and two adders. The units have no pipeline registers, so the clock period covers
one whole butterfly. For a fast FPGA build, add registers inside the butterfly and lengthen the
slot schedule to match. This RTL does not do that.

## Interfaces

`fft3d_top` (parameters `N` = 64, `AW` = 32, `DEPTH` = 32):

* `start` (one cycle, while `busy` is low), `src_base`, `dst_base`: begin a transform.
* `busy`: high until the last result line is accepted. `done` then rises and stays high until
  the next `start`.
* **DDR read port**: `rd_req_valid/ready/addr`, with responses `rd_resp_valid/data` returned in
  order and without back-pressure. The fetch unit keeps requests in flight plus FIFO occupancy
  at or below `DEPTH`, so a response always has room.
* **DDR write port**: `wr_valid/ready/addr/data`.
* **Status, one cycle per event**: `st_fetch_throttled`, `st_t2d_overlap` (one plane written
  while the other is read), `st_t3d_wait`, `st_fft_bubble`.

Internal streams use valid/ready. The offering side keeps the beat unchanged until it is taken.
The reset `rst_n` is asynchronous and active low; it clears control state but not data memories.
Shared types are in `fft3d_pkg`: `cplx_t` is {re, im} in 64 bits and `beat_t` is 8 x `cplx_t`.

## What follows the source design and what is this RTL's own

**Taken from the published design:**

* the block chain and its order;
* single-precision arithmetic;
* eight points per cycle and N/8 cycles per 1D FFT;
* bit-reversed order at the FFT outputs;
* several buffers in the 2D transpose, so it does not stall;
* one on-chip cube for the 3D transpose;
* the cube sizes 16^3, 32^3 and 64^3, with the largest as the default.

**Chosen here:**

* the inside of the FFT engine (radix-2 DIF stages with frame memories);
* natural order at the FFT inputs (the source describes both FFT ports as bit-reversed);
* the handshakes and the drain rule;
* all row orders and the output layout;
* the store reorder buffer;
* the fetch FIFO and its depth;
* flush-to-zero arithmetic;
* one read port and one write port to memory, where the board has four DDR4 banks and the
  source does not say how they are used.

**Outside this RTL:** the DDR controller and chips, the PCIe link and host software. The
testbenches model the memory (`tb/ddr_model.sv`).

**Memory arrays.** The transposes and frame memories are plain arrays, and one beat reads or
writes eight points at scattered addresses. A synthesis flow that maps them to block RAM needs
them split into eight banks, for example by lane, with addresses rotated per row. That split is
not done here. The transform size is fixed when the design is elaborated: a build for N = 64
cannot run a 16^3 cube. Rebuild with `N` = 16 or 32 for those sizes.

## Simulating

Each testbench is self-checking and prints `TB_RESULT checks=<n> failures=<n>`. With Verilator:

    verilator --binary --timing --assert --top tb_fft3d_full \
        rtl/fft3d_pkg.sv $(ls rtl/*.sv | grep -v _pkg) \
        tb/tb_fp_pkg.sv tb/ddr_model.sv tb/tb_fft3d_full.sv
    ./obj_dir/Vtb_fft3d_full

The package must come first on the command line.

| testbench | what it checks |
|---|---|
| `tb_fp_add`, `tb_fp_mul` | 20,000+ random operands bit-exact against double-precision reference rounding; special values |
| `tb_fft1d` | N = 64 frames against a direct DFT; latency 56 cycles; 12 frames in 96 cycles; gaps, back-pressure, bubbles |
| `tb_transpose2d` | coordinates of every point; no writer stall at full rate; one plane of latency |
| `tb_transpose3d` | N = 16: coordinates; input refused for the whole drain; drain in N^3/8 cycles |
| `tb_fetch`, `tb_store` | N = 16: line order and addresses; throttling with a slow memory; back-pressure |
| `tb_fft3d_top` | whole design at N = 16 against a direct 3D DFT; cycle bound; every status event occurs |
| `tb_fft3d_full` | the same at the default N = 64 (262,144 points); about 40 s to build and 3 s to run |

The end-to-end tests accept an error of 2e-6 x log2(N) x the largest output magnitude. At 64^3
the single-precision results stay within that bound.
