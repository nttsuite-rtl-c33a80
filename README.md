# Pease no-copy NTT accelerator

Homomorphic encryption spends much of its time moving polynomials between
coefficient and evaluation form. That move is a number theoretic transform
(NTT): the discrete Fourier transform with arithmetic modulo a prime `p`
and a root of unity `w` mod `p` in place of `e^(-2*pi*i/N)`:

    X[k] = sum_{n=0}^{N-1} x[n] * w^(n*k)  mod p

This RTL computes that transform in hardware. The default build takes
N = 4096 points of 32 bits on 16 butterfly cores, and one transform takes
1596 clock cycles. The design follows the Pease no-copy ("Pease_nc")
accelerator described in the NTTSuite benchmark paper by Ding, Liu, Sun and
Reagen. That paper produced its design with a high-level-synthesis tool and
gives it as algorithms, memory-partitioning rules and a system block
diagram. This code is a hand-written register-transfer version of that
description, not the authors' code. The section "Where this departs from the
paper" lists every point where the paper left a choice open.

## The idea: a schedule whose memory pattern never changes

The usual radix-2 NTT pairs elements that are `2^s` apart in stage `s`.
Which elements meet therefore changes with every stage. If the array is
split across several RAM banks so that many butterflies can run at once,
some stage always needs two operands from the same bank. That limits both
pipelining and parallelism.

The *constant-geometry* (Pease) factorisation uses the same access pattern
in every stage. Stage `s` (s = 0 .. L-1, L = log2 N) reads the input array,
writes a second array, and does this for every r < N/2:

    k = L-1-s,   e = (r >> k) << k          (r with its low k bits cleared)
    y[r]       = x[2r] + w^e * x[2r+1]   mod p
    y[r + N/2] = x[2r] - w^e * x[2r+1]   mod p

Consecutive inputs are read and the outputs go to the two halves. Before the
first stage the input must sit in bit-reversed order. After L stages the
array holds `X` in natural order.

"No copy" means that `y` is not copied back into `x` after a stage. The two
arrays simply swap roles. Stage `s` reads array `s mod 2` and writes the
other, so the result ends in array `L mod 2`.

## Banks, ports and why one row group per cycle works

Each of the two arrays is split into B banks by low-order interleaving:
element `i` lives in bank `i mod B`, row `i / B`. Every bank is a true
dual-port RAM. The B cores take B consecutive butterflies per cycle. This
is a *row group*: butterflies r = cB .. cB+B-1 for group c = 0 .. N/(2B)-1.

* **Reads.** The group's 2B operands x[2cB .. 2cB+2B-1] are row 2c of every
  bank (port 0) and row 2c+1 of every bank (port 1).
* **Writes.** Core j writes y[cB+j] to row c of bank j (port 0) and
  y[N/2+cB+j] to row N/(2B)+c of bank j (port 1). This works because
  N/2 is a multiple of B.

So every port of every bank makes exactly one access per cycle, in every
stage, with no conflicts. The connection between banks and cores is fixed
wiring: core j always takes operands 2j and 2j+1, that is bank (2j mod B)
and port (2j / B). No crossbar is needed. Because both arrays have the same
layout, swapping them costs nothing.

For B = 4 this gives 8 vector banks, 4 twiddle tables and 4 quotient tables.
That is the memory set of the paper's block diagram.

## Modular arithmetic without division

All values are residues below `p`, and `p` is a run-time register (any
NTT-friendly prime below 2^32).

* **Add/subtract** (`pnc_mod_addsub`). `a+b` lies in [0, 2p) and `a-b` in
  (-p, p). So one adder plus one conditional correction gives the residue.
* **Multiply by a twiddle** (`pnc_mod_mul`). This is Shoup's precomputed-
  quotient method, which the paper adopts from the HEAX accelerator. Next to
  every twiddle `w^e` the host stores `wh = floor(w^e * 2^32 / p)`. Then
  `q = (x*wh) >> 32` is within 2 of `x*w^e / p`, so `x*w^e - q*p` lies in
  [0, 2p). Only its low 33 bits matter, and one conditional subtraction
  finishes the reduction. The unit takes three pipeline stages (products;
  `q*p`; subtract and correct) and accepts a new operand every cycle.

Each core (`pnc_butterfly`) is a multiplier followed by one add/sub stage:
4 cycles of latency and an initiation interval of 1.

## Twiddle tables

Core j reads `w^e` and its quotient from its own pair of dual-port tables
of N/2 words, through port A. Within a row group the cores need different
exponents in the late stages. Giving each core its own copy keeps every
read conflict-free, at the cost of B copies (the paper's diagram also shows
one table per core). The host writes a table entry once, and the write is
broadcast to all copies through port B.

## Timing of one transform

`pnc_ctrl` issues one row group per cycle, N/(2B) groups per stage. A stage
may only read what the previous stage wrote. After a stage's last issue the
sequencer therefore waits `DRAIN_CYC` = 5 cycles (1 cycle of RAM read + 4 of
butterfly) for the last writes to land. A transform therefore takes

    L * (N/(2B) + 5) cycles

while `busy` is high. The cycle of the `start` pulse is not included.

| N     | cores | cycles | at 196 MHz | paper (HLS, 196 MHz) |
|-------|-------|--------|------------|----------------------|
| 1024  | 16    | 370    | 1.89 us    | 2.27 us              |
| 4096  | 16    | 1596   | 8.14 us    | 8.60 us              |
| 16384 | 16    | 7238   | 36.9 us    | 37.50 us             |
| 1024  | 4     | 1330   | 6.79 us    | 7.18 us              |
| 4096  | 4     | 6204   | 31.7 us    | 31.93 us             |
| 16384 | 4     | 28742  | 146.6 us   | 146.96 us            |
| 65536 | 4     | 131152 | 669.1 us   | 669.30 us            |

The cycle counts are exact: the testbenches check them, and they also check
that each count stays within the paper's latency at 196 MHz. The times assume
the clock frequency the paper reports. No timing closure was attempted for
this RTL.

## Using the accelerator (`pnc_top`)

Two ports face the host side:

**AXI4-Lite registers** (`pnc_axil_regs`; 8-bit byte address, 32-bit data):

| addr | name    | access | meaning |
|------|---------|--------|---------|
| 0x00 | CTRL    | W      | bit0 = 1 starts a transform (SLVERR if busy) |
| 0x04 | STATUS  | R      | bit0 busy, bit1 done (sticky, cleared by start), bit2 array holding the result |
| 0x08 | MODULUS | R/W    | prime p (SLVERR if written while busy); byte strobes honoured |
| 0x0C | CYCLES  | R      | busy cycles of the last transform |
| 0x10 | CONFIG  | R      | [7:0] log2 N, [15:8] number of cores |

A write is accepted when AWVALID and WVALID are both high. A read is
accepted on ARVALID. Each response follows one cycle later and is held
until taken. Other addresses answer SLVERR. `irq` follows the done bit.

**Host word port** (`pnc_host_mux`): `h_valid/h_ready`, `h_we`, `h_region`,
`h_addr` (a word index), `h_wdata`. Read data comes back on `h_rvalid` and
`h_rdata` one cycle after the request is taken. While a transform runs,
`h_ready` is low.

| region       | index          | effect |
|--------------|----------------|--------|
| `REG_INPUT`  | n < N          | x[n], stored at the bit-reversed position of array 0 |
| `REG_RESULT` | k < N          | X[k], read from the array given by STATUS bit2 |
| `REG_TW`     | e < N/2        | w^e, written to every core's copy, read from core 0's |
| `REG_TWH`    | e < N/2        | floor(w^e * 2^32 / p), likewise |

The bit reversal that the Pease schedule needs happens here, on the way in,
so it costs no extra pass.

A transform, step by step:

1. Write `p` to MODULUS.
2. Load the twiddles `w^e` and their quotients. `w` is a primitive N-th root
   of unity mod `p`; for example `p = 2^32 - 2^20 + 1`, for which `2^20`
   divides `p - 1`.
3. Load the input through `REG_INPUT`.
4. Write 1 to CTRL.
5. Wait for `irq`.
6. Read the result through `REG_RESULT`.

The tables stay valid across transforms that use the same `p` and `N`.

## Files

| file | block |
|------|-------|
| `rtl/pnc_pkg.sv`        | widths, pipeline depths, state and region enums, register map, `bit_reverse` |
| `rtl/pnc_mod_addsub.sv` | modular add and subtract (combinational) |
| `rtl/pnc_mod_mul.sv`    | Shoup modular multiplier, 3 stages |
| `rtl/pnc_butterfly.sv`  | butterfly core, 4 stages, II = 1 |
| `rtl/pnc_dpram.sv`      | true dual-port RAM, 1-cycle read, read-first |
| `rtl/pnc_ctrl.sv`       | stage / row-group sequencer with inter-stage drain |
| `rtl/pnc_pease_ntt.sv`  | the engine: sequencer, B cores, twiddle indices, bank routing |
| `rtl/pnc_host_mux.sv`   | host word port onto the memories |
| `rtl/pnc_axil_regs.sv`  | AXI4-Lite registers |
| `rtl/pnc_top.sv`        | everything, with 2B vector banks and 2B twiddle tables |

Parameters: `N` (points, a power of two, default 4096) and `B` (cores, a
power of two with 2 <= B <= N/2, default 16) on every block above the
arithmetic units; `W` (word width, default 32). Memory per build is
2N words of vector storage plus B * N words of twiddles and quotients. The
default build uses 256 Ki bits of vector storage and 2 Mi bits of
twiddle/quotient storage.

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`. The reference values are computed in
`tb/tb_pnc_util_pkg.sv` with plain 64-bit remainders. The full transforms are
checked against a direct O(N^2) sum, or against a textbook Cooley-Tukey NTT
above 4096 points. The hardware's Shoup reduction and Pease schedule are not
reused in the reference.

| testbench | what it covers |
|-----------|----------------|
| `tb_pnc_mod_addsub`, `tb_pnc_mod_mul` | random and edge operands, primes 97, 2^32-2^20+1 and 2^32-5 |
| `tb_pnc_butterfly` | streamed butterflies with gaps, exact 4-cycle latency |
| `tb_pnc_dpram`     | random two-port traffic against a model |
| `tb_pnc_ctrl`      | issue order, drain length, busy length, done pulse, ignored start |
| `tb_pnc_pease_ntt` | whole transforms on the engine alone: 64/4, 128/8, 32/16 (points/cores) |
| `tb_pnc_host_mux`  | bit-reversed placement, result array selection, twiddle broadcast, hold-off |
| `tb_pnc_axil_regs` | registers, strobes, SLVERR cases, cycle counter, irq |
| `tb_pnc_top`       | end to end over AXI4-Lite and the host port, 64/4 and 128/4, two transforms each; counts array swaps, drains, overlapped read/write cycles, host stalls, refused starts |
| `tb_pnc_top_full`  | one 4096-point transform on the default build (well under a second), cycle count also held against the paper's 8.60 us at 196 MHz |
| `tb_pnc_workloads` | 1K and 16K on 16 cores; 1K, 4K, 16K and 64K on 4 cores; each cycle count also held against the paper's latency for that size |

To run one with Verilator, list the two packages first and let Verilator
find the rest:

    verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
        rtl/pnc_pkg.sv tb/tb_pnc_util_pkg.sv tb/tb_pnc_top_full.sv \
        --top-module tb_pnc_top_full
    ./obj_dir/Vtb_pnc_top_full

## Where this departs from the paper

What follows the paper: the Pease constant-geometry schedule with the two
arrays swapped each stage instead of copied; interleave = B partitioning of
both arrays into dual-port banks; 16 cores and 4096 points as the main
configuration; initiation interval 1; 32-bit arithmetic; the HEAX / Shoup
modular multiplication with precomputed twiddle quotients; precomputed
twiddle tables loaded into memory; and the system shape of the block diagram
(a control block on AXI4-Lite, the engine, and separate vector, twiddle and
twiddle-quotient memories).

What the paper leaves open, and this design chooses:

* **Twiddle index.** The paper's Pease listing omits the twiddle factor. The
  index `e = (r >> (L-1-s)) << (L-1-s)` is derived here and verified
  against the direct transform.
* **Modular corrections.** The paper's listings compare "result > m" and
  "z <= 0". Both are replaced by the tests `>= p` that the value bounds call
  for. The multiplier keeps 33 bits so that primes above 2^31 also work.
* **Two butterfly types.** The paper says Pease_nc "uses two types of
  butterfly operations in different stages" but does not define them. A
  single butterfly type is used in every stage.
* **Core count versus the block diagram.** The text's configuration has 16
  cores. The block diagram's 8 vector and 4+4 twiddle memories correspond
  to 4 cores. The default is 16; `B = 4` gives the diagram's memory set.
* **Twiddle placement.** Each core has its own copy of the tables, as in the
  diagram. The text does not say how twiddles are distributed.
* **Control and host side.** The pipeline depths, the drain between stages,
  the sequencer FSM, the AXI4-Lite register map, the host address regions,
  bit reversal on load and host hold-off while busy are all this design's
  own. The paper gives only the block names.
* **Size is fixed per build.** The paper reports separate results per size.
  Here N and B are build parameters, and a build runs only its own N.
* **System IP not included.** The PCIe-to-AXI bridge, AXI interconnect, AXI
  BRAM controllers and the differential clock buffer of the block diagram
  are vendor IP. `pnc_top` stops at the AXI4-Lite slave and the host word
  port where they would connect.

Lint notes: Verilator reports `rst_n` as used both asynchronously and
synchronously. The synchronous use is only in the `disable iff` of
assertions. It also reports unused high bits of the multiplier products;
those bits are dropped on purpose.
