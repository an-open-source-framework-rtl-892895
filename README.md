# Fused-dot-product systolic array with a tailored accumulator

A matrix product is made of dot products, and a floating-point dot product
normally rounds after every addition. The result then depends on the order of
the additions and on the precision of the adder. This design does not round
inside a dot product. Each product of two floating-point operands is exact
and is added into a wide two's-complement **fixed-point accumulator**. The
sum is rounded once, to the output format, when it leaves the array. The size
of that accumulator is a build-time parameter. A workload that tolerates
noise, such as neural-network inference, can use a narrow accumulator that
costs less energy. A workload that needs bit-exact, order-independent sums,
such as a global ocean-volume reduction, can use a wide one.

The RTL is a complete accelerator function unit:

* a 32 x 31 output-stationary systolic array of fused-dot-product PEs;
* bfloat16 operands and results, with a 31-bit accumulator `<ovf:5,msb:5,lsb:-20>`;
* AXI-stream wrapping with a backpressure FIFO;
* a bridge from AXI4 memory-mapped to AXI-stream, with an AXI4-Lite register
  file that host software uses to start jobs and to read the kernel's number
  format.

The host-coherent link (OpenCAPI and its shell), the host and the software
stack are not part of this RTL. The top module exposes the AXI4 master and
AXI4-Lite slave ports that such a shell would connect to.

## 1. The accumulator window `<OVF, MSB, LSB>`

Three integers define the accumulator:

| name | meaning |
|------|---------|
| `LSB` | weight exponent of accumulator bit 0; product bits below 2^LSB are dropped |
| `MSB` | weight exponent of the top bit that a single product is expected to fill |
| `OVF` | extra bits above `MSB` that absorb the growth of long sums; one more bit doubles the number of worst-case products that can be added without overflow |

The accumulator is `W = OVF + MSB - LSB + 1` bits wide, two's complement.
Bit 0 weighs 2^LSB and the sign bit weighs 2^(MSB+OVF). Examples:

| configuration | operands | W |
|---|---|---|
| `<5,5,-20>` (default) | bfloat16 | 31 |
| `<9,6,-20>` | binary32 | 36 |
| `<9,6,-48>` | binary32 | 64 |
| `<30,30,-30>` | binary64 | 91 |

Exactly what the hardware computes, per PE and per dot product:

1. Each product `a*b` is formed exactly. The significands `1.F` are
   multiplied and the biased exponents are added.
2. The product's magnitude is shifted so that its bits line up with the
   accumulator's weights. Bits weighing less than 2^LSB are dropped, so each
   product is **truncated toward zero**.
3. The truncated magnitude is negated if the signs differ, and added
   modulo 2^W. A sum that leaves the window **wraps around**; it does not
   saturate. This is what makes too small an `OVF` or `MSB` destructive:
   results become garbage rather than merely less accurate.
4. NaN (and infinity) operands set a sticky flag that travels with the sum.
   Zero and subnormal operands count as zero (flush to zero).
5. At the end of a block, the W-bit sum is rounded once to the output format.
   Rounding is to nearest, ties to even. Too large a sum gives infinity, a
   sum below the normal range gives a signed zero, and a flagged sum gives
   the quiet NaN.

Because steps 1–3 are exact integer operations, the sum does not depend on
the order of the products, provided it does not wrap. Hence the
reproducibility shown by the SSH test below.

## 2. Processing element (`fdp_pe`)

A PE gets its A operand from the neighbour on its right and its B operand
from the neighbour above. Both arrive already decoded by `fp_decoder` into
NaN flag, sign, biased exponent and `1.F`. The valid bit and the end-of-block
flag (EOB) travel with B. In one clock the PE does the following:

* forwards A to the left and B/valid/EOB downward, through registers;
* if valid, adds the shifted product to its accumulator;
* if valid and EOB, puts `accumulator + product` (with its NaN flag) into
  its drain register and restarts the accumulator from zero.

There is no global bus. Every signal that leaves a PE comes from a
flip-flop, so the array scales without long wires.

**Drain chain.** Finished sums travel down the column through two registers
per PE (`c_pass`, then `c_out`). In one column the EOB reaches row *i* one
clock after row *i-1*, so neighbouring PEs finish one clock apart. With two
registers per hop, a finished sum never lands on one that is passing
through. As a consequence, the N_ROWS results of one column leave the bottom
on consecutive clocks, **last row first**. Two blocks' drains could overlap
if a block had fewer than N_ROWS steps. The wrapper prevents that (section
4), and an assertion in the PE checks it.

## 3. Array timing (`systolic_array`, `skew_regs`)

A enters at the right edge and moves left; B enters at the top and moves
down. For both operands of step *k* to meet in PE (i,j) at the same clock,
the inputs are staggered:

* A(i,k) enters `i` clocks late;
* B(k,j) enters `M_COLS-1-j` clocks late;
* they meet in PE (i,j) at clock `t0 + k + i + (M_COLS-1-j)`.

`skew_regs` builds these per-lane delay lines. For a block whose last step is
*K-1*, the sum of row *i* appears at the bottom of column *j* during clock
`t0 + K-1 + (M_COLS-1-j) + 2*N_ROWS-1-i`. A second `skew_regs` delays column
*j* by *j* clocks, so that all columns of one row of C come out together.
Then one `acc_rounder` per column converts the row, one clock later.

Latency of one block at the default size, from the last input beat to the
first output row: about 1 (input register) + 30 + 2x32 + 30 + 1 clocks,
about 130 clocks. Throughput: one step (an outer product of a 32-element
column and a 31-element row, 992 multiply-adds) per clock.

## 4. Stream wrapper and backpressure (`fdp_array_axis`, `bp_fifo`)

**Input beat** (default 1024 bits): the 32 words of column *k* of A in the
low lanes, word *i* at `[16*i +: 16]`, then the 31 words of row *k* of B,
word *j* at `[16*(32+j) +: 16]`. That is 63 x 16 = 1008 bits used. `tlast`
marks the last step of a block and acts as the EOB.

**Output beat** (default 512 bits): one row of C, word *j* at `[16*j +: 16]`.
That is 496 bits used. Rows come out in the order 31, 30, ..., 0; `tlast` is
set on row 0.

Once a block has entered, the array cannot be stopped. Its results come out
a fixed number of clocks later. The FIFO at the bottom turns this into a
proper two-way handshake:

* `m_axis_tvalid` is the FIFO's not-empty flag;
* `s_axis_tready` is the inverse of the FIFO's full flag. "Full" also counts
  space that is **reserved**: when an EOB beat is accepted, N_ROWS entries
  are booked for that block's rows. Rows still inside the array therefore
  always find room, however long the consumer stalls.
* `s_axis_tready` also holds back an EOB beat until N_ROWS clocks have passed
  since the previous one. A block shorter than N_ROWS steps is thus padded
  with idle clocks, which keeps the drain chains from colliding.

## 5. Host interface (`axi_mm_stream_bridge`, `fdp_accel_top`)

Software puts the input beats in shared memory, programs the registers and
sets start. The bridge reads the beats with AXI4 INCR bursts, streams them
into the array (raising tlast every `BLOCK_LEN` beats), and writes the
output stream back, one row per 128-byte line, zero-padded.

| offset | name | access | content |
|---|---|---|---|
| 0x00 | CTRL | W | bit 0: start |
| 0x04 | STATUS | R | bit 0 busy, bit 1 done, bit 2 error response seen |
| 0x08/0x0C | SRC | RW | byte address of the input beats (64 bits) |
| 0x10/0x14 | DST | RW | byte address of the output lines |
| 0x18 | N_IN | RW | number of input beats |
| 0x1C | BLOCK_LEN | RW | steps per dot product (K) |
| 0x20 | N_OUT | RW | number of output lines (= N_IN / BLOCK_LEN x N_ROWS) |
| 0x24 | FMT0 | R | {MSB, OVF, WF, WE}, one byte each |
| 0x28 | FMT1 | R | {M_COLS, N_ROWS, LSB, 0} |

The FMT registers let the host library find out which format and accumulator
the kernel was built with. The library then casts its matrices to that format
and tiles a GEMM into 32 x 31 blocks of C. Bursts are at most 32 beats long
and never cross a 4 KiB page, and only one burst per direction is in flight.
Addresses must be 128-byte aligned.

## 6. Parameters

All defaults come from `fdp_pkg`; every module also takes them as
parameters.

| parameter | default | note |
|---|---|---|
| `N_ROWS` x `M_COLS` | 32 x 31 | array size of the reference build |
| `WE`, `WF` | 8, 7 | bfloat16; use 8/23 for binary32, 11/52 for binary64 |
| `OVF`, `MSB`, `LSB` | 5, 5, -20 | accumulator window |
| `DATA_W` / `DW_IN` | 1024 | memory beat = input stream beat; must hold (N_ROWS+M_COLS) words |
| `OUT_W` / `DW_OUT` | 512 | output stream beat; must hold M_COLS words |
| `FIFO_DEPTH` | 4 x N_ROWS | rows of C buffered; at least N_ROWS |

For the binary64 SSH configuration, set `WE=11, WF=52, OVF=30, MSB=30, LSB=-30`.
Either shrink the array or widen `DATA_W` so that (N_ROWS+M_COLS) x 64 bits
fit in one beat.

## 7. Verification

Each testbench checks itself and prints `TB_RESULT checks=N failures=F`. The
reference arithmetic (`tb/fdp_ref_pkg.sv`) is written independently of the
RTL, as wide-integer arithmetic. Rounding there compares the remainder with
one half, instead of using guard and sticky bits.

| testbench | what it shows |
|---|---|
| `tb_fp_decoder` | field extraction, FTZ, NaN, for bfloat16 and binary64 |
| `tb_fdp_pe` | exact sums, truncation and wrap in a narrow window, EOB latency of one clock, forwarding, drain pass-through, NaN |
| `tb_skew_regs` | lane delays in both orientations |
| `tb_acc_rounder` | rounding to bfloat16, binary32, binary64; ties, carries, NaN |
| `tb_bp_fifo` | queue behaviour and the reservation-aware full flag |
| `tb_systolic_array` | 4 x 3 array, values and the exact exit clock of every result |
| `tb_fdp_array_axis` | streams with random stalls, short blocks, FIFO full, NaN |
| `tb_axi_mm_stream_bridge` | registers, bursts split at pages, loopback data |
| `tb_fdp_accel_top` | whole accelerator at 4 x 3: three jobs through memory; counts FIFO-full backpressure, EOB hold, page split, accumulator wrap, NaN, flushed subnormal, write stall |
| `tb_fdp_accel_full` | whole accelerator at the default 32 x 31 size, two tiles of K=40 |
| `tb_ssh_workload` | binary64, 91-bit accumulator: 7680, 153600 and 460800 values of magnitude 1e10–1e15 summed in four orders; all four results bit-identical and equal to the exact sum rounded once, while naive binary64 sums of the same orders differ |
| `tb_ai_workload` | binary32 GEMM tile with the accumulators of the LSB sweep, compared with the reference |

To run one, for example the end-to-end test:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/fdp_pkg.sv tb/fdp_ref_pkg.sv tb/tb_fdp_accel_top.sv \
    --top-module tb_fdp_accel_top -Wno-fatal
./obj_dir/Vtb_fdp_accel_top
```

The other modules are found through `-Irtl -Itb`, since each lives in a file
of its own name. The full-size test compiles in well under a minute and runs
in seconds.

## 8. What follows the source and what does not

These follow the published design:

* a format-agnostic fused dot product with a fixed-point accumulator
  parameterised by OVF/MSB/LSB;
* rounding only at the array exit;
* a fully systolic array in which data and control move only between
  neighbours, top to bottom and right to left;
* AXI-stream wrapping with a backpressure FIFO whose flags make valid/ready;
* a state machine between AXI-MM and AXI-stream;
* a configuration register holding the format;
* the 32 x 31 bfloat16 array size;
* the bfloat16 `<5,5,-20>` and binary64 `<30,30,-30>` accumulators.

These are choices of this implementation, since the source does not give
them:

* the beat layouts, bus widths, register map and burst policy;
* tlast used as the end-of-block flag;
* the drain chain and the resulting reverse row order;
* the FIFO reservation scheme and the short-block padding;
* truncation toward zero of each product and wrap-around on overflow;
* round-to-nearest-even, flush-to-zero, infinity folded into NaN;
* synchronous active-low reset everywhere.

Departures and omissions:

* The published PE uses a pipelined, segmented accumulator tuned to a
  200 MHz FPGA target. Here multiply, shift and accumulate take a single
  clock. The arithmetic is the same, but this RTL is not timing-optimised
  for the 992-PE build. Retiming the PE (adding a product register, or
  splitting the adder) would change only latency.
* Posit operands, which the framework also targets, are not decoded. Only
  IEEE754-style formats are.
* Each accumulator configuration is a separate build, as in the source;
  there is no run-time switch.
* The board floorplan labels the bfloat16 array with a triple "<5,-30,2>",
  whose field order is not given. The default here instead uses the
  `<5,5,-20>` bfloat16 accumulator that the source evaluates explicitly.
