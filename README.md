# FFT butterflies in HBM processing-in-memory

GPU FFT kernels are limited by memory bandwidth. HBM with processing in memory
(PIM) puts a small SIMD ALU beside the DRAM banks. One command broadcast to a
pseudo channel makes every such ALU compute on its own banks at once. The banks
then deliver several times the bandwidth the shared data bus can.

This RTL models one HBM3-PIM stack, as seen by the host's memory controllers,
with what a radix-2 FFT needs from it:

- a 256-bit SIMD ALU that treats a DRAM word as eight single-precision lanes;
- a 16-entry register file beside each ALU;
- one PIM unit per even/odd bank pair;
- a channel controller that opens rows and issues PIM commands.

The ALU also has a MADD-SUB command. One multiply feeds both an adder and a
subtractor, so the two outputs of a butterfly half cost one command instead of
two. That is the hardware extension the design is built around. The host
(a GPU) stays in charge. It lays out the data, computes twiddle constants and
sends a stream of commands. The testbench plays the host and runs complete
FFTs through the stack.

## Organisation

```
hbm_pim_stack                      16 channels (default)
 └─ g_ch[c]
     ├─ pim_mem_controller         request queue, row management, DRAM timing,
     │                             one command per cycle on the shared command bus
     └─ pseudo_channel  x2         16 banks on one data bus, 8 PIM units
         ├─ dram_bank   x16        behavioural DRAM bank + row buffer
         └─ pim_unit    x8         unit p sits between banks 2p (even) and 2p+1 (odd)
             ├─ simd_alu           8 lanes x (fp32_mul + 2 x fp32_add)
             └─ pim_regfile        16 x 256 bit, 3 read ports, 2 write ports
```

With the defaults the stack has 32 pseudo channels, 512 banks and 256 PIM
units. One pim command to a pseudo channel computes on 8 units x 8 lanes = 64
single-precision values at once. `pim_pkg` holds the shared types and sizes:

| Constant | Value | Meaning |
|---|---|---|
| `LANES` | 8 | lanes per word |
| `WORD_W` | 256 | word width in bits |
| `NUM_REGS` | 16 | registers per PIM unit |
| `ROW_BYTES` | 1024 | row size, so `COLS` = 32 words per row |
| `BANKS_PER_PCH` | 16 | banks per pseudo channel |

The host, the interposer, the HBM base die and the PHY are outside the model.
Their signals are the top-level ports.

## How an FFT is laid out

An N-point complex transform lives entirely inside one bank pair, so no data
ever crosses between PIM units:

- **Real and imaginary parts.** The real part of element k is in the even bank
  and the imaginary part in the odd bank, at the same address (word k, i.e.
  row `base + k/32`, column `k%32`). With a row open in both banks, one unit
  reaches all four components of a butterfly without another activation.
- **Strided mapping.** Each of the eight lanes of a word belongs to a
  *different* transform of the batch. So every butterfly is lane-local, and the
  ALU needs no lane shifts.
- **Batching.** Different bank pairs, pseudo channels and channels hold further
  members of the batch. They all run from the same command stream.

The host writes the input in bit-reversed order, then runs log2(N)
decimation-in-time stages. A stage of span L pairs word `i` with word
`i + L/2`, using twiddle w = exp(-2πi·j/L).

## Commands

A pim command (`pim_cmd_t`) has these fields:

- an operation;
- `odd`, which picks the even or odd bank for a move;
- register indices `dst`, `dst2`, `src0` and `src1`;
- a 32-bit scalar `k`, sent by the host with the command and applied to all lanes.

The operations:

| op | effect (per lane) | register writes |
|---|---|---|
| `MOV_RD` | `R[dst] = rowbuf[even/odd][col]` | 1 |
| `MOV_WR` | `rowbuf[even/odd][col] = R[src0]` | 0 |
| `ADD` / `SUB` | `R[dst] = R[src0] ± R[src1]` | 1 |
| `MUL` | `R[dst] = k·R[src0]` | 1 |
| `MADD` | `R[dst] = R[src1] + k·R[src0]` | 1 |
| `MADDSUB` | `R[dst] = R[src1] + k·R[src0]`, `R[dst2] = R[src1] − k·R[src0]` | 2 (second write port) |

Write the inputs as x1 = a + jb, x2 = d + je, and the twiddle as w = c + js.
The host picks one of four recipes for the butterfly y = x1 ± w·x2. Each
recipe starts with four `MOV_RD` (a, b, d, e) and ends with four `MOV_WR`.

| recipe | ALU commands | sequence |
|---|---|---|
| baseline | 6 MADD | m1 = d − δe, m2 = e + δd with δ = s/c; then a ± c·m1, b ± c·m2 as four MADDs with k = ±c |
| twiddle-aware, w = 1 or −j | 4 ADD/SUB | a ± d, b ± e (w = 1); a ± e, b ∓ d (w = −j) |
| augmented ALU | 2 MADD + 2 MADDSUB | m1, m2 as above; then one MADDSUB each for the real and the imaginary pair |
| augmented + twiddle-aware | 2, 3 or 4 | w = 1 or −j: two MADDSUB with k = ±1. \|c\| = \|s\| (w = (1−j)/√2 or (−1−j)/√2): one MADDSUB with k = 1 gives d+e and d−e, then two MADDSUB with k = ±c. Otherwise 4. |

Counted over a whole transform, these recipes give the following average ALU
commands per butterfly:

| N | baseline | augmented | twiddle-aware | both |
|---|---|---|---|---|
| 2^5 | 6 | 4 | 4.85 | 2.675 |
| 2^13 | 6 | 4 | 5.54 | 3.46 |

The closed form is in `expected_alu` of the end-to-end testbench. That
testbench checks it against what the controllers actually issue for N = 32
and 64.

The baseline recipe divides by c. For w = −j the host computes c in floating
point as cos(π/2) ≈ 6e-17, not zero. δ is then huge but finite, and the result
stays accurate to single precision. A host that uses exact twiddles must use
the twiddle-aware recipe there.

## The channel controller

`pim_mem_controller` serves one channel. The channel's two pseudo channels
share a command bus, so at most one ACT, PRE, RD, WR or PIM leaves per cycle.
Requests (`mem_req_t`: RD, WR or PIM) enter a 16-deep queue with a valid/ready
handshake. They are served strictly in order.

For the request at the head, the controller works out which banks must be open
and at which row:

- RD and WR need their one bank.
- A `MOV` of real parts needs **all eight even banks** of the pseudo channel.
- A `MOV` of imaginary parts needs all eight odd banks.
- ALU commands need no row.

The controller then takes these steps:

1. Precharge every needed bank that holds another row. This waits until tRAS
   has passed since that bank's ACT.
2. Activate the closed banks with one multi-bank ACT. This waits until tRP has
   passed since their PRE.
3. Issue the column command.
   - RD and WR may go every cycle.
   - PIM commands go at most every `PIM_INTERVAL` = 2 cycles. That is half the
     read/write rate, which commercial PIM designs use to allow for the
     multi-bank broadcast.

Rows stay open after use. Read data comes back on `rsp_data` one cycle after
the RD. The timing parameters assume a clock period of tCCDL = 3.33 ns:

| Parameter | Cycles | Time |
|---|---|---|
| `TRP` | 5 | 15 ns |
| `TRAS` | 10 | 33 ns |

A read that hits a bank open at another row costs TRAS + TRP + 2 cycles from
the first ACT, including the precharge. The controller testbench checks this
number.

The `evt` port flags one-cycle events for performance counting:

- `act`, `pre`, `rd`, `wr`, `pim`;
- `pim_wait`, when the half-rate limit holds a command back;
- `timing_wait`, when tRP or tRAS holds one back;
- `q_full`, when the queue is full.

## Arithmetic

`fp32_mul` and `fp32_add` are combinational IEEE-754 single-precision units
that round to nearest, ties to even:

- Subnormal inputs and results flush to zero.
- Overflow gives infinity.
- NaN and inf − inf give 0x7fc00000.

MADD rounds the product before the add, so it is not fused. Every ALU result is
written at the next clock edge. The whole command takes one cycle in the PIM
unit. The timing of a real DRAM-process ALU is not modelled.

## Interfaces and timing, block by block

- `dram_bank`: ACT, PRE and column write are sampled at the clock edge. The
  row-buffer word at `col` is combinational on `rdata`. The model asserts the
  open/closed protocol. Storage is an associative array keyed by row, so a
  full stack simulates in little memory. It is a model of the vendor's DRAM,
  not synthesizable logic.
- `pim_unit`: a command with `cmd_valid` reads its registers and the row
  buffers in the same cycle. It writes registers at the next edge and requests
  row-buffer writes in the same cycle.
- `pseudo_channel`: the bus struct `pch_bus_t` carries:
  - per-bank `act` and `pre` masks;
  - `rd`, `wr` and `pim` strobes;
  - `bank`, `row`, `col`, `wdata` and the pim command.
- `hbm_pim_stack`: per-channel arrays of request, response and event ports.
  To run a command on several channels, the host issues it to each of them.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself. For
example:

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_pim_unit \
  rtl/pim_pkg.sv tb/tb_fp_pkg.sv rtl/fp32_mul.sv rtl/fp32_add.sv \
  rtl/simd_alu.sv rtl/pim_regfile.sv rtl/pim_unit.sv tb/tb_pim_unit.sv
obj_dir/Vtb_pim_unit
```

| testbench | what it checks |
|---|---|
| `tb_simd_alu` | every operation, lane by lane, against a reference that rounds double-precision results to single (random, cancelling, zero and tie cases); write-port flags |
| `tb_pim_regfile` | random dual-port traffic against a model; reset; port-2 priority |
| `tb_dram_bank` | activate / write / precharge / reopen against a model of the cells |
| `tb_pim_unit` | a full butterfly in all four recipes, bit-exact against the reference arithmetic |
| `tb_pseudo_channel` | one broadcast reaches all eight units, each on its own bank pair; host writes hit only their bank |
| `tb_pim_mem_controller` | protocol monitor: open rows before column commands, tRP, tRAS, half-rate PIM, one command per cycle, in-order fields, read latency, back-pressure |
| `tb_hbm_pim_stack` | the whole stack at its default size, end to end (below) |

`tb_hbm_pim_stack` runs with the top at its defaults. It loads batches of
random complex inputs into all 16 channels and runs five transforms:

- N = 32 in all four recipes;
- N = 64 with the combined recipe. Its last stage pairs words in different
  rows, so it causes row misses.

Each transform runs 1024 FFTs at once. The testbench reads all results back
and compares each bin with a double-precision DFT, within 2e-5·N. It also
checks the ALU command count and counts each mechanism: ACT, PRE on a row
miss, timing waits, half-rate holds, queue-full back-pressure, host reads and
writes, and each command type. A mechanism that never happened counts as a
failure. The top has 2048 floating-point lanes, so Verilator takes several
minutes to build it. The run itself takes about a minute.

## Where this departs from, or goes beyond, the source description

- **Precision.** Single-precision lanes follow the FFT evaluation. Present
  PIM parts use 16-bit multiply with 32-bit accumulation, which is not built.
- **Host-side steps.** Plan selection decides which part of a large FFT runs in
  PIM and which on the GPU. Twiddle computation and command ordering are host
  software too. They appear here only as testbench code.
- **Not built.**
  - The cross-lane shift of a non-strided layout, which the strided mapping
    avoids.
  - Refresh, tRCD, tWR and power.
  - Operands taken straight from the row buffer by an ALU command.
- **This design's own choices.**
  - The command encoding and the request and bus structs.
  - The queue depth and the in-order, open-page policy.
  - The clock choice that turns the DRAM times into cycles.
  - The bank size: 8192 rows, i.e. 8 MiB per bank and 4 GiB per stack. It is
    derived from the statement that a 2^21-point single-precision transform
    fits in a bank pair.
  - A 2^18-point transform in strided layout exactly fills a bank.
