# ReDas-style reshapeable, multi-dataflow systolic array

A square systolic array runs GEMM tiles well only when the tile matches its shape. Layers that are
narrow in one dimension, such as depthwise or pointwise convolutions, small-batch RNN and
attention GEMMs, or the edges of large tiles, leave most PEs idle. This design lets one physical
P x P array of PEs behave as any of P+1 logical shapes:

- square: P x P;
- wide: rl x 4(P-rl);
- tall: 4(P-rl) x rl, with rl = 1..P/2.

Each shape can run any of three dataflows: output-stationary (OS), weight-stationary (WS) and
input-stationary (IS). The shape and dataflow can change from one tile to the next at a cost of
P cycles. Only neighbour-to-neighbour links are used.

## The main idea: four sub-arrays chained through the corners

Cut the P x P array into four L-free regions. Each is an rl x (P-rl) block that sits along one
edge and is rotated by 90 degrees relative to the previous one:

- A: rows 0..rl-1, columns 0..P-rl-1;
- B, C, D: A rotated about the centre by 90, 180 and 270 degrees.

Logical element (r, j) of region A is at physical (r, j). Each rotation maps (i, j) to (j, P-1-i).
Chaining the four blocks end to end gives a logical rl x 4(P-rl) array. Its long dimension
("ring") wraps around the array. The stream that runs across the short dimension ("cross") enters
each block from the outer edge next to it.

Getting a ring stream from the end of one block to the start of the next needs a path through PEs
that belong to the *next* region. Lane r of that path runs:

- along row r, through the columns the next block does not use;
- turns north at column P-1-r;
- climbs to the start of the next block.

PEs on such a path forward the stream in one of two pass-through slots (A: straight or turning,
B: straight), one register per hop. A PE can therefore carry its own operation data and up to two
foreign streams in the same cycle. Every corner adds rl-1 cycles to lane r's ring latency. The
cross streams are issued with a matching extra skew, `ring_extra(pos) = (rl-1)*(pos / (P-rl))`,
so operands still meet in the right PE.

The tall shape is the transpose of the wide one (N<->W and E<->S exchanged). The square shape is
the ordinary array.

`redas_pkg::pe_decode(cfg, P, i, j)` turns the array configuration word {dataflow, shape, rl} and
a PE's coordinates into that PE's routing:

- which port feeds the ring and the cross operands, and where they leave;
- the preload and drain directions;
- which operand carries the partial sum;
- the two pass-through slots.

Every PE evaluates it combinationally. `redas_pkg::edge_map` gives, for every edge PE, whether the
bank facing it issues ring data or cross data, receives results, or is idle, and for which
logical lane or position.

## Dataflows on the logical array

| dataflow | ring stream | cross stream | result |
|---|---|---|---|
| OS | operand A, lane r issued at cycle r | operand B, position c issued at c + ring_extra(c) | accumulates in each PE, drained outward (centre to edge) in `depth` cycles after the tile |
| WS/IS, wide | streamed operand | partial sum, flowing outward from the innermost PE | leaves at the cross edge bank |
| WS/IS, tall | partial sum, starting at zero | streamed operand | leaves through an exit path back at the ring-entry edge |
| WS/IS, square | streamed operand, lane r issued at r | partial sum flowing down from row 0 | leaves at the south edge |

WS and IS use the same hardware and differ only in which matrix the mapper places in the
stationary registers. The stationary operand is shifted in from the cross edges in `depth`
cycles. Each bank issues its stationary column from the top of its region downwards.

**Departure from the paper: wide WS/IS.** In WS/IS on a wide shape, the partial sums leave through
the same corner links the ring would use. So the design does not chain the ring through the
corners in that case. Instead, all four sub-arrays get their ring lane directly from the banks on
their own inner-edge side, which are otherwise idle in that mode. Each lane is stored four times.
The arithmetic is unchanged, and latency is lower than with the chained ring.

## Buffers, banks and the side port

Each of the four sides has P banks (`redas_mm_buffer`), one facing each edge PE. A bank
(`redas_mm_bank`) holds:

- a 1R1W memory of `BANK_DEPTH` 32-bit words (`redas_sram`);
- an accumulator for returning partial sums (`redas_accumulator`);
- a controller (`redas_bank_ctrl`).

When a tile is loaded, the controller evaluates `bank_plan()` for its own position. The plan
holds the bank's role in the tile (input issuer, weight issuer, output receiver, mixed or idle)
and, for each phase, the cycle to start issuing, the length and the base address.

Timing inside a bank:

- **Issue.** The bank reads its memory in the cycle the plan says, and the word reaches the array
  one cycle later. The array's phase signals are delayed by one cycle to match.
- **Receive.** Results are accepted while the phase, delayed by two cycles, is a receive phase.
  The n-th valid word goes to `out_base+n`. When the tile has `acc_en` set, the word is added to
  what is already stored there (read-modify-write).
- **Side port.** The SIMD unit and the DMA share each bank's side port, and the SIMD unit wins.
  The array always has priority inside the bank. A side request that would collide with an array
  read or an accumulator write is refused and retried: this is the stall mechanism.
- **Sleep.** A bank that has been idle for 16 cycles puts its memory in retention. It wakes in one
  cycle on a side request or a tile that uses it.

## SIMD units, DMA, instructions

- **SIMD unit** (`redas_simd_unit`): one per side, with P lanes working in lock step over that
  side's banks. Element k is read from `src+k` of every bank and written to `dst+k`. Operations are
  COPY, RELU and PWL. PWL is a programmable 16-segment piece-wise linear table that computes
  y = (x*slope >> 8) + intercept, for activations such as GELU, sigmoid or exp.
- **DMA** (`redas_dma`): 8 channels, each with its own request/response DRAM port. Bank
  g = side*P + index belongs to channel g mod 8. Each word moves as one DRAM request and one bank
  request. The DRAM itself is outside the design.
- **Instructions** (`instr_t`):
  - GEMM(dataflow, shape, rl, len, sta_base, non_base, out_base, acc_en);
  - SIMD(op, side, src, dst, len);
  - DMA(store, bank, dram_addr, bank_addr, len);
  - NOP, which acts as a barrier.

  They enter through `redas_inst_buffer`, a FIFO of 16 entries.
- **Controller** (`redas_controller`): runs a GEMM tile through these phases:

  | phase | length (cycles) |
  |---|---|
  | CONFIG | P+1 |
  | PRELOAD (WS/IS) | depth |
  | CLEAR | 1 |
  | COMPUTE | `compute_cycles()` |
  | DRAIN (OS) | depth+2 |
  | TAIL | 4 |

  SIMD and DMA instructions are dispatched while a GEMM runs. The head instruction waits if its
  unit is busy. The controller counts GEMMs, dataflow switches, reshapes and dispatch stalls.

Here `depth` is rl for wide and tall shapes and P for square. The bound is
`compute_cycles = len + 3P + 4` for square and `len + 8(P-rl) + 6rl + 6` otherwise. It is a safe
bound covering the longest skewed path, not a cycle-exact model. The measured last-output cycle
for WS/IS stays within T = R + C + M - 1 + 4*min(R, C) (square: R + C + M - 1), where R and C are
the logical rows and columns and M is the streamed length.

## Parameters and sizes

| parameter | default | note |
|---|---|---|
| `ARRAY_P` | 128 | array side of the reference design |
| `ARRAY_P_ELAB` | 64 | default P of `redas_pe_array` and `redas_top`; see below |
| `DATA_W` / `ACC_W` | 8 / 32 | Int8 operands, 32-bit partial sums and words |
| `BANK_DEPTH` | 4096 | words per bank |
| `NUM_CH` | 8 | DMA / DRAM channels |
| `LUT_SEG` | 16 | PWL segments |

The array and the top default to P = 64, not 128. Verilator's memory use for the elaborated top
grows about fourfold per doubling of P: 0.72 GB at P=16 and 2.7 GB at P=32, which projects to
about 43 GB at P=128. Every module is fully parameterised; pass `-GP=128` to build the full size
on a machine with enough memory. The per-PE decode is one function of constant coordinate inputs,
so all PEs, and likewise all banks, are a single module.

## Verification

Each block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. The main ones:

- `tb_redas_pe_array` (P=6): every shape (square; wide and tall with rl = 1, 2, 3) under OS, WS
  and IS. It compares every output with a reference matrix product and checks WS/IS latency
  against the formula above.
- `tb_redas_top` (P=8, 256-word banks): an end-to-end program that moves all data through the DMA
  from a behavioural DRAM (`tb/redas_dram_model.sv`, random back pressure). It runs five tiles:
  - OS wide;
  - WS tall;
  - IS square;
  - WS wide with accumulation;
  - OS tall.

  It also runs a SIMD RELU, plus SIMD and DMA work that competes with a running GEMM. Results are
  compared in DRAM. The test fails any mechanism that never happened: reshape, dataflow switch,
  dispatch stall, SIMD stall, DMA stall, DRAM back pressure, accumulation, bank sleep, SIMD, and
  DMA loads and stores.
- Unit tests for the bank controller (issue times and addresses derived independently from the
  edge roles), the bank, the buffer arbitration, the SIMD unit, the DMA, the controller phase
  lengths, the FIFO, the memory and the accumulator.

No testbench runs the top at its default size. The 128x128 (or 64x64) build is too large to
simulate in reasonable time; the end-to-end test uses P=8.

Simulate with plain verilator, for example:

```
verilator --binary --timing --assert -Irtl -Itb rtl/redas_pkg.sv rtl/redas_*.sv \
  tb/redas_dram_model.sv tb/tb_redas_top.sv --top-module tb_redas_top -Mdir obj -o sim
./obj/sim
```

## Limits and departures

- Wide WS/IS feeds the ring from four edge-bank copies instead of the corner chain (see above).
- Phase lengths use a safe bound rather than the exact pipeline depth, which costs some cycles per
  tile.
- Not included:
  - the mapper (the offline search over shape, dataflow, buffer split and tiling), which supplies
    the instruction fields;
  - the DRAM device.
- Bank roles follow the per-dataflow scheme of issuers and receivers. The bank-level split of
  buffer capacity between operands is left to the mapper, through the base addresses.
- Sleep after 16 idle cycles, the PWL table format, the SIMD lock step, SIMD-over-DMA priority,
  32-bit bank words and the NOP barrier are this design's own choices.
