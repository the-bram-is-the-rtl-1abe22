# IMAGine: a GEMV engine made of block-RAM processing-in-memory tiles

IMAGine computes matrix-vector products (GEMV, y = A·x) on an FPGA.
Almost all of its arithmetic happens inside the block RAMs.

- Every RAMB18 tile is turned into a small SIMD machine with 16 bit-serial processing elements (PEs).
- Each PE owns one bit column of the 1024 × 16 memory.
- A bit-serial PE needs almost no logic, so the whole device's block RAM can become compute.
  On an Alveo U55 that is 4032 RAMB18 = 64,512 PEs.
- The clock is limited by the BRAM, not by the logic around it.

The engine is therefore built around three ideas:

1. Keep every logic path one or two LUTs deep.
   Optional pipeline registers in the controller and pipelined fanout trees for every high-fanout signal make this possible.
2. Reduce without moving data through memory.
   Inside a block, an operand multiplexer adds PE i+d into PE i, for d = 8, 4, 2, 1.
   Between blocks, partial sums hop east to west over a one-register-per-block chain: 1, then 2, then 4 blocks.
3. Broadcast one instruction stream.
   Every tile runs the same instructions in lock-step.
   A block-ID select flag decides which blocks take external data and which ones send.

The design is the IMAGine engine published in "The BRAM is the Limit: Shattering Myths, Shaping Standards, and Building Scalable PIM Accelerators". This repository holds synthesizable SystemVerilog for the whole engine, with a self-checking testbench for every module.

## Hierarchy

```
imagine_top                       engine: 14 x 12 tiles (default)
 ├─ input_regs                    FIFO-in side, valid/ready, busy wait
 ├─ fanout_tree (top)             instruction copies to the 168 tiles
 ├─ tile_array                    tiles cascaded east to west
 │   └─ gemv_tile  (x168)
 │       ├─ tile_controller       30-bit instruction -> control words
 │       │   └─ ctrl_multi_driver multicycle sequences (ADD/SUB/MULT/TX/CLEAR)
 │       ├─ fanout_tree (tile)    2 levels, fanout 4
 │       └─ pim_array             12 x 2 blocks
 │           └─ picaso_im (x24)   one RAMB18 block, 16 PEs
 │               ├─ pim_regfile   1024 x 16, two reads + one write
 │               ├─ pim_opmux     operand select, in-block fold
 │               ├─ pim_alu       16 bit-serial ALUs, Booth radix-2
 │               ├─ pim_netnode   east-to-west hop register
 │               └─ pim_select    block-ID match flag
 ├─ busy return pipeline + flush delay
 └─ col_shift_regs                output column, read out via FIFO-out
```

`imagine_pkg` holds the shared sizes, the opcode enum, the instruction struct and the block control word `pim_ctrl_t`.

## Data layout: bit-serial, transposed

Word `w` of a block's memory holds bit `w` of all 16 PEs.
An N-bit number is stored LSB first in N consecutive words of one bit column.
So a PE works on one bit per cycle, and the 16 PEs of a block, and all blocks of the engine, do it in parallel.

For GEMV, the engine is a grid of 168 block rows × 24 block columns (384 PEs per row):

- Row r of A goes to block row r: element k lands in PE k mod 16 of block column k / 16.
- x is written once per block column and shared by all rows. A SELECT with a mask on the column bits only picks a whole block column.
- Sizes above 168 × 384 need several passes. Each pass is a GEMV on another slice of A stored at another address; there are 1024 bits per PE.

## Instruction set

There are 30-bit instructions. The opcode is in bits [29:26], and opcode bit 3 marks a multicycle instruction.
`N` (operand precision), `W` (result width) and `aux` come from the last SETPARAM.

| opcode | name     | fields                                   | effect |
|--------|----------|------------------------------------------|--------|
| 0      | NOP      |                                          | nothing |
| 1      | WRITE    | addr [25:16], data [15:0]                | selected blocks: word addr ← data |
| 2      | SELECT   | mask [25:13], value [12:0]               | flag ← ((id ^ value) & mask) == 0 |
| 3      | SETPTR   | ptr [25:16]                              | pointer register ← ptr |
| 4      | SETPARAM | N [25:19], W [18:12], aux [11:2]         | load Op-Params (controller only) |
| 8      | ADD      | A [25:16], B [15:6], fold [5:3]          | A ← A + B (W bits), or A ← A + fold(B) |
| 9      | SUB      | as ADD                                   | A ← A − B |
| A      | MULT     | P [25:16], X [15:6]                      | P ← X · Y, Y at aux: N-bit by N-bit, W-bit product |
| B      | TX       | src [25:16], hop [15:8]                  | selected blocks send src west; every block writes east-in at the pointer |
| C      | CLEAR    | A [25:16]                                | A ← 0 (W bits) |
| D      | TXADD    | A [25:16], hop [15:8]                    | selected blocks send A west; every block writes A + received at the pointer |

- The block ID is `{row, column}`, with `$clog2(total block columns)` column bits.
- ALU instructions act in every block. The select flag gates only WRITE data and TX sending.
- `fold = d` makes the y operand of PE i come from PE i + 2^(d−1), with zeros past PE 15.
- MULT uses Booth radix-2 over N multiplier bits, with the multiplicand sign-extended to W. It needs W ≥ N + 3.

A complete GEMV, as the testbenches run it:

```
per block (r,c): SELECT(all bits, {r,c}); WRITE A_AD+b  (b < N)
per column  c:   SELECT(column bits, c);  WRITE X_AD+b  (b < N)
SELECT(0,0); SETPARAM(N, W, X_AD)
MULT  P_AD, A_AD                       every PE: A[r][k] * x[k]
ADD   P_AD, P_AD, fold=4,3,2,1         sum of 16 PEs in PE 0
src = P_AD
for h = 1, 2, 4, ...  (h < block columns), level l = 0, 1, ...:
  SELECT(mask 2h-1, value h)           senders: column mod 2h == h
  SETPTR T_AD + l*W; TXADD src, h      receivers: sum at T_AD + l*W
  src = T_AD + l*W
wait for busy low; raise out_shift for 168 cycles
```

After the last level, PE 0 of block column 0 holds y[r].
Each of its writes also shifted into the row's output register.

## The PiCaSO-IM block (`picaso_im`)

The block is a 3-cycle pipeline around the register file (`BLOCK_PIPE = 3`):

1. **Read.** Ports A and B read two words.
   During a transfer the write address comes from the **pointer register**: in TX, port A uses the pointer as well; in TXADD, port A reads the block's own partial sum.
   The pointer gives the third address that overlapped send, receive and compute need.
   It increments after every transfer cycle.
2. **OpMux and network node.**
   - x = port A.
   - y = port B, folded port B, the east-in bit, or the instruction data (WRITE).
   - If the block is selected and sending, the node loads PE 0's bit of port B. Otherwise it forwards east-in.
3. **ALU.**
   - Each PE has a carry and a two-bit Booth register.
   - SUB adds ~y with carry-in 1.
   - A Booth step adds, subtracts or keeps, according to the pair {y_i, y_(i−1)} loaded by `booth_ld`.

Write-back goes to the port-A address of three cycles earlier.
`wb_bit`/`wb_en` report every bit written into PE 0; the output column uses them.

The register file is modelled as an array with two read ports and one write port.
On a real RAMB18 the write would share port A. The model keeps the two-address view but does not time-share the port.

## The tile controller (`tile_controller`, `ctrl_multi_driver`)

Pipeline: input register → decoder → [A] → Op-Params / single-cycle driver / driver-select FSM → [B] → multicycle driver → [C] → outmux → output register.

- A, B and C are parameter-controlled registers. The default enables A only.
- The single-cycle driver turns WRITE, SELECT and SETPTR into one control word each, at one instruction per cycle.
- The two-state FSM (single / multi) passes multicycle opcodes to the multicycle driver and waits for its `done`.

A multicycle instruction spends:

- one cycle loading its parameters;
- its work: W cycles for ADD, SUB and CLEAR; W + hop for TX and TXADD; and for MULT a CLEAR plus, for each multiplier bit i, one load cycle and W − i Booth steps;
- `BLOCK_PIPE` drain cycles, so the next instruction reads finished results.

An ADD is therefore W + 4 cycles long. This matches the N + 4 add cost the analytical model of the design uses.

## Why reductions cost what they cost

- **In-block.** Four ADDs with folds 8, 4, 2, 1: 4·(W + 4) cycles, with no data movement.
- **Array-level, binary hopping.**
  - Level h: the senders are the block columns ≡ h (mod 2h).
  - A sender's bit needs h cycles through h node registers.
  - TXADD therefore runs W + h words:
    - word k sends bit k of the source (port B);
    - from word h on, every block adds the arriving bit to bit k − h of its own partial sum (port A);
    - the sum is written at the pointer.
  - This needs three memory addresses in one cycle (two reads and the pointer write), which is why the block has the pointer register.
  - A level costs W + h + 4 cycles, so the whole reduction costs (W + 4)·⌈log2 P⌉ + P − 1 cycles for P block columns. The published latency model has the same form, with N in place of W.
  - Receivers are the block columns ≡ 0 (mod 2h).
  - Other blocks also write a sum, but only into the level's scratch area; their real partial sums stay at the source.
  - ⌈log2(columns)⌉ levels; 5 for the 24 default block columns.
  - TX (transfer only) and a separate ADD do the same job more slowly.
  - Where no sender exists east of a receiver (the edge of a non-power-of-two grid), zeros arrive and the sum is unchanged.

## Engine top (`imagine_top`)

- **Input registers.** `in_valid`/`in_ready` transfer one instruction per cycle.
  After a multicycle instruction they wait `RT_LAT = 2·TOP_FAN_LEVELS + 4` cycles, until tile (0,0)'s busy flag has come back through a return pipeline. Then they wait until it is low.
  They also keep the last SETPARAM's W.
- **Top fanout tree.** TOP_FAN_LEVELS levels of TOP_FANOUT copy `{valid, instr}` to every tile (default 4 levels of 4 for 168 tiles).
- **Column shift registers.**
  - One OUT_W-bit register per block row.
  - Bits written into PE 0 of block column 0 enter at the top and shift right, so after a W-bit result the top W bits hold it.
  - With `out_shift` high the column shifts up one row per cycle.
  - Elements leave, row 0 first, sign-extended from W, after two output registers (`out_valid`, `out_data`).
- **busy.** High while any instruction is in flight, including the cycles the last control word spends in the controller's output register and the tile fanout tree.
  Start reading only when `busy` is low.

Latency of a single-cycle instruction from acceptance to the blocks: 1 + TOP_FAN_LEVELS + 2 + PIPE_A + PIPE_B + PIPE_C + FAN_LEVELS cycles (10 at the defaults).

## Parameters

| parameter | default | meaning | origin |
|-----------|---------|---------|--------|
| NPE | 16 | PEs per block | 64K PEs on 4032 RAMB18 |
| DEPTH | 1024 | bits per PE | RAMB18 as 1024 × 16 |
| PIM_ROWS × PIM_COLS | 12 × 2 | blocks per tile | published U55 floorplan |
| FAN_LEVELS, FANOUT | 2, 4 | tile fanout tree | published implementation |
| PIPE_A / B / C | 1 / 0 / 0 | controller stages | A enabled in the published implementation; B, C optional |
| TILE_ROWS × TILE_COLS | 14 × 12 | tile grid | own choice giving 168 tiles = 4032 blocks |
| TOP_FAN_LEVELS, TOP_FANOUT | 4, 4 | top fanout tree | own choice (256 ≥ 168 leaves) |
| OUT_W | 72 | output element width | own choice: 32 × 32-bit products summed over 256 terms |
| instruction | 30 bits | | published; the field layout is own |

## How far it has been verified

Each module has a self-checking testbench `tb/tb_<module>.sv`. It compares against integer models, ends with a `TB_RESULT checks=… failures=…` line, and has a watchdog.

- **Block level:** register file, OpMux, ALU (ADD, SUB, full Booth multiplies), network node, select, fanout tree, one PiCaSO-IM block (including the 3-cycle latency), the controller's control-word stream (WRITE latency, ADD = W + 6 busy cycles), input registers and output column.
- **GEMV:** one tile, a 2 × 2 tile array and the top all compute complete GEMVs with hops across tile boundaries.
- `tb_imagine_top` also counts:
  - issue stalls;
  - selects, folds and hops;
  - Booth add and subtract steps;
  - reads.
- `tb_imagine_gemv` runs 4-, 8-, 16- and 32-bit GEMVs on two full-size (12 × 2) tiles.
  It reduces with TXADD and checks the array-level reduction time.
  It prints the cycle count from MULT to result: 238, 396, 856 and 2352 cycles for a 12 × 64 matrix.

The full 168-tile engine is checked by lint and elaboration only.
Verilator specialises each tile position separately, which makes a full-size simulation build impractically long.
The largest simulated configuration is 2 × 2 tiles of 2 × 2 blocks, and 1 × 2 tiles of the full 12 × 2 size.

Simulate a testbench with:

```
verilator --binary --timing --assert -Irtl -Itb rtl/imagine_pkg.sv \
    tb/imagine_tb_pkg.sv tb/tb_imagine_gemv.sv --top-module tb_imagine_gemv
./obj_dir/Vtb_imagine_gemv
```

Uninitialised state starts random (`+verilator+rand+reset+2`). Everything a testbench reads is reset or written first.

## Departures and own choices

- **Own design.** The publication gives the block diagram and the instruction width, not the encodings. So these are all this design's own:
  - the opcode set and field layout;
  - the control word and the select rule;
  - the fold pattern;
  - the multicycle sequences and the Booth-multiply product width;
  - the busy handshake at the top.
- **Pointer.** It increments on every transfer cycle. During TX and TXADD every block writes at its pointer, and only the receivers' results are used.
- **Network.** Only the east-to-west chain exists. The original four-direction network of the base block was left out, as in the published design.
- **Not built.** The front-end processor and the FIFO-in/FIFO-out buffers are outside the engine. The top exposes their ports.
- **Not modelled.** Floorplanning (placing tiles to avoid hard blocks) and the timing closure at BRAM Fmax are implementation work outside RTL.
- **Register file.** It is modelled with a separate write port; the hardware block would time-share port A.
- **Busy at the top.** It is derived from tile (0,0) only, which is valid because all tiles run in lock-step.
- **Hard limits.**
  - W must satisfy N + 3 ≤ W ≤ 127 and W ≤ OUT_W.
  - Addresses are 10 bits.
  - The hop field is 8 bits.
