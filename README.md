# IMAGine: a processing-in-memory GEMV engine in SystemVerilog

IMAGine computes matrix-vector products (y = W x) inside the FPGA's block
RAMs. Every bit-line of every BRAM gets a one-bit processing element (PE), so
an FPGA with 2016 BRAM36 tiles holds 64,512 PEs that all run the same
instruction at once. Operands are stored *transposed*: an N-bit number lives
in N consecutive rows of one bit-line, and the PEs work on it bit-serially,
LSB first. Compute scales with the number of BRAMs rather than with logic or
DSPs. The whole design is pipelined so that nothing is slower than the BRAM
itself. The published design reaches the BRAM's maximum clock, 737 MHz on an
Alveo U55.

This RTL implements the architecture: the engine top level, the GEMV tiles,
the tile controller and the PiCaSO-IM PIM block. The architecture (block
structure, tile size, tree depths, the three PIM-block extensions, radix-2
Booth PEs, the 30-bit instruction) is published. The instruction encoding,
the bit-serial algorithms, the reduction schedule and the handshakes are not;
those parts are this implementation's own and are marked as such below.

## Structure

```
FIFO-in ─► input_regs ─► fanout_tree (top) ─► tile_array ─► column_shift_regs ─► FIFO-out
                                                 │
                                 gemv_tile  (12 x 14 of them by default)
                                 ├─ tile_controller ─ multicycle_driver
                                 ├─ fanout_tree (2 levels, fanout 4)
                                 └─ pim_array: 12 x 2 picaso_im_block
                                      picaso_im_block = picaso_regfile + picaso_opmux
                                                        + picaso_alu + network node
                                                        + pointer + select
```

| Level | Default | Where the number comes from |
|---|---|---|
| PEs per PIM block | 16 | derived: 64K PEs over 2016 BRAM36, 12 BRAM36 per 24-block tile |
| Register-file rows per PE | 1024 | assumed (depth of a BRAM18 used 16 bits wide) |
| Blocks per tile | 12 rows x 2 columns | published tile size; the row/column orientation is assumed |
| Tiles | 12 rows x 14 columns = 168 | 168 is derived from 2016 BRAMs / 12 per tile; the split is assumed |
| Tile fanout tree | 2 levels, fanout 4 | published |
| Top fanout tree | 4 levels, fanout 4 | assumed (the depth is only said to be a parameter) |
| Controller pipeline | stage A on, B and C off | published (stage A was enabled in the final build) |

All of these are parameters of `imagine_top` and of the modules below it.

## The PIM block (`picaso_im_block`)

The block has four pipeline stages:

```
cycle 0  control word arrives; SELECT / WRITE_ROW / SET_PTR act here
cycle 1  register-file data (ports A and B)       -> network node register (west_out)
cycle 2  OpMux output register (operands A and B)
cycle 3  ALU result register -> written back to wr_addr at the end of the cycle
```

* **Register file** (`picaso_regfile`): 1024 x 16 bits. It has two
  synchronous read ports and one write port. A real BRAM has two ports and
  writes back through one of them. Modelling a third port keeps the model
  simple but departs from the hardware.
* **OpMux** (`picaso_opmux`): operand A comes from port A, port B or zero.
  Operand B comes from port B, from the east neighbour, from zero, or from
  port B of the PE 8, 4, 2 or 1 places higher. The last four choices are the
  *fold* modes, which let a block add its own PEs together without copying.
* **ALU** (`picaso_alu`): one full adder and one carry flip-flop per PE.
  `first` starts the carry at 0 for add and at 1 for subtract. Each PE also
  holds a Booth pair `(b_j, b_{j-1})` for radix-2 Booth multiplication.
* **Network node**: while `is_tx` is set, the word read on port A goes into a
  register that drives `west_out`. The west neighbour sees it on `east_in`
  and can use it as operand B. This is the only inter-block network: data
  moves east to west only.
* **Pointer register**: while `is_tx` is set, the pointer addresses port A
  instead of `addr_a` and advances one row per cycle. This provides the third
  address that accumulation needs: transmit from one place, read from a
  second and write to a third.
* **Select**: each block knows its engine-wide (row, column) ID. A SELECT
  instruction names a row and/or a column. Only matching blocks write their
  register file; every block still reads and transmits.

## The tile controller (`tile_controller`, `multicycle_driver`)

```
instr ─► input reg ─► Decoder ─[A]─► Op-Params ─[B]─► Driver-Select FSM ─┬─ Single-cycle driver ─[C]─► outmux ─► ctrl reg
                                                                         └─ Multicycle driver ───┘
```

*Single-cycle* instructions (SELECT, WRITE_ROW, SET_PTR, SET_PARAM, NOP) take
one cycle each, back to back. A *multicycle* instruction puts the two-state
driver-select FSM into MULTI. The multicycle driver then spends one cycle
loading destination and widths from Op-Params, issues one control word per
bit step, and idles for 3 cycles so the last write-back lands. It then
pulses `done` and the FSM returns to SINGLE. The controller has no input
back-pressure. At the top level, `input_regs` stops taking instructions from
FIFO-in after a multicycle one until tile (0,0) reports `mc_done`. All tiles
run the same stream in lock-step.

Instruction encoding (this implementation's own; helper functions
`enc_*` in `imagine_pkg`):

| opcode [29:26] | name | fields |
|---|---|---|
| 0 | NOP | – |
| 1 | SELECT | [25:18] row, [17:12] column, [1] match row, [0] match column |
| 2 | WRITE_ROW | [25:16] address, [15:0] one bit per PE (selected blocks only) |
| 3 | SET_PTR | [25:16] pointer value |
| 4 | SET_PARAM | [25:16] destination, [11:6] width N, [5:0] width of B (0 = N) |
| 8 | ADD | [25:16] A, [15:6] B, [5:3] operand-B source, [2] A := 0 |
| 9 | SUB | same |
| A | MULT | A = multiplicand, B = multiplier, N-bit signed, 2N-bit product |
| B | ACCUM | dst = word at A + word arriving from the east neighbour |
| C | READOUT | send N rows at the pointer west, marked valid |

In ADD and SUB, operand B is sign-extended beyond its width. This is how a
2N-bit product is added into a wider accumulator.

Issue cycles per multicycle instruction (add 1 LOAD cycle and 3 drain cycles
to get the time from start to done):

| Operation | Cycles | How |
|---|---|---|
| ADD, SUB | N | one bit per cycle |
| MULT | Σ_{j<N} (1 + 2N − j) | for each multiplier bit j: one Booth-load step, then add, subtract or skip the sign-extended multiplicand into product rows j..2N−1; 108 cycles for N = 8 |
| ACCUM | N + 1 | the pointer read for bit t is issued one cycle before the local read of bit t. The neighbour's bit then arrives through its network-node register exactly when the local bit reaches the OpMux |
| READOUT | N | |

## How a GEMV runs

The testbenches use the following mapping, which is this implementation's
choice. Matrix row i belongs to one PE: PE `i % 16` of block row `i / 16`.
The matrix columns are spread over the block columns, K per block. x is
broadcast into every PE of a block column.

1. Load W with SELECT (row and column) and WRITE_ROW, then x with SELECT
   (column) and WRITE_ROW. One instruction writes one bit of 16 numbers.
2. For each of the K local columns: `MULT` into a product, then `ADD` it
   (sign-extended) into a 32-bit accumulator. The first ADD uses A := 0.
3. Reduce east to west, one block column at a time, starting from the east:
   SET_PTR to the accumulator, SELECT column c, ACCUM. Every block transmits
   its accumulator and only column c adds the incoming word. After all steps,
   column 0 holds the full row sums. This is the paper's "partial results move
   from east to west and end in the left-most PE column".
4. SET_PTR, READOUT. The west ports of the left-most tiles stream the sums
   bit-serially into `column_shift_regs`. That block keeps one entry per PE
   row, sign-extends it, and sends one word per cycle to FIFO-out, PE-row
   order, through two output registers.

At the reduced test size (64 x 12 matrix, 6 block columns) one GEMV takes
710 cycles from the first compute instruction to the last result. At the
default size (2304 x 28 matrix, 28 block columns, 64,512 PEs) it takes 3900
cycles. The
reduction here is sequential, one step per block column. The published cycle
latencies (a few hundred cycles for an 8-bit 256 x 256 GEMV) come from a
reduction algorithm that is not published. This design does not reproduce
them.

## Where this departs from, or goes beyond, the published design

* The published material gives no instruction encoding, ALU algorithm,
  accumulation schedule, flow control or read-out protocol. All of these are
  this design's own.
* The register file has two read ports and a separate write port, not a
  two-port BRAM primitive. No vendor primitives are used, and there are no
  timing constraints or floorplan. The published design places each tile in
  its own Pblock, which is a placement measure with no RTL.
* The reduction is a sequential east-to-west chain. The PiCaSO binary-hopping
  NEWS network it replaces is not built, nor is the "slice4" variant with
  4-bit-sliced accumulation and radix-4 Booth.
* Results are read out 32 bits wide (`ACC_W`). Accumulation can use up to 63
  bits, but READOUT delivers at most `ACC_W` bits. A 32-bit GEMV with 64-bit
  results therefore cannot be returned whole.
* FIFO-in is a valid/ready pop port. FIFO-out is a valid-only push port with
  no back-pressure. The FIFOs themselves and the front-end processor are
  outside this design.

## Simulating

Each module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog. Example with plain
Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/imagine_pkg.sv tb/tb_gemv_tile.sv \
          --top-module tb_gemv_tile -Mdir obj && obj/Vtb_gemv_tile
```

| Testbench | What it shows |
|---|---|
| `tb_picaso_regfile`, `tb_picaso_opmux`, `tb_picaso_alu` | datapath pieces against integer models |
| `tb_picaso_im_block` | row writes, ADD/SUB, fold, east-in accumulate, select, read-out |
| `tb_pim_array`, `tb_tile_array` | east-to-west reduction inside a tile and across tiles |
| `tb_multicycle_driver`, `tb_tile_controller` | control-word streams, Op-Params, cycle counts, pipeline options |
| `tb_input_regs`, `tb_column_shift_regs`, `tb_fanout_tree` | flow control, read-out, tree delay |
| `tb_gemv_tile` | a full 192 x 4 signed 8-bit GEMV on one default tile, with a MULT cycle count check |
| `tb_imagine_top` | a GEMV through FIFO-in/FIFO-out on 2 x 3 tiles of 2 x 2 blocks. It also counts back-pressure, cross-tile accumulation, Booth subtraction and shift-out |
| `tb_gemv_precision` | the same tile GEMV at 4, 8 and 16 bits in one run, with MULT cycle counts for each |
| `tb_imagine_top_full` | the same GEMV at the default size: 64,512 PEs, 2304 x 28 matrix. It passes (2309 checks); the simulation itself runs in seconds, but the C++ build of 4032 PIM blocks takes about 15 CPU-minutes, so use `-j` |

The shared top-level test body is `tb/imagine_top_tb_body.svh`. To try
another size, change the localparams and the `#(...)` in `tb_imagine_top`.
