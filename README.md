# An approximate, heterogeneous R-Blocks style CGRA in SystemVerilog

Neural-network inference is mostly multiply-accumulate, and many output
channels of a layer can tolerate a slightly wrong product. This design puts
accurate and approximate multipliers side by side in one coarse-grained
reconfigurable array (CGRA). The compiler then chooses, for each output
channel, which kind of multiplier computes it. The approximate multiplier is a
DRUMk unit. Both kinds execute the same micro-instruction with the same
latency, so moving a channel from one to the other only changes which tile an
instruction is routed to. Both can work in the same cycle.

The RTL follows the architecture described in *A Unified Framework for Mapping
and Synthesis of Approximate R-Blocks CGRAs* (Alexandris et al.), which extends
the R-Blocks CGRA. That paper describes its tiles, networks and multiplier but
publishes no instruction set, encodings or sizes. Everything the paper leaves
open has been filled in here by the simplest choice that works. The section
"What comes from the paper and what does not" lists each one.

## 1. The array

The core is a 6 x 6 grid of tiles. The layout is taken from the paper's
architecture overview and is fixed in `rblk_pkg::tile_at()`:

```
        col 0   col 1   col 2   col 3   col 4   col 5
row 0   LM      LM      LM      LM      LM      LM
row 1   ID      ALU     ALU     ID      ALU     ALU
row 2   ID      RF      RF      ID      RF      RF
row 3   ID      AxMUL   AxMUL   ID      MUL     MUL
row 4   LSU     ID      ABU     ID      ALU     MUL
row 5   LM      LM      LM      LM      LM      LM
```

| tile  | count | module      | what it does |
|-------|-------|-------------|--------------|
| LM    | 12    | `lm_tile`   | local data memory, 512 x 32 bit, load/store at `a + imm` |
| ID    | 8     | `id_tile`   | instruction decode: turns one instruction word per cycle into a control word |
| ALU   | 5     | `alu_tile`  | add, sub, and, or, xor, shifts, set-less-than, moves, accumulate |
| RF    | 4     | `rf_tile`   | 16-entry register file, one write and one read per cycle |
| MUL   | 3     | `mul_tile #(.APPROX(0))` | exact 32 x 32 multiplier (low 32 bits) |
| AxMUL | 2     | `mul_tile #(.APPROX(1))` | DRUM7 approximate multiplier (low 32 bits) |
| LSU   | 1     | `lsu_tile`  | load/store to external memory, stalls the array while it waits |
| ABU   | 1     | `abu_tile`  | program counter and branches |

Around the grid sit the instruction memory (`instr_mem`, one bank per ID), the
program loader (`program_loader`, an AXI4-Lite subordinate for the host) and
the arbiter (`arbiter`, an AXI4-Lite manager towards external memory).
`cgra_top` connects all of them.

Every functional tile has the same shape. It has a control input, operand
inputs `a` and `b`, a global `stall` input and one registered output `y`.

## 2. Two networks

Tiles are not wired to each other directly. Two programmable 2D meshes
(`noc_mesh`) carry all traffic. Each mesh has one `switchbox` per tile
position:

* the **data network** (32 bits) carries each tile's output `y` to operand
  inputs (`a` is tile-input 0, `b` is tile-input 1);
* the **control network** (49 bits, one `ctrl_t`) carries each ID tile's
  control word to the tiles that ID drives.

Each switchbox has four tracks towards each neighbour, one set in each
direction. An outgoing track is fed by one of the three other sides, or by the
local tile's output. Which track of the other side feeds it follows the Wilton
pattern (`rblk_pkg::wilton_track`). Going straight through keeps the track
number. Each of the eight turns maps track `t` to its own permutation of the
track numbers:

| from -> to | track on the new side | from -> to | track on the new side |
|------------|------------------|------------|------------------|
| W -> N, N -> W | `(T - t) % T`     | E -> N | `(T + t - 1) % T` |
| W -> S | `(T + t - 1) % T`          | N -> E | `(t + 1) % T` |
| S -> W | `(t + 1) % T`            | E -> S, S -> E | `(2T - 2 - t) % T` |

Each turn undoes the opposite turn. Because a net changes track at a turn,
nets that start on the same track spread over different tracks after turning.
This makes more routes fit than a pattern that only ever uses one track number.
A tile input can take any incoming track, or the tile's own
output; the second case serves a counter that adds to itself. The pattern is
static. The host writes it before a run, and it does not change during the
run.

The paths are combinational. A value registered in one tile reaches any other
tile in the next cycle, however far away it is. One tile output may feed
several inputs (fan-out). Fan-out on the control network is how SIMD
operation works: one ID routed to several tiles makes them execute the same
operation in the same cycle, one vector lane per tile. Lint tools report a
combinational loop through the meshes. This is structural: a valid
configuration never closes a cycle.

Switchbox configuration fields (8-bit values, reset to 0 = unconnected):

| field `idx`             | meaning | value |
|-------------------------|---------|-------|
| `d*TRACKS + t`          | outgoing track `t` on side `d` (0 N, 1 E, 2 S, 3 W) | 0 none; 1..3 side `s = (d+v)%4`, track `wilton_track(d, s, t)`; 4 the local tile output |
| `4*TRACKS + i`          | tile input `i` | 0 none; `1 + s*TRACKS + t` incoming side `s` track `t`; `1 + 4*TRACKS` the local tile output |

`tb/noc_router_pkg.sv` holds a small XY router that turns "tile A output to
tile B input p" into these words. It routes along the row first, then the
column. It follows the track permutation at the turn and takes the lowest
starting track whose whole path is free. Use it as the reference for the
encoding.

## 3. How a program runs

This is the part that needs the most care when writing programs.

**Lock-step streams.** The program is a matrix: for every program counter
(PC) value there is one 32-bit instruction per ID bank. All banks are read at
the same PC, so the eight streams stay in step. This is the "parallel
assembly" model of R-Blocks. It is a transport-triggered style machine: the
compiler decides in every cycle what each unit does, and the data routes
stay fixed.

**Pipeline.** The ABU holds the PC.

```
cycle t    : PC = p
cycle t+1  : instruction memory outputs the words of p         (registered read)
cycle t+2  : ID tiles output the decoded control words of p    (registered decode)
             every tile executes them and registers its result
cycle t+3  : the results of p can be read by any tile through the data network
```

Call the cycle in which the tiles execute PC p "slot p". A value produced in
slot p can be used by an instruction in slot p+1. Every tile keeps its
result until it executes another operation of its own class. Opcodes for
other tile classes are no-operations to it. For example, an ALU ignores
`OP_LD`.

**Branches.** The ABU executes `OP_JMP`, `OP_BNZ`, `OP_BZ` in slot p. By then
p+1 and p+2 have already been fetched, so they always execute. These are two
delay slots, and the target runs in the slot after them. `OP_HALT` stops
fetching and sets `done`. Its two delay slots also execute, so put
no-operations there.

**Stall.** External memory has no fixed latency. When the LSU sees `OP_LD` or
`OP_ST`, it raises `stall` in that same cycle and keeps it high until the
arbiter answers. While `stall` is high, nothing changes: not the PC, not the
instruction memory output, not the ID registers, not any tile result. When
the answer arrives, `stall` drops for one cycle. In that cycle all tiles
execute their slot exactly once, the LSU included. Load data appear on the
LSU's `y` at the end of that slot, like any other result. So in the slot that
loads item j+1, a store can take item j from the LSU. `tb_cgra_top` streams
data this way, one word per slot.

**Start and idle.** After reset, and after `done`, the instruction memory
outputs zero words (no-operations). A write of 1 to the control register
restarts the program at PC 0. Instruction memory is not cleared by reset, so
the host must write every word the program can reach, no-operations
included.

## 4. Instruction word and operations

```
 31    27 26      25  21 20  16 15              0
+--------+-------+------+------+-----------------+
|   op   |use_imm|  rd  |  rs  |      imm16      |
+--------+-------+------+------+-----------------+
```

The ID tile sign-extends `imm16` to 32 bits and marks the word valid. An
undefined opcode decodes to a no-operation. In arithmetic tiles,
`use_imm` replaces operand `b` by the immediate.

| op (value) | tile | effect on `y` / state |
|------------|------|------------------------|
| ADD 1, SUB 2, AND 3, OR 4, XOR 5 | ALU | `a op b` |
| SHL 6, SHR 7, SRA 8 | ALU | `a` shifted by `b[4:0]` |
| SLT 9 | ALU | `signed(a) < signed(b)` |
| MOVA 10, MOVB 11 | ALU | `a`, `b` (MOVB with `use_imm` loads a constant) |
| ACC 12 | ALU | `y + a` |
| MUL 16 | MUL, AxMUL | low 32 bits of `a * b` (exact, or DRUMk) |
| LD 20, ST 21 | LM, LSU | word address `a + imm`; store data `b` |
| RFW 24, RFR 25, RFWR 26 | RF | `reg[rd] = a`; `y = reg[rs]`; both (read sees the old value) |
| JMP 28, BNZ 29, BZ 30, HALT 31 | ABU | PC = `imm`; if `a != 0`; if `a == 0`; stop |

## 5. The DRUM multiplier

`drum_mul` implements the dynamic-range unbiased multiplier DRUMk:

1. Take the magnitude of each two's-complement operand.
2. Find its leading one. If the magnitude is k bits or fewer, use it as it is.
   Otherwise keep the k bits starting at the leading one, and force the lowest
   kept bit to 1. The dropped bits average out to that half-unit, which makes
   the truncation unbiased.
3. Multiply the two k-bit values exactly.
4. Shift the product left by the number of bits dropped from both operands.
   This is the barrel shifter.
5. Negate the result if the operand signs differ.

Here k counts the leading one itself: DRUM7 keeps the leading one and the six
bits below it. The source text can also be read as "k bits after the leading
one". Only the reading used here reproduces the published error figures below.

The tiles use k = 7, the setting the paper evaluates. With these rules, the
RMS error over all signed 8 x 8 products matches the paper's table.
`tb_drum_mul` checks this:

| k | RMSE, this RTL | RMSE, paper |
|---|----------------|-------------|
| 4 | 385.38 | 385.4 |
| 5 | 197.99 | 198.1 |
| 6 | 101.16 | 101.3 |
| 7 | 13.14  | 13.1  |

For INT8 data, DRUM7 is exact except when an operand is -128. The
approximation bites on wider operands, for example 16-bit activations.

## 6. Host interface

Both system ports are AXI4-Lite. They appear on `cgra_top` as the structs
`axil_req_t` / `axil_rsp_t` from `rblk_pkg`.

Program loader (subordinate) address map, byte addresses:

| address | contents |
|---------|----------|
| `0x0_0000` | write bit 0 = start; read bit 0 = running, bit 1 = halted |
| `0x1_0000 + bank<<10 + pc<<2` | instruction word of ID bank `bank` at `pc` |
| `0x2_0000 + sb<<8 + idx<<2` | data-network switchbox `sb` (= row*6+col), field `idx` |
| `0x3_0000 + sb<<8 + idx<<2` | control-network switchbox, same layout |

ID banks are numbered in row-major order of the ID tiles: (1,0), (1,3), (2,0),
(2,3), (3,0), (3,3), (4,1), (4,3).

The external-memory port (manager) issues one single-beat access at a time.
LSU word address n becomes byte address 4n, and a write sets all strobes.
The arbiter serves its requesters in round-robin order. The default grid has
one LSU.

A run: write both networks' switchbox fields, write every instruction word,
write 1 to `0x0`, then poll `0x0` until bit 1 is set. The `done`, `busy`,
`stall` and `branch` outputs show the same state to a testbench.

## 7. Worked example: two output channels, one accurate and one approximate

`tb/tb_cgra_top.sv` runs the core at its default parameters. Read it as a
small program listing. It computes two dot products of length 12 over the
same input vector: channel 0 with weights `w0` on a MUL tile, channel 1 with
weights `w1` on an AxMUL tile. This is the per-output-channel split that the
mapping flow produces.

* Slots 1..37 stream `x`, `w0`, `w1` from external memory into three LMs. The
  load of item j+1 and the store of item j share a slot.
* A five-slot loop runs 12 times: three LM loads at `counter - 1`, then the
  MUL/AxMUL pair (one ID, SIMD) together with the counter decrement, then the
  two accumulating ALUs (one ID, SIMD) and `BNZ`, then the two delay slots.
* A move ALU and the register file bring both sums to the LSU, which stores
  them. The ABU halts.

The whole run takes 329 cycles, 220 of them stalled on external memory. The
testbench checks both sums against its own models, the numbers of memory
transactions and of taken branches, and that every mechanism occurred.

### Sweeping the accurate/approximate split

`tb/tb_pointwise_conv.sv` uses the same routes for a slice of a MobileNetV2
pointwise (1x1) convolution. The slice has 8 input channels and 8 output
channels, with unsigned 8-bit activations and signed 8-bit weights. Each
output channel gets an importance score; the testbench uses the L1 norm of
the channel's weights as a stand-in. At quantile q, the `q * 8` least
important channels go to the AxMUL tile and the others to the MUL tile. Each
pass of the program runs one channel of each kind in the same cycles. The
number of passes is therefore the larger of the two counts. For each quantile
the testbench writes a new program, restarts the core and checks every
output channel. Typical output:

```
quantile 0.000: 0 approximate channels, 8 passes, 1444 cycles, output RMSE 0.00
quantile 0.250: 2 approximate channels, 6 passes, 1096 cycles, output RMSE 136.58
quantile 0.500: 4 approximate channels, 4 passes, 747 cycles, output RMSE 199.74
quantile 1.000: 8 approximate channels, 8 passes, 1431 cycles, output RMSE 220.52
```

An even split finishes first, because both multipliers are busy in every
pass. The error grows with the share of approximate channels. Unsigned
activations above 127 have eight significant bits, so DRUM7 rounds them.

## 8. What comes from the paper and what does not

From the paper:

* the tile kinds;
* the 6 x 6 layout of the overview figure;
* two programmable 2D-mesh networks, one for data and one for control;
* ID tiles that drive one tile (SISD) or a group of tiles (SIMD);
* lock-step per-unit instruction streams;
* instruction memory written by a program loader on an AXI subordinate port;
* an arbiter from the LSU onto an AXI manager port;
* the DRUMk algorithm, and the use of DRUM7;
* 32-bit operands;
* multiplier tiles that are interchangeable at the instruction level.

This design's own choices:

* the instruction format and opcode set, including the ALU operations beyond
  add/shift and the accumulate;
* the ABU as PC/branch unit with two delay slots (the paper only names the
  ABU);
* the stall-on-access LSU;
* memory sizes: LM 512 words, RF 16, instruction memory 256 per bank;
* four tracks per mesh side, and one-way tracks. The paper names Wilton
  switchboxes but prints no permutation. The one used here is the form common
  in FPGA routing tools;
* combinational network paths;
* AXI4-Lite instead of full AXI, and the loader address map;
* round-robin arbitration;
* signed operands in DRUM, by sign-magnitude.

Not in the RTL:

* **Voltage islands.** The paper puts the AxMUL tiles, ALUs, RFs and their
  switchboxes at 0.6 V and the rest at 0.8 V, with level shifters between.
  That is power intent for synthesis and layout, not logic. Each tile is its
  own module, so any grouping of tiles can be put in a power domain.
* **SRAM macros.** LM and instruction memory are written as arrays.
* **Host, external memory and the system AXI interconnect.** These are
  outside the core. Behavioural stand-ins are in `tb/`.
* **The software flow:** C compiler, interconnect pruner, place-and-route of
  the networks, and per-channel importance analysis. The hardware only
  provides what that flow targets.
* **The Vector-4 and Vector-8 arrays** that the paper evaluates. Their layouts
  are not printed. They need 19 and 38 ALU/multiplier tiles, against 10 in
  this grid. A larger grid needs a new `tile_at()` table and new
  `ROWS`/`COLS` in `rblk_pkg`. The modules themselves are independent of the
  layout.

How far to trust it: every module has a self-checking testbench with random
stimulus against an independent model, and each testbench was shown to catch
a deliberately broken copy of its module. The end-to-end tests cover two
programs, one of them in seven mappings. No compiler exists for this instruction format, so all programs are
written by hand, as in `tb_cgra_top`.

## 9. Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and ends itself. Any
one of them builds with plain Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/rblk_pkg.sv tb/noc_router_pkg.sv rtl/*.sv \
    tb/axil_host.sv tb/axil_mem_model.sv tb/tb_cgra_top.sv \
    --top-module tb_cgra_top -o sim
./obj_dir/sim
```

Replace `tb_cgra_top` with any other `tb/tb_*.sv` to test one block. The
testbenches are `tb_drum_mul`, `tb_mul_tile`, `tb_alu_tile`, `tb_rf_tile`,
`tb_lm_tile`, `tb_lsu_tile`, `tb_abu_tile`, `tb_id_tile`, `tb_instr_mem`,
`tb_switchbox`, `tb_noc_mesh`, `tb_program_loader`, `tb_arbiter`,
`tb_cgra_top` and `tb_pointwise_conv`. The helpers are `axil_host` (host), `axil_mem_model` (external
memory) and `noc_router_pkg` (route to configuration words).

To change the design:

* sizes are parameters of `cgra_top`: `TRACKS`, `IM_DEPTH`, `LM_DEPTH`,
  `RF_DEPTH`, `DRUM_K`;
* the layout is `tile_at()` in `rblk_pkg`;
* a new operation is a new `op_e` value, a case in the tile that executes
  it, and an entry in the decode list of `id_tile`.
