# MASTER: an SVM accelerator that computes inside non-volatile memory

MASTER runs support-vector-machine inference for sensor nodes that live on
harvested energy. Two ideas shape it:

* **The memory is the processor.** Data sits in STT-MRAM arrays
  (computational RAM, CRAM). Cells in one column of an array can be wired into
  a logic gate, so a NAND, AND, OR, NOR, NOT or COPY is done on whole rows at
  once: every active column computes one bit, in parallel. Arithmetic is done
  bit-serially from these gates, for example nine NANDs for a full adder. No
  data ever leaves the array to be computed on.
* **Power may vanish at any instant.** Everything that matters is already
  non-volatile: the arrays, the program counter and one saved instruction.
  Every instruction can be repeated without changing its result. So the chip
  needs no checkpointing. After an outage it re-activates the columns that
  were in use, repeats at most one instruction, and carries on.

This repository holds synthesizable SystemVerilog for the digital part of
MASTER, plus self-checking testbenches. The analog parts are represented by
their logical behaviour. These are the magnetic tunnel junctions (MTJs), the
drivers and sense amplifiers, the voltage monitor and the harvester.

## 1. Blocks

```
                 vdd_mv ──► voltage_sense ──► power_good ─┐ (volatile reset)
                                                          ▼
  instruction tiles ◄─port B─ mem_controller ──cmd──► data tiles (0..N-1)
   (cram_tile x36)   fetch    │  pc_unit (PC-A, PC-B,     (cram_tile x240)
                              │   parity: nv_reg)          │  ▲
                              │  act_reg (nv_reg)     rd   │  │ wdata
                              │                            ▼  │
   sensor buffer ◄──rd── mem_buffer (one 1024-bit line) ◄──────┘
   (tile 0x1FE)              ▲
                             └── result row ─► tx_data (transmitter)
```

| Module | What it is |
|---|---|
| `master_pkg` | Instruction format, opcodes, `cmd_t` broadcast struct, `encode`/`decode` |
| `cram_gate` | The in-array logic gate applied to all columns of a row |
| `col_decoder` | Turns an Activate Columns instruction into a column mask |
| `cram_tile` | One 1024 x 1024 array: memory ops, gates, the column latch and a row port |
| `nv_reg` | Non-volatile register whose write takes several cycles and can be torn |
| `pc_unit` | Duplicated PC (A/B) with a parity bit that selects the valid copy |
| `mem_buffer` | 128-byte line buffer used for tile-to-tile and sensor-to-tile moves |
| `mem_controller` | Fetch, broadcast, wait, commit-PC sequencer with restart logic |
| `voltage_sense` | Behavioural model of the supply monitor with hysteresis |
| `master_top` | The whole accelerator |

## 2. Computing in a CRAM tile

A tile has 1024 rows and 1024 columns of MTJ cells, 128 KB in all. Each
column has two bit lines: one for even rows and one for odd rows. A logic
operation reads inputs from rows `n1` and `n2` and writes the output to row
`m`. The two inputs must be on rows of the same parity, and the output on a
row of the other parity. The current then flows from one bit line through
the two input cells, along the column's logic line, and through the output
cell to the other bit line.

An STT output cell does not compute a value. It either switches or stays as
it is, and the current can only push it toward one state. Each gate is
therefore two steps:

1. **Preset**: write the output row to the gate's start value.
2. **Gate**: the inputs decide whether enough current flows to flip the
   output to the other value.

| Gate | Preset | Output flips (to) when |
|---|---|---|
| NAND | 0 | `~(a & b)` (to 1) |
| AND | 1 | `~(a & b)` (to 0) |
| NOR | 0 | `~(a \| b)` (to 1) |
| OR | 1 | `~(a \| b)` (to 0) |
| NOT `a` | 0 | `~a` (to 1) |
| COPY `a` | 1 | `~a` (to 0) |

`cram_gate` models exactly this rule: `out = flip ? target : out_old`. The
compiler must issue the preset. A gate applied to an output that was not
preset gives a wrong answer, just as the silicon would. The AND entry comes
from the paper. The other directions follow the same pattern but are this
design's choice; the paper only says that they work "similarly". The
parameter `SHE = 1` selects the spin-Hall cell variant, which writes the
function directly and needs no preset.

**Why repeating a gate is safe.** Say power drops part way through a gate.
Either the output has already flipped to the target, or it has not. Running
the gate again is then the same as running it for longer. A flipped cell
cannot flip back, and a cell that should flip will flip. A write simply
writes again. This property is called idempotence, and the restart scheme in
section 4 depends on it.

**Active columns.** An operation acts only on the columns whose latch is
set. Activate Columns instructions load that latch. It holds across any
number of instructions, but it is volatile and is lost in an outage. In this
design, writes and presets are also masked by the active columns. This lets
a program update a subset of a row. A tile that hears an Activate Columns
instruction addressed to another tile clears its own latch. As a result, the
most recent Activate Columns instruction alone defines the active columns
everywhere, and re-issuing it restores the whole chip's column state.

If a gate instruction breaks the row-parity rule, it changes nothing and
pulses `par_err`.

## 3. Instructions

Instructions are 64 bits wide. The field widths come from the paper; their
positions and the opcode values are this design's:

| Bits | Field |
|---|---|
| 63:60 | opcode |
| 59:51 | tile address (`0x1FF` = all data tiles, `0x1FE` = sensor buffer) |
| 50:41 | address 1 |
| 40:31 | address 2 |
| 30:21 | address 3 |
| 20:11 | address 4 |
| 10:1 | address 5 |
| 0 | unused |

| Opcode | Name | Addresses | Effect |
|---|---|---|---|
| 0 | READ | row | the tile's row goes into the line buffer |
| 1 | WRITE | row | the line buffer goes into the row (active columns) |
| 2, 3 | PRESET0, PRESET1 | row | a constant goes into the row (active columns) |
| 4 | ACT_LIST | up to 5 columns | activate exactly these columns |
| 5 | ACT_RNG | lo, hi, step | activate lo..hi in steps (step 0 means 1): bulk form |
| 8–B | NAND, AND, NOR, OR | n1, n2, m | two-input gate |
| C, D | NOT, COPY | n1, m | one-input gate |

The paper says only that a bulk form of column addressing exists. The range
form `ACT_RNG` is this design's. Decoding each address costs one cycle in
the tile, and applying the operation costs one more. An instruction with k
addresses therefore finishes k+1 cycles after its broadcast: 2 for memory
ops, 3 for NOT and COPY, 4 for two-input gates and ranges, and 6 for a
five-column list.

## 4. The controller and restarting after power loss

`mem_controller` is the only sequencer on the chip. The controller does no
computing itself. It fetches an instruction from an instruction tile through
the tile's row port, then broadcasts it. It waits a fixed time and then
records its progress. The tiles have no handshake. The controller always
waits `WAIT_MIN = 8` cycles, which is longer than the slowest instruction,
plus `idle_cycles`. That extra gap is how the chip slows itself down to what
the harvester can supply. The assertion `a_no_overlap` checks that no tile
is still busy when the next broadcast goes out.

```
 power-up ─► RESTORE ─► FETCH @PC ─► (INPUT) ─► BROADCAST ─► IDLE ─┐
               │            ▲                                      │
               │            └── FLIP parity ◄── UPDATE invalid PC ◄┘
               └── re-broadcast the stored Activate Columns instruction
```

**Program counter.** A non-volatile write can be torn. `nv_reg` writes
`ceil(W / WR_CYCLES)` bits per cycle, so an outage mid-write leaves a mix of
the old and new values. The PC is therefore kept twice (PC-A and PC-B) with
a one-cell parity bit: parity 0 means PC-A is valid, parity 1 means PC-B is
valid. After an instruction finishes, the controller takes these steps:

1. It writes PC+1 into the invalid copy. A cut here leaves the valid copy
   untouched, so the same instruction is repeated.
2. It flips the parity bit. This is one cell written in one cycle, so it
   cannot be torn. The new PC becomes valid at this moment.

At any instant, then, the valid PC points either to the instruction in
progress or to the next one. Repeating an instruction is harmless because
every instruction is idempotent (section 2).

**Active columns.** Every broadcast Activate Columns instruction is also
written into a non-volatile instruction register, `act_reg`. The first
action after power-up is to broadcast it again. Suppose that write is itself
torn. The opcode is stored in the last slice written, so a torn value still
carries the old opcode. The RESTORE state re-broadcasts only a value whose
opcode is an Activate Columns opcode. The instruction whose write was torn
is then repeated anyway, because the PC was not yet advanced.

**Outage model.** The `rst_n` of every block is `system reset && power_good`.
While power is below the monitor's threshold, all volatile state is held in
reset. This covers the sequencer, the tiles' commands in flight and the
column latches. The arrays, the line buffer, both PC copies, the parity bit
and `act_reg` have no reset and keep their contents.

**Program flow.** The program is `prog_len` instructions long and is stored
`COLS/64` instructions per row, slot 0 in the low bits. The controller
handles the start and end of each run as follows:

* Before instruction 0, it waits for the sensor's valid bit.
* After the last instruction, it reads the result row (`res_tile`,
  `res_row`) through a data tile's row port.
* It presents that row for one cycle on `tx_valid`/`tx_data`.
* It clears the sensor's valid bit (`sensor_clear`).
* It wraps the PC to 0.

The paper says that the controller checks the valid bit and reads out the
result. The exact signals are this design's.

**Latency per instruction.** Without outages, each instruction takes:

* 2 cycles to fetch;
* 1 cycle to broadcast;
* `9 + idle_cycles` cycles of wait (8 plus the cycle that ends it);
* 1 cycle to issue the PC update, `NV_WR_CYCLES` + 1 cycles for it to
  complete;
* 1 cycle to flip the parity and 2 cycles to complete the flip.

At the default `NV_WR_CYCLES = 2`, that is about `19 + idle_cycles` cycles.

## 5. Moving data: line buffer, sensor, transmitter, host

Data moves between tiles one 1024-bit line at a time through `mem_buffer`,
as a READ (row to buffer) followed by a WRITE (buffer to row). The sensor's
input buffer has a tile address of its own, `0x1FE`. Input therefore enters
with the same pair of instructions: READ from `0x1FE` then WRITE to a data
tile. For a sensor READ, the line buffer raises `sensor_rd_en` with
`sensor_rd_row` one cycle after the broadcast and captures `sensor_rd_data`
one cycle later. The paper does not say whether the line buffer is volatile.
Here it is non-volatile, so a READ/WRITE pair split by an outage still moves
the right data.

Before deployment, `host_mode = 1` holds the controller and gives the host
port whole-row access to every tile:

* `host_instr = 1` selects instruction tiles by index, and `host_instr = 0`
  selects data tiles by address.
* Reads return data one cycle after the request.
* The `init` pulse sets both PC copies and the parity bit to 0 and clears
  `act_reg`.

## 6. Parameters and sizes

| Parameter | Default | Origin |
|---|---|---|
| `ROWS`, `COLS` | 1024 | paper: 1024 x 1024 tiles, 128 KB |
| `N_DATA_TILES` | 240 | MNIST needs 30 MB of data |
| `N_INSTR_TILES` | 36 | MNIST needs 4.5 MB of instructions |
| `PC_W` | 20 | derived: 36 x 1024 rows x 16 instructions per row |
| `NV_WR_CYCLES` | 2 | assumed; the paper gives no MTJ write time in cycles |
| `V_ON_MV`, `V_OFF_MV` | 1000, 900 | assumed monitor thresholds |
| `SHE` | 0 | STT cells, the paper's main design |

Together these make 276 tiles, 34.5 MB: the largest configuration, the one
that holds MNIST. (The paper's area estimate is for a 64 MB array, which it
calls nearly twice this configuration.) Data tiles take addresses 0..239,
so the sensor buffer (`0x1FE`) and the broadcast address (`0x1FF`) stay free.

At these defaults, every program the paper evaluates fits. The table gives
instruction and data memory, and input width:

| Workload | Instructions | Data | Input |
|---|---|---|---|
| MNIST | 4.5 MB, 36 tiles | 30 MB, 240 tiles | 784 8-bit elements |
| MNIST binarized | 1.25 MB, 10 tiles | 6 MB, 48 tiles | 784 elements |
| HAR | 2.25 MB, 18 tiles | 10 MB, 80 tiles | 561 elements |
| ADULT | 0.25 MB, 2 tiles | 0.5 MB, 4 tiles | 15 elements |

Each input element takes one column, and its 8 bits take 8 rows. All inputs
fit in 1024 columns. The largest program (MNIST) has 589,824 instructions,
within the 20-bit PC.

## 7. Simulating

Every testbench is self-checking. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. Compile the package
first:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/master_pkg.sv rtl/*.sv tb/master_harness.sv tb/tb_master_top.sv \
    --top-module tb_master_top
./obj_dir/Vtb_master_top +verilator+rand+reset+2
```

(`rtl/*.sv` lists the package twice; verilator accepts that, or list the
files explicitly.)

| Testbench | What it checks |
|---|---|
| `tb_cram_gate` | every gate, STT and SHE, against truth tables; repeated gate = single gate |
| `tb_col_decoder` | list and range masks against a reference |
| `tb_nv_reg` | write latency, retention, torn values after cuts in every cycle |
| `tb_pc_unit` | commit sequence, and a valid PC after a cut at every cycle |
| `tb_mem_buffer` | tile and sensor captures, and their timing |
| `tb_cram_tile` | random instruction streams against a reference model, including the k+1 latency and parity errors |
| `tb_mem_controller` | sequence, wait lengths, restore after cuts, and at most one repeat |
| `tb_voltage_sense` | thresholds and hysteresis |
| `tb_master_top` | end to end, with 4 data tiles of 128 x 256 |
| `tb_master_full` | end to end at the default size, 276 tiles of 1024 x 1024 |
| `tb_master_svm` | binarized SVM kernel core: per-column AND products counted by NAND half adders, under supply cuts |
| `tb_master_duty` | end to end with a square-wave supply (30 % duty cycle) and idling between instructions |

The end-to-end harness (`tb/master_harness.sv`) does the following:

1. It compiles a small program: a column-parallel K-bit addition `x + w`
   built from nine-NAND full adders.
2. It loads the program and the operand `w` through the host port.
3. It supplies `x` from a sensor model.
4. It cuts the supply repeatedly, at chosen controller states (idle wait,
   PC write, parity write, fetch, restore) and at random times.
5. It checks every result bit against its own arithmetic.

Around the addition:

* The generator adds a preset before each gate.
* It adds preset+COPY pairs wherever a value is needed on the other row
  parity.
* The result moves to a second tile through the line buffer.
* The carry row is transmitted.
* A final phase activates a column list and checks that AND, OR, NOR, NOT
  and a broadcast preset touched only those columns.

The harness counts each mechanism and fails the run if any count is zero.
The full-size run is an 8-bit addition across all 1024 columns with 60 power
cuts per inference. It takes a few minutes to build and run, and the simulated arrays use
34.5 MB.

## 8. What is modelled and what is not

* The MTJ device, the cell (1 transistor + 1 MTJ), the bit-line and
  logic-line drivers, and the sense amplifiers are not circuits here. Their
  logical effect is modelled: the preset/switch rule, the row-parity rule,
  and the masking by active columns. Gate energy, voltage levels and device
  timings are not modelled.
* `voltage_sense` is a behavioural model (a comparator with hysteresis on
  `vdd_mv`). It is not synthesizable logic. It infers a latch, which is its
  intended hold behaviour.
* The harvester, the sensor with its non-volatile buffer and valid bit, and
  the transmitter are outside the chip and appear as ports.
* These are this design's choices, where the paper is silent:
  * opcode values and field positions;
  * the column-range encoding;
  * the cycle counts;
  * the wait length;
  * write masking by active columns;
  * latch clearing in tiles that an Activate Columns instruction does not
    address;
  * a non-volatile line buffer;
  * the host port;
  * the result/transmit hooks;
  * the tile counts, 36 for instructions and 240 for data, derived from the
    MNIST program's size.
* The SVM programs the paper evaluates (MNIST, HAR, ADULT) were produced by
  the authors' compiler, which is not available. The testbenches run
  representative kernels instead: a bit-serial addition, and the inner
  product of a binarized SVM (AND for each multiply, a counter of NAND half
  adders for the sum) over 12 elements in every column.
