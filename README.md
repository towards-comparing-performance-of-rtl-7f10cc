# A fully parallel Game of Life array

Conway's Game of Life is a cellular automaton on a grid of cells. Each cell is
either alive or dead. In every generation all cells are updated together from
their own state and the states of their eight neighbours (the cells that touch
them horizontally, vertically or diagonally):

* a live cell with two or three live neighbours stays alive;
* a dead cell with exactly three live neighbours comes alive;
* every other cell is dead in the next generation.

A program computes one generation by visiting every cell, so its time per
generation grows with the number of cells. This design does the opposite. It
gives every cell its own flip-flop, its own neighbour counter and its own copy
of the rule, and it wires each cell to its eight neighbours. Every cell then
computes its next state in the same clock cycle. **The whole world advances by
one generation per clock edge, whatever its size.** Only the area grows, and
it grows linearly with the number of cells. This is about the simplest design
that can be run to measure how much faster a highly parallel algorithm can be
in an FPGA than in software. Choosing the simplest design is intentional. No
attempt is made to share logic between neighbouring cells.

The RTL follows a published Chisel implementation. That implementation was
evaluated on an Intel Cyclone IV FPGA for square worlds of 10×10, 20×20, …,
100×100 cells. This SystemVerilog restates that implementation. It adds the
details that the description leaves open and names them below.

## Structure

```
life_world  (ROWS x COLS, top)
 ├─ g_row[r].g_col[c]          one per cell
 │   ├─ neighbour wiring        8 inputs; 0 where the neighbour is outside the grid
 │   └─ life_cell #(INIT)
 │       ├─ life_popcount       number of live neighbours, 0..8 (4 bits)
 │       └─ state flip-flop     alive <= (alive && n == 2) || n == 3
 └─ world[r][c]  <- every cell's flip-flop
```

| File | Contents |
|------|----------|
| `rtl/life_pkg.sv` | Neighbour count type, the next-state rule `next_state()`, and the starting-pattern generator `random_cell()` |
| `rtl/life_popcount.sv` | `N`-input population count (combinational) |
| `rtl/life_cell.sv` | One cell: a flip-flop, a population count and the rule |
| `rtl/life_world.sv` | Top level: the cell grid, the neighbour wiring and the dead boundary |

There is no controller, no memory and no bus. The world's state exists only in
the `ROWS*COLS` cell flip-flops. A "step" is a clock edge.

## The cell

A cell has one register, `alive`. On each rising clock edge the cell computes
`n`, the number of ones among its eight `neighbours` inputs. It loads
`(alive && n == 2) || n == 3` into the register. This single expression covers
all three rules. It gives survival with 2 or 3 neighbours, because the
`n == 3` term also holds for a live cell. It gives birth with exactly 3. It
gives death or staying dead in every other case. The neighbour inputs come
straight from the other cells' registers. So every cell sees generation *k* of
its neighbours and produces generation *k+1*. No cell ever sees a partly
updated world.

The population count is a plain sum of the input bits. Synthesis chooses the
adder structure. The original implementation used its HDL library's
population count. It reported about nine 4-input LUTs per cell, and its
authors suspected the counter was the expensive part. The counter is a
separate module here, so it can be replaced by a hand-optimised one without
touching the cell.

## Edges of the world

The grid is finite. A cell on the border has neighbour positions that fall
outside it. Those inputs are tied to constant 0 when the array is generated
(`g_nb[k].g_edge`). So the world behaves as if it were surrounded by cells
that are permanently dead. No boundary test exists in the hardware. A
software implementation gets the same effect by padding its array with a dead
row and column on each side. The world is **not** a torus: a pattern that
reaches an edge does not reappear on the opposite side.

Neighbour `k` of a cell is at the following (row, column) offset:

| k | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 |
|---|---|---|---|---|---|---|---|---|
| offset | (−1,−1) | (−1,0) | (−1,+1) | (0,−1) | (0,+1) | (+1,−1) | (+1,0) | (+1,+1) |

The cell only counts ones, so the order does not matter to it.

## Starting pattern and reset

The starting world is built into the hardware. Each cell's reset value is a
parameter (`life_cell #(.INIT(...))`). Asserting `rst` loads generation 0
into every cell at once. There is no port for loading a new pattern; a
different pattern means a different build. This follows the original, which
resets each register to its part of the starting pattern.

`life_world` has two ways to set the pattern:

* `USE_INIT_PATTERN = 1`: the pattern is `INIT_PATTERN`. Bit `r*COLS + c` is
  cell (r, c), where row 0 is the top row and column 0 the left column.
* `USE_INIT_PATTERN = 0` (the default): a pseudo-random world. The original
  was evaluated on random worlds but did not say how they were generated. This
  design uses, for cell (r, c):

  ```
  x = SEED ^ ((r*COLS + c) * 0x9E3779B9)        (32-bit arithmetic)
  x ^= x >> 16;  x *= 0x85EBCA6B;
  x ^= x >> 13;  x *= 0xC2B2AE35;
  x ^= x >> 16;
  alive = x[31]
  ```

  This is the MurmurHash3 32-bit finaliser. About half the cells start alive.
  It is computed at elaboration time, so each reset value is a constant.

The reset is synchronous and active high. Synchronous active-high is the
default register reset of the HDL the original was written in. The original
does not describe its reset otherwise.

## Interface and timing

| Port | Dir | Width | Meaning |
|------|-----|-------|---------|
| `clk` | in | 1 | Every rising edge computes one generation |
| `rst` | in | 1 | Synchronous, active high. Loads generation 0 |
| `world` | out | `[ROWS-1:0][COLS-1:0]` | Present state. `world[r][c]` is 1 when cell (r, c) is alive |

After a clock edge with `rst` high, `world` holds generation 0. After each
further edge with `rst` low it holds the next generation. There is no enable.
The world keeps evolving for as long as the clock runs. Any generation can be
read from `world` during the cycle in which it is present.

| Parameter | Default | Meaning |
|-----------|---------|---------|
| `ROWS`, `COLS` | 100, 100 | World size. The default is the largest size evaluated |
| `SEED` | 1 | Seed of the random starting world |
| `USE_INIT_PATTERN` | 0 | 1 selects `INIT_PATTERN` instead of the random world |
| `INIT_PATTERN` | all 0 | Explicit starting world, bit `r*COLS + c` |

## Size and speed

The circuit has exactly one flip-flop per cell. Its combinational logic per
cell is one 8-input population count and a comparison. Both are constant per
cell, so area is linear in `ROWS*COLS`. The critical path does not depend on
the world size: register → popcount → compare → register. Generic synthesis
of the default 100×100 world gives 10,000 flip-flops and about 60,000
word-level cells, roughly six per cell.

For comparison, the original Chisel implementation was measured on a
Cyclone IV (4-input LUTs). It reported:

| World | LEs | Registers | Min. clock period |
|-------|----:|----------:|------------------:|
| 10×10 | 804 | 104 | 4.0 ns |
| 40×40 | 14463 | 1604 | 4.0 ns |
| 100×100 | 97871 | 10004 | 4.8 ns |

At 200 MHz this is one generation every 5 ns for every size measured. In
that build, each register count is four more than the number of cells. The
extra registers belong to surrounding logic (presumably clocking, I/O or
measurement) that was not described, and that logic is not part of this RTL.

## Where this RTL departs from the original or adds to it

* **Own choices:** the random-world generator, `SEED`, the explicit-pattern
  option and the reset style. The `world` output port is also an own choice;
  it exposes every cell's state.
* **Not included:** any logic for starting a run, counting or timing steps, or
  reading results off the FPGA. The original used such logic in its
  measurements but did not describe it. The board and the FPGA device
  themselves are not included either.
* **Same as the original:** one register per cell, a population count per
  cell, the rule `(alive && n == 2) || n == 3`, neighbour inputs outside the
  grid tied to 0 at construction time, and one generation per clock.

## Verification

All testbenches check themselves and end with a line
`TB_RESULT checks=N failures=M`. They compare the RTL with a behavioural
model, `tb/life_ref_pkg.sv`. The model works like a plain program. It copies
the world into an array padded with a dead border. It counts each cell's
neighbours with loops. It recomputes the random starting world with 64-bit
arithmetic, independently of `life_pkg`.

| Testbench | What it shows |
|-----------|---------------|
| `tb_life_popcount` | All 256 input patterns of the 8-input population count |
| `tb_life_cell` | Reset values 0 and 1. Every present state against all 256 neighbour patterns. The new state appears after exactly one edge, not before |
| `tb_life_world` | A 6×6 "beacon" oscillator, checked cell for cell against its drawn generations 0, 1, 2 and for period 2. Also random 12×16 and 7×5 worlds over 300 generations each, with a reset in mid-run. It counts births, survivals, deaths from under- and overpopulation, births on the edge, resets and oscillations, and fails if any of them never happens |
| `tb_life_world_sizes` | Random worlds of 10×10, 20×20, …, 50×50, built side by side. Each is checked against the model for 100 generations |
| `tb_life_world_sizes_large` | The same for 60×60 and 70×70. Sizes 80×80 and 90×90 are not simulated; they differ only in size |
| `tb_life_world_full` | The top at its defaults (100×100, seed 1). 200 generations, each checked one clock edge after the previous one |

`tb/life_run.sv` is a helper. It drives one world of a given size and checks
it; three of the testbenches use it.

To run one testbench with Verilator 5:

```
verilator --binary --timing --assert -j 4 --top-module tb_life_world \
    -y rtl -y tb +libext+.sv -Irtl -Itb rtl/life_pkg.sv tb/life_ref_pkg.sv \
    tb/tb_life_world.sv
obj_dir/Vtb_life_world
```

Compiling the 100×100 top takes a few minutes, because Verilator generates
code for all 10,000 cells. Simulating 200 generations then takes well under a
second. To lint the top:
`verilator --lint-only -Wall -y rtl +libext+.sv rtl/life_pkg.sv rtl/life_world.sv`.

## Changing it

* **Another world size:** set `ROWS` and `COLS`. Sizes do not have to be
  square. A small world inside a large build is not the same world, because
  the dead border sits at the edge of the build.
* **A fixed pattern:** set `USE_INIT_PATTERN = 1` and give `INIT_PATTERN`.
  `tb_life_world` does this for the beacon: cells (1,1), (1,2), (2,1), (3,4),
  (4,3) and (4,4) give `36'h0_1840_2180`.
* **Other rules** (for example other "life-like" automata): change
  `life_pkg::next_state()`. The count is available as a 0..8 number.
* **A wrapping world:** replace the `g_edge` branch in `life_world` with a
  connection to the opposite edge.
