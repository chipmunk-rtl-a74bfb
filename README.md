# Chipmunk: a systolically scalable LSTM inference engine in SystemVerilog

Recurrent networks for speech and other sensor streams are limited less by
arithmetic than by their weights: an LSTM layer has to read every weight of
four matrix-vector products at every time step. Chipmunk keeps all of a
layer's weights in SRAM next to the multipliers and computes one row of every
product per LSTM unit, with 96 units in parallel. When a network is too big
for one engine, identical engines are connected as tiles of a systolic array.
Each tile keeps its share of the weights, partial sums travel along the rows
of tiles, and the new hidden state is broadcast back down the columns. Weights
therefore never move during inference, however large the network is.

This RTL describes one engine (`chipmunk_tile`) and arrays of engines
(`chipmunk_array`, the top). The top's default is three 5 x 5 arrays of
96-unit tiles, one array per layer of a 3-layer speech-recognition LSTM.

## The computation

One time step of an LSTM layer with peepholes computes

    i_t = sigm(W_xi x_t + W_hi h_t-1 + w_ci * c_t-1 + b_i)
    f_t = sigm(W_xf x_t + W_hf h_t-1 + w_cf * c_t-1 + b_f)
    c_t = f_t * c_t-1 + i_t * tanh(W_xc x_t + W_hc h_t-1 + b_c)
    o_t = sigm(W_xo x_t + W_ho h_t-1 + w_co * c_t + b_o)
    h_t = o_t * tanh(c_t)

The peephole weights and the products marked `*` are element-wise. An
optional dense layer `y_t = sigm(W_hy h_t)` can follow.

The outer (row) loop of each product runs in space: unit `u` owns row `u` of
every matrix and its elements of i, f, o and c. The inner (column) loop runs
in time. In each cycle one element of `x_t` or `h_t-1` is chosen by the
column index and broadcast to all units. Each unit then does one
multiply-accumulate with its own weight. A gate costs `n_x + n_h` cycles
whatever the number of rows. Peak throughput is 96 MACs per cycle, which is
32.2 Gop/s at 168 MHz, counting a MAC as two operations.

## Number format

| quantity | format |
|---|---|
| x, h, c, i, f, o, weights, biases | 8-bit signed, 5 fractional bits (range -4 .. +3.97) |
| products, accumulator | 16-bit signed, 10 fractional bits |

- Accumulation saturates.
- A bias, or a partial sum from a neighbour tile, is added after a left shift by 5.
- A result is requantised to 8 bits by an arithmetic right shift of 5, with saturation. This truncates toward minus infinity.
- The sigmoid LUT takes the requantised accumulator.
- The tanh LUT takes the requantised accumulator or `c_t`.
- Each LUT has 256 entries, `round(32 * f(v / 32))` clamped to 8 bits. The entries are computed when the design is elaborated, not read from a file.

The 8-bit storage and 16-bit MAC widths follow the published design. The
binary point, saturation and rounding are this implementation's own choices
(`chipmunk_pkg.sv`).

## One LSTM unit

`lstm_unit` holds:

- the registers `i`, `f`, `o` and `c`
- a 16-bit MAC
- the two LUTs
- three multiplexers:
  - operand A: the weight, `i`, `f` or `o`
  - operand B: `x`, `h`, `c` or the tanh output
  - tanh input: the accumulator or `c`

The adder has a fourth input, the "addend" path. It carries a bias read from
the weight memory, or a partial sum `z` from another tile.

Every unit of a tile executes the same micro-operation in the same cycle
(`cell_op_e`):

| op | effect |
|---|---|
| `CLR` | clear the accumulator |
| `MAC` | add A*B |
| `MUL` | load A*B |
| `ADDW` | add the weight as a bias |
| `ADDZ` | add the partial sum `z`; only in the unit named by `idx` |
| `ST_I`, `ST_F`, `ST_O` | store sigm(acc) in a gate register |
| `ST_C` | store the requantised accumulator in `c` |
| `CLRST` | clear everything |

`h_o` is always the requantised accumulator, and `y_o` is its sigmoid.

## Sequence of one time step

`tile_ctrl` issues one micro-operation per cycle. Each gate `g` runs:

1. `CLR`
2. `n_x` cycles of `MAC(W_xg[b], x[b])`
3. `n_h` cycles of `MAC(W_hg[b], h[b])`

Then come the gate's element-wise steps. A tile alone, or the last tile of a
systolic row, runs:

| gate | element-wise steps |
|---|---|
| i, f | `MAC(w_cg, c)`, `ADDW(b_g)`, `ST_I`/`ST_F` |
| c | `ADDW(b_c)`, `MUL(i, tanh(acc))`, `MAC(f, c)`, `ST_C` |
| o | `MAC(w_co, c)` with the new c, `ADDW(b_o)`, `ST_O`, then `MUL(o, tanh(c))` |

After the last step the accumulator holds `h_t`. With `dense_en` set, a fifth
pass over `h_t` with the `W_hy` weights follows, and its sigmoid is streamed
out as `y_t`.

Every micro-operation is issued together with its SRAM address. The units
execute it in the next cycle, when the SRAM's read data arrives (`ctrl_o` is
the registered stage). Streaming accumulator values out waits until that
stage is empty.

A single-tile frame with no stalls and no dense layer takes

    1 + n_x  +  4 * (1 + n_x + n_h)  +  14  +  2  +  n_h   cycles

from accepting the command to the last output byte. The parts are:

- `1 + n_x`: load `x_t`
- `4 * (1 + n_x + n_h)`: clear and column loop of each gate
- `14`: element-wise steps
- `2`: load `h_t-1` internally
- `n_h`: stream `h_t` out

The testbenches check this count exactly.

## Weight memory

Each unit has one byte lane of the tile's weight SRAM. Eight lanes form a
bank, so 96 units use 12 banks. All banks share one address. The layout seen
by every unit, with `N` = 96, is:

| address | content |
|---|---|
| `g*2N + b` | `W_xg[row][b]`, gates g = i, f, c, o = 0..3 |
| `g*2N + N + b` | `W_hg[row][b]` |
| `8N + b` | `W_hy[row][b]` (dense layer) |
| `9N + 0 .. 2` | `w_ci`, `w_cf`, `w_co` |
| `9N + 3 .. 6` | `b_i`, `b_f`, `b_c`, `b_o` |

That is `9N + 7` = 871 bytes per unit and 83,616 bytes (81.7 kB) per tile.

A tile's block is limited to `n_x <= N` input columns, `n_h <= N` hidden
columns and `n_h <= N` rows. `n_h` is used both as the tile's row count and
as its hidden-column count, so a layer must be split into equal blocks.

## Tile interface

The tile has a command port and two 8-bit streams.

- Command port: `cmd_valid_i`/`cmd_ready_o`, `cmd_i`, and `cfg_i` sampled with the command.
- Streams: one input and one output, each 8-bit data with a valid/ready handshake. A byte moves in a cycle where valid and ready are both high, as in the published chip.
- An assertion checks that an offered output byte stays stable until it is taken.

The commands are:

- `CMD_LOAD_W` reads `(9N+7) * N` bytes from the input stream. Byte `k` goes to unit `k mod N` at address `k div N`, so the host sends the memory address by address, unit by unit within each address.
- `CMD_FRAME` runs one time step with the sizes in `cfg_i` (`n_x`, `n_h`, `n_y`, `dense_en`). It first reads `n_x` bytes of `x_t`.
- `CMD_CLEAR` zeroes `c`, `h_t-1`, `x_t` and the gate registers in one cycle, to start a new sequence.

`in_sel_o` and `out_sel_o` tell the surrounding port multiplexer where the
input stream comes from and what the output stream carries. The sources are
x, the left neighbour or the hidden-state network. The output carries partial
sums, `h` or `y`.

In single-tile mode (`first_col` and `last_col` both set) the new `h_t` is
also loaded straight into the `h_t-1` bank.

## Systolic array

A layer with more rows or columns than one tile can hold is cut into a
`ROWS x COLS` grid of blocks. Tile `(i, j)` stores the weights from input
block `j` (`x_j` and `h_j`) to output block `i`. A time step has three
phases.

1. **Input-state loading.** The host's stream `x_data_i[layer][j]` is broadcast to every tile of column `j`. A byte is delivered only when all enabled tiles of the column can take it, so the column moves in lock-step.
2. **Next-state computation.** For each gate every tile runs its local column loop over its `x_j` and `h_j`. Partial sums then move along the row:
   - Tile `(i, 0)` sends its `n_h` requantised partial sums to the right.
   - Tile `(i, j)` adds the partial sums from its left neighbour to its own (`ADDZ`, one unit per byte) and passes the result on.
   - The last tile `(i, C-1)` adds the sums from its left and applies the gate's element-wise steps. It alone holds a meaningful `c_t` for block `i`.

   A tile must send a gate's sums before its neighbour can finish that gate, so the valid/ready handshake keeps the row in step without global control. Partial sums cross tile boundaries as 8-bit values because the stream ports are 8 bits wide. This adds one rounding per tile boundary compared with a single large accumulator.
3. **Hidden-state distribution.** Tile `(i, C-1)` streams `h_i`. The stream is hard-wired to every tile of column `i`, because column `i` holds the weights that multiply `h_i` in the next step. The same bytes appear at the host port `h_data_o[layer][i]`. A byte moves only when all receivers, including the host, are ready. This wiring requires `ROWS == COLS`.

A dense layer uses the same row chain, and the last column streams `y_i` to
the host. A 1 x 1 array is a single engine.

`port_mux` is the MUX/DEMUX at each tile's ports. It routes one of the three
incoming streams to the tile's input, and the tile's output to the right
neighbour or to the hidden-state network.

### Layers and chaining

`chipmunk_array` instantiates `LAYERS` such arrays. With `chain_i` set, the
`h_i` stream of layer `l` is also the `x_i` stream of layer `l + 1`. A deep
network then runs with the weights of every layer resident: after the first
layer's frame command, each following layer takes its input as soon as the
previous layer produces it. With `chain_i` clear, every layer reads its own
host input ports. That mode is used to load weights, and to run a network
layer by layer on fewer arrays with weights reloaded between layers.

### Host protocol for the array

- A command is broadcast to the tiles selected by `tile_en_i[l][r][c]`. It is accepted when all of them are idle.
- Each tile gets its layer's `cfg_i[l]`. The top sets `first_col`/`last_col` from the tile's position.
- Weights are loaded one tile at a time: enable a single tile, issue `CMD_LOAD_W`, and send its bytes on the tile's column x-stream.
- A frame enables all tiles of the layers that take part and sends `x_t` split into column blocks.
- `busy_o` reports activity. `mac_tiles_o` counts the tiles doing a column-loop MAC in the current cycle, which shows utilisation directly.

## Files

| file | content |
|---|---|
| `rtl/chipmunk_pkg.sv` | widths, types, micro-operation and command encodings, fixed-point helpers |
| `rtl/act_lut.sv` | sigmoid / tanh table |
| `rtl/mac_unit.sv` | 8x8 -> 16 bit saturating MAC |
| `rtl/lstm_unit.sv` | one LSTM unit |
| `rtl/weight_sram.sv` | one SRAM bank, byte lanes, synchronous read |
| `rtl/state_bank.sv` | x_t / h_t-1 register bank with broadcast read |
| `rtl/tile_ctrl.sv` | sequencer |
| `rtl/chipmunk_tile.sv` | one engine |
| `rtl/port_mux.sv` | tile port MUX/DEMUX |
| `rtl/chipmunk_array.sv` | top: layers of systolic arrays |
| `tb/chipmunk_ref_pkg.sv` | bit-exact reference arithmetic used by the testbenches |
| `tb/*_tb.sv` | one self-checking testbench per module |

## Simulation

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
        rtl/chipmunk_pkg.sv tb/chipmunk_ref_pkg.sv tb/chipmunk_array_tb.sv \
        -y rtl +libext+.sv --top-module chipmunk_array_tb
    ./obj_dir/Vchipmunk_array_tb

Replace `chipmunk_array_tb` with any other testbench. Every testbench prints
`TB_RESULT checks=<n> failures=<m>` and has a watchdog.

The testbenches compare against the reference package, which works from the
number format and real-valued `exp`, not from the RTL.

| testbench | what it covers |
|---|---|
| `act_lut_tb` | all 256 inputs of both tables |
| `mac_unit_tb` | random operations, including saturation |
| `lstm_unit_tb` | complete time steps with the sequencer played by the testbench |
| `weight_sram_tb` | lane writes and reads of the whole bank |
| `state_bank_tb` | writes, parallel load, clear and out-of-range reads |
| `port_mux_tb` | exhaustive selects and handshakes |
| `tile_ctrl_tb` | micro-operation traces for single, first, middle and last tiles, with random stalls |
| `chipmunk_tile_tb` | a 16-unit tile through weight loading, frames with and without the dense layer, exact latency, MAC-cycle count and clear |
| `chipmunk_array_tb` | 2 layers of 2 x 2 tiles of 8 units: per-tile loading, unchained and chained frames, dense output, random back-pressure |

`chipmunk_array_tb` counts how often each mechanism occurred and fails if any
never did. The mechanisms are weight loads, x broadcasts, partial-sum
transfers, h distribution, layer chaining, y output and stalls.

The largest sizes simulated are a single tile of 16 units and an array of
2 layers x 2 x 2 tiles of 8 units. The full default array is not simulated
end to end. It has 75 tiles of 96 units, and loading its weights alone takes
more than 6 million stream cycles. It is checked by lint and elaboration only.

## How far the design follows the published chip

**Taken from the published design:**

- 96 units in 12 SRAM banks, 81.7 kB of weights
- 8-bit state and 16-bit MAC
- a MAC with operand multiplexers, two activation LUTs and i/f/o/c registers per unit
- x and h kept in register banks outside the units, one element broadcast per cycle
- 8-bit valid/ready input and output streams
- the loop structure of a time step
- the three phases of the systolic scheme, with the hidden state broadcast down columns over fixed wiring
- the 3 x 5 x 5 configuration

**This implementation's own choices:**

- the binary point (5 fractional bits), saturation and rounding
- the LUT contents
- the memory layout
- the order of the element-wise steps
- the micro-operation and command encodings and the cycle timing
- the use of the adder's `z` input for partial sums from the left tile
- 8-bit partial sums between tiles
- the enable mask and command broadcast of the array
- the chaining switch between layers
- the restriction to equal block sizes and `ROWS == COLS`

**Not modelled:**

- the pad ring and the chip's pin multiplexing; the top exposes plain streams instead
- the SRAM macros, written as ordinary memory arrays
- the host that streams weights and frames
- combining several weight reloads inside one tile over time. The published
  study uses this to run the speech network on a single engine. Here a single
  engine can run only layers that fit it.

**Lint notes:** the remaining warnings are explained in the opening comments
of `lstm_unit`, `chipmunk_tile` and `tile_ctrl`.

## Sizing the speech network

The target network has 3 layers of 421 units, 123 inputs and about 3.8
million weights. On the default 3 x 5 x 5 array:

- each layer is split into 5 row blocks of at most 85 units;
- layer 0's input is split into 5 blocks of at most 25, and its hidden state into 5 blocks of 85;
- layers 1 and 2 use blocks of 85 for both input and hidden state.

All blocks fit a 96-unit tile, so every weight stays resident. A tile needs
at most 4 * (85 + 85) = 680 MAC cycles per frame, far below the 10 ms frame
period.

A single 5 x 5 array holds one layer at a time and must be reloaded between
layers.
