# A dataflow-generated spatial array for GEMM

A spatial accelerator is a grid of processing elements (PEs). Each PE does one
multiply-accumulate per cycle. The grid is fed from banked on-chip memory. What
makes one such array differ from another is mostly the *dataflow*: for each
tensor of the computation, how its elements move through the grid. An element
can be passed from PE to PE one hop per cycle (systolic). It can stay inside one
PE for a whole stage (stationary). It can be put on a bus that reaches a row or
column of PEs in the same cycle (multicast). For an output, a bus works the
other way: an adder tree collects the partial sums that many PEs make in the same
cycle (reduction tree).

The RTL here builds that idea for matrix multiplication. Each tensor port of a PE
is one small module, picked by that tensor's dataflow. The PE is those modules
around one multiply-accumulate cell. The array wiring, the bank layout and the
controller schedule all follow from the same choice. That choice is a single
elaboration parameter. Four dataflows are built: three for matrix multiplication
and one for batched matrix-vector products. Together they use every kind of PE
port module and every kind of PE-to-PE wiring.

The computation is

    C[m][n] = sum over k of A[m][k] * B[n][k]

with signed 16-bit A and B and a 32-bit C. The unicast dataflow instead computes
the batched matrix-vector product

    C[m][n] = sum over k of A[m][k][n] * B[m][k]

The default instance is a 16 x 16 array using the weight-stationary systolic
dataflow.

## 1. From loop nest to hardware: the space-time mapping

The three loops `m, n, k` are mapped by a linear transform `T` onto a PE position
`(row, col)` and a time step `t`. `T` must be invertible, so no PE ever does two
operations in the same cycle. Once `T` is fixed, the movement of each tensor
follows. Take all the loop points that touch one element of a tensor, and see
where they land in space-time:

| landing points of one element   | dataflow of that tensor                  |
|---------------------------------|------------------------------------------|
| one point                       | unicast: the PE reads its own bank        |
| same PE, different times        | stationary: held in the PE               |
| neighbouring PEs, later times   | systolic: forwarded one hop per cycle    |
| several PEs, same time          | multicast (input) or reduction tree (output) |

The built dataflows are named by the letters of A, B and C. S is systolic,
T is stationary, M is multicast or reduction and U is unicast:

| `DATAFLOW` | PE(r,c) computes | time t      | A                     | B                              | C                                   |
|------------|------------------|-------------|-----------------------|--------------------------------|-------------------------------------|
| `DF_STS` (default) | k = r, n = c | m + k + n | systolic, west to east | stationary, loaded north to south | systolic, north to south        |
| `DF_SST`   | m = r, n = c     | m + n + k   | systolic, west to east | systolic, north to south       | stationary, drained north to south  |
| `DF_MTM`   | n = r, k = c     | m           | multicast on a column bus | stationary                  | one adder tree per row              |
| `DF_UMM` (batched GEMV) | n = r, k = c | m      | unicast: one bank per PE | multicast on a column bus   | one adder tree per row              |

`DF_STS` is the classic weight-stationary array. `DF_SST` is output-stationary.
`DF_MTM` sends each A element to a whole column at once and sums each row in a
tree. In `DF_UMM` no A element is used twice, so each PE reads its own bank.

A tile has a fixed size along the two loops mapped to space. Its length
along the time loop is set at run time (`len`):

| `DATAFLOW` | tile                                  |
|------------|---------------------------------------|
| `DF_STS`   | K = ROWS, N = COLS, M = len           |
| `DF_SST`   | M = ROWS, N = COLS, K = len           |
| `DF_MTM`   | N = ROWS, K = COLS, M = len           |
| `DF_UMM`   | N = ROWS, K = COLS, M = len batches   |

Larger problems are cut into tiles by the host. Each run overwrites its C words.
It does not add to them, so partial sums over several K tiles are added by the
host.

## 2. Inside a PE

`pe.sv` has one port per tensor (`a_*`, `b_*` for the inputs, `c_*` for the
output). Each port gets one module, picked by the parameters `A_FLOW`, `B_FLOW`
and `C_FLOW`. The three modules never connect to each other. They only meet at
the computation cell (`comp_cell.sv`), which is combinational:
`sum = a * b + addend`.

| flow         | input tensor module                                   | output tensor module                                  |
|--------------|-------------------------------------------------------|-------------------------------------------------------|
| systolic     | `pe_in_systolic`: one register, feeds the cell and the next PE | `pe_out_systolic`: registers the incoming partial sum, which becomes the addend; the cell result goes straight on to the next PE |
| stationary   | `pe_in_stationary`: a shadow register on a load chain and an active register that feeds the cell; `swap` copies shadow to active | `pe_out_stationary`: an accumulator, plus a transfer register on a drain chain; `capture` copies the accumulator into the transfer register |
| direct       | `pe_in_direct`: one register fed by a bus or a bank   | no module: addend 0, the product leaves unregistered |

Two details matter most.

**Double buffering.** In the stationary modules the value being used and the
value being moved sit in different registers. A stationary input can load the
next stage's values through its chain while the cell still uses the current
ones. A single `swap` cycle then switches stages. A stationary output can start a
new stage in the very cycle it captures the old one: during `capture` the addend
is forced to 0, so the accumulator restarts from that cycle's product. The last
stage's results then shift out through the drain chain while the next stage
accumulates.

**Timing.** An input presented to a PE in cycle t is used by the cell in cycle
t+1. A systolic partial sum registered in cycle t picks up the product of cycle
t+1 and leaves in that cycle.

## 3. The array

`pe_array.sv` places `ROWS x COLS` PEs and wires them as the dataflow needs:

* Systolic A enters at column 0 of each row and moves east. A multicast A is one
  bus per column, read by every PE of that column. A unicast A has one input per
  PE: `a_in[r*COLS + c]`.
* B enters at row 0 of each column and moves south. This path is the systolic
  path for `DF_SST` and the load chain for the stationary B. The first word
  pushed into a column ends up in its bottom PE. In `DF_UMM`, B is a column bus.
* A systolic C starts at zero above row 0. The bottom PE of each column gives
  `c_out[col]`. A stationary C drains south the same way.
* A reduced C goes through one `reduction_tree` per row. Its output is
  `c_out[row]`. The tree pads its inputs to a power of two with zeros and
  registers every level, so the sum appears `clog2(COLS)` cycles after the
  products.

Stationary controls (`load`, `swap`, `capture`, `shift`) are broadcast to every
PE in the same cycle.

## 4. Banks and data layout

The on-chip buffer is split into banks of `DEPTH` words (`mem_bank.sv`: one write
port, one read port, read data one cycle after the request). There is one bank
for each group of PEs that shares a boundary port. A has one bank per row, or
one per column bus for `DF_MTM`, or one per PE for `DF_UMM`. B has one bank per
column. C has one bank per column, or one per row tree for `DF_MTM` and
`DF_UMM`. Words are laid out as follows:

| `DATAFLOW` | A bank i, address j | B bank i, address j | C bank i, address j |
|------------|---------------------|---------------------|---------------------|
| `DF_STS`   | A[j][i]             | B[i][j]             | C[j][i]             |
| `DF_SST`   | A[i][j]             | B[i][j]             | C[j][i]             |
| `DF_MTM`   | A[j][i]             | B[j][i]             | C[j][i]             |
| `DF_UMM`   | A[j][i mod COLS][i div COLS] | B[j][i]    | C[j][i]             |

In every dataflow C[m][n] ends in bank n at address m.

## 5. The controller: schedule and cycle counts

`controller.sv` is a small state machine with one cycle counter `t`. It turns the
mapping into bank addresses and PE controls, cycle by cycle. The datapath
latencies are fixed: 1 cycle for the bank read, 1 for the PE input register and
`L = clog2(COLS)` for the tree. States and the events in each (`len` is the tile
length):

* **LOAD** (only for a stationary B). Read every B bank at addresses `ROWS-1`
  down to 0 in cycles `t = 0 .. ROWS-1`. `load` is high one cycle after each
  read.
* **SWAP.** One cycle of `swap`.
* **COMPUTE**, which differs by dataflow:
  * `DF_STS`: A bank r is read at address `t - r`. C bank c is written at address
    `t - ROWS - c - 1`.
  * `DF_SST`: A bank r is read at `t - r` and B bank c at `t - c`. `capture`
    comes at `t = len + ROWS + COLS`.
  * `DF_MTM`: every A bank is read at address `t`. C bank r is written at
    `t - L - 2`.
  * `DF_UMM`: as `DF_MTM`, but every B bank is read at `t` as well. There is no
    LOAD or SWAP.
* **DRAIN** (only for `DF_SST`). `ROWS` cycles of `shift`. C bank c gets address
  `ROWS - 1 - s` at drain step s.

A read outside the tile is not issued. The lane then carries zero, so idle PEs
add nothing. The number of cycles from the `start` edge until `done` is high:

| `DATAFLOW` | cycles                          | 16 x 16, len = 256 |
|------------|---------------------------------|--------------------|
| `DF_STS`   | len + 2*ROWS + COLS + 2         | 306                |
| `DF_SST`   | len + 2*ROWS + COLS + 1         | 305                |
| `DF_MTM`   | len + ROWS + clog2(COLS) + 4    | 280                |
| `DF_UMM`   | len + clog2(COLS) + 2           | 262                |

The testbenches count one more cycle, because they sample at the falling edge.
The fixed part is the pipeline fill: skew, load and drain. It is why the
systolic forms lose a little against multicast on short tiles. In this version
the stationary B is loaded before each tile and not behind the previous one. The
double buffer would allow that overlap, but the controller runs one tile per
`start`.

## 6. Using the top level

`tensorlib_top.sv` has these parameters:

| parameter  | default  | meaning                                       |
|------------|----------|-----------------------------------------------|
| `ROWS`     | 16       | PE rows                                       |
| `COLS`     | 16       | PE columns                                    |
| `DATAFLOW` | `DF_STS` | `DF_STS`, `DF_SST`, `DF_MTM` or `DF_UMM` (see `tl_pkg.sv`) |
| `DW`       | 16       | A and B width (signed)                        |
| `ACC_W`    | 32       | C width                                       |
| `DEPTH`    | 256      | words per bank                                |

To run one tile:

1. While `busy` is low, write A and B one word per cycle: `h_we`, `h_tensor`
   (`TENSOR_A` or `TENSOR_B`), `h_bank`, `h_addr`, `h_wdata`. Use the layout in
   section 4.
2. Pulse `start` for one cycle with `len` between 1 and `DEPTH`.
3. Wait for the one-cycle `done` pulse.
4. Read C words with `h_re`, `h_rbank`, `h_raddr`. The word is on `h_rdata` one
   cycle later.

Assertions flag a host write while busy, a write to C, `start` while busy and an
out-of-range `len`.

## 7. Files

| file | content |
|------|---------|
| `rtl/tl_pkg.sv` | enums for the flows and dataflows, control structs, bank-count functions |
| `rtl/comp_cell.sv` | multiply-accumulate cell |
| `rtl/pe_in_systolic.sv`, `pe_in_stationary.sv`, `pe_in_direct.sv` | input port modules |
| `rtl/pe_out_systolic.sv`, `pe_out_stationary.sv` | output port modules |
| `rtl/pe.sv` | PE assembled from the modules |
| `rtl/reduction_tree.sv` | pipelined adder tree |
| `rtl/pe_array.sv` | array and interconnect |
| `rtl/mem_bank.sv` | scratchpad bank |
| `rtl/controller.sv` | schedule |
| `rtl/tensorlib_top.sv` | complete accelerator |

Each file starts with a comment that gives its function, interface and timing.

## 8. Simulation

Every testbench in `tb/` checks itself. It ends by printing
`TB_RESULT checks=N failures=M` and has a watchdog. With Verilator 5:

    verilator --binary --timing -Irtl -Itb rtl/tl_pkg.sv tb/tb_tensorlib_top.sv \
              --top-module tb_tensorlib_top -Mdir obj && obj/Vtb_tensorlib_top

The testbenches:

* `tb_comp_cell`, `tb_pe_in_systolic`, `tb_pe_out_systolic`,
  `tb_pe_in_stationary`, `tb_pe_out_stationary`, `tb_pe_in_direct`: each module
  against arithmetic computed in the testbench. This includes swap and hold for
  double buffering, and a capture that overlaps the next stage.
* `tb_reduction_tree`: trees of 16, 5 and 1 inputs, new data every cycle, with
  the latency checked.
* `tb_mem_bank`: read latency, hold, and read-during-write.
* `tb_pe`: one PE in each of the three GEMM module selections.
* `tb_pe_array` (with `array_check.sv`): the array of each of the four dataflows, driven
  directly with the schedule written in the testbench. Every C element is
  checked in its predicted cycle.
* `tb_controller` (with `ctrl_check.sv`): every bank access, control and the done
  cycle of each dataflow, cycle by cycle.
* `tb_tensorlib_top` (with `gemm_run.sv`): random tiles through the complete
  accelerator in all four dataflows, on non-square arrays and with `len = 1`.
  It checks each C word and the cycle count. It also requires that each
  mechanism fired: swap, load chain, capture, drain, multicast read, unicast
  read, reduction and systolic result writes.
* `tb_full_size`: the default instance (16 x 16, `DF_STS`, 256-word banks) on one
  256 x 16 x 16 tile, every word checked. It takes 307 cycles by the testbench
  count, about 0.02 s of simulation.
* `tb_workload_conv2d`: a convolution layer with the shape of the last ResNet
  stage (7 x 7 output, 3 x 3 kernel, padding 1), cut to one 16 -> 16 channel
  tile, on the default instance. The testbench acts as the host: 63 tiles of
  len 7 (one per output row and kernel tap), with the partial sums added in the
  testbench. Every output and each tile's cycle count are checked.
* `tb_workload_dwconv`: a 16-channel depthwise convolution of the same shape,
  one channel per tile (len 49), using 9 rows and 1 column of the array.
* `tb_workload_bgemv`: 256 batches of a 16 x 16 matrix-vector product on a
  16 x 16 `DF_UMM` array, every result and the 262-cycle run time checked.

## 9. Where this RTL departs from the original description, and what it leaves out

The source design is a generator: it derives a PE and an array for any
invertible `T` over a chosen loop nest. This RTL fixes the loop nests to GEMM and
batched GEMV and gives four hand-derived dataflows. The following are this design's own
choices, not taken from the source:

* The 32-bit accumulator, the 256-word bank depth, synchronous active-low reset
  and the `load`/`swap`/`capture`/`shift` control encoding.
* Broadcasting the stationary controls instead of skewing them per PE.
* A register after every adder-tree level.
* The whole controller: its states, the cycle offsets and one tile per `start`.
* The host port, which stands in for the link to main memory and the host CPU.

Not built:

* 2-D reuse dataflows (broadcast to the whole array).
* The other GEMM dataflows the source evaluates (MSM, STM, MMT, MST, TSS).
* PEs with three operands, which MTTKRP and TTMc need.
* The convolution loop nests, other than through im2col-style tiling by the host.
* The floating-point variant used for the FPGA comparison: FP32 cells with a
  vector width of 8 on a 10 x 16 array.
* Overlapping the stationary reload with the previous tile.
* The off-chip DRAM and the host CPU, which are outside the design.

## 10. Which workloads fit

The source evaluates its designs on the workloads below. It gives no problem
sizes apart from a 3 x 3 convolution kernel and the 7 x 7 feature map of the last
ResNet layer. Sizes marked "standard" come from the common ResNet-50 layer shapes,
not from the source.

* **GEMM.** Runs as 16 x 16 x len tiles, with len up to 256 and K tiles summed
  by the host. A 256-row tile keeps the array busy 65,536 of 307 x 256 MAC
  slots, which is 83 %.
* **Conv2D, ResNet stage 2** (standard: 56 x 56 x 64 in, 3 x 3 x 64 x 64).
  Runs through the KCX mapping: input channels on rows, output channels on
  columns, output x streamed. Each (y, p, q) is a separate tile. Every operand
  fits a bank (x = 56 <= 256).
* **Conv2D, ResNet stage 5** (standard and source: 7 x 7 x 512, 3 x 3 x 512 x
  512). Same mapping with x = 7. Tiles are short, so fill overhead dominates.
* **Depthwise convolution.** Runs, but only one output channel per tile (one of
  16 columns), because there is no channel reduction. The source's best mappings
  for it (KPX-MMM, XYP-MMM) are not built.
* **Batched GEMV.** Runs with `DF_UMM`. One batch element (16 x 16 matrix times
  vector) enters per cycle, and up to 256 batches fit per run: 256 batches in 262
  cycles. This needs all 256 unicast A banks to be read every cycle. That is why
  the source finds this workload limited by on-chip bandwidth.
* **MTTKRP and TTMc.** Do not run as such: the PE has two operands. They would
  need the host to form the Khatri-Rao or Kronecker operand first.
