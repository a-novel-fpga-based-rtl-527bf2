# Reconfigurable systolic CNN accelerator with pipelined Karatsuba-Ofman multipliers

Convolution is the most expensive part of a convolutional neural network. At
its core it is multiply-accumulate. This design does the convolution work on
an array of *systolic cells*. Each cell holds one coefficient, multiplies
the sample it receives by that coefficient, and adds the product to a
partial sum that arrives from its neighbour. A few switches between the
rows of cells let the same array act as a 1-D FIR filter, a 2-D convolution
window, a pooling window or a fully connected layer. Every multiplier is a
pipelined divide-and-conquer (Karatsuba-Ofman style) multiplier. A control
unit loads the coefficients and switch settings from memory. The host
processor only has to write a configuration program and say "start".

The SystemVerilog follows the architecture of the paper "A Novel FPGA-based
CNN Hardware Accelerator: Optimization for Convolutional Layers using
Karatsuba Ofman Multiplier" (A. Sarkar). That paper describes the cell, the
FIR row, the multiplier algorithm and the block structure, but not the
switch insides, the control unit, the memory or the bus. Those parts are
this implementation's own, and they are marked as such below and in the
header of every file.

## System view

```
            cpu_* (bus master: host processor, external)
                 |
        +--------+---------------- system bus (bus_decoder) ----------------+
        |                          |                                       |
   shared_mem  <--- program ---  engine_ctrl  --- cfg writes --->  systolic_engine
   (1024 x 32)     read port     (control unit)                  6 rows x 4 cells
                                                                  x_row[] -> y_row[]
        dsp_* (bus slave: DSP accelerator, external)

   kom_matmul (3 x 3 matrix product, 27 multipliers): mm_* ports
```

`cnn_accel_top` wires these blocks together. The host processor, the DSP
accelerator and the chip's I/O ports are not part of the RTL: their signals
are ports of the top.

## The multiplier (`kom_mult`)

Split each W-bit operand into a left (upper) half and a right (lower) half.
The product is then

    A*B = Al*Bl * 2^W  +  (Ar*Bl + Al*Br) * 2^(W/2)  +  Ar*Br

This is the four-product form the paper gives. The three-product Karatsuba
trick is not used. Each half product is split again in the same way, down
to 2-bit segments, so a 32-bit multiplier has 256 2x2-bit leaf products.
The RTL unrolls the recursion into levels:

* Level 0 registers the product of every pair of 2-bit digits.
* Level k (segment width S = 2^(k+1)) combines four products of level k-1.
  `Al*Bl*2^S + Ar*Br` is a plain concatenation, so only the middle term
  needs adders.
* The last level holds the W x W product.

There is a register after every level. The latency is therefore log2(W)
clocks (5 for W = 32), and a new operand pair can enter every clock.
Operands are unsigned. The pipeline has no reset.

## The systolic cell and the FIR row

`systolic_cell` computes `y_out = y_in + h * x` with one register on the
output:

    y_out(t+1) = y_in(t) + h * x(t - L),      L = log2(W)

`systolic_fir` places TAPS = 4 cells in a row. The sample x goes to every
cell at once, and the partial sum moves one cell to the right per clock.
The leftmost cell holds the oldest tap h(3) and the rightmost holds h(0).
The row is therefore a transposed-form FIR filter:

    y_out(t) = sum_k h(k) * x(t - 1 - L - k)  +  y_in(t - TAPS)

Cell position c (0 = leftmost) holds h(TAPS-1-c). The row's `y_in` input
adds a partial sum from outside, which is how rows are chained.

## The reconfigurable engine (`systolic_engine`, `switch_block`)

The engine has ROWS = 6 FIR rows of COLS = 4 cells. There is a
`switch_block` between every two rows. It has two settings, written by the
control unit (`sw_cfg_t`):

| setting | 0 | 1 |
|---|---|---|
| `cascade` | lower row starts from a zero partial sum | lower row continues the upper row's output |
| `x_from_above` | lower row takes its own port `x_row[r]` | lower row takes the upper row's sample |

Row 0 always starts from zero. Every row's output is a port, `y_row[r]`.
Each cascaded row adds COLS clocks to the path of the partial sum. How the
layer types map onto the array:

* **FIR / 1-D convolution.** All rows are cascaded and share x. This gives
  a 24-tap filter. Cell (r, c) holds tap m = (ROWS-1-r)*COLS + (COLS-1-c).
  With no cascading, each row is a separate 4-tap filter.
* **2-D convolution, K x K kernel** (K <= 4 columns and K <= 6 rows).
  * Rows 0..K-1 are cascaded, and row i holds kernel row i right-aligned:
    cell c = j + COLS - K holds k[i][j], and the other cells hold 0.
  * Feed the image in raster order, IMG_W pixels per line, with IMG_W >= COLS.
  * Row port i gets the stream delayed by (K-1-i)*(IMG_W-COLS) clocks. The
    bottom row gets it undelayed. This skew lines up the partial sums of
    the rows.
  * The result for the window whose top-left pixel is (R, C) then appears
    on `y_row[K-1]` at clock R*IMG_W + C + 1 + L + (K-1)*(IMG_W+1),
    counting from the clock at which pixel (0, 0) enters the bottom row.
  * Outputs for windows that wrap past the end of a line are not valid.
  * Rows that are not used can run a second kernel on the same image.
* **Pooling.** This uses the convolution mapping with coefficients of 1, so
  the output is the window sum. The cells can only multiply and add, so
  average pooling comes out without its 1/window scale. Max pooling is not
  available.
* **Fully connected.** A group of g cascaded rows is one neuron with
  g*COLS inputs. Weights are laid out in reading order: row by row, and
  left to right within a row. Feed the input vector serially, one element
  per clock. The dot product then appears on the group's last row
  g*COLS + L clocks after the first element went in. A new vector can
  follow immediately. With `x_from_above` set on the boundaries between
  groups, several neurons see the same input.

The end-to-end testbench runs all four mappings.

## Configuration: program format and control unit (`engine_ctrl`)

The host writes a program of 32-bit words into the shared memory. It then
writes the program's word address to `CTRL_BASE` (bus address 0x1000) and
writes `CTRL_START` (0x1001). The control unit reads the program through the
memory's second port and issues the writes to the engine:

| header bits [31:30] | meaning | clocks |
|---|---|---|
| 0 `CFG_WEIGHT` | [7:0] = cell index row*COLS+col; the next word is the coefficient | 4 |
| 1 `CFG_SWITCH` | [7:0] = row boundary b (between rows b and b+1); [17:16] = {x_from_above, cascade} | 2 |
| 2 `CFG_NOP` | ignored | 2 |
| 3 `CFG_END` | stop; STATUS.done is set | 2 |

Other registers:

* `CTRL_STATUS` (0x1002) reads {err, done, busy}.
* `CTRL_COUNT` (0x1003) reads the number of weight and switch instructions
  applied by the last run.
* `err` is set if the program runs off the end of memory without an END.
* `cfg_busy` and `cfg_done` are also top-level outputs.

A complete program loads all 24 coefficients and all 5 switches. It takes
24*4 + 5*2 + 2 = 108 clocks, plus 2 for a NOP if one is present.
Coefficients keep their values from one program to the next. Stream data
only after `done`.

## Bus and memory

The bus is `bus_decoder`. It has one master and uses 16-bit word addresses.
The top four address bits select the slave:

* 0x0xxx: shared memory
* 0x1xxx: control unit
* 0x2xxx: DSP accelerator port

An access takes one clock (`cpu_req`, `cpu_we`, `cpu_addr`, `cpu_wdata`).
Read data comes back on `cpu_rdata` the next clock. Unmapped addresses read
as 0. `shared_mem` is a 1024 x 32 synchronous RAM with a bus port and a
read port for the control unit.

## The matrix unit (`kom_matmul`)

The paper measures its multiplier on products of two n x n matrices of
sizes 3, 5, 7 and 11. These sizes match the kernel sizes of AlexNet and the
VGG networks. Such a product is built fully in parallel from n^3
multipliers.

`kom_matmul` does this. It has one `kom_mult` per A[i][k]*B[k][j], and a
registered adder per element of C. It accepts a pair of matrices every
clock when `in_valid` is high, and gives C with `out_valid` log2(W)+1
clocks later. C is 2W+clog2(N) bits wide, so it cannot overflow. In the
top it has its own data ports (`mm_*`) with N = 3. The paper does not say
how this unit is attached to the rest of the system.

## Parameters and sizes

| module | parameter | default | origin |
|---|---|---|---|
| kom_mult | W | 32 | the paper's 32-bit multiplier |
| systolic_fir | TAPS | 4 | four cells drawn in the paper's FIR figure |
| systolic_engine | ROWS x COLS | 6 x 4 | cells drawn in the paper's engine figure |
| systolic_cell | ACC_W | 2W = 64 | own choice; partial sums wrap modulo 2^64 |
| shared_mem | DEPTH | 1024 | own choice |
| kom_matmul | N | 3 | smallest matrix size in the paper's tables |

Limits on the parameters:

* W must be a power of two and at most 32, because coefficients arrive
  over the 32-bit bus.
* ROWS*COLS may be at most 256, because of the 8-bit cell index.

## What fits

* 3 x 3 kernels, as used by VGG16, VGG19 and part of AlexNet, fit the
  engine. Two kernels run at once. An image of any width of at least 4
  pixels is streamed through, so no image memory is needed.
* 5 x 5 kernels do not fit in one pass: they need rows of 5 cells, and the
  rows here have 4.
* 11 x 11 kernels do not fit either: they need 121 cells, and the engine
  has 24.
* Deeper kernels (several input channels) need one pass per channel. The
  partial results are added outside the engine.
* Matrix products larger than 3 x 3 need `kom_matmul` built with a larger N.

## What departs from the paper, or goes beyond it

* The paper's FFT configuration is not supported. Max pooling is not
  supported either. Average pooling gives the window sum.
* The paper also describes reconfiguration by downloading an FPGA bit
  file. Here reconfiguration writes coefficient and switch registers.
* The paper draws three switching blocks per row boundary and general
  horizontal and vertical buses. Here each boundary is one `switch_block`
  with the two settings above. There is no general routing.
* The engine's analog I/O ports are plain digital row ports.
* These parts are this implementation's own choices, not the paper's:
  * the pipeline depth of the multiplier
  * widths and reset behaviour
  * the instruction encoding
  * the control unit
  * the bus protocol and address map
  * the memory size
  * the way convolution, pooling and fully connected layers map onto the
    array (including the row skew)

## Simulating

Each module is in `rtl/<name>.sv`, and the shared package is
`rtl/cnn_pkg.sv`. Each testbench `tb/tb_<name>.sv` checks itself and ends
by printing `TB_RESULT checks=N failures=M`. For example, to run the whole
design end to end at the default size:

    verilator --binary --timing --assert -Wno-fatal --top-module tb_cnn_accel_top \
        rtl/cnn_pkg.sv rtl/kom_mult.sv rtl/kom_matmul.sv rtl/systolic_cell.sv \
        rtl/systolic_fir.sv rtl/switch_block.sv rtl/systolic_engine.sv \
        rtl/engine_ctrl.sv rtl/shared_mem.sv rtl/bus_decoder.sv \
        rtl/cnn_accel_top.sv tb/tb_cnn_accel_top.sv
    ./obj_dir/Vtb_cnn_accel_top

The testbenches for the other blocks build the same way, with their own
module and only the files they use.

## What the testbenches check

| testbench | what it checks |
|---|---|
| `tb_kom_mult` | 2000 products at full throughput, each checked exactly 5 clocks after its operands went in; includes 30*6 = 180 and corner values |
| `tb_systolic_cell` | the cell equation every clock, including a coefficient reload |
| `tb_systolic_fir` | the FIR equation and the impulse response order |
| `tb_switch_block` | all four settings, and that the setting holds while not written |
| `tb_systolic_engine` | every row output, every clock, against a reference model, over six random configurations (including fully cascaded and fully independent) |
| `tb_engine_ctrl` | the write sequence, NOP skipping, run time, registers, START ignored while busy, and the run-off-the-end error |
| `tb_shared_mem`, `tb_bus_decoder` | both memory ports; region decode and read-data return |
| `tb_kom_matmul` | random matrix products and the valid latency |
| `tb_cnn_accel_top` | all defaults: the four layer mappings through real configuration programs, the matrix unit and the DSP port |
| `tb_kom_matmul_sizes` | the matrix sizes 5, 7 and 11 of the paper's tables |
| `tb_cnn_conv_fullsize` | one input channel of a 224 x 224 image (the VGG input size) and of a 227 x 227 image (the AlexNet input size), each with two 3 x 3 kernels; every output window is checked, about 200,000 checks |

Every testbench has a watchdog, so a hang counts as a failure.
