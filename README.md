# A genomics SoC uncore: matrix and edit-distance accelerators in SystemVerilog

Portable nanopore DNA sequencers produce raw current traces at tens of
megabits per second. Two kernels dominate the work of turning those traces
into something useful on the device: **basecalling**, where a neural network
turns the signal into a string of A, C, G and T, and **sequence comparison**,
where dynamic programming (DP) measures how far a read is from a reference,
such as the genome of a pathogen. The SoC described here puts both kernels
into hardware next to two general-purpose 64-bit RISC-V cores:

* **MAT**, a 4x4 systolic array for matrix products. It runs a purely
  convolutional basecaller of six layers (about 450K weights) by lowering
  each convolution to matrix products.
* **ED**, an edit-distance engine. It compares reads of about 100 bases with
  a reference. The target is about 900K bases per second at 250 MHz.

The cores handle everything in between: demultiplexing, trimming, filtering,
the ReLU activations between layers, tiling and data movement. The reference
chip is a 5 mm², 22 nm FD-SOI die at 250 MHz. It has about 700 KB of SRAM,
shared between caches and accelerator scratchpads, and draws about 50 mW at
peak. Its floorplan has these blocks: UART, GPIO, MAT, ED, CORE1 and CORE2,
each core's I1$ and D1$, a shared L2$, an AXI4 fabric and an off-chip I/O
link.

This repository has synthesizable RTL for the blocks that can be pinned down
from that description: both accelerators with their scratchpads, the UART,
the GPIO and an AXI4 control path that ties them together (`soc_top`).
The cores, caches, L2, I/O link, SRAM macros and pads are not included. They
are reused open-source or process IP, and nothing about their insides is
specified. The top brings out the AXI4 slave port through which the cores
would reach the devices.

The published description of the chip gives the block set, MAT's 4x4 size,
ED's purpose and its 100-base / 900K bases/s operating point, and the clock.
Everything else is a choice made for this RTL and is marked as such below:
arithmetic formats, dataflow, register maps, buffer depths and the bus
subset.

## Block map

```
                  AXI4 slave (from cores / I/O link)
                              |
                        +------------+
                        | axi_bridge |  one access per beat, decode addr[15:12]
                        +------------+
              dev_req/dev_rsp (one-cycle register bus, soc_pkg)
       +---------------+--------------+-------------+------------+
       |               |              |             |
  +-----------+   +-----------+   +--------+   +--------+
  | mat_accel |   | ed_engine |   |  uart  |   |  gpio  |
  | A,B spads |   | q,r spads |   +--------+   +--------+
  | sequencer |   | row buffer|    rxd/txd      pins i/o/oe
  | mat_array |   | DP cell   |
  |  4x4 PEs  |   +-----------+
  +-----------+     ed_irq
     mat_irq
```

| Address  | Device | Module      |
|----------|--------|-------------|
| 0x0000   | MAT    | `mat_accel` |
| 0x1000   | ED     | `ed_engine` |
| 0x2000   | UART   | `uart`      |
| 0x3000   | GPIO   | `gpio`      |
| others   | none: the bridge answers DECERR | |

Upstream logic is assumed to have already selected this 64 KiB region, so
address bits above 15 are ignored. All registers are 32-bit words.

## The register bus and the AXI4 bridge

Inside the uncore every device sees one request struct per access,
`reg_req_t {valid, we, addr[11:0], wdata}`, and answers in the same cycle
with `reg_rsp_t {rdata, err}`. There is no wait state, so each device's read
mux is purely combinational. Both types live in `soc_pkg`, together with the
address-window indices, the AXI response codes and the base encoding.

`axi_bridge` is an AXI4 slave with 32-bit data. It serves one transaction
at a time and turns every beat into one register-bus access:

* **Address.** In IDLE, AWREADY or ARREADY is high for the cycle in which
  the address is taken. When AW and AR are valid together, the bridge takes
  the kind it did not take last time, so neither direction can starve.
  The ID, length (1 to 256 beats), size and burst type are stored.
* **Bursts.** FIXED repeats the start address. INCR adds 4 per beat. WRAP
  wraps inside a container of (beats x 4) bytes, so a 4-beat WRAP starting
  at 0x18 visits 0x18, 0x1C, 0x10, 0x14.
* **Writes.** WREADY is high for the whole data phase. Each W beat goes to
  the device in the cycle it is accepted, so a master that streams W gets
  one word per clock. After the beat with WLAST, BVALID rises with BID equal
  to AWID. BRESP is the worst response of any beat in the burst.
* **Reads.** A beat is read from the device whenever the R register is empty
  or is being emptied in that cycle. A master that holds RREADY high gets one
  word per clock after one cycle of latency. RLAST marks the final beat, and
  RID equals ARID.
* **Responses per beat.**
  * DECERR: the address selects no device.
  * SLVERR: the device flags an unmapped offset.
  * SLVERR: a write beat whose WSTRB is not all ones. That beat is not
    performed; the other beats of the burst are.
  * SLVERR: AxSIZE is not 4 bytes. Narrow transfers are refused and make no
    access.
* **Assertions** check the master's side of the handshake: a raised VALID
  stays up, with a stable payload, until READY. They also check that WLAST
  comes with the burst's last beat and only then.

Not built: multiple outstanding or interleaved transactions, narrow
transfers, exclusive access, and the AxLOCK, AxCACHE, AxPROT, AxQOS,
AxREGION and user signals. The memory side of the fabric (cores, caches,
L2 and the I/O link) is also not built.

## MAT: the 4x4 systolic array

### What one job computes

A job multiplies a 4xK slice of A by a Kx4 slice of B, with K from 1 to 256,
into a 4x4 tile of C. The operands are signed 8-bit integers and the
accumulators are signed 32-bit. Software lowers a convolution layer to such
tiles in the usual im2col way: rows of A are output channels, K runs over
input channels x kernel taps, and columns of B are output time steps.
Software then applies ReLU and writes the next layer's operands back.

### Dataflow and timing (`mat_array`, `mat_pe`)

The array is output-stationary: each processing element `mat_pe` (i,j) keeps
C[i][j] in its own accumulator.

* **Inputs.** Each cycle with `in_valid` high is one rank-1 step k:
  `a_col[i] = A[i][k]` and `b_row[j] = B[k][j]`.
* **Skew.** Edge registers delay row i by i cycles and column j by j cycles.
* **Systolic movement.** Inside the grid, each PE registers its A operand
  (and the valid bit) to the right and its B operand downward.
* **Meeting point.** A[i][k] and B[k][j] therefore meet in PE (i,j) at cycle
  k + i + j.
* **Completion.** The last product lands in the corner PE (3,3) 2·(4−1)+1 = 7
  edges after the last step was presented. `clear` zeroes every accumulator.

```
 cycle:     0     1     2     3
 row 0 <- A00   A01   A02   A03 ...
 row 1 <-  .    A10   A11   A12 ...      (row i delayed i cycles)
 col 0 <- B00   B10   B20   ...
 col 1 <-  .    B01   B11   ...          (column j delayed j cycles)
```

### Sequencer and scratchpads (`mat_accel`)

* **Scratchpads.** There are two operand memories of K_MAX = 256 words each.
  A word of A holds the four values of one column of A: byte i is A[i][k].
  A word of B holds one row of B: byte j is B[k][j]. So a single read from
  each memory gives one complete rank-1 step. The memories are written from
  the bus and read synchronously by the sequencer, like single-port SRAM
  macros with a separate write port.
* **Sequencing.** A write of 1 to CTRL clears the array, then reads steps
  0..K−1 on consecutive cycles and waits for the array to drain.
* **Latency.** The job takes exactly **K + 8 cycles**, from the start write
  to the cycle that raises `done`: the start cycle, K feed cycles and 7 drain
  cycles. The CYCLES register reports this count.
* **Outputs.** `done` (= `mat_irq`) stays high until the next start. The 16
  results can be read at any time after that.

| Offset          | Register | Meaning |
|-----------------|----------|---------|
| 0x000           | CTRL     | write bit0 = 1: start (ignored while busy) |
| 0x004           | STATUS   | bit0 busy, bit1 done |
| 0x008           | K        | steps per job, clipped to 1..K_MAX |
| 0x00C           | CYCLES   | cycles of the last job |
| 0x100 + 4(4i+j) | C[i][j]  | result, read only |
| 0x400 + 4k      | A column k | byte i = A[i][k], write only |
| 0x800 + 4k      | B row k    | byte j = B[k][j], write only |

The address windows limit K_MAX to 256. N must be a power of two for the C
window decode.

## ED: the edit-distance engine

ED computes the Levenshtein distance between a query q of M bases and a
reference r of N bases, with M and N up to MAX_LEN = 100. Substitution,
insertion and deletion each cost 1:

```
D[i][0] = i,  D[0][j] = j
D[i][j] = min( D[i-1][j] + 1,  D[i][j-1] + 1,  D[i-1][j-1] + (q[i] != r[j]) )
distance = D[M][N]
```

The engine fills the matrix row by row, one cell per clock. It keeps only one
row of D, in a register array `row[0..MAX_LEN]`, and updates it in place:

* **Before writing cell j.** `row[j]` still holds the value from the row
  above (`up`).
* **Diagonal.** A register `diag` holds the old `row[j-1]`, which is
  D[i−1][j−1].
* **Left.** A register `left` holds the value just written, which is
  D[i][j−1].
* **Row start.** Each row begins with one cycle that writes D[i][0] = i and
  loads `diag` and `left`.

A job therefore takes exactly **M·(N+1) + 2 cycles**: the start cycle, one
initialisation cycle, and N+1 cycles per row. Two 100-base sequences take
10,102 cycles. At 250 MHz that is about 2.5M query bases per second. The
target operating point is about 900K bases/s, a figure measured on an FPGA
build with core-side overhead included, so one cell per cycle is enough. An
anti-diagonal array of cells would be the way to go faster.

Sequences are packed 16 bases per word, coded A=0, C=1, G=2, T=3. Base 16w+b
sits in bits [2b+1:2b] of word w. Empty sequences are handled: the distance
is then the other sequence's length.

| Offset      | Register | Meaning |
|-------------|----------|---------|
| 0x000       | CTRL     | write bit0 = 1: start (ignored while busy) |
| 0x004       | STATUS   | bit0 busy, bit1 done |
| 0x008       | LEN      | [15:0] M, [31:16] N, each clipped to MAX_LEN |
| 0x00C       | CYCLES   | cycles of the last job |
| 0x010       | DIST     | distance of the last job |
| 0x400 + 4w  | query word w     | write only |
| 0x800 + 4w  | reference word w | write only |

To compare a read with a whole viral genome (up to about 30K bases), software
slides 100-base windows of the genome through the reference scratchpad and
keeps the best score. The engine does not search by itself.

## UART and GPIO

`uart` sends and receives 8N1 frames, LSB first. The divisor register DIV
sets the clocks per bit. It resets to CLK_DIV = 2170, which is 115200 baud
at 250 MHz, and can be rewritten when the UART is idle.

* **Transmit.** A write to TXDATA while the transmitter is idle starts a
  frame.
* **Receive.** The receiver synchronises `rxd`, re-checks the start bit half
  a bit after it begins, and samples each data bit in the middle.
* **Registers.**
  * TXDATA at 0x000.
  * RXDATA at 0x004: [7:0] data, bit 8 valid. Reading it clears valid.
  * STATUS at 0x008: tx busy, rx valid, overrun, framing error. Writing it
    clears the two error flags.
  * DIV at 0x00C.

`gpio` has 32 pins, each with an output value and an output enable. Inputs
pass through a two-flop synchroniser.

* **Registers.** OUT at 0x000, OE at 0x004, IN at 0x008, SET at 0x00C and
  CLR at 0x010.
* **Reset.** All outputs are low and disabled.

Neither block is described beyond its name on the floorplan. Both are
conventional designs.

## What the reference chip has that this RTL does not

* **CORE1 and CORE2.** These are the 64-bit, Linux-capable, in-order RISC-V
  cores with FPUs, plus their I1$/D1$ caches, the L2$ and the I/O link. They
  are reused open-source or unspecified blocks. The top's AXI4 slave port and
  the two `*_irq` outputs are where they connect.
* **Memory side of the AXI4 fabric.** Only the control path to the devices
  exists. It is a one-transaction-at-a-time AXI4 slave without narrow
  transfers or the optional signals.
* **SRAM macros.** The scratchpads are plain arrays: 2 KiB for MAT, and 2 x
  100 bases plus a 101-entry row buffer for ED. How the chip's 700 KB is
  split is unknown.
* **Hardware ReLU and weight streaming for the basecaller.** In this design
  they are software's job. The basecaller's ~450K weights (about 450 KB at
  int8) cannot sit in MAT's 2 KiB of operand space. The model runs tile by
  tile.
* **Tight coupling.** The accelerators are described as tightly coupled to
  the cores, and ED is reached from CORE2 specifically. How they attach is
  not stated. Here both are ordinary memory-mapped devices that any bus
  master can drive.
* **A core-to-ED handshake.** The chip's CORE2-to-ED path deadlocked under
  Linux. ED here is a plain memory-mapped device, and that behaviour is not
  modelled.

## How far to trust it

Every module has a self-checking testbench in `tb/`. Each testbench compares
against values computed independently inside the testbench: an integer
matrix product, a full-matrix Levenshtein distance, serial and bus models.

| Testbench        | What it checks |
|------------------|----------------|
| `tb_mat_array`   | Random tiles for K from 1 to 40, with and without idle gaps. The 7-edge completion time is exact: not complete one edge earlier. |
| `tb_mat_accel`   | K = 1, 4, 64 and 256 plus random K. Cycle count K+8, busy-start ignored, K clipping, error response. |
| `tb_ed_engine`   | Identical, substituted, inserted, deleted, empty, random and mutated pairs. Cycle count M(N+1)+2. A 100x100 job within 27,777 cycles, the 900K bases/s bound at 250 MHz. |
| `tb_uart`        | TX bit timing and data, RX data, clear-on-read, overrun, framing error, run-time divisor change. |
| `tb_gpio`        | OUT, OE, SET and CLR. Two-cycle input synchroniser. Errors. |
| `tb_axi_bridge`  | 300 random INCR, FIXED and WRAP bursts of up to 16 beats with random IDs, W gaps and BREADY/RREADY stalls, against a shadow model that computes beat addresses itself. Data, RLAST, RID/BID, OKAY/SLVERR/DECERR per beat and worst-of-burst BRESP. Partial-strobe beats and narrow sizes refused. One access per performed beat. One beat per clock when streaming. Alternating AW/AR priority. |
| `tb_basecaller_mat` | A six-layer 1-D CNN (channels 1-8-16-16-16-8-4, kernels 9, 5, 5, 5, 5 and 3, over 32 time steps, 4,008 weights) lowered to 136 MAT jobs through the top. ReLU and requantisation between layers are done in software, and both must occur. Every layer is compared with a direct convolution. |
| `tb_pathogen_scan`  | A random 30,000-base genome scanned with a noisy 100-base read: 2,991 ED jobs at a window stride of 10, each distance checked. The read is found within one stride of its origin, and an unrelated read is not found. This takes about 30.3M cycles, roughly 45 s of simulation. |
| `tb_soc_top`     | Default parameters, end to end over AXI4. A 4x256x4 MAT job loaded by a 256-beat write burst and read back by a 16-beat read burst, a 100-base ED comparison with substitutions and an indel, both accelerators running at once, UART both ways, GPIO, error responses, start-while-busy. Each mechanism is counted and must occur. |

What is not verified:

* Timing closure at 250 MHz. The ED cell is an adder and two compares behind
  a 101-way read mux.
* Gate-level behaviour.
* Behaviour with a real RISC-V software stack.

## Simulating

Verilator 5 with `--timing`:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl \
  rtl/soc_pkg.sv rtl/mat_pe.sv rtl/mat_array.sv rtl/mat_accel.sv \
  rtl/ed_engine.sv rtl/uart.sv rtl/gpio.sv rtl/axi_bridge.sv rtl/soc_top.sv \
  tb/tb_soc_top.sv --top-module tb_soc_top
./obj_dir/Vtb_soc_top
```

For a single block, list `rtl/soc_pkg.sv`, the block's module and its
submodules, and its testbench. Each testbench ends with one line
`TB_RESULT checks=N failures=F` and has a watchdog that counts a failure if
it hangs.

Parameters worth changing:

* `MAT_K_MAX`: scratchpad depth, at most 256 with this register map.
* `ED_MAX_LEN`: longest sequence. The register layout allows up to 4096
  bases, and the row buffer grows linearly.
* `UART_CLK_DIV`: initial UART divisor.
* `GPIO_W`: number of GPIO pins, at most 32.
