# A 32x32 systolic-array inference engine with on-chip-resident models

This is synthesizable SystemVerilog for a small-CNN inference accelerator of the Tensil kind, as
configured for a Zynq UltraScale+ ZCU104 board in Isik, Inadagbo and Aktas, "Design optimization for
high-performance computing using FPGA". The published work benchmarks ResNet20 on CIFAR-10. Its
gains come from three hardware choices, and this RTL reproduces all three:

1. **A weight-stationary 32x32 systolic array** of 16-bit fixed-point multiply-accumulate cells.
   Each cycle it turns one 32-lane activation vector into one 32-lane result vector.
2. **Local memory big enough to hold a whole small network.** The 48K-vector (3 MiB) local memory
   is mapped to UltraRAM. All of the Block RAM goes to a 20K-vector accumulator memory. With this
   much on-chip storage the compiler no longer has to split a layer into several
   load-compute-save partitions. In the best case, every weight and activation of ResNet20 stays
   on chip from the first layer to the last. Only the image goes in and only the predictions come
   out.
3. **Two clock domains at the memory ports.** The accelerator runs at 100 MHz and moves one
   512-bit vector per cycle. The processing system's AXI ports are only 128 bits wide but run at
   333 MHz. Each DRAM port gets a bridge that crosses the clock boundary and splits every 512-bit
   vector into four 128-bit words, or builds one from four.

The instruction set, the handshakes and several inner details are not published. They are this
design's own choices and are marked as such below and at the top of each file.

## Block diagram

```
            clk_axi (333 MHz)          |                 clk (100 MHz)
                                       |
 instr_t* (64b, from DMA) ──► async_fifo ──► tcu_controller ──┬──► local_memory (48K x 512, UltraRAM)
                                       |        │  ▲          │       ▲ write port   │ read port
 axi_*[0] ◄──► dram_port_bridge[0] ◄───┼───────►│  │          │       └──────────────┤
 axi_*[1] ◄──► dram_port_bridge[1] ◄───┼───────►│  │          ├──► systolic_array (32x32, weight-stationary)
   (128b AR/AW/W/R)   width_downsizer  |        │  │          │        │ results
                      width_upsizer    |        │  │          └──► accumulators (20K x 512, Block RAM)
                      async_fifo x3    |        └──┘ skid buffer, counters
```

All data paths inside the accelerator are one vector wide: 32 lanes of 16 bits, lane 0 in the
low bits. All memory addresses count vectors.

| Parameter | Value | Origin |
|---|---|---|
| Array size `N` | 32 x 32 | published |
| Data type | 16-bit signed fixed point | published |
| Binary point `FRAC_W` | 8 fractional bits | own choice |
| Local memory | 49,152 x 512 bit, UltraRAM | published (48 KV) |
| Accumulators | 20,480 x 512 bit, Block RAM | published (20 KV) |
| Accelerator clock | 100 MHz | published |
| DRAM port clock and width | 333 MHz, 128 bit | published |
| DRAM ports | two (DRAM0, DRAM1) | published |
| Instruction word | 64 bit | own choice |

## Instructions and how a layer runs

The sequencer (`tcu_controller`) runs one instruction to completion before it accepts the next.
Every instruction moves a block of `size+1` vectors from a source to a sink:

| `op` | flags | source → sink |
|---|---|---|
| `1` MATMUL | bit 0: accumulate | local memory → array → accumulators (overwrite or add) |
| `2` DATAMOVE | `0` / `2` | DRAM0 / DRAM1 → local memory |
| | `1` / `3` | local memory → DRAM0 / DRAM1 |
| | `C` | accumulators → local memory |
| | `D` / `F` | local memory → accumulators (overwrite / add) |
| `3` LOADWEIGHTS | | local memory → weight rows 0..size of the array |
| `0` NOP | | nothing |

The word layout is `[63:60]` op, `[59:56]` flags, `[55:40]` size (vectors − 1), `[39:24]` local
address, `[23:0]` accumulator or DRAM address (`tcu_pkg::instr_t`).

A convolution layer becomes: load its weights into local memory, then LOADWEIGHTS. Load the
activations, then run MATMUL over them. Each further kernel tap or input-channel block is another
MATMUL with the accumulate flag set, into the same accumulator range. Then move the accumulators
to local memory, or save them to DRAM. When the network fits on chip, as ResNet20 does here, the
DRAM moves disappear except for the first image load and the final save. The whole network
becomes a string of LOADWEIGHTS / MATMUL / accumulator→local instructions. This is the
"local-vars-and-consts" strategy that gives the published 293.58 frames/s.

Inside an instruction the sequencer streams one vector per cycle. A memory read takes one cycle,
so the read data goes through a two-entry skid buffer to the sink. A new read is issued only when
the buffer is sure to have room, even counting the read still in flight. The stream stops only
when a DRAM port holds back its data, or will not take data (`stall_cycles` counts these cycles).
The instruction also waits while its DRAM request is refused.

Timing of a MATMUL of M vectors: M cycles to stream in, plus 2N = 64 cycles of array latency,
plus a few cycles of handshake. Instructions do not overlap, so a run of short MATMULs is
dominated by the 64-cycle array latency. This is a deliberate simplification (see
*Departures*).

## The systolic array

Cell (i, j) holds weight W[i][j]. Activation lane i enters row i after a skew of i cycles, then
moves one cell to the right per cycle. Partial sums start at zero at the top and move one cell
down per cycle, and each cell adds `a x w`. Column j's sum leaves the bottom N + j cycles after
its vector entered. A deskew delay of N − 1 − j realigns all 32 columns. The output stage then
does an arithmetic shift right by `FRAC_W` (rounding toward minus infinity), saturates to 16 bits
and registers the result:

    y[j] = sat16( (Σ_i x[i] · W[i][j]) >>> 8 )

Partial sums keep full precision (38 bits) all the way down the column. A vector can enter every
cycle, and its result appears exactly 2N cycles later with `out_valid`. The array never stalls. A
weight row is written by `w_valid` with a row index, one row per cycle. LOADWEIGHTS writes rows
0..size, taken from consecutive local-memory addresses.

## Memories

`local_memory` has one write port and one read port that both work in every cycle. Reads are
registered (one cycle). A read of the address being written in that cycle returns the old data.
The `ram_style = "ultra"` attribute puts the memory in UltraRAM; without a hint, Vivado would use
Block RAM.

`accumulators` has one request port for three operations: read, write, and accumulate (lane-wise
saturating add). All three go through a two-stage pipeline: read the old word, then write the new
one. Two requests to one address in consecutive cycles would read a stale word. Instead, the word
being written is forwarded to the next request, so accumulation can run at one vector per cycle
into any addresses, repeated ones included.

## The dual-clock DRAM ports

This is the part of the design that crosses clock domains. Each of DRAM0 and DRAM1 has a
`dram_port_bridge`:

```
 clk (100 MHz)                          clk_axi (333 MHz)
 req {write, addr, len} ─► async_fifo ─► AR (read) or AW (write): byte addr = addr x 64, beats = len x 4
 wdata 512 ──────────────► async_fifo ─► width_downsizer ─► W 128  (low 128 bits first)
 rdata 512 ◄────────────── async_fifo ◄─ width_upsizer  ◄── R 128  (first word → low bits)
```

The converters do the published trick: one 512-bit word per accelerator clock matches four
128-bit words on a clock four times faster. The downsizer takes the next wide word in the same
cycle its last narrow word leaves. The upsizer hands over a finished word in the same cycle it
takes the first narrow word of the next. So neither one adds bubbles. Bandwidth per port:

- accelerator side: 512 bit x 100 MHz = 51.2 Gbit/s;
- AXI side at 333 MHz: 128 bit x 333 MHz = 42.7 Gbit/s, which is 0.83 vector per accelerator cycle;
- at a 400 MHz AXI clock (the four-to-one case): exactly one vector per cycle. The bridge test
  measures 64 vectors in 64 cycles at this ratio.

Every crossing uses `async_fifo`: a Gray-coded read and write pointer, each passed to the other
clock through two flip-flops. Full and empty are judged from the synchronized pointers, so they
are conservative and never wrong. Depths: 16 vectors for data, 4 requests, 16 instructions. The
instruction stream from the DMA engine crosses the same way.

The narrow side is a **reduced AXI**. It has separate read and write address channels carrying a
byte address and a beat count, and W and R data channels with valid/ready. It has no write
response, no IDs, and no splitting of long transfers into 256-beat bursts. A real AXI4 port needs
a thin adapter that adds these. Because vectors are 64-byte aligned, and a request is at most
65,536 vectors, some port bits are constant: the low 6 address bits, the low 2 beat-count bits,
and the top address and beat-count bits.

## Departures from the published design

- **Instruction set and sequencing.** These are not published. The opcodes, word layout and
  one-at-a-time execution are this design's own. The original sequencer overlaps instructions;
  this one does not.
- **Data type.** Published sources disagree. One says 16-bit fixed point, the comparison table
  says 32-bit floating, and the method section mentions 8-bit quantization. This RTL uses 16-bit
  fixed point, the only choice consistent with the published memory word of 32 x 16 bits. The
  binary point (8) and the rounding (floor, then saturate) are assumptions.
- **Accumulators are 16 bits per lane**, as the published memory sizes imply. They add with
  saturation.
- **No SIMD / activation unit**, no bias row, no pooling: nothing of the kind is described for
  this accelerator. A network's ReLU and pooling would have to run elsewhere.
- **Weight compression** is mentioned in the publication but not described, so it is not built.
- **Clock domains.** The text once says the data path runs at the higher frequency, but its
  figure and numbers put the accelerator at 100 MHz and only the AXI ports at 333/400 MHz. This
  RTL follows the numbers.
- Outside the RTL: the processing system and its DDR, the AXI DMA that streams instructions, and
  the SD card holding the model and images. The top brings their signals out as ports.

## Files

| File | Contents |
|---|---|
| `rtl/tcu_pkg.sv` | sizes, instruction and request types, saturation helper |
| `rtl/tensil_top.sv` | top: controller, memories, array, two DRAM bridges, instruction FIFO |
| `rtl/tcu_controller.sv` | instruction sequencer |
| `rtl/systolic_array.sv`, `rtl/systolic_pe.sv` | the array and its cell |
| `rtl/local_memory.sv`, `rtl/accumulators.sv` | the two on-chip memories |
| `rtl/dram_port_bridge.sv` | one dual-clock DRAM port |
| `rtl/async_fifo.sv`, `rtl/width_downsizer.sv`, `rtl/width_upsizer.sv` | its parts |
| `tb/*_tb.sv` | one self-checking testbench per module, plus the end-to-end tests |
| `tb/tcu_ref_pkg.sv` | instruction-level software model used as the reference |
| `tb/axi_dram_model.sv` | behavioural DRAM behind a reduced-AXI port, with random stalls |

## Verification

Each testbench prints `TB_RESULT checks=N failures=M`. Each has a watchdog, and each compares
against values it computes itself:

- `systolic_array_tb` (8x8): products against a software matrix-vector product, saturation
  included. Latency exactly 2N, then one result per cycle.
- `local_memory_tb` (full size): both ends of the address range, and read-during-write returning
  old data.
- `accumulators_tb` (full size): 3,000 random read/write/accumulate requests against a software
  copy. Hundreds of them accumulate back to back into one address.
- `width_downsizer_tb`, `width_upsizer_tb`: order, content, one narrow word per cycle, random
  back-pressure.
- `async_fifo_tb`: 100 MHz into 333 MHz. Order, no loss, never more than DEPTH words held, and
  the full state reached.
- `dram_port_bridge_tb`: writes and reads through the bridge at a 4:1 clock ratio, with a fast
  and a stalling DRAM. It checks byte addresses, beat counts, word order and the
  one-vector-per-cycle rate.
- `tcu_controller_tb` (8x8 array): a layer program against the software model, with randomly
  stalling DRAM. It checks the MATMUL cycle count too.
- `tensil_top_tb`: the top with **all parameters at their defaults**. Clocks are 100 and 333 MHz,
  and both DRAMs stall at random. It runs two layers (load weights, load image, compute,
  accumulate, residual add, save). Both DRAMs and the local memory are compared with the model.
  The test also checks that every mechanism occurred: instruction back-pressure across the clock
  crossing, DRAM stalls, both ports used in both directions, weight loads, overwriting and
  accumulating MATMULs, accumulator→local moves.
- `resnet_conv_layer_tb`: two real ResNet20 layers on the full-size top, both 3x3 convolutions
  with zero padding. The first-stage layer has 16 to 16 channels over 32x32 pixels. The
  third-stage layer has 64 to 64 channels over 8x8 pixels: two input blocks and two output blocks
  of 32 channels. Input and weights come from DRAM. The program has one LOADWEIGHTS per (output
  block, tap, input block), and one MATMUL per output row after each of them. Every output lane
  is checked against a direct convolution computed in the testbench. Each layer does 2.36 M
  multiply-accumulates. The first takes 34,103 cycles (341 µs at 100 MHz) and the second 25,685
  cycles (257 µs). Most of that time is the 64-cycle array latency that each short MATMUL waits
  out before the next one may start. The array itself would need only 2.36 M / 1,024 = 2,304
  cycles.

Every testbench starts with reset high and pulls it low 1 ns later. The asynchronous resets then
see a falling edge before the first clock edge, whatever a two-state simulator starts them at.

To run one with Verilator 5 from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb -Irtl \
    rtl/tcu_pkg.sv tb/tcu_ref_pkg.sv tb/tensil_top_tb.sv --top-module tensil_top_tb -o sim
./obj_dir/sim
```

The full-size top test builds and runs in under a minute, and the convolution layer test in about
two. Under `verilator --lint-only -Wall` the top gives only two kinds of warning: constants of the
shared package that a given module does not use, and the reset being used both as an asynchronous
reset and in the assertions' `disable iff`. The top also elaborates and synthesizes in Yosys
through the slang front end. The two memories stay memory cells there, of 25.2 Mbit and
10.5 Mbit.

The sizes agree with the published resource figures. An UltraRAM block is 4K x 72 bits, so a
512-bit word needs 8 blocks side by side, and 48K words need 12 rows of them: 96 UltraRAMs, the
number reported for this configuration. The array's 1,024 multipliers match the roughly
1,050 DSP slices reported.

## Changing it

`tensil_top` takes `N`, `LOCAL_DEPTH`, `ACC_DEPTH` and `AXI_W`. `N x 16` must be a multiple of
`AXI_W`. Memory depths need not be powers of two, but every address must fit the 16-bit local and
24-bit DRAM fields of the instruction word. To change the binary point, set `tcu_pkg::FRAC_W`.
The CDC FIFO depths are parameters of `dram_port_bridge` (`FIFO_DEPTH`) and of the instances in
`tensil_top`.
