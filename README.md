# ALPINE-style tightly coupled analog in-memory computing tiles

Analog in-memory computing (AIMC) performs a matrix-vector multiplication (MVM)
inside a crossbar of resistive memory cells: the weights are stored as cell
conductances, the inputs are applied as voltage pulses on the word lines, and
each bit line sums the resulting currents. The whole MVM takes one fixed
latency, whatever the matrix size. The weakness of AIMC accelerators has been
the way they are attached to the host: across a bus or a network-on-chip, each
MVM pays for DMA transfers and synchronisation that dwarf the analog operation.

This design attaches the tile directly to a CPU core instead. Every core owns
a private AIMC tile. The core's execute stage has an *AIMC CTRL* unit beside
its ALU and load/store pipelines. Four new instructions drive the tile from
general-purpose registers. Inputs come from registers and outputs go back to
registers. Nothing passes through the caches, and no tile is shared between
cores. Software then sees the tile as a very wide, very slow functional unit:

```
   CM_INITIALIZE  program one weight of the crossbar      (once, at setup)
   CM_QUEUE       move up to 4 packed int8 inputs -> tile input memory
   CM_PROCESS     run one MVM: inputs -> DACs -> crossbar -> ADCs -> outputs
   CM_DEQUEUE     move up to 4 packed int8 outputs -> destination register
```

The RTL here covers the AIMC CTRL unit, the instruction decoder and the whole
tile. The tile has input and output memories, a local controller, PWM DACs, a
behavioural crossbar model and an ADC bank. The top level replicates one
CTRL-plus-tile slice per core. The cores, caches and DRAM are not included.
Each core's issue and writeback interface appears as ports on the top.

## Instruction encoding

All four instructions use one 32-bit format:

| bits    | 31..21 | 20..16 | 15  | 14..10 | 9..5 | 4..0 |
|---------|--------|--------|-----|--------|------|------|
| field   | OpCode | Rm     | R/W | Ra     | Rn   | Rd   |

| instruction   | OpCode | R/W | operands used (this design's assignment)                      | writes Rd |
|---------------|--------|-----|---------------------------------------------------------------|-----------|
| CM_QUEUE      | 0x108  | 1   | Rn = packed bytes (byte 0 in bits 7..0), Rm = count, Ra = index | no      |
| CM_DEQUEUE    | 0x108  | 0   | Rm = count, Rn = index                                        | yes       |
| CM_PROCESS    | 0x008  | 0   | none                                                          | no        |
| CM_INITIALIZE | 0x208  | 0   | Rn[7:0] = signed weight, Ra = row, Rm = column                | no        |

The field order, the opcodes and the use of R/W to tell QUEUE from DEQUEUE are
the architecture's. The exact bit positions follow the ARMv8 three-source data
processing format, which has the same field order. The operand roles are this
design's choice. The architecture only says that "argument registers" carry the
count and the index. A count of 0 or above 4 is treated as 4. For CM_DEQUEUE,
bytes past the count, or past the end of the output memory, read as zero.
`cm_decoder` flags any other word as "not a CM instruction". R/W must be 0 for
0x008 and 0x208. Every format carries an Rd field, but only CM_DEQUEUE
writes a register here; the other three report completion only. The `alpine_pkg::cm_encode` function builds instruction words
for testbenches and software.

## One instruction, cycle by cycle

A core offers an instruction with `issue_valid`, the 32-bit word and the three
source register values. The CTRL unit takes it when `issue_ready` is high. It
then sends one command to the tile over a valid/ready channel and waits for
the tile's one-cycle response. Finally it raises `wb_valid` for one cycle,
with `wb_we` and `wb_rd`/`wb_data` set for CM_DEQUEUE. While the tile is busy,
`issue_ready` stays low. This is the stall a core sees when it issues a second
CM instruction too early.

The latency from issue to writeback is the tile's occupancy plus 2 cycles: one
cycle to send the command and one to register the writeback. Tile occupancy
is:

| command        | cycles in tile | origin                                                |
|----------------|----------------|-------------------------------------------------------|
| CM_QUEUE       | `IO_CYCLES` = 3     | 4 bytes at 4 GB/s is 1 ns = 2.3 cycles at 2.3 GHz, rounded up |
| CM_DEQUEUE     | `IO_CYCLES` = 3     | same                                             |
| CM_INITIALIZE  | `PROG_CYCLES` = 2   | not given; this design's choice                  |
| CM_PROCESS     | `LATENCY` = 230     | 100 ns tile latency at 2.3 GHz                   |

## Inside a CM_PROCESS

The architecture fixes the total MVM latency, not how it splits into phases.
This design splits it as follows:

1. **Clear and drive** (1 cycle after the command). The local controller clears
   the bit-line integrators and starts the DACs.
2. **DAC pulse window** (`PULSE_WINDOW` = 128 cycles). Each word line gets one
   DAC. An int8 input x drives its line for |x| cycles, with polarity set by
   the sign. Pulse-width modulation, sign-as-polarity and one DAC per line are
   the architecture's. The 128-cycle window follows from the 8-bit range.
3. **Crossbar integration.** On every cycle, each bit line j adds
   sum over active rows i of (±1)·w[i][j]. The weight w is a signed 8-bit
   value, standing in for a differential PCM pair. At the end of the window,
   bit line j holds exactly the dot product Σ x_i·w[i][j]. This is an ideal,
   noise-free behavioural model. The analog array cannot be described as RTL.
4. **ADC conversion** (`ADC_CYCLES` = 32). Each bit line gets one ADC. It
   produces `sat8(charge >>> ADC_SHIFT)`, with `ADC_SHIFT` = 7: a fixed gain
   followed by saturation to the signed 8-bit range. The fixed gain and the
   8-bit signed output are the architecture's. The shift value and the
   conversion time are this design's choices.
5. **Store.** All N codes are written into the output memory in one cycle.
6. **Respond.** The response goes out once `LATENCY` cycles have passed since
   the command and the codes have been stored. If the phases take longer than
   `LATENCY`, the response waits for them. With the defaults they fit
   (1 + 128 + 2 + 32 < 230). The controller checks at elaboration that the
   phase parameters are consistent.

The input memory has one byte per word line (M bytes). These bytes are the DAC
registers. The output memory has one byte per bit line (N bytes). QUEUE and
DEQUEUE move 1 to 4 bytes starting at any index. Writes past the end are
dropped.

## Modules

| module           | role                                                              |
|------------------|-------------------------------------------------------------------|
| `alpine_pkg`     | opcodes, `cm_op_e`, `cm_instr_t`, `tile_cmd_t`, `cm_encode`, `sat8` |
| `cm_decoder`     | combinational decode of a 32-bit word into a CM operation          |
| `aimc_ctrl`      | per-core AIMC CTRL unit: issue handshake, tile command, writeback  |
| `aimc_tile_ctrl` | tile-local controller: command sequencing and cycle counting       |
| `aimc_in_mem`    | M-byte input memory / DAC registers                               |
| `aimc_out_mem`   | N-byte output memory / ADC registers                               |
| `dac_pwm`        | M pulse-width DACs                                                |
| `pcm_crossbar`   | behavioural M×N crossbar with bit-line integrators                |
| `adc_bank`       | behavioural N-column ADC bank (shift, saturate, latency)           |
| `aimc_tile`      | one tile: the six blocks above, wired together                    |
| `alpine_top`     | `NUM_CORES` slices of `aimc_ctrl` + `aimc_tile`                    |

Each file starts with a comment giving its interface, its timing, and which
parts follow the architecture and which are this design's own choices.

## Parameters (defaults of `alpine_top`)

| parameter      | default | meaning                                          |
|----------------|---------|--------------------------------------------------|
| `NUM_CORES`    | 8       | cores, each with one tile                        |
| `XLEN`         | 64      | register width of the core                       |
| `M`, `N`       | 2048    | crossbar rows (inputs) and columns (outputs)     |
| `LATENCY`      | 230     | CM_PROCESS cycles (100 ns at 2.3 GHz)            |
| `IO_CYCLES`    | 3       | CM_QUEUE / CM_DEQUEUE cycles (4 GB/s)            |
| `PROG_CYCLES`  | 2       | CM_INITIALIZE cycles (assumed)                   |
| `PULSE_WINDOW` | 128     | DAC window, cycles (covers \|x\| ≤ 128)          |
| `ADC_CYCLES`   | 32      | ADC conversion cycles (assumed)                  |
| `ADC_SHIFT`    | 7       | ADC gain as a right shift (assumed)              |

The 2048 × 2048 tile is the largest one the reference MLP study maps onto a
single core. Eight cores is the reference system configuration.

## Departures and assumptions

- The crossbar and ADCs are ideal. There is no PCM programming noise, drift,
  read noise or ADC non-linearity. Weights are exact signed 8-bit values.
  Their storage is not reset, just as a real array keeps its conductances.
- Weights are programmed one cell per CM_INITIALIZE. The architecture names
  the instruction but not its operands or granularity.
- The architecture models the tile only by its latency and throughput. The
  pulse window, ADC time and the charge-to-code scale are this design's own
  choices. They are chosen so that the fixed 100 ns latency holds.
- The AIMC CTRL unit handles one CM instruction at a time. There is no queue
  of outstanding tile operations. A core that issues a CM instruction while
  the tile is busy stalls.
- Non-CM instructions are ignored (`is_cm` low). They belong to the core's
  other pipelines.
- The core-side register file, the rest of the pipeline, the caches, the
  shared last-level cache and DRAM are outside this RTL.

## Which networks fit

With eight 2048 × 2048 tiles, each network maps as follows. "Rows" means the
layer's fan-in, and columns means its fan-out. Convolution kernels are
flattened as k·k·C_in rows.

| workload                                   | fits | why                                                   |
|--------------------------------------------|------|-------------------------------------------------------|
| MLP 1024-1024, one tile of 2k × 2k         | yes  | both layers side by side in 2048 × 2048              |
| MLP 1024-1024, one tile of 1k × 2k         | yes  |                                                       |
| MLP 1024-1024, 2 cores × 1k × 1k           | yes  |                                                       |
| MLP 1024-1024, 4 cores × 1k × 512          | yes  |                                                       |
| LSTM n_h = 256, all mappings               | yes  | largest tile 612 × 1074                               |
| LSTM n_h = 512, one or two cores           | no   | 2098 columns > 2048                                   |
| LSTM n_h = 512, split mappings             | yes  | 612 × 2048 or smaller                                 |
| LSTM n_h = 750, mappings on 1–3 cores      | no   | 3000–3050 columns                                     |
| LSTM n_h = 750, 5-core mapping             | yes  | 850 × 750 per core                                    |
| CNN-F convolution layers                   | no   | conv3–5 need 3·3·256 = 2304 rows                      |
| CNN-M / CNN-S convolution layers           | no   | up to 3·3·512 = 4608 rows                             |

A layer that does not fit would need several tiles per core, or the core would
have to split the MVM and add partial sums in software.

## Simulating

Every testbench is self-checking. It prints
`TB_RESULT checks=<n> failures=<n>` and stops itself with a watchdog. With
Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -j 4 \
    --top-module tb_alpine_top -y rtl -y tb +libext+.sv -Irtl -Itb \
    rtl/alpine_pkg.sv tb/tb_alpine_top.sv -o sim
obj_dir/sim +verilator+rand+reset+2
```

Replace `tb_alpine_top` with any testbench in `tb/`. Use
`+verilator+rand+reset+2` so that anything left unreset starts at random
values.

- `tb_alpine_top` runs a two-layer int8 MLP on two cores with 16 × 16 tiles,
  using only CM instructions. Layer 1 runs on core 0. ReLU is applied in the
  testbench, which stands in for the core. Layer 2 runs on core 1. The result
  is checked against a software reference. The testbench counts every
  mechanism: weight programming, queue, process, dequeue, partial-count
  transfers, ADC saturation, a stalled issue and a non-CM instruction.
- `tb_alpine_top_full` uses the default parameters: 8 cores and 2048 × 2048
  tiles. Core 0 programs four full columns, queues all 2048 inputs, runs one
  MVM and checks the outputs. The other cores run a small block. The
  simulation itself takes seconds. Compiling eight 2048 x 2048 crossbars
  with Verilator takes many minutes.
- `tb_workload_mlp`, `tb_workload_lstm` and `tb_workload_cnn` run the three
  network types on scaled-down tiles. Each uses only CM instructions, with
  the bench acting as the cores' software. The MLP bench runs all four tile
  mappings: block-diagonal on one tile (pipelined, so one MVM per inference),
  side by side on one tile (two MVMs per inference), two cores, and four
  cores. The LSTM bench computes all four gates with one MVM per time step,
  takes the bias from a constant-1 input row, and feeds h back as input. The
  CNN bench flattens kernels into columns and runs two pipelined convolution
  layers, one per core.
- The block testbenches (`tb_cm_decoder`, `tb_aimc_ctrl`, `tb_aimc_tile_ctrl`,
  `tb_aimc_in_mem`, `tb_aimc_out_mem`, `tb_dac_pwm`, `tb_pcm_crossbar`,
  `tb_adc_bank`, `tb_aimc_tile`) check cycle counts against the latencies
  above wherever the architecture gives one.

## Synthesis note

At the default size, one tile holds 4 M weight bytes and 2048 parallel
integrators, and the top holds eight tiles. The crossbar is a behavioural
model of an analog macro, not logic meant for gates. The digital blocks
synthesise, but generic logic synthesis at M = N = 2048 is very slow. To try
changes to the digital control, synthesise at small M and N.
