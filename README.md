# An ML accelerator inside a solid-state drive, for serverless functions

Serverless machine-learning functions spend much of their time fetching a model and its input
from remote storage before any compute happens. This design puts the compute in the storage
node instead. The SSD keeps its normal storage role, and it gains three things:

- a small inference accelerator (a 128 x 128 int8 systolic array and a 128-lane vector unit);
- a DMA engine that moves data between flash, the drive's DRAM and the accelerator without the host;
- a switch that sends host requests either to flash or to the accelerator.

One function invocation runs like this:

1. The host queues a peer-to-peer copy of the function's model and input from flash into the drive DRAM.
2. The host loads a short accelerator program and starts it.
3. The program streams tiles from DRAM into on-chip buffers, multiplies them on the array, and
   post-processes the results (activation functions, requantisation, type conversion,
   transpose) on the vector unit. It then writes the results back to DRAM.
4. The accelerator raises an interrupt.
5. The host queues the copy of the results from DRAM back to flash.

Ordinary reads and writes from the host continue throughout and go straight to flash.

The RTL describes the digital core of such a drive. The NAND flash and its SSD controller, the
DRAM and its memory controller, and the PCIe/NVMe host interface are bought-in parts. They appear
as ports on the top module, `dscs_drive`.

## Block map

```
host_* ──► host_switch ──┬──► flash_*  (SSD controller side)
                         │  ▲ flash port shared with DMA
                         │  │
                         ▼  │
                      dsa_top (accelerator) ◄── buffer port ── dma_engine ──► dram_*  (memory controller)
                        ├─ dsa_csr         host-visible registers, interrupt
                        ├─ dsa_controller  program memory, in-order issue to DMA / MPU / VPU
                        ├─ input_buffer    one bank per array row
                        ├─ mpu             ROWS x COLS PEs, each with its weight_buffer
                        ├─ output_buffer   one bank per column, accumulating adder
                        └─ vpu             COLS lanes of vector_engine (ALU, MAC, non-linear, fp32, typecast)
```

The DMA engine has three ports: flash (through the switch), DRAM, and the accelerator's buffer
port. It takes commands from two sources, the running program and the host's registers. When both
ask in the same cycle, the program's command wins.

All data ports, inside and out, use one protocol:

- A request is sent with `req_valid`, `req_we`, `req_addr` and `req_wdata`, and is accepted when `req_ready` is high.
- Read data returns on `rsp_valid`/`rsp_rdata` in request order, any number of cycles later.

A transfer unit is one bus beat of `BUS_W` bits (256 by default).

## Sizes

| Parameter | Default | Meaning | From |
|---|---|---|---|
| `ROWS` x `COLS` | 128 x 128 | PE array, 16,384 PEs | published configuration |
| `IB_DEPTH` | 8192 B/bank | input buffer, 128 banks = 1 MB | split of 4 MB chosen here |
| `WB_DEPTH` | 64 weights/PE | weight buffers, 1 MB | chosen here |
| `OB_DEPTH` | 2048 words/bank | output buffer, 1 MB of 32-bit sums | chosen here |
| `VM_DEPTH` | 2048 words/lane | vector-unit lane banks, 1 MB | chosen here |
| `BUS_W` | 256 | one 32-byte beat per cycle, roughly a DDR5 channel at 1 GHz | chosen here |
| `IMEM_DEPTH` | 256 | 128-bit instructions | chosen here |

The published design gives a 128 x 128 array with 4 MB of on-chip storage and a 1 GHz clock. It
does not say how the 4 MB is split; the four equal parts above are this design's choice. The
shared defaults are in `rtl/dscs_pkg.sv` (`DEF_*`).

## The matrix unit: how the array is fed

The `mpu` is weight-stationary. Each PE holds up to `WB_DEPTH` int8 weights in its own small
buffer (a slot per tile), so a new weight tile can be loaded into a free slot while the array
computes with another. A GEMM tile multiplies `nvec` input vectors of `ROWS` int8 values by the
`ROWS x COLS` weights in one slot:

    y[t][c] = sum over r of x[t][r] * W[r][c]        (32-bit signed, wrap-around)

Activations enter on the left, one row per input-buffer bank, and move one PE to the right per
cycle. Partial sums move one PE down per cycle, and column `c` delivers `y[t][c]` into
output-buffer bank `c`.

A systolic array needs its inputs skewed: row `r` must see vector `t` one cycle later than row
`r-1`. A common way is a triangle of delay registers. Here each input-buffer bank has its own read
address instead, and row `r` simply reads vector `t` at cycle `t + r`. Valid bits travel with the
activations and the sums, so the output buffer knows which column outputs are real. A tile takes
`nvec + ROWS + COLS + 2` cycles from start until `busy` falls. Tiles do not overlap in the array.

Reductions longer than `ROWS` are split into several tiles whose sums must be added. The output
buffer does this. A tile started with the accumulate flag adds each arriving result to the word
already at that address (read-modify-write in the same cycle); otherwise the result overwrites
it. Results of column `c` land at `base, base+1, ...` in arrival order.

### Buffer layouts as seen by the DMA engine

The accelerator's buffers are reached through beat addresses whose top four bits select the space
(`dscs_pkg::space_e`):

| Space | `addr[31:28]` | Beat layout (`BB = BUS_W/8`, `LPB = BUS_W/32`) |
|---|---|---|
| flash | 0 | beat index |
| DRAM | 1 | beat index |
| input buffer (write) | 2 | `bank * (IB_DEPTH/BB) + line`; byte `b` of line `l` is activation `l*BB + b` of that row |
| weight buffers (write) | 3 | `(slot * ROWS + row) * NGRP + group`; byte `k` is the weight of column `group*BB + k` |
| output buffer (read) | 4 | `word * (COLS/LPB) + lane group`; 32-bit lane `j` of the beat is bank `group*LPB + j` |
| vector lane banks (r/w) | 5 | same as the output buffer |

The vector unit has priority over the DMA engine when reading the output buffer. A DMA read of it waits while the
vector unit is reading it, and DMA access to the lane banks waits while the vector unit is busy.
Both waits appear as `req_ready` low on the buffer port.

## The vector unit

The `vpu` has one lane (`vector_engine`) per array column. Lane `j` reads output-buffer bank `j`
directly, so results never need to go to DRAM between the matrix and vector stages. Each lane owns
a bank of 32-bit words. A vector instruction applies one operation to `len` elements in every
lane. For element `i`:

- operand `a` comes from the output buffer or the lane bank, at `a_base + i` or `a_base` (flags `A_OBUF`, `A_STRIDE`);
- operand `b` comes from the lane bank, at `b_base (+ i)`;
- the result goes to `d_base (+ i)`.

The pipeline has three stages: read, compute (the lane's output register), write. It handles one
element per lane per cycle, and `busy` lasts `len + 2` cycles.

The lane units:

| Unit | Operations | Number format |
|---|---|---|
| ALU (`ve_alu`) | add, sub, mul, max, min, shift right/left, add-immediate, move | int32 |
| MAC (`ve_mac`) | `acc = acc + a*b`, cleared at the first element of an instruction; for dot products along a lane | int32 |
| non-linear (`ve_nonlinear`) | ReLU, leaky ReLU (slope `2^-imm`), sigmoid, tanh, GeLU | Q.8 fixed point (8 fraction bits) |
| FPU (`ve_fpu`) | add, multiply | IEEE binary32, truncation, subnormals flushed to zero, no NaN handling |
| typecast (`ve_typecast`) | int32↔fp32, fp32↔fp16, int32→int8 requantise (shift by `imm`, saturate) | |

The non-linear functions are piecewise-linear approximations. This design chose them; the
published design does not give the method:

- sigmoid ≈ clamp(x/4 + 1/2, 0, 1);
- tanh ≈ clamp(x, -1, 1);
- GeLU ≈ x · sigmoid(1.703 x), using the sigmoid approximation above.

**Transpose.** Lanes cannot read each other's banks, so a transpose is done by a rotation network
plus diagonal addressing. For `V_TRN`, at element `i`:

1. Lane `j` reads `a_base + ((j - i) mod COLS)`.
2. The value read by lane `(j + i) mod COLS` is rotated into lane `j`.
3. Lane `j` writes it at `d_base + ((j + i) mod COLS)`.

Over `COLS` elements this transposes a `COLS x COLS` block stored one column per lane.

## Program, controller and registers

A program is a list of 128-bit instructions (`dscs_pkg::instr_t`, most significant field first):

| Field | `op` | `sub` | `a` | `b` | `c` | `d` | `imm` | `flags` |
|---|---|---|---|---|---|---|---|---|
| Bits | 4 | 6 | 32 | 32 | 16 | 16 | 16 | 6 |
| `OP_DMA` | | | source beat address | destination beat address | length in beats | | | |
| `OP_GEMM` | | | input-buffer byte offset | output-buffer word | `nvec` | weight slot | | bit 0 accumulate |
| `OP_VEC` | | vector op (`vop_e`) | `a_base` | `b_base` | `len` | `d_base` | immediate | `A_OBUF`, `A_STRIDE`, `B_STRIDE`, `D_STRIDE` |
| `OP_WAIT` | | | | | | | | bit 0 DMA, bit 1 MPU, bit 2 VPU idle |
| `OP_END` | | | | | | | | |

The controller issues the instructions in order:

- A DMA, GEMM or VEC instruction issues as soon as its unit is idle. Issue does not wait for the
  other units, so a DMA placed after a GEMM runs during that GEMM. This is how the next tile's
  transfer overlaps the current tile's compute.
- A VEC instruction also waits for the MPU, because it normally consumes the output buffer.
- All other ordering is the program's job, written with `OP_WAIT`.
- `OP_END` waits until all three units are idle, then pulses `done` and stops the cycle counter.

The published design compiles models to an accelerator ISA but does not describe it. The format
above and these issue rules are this design's own.

Host registers are reached with host addresses whose bit 31 is set. Bit 12 selects program memory:
a write to `0x8000_1000 + i` stores instruction `i` from `wdata[127:0]`, so `BUS_W` must be at least
128. The other registers (`rtl/dscs_pkg.sv`, `CSR_*`):

| Offset | Name | Access |
|---|---|---|
| 0 | CTRL | W: bit 0 start at PC (ignored while busy), bit 1 clear the interrupt |
| 1 | STATUS | R: bit 0 busy, bit 1 done, bit 2 interrupt, bit 3 host DMA pending or DMA engine busy |
| 2 | PC | RW: first instruction |
| 3, 4 | DMA_SRC, DMA_DST | RW: beat addresses for a host-queued transfer |
| 5 | DMA_LEN | W: writing the length queues the transfer; it waits until the engine accepts it |
| 6 | CYCLES | R: cycles of the last program run |

`irq` rises when the program ends and stays high until the host clears it. Register reads answer
one cycle after the request.

## DMA engine and host switch

`dma_engine` issues reads on the source port while fewer than `FIFO_DEPTH` (8) beats are in
flight or buffered. It writes the returning data in order to the destination port, so a transfer
streams at one beat per cycle when neither side stalls. An assertion checks that the FIFO never
overflows. `done` pulses after the last write.

`host_switch` sends host requests with address bit 31 set to the accelerator registers, and all
others to flash. This is the storage path with the accelerator bypassed. The flash port is shared
with the DMA engine's peer-to-peer traffic:

- On a conflict, the two requesters alternate.
- A FIFO of requester tags returns every flash read response to whoever asked.
- The host may have one read outstanding at a time.
- `flash_conflicts` counts contended cycles.

## Where this departs from, or goes beyond, the published design

- **Added by this design:** the ISA, the register map, the address map, the buffer depths, the
  bus width, the skew scheme, the transpose method, the numeric formats and the non-linear
  approximations. The published design names these units, or says what they do, without giving
  these details.
- **Activation movement:** the published text says activations are shared by the PEs of a row,
  which could mean a broadcast. Its array diagram labels the movement as activation forwarding
  from PE to PE. This design forwards (one PE per cycle). The results are the same either way;
  only the timing of the sums differs.
- **Missing from the vector unit:** there is no cross-lane reduction network. Reductions across
  lanes (the mean or variance of a layer normalisation over a feature spread across lanes) need a
  transpose followed by a per-lane MAC. Pooling windows must be laid out along a lane, where max
  and add work directly.
- **Flash and DRAM are ports, not models.** The flash array, SSD controller (PHY, ECC, flash
  controller), DRAM with its memory controller, and PCIe/NVMe interface are not implemented. The
  testbenches use a behavioural memory (`tb/mem_model.sv`) with configurable latency and random
  back-pressure.
- **DRAM type.** The block diagram of the drive labels its DRAM DDR4, while the configuration
  text pairs the 4 MB accelerator with DDR5. The DRAM is outside the RTL; the 256-bit beat was
  sized for the DDR5 figure.
- **Host work.** The host driver's role (queuing peer-to-peer copies, loading programs, handling
  the interrupt) is carried out by testbench code through the registers.

## How far it has been checked

Every block has a self-checking testbench in `tb/`. Each ends by printing
`TB_RESULT checks=N failures=M`. The tests compare against independently computed values and
use random data, random back-pressure and random operands.

| Testbench | Size simulated | What it checks |
|---|---|---|
| `tb_pe`, `tb_weight_buffer` | full | arithmetic, forwarding, slot read/write |
| `tb_mpu` | 8 x 8 array, 64-bit bus | multi-tile GEMMs against a reference; latency `nvec+ROWS+COLS+2` |
| `tb_input_buffer`, `tb_output_buffer` | reduced | layouts, accumulate/overwrite, VPU/DMA read priority |
| `tb_vector_engine` | full lane | every operation against a reference model, including fp32 and fp16 |
| `tb_vpu` | 8 lanes | strided/broadcast addressing, output-buffer reads, DMA access, transpose |
| `tb_dma_engine` | reduced | all port pairs under random stalls; streaming rate of one beat per cycle |
| `tb_dsa_controller`, `tb_dsa_csr`, `tb_host_switch` | full (switch: 64-bit bus) | issue order, overlap, wait rules, registers, routing and arbitration |
| `tb_dscs_drive` | 8 x 8 array, 128-bit bus | one complete function, end to end (below) |

`tb_dscs_drive` runs one whole function:

- a peer-to-peer copy from flash to DRAM, with the host reading and writing other flash blocks at the same time;
- loading and starting a program;
- two GEMM tiles whose sums accumulate (a 16-long reduction on an 8-row array);
- a weight load into a spare slot during compute;
- ReLU from the output buffer;
- copies of the raw and activated results to DRAM;
- the interrupt, then the write-back to flash;
- reading the results back through the host path and comparing them with a reference.

It counts and requires each mechanism:

- DMA/MPU overlap cycles;
- output-buffer accumulations;
- DMA stalls while the VPU holds the output buffer;
- flash-port contention;
- DRAM back-pressure;
- host bypass accesses;
- the interrupt.

The largest simulated configuration is that 8 x 8 end-to-end run. At the defaults
(128 x 128, 4 MB) the design passes Verilator lint and the slang front end, but no
full-size simulation is provided. Because the RTL is fully parameterised, the reduced runs
exercise the same code paths. A full-size simulation was tried: its Verilator C++ build alone takes more than ten minutes, so none is included.

## Simulating

Any testbench builds with Verilator 5. The package must come first:

```
verilator --binary --timing --assert -Wno-fatal rtl/dscs_pkg.sv tb/mem_model.sv rtl/*.sv \
          tb/tb_dscs_drive.sv --top-module tb_dscs_drive -Mdir obj -o sim
obj/sim +verilator+rand+reset+2
```

The glob repeats the package file, which Verilator 5 accepts. The testbenches initialise everything they read, and they are written to
pass with random initial register values (`+verilator+rand+reset+2`). To change the size, override
the parameters of `dscs_drive` (or of `dsa_top` and the blocks below it). The constraints are:

- `ROWS`, `COLS`, the depths and `BUS_W` must be powers of two;
- `BUS_W` must be at least 128 for program loading.
