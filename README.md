# DARKSIDE cluster RTL

DARKSIDE is a heterogeneous compute cluster for on-chip DNN inference and training at the extreme edge. Eight small RISC-V cores handle the flexible parts of a network. Three accelerators take the kernels that dominate run time:

- a **Tensor Product Engine (TPE)** for FP16 matrix multiplication, used in training;
- a **Depth-Wise Engine (DWE)** for 8-bit 3x3 depthwise convolution, the bottleneck of MobileNet-style inference;
- a **DataMover** that transposes tensors of 1 to 32-bit elements, e.g. HWC into CHW.

None of the accelerators has a large private buffer. They all work directly out of the cluster's shared 128 kB, 32-bank L1 scratchpad (the TCDM). A three-level **Heterogeneous Cluster Interconnect (HCI)** lets the 32-bit core ports and one 288-bit accelerator port share those banks without starving each other.

This repository holds synthesizable SystemVerilog for the cluster's data side:

- the TCDM banks and the three HCI levels;
- the three accelerators;
- the cores' mixed-precision and Mac&Load extension units;
- the control registers;
- one top module, `darkside_cluster`, that wires them together.

The base RI5CY core pipelines are not included, and neither are the cluster DMA, instruction cache, event unit and AXI side. Their memory and control signals are ports of the top module.

## Memory system: TCDM and the HCI

### Banks and addressing
The TCDM has 32 banks of 1024 x 32 bits (`tcdm_bank`). Each bank is a single-port synchronous array with byte enables. Read data appears one cycle after the access. The banks are word-interleaved: for byte address `a`, the bank is `a[6:2]` and the row is `a[16:7]`. Consecutive words therefore sit in consecutive banks.

Every memory port in the design uses the same handshake:

- The initiator raises `req` together with `we`, `addr`, `be` and `wdata`, and holds them until `gnt`.
- `gnt` is combinational, in the same cycle.
- One cycle after the grant, `r_valid` is high. For reads, `r_data` holds the word.
- Writes also get an `r_valid`. This lets an initiator count outstanding accesses uniformly.

### Level 1: static multiplexer (`hci_static_mux`)
The TPE and the DWE share one 288-bit port. The HWPE_SEL register decides which of them owns it. Software changes the selection between jobs, so the multiplexer needs no arbitration. It gates the unselected engine's grant and response valid.

### Level 2a: logarithmic branch (`hci_log_branch`)
Ten 32-bit initiators are routed all-to-all to the 32 banks:

- ports 0–7: the eight cores;
- port 8: the DataMover;
- port 9: the cluster DMA.

Each bank has its own round-robin arbiter. The arbiter's pointer moves just past the last winner, so a port that keeps asking waits at most nine grants. A port is granted only if it wins its bank and level 3 also lets the logarithmic side into that bank. The response multiplexer remembers which bank each granted port used.

Note that the published text speaks of 9 initiator ports on this branch, while its block diagram numbers them 0 to 9. Eight cores, the DMA and the DataMover need ten, so ten were built (`N_PORTS` is a parameter).

### Level 2b: shallow branch (`hci_shallow_branch`)
The 288-bit accelerator access is split into nine 32-bit accesses to nine *adjacent* banks. No arbitration is needed. The word address is split into two parts:

- the **index** (bank of the first word);
- the **offset** (its row).

Word *i* goes to bank `(index + i) mod 32`. If that sum passes bank 31, the access has rolled over the bank set, and the row is `offset + 1`. The nine accesses are granted together. The 288-bit read data is gathered with the index registered at grant time. Byte enables are per byte (36 bits), so the engines can write partial words, e.g. the 128-bit DWE output or the 256-bit TPE rows.

### Level 3: bank multiplexers and fairness (`hci_bank_mux`)
This is the part that makes sharing safe. For each bank, both branches may ask in the same cycle (a **collision**). A memory-mapped bit, `HCI_PRIO`, names the branch that wins collisions. A second register, `HCI_MAXSTALL` (reset 10), bounds how long the other branch can be starved:

- A counter counts consecutive collision cycles.
- When it reaches `HCI_MAXSTALL`, the losing branch wins **one** access and the counter restarts.
- With the default of 10, the low-priority branch gets 1 of every 11 contended cycles (9.1%).

The shallow branch is handled as a unit. It is granted only if none of its nine banks is given to the logarithmic side. When it loses, it loses all nine banks and stalls **collectively**. Banks where only one branch asks are simply given to that branch. The counter is shared by the whole bank array, because the shallow side is all-or-nothing; this is a design choice.

## Tensor Product Engine (`tpe`, `fma_fp16`)

### FMA array
The TPE computes `Z = X * W` in FP16 on 8 rows x 4 columns of fused multiply-add units.

`fma_fp16` is an IEEE binary16 FMA that computes `a*b + c` with a single rounding (round-to-nearest-even). It works through an exact 84-bit fixed-point sum. Infinities and NaNs follow IEEE 754; subnormals are flushed to zero. Its latency is 4 register stages (three internal plus the output register), all advancing on one enable.

### Row pipeline
The key to the TPE is the row pipeline:

- **Cascade.** Each FMA adds its product to the partial sum coming from its left neighbour.
- **Feedback.** The right-most FMA feeds back into the left-most one. A row therefore holds 4 FMAs x 4 stages = **16 partial sums in flight**. Each sum visits the four columns once per 16-cycle loop.
- **Loop contents.** In loop `kb`:
  - FMA (r, c) holds `X[r][4kb+c]` steady for all 16 cycles (X is stationary);
  - column c streams `W[4kb+c][0..15]`, one element per cycle, broadcast down the column.
- **Column delay.** Column c's stream is delayed by 4c cycles. The delay matches the time the partial sum needs to travel from column 0 to column c, so each product meets the right partial sum.
- **Tile.** An output tile is 8 rows x 16 columns of Z and takes `ceil(K/4)` loops. In the first loop the accumulate/0 multiplexer feeds zero instead of the feedback. After the last loop, the right-most outputs are captured into the output buffer. No intermediate result ever goes to memory.

### Streamer
The streamer keeps the array busy from the 288-bit port:

- **Operand loads.** Per loop it needs 8 X quadruples (64 bits each) and 4 W rows of 16 elements (256 bits each): 12 wide loads in 16 cycles. The operands are double-buffered one loop ahead.
- **Output stores.** The output tile is written as 8 row stores with byte enables, overlapped with the next tile's computation.
- **Stall behaviour.** When operands are late or the output buffer is still busy, the **whole datapath freezes**. Every pipeline register, delay line and tag shares one enable, so results stay aligned through any number of stall cycles. `stall_o` reports frozen cycles.

Partial tiles are padded with zeros, and padding adds nothing to the result.

### Throughput and registers
Measured throughput on an uncontended port:

| Job (M x N x K) | Cycles | MAC/cycle |
|---|---|---|
| 8x16x64 | 296 | 27.7 |
| 16x32x32 | 567 | 28.9 |

The peak is 32 MAC/cycle. The gap is fill and drain of the pipeline between jobs.

Job registers (byte offsets `0x008 + 4*i`):

| i | Register | Meaning |
|---|---|---|
| 0 | X | byte address of X |
| 1 | W | byte address of W |
| 2 | Z | byte address of Z |
| 3 | M | rows of X and Z |
| 4 | N | columns of W and Z |
| 5 | K | columns of X, rows of W |

Matrices are row-major FP16. N and K must be even.

## Depth-Wise Engine (`dwe`)
The DWE computes a 3x3 depthwise convolution of 8-bit signed HWC tensors, 16 channels at a time, with stride 1 and no padding. The output is `(H-2) x (W-2) x C`.

**Weights.** The 16 filters of a channel group are loaded first into the weights buffer (weight stationary). The layout is `group*144 + channel*9 + ky*3 + kx`.

**Window.** The window buffer holds 4 rows x 3 pixels x 16 channels:

- Three rows feed the 36 MAC units: 9 taps x 4 channels per cycle.
- In a 4-cycle loop they produce one output pixel for all 16 channels, into 16 32-bit accumulators.
- While that happens, the streamer loads the fourth row (3 pixel loads) and stores the previous output pixel (one 128-bit store). That is four port accesses per four cycles, so the datapath stays busy.
- The window then slides down one row.

**Output.** At the end of the loop, each accumulator goes through:

1. an optional ReLU;
2. an arithmetic right shift;
3. clipping to int8.

**Throughput.** The engine scans one output column at a time. At the top of each column the window is refilled from scratch (9 loads), which costs time. An 18x5x32 input (16x3x32 output, 13824 MACs) takes 501 cycles, **27.6 MAC/cycle**, against about 30 for a design that keeps the window streaming across columns. This is the one place where the RTL is known to be slower than the reference design.

Job registers: 0 IN, 1 WEIGHTS, 2 OUT, 3 H, 4 W, 5 C (multiple of 16), 6 shift, 7 ReLU enable.

## DataMover (`datamover`)
The DataMover transposes a stack of `DEPTH` matrices of `ROWS x COLS` elements of `d` bits (d = 1, 2, 4, 8, 16, 32). It runs on one 32-bit logarithmic port.

It works in blocks of E x E elements, with E = 32/d:

1. Read E words from E consecutive rows.
2. The splitter cuts each word into E chunks of d bits. Chunk j of word i goes to row j, column i of the 32 x 32-bit **shuffle buffer** (only E rows are used).
3. Write the E buffer rows out as the transposed words.

Chunk 0 is the most significant. With d = 8, the words `DEADBEEF 01020304 ABBAABBA 0BADF00D` become `DE01AB0B AD02BAAD BE03ABF0 EF04BA0D`. Every word is read once and written once.

Constraints: ROWS and COLS must be multiples of E, and addresses must be word aligned.

Job registers: 0 SRC, 1 DST, 2 ROWS, 3 COLS, 4 log2(d), 5 DEPTH.

## Core extensions: mixed precision and Mac&Load (`rvnn_ml_unit`, `rvnn_dotp_unit`)
Each core gets an extension unit beside its execute stage.

### Precision CSR
A CSR holds the operand formats:

- bits [1:0]: activation precision, Pa;
- bits [3:2]: weight precision, Pw;
- bits 4 and 5: signedness of each operand.

Format codes: 0 = 16-bit, 1 = 8-bit, 2 = 4-bit, 3 = 2-bit.

### Dot-product unit
The dot-product unit has four multiplier sets: 16x2b, 8x4b, 4x8b and 2x16b. When weights are narrower than activations, one weight register holds Pa/Pw times more elements than one activation register. The **slicer and router** then:

1. takes slice *s* of RS2: N = 32/Pa elements starting at bit `s*N*Pw`;
2. sign- or zero-extends each element to Pa bits;
3. sends the result with RS1 to the multiplier set for Pa.

The sum is added to the accumulator.

### Mixed-Precision Controller (MPC)
The MPC is a slice counter. It advances on every issued dot product, wraps at Pa/Pw and is cleared by a CSR write. Consecutive instructions therefore walk through the slices of the same weight register without unpacking.

### NN-RF and Mac&Load
The NN-RF is 6 x 32-bit registers: registers 0–3 hold weights and registers 4–5 hold activations. A Mac&Load instruction:

- takes both operands from the NN-RF;
- in the same cycle, lets the load-store unit write a freshly loaded word into one NN-RF register.

The register is written at the clock edge, so the instruction always uses the previous contents. The result is registered and appears one cycle after `valid`.

## Control (`cluster_ctrl`) and the top (`darkside_cluster`)
Control accesses carry a 16-bit address; bits [15:12] select the target:

| Address | Target |
|---|---|
| `0x0xxx` | the HWPE slot: TPE or DWE, following HWPE_SEL |
| `0x1xxx` | the DataMover |
| `0x2xxx` | the cluster registers below |

Cluster registers:

| Offset | Register | Meaning | Reset |
|---|---|---|---|
| `0x0` | HCI_PRIO | 1 = shallow branch wins collisions | 1 |
| `0x4` | HCI_MAXSTALL | maximum stalls for the low-priority branch | 10 |
| `0x8` | HWPE_SEL | 0 = TPE, 1 = DWE | 0 |
| `0xC` | CLK_EN | one enable per engine (TPE, DWE, DataMover) | all on |

CLK_EN stands in for the engines' clock gates: a disabled engine freezes completely.

Every engine has the same control front end (`hwpe_ctrl_regs`):

- TRIGGER at `0x000` starts a job.
- STATUS at `0x004` reads busy.
- The job registers start at `0x008`.
- At the end of a job the engine pulses its `evt_o` bit.

## Simulating
Each block has a self-checking testbench `tb/tb_<block>.sv`. Each prints `TB_RESULT checks=N failures=M` and carries its own watchdog. The FP16 testbenches share the reference package `tb/tb_fp16_pkg.sv`. For example:

    verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
        rtl/darkside_pkg.sv tb/tb_fp16_pkg.sv tb/tb_darkside_cluster.sv \
        --top-module tb_darkside_cluster -o sim && obj_dir/sim

### End-to-end test
`tb_darkside_cluster` runs the whole cluster at its default size. The testbench plays the roles of the DMA (loading and reading back the TCDM) and the cores (random load/store traffic on the eight ports, plus instruction issue into the extension units). It runs four jobs in turn:

1. **TPE.** An 8x16x32 FP16 matrix product under core traffic. The TPE is disabled through CLK_EN for 30 cycles in the middle of the job.
2. **DWE.** A 6x6x16 depthwise convolution with the logarithmic branch given priority and a maximum stall of 3.
3. **DataMover.** A 16x8 8-bit transposition.
4. **Mac&Load.** On all eight cores, with 8-bit activations and 4-bit weights.

Every result is compared with a reference computed in the testbench. The testbench also counts each mechanism and fails if one never occurred:

- collisions won by each branch;
- core stalls;
- TPE freezes;
- gated cycles;
- HWPE_SEL switches;
- MPC slice steps.

### Block tests
The block testbenches go further on their own units:

- 3000 random FMAs against a real-number reference;
- TPE jobs with random grant stalls, and a throughput bound;
- all DataMover widths d = 1..32;
- round-robin fairness bounds;
- the 1-in-11 rule of the level-3 multiplexer.

## Departures and limits
- **Log-branch ports.** The logarithmic branch has 10 ports rather than the 9 in the text, as explained above.
- **DWE throughput.** It reaches 27.6 rather than about 30 MAC/cycle (column-wise refill of the window).
- **TPE throughput.** It measures 28–29 MAC/cycle on whole jobs.
- **Subnormals.** FP16 subnormals are flushed to zero.
- **Not included.** Instruction decoding of the new core instructions, the base core pipelines, DMA, instruction cache, event unit, AXI/CDC and the Fabric controller domain. The extension units take their operands from ports.
- **Design choices.** Register maps, memory layouts and reset values are choices of this implementation.
