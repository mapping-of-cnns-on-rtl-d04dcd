# Multi-core RRAM compute-in-memory accelerator with sequence-number synchronisation

A convolution layer of a modern CNN rarely fits into one RRAM crossbar. A
1x1 layer with 512 input channels and 512 kernels is a 512x512 weight matrix.
A 128x128 crossbar holds only a sixteenth of it. The layer therefore has to be
cut into tiles and spread over several compute-in-memory (CIM) cores. Each
core keeps its tile of weights stationary in its crossbar.

Cores that hold different *input-channel* slices of the same kernels produce
partial sums for the same outputs. Those partial sums must be added up:

- exactly once per core and output vector;
- only after the bias has been added;
- with the activation applied by the last contributor.

This design does that accumulation directly in the output feature map (OFM)
area of a shared memory. The cores take turns on each output vector, and the
order is enforced by very little hardware:

- one 32-bit **sequence-number register (SEQ_NR)** per core, which other
  cores can increment over the bus;
- two instructions: **CALL** ("I am done with a vector; increment my
  successor's SEQ_NR") and **WAIT** ("stall until my SEQ_NR has reached n").

With these, a compiler can choose how the cores share the outputs. They can
take turns layer-wide (*sequential*), work as a pipeline over the output
vectors (*linear*), or rotate through them (*cyclic*). No central scoreboard
and no per-word attribute memory are needed.

The RTL here is a complete, simulatable system:

- 16 CIM cores with 128x128 crossbars;
- a 16-byte multi-initiator/multi-target interconnect;
- a shared memory;
- a port for the host CPU.

The testbenches act as the CPU and the layer compiler. They run MobileNet-style
1x1 layers under all three synchronisation schemes and check every output
value.

## 1. System

```
        CPU (outside; its bus port is a port of cim_top)          irq
          |                                                       ^
  +-------+------------------------------------------------------+---+
  |   bus_interconnect  (NUM_CORES+1 initiators, NUM_CORES+1 targets) |
  +---+-----------+-----------+-----------------+---------------------+
      |           |           |                 |
  shared_memory  core 0     core 1     ...    core 15      (cim_core)
  (IFM, bias/OFM,  each core is both a target (config, SEQ_NR,
   code sections)  instruction memory, crossbar cells) and an
                   initiator (LOAD, STORE, CALL, instruction fetch)
```

Operation has two phases.

**Setup.** The CPU does the following:

1. writes the input feature map (IFM) into shared memory;
2. writes the bias values into the OFM area (the OFM starts out as the bias);
3. writes one instruction section per core;
4. programs each core's crossbar cells;
5. sets each core's configuration registers: the instruction section address
   and length, and the bus address of its successor's SEQ_NR increment port;
6. clears SEQ_NR;
7. writes CTRL.start.

**Inference.** The cores run on their own. `irq` rises when at least one core
has finished (executed HALT or reached the end of its section) and none is
busy. The CPU then reads the OFM.

### Address map

All addresses are 32-bit byte addresses.

| address | target |
|---|---|
| `addr[31] = 0` | shared memory (4 MiB by default) |
| `addr[31] = 1`, `addr[27:20] = c`, `addr[19:16] = 0` | core *c* configuration: word *i* at `4*i` (20 registers), SEQ_NR at `0x100`, SEQ_NR increment port at `0x104` |
| `... addr[19:16] = 1` | core *c* instruction memory (write) |
| `... addr[19:16] = 2` | core *c* crossbar cells; byte `row*N + col` is weight `w[row][col]` (write) |

Configuration registers:

| register | meaning |
|---|---|
| 0 CTRL | writing bit 0 = 1 starts the core |
| 1 STATUS | read-only `{done, busy}` |
| 2 SUCC_ADDR | address the CALL writes to (the successor's `0x104`) |
| 3 INSTR_BASE | address of this core's instruction section in shared memory |
| 4 INSTR_LEN | section length in instructions; 0 runs the program already written into the instruction memory |
| 5 HG_ID, 6 VG_ID | the core's horizontal and vertical group (software use) |
| 7 to 19 | general purpose |

Any write to `0x104` increments SEQ_NR by one. This makes a CALL a single posted
4-byte write, with no read-modify-write over the bus. A write to `0x100` sets
SEQ_NR, so the CPU can clear it before a run. SEQ_NR is 0 after reset.

## 2. The CIM core (`cim_core`)

```
 bus target ──> core_config ──┬─> 20 config regs, SEQ_NR ──> core_controller
                              ├─> instr_mem (4 KB, 512 x 64-bit instructions)
                              └─> crossbar cell programming
 bus initiator <── core_controller ──> data_buffer (8*M bytes) <──> gpeu
                                   └─> mvmu: input regs (N bytes) -> DAC ->
                                       crossbar M x N -> ADC, shift-and-add ->
                                       output regs (4*M bytes)
```

**`mvmu` / `rram_crossbar`.** The matrix-vector unit.

- The N input registers hold signed 8-bit activations.
- The crossbar holds M x N signed 8-bit weights.
- The M output registers hold signed 32-bit dot products.

`rram_crossbar` is a behavioural model of the analog part: it returns the
exact integer product `LAT` cycles after `start`. It does not model
conductance quantisation, DAC/ADC resolution or device noise. Anyone who needs
those has to replace this one module; its ports are those of the real macro
(a programming port, an input vector, an output vector and a valid flag).

**`data_buffer`.** 8*M bytes of working storage:

- a bus-beat port, used by LOAD and STORE;
- a 32-bit word port with two reads and one write per cycle, used by MVM,
  MOV and the GPEU.

**`gpeu`.** Combinational 32-bit signed unit:

- ADD, SUB, MUL (low 32 bits);
- DIV (rounds toward zero; divide by zero saturates);
- MIN, MAX;
- SHIFT (arithmetic right by `imm[4:0]`, left when `imm[9]` is set);
- ReLU;
- LeakyReLU (negative inputs are multiplied by 2^-`imm[4:0]`).

The controller streams a vector through it, one word per cycle.

**`core_controller`.** A multi-cycle FSM. It spends one decode cycle per
instruction, then one cycle per bus beat, per moved word or per WAIT cycle.

**Instruction paging.** When `INSTR_LEN` is non-zero, the controller fetches
its program from shared memory in 4 KB pages. It loads the first page at
start and the next one each time the program counter crosses a page boundary.
Running past `INSTR_LEN` ends the program. This is how a core runs a program
longer than its instruction memory. A core handling all 3136 output vectors
of a 56x56 layer runs about 25 000 instructions, i.e. 49 pages.

**`core_config`.** The target side of the core. It holds the register file
and routes setup writes to the instruction memory and the crossbar. Every
write completes in one cycle.

### Instruction set

Each instruction is one 64-bit word: `op[63:58] a[57:46] b[45:34] c[33:0]`.

| op | operands | effect |
|---|---|---|
| LOAD | a = buffer offset, b = bytes, c = address | bus burst read into the data buffer |
| STORE | a = buffer offset, b = bytes, c = address | bus burst write from the data buffer |
| MVM | a = buffer offset | copy N bytes into the input registers, run the crossbar, wait for the result |
| MOV | a = buffer offset, b = words | copy output registers into the data buffer |
| CALL | – | write to SUCC_ADDR, i.e. increment the successor's SEQ_NR |
| WAIT | c = n | stall until SEQ_NR >= n |
| ADD … LRELU | a = dst, b = srcA, c = {srcB, words, imm} | element-wise over `words` 32-bit words |
| NOP, HALT | – | HALT ends the program and sets `done` |

LOAD and STORE addresses and buffer offsets must be multiples of the bus width.
A final partial beat is written with byte strobes. `cim_pkg` has functions
(`mk_load`, `mk_alu`, `mk_wait`, …) that build these words.

## 3. Mapping a layer onto cores

A 1x1 convolution (after im2col, any convolution) multiplies the kernel
matrix, K_NUM rows by K_X·K_Y·K_Z columns, with O = O_X·O_Y input vectors.
With M x N crossbars the matrix is cut into tiles:

- P_V = ceil(K_X·K_Y·K_Z / N) column slices, the *vertical groups*;
- P_H = ceil(K_NUM / M) row slices, the *horizontal groups*;
- one core per tile: C(hg, vg), P_V·P_H cores in total.

Cores with the same `hg` write to the same OFM locations. Each of them must
add its partial sum into every one of the O output vectors exactly once. For
each output vector it owns, a core runs:

```
LOAD  ifm[v][vg*N .. +N]      -> buffer
MVM                            (N bytes in, M sums out)
MOV   M words                 -> buffer[0..]
WAIT  n                        (not for the first owner of v)
LOAD  ofm[v][hg*M .. +M]      -> buffer[4M..]   (bias, or partial sum so far)
ADD   buffer[4M..] += buffer[0..]
RELU  buffer[4M..]             (only the last owner of v)
STORE buffer[4M..]            -> ofm[v][hg*M .. +M]
CALL                           (not for the last owner of v)
```

The OFM area starts out holding the bias. The first owner therefore adds the
bias through the same LOAD/ADD, and no special case is needed. The
time-critical part is only LOAD-partial … STORE. That is the only part a
WAIT has to guard, so the MVM of the next vector can overlap another core's
update.

## 4. Synchronisation with SEQ_NR

An output vector is a resource that exactly one core may hold between its
LOAD of the partial sums and its STORE. The *successor* relation says which
core gets each vector next. A core WAITs until its predecessor has released
the vector, then CALLs its successor once it has released the vector itself.
SEQ_NR simply counts the releases received so far. A WAIT therefore names a
running count, not a vector, and a core's n-th WAIT uses threshold n.

Counting works because a predecessor releases vectors in exactly the order
the successor consumes them. Every scheme below keeps that property.

**Sequential.** Core vg handles all O vectors, then makes one CALL to core
vg+1, which WAITs for 1 before it starts. The cores of a group never overlap.
This scheme is the baseline.

**Linear.** All cores walk the vectors in the same order, 0 … O-1:

- core vg > 0 WAITs for count k before its k-th vector;
- core vg < P_V-1 CALLs core vg+1 after each vector;
- the first core of the chain adds the bias and the last applies ReLU.

In steady state the cores form a pipeline P_V vectors deep. The number of
CALLs (and WAITs) is P_H · O · (P_V − 1).

**Cyclic.** The successor of core vg is core (vg+1) mod P_V, so every core has
a predecessor and a successor. In round r, at step j, core vg takes vector
r·P_V + ((vg − j) mod P_V). All P_V cores therefore start at once on
different vectors. Bias and activation work is shared evenly: whoever is the
first or last owner of a vector does it. The number of CALLs is
P_H · ceil(O/P_V) · P_V · (P_V − 1).

With P_V = 3, rounds over vectors 0-2 look like this:

```
step j=0:  C0 <- v0   C1 <- v1   C2 <- v2      (first owners: no WAIT)
step j=1:  C0 <- v2   C1 <- v0   C2 <- v1      (WAIT for count 1)
step j=2:  C0 <- v1   C1 <- v2   C2 <- v0      (WAIT for count 2, apply ReLU, no CALL)
```

All three schemes use the same hardware. Only the compiler-generated programs
differ. The test harness `tb/tb_layer_run.sv` contains a small compiler for
all three and checks the CALL counts against the formulas above.

## 5. Interconnect and timing

`bus_interconnect` connects NUM_CORES+1 initiators (the cores, then the CPU)
to NUM_CORES+1 targets (the shared memory, then the cores). Each target has
its own round-robin arbiter, so transfers to different targets proceed in the
same cycle. A CALL to a core never waits behind shared-memory traffic.

The protocol is one beat per cycle per target:

- a beat completes in the cycle where `valid` and `ready` are both high;
- read data returns in that same cycle;
- a burst stays locked to its initiator until the beat flagged `last`.

The decode, arbitration and target paths are combinational. This keeps the
model cycle-exact and simple, but gives a long combinational path at 17 ports.
A real implementation would register it.

Because every core's LOAD and STORE go to the one shared memory, the shared
memory port is what limits the system. At full size (layer 5 below), each
core moves 72 beats per output vector:

- 8 beats of IFM;
- 32 beats of partial sums in;
- 32 beats of partial sums out.

The bus width therefore decides how many cores can usefully run in parallel.

## 6. Results from simulation

All values below come from the testbenches in `tb/`, with random weights,
inputs and biases, and every output compared with a reference.

| test | configuration | sequential | linear | cyclic |
|---|---|---|---|---|
| `tb_cim_top_full` | default: 16 cores, 128x128, 16-byte bus; layer 1x1x512x512, 14x14 outputs (P_V = P_H = 4) | 400 510 cycles | 238 401 (1.68x) | 247 607 (1.62x) |
| `tb_mobilenet_layers` | default; layer 1x1x256x512, 14x14 outputs (P_V = 2, P_H = 4, 8 cores) | 213 018 | 131 307 (1.62x) | 144 350 (1.48x) |
| `tb_mobilenet_layers` | default; layer 1x1x256x256, 28x28 outputs (P_V = 2, P_H = 2, 4 cores) | 710 055 | 438 765 (1.62x) | 425 439 (1.67x) |
| `tb_mobilenet_layers` | default; layers 1x1x128x128 (56x56) and 1x1x128x256 (28x28), one core per group, no synchronisation | – | 1 582 116 / 408 353 | – |
| `tb_cim_top` | 6 cores, 16x16, 8-byte bus; 12 vectors, K_Z = 48, K_NUM = 32 (P_V = 3, P_H = 2) | 3 140 | 2 126 (1.48x) | 2 072 (1.52x) |

In the full-size run the linear scheme issues 2352 CALLs, i.e.
4 · 196 · 3. The cyclic scheme issues as many, 4 · 49 · 4 · 3. The
two smaller synchronised layers issue 1568 and 784 CALLs. These are the
counts the formulas of section 4 give for these layers.

Per output vector, each core loads N IFM bytes and M 32-bit partial sums,
and stores M 32-bit sums. Every owner of a vector loads the partial sums,
including the first, which thereby picks up the bias. For the 16-core layer
this makes 401 408 IFM values plus 401 408 partial-sum values loaded, and
401 408 values stored.

The speedup stays below the ideal P_V because the single shared-memory port
is saturated. 16 cores × 72 beats × 196 vectors ≈ 226 k beats, close to the
238 k cycles measured. Two things would bring it closer to P_V:

- a wider bus;
- storing partial sums as 8- or 16-bit values instead of 32 bits.

The sequential baseline is not bus-bound; it is limited by working through the
vertical groups one at a time.

## 7. Where this design departs from, or adds to, the published architecture

**Taken from the published description:**

- the system organisation (cores, shared memory and CPU on one
  multi-initiator/multi-target bus);
- the core's block structure and sizes: 20 configuration registers, 4 KB
  instruction memory, 8·M-byte data buffer, N-byte input registers and
  4·M-byte output registers around an M x N crossbar;
- the instruction names and the GPEU operation list;
- SEQ_NR with CALL/WAIT semantics ("wait until at least");
- bias pre-loading into the OFM, and the OFM area reused for partial sums;
- the group mapping and the three synchronisation schemes with their CALL
  counts;
- the default sizes: 16 cores, 128x128 crossbars, 16-byte bus.

**Own choices:**

- the instruction encoding and the 64-bit word;
- HALT and NOP;
- the address map and the meaning of the configuration registers;
- the SEQ_NR increment port;
- instruction paging;
- the bus protocol and arbitration;
- the crossbar latency (`XBAR_LAT = 4`);
- 8-bit weights and activations with 32-bit sums;
- the 4 MiB shared memory.

**Departures:**

- The published system uses an AXI4 interconnect, with separate channels,
  outstanding and out-of-order transactions. Here a single-beat valid/ready
  protocol with locked bursts takes its place. Throughput per target is the
  same (one beat per cycle), but a core cannot overlap two outstanding
  transactions.
- Partial sums travel over the bus and sit in memory as 32-bit words, so
  partial-sum traffic is four times that of 1-byte values.
- The crossbar is an ideal integer model (see section 2). Results are exact,
  so the tests compare bit for bit. Analog accuracy is out of scope.
- Only 1x1 convolutions are exercised. Larger kernels need only an im2col
  gather of the IFM, which is compiler work (the LOAD addresses); the hardware
  is unchanged, but this has not been simulated.

**Does a layer fit?** A layer fits the default configuration when
P_V·P_H ≤ 16 and its IFM, 32-bit OFM and code fit in 4 MiB. For the
MobileNet 1x1 layers 1 to 5 (56x56x128x128 up to 14x14x512x512) this holds.
They need 1, 2, 4, 8 and 16 cores. Layers 6 and 7 (512x1024 and 1024x1024)
need 32 and 64 cores. They fit only with `NUM_CORES` raised, or by running
the layer in several passes.

## 8. Files

| file | contents |
|---|---|
| `rtl/cim_pkg.sv` | opcodes, instruction format, address map, instruction builders |
| `rtl/cim_top.sv` | the system (top level) |
| `rtl/bus_interconnect.sv` | multi-initiator/multi-target interconnect |
| `rtl/shared_memory.sv` | shared memory |
| `rtl/cim_core.sv` | one core |
| `rtl/core_config.sv` | config registers, SEQ_NR, setup write routing |
| `rtl/core_controller.sv` | instruction sequencer |
| `rtl/instr_mem.sv`, `rtl/data_buffer.sv` | core memories |
| `rtl/gpeu.sv` | execution unit |
| `rtl/mvmu.sv` | MVM unit (input/output registers, control) |
| `rtl/rram_crossbar.sv` | behavioural crossbar + DAC/ADC model |
| `tb/tb_<block>.sv` | one self-checking testbench per block |
| `tb/tb_layer_run.sv` | CPU + layer-compiler harness used by the system tests |
| `tb/tb_cim_top.sv` | reduced-size system test, all three schemes |
| `tb/tb_cim_top_full.sv` | default-size system test (MobileNet layer 5), all three schemes |
| `tb/tb_mobilenet_layers.sv`, `tb/tb_layer_sys.sv` | MobileNet 1x1 layers 1-4, each on its own default-size system, in one simulation |

Top-level parameters (defaults in brackets):

- `NUM_CORES` (16), `M` (128), `N` (128), `BUS_BYTES` (16);
- `IM_BYTES` (4096), `SHMEM_BYTES` (4 MiB), `XBAR_LAT` (4).

`BUS_BYTES` must be a power of two and at least 4. Only 8 and 16 have been
simulated.

## 9. Simulating

Every testbench prints `TB_RESULT checks=<n> failures=<n>` and ends with
`$finish`. A watchdog stops a hung run and counts it as a failure. With
Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv -Irtl \
    --top-module tb_cim_top rtl/cim_pkg.sv tb/tb_cim_top.sv
./obj_dir/Vtb_cim_top
```

Replace `tb_cim_top` with any testbench name. The full-size test takes about
half a minute, most of it in the behavioural crossbar, and
`tb_mobilenet_layers` about three minutes.

To run a different layer, change the `O_V`, `K_Z`, `K_NUM` and `SCHEMES`
parameters of `tb_layer_run` in `tb/tb_cim_top*.sv`. `SCHEMES` is a bit mask:
bit 0 sequential, bit 1 linear, bit 2 cyclic. The harness:

- stops with an error if the layer needs more cores than the top provides;
- checks every output;
- checks the CALL count for each scheme;
- checks that CALLs, WAIT stalls, instruction page fills, bus contention and
  the interrupt all occurred.
