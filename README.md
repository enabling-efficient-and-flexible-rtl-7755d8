# A virtualizable multi-core CNN accelerator

A cloud FPGA that runs a deep-learning inference accelerator usually serves one tenant at
a time. Sharing it among several users needs two things. Each user needs hardware that the
others cannot disturb. And the provider must be able to change who owns which part of the
device in a millisecond or so, without resynthesising the FPGA.

This design splits the accelerator into a pool of sixteen identical, instruction-driven
**small cores**. Each has its own compute array, on-chip buffers and memory port. A user
owns any subset of the cores. A compiler spreads the user's network over those cores by
tiling each layer along the output-channel and width dimensions. Which cores belong to which
user is a table written at run time, and so is the instruction stream each core executes.
Re-allocating the device is therefore a matter of loading new instructions, not a new
bitstream.

Two pieces of hardware make this work. Both are described below and implemented here:

* a **two-level instruction dispatcher**. The first level is shared by all cores and
  schedules tasks: it holds the instructions, hands them to cores, synchronises the cores
  of one user between layers, and performs context switches. The second level sits inside
  each core and schedules its execution units;
* a **per-bank memory controller**. It lets four cores share one DDR bank, so the total
  port width of the cores equals the DDR port width.

## Sizes

| quantity | value |
|---|---|
| small cores | 16 |
| per core | PP = 4 pixels × ICP = 8 input channels × OCP = 8 output channels |
| parallelism per core | 2·PP·ICP·OCP = 512 ops/cycle |
| parallelism in total | 8192 ops/cycle |
| core memory port | 128 bits |
| DDR banks | 4, each with a 512-bit port shared by 4 cores |
| operands | int8 |
| accumulators | 32 bits |
| instruction | 128 bits, one memory beat |
| per-core feature buffer | 4 banks × 1024 × 64 bits = 32 KB |
| per-core weight buffer | 8 banks × 1024 × 64 bits = 64 KB |
| instruction memory | 16 regions × 256 instructions (64 KB) |

The core geometry, core count, port widths and bank sharing follow the published
configuration. The operand width, buffer depths and instruction memory size are this
design's own choices. All of them are parameters. The target clock of the original design
is 300 MHz, but nothing in the RTL depends on it.

## Block structure

```
virt_accel_top
├── l1_idm                       first-level dispatcher (one, shared)
│   ├── instr_mem                instruction fetch from DDR bank 0, per-core regions
│   ├── instr_decoder            round-robin hand-out of instructions to cores
│   ├── ctx_switch_ctrl          START / task-level and layer-level SWITCH
│   └── sync_ctrl                per-user layer barrier
├── vcore ×16                    one small core
│   ├── l2_idm                   second-level dispatcher
│   │   └── instr_fifo
│   ├── datamover                LOAD and SAVE engines on the core's 128-bit port
│   ├── conv_module              register file, cross_connect, PP × pe
│   ├── misc_module              pooling
│   └── mem_pool                 feature and weight banks (mem_bank ×12)
└── mpmc ×4                      per-DDR-bank port arbiter (bank 0 has a 5th port for fetch)
```

The DDR banks and the hypervisor are outside the RTL:

* The top exposes four 512-bit DDR request/response ports and a hypervisor command port.
* `tb/ddr_model.sv` is a behavioural DDR bank. It has a fixed latency, random stalls and a
  sparse memory.

## Instruction format

Every instruction is a 128-bit `virt_pkg::instr_t`, written from MSB to LSB:

| field | bits | use |
|---|---|---|
| `op` | 4 | System, Load, Save, Convinit, Conv, Poolinit, Pool |
| `core` | 4 | core the instruction is for (used by the first-level decoder) |
| `layer` | 8 | network layer the instruction belongs to (used when resuming) |
| `dep_wait` | 4 | one bit per unit (LOAD, SAVE, CONV, MISC) whose token must be consumed before issue |
| `dep_signal` | 4 | one bit per unit that receives a token when this instruction completes |
| `func` | 8 | System bit 0: layer barrier (else end of task); Load bit 0: weights |
| `ddr_addr` | 32 | Load/Save: DDR address in 128-bit words |
| `src`, `dst` | 16+16 | buffer rows or word indices |
| `len` | 16 | Load/Save: 64-bit words; Conv: accumulation steps; Pool: window rows |
| `aux` | 16 | Conv: weight row; Convinit: shift[4:0], ReLU[5], rotation[9:8]; Poolinit: avg[0], shift[12:8] |

The published work names the seven opcodes. It also says that every instruction carries
dependency information and that System has a synchronisation bit in its function field.
The bit layout above is this design's own.

## Second-level dispatch: tokens between units

A core has four execution units: LOAD, SAVE, CONV and MISC. Each runs one instruction at a
time. The second-level dispatcher (`l2_idm`) works on the head of its instruction FIFO, in
order.

Dependencies are counted as tokens. There is one 4-bit counter `tok[p][c]` for each ordered
pair (producer unit p, consumer unit c).

* When a unit finishes, every unit named in the `dep_signal` of that instruction gets a
  token from it.
* An instruction destined for unit c may issue only when its unit is idle and, for each bit
  p set in `dep_wait`, `tok[p][c]` is non-zero. Issuing consumes those tokens.

This lets loads of the next tile overlap convolution of the current one, which is the usual
double-buffering pattern. The compiler decides the overlap by how it sets the two masks.

A System instruction issues only when all four units are idle.

* **End of task:** `running` drops and `task_done` pulses.
* **Barrier:** the core raises `sync_local` together with the layer number. It then stops
  issuing until the first level returns `sync_global`.

When the first level restarts a core with a non-zero `start_layer`, instructions whose
`layer` field is lower are dropped without executing (`skipped` pulses). This is how a core
resumes mid-network after a layer-level switch. Start and halt flush the FIFO; start also clears the tokens.

## First-level dispatch

**Configuration.** The hypervisor writes a `core → user` table with `CFG_CORE` commands.

**Fetching an instruction file.** `LOAD_INSTR` fetches `count` instructions from DDR
bank 0. The fetch goes through the fifth port of bank 0's controller. Each instruction is
stored in the region of the core named in it. Before the fetch, the regions in `mask` are
emptied, so a re-allocated user's cores get fresh programs while the other users' programs
stay as they are. A full region raises `fetch_overflow`. Commands are not accepted while a
fetch runs (`hv_ready` is low).

**Handing out instructions.** The decoder keeps a read pointer per core. Each cycle it gives
one instruction, chosen round robin, to a started core whose FIFO has room. `START` rewinds
the pointer.

**Barriers.** `sync_ctrl` opens a user's barrier in the same cycle as the last of that
user's enabled cores raises `sync_local`. It then drives `sync_global` to all of them. Cores
of one user may sit on different DDR banks.

**Context switch.** `ctx_switch_ctrl` handles two modes:

* **Task level.** `SWITCH` with mode 0 completes once none of the user's cores is running,
  i.e. when the current inference has finished. `switch_done[u]` rises and the recorded
  layer is 0.
* **Layer level.** `SWITCH` with mode 1 keeps the user's next barrier closed. When all its
  cores have arrived there, it halts them in the same cycle. It records `barrier layer + 1`
  in `next_layer[u]` and raises `switch_done[u]`. Feature maps are already in DDR at a layer
  boundary, so the layer index is the whole context.

The hypervisor may then change the `core → user` table and load a new file with a clear
mask. The next `START` of the user hands `next_layer[u]` to all the user's cores once, as
their `start_layer`, and clears it. Instructions of the finished layers are skipped. The
end-to-end testbench does exactly this: it moves a user from four cores to two in the middle
of a network.

## Memory pool and compute

The **memory pool** of a core has two parts:

* PP feature banks. Word g is in bank g mod 4, row g/4.
* OCP weight banks. Word g is in bank g mod 8, row g/8.

Each word is 64 bits: ICP int8 values. LOAD writes two words per 128-bit beat. SAVE reads two
words per beat. CONV and MISC read one row across all feature banks per cycle, which is PP
pixels of ICP channels, and write one output row. Every unit has its own port, so the units
never stall each other on the buffers. Reads are combinational.

**CONV.** Convinit loads the register file: output shift, ReLU and the cross-connect
rotation. Conv then runs `len` accumulation steps, one per cycle. Step i reads feature row
`src+i` and weight row `aux+i`. The cross-connect rotates the PP bank words onto the PP PEs.
Each PE multiplies its pixel's ICP activations with OCP × ICP weights and accumulates OCP
sums. One further cycle writes the requantised result to row `dst`: arithmetic shift, ReLU
and saturation to int8.

A Conv of `len` steps therefore completes `len + 1` cycles after issue. That matches the
latency model `t = Cin·Cout/(ICP·OCP) · Wout · Kw · Kh · T`, with one cycle per ICP × OCP
step per pixel group.

**MISC.** Poolinit selects max or average, and the shift for average. Pool reduces `len`
consecutive rows element-wise and writes one row. It takes `len + 1` cycles.

**Datamover.** LOAD and SAVE share the core's 128-bit port. They alternate when both have
requests. Reads may be outstanding and return in order.

## Memory controller (`mpmc`)

Each DDR bank has one controller. Each cycle, it grants one of its 128-bit ports round robin
and sends the request to the 512-bit DDR port:

* The 128-bit word address `a` becomes DDR word `a/4`, lane `a mod 4`.
* Write data is replicated across all four lanes, and byte strobes select the lane.
* Reads carry a tag `{port, lane}`. When the read data returns, the controller uses the tag
  to send the right lane to the right port.

With four 128-bit cores on a 512-bit bank, the summed port width never exceeds the DDR port
width. That is the condition the design relies on for performance isolation between the
users on one bank. Round robin bounds a port's wait to one grant of each other port.

## Where this RTL departs from the original design

* **Instruction granularity.** Here a Conv instruction produces PP pixels × OCP output
  channels. The original produces PP output lines with all output channels per instruction.
  With this finer encoding, a whole network needs tens of thousands of instructions per core.
  The 256-entry regions then hold only a part of it, and the hypervisor must stream a task in
  chunks (`LOAD_INSTR` per chunk) instead of caching it once per reconfiguration.
* **Simplified on-chip data layout.**
  * A feature row is one pixel per bank, and an accumulation step is one row.
  * The compiler lays out im2col-style rows.
  * Kernel windows, padding and strides are not walked in hardware.
  * MISC implements pooling only.
* **Combinational buffer reads.** The original targets FPGA block RAM, which has a registered
  read. Here buffer reads are combinational, which is closer to distributed RAM.
* **Hypervisor interface.** The host side is a small valid/ready command port, not a
  register map on a host bus.
* **Instruction placement.** Instructions are fetched from DDR bank 0 through an extra port
  on that bank's controller. Where instructions are fetched from is not specified in the
  original.
* **Not built.**
  * The single large-core baseline, and the alternative configurations compared against.
  * The static and dynamic compilers, and the hypervisor software.
  * Operating-system-level isolation of a DDR bank shared by several users. Here a bank's
    users share its address space.

## Simulating

All blocks have self-checking testbenches in `tb/`. Each prints
`TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_l2_idm \
    -y rtl -y tb rtl/virt_pkg.sv tb/tb_job_pkg.sv tb/tb_l2_idm.sv -o sim
./obj_dir/sim
```

Two files in `tb/` are helpers, not testbenches:

* `tb_job_pkg.sv` builds convolution jobs for the core and top-level tests. Each job has its
  data, its instruction program and a reference result computed in plain SystemVerilog.
* `ddr_model.sv` is the DDR bank.

`tb_virt_accel_top` runs the top at its default sizes: 16 cores and 4 banks. It does so with
three users. The scenario includes the following:

* two-layer programs with barriers, including one spanning two DDR banks;
* a layer-level switch with re-allocation to fewer cores and resumption at layer 1;
* a task-level switch while the task is running;
* a fetch with a partial clear mask.

It checks every output word against the reference. It also counts barrier releases, port
contention in the controllers, FIFO backpressure, skipped instructions and both switch
kinds, and it fails if any of them never happens. It finishes in well under a minute.
