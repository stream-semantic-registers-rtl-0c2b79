# Stream Semantic Registers for a single-issue RISC-V cluster

A single-issue in-order core running a kernel such as a dot product spends
most of its issue slots on data movement. A dot product's inner loop is two
loads and one multiply-accumulate. Even with post-increment loads and hardware
loops, only one instruction in three does useful arithmetic. *Stream semantic
registers* (SSRs) remove the loads and stores from the instruction stream. A
few architectural registers are given a second meaning. When the extension is
enabled, reading such a register pops the next element of a memory stream, and
writing it pushes an element to a memory stream. A small data mover beside the
core walks the address pattern and prefetches into a FIFO, so the
multiply-accumulate instruction finds its operands waiting. The inner loop
shrinks to one instruction, and the arithmetic unit can be busy almost every
cycle.

This repository holds synthesizable SystemVerilog for those additions, for a
RISC-V core with three register-file read ports and two write ports (the shape
of the RI5CY core). It also holds a two-core cluster that places the additions
in front of a shared, banked, single-cycle scratchpad. The core pipeline, the
FPU, the instruction cache, the DMA and the peripherals are not included. Each
core's pipeline connects through a plain struct port, and the testbenches play
the pipeline's part.

## Contents

1. Stream registers and the enable bit
2. Register-file interception
3. Rules the pipeline must follow
4. The data mover
5. The address generator
6. Configuration registers
7. Memory side: shared port, interconnect, banks
8. The cluster top
9. Measured behaviour
10. What follows the paper and what is this design's own
11. Simulating

## 1. Stream registers and the enable bit

The integer and floating-point register files form one 64-entry register file
with 6-bit addresses. Entries 0–31 are `x0`–`x31`, and entries 32–63 are
`f0`–`f31`. Four entries can carry stream semantics:

| register | fused address | data mover lane |
|----------|---------------|-----------------|
| `t0` (x5)  | 5  | lane 0 |
| `t1` (x6)  | 6  | lane 1 |
| `ft0` (f0) | 32 | lane 0 |
| `ft1` (f1) | 33 | lane 1 |

An integer and a floating-point register share each lane, so the same stream
can feed integer or FP instructions.

Stream semantics are off after reset. One CSR, `ssrcfg` at address `0x7C0`,
holds a single bit (bit 0) that switches them on or off for all four registers
together (`ssr_csr`). Code wraps each "SSR region" in `csrwi ssrcfg, 1` …
`csrwi ssrcfg, 0`. Outside a region the four registers behave as ordinary
registers, so unmodified code is not affected.

## 2. Register-file interception (`ssr_regfile`, `regfile`)

`ssr_regfile` wraps the plain register file (`regfile`: 64 × 32 bit, 3
combinational read ports, 2 write ports, `x0` reads zero). The wrapper puts a
valid/ready handshake on every port and checks each access:

    SSR? = enable & (addr ∈ {t0, t1, ft0, ft1})

* **Read port, `SSR?` true.** The valid goes to the port's stream output
  instead of the register file. The port's ready comes from the stream, and
  the read data comes from the stream.
* **Read port, `SSR?` false.** The valid becomes the register file's read
  enable, ready is a constant 1, and data comes from the register file.
* **Write port, `SSR?` true.** The valid, address and data go to the stream
  instead of the register file's write enable, and ready comes from the
  stream.
* **Write port, `SSR?` false.** Ready is 1 and the register file is written.

All of this logic is combinational. The three read streams and two write
streams leave the core. `ssr_switch` then sends each one to the lane selected
by the register address.

## 3. Rules the pipeline must follow (`ssr_hazard_ctrl`, `ssr_core_ext`)

Stream reads are destructive: popping a FIFO cannot be undone. The pipeline
must therefore never perform an SSR read speculatively or twice. There are
three rules.

1. **Hold after an `ssrcfg` write.** While a write to `ssrcfg` is still in
   the later pipeline stages, the enable bit that decode sees is stale. An
   instruction that names a stream register is held in decode until the write
   has taken effect. The pipeline reports the pending write on
   `csr_ssrcfg_pending`.
2. **Hold behind an unresolved branch.** An instruction in the shadow of a
   branch may be squashed. It must not pop a stream, so it is held while
   `branch_pending` is set.
3. **Back-pressure.** A read port whose stream has no data, or a write port
   whose stream FIFO is full, stalls the pipeline: `stall_id` for reads and
   `stall_wb` for writes. The pipeline drops the valid of each port whose
   handshake has already completed. An instruction that reads two streams and
   gets one of them immediately does not pop that one again on the next
   cycle.

`ssr_hazard_ctrl` computes `hold = id_uses_ssr_reg & (csr_ssrcfg_pending |
branch_pending)`. It outputs `id_issue_ok = !hold` and
`stall_id = hold | any(read valid & !read ready)`. Inside `ssr_core_ext` the
read valids are ANDed with `id_issue_ok` before they reach the register-file
wrapper. A held instruction therefore cannot pop a stream, even if the
pipeline presents its valids. The hold uses the register names and ignores the
enable bit. Enabling or disabling can change what a register means, and that
is exactly what the rule protects against.

Exceptions are handled by deferral: interrupts stay disabled inside SSR
regions. The only memory exception possible is an access to an unmapped
address, which ends the program. An exception handler can end running streams
with an abort write (section 6).

## 4. The data mover (`ssr_data_mover`, `ssr_switch`, `ssr_lane`, `ssr_fifo`)

```
          3 read + 2 write streams from the register file wrapper
                               │
                          ssr_switch           (lane = t1/ft1 ? 1 : 0)
                         ┌─────┴─────┐
                     ssr_lane 0   ssr_lane 1    FIFO + AGU + config regs
                         │           │
  LSU ──► config decode  │           │
   │                     │           │
   └──────► ssr_port_mux ┘           │
                  │                  │
              memory port 0     memory port 1
```

**Switch.** Each of the five streams is routed by its register address. If
more than one port targets the same lane in one cycle, the lowest-numbered
port is served and the others see ready low. They are served in later cycles.
An instruction that names `ft0` twice therefore takes two cycles and gets two
consecutive elements.

**Lane, read mode.** The address generator produces one address per cycle. The
lane issues a memory read for it only when the FIFO has room for the answer,
counting the read still in flight (`usage + in_flight < DEPTH`). The stream
therefore runs ahead of the core by up to the FIFO depth (4), and never
overflows. With one-cycle memory latency, back-to-back reads at one element
per cycle need only a depth of 2. The extra entries absorb bank conflicts
and the cycles the LSU takes the shared port. The FIFO is fall-through, so a
datum that has arrived is visible to the core in the same cycle it asks.

**Repeat.** With `repeat = R`, the FIFO head is handed out R+1 times before it
is popped. A value loaded once can then be used as an operand several times,
for example one element of `x` against two rows.

**Lane, write mode.** Every datum the core writes into the stream register
enters the FIFO. The lane stores the FIFO head at the next address the
generator produces. The core stalls only when the FIFO is full.

**Direction.** A lane works in one direction per stream. A stream register is
used either as a source or as a destination until its pattern is exhausted.

**Done.** A lane is done when the pattern is exhausted, no read is in flight
and the FIFO is empty. For a write stream, done therefore means that every
datum has reached memory. Software polls the done flag in the status
register before it uses the written data.

**Coherence.** A read stream fetches ahead, so a store to an address that an
active read stream has already prefetched is not seen by that stream. Streams
started after a store see it. Do not store into memory that a running read
stream covers.

## 5. The address generator (`ssr_agu`)

Each lane has one generator with four nested loops (L0 innermost to L3), a
pointer register and one adder. For a stream of `d` dimensions (1–4), loops
above `d−1` are ignored. Each cycle the generator advances (`en_i`):

* L0 counts up. A loop that reaches its bound wraps to 0 and lets the next
  loop count.
* The adder adds **one** stride to the pointer: the stride of the outermost
  loop that counts in this step. A priority encoder picks that stride from the
  chain of "this loop and every loop below it are at their end" signals.
* When every enabled loop is at its end, the pattern is finished and `done`
  rises.

This design stores two things differently from a plain count and a plain
stride:

* **Bound** is the iteration count minus one. A 1-D stream of N elements is
  programmed with `bound0 = N−1`.
* **Stride** is the byte increment applied when that loop advances. It is
  relative to the previous address, not the distance between consecutive
  iterations of the loop. An outer stride therefore usually "rewinds" the
  inner loops.

Example: B is read column by column in C = A·B for 32 × 32 row-major
matrices, looping k, then j, then i:

| loop | bound | stride (bytes) | meaning |
|------|-------|----------------|---------|
| L0 (k) | 31 | +128 | next row, same column |
| L1 (j) | 31 | −31·128 + 4 = −3964 | back to row 0, next column |
| L2 (i) | 31 | −(31·32 + 31)·4 = −4092 | back to B[0][0] |

One address leaves the generator per cycle, with no bubbles at loop
boundaries. Bound counters are 16 bits wide (up to 65 536 iterations per
loop). Addresses are 32 bits wide.

## 6. Configuration registers

Each lane has a 128-byte window of memory-mapped registers. The window of lane
`l` starts at `CFG_BASE + 128·l`, with `CFG_BASE = 0x0001_0000` by default. The
core reaches its own data mover there with ordinary loads and stores. The
LSU path decodes this window before the shared memory port, and a
configuration access answers one cycle later, like a TCDM access.

| word | name | access | content |
|------|------|--------|---------|
| 0 | `status` | R/W | [31] done, [30] write, [29:28] dims−1, [27:0] pointer |
| 1 | `repeat` | R/W | extra emissions per datum (0 = each datum once) |
| 2–5 | `bound0`–`bound3` | R/W | iterations − 1 of each loop |
| 6–9 | `stride0`–`stride3` | R/W | byte increment when the loop advances |
| 24–27 | `READ_1D`…`READ_4D` | W | start a read stream of 1–4 dims at the written address |
| 28–31 | `WRITE_1D`…`WRITE_4D` | W | start a write stream of 1–4 dims at the written address |

* **Starting a stream.** A write to `status` with bit 31 clear starts a
  stream. Bits [30], [29:28] and [27:0] give the direction, the number of
  dimensions and the base address. The stream start flushes the FIFO and
  ignores a read of the previous stream that is still in flight.
* **Aliases.** The alias registers start a stream with one store that carries
  the full 32-bit base address. They take the direction and dimension count
  from the register's own address.
* **Abort.** A write to `status` with bit 31 set aborts the running stream.
  The generator stops, the FIFO is flushed (write data not yet stored is
  dropped), and the lane reports done.
* **Reading `status`.** It returns the generator's current pointer and the
  done flag.

The typical sequence is as follows: store the bounds and strides, store the
base address to an alias, `csrwi ssrcfg, 1`, run the loop, `csrwi ssrcfg, 0`.
Software must still issue exactly as many compute instructions as the pattern
has elements, usually inside a hardware loop. The setup cost for `s` lanes of `d` dimensions is
therefore about `4·d·s + s + 2` instructions. Each bound and stride needs a
load-immediate and a store, each lane needs one start store, and there are two
CSR writes. Each loop iteration saves one
load or store per lane, so for a one-dimensional loop the setup pays for
itself from about six iterations on.

## 7. Memory side: shared port, interconnect, banks

**Memory ports.** Each core has two memory ports. An instruction uses either
the LSU or stream registers, never both in one access, so the LSU and lane 0
share port 0 (`ssr_port_mux`), and lane 1 has port 1 alone. The multiplexer
uses fixed priority, with the LSU first. An LSU access costs lane 0 at most one
prefetch slot, and the FIFO usually hides it. A register tracks which side
owns the response that comes back in the next cycle.

**Interconnect.** `tcdm_xbar` connects all `2·NUM_CORES` ports to `NUM_BANKS`
word-interleaved banks. Bank = word address mod 8. Each bank has its own
round-robin arbiter. When two ports hit the same bank in a cycle, one is
granted and the other sees `gnt` low and retries. With 8 banks for 4 ports,
the memory offers about twice the bandwidth the cores can ask for, which keeps
conflicts rare.

**Banks.** `tcdm_bank` is a single-port SRAM model with byte enables and a
registered read (2048 × 32 bit per bank, 64 kB in total).

**Protocol** (`ssr_pkg::mem_req_t/mem_rsp_t`). A master raises `req` with
`we`, `be`, `addr` and `wdata`. `gnt` answers combinationally in the same
cycle. `rvalid` (with `rdata` for reads) follows exactly one cycle after the
grant, for writes as well. The access latency is therefore a single cycle.

## 8. The cluster top (`ssr_cluster`)

`ssr_cluster` instantiates `NUM_CORES = 2` copies of `ssr_core_ext`, the
interconnect, and eight banks for `TCDM_BYTES = 65536`. Each `ssr_core_ext`
contains the CSR, the register file with its wrapper, the hazard logic and the
data mover.

The ports are one `core_in_t`/`core_out_t` pair per core, which is the
boundary to a RI5CY-class pipeline:

* **Pipeline to design.** Register-file port addresses, valids and write
  data; CSR accesses; LSU requests; and the three hazard hints
  `id_uses_ssr_reg`, `csr_ssrcfg_pending` and `branch_pending`.
* **Design to pipeline.** Read data and readies; write readies; the CSR read
  value and hit; LSU responses; the enable bit; `id_issue_ok`, `stall_id` and
  `stall_wb`; and each lane's done flag.

The TCDM starts at address 0. Every core sees its own data mover at the same
`CFG_BASE`. All parameters have defaults equal to the configuration described
above.

## 9. Measured behaviour

The testbenches play the pipeline with a driver that issues one instruction
per cycle. The results below were measured at the default parameters:

| workload | result |
|----------|--------|
| dot product, 2048 elements, one core (two read streams) | 2049 cycles for 2048 multiply-accumulates |
| dot product, 2048 elements split over both cores | 1025 and 1027 cycles, with bank conflicts between the cores |
| prefix sum, 4096 elements (read stream in, write stream out) | 4098 cycles |
| GEMM 32 × 32 (two 3-D read streams, results stored by the LSU) | 37 505 cycles for 32 768 MACs and 1024 stores |
| GEMV 64 × 64 (matrix 1-D, vector 2-D re-read per row) | correct |
| ReLU, 1024 elements | correct |
| 1-D star stencil, diameter 11, 1024 points (2-D patterns) | correct |
| 2-D star stencil, diameter 11, 64 × 64 grid (row taps 3-D, column taps 4-D, two passes) | correct |
| the 11 radix-2 stages of a 2048-point FFT (4-D in-place patterns; twiddles left out because there is no FPU) | correct |
| bitonic sort of 1024 values (55 in-place compare-exchange passes, 3-D patterns) | correct |

The one-element-per-cycle rate is the point of the design. After a
one-cycle start-up, the two streams supply an operand pair every cycle. This
holds across loop boundaries, with the LSU interleaved on the shared port, and
with two cores contending for banks.

Synthesized with a generic cell library, the cluster (without the pipelines)
comes to about 2.7 k cells and 6 k flip-flop bits, plus the 512 kbit of TCDM.

## 10. What follows the paper and what is this design's own

**Follows the paper:**

* the four stream registers and their lane binding;
* `ssrcfg` at 0x7C0, one bit, off at reset;
* the `SSR?` check and the mux structure of the register-file wrapper;
* three read and two write streams, a switch, and two lanes, each with a FIFO
  and a four-loop generator;
* the ten configuration registers and what they hold; the READ_1D-style
  start alias;
* LSU and lane 0 sharing one port with fixed priority;
* two ports per core, two cores, a 64 kB single-cycle banked TCDM with
  per-bank arbitration;
* the pipeline rules: hold after `ssrcfg` writes and behind branches, plus
  read and write back-pressure;
* deferred exceptions.

**Own choices where the paper is silent:**

* FIFO depth 4;
* 16-bit bound counters;
* register word offsets and status bit positions;
* alias encoding; abort encoding;
* `repeat` counting extra emissions;
* LSU winning the shared port;
* lowest port winning inside the switch;
* 8 banks, word interleaving, round robin;
* configuration window address;
* combinational `gnt`;
* the struct boundary to the pipeline and its three hazard hints.

**Where the paper contradicts itself:** the prose says the bound registers hold
"the number of iterations", while its programming example writes N−1 for an
N-element loop. This design follows the example.

**Not built:**

* the RI5CY pipeline, FPU, instruction cache, DMA and peripherals, which the
  paper takes from existing designs;
* precise-exception support (a second, architectural address generator per
  lane). The paper discusses it only as an option and did not build it.

## 11. Simulating

All files are plain SystemVerilog. `rtl/ssr_pkg.sv` must be read first. Any
testbench builds with Verilator 5:

    verilator --binary --timing --assert -Wno-fatal -Wno-lint -Wno-style \
        -y rtl -y tb rtl/ssr_pkg.sv tb/tb_ssr_cluster.sv \
        --top-module tb_ssr_cluster -o sim
    ./obj_dir/sim

Each testbench compares results with values it computes itself. It ends with
a line `TB_RESULT checks=<n> failures=<m>` and has a cycle watchdog. The
testbenches are:

* `tb_regfile`, `tb_ssr_regfile`, `tb_ssr_csr`, `tb_ssr_hazard_ctrl`,
  `tb_ssr_fifo`, `tb_ssr_agu`, `tb_ssr_switch`, `tb_ssr_port_mux`: one block
  each, mostly randomized against reference models. `tb_ssr_hazard_ctrl` is
  exhaustive. `tb_ssr_agu` checks one address per cycle.
* `tb_ssr_lane`: one lane against a memory that grants at random. Covers 2-D
  read with repeat, full-rate read, 3-D write, and abort.
* `tb_ssr_data_mover`, `tb_ssr_core_ext`: the data mover and one extended
  core, including LSU contention and the decode hold.
* `tb_tcdm_bank`, `tb_tcdm_xbar`: the memory, with random traffic from four
  masters checked against a model.
* `tb_ssr_cluster`: the whole cluster at its default parameters. It runs the
  dot product on two cores and on one core, GEMV, ReLU, repeat, bank-conflict
  stress and plain use of `t0`. It counts every mechanism (stream reads and
  writes, read and write stalls, bank conflicts, port contention, decode
  holds, configuration accesses, polling) and fails if any never occurs.
* `tb_ssr_kernels`: prefix sum, 1-D and 2-D stencils, GEMM, FFT stages and
  bitonic sort on the full-size cluster.

The cluster testbenches load and inspect memory through the hierarchical
paths `dut.g_bank[b].i_bank.mem`.

**Changing the design:**

* The number of cores, banks, FIFO depth and configuration base are
  parameters of `ssr_cluster`.
* The loop count is a parameter of `ssr_lane` and `ssr_agu`. The status
  register's dims field is 2 bits, which allows up to four loops.
* The register-to-lane binding is in `ssr_pkg::is_ssr_reg` and
  `ssr_pkg::lane_of`.
