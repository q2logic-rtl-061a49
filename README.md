# Q2Logic: a streaming pipeline for state-vector quantum circuit simulation

A state-vector ("Schrödinger") simulator keeps all 2^n complex amplitudes of an
n-qubit register and applies gates to them one at a time. A single-qubit gate on
qubit t is a 2x2 complex matrix that combines every pair of amplitudes whose indices
differ only in bit t. A controlled gate does the same, but only for the pairs whose
control bit is 1. The work is simple and regular. What limits it is memory bandwidth:
the whole state has to be read and written for every gate.

Q2Logic reduces that traffic. It streams the state out of memory once and passes it
through a chain of **quantum processing units (QPUs)**, each of which applies one
gate. Then it writes the state back once. One such pass, carrying up to N_QPU gates,
is called a **bitstream** or **run**. A QPU holds only a chunk of 2^N_SYSQBITS
consecutive amplitudes, so in one run gates can reach only the lowest N_SYSQBITS
address bits. To let later runs reach other qubits, the writer **rotates** the
address bits as it stores the state. The qubits the next run needs then sit in the
low bits.

This repository holds synthesizable SystemVerilog for that pipeline, self-checking
testbenches for every block, and a testbench that runs whole circuits. The default
size is 48 QPUs, 2^14-amplitude chunks and 2048-bit memory reads.

## Data flow

```
            8-bit reads            configuration chain (8 bits)
 memory ───────────────► state_reader ──────────────► QPU 0 ─► QPU 1 ─► ... ─► QPU N-1
            wide reads        │                          ▲                         │
 memory ───────────────►      ▼                          │                         ▼
                      word FIFO ─► serializer ─► pair FIFO              state_writer ─► memory
                      (LANES amplitudes)     (2 amplitudes/cycle)        (rotated addresses)
```

`q2logic_top` wires these parts together:

1. **state_reader.** On `start` it reads N_QPU x 44 configuration bytes through an
   8-bit port and pushes every returned byte onto the configuration chain. After
   that it reads the 2^num_qubits amplitudes of the state in linear order. Each read
   fetches one wide word of LANES = B_LW/64 amplitudes (32 at 2048 bits).
2. **Word FIFO.** Holds wide words. The reader issues a read only when it holds a
   credit. Credits start at the FIFO depth, and one comes back each time the FIFO
   pops. Read data in flight therefore always has room, and the memory never needs
   to be stalled on the return path.
3. **serializer.** A sequencer steps a multiplexer across the lanes of the word at
   the head of the FIFO. It emits lanes 2k and 2k+1 as pair k, and releases the word
   with its last pair.
4. **Pair FIFO.** Decouples the serializer from the first QPU.
5. **QPU chain.** Each QPU takes and gives two amplitudes per cycle and applies one
   gate (see below).
6. **state_writer.** Labels the pairs in arrival order, rotates the labels, and
   writes each pair as one two-lane request to `wr_base + rotated label`.

Every stream uses valid/ready: a transfer happens when both are high. In steady
state the pipeline moves two amplitudes per cycle end to end. The whole chain stalls
together when memory refuses writes.

## Inside a QPU

A QPU (`qpu`) is a config register, a controller (`qpu_ctrl` with a `bitswitch`), a
two-bank SRAM (`qpu_sram`), a three-stage complex matrix-vector unit (`matvec`) and
two output multiplexers.

**Chunks and labels.** Arriving amplitudes are numbered 0, 1, 2, ... within the
current chunk of 2^N_SYSQBITS. The **bitswitch** swaps bit 0 of this label with the
target bit t. The result is the SRAM write address. The two amplitudes a gate must
combine (labels 2k-with-bit-t-clear and the same with bit t set) therefore land at
addresses 2k and 2k+1.

**Double buffering.** When a bank has received its whole chunk, it is marked full
and loading moves to the other bank. A full bank is read in address order, one pair
(2k, 2k+1) per cycle, through the matrix unit, and is released after its last pair.
Loading and computing overlap, so a QPU keeps the two-per-cycle rate. Its
only back-pressure is upstream: `in_ready` falls while the bank to be loaded has not
been drained yet.

**Matrix unit.** `y0 = a*x0 + b*x1` and `y1 = c*x0 + d*x1` in single precision. The
unit has 16 real multipliers, then 8 adders, then 4 adders, each stage registered.
A stall freezes the SRAM read and all three stages together.

**Controlled gates.** Each pair read also yields its original label (the SRAM address
with the bitswitch undone). Its control bit is delayed alongside the matrix pipeline.
Where that bit is 0, the output multiplexers pass the stored amplitudes instead of
the product. A CNOT is a controlled gate whose matrix is Pauli-X, and any other 2x2
matrix can be controlled the same way. An idle QPU (`GATE_PASS`) passes every pair.

**Output order: the part that is easy to miss.** A QPU emits its chunk in SRAM
address order, not in arrival order. Within each chunk, output position p holds the
amplitude that arrived with label bitswitch(p). In other words, bit 0 and bit t of
the position are exchanged. For t = 0 nothing changes. For any other target, the
host's schedule must track this permutation. There are two ways:

- Follow the gate with an idle QPU that has the same target. The swap is its own
  inverse, so this undoes it. The circuit testbench does this.
- Relabel the qubits for the following gates instead.

The control bit is taken from the original label, so a controlled gate always uses
the logical control qubit.

**Timing.** With a steady input and no stalls, the first output of a QPU appears
2^(N_SYSQBITS-1) + 4 cycles after its first input:

- 2^(N_SYSQBITS-1) cycles to fill a bank;
- one cycle of SRAM read;
- three matrix stages.

After that, two amplitudes leave every cycle. A run of a 2^Q state on the full chain
takes about N_QPU x (2^(N_SYSQBITS-1) + 5) + 2^(Q-1) cycles, plus the
configuration and memory latency.

## The configuration record and chain

Each QPU has a 44-byte shift register (`qpu_config_reg`) on an 8-bit chain. Each valid
byte shifts it, and the byte pushed out goes to the next QPU one cycle later. The
first 44 bytes sent therefore end up in the **last** QPU. A bitstream is the N_QPU
records, last QPU first.

The register is read directly as `q2l_pkg::qpu_cfg_t`. The byte sent first is the
most significant, and every field is sent most-significant byte first:

| bytes | field | meaning |
|---|---|---|
| 0-7 | a | matrix element, complex: {im, re} each fp32 |
| 8-15 | b | |
| 16-23 | c | |
| 24-31 | d | |
| 32-35 | kind | 0 unary, 1 controlled, 2 idle (pass) |
| 36-39 | target | label bit t, below N_SYSQBITS |
| 40-43 | control | label bit of the control qubit |

An amplitude in memory is 64 bits: the real part in bits 31:0 and the imaginary
part in bits 63:32, i.e. `struct {float re, im;}` on a little-endian host.

## Rotation between runs

The writer computes each address as `wr_base + rotr(label, r)` over num_qubits bits:
address bit i = label bit (i + r) mod num_qubits. The rotation r is a signed 8-bit
host input of each run, reduced modulo num_qubits.

Read it this way: after `rotate = r`, the qubit that sat at bit r is at bit 0. Two
examples:

- `rotate = 2` on a 4-qubit state brings qubits 2 and 3 down to bits 0 and 1.
- A following `rotate = -1` moves everything up one bit.

The result is written to a different region (`wr_base`) from the one read
(`rd_base`). Writing in place would overwrite amplitudes not yet read. The host
swaps the two regions between runs.

## Floating point

`fp32_mul` and `fp32_add` are combinational IEEE-754 single-precision units:

- They round to nearest, ties to even.
- Subnormal inputs and results are flushed to a signed zero.
- Signed zeros follow IEEE rules.
- Infinities and NaNs are produced for overflow and invalid operations, but NaN
  payloads are not kept.

Each complex product is computed as (pr·xr − pi·xi) + j(pr·xi + pi·xr). Every
operation rounds, in the fixed order described under the matrix unit. The testbenches
check every output bit for bit against a reference that computes the same order in
double precision and rounds to single precision.

## Interfaces and run protocol

Host side of `q2logic_top`:

- `start` is a one-cycle pulse while not `busy`. With it come `num_qubits`,
  `rotate`, `cfg_base` (byte address), `rd_base` (wide-word address) and `wr_base`
  (amplitude address).
- num_qubits must satisfy N_SYSQBITS ≤ num_qubits ≤ 32 and num_qubits ≥
  log2(LANES).
- `done` pulses once the last pair has been accepted by memory.
- `obs` has one bit per mechanism:
  - reader finished;
  - word FIFO full;
  - pair FIFO full;
  - QPU load/compute overlap;
  - QPU stall;
  - QPU passing stored values;
  - write refused.

Memory side, three ports:

- **Configuration read** `cfg_req/cfg_gnt/cfg_addr`, with `cfg_rvalid/cfg_rdata`
  (8 bits) returning in request order.
- **State read** `st_req/st_gnt/st_addr`, with `st_rvalid/st_rdata` (B_LW bits) in
  order.
- **Write** `wr_req/wr_gnt` with two addresses and two amplitudes per request.

A request is taken in the cycle where req and gnt are both high. The address and
data stay stable while req waits for gnt. Read latency may be anything, as long as
responses come back in order.

## Parameters

| parameter | default | meaning |
|---|---|---|
| N_QPU | 48 | QPUs in the chain = maximum gates per run |
| N_SYSQBITS | 14 | log2 of the chunk size; each QPU holds 2 x 2^14 amplitudes (256 KiB) |
| B_LW | 2048 | width of a state read in bits (LANES = B_LW/64 amplitudes) |
| RD_FIFO_DEPTH | 8 | words in the word FIFO, which is also the number of reads in flight |
| SER_FIFO_DEPTH | 8 | pairs in the pair FIFO |

N_QPU = 48 and N_SYSQBITS = 14 is one of the design points studied for this
architecture; it is bound by on-chip RAM. Other points trade QPU count against chunk
size, e.g. 64 QPUs with 2^12 chunks. Any power-of-two FIFO depth works. B_LW must be
a power of two of at least 128.

## Where this RTL departs from, or adds to, the original description

- The original is an OpenCL kernel design. Here, handshakes, credit flow control,
  the memory port protocols, reset behaviour and FIFO depths are this
  implementation's own.
- The layout of the 44-byte record is the one shown above; only its size and its
  contents (matrix, gate type, qubit mapping) are given.
- The controlled-gate path accepts any 2x2 matrix, not only NOT. The idle gate kind
  is added so that unused QPUs, and QPUs that only undo the output permutation, can
  be configured.
- The rotation direction follows the worked 4-qubit example ("rotate 2", then
  "rotate −1"). A sentence elsewhere in the description speaks of a left rotation by
  5 to move qubits 0-3 of a 16-qubit state to 8-11. That is consistent with neither
  direction, and is not followed.
- The rotation is a per-run input, because the configuration chain ends at the last
  QPU and does not reach the writer.
- The result goes to a separate memory region.
- The writer issues two 64-bit writes per request so that it keeps up with the
  two-per-cycle stream.
- `qpu_sram` is a plain two-write, two-read array. On an FPGA such a memory must be
  built from replicated or multi-pumped block RAM.
- The QPU output permutation is a property of reading the SRAM in order. It is
  documented here and left to the schedule.
- Not part of this RTL:
  - the off-chip DDR4 memory and its controller (a behavioural model,
    `tb/ddr_model.sv`, stands in for it in simulation);
  - the host runtime;
  - the circuit scheduler, which is host software. A small greedy scheduler lives
    inside `tb/tb_circuits.sv`.

## Capacity

A q-qubit state needs 2^q x 8 bytes per copy and two copies (read and write region).
Addresses are 32-bit amplitude indices. A 28-qubit state is 2 GiB per copy, so two
copies fit easily in a 32 GB memory; 32 qubits would be the address limit. At the
default sizes the state must have at least 14 qubits.

Circuits of 20 to 28 qubits fit. Examples are adders, multipliers, cat and W states,
the Ising model, QFT, swap tests, kNN and variational circuits. A circuit with G
gates needs at least G/48 runs, more when gates are far apart and rotations are
needed.

## Files

- `rtl/q2l_pkg.sv`: types (amplitude, pair, record, gate kinds, observation bits).
- `rtl/q2logic_top.sv`: the pipeline.
- `rtl/state_reader.sv`, `rtl/stream_fifo.sv`, `rtl/serializer.sv`,
  `rtl/state_writer.sv`: the stream parts.
- `rtl/qpu.sv`, `rtl/qpu_config_reg.sv`, `rtl/qpu_ctrl.sv`, `rtl/bitswitch.sv`,
  `rtl/qpu_sram.sv`, `rtl/matvec.sv`: a QPU.
- `rtl/fp32_mul.sv`, `rtl/fp32_add.sv`: floating-point units.
- `tb/`:
  - one testbench per block;
  - `tb_q2logic_top` (end to end at reduced size, four chained runs with random
    memory back-pressure);
  - `tb_q2logic_full` (one run at the default sizes);
  - `tb_circuits` (whole circuits);
  - shared reference packages and the memory model.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and ends with `$finish`. It
also has a watchdog. With Verilator 5, from the repository root:

```
verilator --binary --timing --assert -y rtl +libext+.sv -Irtl -Itb \
  rtl/q2l_pkg.sv tb/fp_ref_pkg.sv tb/q2l_tb_pkg.sv \
  tb/tb_q2logic_top.sv --top-module tb_q2logic_top -Mdir obj_top
./obj_top/Vtb_q2logic_top
```

`-y rtl` lets Verilator find every module by its file name; the packages are listed
explicitly because they are imported, not instantiated. Replace the testbench name for another test. The same
command works for every testbench.

What the tests cover:

- **Block tests.** Each block test compares against a model written independently
  in the testbench. Examples:
  - `tb_bitswitch` is exhaustive;
  - `tb_matvec` checks every output bit and the 3-cycle latency;
  - `tb_qpu` checks the 2^(N_SYSQBITS-1)+4 latency and the full rate;
  - `tb_state_writer` replays the 4-qubit rotation example.
- **`tb_q2logic_top`** runs N_QPU = 4, N_SYSQBITS = 3 and an 8-qubit state. It
  requires every observation mechanism to occur.
- **`tb_q2logic_full`** runs the default configuration (48 QPUs, 2^14 chunks, 2048-bit
  reads) on a 14-qubit state with random unitary gates. It checks all 16384
  amplitudes bit for bit and the run time (about 404,000 cycles). It takes under a
  minute.
- **`tb_circuits`** runs small members of the usual benchmark families on a 4-QPU,
  2-qubit-chunk pipeline. A greedy scheduler inside the testbench places the gates
  and chooses the rotations. Results are compared against an ideal double-precision
  simulation with tolerance 1e-5; the largest error seen is below 1e-7. The circuits:
  - a 4-qubit ripple adder of 23 gates, taking 16 runs;
  - an 8-qubit cat state;
  - a 3-qubit QFT;
  - one Trotter step of a 6-qubit Ising chain;
  - a 4-qubit W state;
  - a 3-qubit swap test, with a Toffoli decomposed into H, T and CNOT;
  - a 5-qubit two-layer variational classifier.

## Trust and limits

- Everything here is checked in simulation only. It has not been synthesized for an
  FPGA or timed.
- The floating-point units are combinational per pipeline stage. A real FPGA build
  would need deeper pipelining or vendor floating-point blocks at 300+ MHz.
- The design assumes a well-formed bitstream: target and control below N_SYSQBITS,
  kind one of the three values. Other values are not checked.
- Only single-qubit and singly-controlled gates exist. Wider gates must be
  decomposed by the host.
