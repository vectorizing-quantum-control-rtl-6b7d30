# HiSEP-Q 2.0 quantum vector control processor — RTL

A quantum control processor has to turn a program into gate pulses on many
qubits at once. It also has to stop when the program needs a measurement result.
This design treats a layer of identical gates as a vector operation. One RISC-V
vector-extension (RVV) instruction names a gate type, a vector register full of
qubit indices, and a start delay. The processor expands it into one *quantum
event* per element, one per cycle. A dispatcher then schedules each event on its
qubit's own timed queue. So eight Hadamards, eight CNOTs or 32 rotations with
individual angles cost one instruction each, not one per qubit.

The RTL covers the vector co-processor with its quantum extension (the QVCP),
its back end and the per-qubit dispatcher. It also includes a simple memory and
a data arbiter, so the whole system runs end to end. The scalar host CPU is not
included. Its ports are brought out, and the testbenches drive them with a
small behavioural RV32I host.

## 1. Instruction set

The quantum instructions use the RVV arithmetic opcode (OP-V, `1010111`) in the
R-type layout. The `funct7` field is reused as a 7-bit gate identifier:

| bits    | 31:25  | 24:20     | 19:15 | 14:12  | 11:7     | 6:0       |
|---------|--------|-----------|-------|--------|----------|-----------|
| field   | GateID | vs2 / rs2 | vs1   | funct3 | Blk_imm  | `1010111` |

| funct3 | class       | qubits from            | parameter (32 bit)                  |
|--------|-------------|------------------------|-------------------------------------|
| 000    | `QV.SINGLE` | vs1                    | scalar rs2 (a tag)                  |
| 001    | `QV.PAIR`   | control vs2, target vs1 | scalar x[vs2] (not interpreted)    |
| 010    | `QV.ROT.G`  | vs1                    | scalar rs2 (one angle for all)      |
| 011    | `QV.ROT.V`  | vs1                    | per element, 32-bit from vs2        |

GateIDs used in the tests: `0x64` H, `0x66` CNOT, `0x68` MEASURE, `0x78` RESUME
marker, and `0x40` / `0x41` for the two rotation tests. Only `0x68` has a
meaning to the hardware: it starts the measurement halt (section 5). The
5-bit `Blk_imm` is a delay in cycles. It is added to the dispatcher's clock when
the event arrives.

How many qubits one instruction addresses comes from the ordinary RVV setting
`vsetvli`. `vl = min(AVL, VLEN*LMUL/SEW)`. With VLEN = 128 and 8-bit indices
that gives 8 (mf2), 16 (m1), 32 (m2), 64 (m4) or 128 (m8) qubits per instruction.
Index and angle vectors are loaded with the unit-stride loads `vle8.v`,
`vle16.v` and `vle32.v`.

`QV.ROT.V` mixes widths. Its indices are 8 bits wide, but its angles in vs2 are
32 bits. So the angle register group is four times as large as the index group
(`LMUL_vs2 = 4 x LMUL_vs1`). With LMUL m4 or m8 the angle group would need 16 or
32 registers, so the decoder refuses `QV.ROT.V` at those settings. It also
refuses it at any SEW other than 8.

**Encoding of `qv.cx`.** The architecture's Bell-state listing prints
`qv.cx` as `CC208657`. That word has funct3 = 000 and the control qubit in vs1.
The class table and the bit-field layout say instead that two-qubit gates are
funct3 = 001 with the control in vs2. This RTL follows the table. The CNOT of
the example is therefore `CC111657`: GateID 0x66, vs2 = v1 (control), vs1 = v2
(target), funct3 001, Blk_imm 12. Every other word of the listing runs
unchanged.

## 2. From instruction to event: the QVCP core

```
host ──issue──▶ qv_xif ──▶ qv_hazard ──┬─▶ qv_lsu ──▶ qv_vrf ◀──┐
     ◀─result── qv_writeback ◀─────────┤                        │
                 (vsetvli, load done,  └─▶ qv_unpack ───────────┘
                  nop, Q-ELEM done)         │ one element / cycle
                                            ▼
                                         qv_qelem ──▶ quantum sideband (events)
```

* **`qv_xif` / `qv_decoder`.** Together these decode an offered instruction and
  answer *accept* or *refuse* in the same cycle. Refused means not a
  co-processor instruction, or illegal under the current `vtype`; the host then
  treats it as an illegal instruction. `vsetvli` updates `vl`/`vtype` at once
  and returns the new `vl` as its result. Loads and quantum instructions go into
  the instruction queue. The values of rs1 and rs2 travel with the instruction:
  the load base address, or the 32-bit tag or angle.
* **`qv_hazard`.** An in-order queue of 4 instructions that issues to two
  pipelines, which run at the same time. Loads go to the load unit; quantum
  instructions go to the unpack pipeline. A scoreboard of register-group masks
  keeps the two apart:
  * *read-after-write:* a quantum instruction whose index or angle group is
    still being loaded waits;
  * *write-after-read:* a load into a group the quantum pipeline is still
    reading waits.

  A group is `ceil(vl*bytes_per_element/16)` registers. For `QV.ROT.V` the vs2
  group uses 4 bytes per element. A quantum instruction with `vl = 0` produces
  no events and completes directly.
* **`qv_lsu`.** Loads one 32-bit word per memory access and writes it into the
  register group with byte enables. Bytes past `vl` keep their old value
  ("tail undisturbed").
* **`qv_unpack`.** Holds the dispatched instruction and steps an element
  counter. Each cycle it reads element *i* from the two register ports: the
  index from vs1, plus the control index from vs2 or the 32-bit angle from the
  4x group of vs2. It emits one element record per cycle. The first element
  appears two cycles after dispatch, so an instruction of *n* elements takes
  about *n* + 2 cycles.
* **`qv_qelem`.** Turns each element into a quantum event: class, GateID,
  Blk_imm, qubit(s), parameter, first/last flags and measurement flag. On the
  last element it hands the instruction's completion to the result mux. For a
  measurement it also pulses `meas_drained`, meaning the measurement's last
  event has left the core. The last element is held back while the completion
  slot is full, so no completion can be lost.
* **`qv_writeback`.** Returns one result per accepted instruction to the host,
  in round-robin order over its four sources.

## 3. Per-qubit scheduling: the dispatcher

`qv_adapter` buffers the event stream (2 entries). It adds a sequence number
that is the same for all events of one instruction, and exports the stream for
observation (`qev_*`).

`quantum_dispatcher` keeps a free-running 16-bit clock `now`. An arriving event
gets the due time `now + Blk_imm` and goes into the `timed_fifo` of its qubit.
Each of the 32 `timed_fifo`s holds 4 entries. It raises `fire_o[q]` for one
cycle when the head entry's due time is reached, together with the GateID, the
role, the partner qubit and the 32-bit parameter. Due times are compared as a
wrap-safe difference, so the clock may roll over.

* **Two-qubit gates.** These take one entry at the control (role CTRL, partner
  = target) and one at the target (role TGT, partner = control), with the same
  due time.
* **MEASURE.** A firing with this GateID also raises `meas_trigger_o[q]`.
* **Full queue.** If a destination queue is full, the event waits (back-pressure
  up the whole pipeline). Nothing is overwritten.
* **Bad events.** An event whose qubit index is 32 or more, or a pair whose two
  qubits are the same, is accepted and dropped. The `drop` status flag marks it.

Since events arrive one per cycle and each due time counts from arrival, the
gates of one instruction fire on consecutive cycles, in element order.

## 4. Memory side

`qv_memory` is a 16 KiB word memory with three ports, each answering one cycle
after the request:

* instruction fetch for the host;
* a data port behind `data_arbiter`, which is shared by the host's loads and
  stores and the vector load unit. On a conflict the arbiter alternates
  between the two requesters.
* a write-only port through which the readout side deposits measurement results.

The platform's instruction and data caches are not modelled. The memory stands
where they would be.

## 5. Measurement halt and resume

This is the part that couples the quantum and classical timelines.
`qv_synchronizer` moves through four states:

1. **Measurement accepted.** When `qv_xif` accepts a `QV.SINGLE` with GateID
   0x68 and `vl > 0`, `irq_qvsg_meas_o` rises on the next clock edge. While it
   is high the offload interface accepts nothing, and the host halts. The halt
   is raised at *commit*, long before the pulses play, so no later classical
   instruction can run ahead of the result it may depend on.
2. **Drain.** The synchronizer waits for `meas_drained`, the last MEASURE event
   leaving the core. It then pulses `issued_done_o`.
3. **Wait for readout.** It waits for `measure_done_i` from the readout
   electronics. A `measure_done_i` that arrives during the drain is remembered.
   One that arrives with no measurement pending sets the `spurious` status flag.
4. **Release.** `irq_qvsg_meas_o` falls `RESUME_DELAY` = 2 cycles after
   `measure_done_i`. The host then continues, typically with the RESUME marker
   and with loads of the results from memory.

The end-to-end test runs the Bell program. It measured the following (cycles
from the host's first fetch, with the published trace in brackets):

| event                         | this RTL | published |
|-------------------------------|---------:|----------:|
| halt raised                   | 19       | 31        |
| first H fires                 | 33       | 60        |
| first CNOT fires              | 42       | 83        |
| first MEASURE fires           | 51       | 106       |
| `measure_done` (readout model)| 105      | 153       |
| halt released                 | 107      | 155       |
| first RESUME fires            | 125      | 177       |

The absolute numbers are smaller. The host model issues one instruction every
few cycles, the memory answers in one cycle and there are no caches. The order
of events and the 2-cycle release match. The readout model waits 47 cycles
after the last trigger, which is the 106→153 gap of the published trace.

## 6. Top level (`hisepq_top`)

| group               | ports                                                                  |
|---------------------|------------------------------------------------------------------------|
| offload (host)      | `issue_valid_i/ready_o/instr_i/rs1_i/rs2_i/id_i`, `issue_accept_o`; `result_valid_o/ready_i/id_o/data_o/we_o` |
| halt                | `irq_qvsg_meas_o` (host must not run while high)                       |
| host fetch          | `instr_req_i`, `instr_addr_i`, `instr_rvalid_o`, `instr_rdata_o`       |
| host data           | `data_req_i/gnt_o/we_i/be_i/addr_i/wdata_i/rvalid_o/rdata_o`           |
| readout             | `measure_done_i`, `meas_we_i`, `meas_addr_i`, `meas_wdata_i`           |
| per-qubit firing    | `fire_o[N]`, `fire_gate_o`, `fire_role_o`, `fire_partner_o`, `fire_param_o`, `meas_trigger_o` |
| observation         | `qev_valid_o`, `qev_o`, `issued_done_o`, `now_o`, `status_o`, `vtype_o`, `busy_o` |

`status_o` holds single-cycle flags:

| bit | meaning                              |
|-----|--------------------------------------|
| 0   | RAW stall                            |
| 1   | WAR stall                            |
| 2   | instruction refused                  |
| 3   | dispatcher back-pressure             |
| 4   | event dropped                        |
| 5   | arbiter conflict                     |
| 6   | stray `measure_done`                 |
| 7   | current `vl` is 0                    |

`busy_o` is high while an instruction or a scheduled gate is still
outstanding.

Handshake rules: the host holds an offered instruction stable until it is
taken (an assertion in `qv_xif` checks this). Memory ports use req/gnt plus a
later rvalid.

Parameters (defaults):

| parameter      | default | note                                   |
|----------------|--------:|----------------------------------------|
| `VLEN`         | 128     |                                        |
| `N_QUBITS`     | 32      | the evaluated configuration            |
| `QDEPTH`       | 4       | instruction queue                      |
| `TF_DEPTH`     | 4       | entries per qubit                      |
| `TS_W`         | 16      | dispatcher clock width                 |
| `MEM_WORDS`    | 4096    |                                        |
| `RESUME_DELAY` | 2       |                                        |

## 7. Where this RTL departs from the architecture description

* **Not included:**
  * the host core (an unmodified third-party RV32IMC core);
  * the instruction and data caches;
  * the ordinary vector ALU/multiplier of the reused vector engine;
  * the readout electronics and pulse generators.
* **Load unit:** only unit-stride loads. There are no vector stores, strided or
  indexed accesses, or masking.
* **`qv.cx`:** encoded per the class table, not per the listing (section 1).
* **Release delay:** the halt drops 2 cycles after `measure_done`, as in the
  published trace. The text elsewhere gives 8 cycles "to resume normal
  execution". Here the time until the host runs again depends on the host; with
  the model host the next instruction is accepted within a few cycles.
* **Numbers chosen here,** where the description gives none:
  * queue depths (4 instructions, 4 gates per qubit, 2 events in the adapter);
  * the 16-bit scheduling clock;
  * the 16 KiB memory;
  * back-pressure rather than overflow in the dispatcher;
  * dropping out-of-range qubit indices;
  * round-robin arbitration.
* **Pipeline wrapper and unpack:** the description draws them as two stages.
  Here they are one module: the operand latch of `qv_unpack` is the wrapper.
* **Timing and resources:** not tuned to match the FPGA prototype. The speed-up
  study against the earlier processor, the resource table and the N = 8…128
  scaling sweep are not reproduced. `N_QUBITS` is a parameter. The full system
  has been simulated at 32 qubits only. The dispatcher alone has been simulated
  at 8, 16, 32, 64 and 128 qubits.
* **Framing overhead:** there is none. Every instruction class emits exactly
  one event per cycle from its first to its last element (section 8).

## 8. Verification

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`.

| testbench               | what it checks |
|-------------------------|----------------|
| `tb_qv_decoder`         | every instruction class, vl/vlmax for all LMULs, illegal cases |
| `tb_qv_xif`             | accept/refuse, routing, pause and queue-full stalls |
| `tb_qv_hazard`          | RAW, WAR, the 4x ROT.V group, vl = 0, order, full queue |
| `tb_qv_vrf`             | random byte-enabled writes against a shadow copy |
| `tb_qv_lsu`             | loads of 8/16/32-bit elements with random memory latency, tail bytes kept |
| `tb_qv_unpack`          | element streams at e8/e16, pairs, mixed-width ROT.V, one element per cycle |
| `tb_qv_qelem`           | event fields, completion ids, hold-back of the last element |
| `tb_qv_writeback`       | random completions from 4 sources, each returned once |
| `tb_qv_core`            | Bell sequence plus ROT.V through the whole core |
| `tb_qv_synchronizer`    | drain, early/late/stray `measure_done`, 2-cycle release |
| `tb_qv_adapter`         | order, qualifiers and sequence numbers under back-pressure |
| `tb_timed_fifo`         | firing at the due time, order, counter wrap |
| `tb_quantum_dispatcher` | due times, pair roles, back-pressure, drops |
| `tb_data_arbiter`       | response routing and alternation on conflicts |
| `tb_qv_memory`          | all three ports and the write priority |

`tb_hisepq_top` runs the full system at its default parameters. It uses the
host model (`tb/host_model.sv`) and a readout model. It runs the Bell program
and then a second program with:

* an m2 `QV.ROT.V` with 32 per-qubit angles;
* a `QV.ROT.G`;
* a refused `QV.ROT.V` at m4;
* an m8 burst of 128 indices that overloads one qubit and names four invalid
  qubits;
* a reload of a register group that is still being read;
* host loads racing the vector loads;
* a `vl = 0` instruction;
* a read-back of measurement results;
* a stray `measure_done`.

It counts each mechanism: RAW and WAR stall, halt and resume, back-pressure,
refusal, drop, arbiter conflict, `vl = 0` and stray done. A mechanism that never
occurs counts as a failure.

`tb_workloads` runs benchmark circuits on the full system, also at default
size:

* GHZ-16: H, then a 15-long CNOT chain as a single `QV.PAIR`;
* GraphState-32: H, then CZ on the even and the odd ring edges;
* one QAOA-16 layer on a ring;
* TwoLocal-16, with per-qubit RY angles;
* QFT-8: for each qubit, an H, then all controlled phases onto it as one
  `QV.PAIR`.

The testbench works out the gate list that each qubit must receive, in order,
from the circuit itself, and checks every firing against it. It also sweeps the
width of one instruction from 8 to 128 qubits, for each class. `QV.ROT.V` stops
at 32 qubits (m2). For every class and width, the first event leaves 5 cycles
after the host hands over the instruction. The last event follows *n* − 1
cycles later, *n* + 4 cycles after hand-over. That is exactly one event per
cycle.
The published measurements show a small extra overhead for `QV.PAIR` and
`QV.ROT.G` at large widths. This RTL has no such overhead.

| circuit       | firings | cycles (program start to idle) |
|---------------|--------:|-------------------------------:|
| GHZ-16        | 31      | 58                             |
| GraphState-32 | 96      | 134                            |
| QAOA-16       | 112     | 172                            |
| TwoLocal-16   | 62      | 171                            |
| QFT-8         | 64      | 172                            |

The GateIDs for RZ, RY, RX, CZ and the controlled phase in these tests (0x40,
0x41, 0x42, 0x67, 0x6A) are arbitrary. The hardware does not interpret them.
A `QV.PAIR` carries one scalar parameter for the whole instruction. So the
QFT's different phase angles are not represented: only the gate order is
tested.

`tb_dispatcher_scaling` runs the dispatcher at 8, 16, 32, 64 and 128 qubits
side by side. Each size gets 600 random events, including invalid ones and
bursts that fill a queue. A reference model gives the exact cycle of every
firing, and each firing is checked against it.

To run one testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/hisepq_pkg.sv tb/tb_hisepq_top.sv \
          --top-module tb_hisepq_top -Mdir obj && obj/Vtb_hisepq_top
```

The testbenches read no files. They sample outputs on the falling clock edge
and drive inputs just after the rising edge.
