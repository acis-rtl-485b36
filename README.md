# ACiS payload pipeline: collective processing inside a switch pipe

MPI collectives such as allreduce, gather and broadcast spend most of their
time moving data between nodes and a host CPU, which then combines it.
Doing the combining in the switch the data already goes through removes round
trips. A programmable switch cannot do this on its own. Its match-action
pipeline looks only at packet headers, but the MPI fields (communicator,
ranks, tag, operation) sit in the payload. The work is also more than
header rewriting: it includes element-wise reductions, rank ordering and user
functions with loops and memory.

This RTL builds the *payload pipeline* that sits beside one pipe of such a
switch. The pipeline is made of plugins, each adding one capability:

| plugin | capability |
|---|---|
| payload parser / deparser | make MPI fields in the payload visible, and put them back |
| collective control table | communicator context: group size, where results go, CGRA use |
| aggregation unit | element-wise reduction or rank-ordered gather over all group members, including contributions from the other pipes |
| multicast engine | one result copied to any set of pipes |
| CGRA of three SIMD processing units (SPUs) | user map functions between collectives (e.g. a prefix sum between two allgathers), with loops and access to off-chip memory banks |
| recirculation input | lets a result come back in for the next collective of a chain |

Packets that do not belong to ACiS skip all of it through a payload bypass
queue. Headers keep going through the switch's own header pipeline; a header
queue carries them around the accelerator.

## Data path

```
 pl_in ─┐                        ┌──────── payload bypass queue ─────────────┐
        ├─ in_mux ─ payload ─────┤                                           ├─ out_mux ─ pl_out
 rc_in ─┘   (per    parser       └─ collective ─ pipe_mux ─ aggregation ─┐   │
         packet RR)                 control       ▲          unit        │   │
                                    table         │                      │   │
                                  op_in[0..2] ────┘  ┌─ cgra ─┐          │   │
                                  (other pipes)      │        │ ◄─ to_cgra┤  │
                                                     └─dep_mux┴── direct ┘   │
                                                         │                   │
                                                   payload deparser          │
                                                         │                   │
                                                  multicast engine ── pipe 0 ┘
                                                         └── pipes 1..3 ─ mc_out
 hdr_in ─────────────────── header queue ─────────────────────────────── hdr_out
```

Every stream uses valid/ready handshakes. A beat is moved when both are
high. A *beat* is `LANES = 3` words of 32 bits plus a `last` flag (`beat_t`
in `acis_pkg`), i.e. 12 bytes. Packets never interleave on a link. Each
merge point (`pkt_arbiter`) does round robin and holds a grant from a
packet's first beat until its `last` beat.

* **in_mux** merges ingress payload and recirculated packets.
* **payload_parser** takes the first beat of a packet as the payload header.
  If the header's ACiS bit is 0, the whole packet goes unchanged to the
  payload bypass queue. Otherwise the header is decoded into `meta_t` and
  dropped, and each data beat leaves with that metadata attached.
* **collective_ctrl** looks up the communicator id in a table of
  `NUM_COMM` entries (one-cycle registered lookup) and attaches `ctl_t`:
  hit, group size, CGRA enable, multicast mask.
* **pipe_mux** merges this pipe's packets with the contributions coming from
  the other pipes (`op_in`). Those have already been parsed and looked up in
  their own pipe, so they arrive as `mbeat_t`.
* **aggregation_unit** (next section).
* After aggregation a packet takes the CGRA if `ctl.hit && ctl.cgra_en`.
  Otherwise it goes on directly. `dep_mux` merges the two paths.
* **payload_deparser** writes a fresh header beat. It holds the packet's
  metadata with `nbeats` set to the length the packet has now. Every beat is
  tagged with the communicator's multicast mask; a table miss goes to pipe 0
  only.
* **multicast_engine** offers each beat to every pipe in its mask. It holds
  the beat until all of them have taken it, and each output may accept in a
  different cycle. Pipe 0 is this pipe's own egress, merged with the bypass
  queue by `out_mux`. Pipes 1..`NUM_PIPES-1` leave on `mc_out` (shared beat,
  one valid/ready per pipe).

Steady-state throughput is one beat per cycle through each block. The
exceptions are the aggregation unit while it sends a result, and the CGRA,
which runs as fast as its slowest SPU program.

## Payload header

First beat of a packet on `pl_in`, `rc_in` and `pl_out`:

| word | bits | field |
|---|---|---|
| 0 | 31:24 | `comm_id` – index into the communicator table |
| 0 | 23:20 | `coll` – 0 pass (no aggregation, e.g. broadcast), 1 reduce, 2 gather |
| 0 | 19:16 | `op` – 0 sum, 1 prod, 2 max, 3 min, 4 and, 5 or, 6 xor |
| 0 | 15:12 | `dtype` – 0 int32, 1 uint32 (matters for max/min) |
| 0 | 0 | ACiS bit – 1: process, 0: payload bypass |
| 1 | 31:16 / 15:0 | `src_rank` / `tag` |
| 2 | 31:16 / 15:0 | `nbeats` (data beats after the header) / `dst_rank` |

`pack_header` and `unpack_header` in `acis_pkg` convert between this beat and
`meta_t`. The layout is this design's own. It follows the MPI envelope
(communicator, ranks, tag, count) plus the collective's operation and type.

## Aggregation

The aggregation unit is the part to understand before using the design.
Each communicator owns a slot of `AGG_BEATS` (default 256) buffer entries of
one beat each, so collectives on different communicators can be in progress
together. There is also one contribution counter per communicator.

* **Reduce.** Beat *i* of a contribution is combined element-wise into entry
  *i*. The first contribution writes; later ones read-modify-write with the
  packet's `op` and `dtype`.
* **Gather.** The contribution of rank *r* is written to entries
  `r*nbeats … r*nbeats+nbeats-1`. The result is therefore in rank order
  whatever order the packets arrive in, from whichever pipe.
* **Pass, or table miss.** The packet is forwarded at once.

When the counter reaches the communicator's `group_size`, the slot is sent
out one beat per cycle, and the counter clears. The result has `nbeats`
beats for a reduce and `nbeats*group_size` beats for a gather. Its metadata
is that of the last contribution to arrive (`src_rank` therefore names that
contributor). Input is held off while a result is being sent.

Rules a user must respect (an assertion checks the first):

* A reduce contribution must have at most `AGG_BEATS` beats. A gather needs
  `nbeats*group_size ≤ AGG_BEATS`. A 1408-byte MTU packet is 118 beats, so a
  two-member gather of such packets (236 beats) fits.
* Aggregation is per packet. A longer message is aggregated as a series of
  rounds, one packet per member per round. A slot holds one round. The
  hardware does not hold back a member's round *k+1* packet that arrives
  before round *k* has completed; the senders must pace themselves.
* All members of a round must use the same `nbeats`, `op` and `dtype`.

## CGRA and the SPUs

The CGRA runs user map functions on a completed result. It consists of:

* LANES Stream-In FIFOs and a disassembler that forms vector beats;
* a side FIFO that carries the packet's metadata around the SPUs;
* `NUM_SPU = 3` SPUs connected directly in a chain, each with its own
  program and its own memory bank;
* an assembler with Stream-Out FIFOs.

The assembler holds a whole output packet (up to `OUT_DEPTH` = 256 beats).
When the last beat arrives it releases the metadata with `nbeats` set to the
beats actually produced. A map function may therefore shorten a packet: a dot
product returns one beat.

### SPU

Each SPU is single-issue and executes one instruction per cycle. It has:

* a 32-entry scalar register file (`x0` = 0);
* `NUM_VREG = 8` vector registers of LANES words;
* `NUM_AR = 4` auto-increment address registers;
* read and write masters to its memory bank (addresses in beats).

A program runs once per packet. It starts at pc 0, with `x31` cleared, when
the first beat of a packet reaches the SPU. It ends at `HALT`, at an illegal
instruction, or when pc reaches the program length. A typical program loops
`POP … PUSH` until `x31` (the last flag of the popped beat) is 1, then ends
with `PUSHL`. It must push exactly one `PUSHL` per packet. An SPU with
program length 0 is bypassed.

Stalls:

* `POP` waits while the input is empty;
* `PUSH` waits while the output is not ready;
* `VLD` waits for read data;
* `VST` waits for the write acknowledgement.

### Instruction set

Scalar instructions are RV32I/M encodings:

* `OP-IMM`: addi, andi, ori, xori, slti, slli, srli;
* `OP`: the same register-register forms plus sub and `mul`;
* `LUI`;
* branches: beq, bne, blt, bge.

Other RV32I encodings (loads, stores, jumps, arithmetic shift, unsigned
compares) count as illegal and end the run.

Vector and stream instructions use the R-type layout in the two custom
opcodes:

| opcode | selector | instruction | effect |
|---|---|---|---|
| custom-0 `0001011` | funct7 0–7 | `V.ADD SUB MUL MAX MIN AND OR XOR` | `vd = vs1 op vs2` (MAX/MIN signed); with funct3[2]=1 the second operand is `x[rs2]` in every lane |
| | funct7 8 | `V.SLIDEUP` | `vd = vs1` moved up by the rs2 field, zero fill |
| | funct7 9 | `V.REDSUM` | `x[rd] = Σ lanes of vs1` |
| | funct7 10 | `V.EXT` | `x[rd] = vs1[lane rs2 field]` |
| | funct7 11 | `V.SPLAT` | `vd = x[rs1]` in every lane |
| | funct7 12 | `V.MAC` | `vd = vd + vs1 * vs2` (multiply-accumulate) |
| custom-1 `0101011` | funct3 0 | `POP` | `vd ← input beat`, `x31 ← last` |
| | 1 / 2 | `PUSH` / `PUSHL` | `output ← vs1`, last = 0 / 1 |
| | 3 | `VLD` | `vd ← mem[ar[rs1]]`, `ar[rs1] += 1` |
| | 4 | `VST` | `mem[ar[rs1]] ← vs2`, `ar[rs1] += 1` |
| | 5 | `SETA` | `ar[rd] ← x[rs1]` |
| | 7 | `HALT` | end of this packet's run |

`tb/spu_asm_pkg.sv` has encoder functions for all of these and four example
programs:

* `psum_prog`: an inclusive prefix sum over a whole packet. Each beat takes
  two slide-and-add steps, then the carry from the previous beat is added.
* `store_prog`: doubles every beat, stores a copy in the memory bank and
  sends the re-loaded copy.
* `dot_prog`: the sum of squares of a packet's elements (a dot product of the
  packet with itself), returned as one beat.
* `spmv_prog`: sparse multiply-accumulate. Each input beat carries
  `{row, a, x}`, and the program adds `a*x` into memory beat `row` with a load,
  `V.MAC` and a store.

### Loading programs

The instruction loader copies each SPU's program from instruction memory into
that SPU's configuration table (CT, `CT_DEPTH` = 64 instructions). It uses one
read master. Instruction memory holds LANES instructions per beat: instruction
*i* of a program is word *i mod 3* of beat `base + i/3`. While a load is in
progress every SPU sees program length 0, so packets pass the CGRA unchanged.

## Control registers (AXI-Lite, 8-bit byte address, 32-bit data)

| address | register |
|---|---|
| 0x00 | CTRL: write 1 to bit 0 to start loading programs |
| 0x04 | STATUS: bit 0 loader busy, bit 1 a load has completed |
| 0x10 + 8·s | SPU *s* program base (beat address in instruction memory) |
| 0x14 + 8·s | SPU *s* program length (0 = bypass) |
| 0x40 | COMM0: `group_size[15:0]`, `cgra_en[16]`, `valid[17]` |
| 0x44 | COMM1: multicast mask (bit *p* = pipe *p*) |
| 0x48 | COMMWR: writing a communicator id stores COMM0/COMM1 in that table entry |

To set up an allreduce over four members whose result goes to all four pipes:
write `0x0002_0004` to 0x40, `0xF` to 0x44 and the communicator id to 0x48.

## Top-level ports of `acis_top`

| group | ports |
|---|---|
| payload in | `pl_in_*` from the ingress parser; `rc_in_*` from recirculation |
| headers | `hdr_in_*` → `hdr_out_*` (header queue) |
| other pipes | `op_in_valid/ready/data[NUM_PIPES-1]` (`mbeat_t`) |
| payload out | `pl_out_*` (this pipe); `mc_out_valid/ready[NUM_PIPES-1:1]` with a shared `mc_out_beat` |
| control | AXI-Lite slave `s_*` |
| memory | `il_rd_*`: instruction read master; `rd_*`, `wr_*`, one per SPU: data bank masters (simplified AXI-MM, one request outstanding) |
| monitors | `ev_*` pulses: recirculation packet, bypass packet, other-pipe packet, reduce done, gather done, CGRA packet, multicast beat, SPU memory access, input stall |

Parameters (defaults): `NUM_PIPES` 4, `NUM_COMM` 8, `AGG_BEATS` 256,
`NUM_SPU` 3, `CT_DEPTH` 64, `Q_DEPTH` 16 (bypass and header queues). The
reset `rst_n` is asynchronous and active low.

## Where this design departs from, or adds to, the published architecture

The switch-level view is taken from the published architecture:

* the order of parser, collective control, aggregation, multicast engine and
  deparser in a payload pipeline next to the header pipeline;
* the payload and header bypass queues;
* the inputs from the other pipes;
* recirculation for chains of collectives;
* a CGRA of three SPUs in a deep pipeline, each with its own memory banks,
  a RISC-V based instruction set with vector support, an instruction loader
  with per-SPU tables, AXI-Lite control and AXI-MM memory masters;
* a metadata path around the SPUs.

Everything below that level is this design's own choice:

* widths, header layout, handshakes and table contents;
* the vector/stream extension and the SPU program model;
* buffer sizes and the register map.

Not built:

* Type-0 stream transformations (data type conversion, CRC append);
* floating-point and sparse or user-defined datatypes in the aggregation
  unit. User-defined operations such as a dot product are meant to run on the
  CGRA;
* cacheable buffers in front of off-chip memory, and data reuse beyond the
  SPU register files;
* alltoall and the other collectives, beyond reduce, gather and pass-through
  (broadcast);
* the rest of the switch: header parser and match-action stages, traffic
  manager, ports. The host-facing transport and the off-chip memories are
  also outside; the testbenches model the memories behaviourally.

Limits to keep in mind are listed under *Aggregation* above: per-packet
rounds, and the buffer size per communicator.

## Files

`rtl/` holds one module or package per file. The packages are `acis_pkg`
(types, header functions, ISA encodings) and `spu_pkg` (decoded-instruction
types). The modules are:

* `sync_fifo` (used for every queue), `pkt_arbiter`;
* `payload_parser`, `collective_ctrl`, `aggregation_unit`;
* `spu_decoder`, `vector_pe`, `spu`, `instruction_loader`, `axi_ctrl`, `cgra`;
* `payload_deparser`, `multicast_engine`;
* `acis_top`.

`tb/` holds a self-checking testbench `tb_<module>` for each block. Support
files there:

* `hbm_model`: a behavioural memory with fixed latency;
* `axi_lite_master`: write and read tasks;
* `spu_asm_pkg`: the encoders and example programs.

`tb_acis_top` runs the whole pipe at the default parameters, with memory
models. It covers:

* a 117-beat allreduce over four members, with outputs back-pressured, and
  the result multicast to all four pipes;
* a 4 × 64-beat gather (the full 256-beat slot) whose members arrive
  shuffled, one of them through recirculation. The result goes through a
  prefix sum on SPU 0 and a doubling through memory on SPU 1;
* a bypassed packet, a table miss and headers.

It compares every output packet with a model and counts each mechanism. Each
testbench prints `TB_RESULT checks=N failures=M`.

Two more testbenches run the collectives the architecture was evaluated with,
at the default parameters:

* `tb_osu_collectives` covers the OSU micro-benchmark collectives:
  * allreduce at 1, 4, 118 and 256 beats per member, with every operator and
    both integer types;
  * gather (root on pipe 0) and allgather at 1, 4 and 64 beats per member;
  * broadcast of single packets and of a three-packet message.
* `tb_allgather_op_allgather` runs the fused collective with a prefix sum.
  Two leaves send 1408 bytes each, the gather goes through the CGRA, and the
  result returns to both leaves. It takes about 2,600 cycles per round from
  the last input beat to the last result beat, mostly SPU program time:
  236 beats at about ten instructions each.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_acis_top \
    -y rtl -y tb +libext+.sv -Irtl -Itb \
    rtl/acis_pkg.sv rtl/spu_pkg.sv tb/spu_asm_pkg.sv tb/tb_acis_top.sv
obj_dir/Vtb_acis_top
```

Replace `tb_acis_top` with any other testbench name. The full top-level test
takes a few seconds. The design is plain synthesizable SystemVerilog-2017 and
also reads into Yosys through its slang front end.
