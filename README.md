# EARTH: strided and segment vector memory access in SystemVerilog

This is a synthesizable SystemVerilog model of the vector memory-access unit
described in "Efficient Architecture for RISC-V Vector Memory Access" (EARTH).
It covers:

- **Coalescing of strided accesses.** One memory request carries every element
  of a strided access that lies in the same MLEN-bit line.
- **Shift networks instead of crossbars.** A gather shift network (GSN) and a
  scatter shift network (SSN) reorganize the data. Both are built from
  shift-count-controlled nodes.
- **Segment accesses without segment buffers.** The register file can be
  accessed by row (one register) and by column (the same element of up to 8
  registers).

The default configuration is the paper's main one ("P-Config"):

| Setting | Value |
|---|---|
| VLEN = DLEN = MLEN | 512 bits |
| ELEN | 64 bits |
| Register-file banks | 8 |
| Vector registers | 32 |
| Rows per bank | 32 |

All sizes live in `rtl/earth_pkg.sv`.

## Structure

```
earth_top
├── vlsu                         load/store unit
│   ├── vmem_iq  (x2)            VLIQ / VSIQ instruction queues
│   ├── addr_seq (x2)            LAS / SAS address sequencers (coalescing)
│   ├── lifq                     load in-flight queue (tag = entry index)
│   ├── lrob                     load reorder buffer
│   ├── sifq                     store in-flight queue + issue FSM
│   ├── sau                      store acknowledgement unit
│   └── lsdo                     load/store data organizer
│       ├── reverser (x2)        negative-stride element reversal
│       ├── drom     (x2)        gather (load) / scatter (store)
│       │   ├── scg              shift count generation
│       │   ├── ssn  (x2)        node-control generation / data scatter
│       │   └── gsn              data gather
│       └── byte_shifter (x2)    alignment to the line / register offset
└── rcvrf                        row/column-accessible register file
    ├── shifted_vrf              8 banks x 32 rows x 64 bits, diagonal mapping
    ├── block_shifter (x3)       bank order <-> register/column order
    └── drom (x2)                column scatter (write) / column gather (read)
```

The shift networks are built from `sn_input_node`, `sn_switch_node` and
`sn_output_node`. Each network has log2(N)+1 node layers with N = MLEN/8 = 64
byte columns.

## Top-level interface (`earth_top`)

- **Instructions.** `ld_instr_*` and `st_instr_*` use valid/ready. A
  `vinstr_t` gives:
  - the kind: unit-stride, strided, unit segment or strided segment;
  - the element width, NF and EMUL;
  - the first register, the base address, a signed byte stride and vl.
- **Memory.** Every request covers one aligned 64-byte line. Answers carry the
  request's 3-bit tag and may return in any order.
  - Loads: `ld_req_*` (address and tag) and `ld_resp_*` (tag and line).
  - Stores: `st_req_*` (address, line, byte mask and tag) and `st_ack_*` (tag).
- **Datapath register port (`vu_*`).** A row write port with a byte mask and a
  row read port. It stands in for the vector datapath and is served only in
  cycles the load/store unit does not use. The load/store unit is never
  stalled.
- **Status.** `busy` is high while any instruction is in flight.
  `ld_coalesced` pulses for each strided load request that carries more than
  one element.

## How an access flows

**Load**

1. The instruction waits in the VLIQ.
2. The LAS splits it into memory operations (mops) and sends one mop per
   cycle. A unit-stride or strided mop holds every element at
   `base + e*stride` that lies in the first element's line. It stops at the
   end of the destination register and at vl. For segment instructions there
   is one mop per segment, or two if the segment crosses a line.
3. Each mop takes a LIFQ entry and sends a request tagged with the entry
   index.
4. Responses are parked in the LROB by tag. The LIFQ head leaves as soon as
   its data is present.
5. The LSDO organizes the line in one cycle:
   - unit-stride: a rotation only;
   - strided: the Reverser (negative strides), then a DROM gather, then a
     rotation;
   - segment: a rotation to byte 0.
6. The LSDO writes the register file: a row write, or a column write for
   segments.

**Store**

1. The instruction waits in the VSIQ.
2. The SAS splits it into mops.
3. The SIFQ reads the register data with a row read, or a column read for
   segments.
4. The LSDO store path (Byte Shifter, then DROM scatter, then Reverser)
   builds the line and byte mask.
5. The request is sent.
6. The SAU retires entries in order as acknowledgements arrive in any order.

**DROM.** The SCG computes
`shiftCnt_i = (stride - EEWB) * floor(i / EEWB) + offset` for each
compact-side byte i. The first SSN scatters these counts to the line side,
giving the GSN's node control and the byte mask. Control and data are
registered. In the next cycle the GSN gathers (loads), or a second SSN
scatters (stores).

**RCVRF.**
- *Placement.* Block j of register i is held in bank `(i + j) mod 8`, row
  `(floor(i/8)*VLEN/ELEN + i mod 8) mod 32`.
- *Row access.* A row access rotates by the register number.
- *Column access.* A column access addresses register `vreg + q` in the bank
  that holds logical position q. It rotates by the register number, then runs
  a DROM with stride `EMUL*ELEN/8`. That moves the chosen byte of each field
  between the line and the field's block.

## Timing

| Path | Timing |
|---|---|
| Address sequencer | one mop per cycle |
| Unit-stride loads (ideal memory) | one 64-byte line per cycle, checked by the end-to-end test |
| DROM, LSDO load path, LSDO store path | one operation per cycle, 1-cycle latency |
| LROB head to register write | 1 cycle |
| Register-file reads | data 1 cycle after the request |
| Register-file writes | seen by reads requested 2 or more cycles later; there is no bypass |
| Stores | one mop every 4 cycles: register read, organizer, capture, request |

The paper gives no cycle counts for these units. All the latencies above are
this design's choices.

## Verification

Every block has a self-checking testbench in `tb/`. Each one:
- compares the block against a reference built independently of the RTL;
- ends with a `TB_RESULT` line;
- has a watchdog.

A copy of each block with one deliberate fault was run against its testbench,
and every fault was detected.

`tb/earth_top_tb.sv` runs the full-size top with no parameter overrides,
against `tb/mem_model.sv`. The memory model has random back-pressure,
out-of-order answers and random latency.

- **Registers.** All 32 registers are filled through the datapath port.
- **Instruction mix.** 24 batches of random instructions, loads and stores in
  separate batches. They cover:
  - all element widths and EMUL 1..8;
  - positive, negative, zero and small strides;
  - unit and strided segments with 2..8 fields.
- **Checking.** An ISA-level reference model is kept. After each load batch,
  all registers are read back and compared. After each store batch, all
  64 KiB of memory are compared.
- **Mechanisms.** The test counts each of these and fails if any never
  happened:
  - coalesced strided loads and stores;
  - negative-stride mops;
  - segment splits across lines;
  - column writes and column reads;
  - out-of-order load responses and store acks;
  - a full LIFQ;
  - a full instruction queue;
  - back-pressure on both directions of the datapath port.

`tb/vlsu_tb.sv` tests the load/store unit alone, with a behavioural register
file.

## Where this design departs from, or goes beyond, the paper

- **Shift-count index.** The SCG text says i is the destination position for
  scatter and the source position for gather. The worked example (stride 4,
  EEWB 2, offset 2) only works with i as the compact-side byte. The design
  follows the example.
- **Register-file figure.** The register-file figure labels its top row
  "Row16". The formula gives rows 0..15 for VLEN = 256, and the design follows
  the formula. The text also says "VLEN=256, ELEN=256" where the figure
  caption says ELEN = 64; the design follows the caption.
- **Scatter uses two SSNs.** The paper's scatter uses one SSN in "dual roles".
  The design uses two SSN instances so a scatter can start every cycle.
- **Reverser and Byte Shifter insides.** The paper gives their jobs only. The
  design uses element-order reversal and circular rotation.
- **Coalescing limits.**
  - A mop also ends at the end of a register.
  - Strides smaller than the element width, including 0, are not coalesced.
  - Addresses must be aligned to the element size.
- **Load/store ordering.** Loads and stores are not ordered against each
  other. The issuer must not overlap a load with an older store to the same
  bytes.
- **Invented sizes.** Queue depths (instruction queues 4, in-flight queues 8),
  the 32-bit addresses and the datapath port are this design's own.

## Not implemented

- **Indexed loads and stores.** The paper keeps Saturn's indexed path, which
  is not modelled, so the LUT4 benchmark cannot run.
- **Masked memory instructions, vstart and fault-only-first loads.**
- **The E-Config (MLEN 128 < VLEN 256).** The unit requires MLEN = VLEN, and
  an assertion checks it.
- **Parts taken from elsewhere.** The scalar core, the Saturn frontend (trap
  checks), the vector arithmetic datapath, the L2 cache and DDR4 memory are
  not part of this design. The memory is only a behavioural testbench model.

## Evaluated workloads

The paper evaluates these benchmarks:
- OpenBLAS: sgemm, ssymm, stpmv, cgemm, csymm and ctpmv;
- Buddy-MLIR: BatchMatMul SCF;
- RVV-Bench: yuv2rgb and LUT4;
- its own stride-intensive and segment-intensive programs.

It gives their access patterns but not their data sizes. The unit streams
data, so only the access pattern decides whether a workload can run:
- unit-stride, strided and segment patterns are supported (any stride, up
  to 8 fields);
- LUT4 needs indexed accesses, which are not supported;
- the E-Config does not fit.

`tb/workload_tb.sv` runs each pattern on the full-size unit with an ideal
memory. The memory is always ready and answers 3 cycles after a request. The
test checks three things:
- The request count equals the number of (line, register) pieces the
  elements fall into.
- Registers match the reference after the loads.
- Memory matches the reference after the stores.

| Pattern | Elements | Load requests | Load cycles | Store cycles |
|---|---|---|---|---|
| unit-stride e32, 2 registers (sgemm, ssymm, stpmv) | 128 | 8 | 15 | 39 |
| strided e32, stride 8 (cgemm) | 32 | 4 | 11 | 23 |
| strided e32, stride -8 (ctpmv) | 32 | 4 | 11 | 23 |
| strided e32, stride 256 (BatchMatMul) | 16 | 16 | 23 | 71 |
| 2-field e32 segments (csymm) | 32 | 16 | 23 | 71 |
| 3-field e8 segments (yuv2rgb) | 192 | 66 | 73 | 271 |
| stride sweep e8, byte strides 2 / 8 / 32 / 64+ | 64 | 3 / 9 / 33 / 64 | 10 / 16 / 40 / 71 | 19 / 43 / 139 / 263 |
| field sweep e8, 2..8 fields | 128..512 | 64..70 | 71..77 | 263..287 |

Two things show in these numbers:
- **Coalescing gain.** It is largest for small strides, as in the paper. At
  stride 2, 64 elements need 3 requests instead of 64.
- **Store cost.** Stores cost four cycles per request here. That comes from
  this design's simple store issue machine, not from the paper.
