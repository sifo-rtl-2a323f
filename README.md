# A garbled-circuit garbling overlay for FPGAs

Yao's garbled circuits let two parties compute a function of their private
inputs while each learns only the result. One party, the *garbler*, turns
every gate of a Boolean circuit into a small encrypted table. For a large
circuit, generating those tables is the expensive part, and it is what this
design accelerates.

The design does not build one accelerator per circuit. It is an *overlay*:
a fixed "sea" of garbled-AND cells and garbled-XOR cells, plus a controller
and a memory system, all synthesised once. A host program then maps any
circuit of AND and XOR gates onto the overlay at run time. It levels the
netlist into layers and, for each gate, writes three wire addresses into the
registers of the cell that should run it. The keys (labels) stay on the
board, in on-chip block RAM or off-chip DDR. Only addresses go in, and only
the garbled tables of AND gates come out. Changing the circuit means
changing the address stream, not the bitstream.

The RTL has 15 gAND cells and 15 gXOR cells, a 2 × 65536-word block RAM, a
two-port 512-bit DDR interface and a 32-bit register port. The clock is
200 MHz.

## Garbling as the cells do it

Every wire *w* carries two 80-bit keys: K_w^0 stands for 0 and K_w^1 for 1.
The circuit uses *free XOR*: one global 80-bit offset R links every pair, so
K_w^1 = K_w^0 ^ R. Only the zero key of each wire is therefore stored and
passed around. R must have its least significant bit set. That bit of a key
then serves as the *permute bit*: the two keys of a wire always have
opposite low bits.

**gXOR** (`gxor_cell`) is just `K_out^0 = K_a^0 ^ K_b^0`, an 80-bit XOR. It
needs no table and no cycles.

**gAND** (`gand_cell`) runs four SHA-1 cores in parallel, one per truth-table
row. Row i = 2·x + y uses the input keys ka = K_a^0 ^ x·R and
kb = K_b^0 ^ y·R, and hashes the single 512-bit SHA-1 block

    { ka[79:0], kb[79:0], g[31:0], 1, 255 zero bits, 64'd192 }

This is the 192-bit message `ka‖kb‖g` with standard SHA-1 padding. g is the
gate number. H_i is the top 80 bits of the digest, and the row value is
c_i = H_i for rows 0–2 and c_3 = H_3 ^ R. This amounts to encrypting the
output zero key, taken as 0, for rows 0–2, and the output one key, R, for
row 3, the 1-AND-1 row.

*Garbled-row reduction* then removes one row.

1. Let s = {K_a^0[0], K_b^0[0]}. This is the row whose two input keys both
   have permute bit 0.
2. The output zero key becomes K_out^0 = c_s.
3. Every row is XORed with c_s, so row s becomes all zeros and need not be
   sent.
4. Row i is then placed at table slot i ^ s, its point-and-permute
   position. Slot 0 is the zero row; slots 1–3 are the table sent to the
   evaluator.

The two combinational "arbitrators" do steps 2–4, so the gate's latency
is that of SHA-1: 82 cycles from start to `done`.

The evaluator holds one key per input wire, with permute bits p_a and p_b.
It computes L = H(la, lb, g)[159:80], XORs in table slot {p_a, p_b} (zero
for slot 0), and gets the output key. The testbenches do exactly this
(`sifo_ref_pkg::eval_and`) to prove that the tables are usable, not just
equal to a second copy of the same formula.

## The overlay

```
 host regs ──► command FIFO ──► dispatcher ──► gAND[0..14] (4 × SHA-1 each)
 (PCIe)                           │   ▲  │ ──► gXOR[0..14]
                                  │   │  └──► garbled-table stream ──► host
                    BRAM (2 halves)   DDR (2 × 512-bit ports, 4 keys / word)
```

| module | role |
|---|---|
| `sifo_top` | wires everything together; top-level ports are the register bus, the table stream and two DDR ports |
| `host_regs` | the register file, the address unpacking, and a 32-deep gate-command FIFO |
| `dispatcher` | the workload dispatcher and data controller: fetches operands, starts cells, writes results back, streams tables |
| `gand_cell`, `sha1_core` | the garbled AND gate and its hash core |
| `gxor_cell` | the free-XOR gate |
| `wire_bram` | the ping-pong on-chip wire store |
| `ddr_if` | maps 80-bit wire accesses onto 512-bit DDR words |
| `sync_fifo` | a generic FIFO used by `host_regs` |
| `sifo_pkg` | shared widths, records, the register map, the packing functions and the SHA block layout |

### Wire addresses and the two memories

A wire address is 21 bits: `{index[19:0], flag}`. The flag is the lowest
bit: 1 means BRAM and 0 means DDR. Up to 2^20 wires can be named. The host
decides where each wire lives; the hardware never tracks locations.

- **DDR.** The wire index is the wire's number in the netlist. Wire w sits
  in 512-bit word w >> 2, in 128-bit slot w & 3, using 80 bits of it.
  Port 0 only reads; port 1 only writes, with byte enables that touch
  just the one slot. A request is held until the memory raises
  `complete` for one cycle; the latency may vary.
- **BRAM, under the directly-used policy.** A wire goes to BRAM only if it
  is read exactly once, and by a gate in the very next layer. BRAM is
  split into two halves of 65536 words of 108 bits each (80 used). During
  a layer, gates read from one half and write to the other. The host
  writes CTRL bit 0 between layers to swap the halves. BRAM indices are
  therefore allocated per layer and reused two layers later.

### Host protocol

Word addresses on the 32-bit register bus:

| addr | name | use |
|---|---|---|
| 0x000 | CTRL | write: bit0 = swap BRAM halves, bit1 = reset gate counter (pulses) |
| 0x001–0x003 | R0–R2 | R[31:0], R[63:32], R[79:64] |
| 0x004 | STATUS | read: bit0 idle (queue empty, all cells free), bit1 overflow (sticky, cleared by this read), bit2 current read half, [15:8] queue level |
| 0x005 | DONE | number of gates completed |
| 0x100 + 2n, +1 | cell n | gAND cells n = 0..14, then gXOR cells n = 15..29 |

The three addresses of a gate (ADD1 = input a, ADD2 = input b, ADD3 =
output) are packed into the two registers of a cell:

    reg0 = ADD1[20:0] , ADD2[20:10]
    reg1 = ADD2[9:0]  , ADD3[20:0] , 1 unused bit

Writing the second register queues the gate immediately. The register
pair names the cell, so it also chooses the gate type. The host's work
for one circuit is:

1. Write R, reset the gate counter, and DMA the zero keys of the inputs
   into DDR at their wire numbers.
2. For each layer, write all its XOR gates, then all its AND gates, to
   any free cells. Poll STATUS often enough to keep the queue from
   overflowing, e.g. every 8 gates while the level is at most 24.
3. At the end of each layer, wait for STATUS.idle and swap the BRAM
   halves.
4. Collect `{gid, t3, t2, t1}` records from the table stream; `gid` is
   the gate number g used in the hash. Read output keys from DDR.

The gate number g is the position of the command in the stream since the
last counter reset. The host therefore knows every g without sending it.

### Dispatcher timing

The dispatcher runs two engines side by side.

**The read engine** takes commands in order.

1. A command waits while its target cell is still busy (a *stall*). It
   reads operand A, then operand B.
2. A BRAM operand costs one wait cycle. A DDR operand waits for
   `complete`.
3. In an issue cycle it starts the gAND cell, giving it the shared In1,
   In2 and g buses, or it loads the gXOR cell's input registers.

A gAND gate whose operands are both in BRAM is started 5 cycles after its
command is accepted. With DDR operands, add the two memory latencies.

**The write-back engine** picks a finished cell, lowest gAND first and
then gXOR.

1. It writes the output key: one cycle for BRAM; for DDR, until
   `complete`.
2. For an AND gate, it offers the table on the stream until `gt_ready`.
   This is the stream's *back-pressure*.
3. It frees the cell in a one-cycle reset step.

Reads of later gates overlap the 82-cycle hashing and the write-back of
earlier gates.

With the host at 50 ns per register write (10 cycles), sending one gate
takes 20 cycles. That is slower than the cells, so in practice stalls only
happen for wide BRAM-fed layers, or with a faster host.

## What follows the source design and what is this RTL's own

These follow the published architecture:

- 80-bit keys, free XOR, garbled-row reduction to three rows;
- four SHA-1 cores and two arbitrators per gAND, with 82-cycle latency;
- combinational gXOR;
- 15 + 15 cells;
- the dispatcher's three steps, with one-cycle BRAM waits, DDR waits on
  `complete` and a one-cycle reset step;
- BRAM with one read port and one write port, 108-bit words with 80 bits
  used;
- 512-bit DDR words holding four keys, on two ports;
- three 21-bit addresses packed into two 32-bit registers, with the flag
  bit last and 1 = BRAM;
- the directly-used policy with ping-pong BRAM halves.

These were not specified and were chosen here:

- the SHA-1 block layout and truncation to the top 80 bits;
- the row-selection and slot rule, which is the standard point-and-permute
  construction;
- which SHA-1 cycle does what;
- the register map, the command FIFO and its depth, overflow handling, and
  the STATUS and DONE registers;
- g as a hardware sequence counter;
- in-order issue with stalls on a busy cell, and the write-back priority;
- the DDR slot layout, byte enables and port roles;
- valid/ready on the table stream;
- a single clock domain.

**Differences from the source and open points.**

- **BRAM size.** The source gives 6.75 Mbit of BRAM in one place and
  13 Mbit in another. Two halves of 65536 × 108 bits (13.5 Mbit in total,
  6.75 Mbit per half) matches both, and that is what is built.
- **Allocation policy.** A "most-frequently-used" policy (long-lived wires
  kept in BRAM) is described only as an alternative and is not supported.
  With the ping-pong halves, a BRAM wire can only be read in the layer
  after it is written.
- **Host link.** The host side (PCIe core, DMA, the netlist tools) and the
  DDR controller are outside the RTL. `sifo_top` exposes a plain
  register bus, a valid/ready table stream and two DDR request/response
  ports for them.
- **Garbled tables.** The source's dispatcher diagram draws the garbled
  table going into the memory interface. Its text says only that the
  tables are transferred back to the host. Here they leave the overlay
  directly, on a valid/ready stream meant to feed the host link. No DDR
  bandwidth is spent on them.
- **Cell inputs.** The same diagram shows a "Layer info" input to each
  cell. Here that input is the gate number g, the per-gate tweak that the
  hash needs. Layer boundaries are handled by the host, through STATUS.idle
  and the BRAM swap.
- **Clocks.** The source runs PCIe at 300 MHz and the overlay at
  200 MHz. Here everything is one clock, so there is no clock-domain
  crossing.
- **Timing closure.** 200 MHz timing closure and FPGA resource use are not
  checked here.

## Capacity

The 20-bit wire index limits a circuit to 1,048,576 wires, since wire
numbers are used directly as DDR locations and never reused. The largest
benchmark class quoted for this architecture is a 20 × 20 matrix product
of 4-bit values, with 1,050,800 wires; it does not fit. A 10 × 10 product
of 8-bit values, with 517,500 wires, does.

Per layer, at most 65536 directly-used wires fit in a BRAM half. Circuits
with more, for example 128,000 in the 20 × 20 case, keep the excess in
DDR; they still work, only slower.

The gate counter is 32 bits.

## Verification

Each module has a self-checking testbench in `tb/`. All of them end by
printing `TB_RESULT checks=N failures=M`, and all have watchdogs. The
behavioural parts are:

- `tb/sifo_ref_pkg.sv`: a loop-style SHA-1, the reference garbler and the
  evaluator;
- `tb/ddr_model.sv`: a DDR memory with random 30–42-cycle latency, which is
  about the 180 ns the source quotes at 200 MHz.

| testbench | what it establishes |
|---|---|
| `tb_sha1_core` | FIPS "abc" vector and 20 random blocks against the reference; `done` exactly 82 cycles after start; start while busy ignored |
| `tb_gxor_cell` | random XORs |
| `tb_gand_cell` | 24 gates: output key and all three table slots against the reference garbler; evaluation of all four input combinations gives K^(a AND b); 82-cycle latency; hold and clear |
| `tb_wire_bram` | ping-pong over several layers; one-cycle read latency |
| `tb_ddr_if` | slot mapping, byte enables, both ports at once, variable latency |
| `tb_host_regs` | bit-exact address unpacking, per-cell routing, R, CTRL pulses, queue order, overflow |
| `tb_dispatcher` | small overlay (2 + 2 cells): mixed BRAM/DDR operands, stalls, overlap, back-pressure, 5-cycle BRAM issue timing, 82-cycle gAND timing, every memory write checked |
| `tb_sifo_top` | the full-size overlay (no parameter overrides) |
| `tb_sifo_workloads` | the full-size overlay on the benchmark classes (below) |

`tb_sifo_top` exercises the whole design:

- The host model garbles a 6-bit adder, an 8-bit array multiplier and a
  64-bit "all bits differ" AND tree. It writes only through the register
  bus, at 50 ns per access. A second multiplier run and the AND tree use a
  faster host, 2 cycles per access.
- Every table and output key is compared with the reference garbler.
- The circuit is then evaluated from the tables for 20 random input pairs
  per circuit, and the decoded outputs are checked against a+b, a·b and
  the differ test.
- It counts BRAM and DDR reads and writes, layer swaps, stalls,
  back-pressure, and gAND and gXOR uses. It fails if any of these never
  happens.

`tb_sifo_workloads` garbles the other benchmark classes at full size,
through the same host model, with the same checks and evaluation:

| problem | gates | layers | cycles at 200 MHz | BRAM / DDR accesses |
|---|---|---|---|---|
| 10-bit Hamming distance | 64 | 16 | 6,210 | 32 / 160 |
| 30-bit Hamming distance | 214 | 21 | 17,160 | 120 / 522 |
| 50-bit Hamming distance | 379 | 26 | 29,060 | 226 / 911 |
| 16-bit multiply | 1,412 | 117 | 103,970 | 1,264 / 2,972 |
| 32-bit multiply | 5,892 | 245 | 398,400 | 5,584 / 12,092 |
| 64-bit multiply | 24,068 | 501 | 1,555,590 | 23,440 / 48,764 |
| sort ten 4-bit values | 1,441 | 150 | ~110,000 | ~1,150 / ~3,170 |
| 5 × 5 product of 4-bit matrices | 12,076 | 32 | ~809,000 | 8,700 / 27,528 |

The same testbench also gives `tb_sifo_top`'s runs:

| problem | gates | layers | cycles |
|---|---|---|---|
| 6-bit adder | 28 | 16 | 3,210 |
| 8-bit multiply | 324 | 53 | 27,470 |
| 8-bit multiply, 2-cycle host | 324 | 53 | 25,906 |

Both testbenches share the host model and evaluator in
`tb/sifo_host_model.svh`. The larger matrix products (10 × 10 of 4-bit
values and more) were not simulated. The testbench's netlist arrays stop
at 65536 wires, and those runs would take tens of millions of cycles; the
hardware itself handles them within the capacity limits above.

The cycle counts cover everything from the first register write to the
last swap. Numbers marked ~ vary slightly with the random DDR latency and
back-pressure.

Gates cost about 65 cycles each, and two things set that rate:

- The host needs 20 cycles to send a gate.
- The read engine fetches operands one at a time, so a gate whose two
  operands are both in DDR occupies it for roughly two 36-cycle DDR
  latencies.

The cells are rarely the limit. Moving more wires into BRAM is what speeds
a circuit up, which is the purpose of the directly-used policy. Fetching
several operands at once is the obvious next step, but it is not built
here.

The adder and multiplier netlists are generated in the testbench in the
usual garbled-circuit style (one AND per full adder). Their gate counts are
close to, but not the same as, those of the netlists the source design
was measured with.

To run one of the testbenches with Verilator 5:

    verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps -Irtl -Itb -y rtl -y tb \
      rtl/sifo_pkg.sv tb/sifo_ref_pkg.sv tb/tb_sifo_top.sv \
      --top-module tb_sifo_top -o sim && obj_dir/sim

Replace `sifo_top` with another module name to run that module's
testbench. The full-size top-level test runs in well under a second of
simulation wall time.

## Changing it

- **Cell count.** Set `N_AND` and `N_XOR` on `sifo_top`. The command
  `unit` field is 5 bits, so at most 32 of each; the register window at
  0x100 has room for 384 cells.
- **BRAM depth.** Set `BRAM_DEPTH`, the words per half.
- **Queue depth.** Set `CMD_DEPTH`.
- **Hash.** To replace SHA-1, for example with a fixed-key AES, only
  `sha1_core`, `sifo_pkg::sha_block` and the reference functions change.
  `gand_cell` relies only on a start/done core with a fixed latency.

Lint notes that remain on purpose:

- bits 107:80 of the BRAM word are never read;
- bit 0 of the second cell register is unused;
- package constants are unused in modules that do not need them.
