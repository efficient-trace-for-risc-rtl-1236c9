# E-Trace instruction branch tracer for a CVA6 subsystem

A processor that must be observed without being slowed down can export a trace
of what it executes. Sending every program counter is far too much data. But
most instructions follow each other in address order, and a decoder that holds
the program binary can fill them in by itself. What it cannot work out alone
are the points where execution leaves the straight line:

- whether each conditional branch was taken;
- where an indirect jump or an exception return went;
- where a trap happened and which handler it entered;
- where tracing started.

Instruction branch tracing sends only those facts. The RISC-V Efficient Trace
(E-Trace) scheme defines how. This RTL is a tracing system in that style for a
CVA6-based subsystem, modelled on the design by Laghi, Manoni, Parisi and
Bartolini, "Efficient Trace for RISC-V: Design, Evaluation, and Integration in
CVA6". The block structure comes from that design. Much of the detail inside
the blocks is not published, so this code supplies it. The section
"Faithfulness" says which parts are which.

Three units form a chain:

```
 CVA6 commit ports ──► te_tip ──blocks──► trace_encoder ──packets──► te_encapsulator_axi ──AXI4──► crossbar ► Ethernet
                      (FIFO)             │ te_filter          │                         (FIFO)
                                         │ te_priority        │
                  APB ──────────────────►│ te_packet_emitter  │
                                         │ te_reg             │
                                         │ te_branch_map      │
                                         │ te_resync_counter  │
```

Each arrow between the units is `NLANES` wide (default 2): the interface port
hands over up to two blocks per cycle, the encoder decides both in the same
cycle, and up to two packets per cycle enter the encapsulator.

`trace_system` is the top. It holds the three units. The core, the APB
peripheral interconnect and the AXI crossbar are outside it and connect
through its ports.

## Blocks: the unit of work

The core does not hand the encoder single instructions. It hands over
**blocks**. A block is a run of retired instructions that ends at a special
instruction or at a trap. `te_tip` forms the blocks. Each block carries these
fields:

| field       | width | meaning |
|-------------|-------|---------|
| `iaddr`     | 64    | address of the first instruction of the block |
| `iretire`   | 8     | length of the block in 16-bit half-words (0 for an empty trap block) |
| `itype`     | 3     | how the block ends: 0 plain, 1 exception, 2 interrupt, 3 exception return, 4 not-taken branch, 5 taken branch, 6 uninferable jump |
| `ilastsize` | 1     | size of the last instruction: 0 = 2 bytes, 1 = 4 bytes |
| `priv`      | 2     | privilege level of the block |
| `cause`, `tval` | 5, 64 | trap cause and value (trap blocks only) |

From `iaddr`, `iretire` and `ilastsize` the encoder can work out the address
of the block's last instruction:
`iaddr + 2*(iretire − (ilastsize ? 2 : 1))`.

`te_tip` looks at the commit ports in order, port 0 first. The trap of a cycle
comes after that cycle's retired instructions. A block stays open across
cycles. It closes in four cases:

- a special instruction retires, and its type becomes the block's `itype`;
- the privilege level changes, giving a plain block;
- `iretire` would overflow, giving a plain block;
- a trap is taken. A trap with no open block produces an empty block whose
  `iaddr` is the trapping pc.

Up to `NRET + 2` blocks can close in one cycle. The FIFO writes all of them in
one cycle. When the FIFO is full, the newest blocks are dropped and counted in
a saturating counter. Software can read that counter (register `LOST`).

On the read side the FIFO shows its `NOUT` oldest entries at once (lane 0 the
oldest). Valid lanes are always contiguous from lane 0. One ready signal takes
all of them.

## How the encoder chooses a packet

This is the core of the design. The encoder keeps three blocks in view:

- **lc**, the last block;
- **tc**, the current block, whose packet is being decided;
- **nc**, the next block, which is arriving in this cycle.

A decision for tc is taken only when nc arrives. The rules need the next
block to know whether tc is the last one before a trap, a privilege change or
the end of the traced region. So the packet for block *k* comes out when block
*k+1* is accepted. The two register stages for tc and lc are in
`trace_encoder`. `te_filter` marks every arriving block qualified or not.

`te_priority` applies these rules to a qualified tc. The first rule that
matches wins:

| # | condition | packet | address reported | branches reported |
|---|-----------|--------|------------------|-------------------|
| 1 | lc ended in an exception or interrupt | F3.1 trap: cause, tval, interrupt flag | first address of tc (the handler) | none (already flushed) |
| 2 | lc not qualified, or privilege changed from lc to tc, or resync requested with no branch pending before tc | F3.0 start | first address of tc, full | none |
| 3 | lc ended in an uninferable jump or exception return | F1, or F2 when no branch is pending | first address of tc (the jump target) | branches before tc |
| 4 | resync requested with branches pending, or nc not qualified, or nc has another privilege, or tc ends in a trap | F1, or F2 when no branch is pending | last address of tc | branches up to and including tc |
| 5 | the branch map holds 31 branches including tc's | F1 with a full map | none | all 31 |

Rules 1 to 3 report where tc **starts**. Rule 4 reports where it **ends**.
One block can need both, for example the target of a jump that is also the
last traced block. Then the encoder sends the start packet, holds its input for
one cycle (`hold`, `block_ready_o` low), and sends the end packet in the next
cycle. Without this, the end report and the branch of tc would be lost.

If no block is being decided and a support request is pending, a F3.3 support
packet goes out. A support request is raised when software changes the enable
bit or the address mode.

Two cases need care:

- The trap point is reported by rule 4 on the block that ends in the trap. The
  handler entry is reported by rule 1 on the next block. A trap therefore
  costs two packets.
- Blocks outside the filter are dropped. Rule 4 on the last traced block tells
  the decoder where tracing stopped. Rule 2 restarts the trace with a full
  address.

## Branch map

`te_branch_map` holds a 31-bit register and a 5-bit counter. Each branch
takes one bit, the oldest in bit 0: 1 means not taken, 0 means taken. It gives
two views:

- the map **before** tc (`*_excl`), used by rules 1 to 3;
- the map **including** tc's own branch (`*_incl`), used by rules 4 and 5.

After a packet, the map is either cleared (`flush_all`) or left holding only
tc's branch (`flush_keep`). With several lanes the map is applied lane after
lane inside the cycle, as described under "Lanes". `full_o` makes the encoder send rule 5 before a
32nd branch could overwrite anything. An assertion checks this.

## Lanes: several blocks per cycle

CVA6 can retire two instructions per cycle, and both can be discontinuities.
With one block per cycle the encoder would fall behind on jump-dense code, so
the filter, the priority logic and the packet emitter are replicated
`NLANES` times. The register block, the branch map and the resync counter stay
single. Lane *i* handles the *i*-th block of a group.

The point of the lane structure is that the packets must be exactly those a
one-lane encoder would send for the same blocks, in the same order. The
neighbours of each lane follow from that:

- lane *i*'s **lc** is lane *i−1*'s tc; lane 0's lc is the last valid block
  of the previous group;
- lane *i*'s **nc** is lane *i+1*'s tc when that lane is valid; otherwise it
  is lane 0 of the arriving group.

Three pieces of state are passed from lane to lane inside one cycle:

- **Branch map.** Lane *i* sees the map as lanes 0 to *i−1* left it, after
  their branches and flushes. `te_branch_map` computes this chain from its
  register and stores the end of it.
- **Last reported address.** The differential address of lane *i* is taken
  against the address reported by the nearest lower lane that sent one, or
  against the stored value. The emitters get it through `last_addr_i`.
- **Resync request.** Only lanes below the first start or trap packet of the
  cycle see it. The resync counter adds the number of packets of the cycle.

A block that needs two packets also works across lanes. In its first cycle,
lanes up to and including that block are decided; the lanes above it are
masked. The input is held. In the second cycle, the held lane sends its end
packet and the lanes above it are decided. Support packets go out on lane 0
only.

The encapsulator accepts the packets of all lanes in one cycle, lane 0 first,
so the byte stream keeps the order.

## Packet formats and compression

Payloads are numbered from bit 0 (the first field). `packet_length` is the
number of bytes actually needed.

| packet | type {fmt,sub} | layout | bytes |
|--------|----------------|--------|-------|
| F3.0 start   | 3,0 | fmt[1:0] sub[3:2] branch[4] priv[6:5] address[69:7] | 9 |
| F3.1 trap    | 3,1 | fmt sub branch[4] priv[6:5] ecause[11:7] interrupt[12] thaddr[13] address[76:14] tval[140:77] | 18 |
| F3.3 support | 3,3 | fmt sub ienable[4] full_addr_mode[5] qual_status[7:6] (01 = trace ended) | 1 |
| F2 address   | 2,0 | fmt[1:0] address[64:2] notify[65] updiscon[66] | 1–9 |
| F1 branch    | 1,0 | fmt[1:0] branches[6:2] map[37:7] address[100:38] notify[101] updiscon[102] | 5–13 |

- Addresses are sent divided by two. Instructions are at least 2-byte
  aligned, so bit 0 carries no information.
- `branch` in F3.0 and F3.1 is 0 only when the instruction at the reported
  address is itself a taken branch.
- `branches = 0` in F1 means a full map of 31 branches and no address.

Most of the compression comes from cutting addresses in F1 and F2:

- In **differential mode**, the address field is the distance from the
  previously reported address. Nearby targets give small numbers.
- In **full mode**, the address field is the absolute address.
- In both modes, the field is cut to its significant bits plus one sign bit.
  The byte length is rounded up. The decoder sign-extends the last bit it
  receives.
- `notify` and `updiscon` are set equal to the sign. So they cost no bytes.

A jump 64 bytes ahead thus costs a one-byte F2 packet.

Format-3 packets always carry full addresses and are never cut, so a decoder
can lock on to them. The decoder learns the current address mode from the
support packet that follows each mode change.

## Resynchronisation

`te_resync_counter` counts either clock cycles or emitted packets while
tracing is on; with several lanes it adds the number of packets of the
cycle. It is reset to zero at every start or trap packet. When it reaches
`RESYNC_MAX`, it requests a resync. The encoder then does one of two things:

- with no branch pending, it sends a start packet at the next block (rule 2);
- otherwise it first reports the pending branches with rule 4, then sends the
  start packet.

`RESYNC_MAX = 0` turns this off.

## Registers (APB, 32-bit, no wait states)

| offset | name | fields |
|--------|------|--------|
| 0x00 | CTRL | [0] enable, [1] full-address mode, [2] resync counts packets (else cycles), [3] privilege filter on, [4] address filter on, [5] cause filter on |
| 0x04 | RESYNC_MAX | [15:0], reset 256 |
| 0x08 | PRIV_MASK | [3:0] one bit per privilege level that is traced, reset 0xF |
| 0x0C | CAUSE | trap cause that passes the cause filter |
| 0x10, 0x14 | ADDR_LO | low and high word; traced range is `ADDR_LO <= iaddr <= ADDR_HI` |
| 0x18, 0x1C | ADDR_HI | reset all ones |
| 0x20 | LOST | [15:0] blocks dropped by the interface FIFO (read only) |

Other offsets answer with `pslverr`.

A block is traced when all of these hold:

- tracing is enabled;
- its privilege bit is set in the mask, if that filter is on;
- its `iaddr` is in range, if that filter is on;
- it does not end in a trap of another cause, if that filter is on.

## Encapsulation on AXI4

`te_encapsulator_axi` takes packets over valid/ready into an 8-entry FIFO,
up to one per lane and cycle. Its ready means there is room for every lane.
It writes each packet as one INCR burst of 64-bit beats to `BASE_ADDR`:

- **Beat 0 is a header.** It holds the length [7:0], the type [11:8] and a
  32-bit sequence number [47:16]. A gap in the sequence numbers shows lost
  packets.
- **The payload follows** in little-endian beats. The strobe of the last beat
  covers only the packet's bytes.

One write is outstanding at a time. The next burst starts after the write
response.

## Timing and throughput

- **Encoder.** A group of up to `NLANES` blocks is accepted in any cycle in
  which every lane's packet register is free. The packets appear one cycle
  after the decision. A block that needs two packets holds the input for one
  extra cycle.
- **Encapsulator.** A packet of *n* payload bytes takes 1 cycle from FIFO to
  address phase, 1 address cycle, 1 + ⌈n/8⌉ data beats and a response cycle.
  That is 5 to 7 cycles with an always-ready slave.
- **Bottleneck.** The encapsulator is the narrowest point. When the crossbar
  stalls, back-pressure fills the encapsulator FIFO first, then stops the
  encoder, then fills the interface FIFO. After that, blocks are dropped and
  counted.

The end-to-end test produces these stalls on purpose.

## Faithfulness

These parts follow the original description:

- the chain TIP → encoder → AXI encapsulator, and its place in the subsystem;
- the six encoder sub-blocks and their roles;
- the replication of the block inputs, filter, priority and emitter per
  discontinuity retired in a cycle (two lanes, for CVA6's two commit ports);
- the APB-configured register block;
- the two-cycle delay of the encoder inputs, to look at last, current and
  next;
- the 31-bit branch map with its counter and full request;
- the resync counter, which counts packets or cycles;
- the valid/ready link to the encapsulator;
- the FIFOs in the interface port and in the encapsulator.

These are choices made here, where the description is silent:

- all widths, for an RV64 core;
- the itype encoding, which is the 3-bit E-Trace one;
- the priority rule table and the two-packet hold;
- how the lanes are chained (neighbours, branch map, last address, resync),
  and per-lane privilege and trap fields;
- the packet layouts, with a fixed 31-bit map in format 1;
- the address cut;
- the register map and reset values;
- the filter kinds;
- the block valid/ready pair on the encoder input;
- the core-side signals of `te_tip` and its merging of blocks across cycles;
- the FIFO depths (16 blocks, 8 packets);
- the AXI framing and target address.

These are departures and omissions:

- **Not produced:** context packets (F3.2; the encoder has no context input)
  and the optional format-0 extensions.
- **The interface port is a model of the core extension, not CVA6 code.** It
  expects each commit port to report its pc, a compressed flag and a
  pre-decoded instruction type, and the core to report traps separately.
- **The `iaddr` input** is called "the length of the first instruction" in
  the original description. Here it is the address of that instruction, as in
  E-Trace.
- **Not reproduced:** the FPGA resource figures and the compression rates
  measured there (85–99.8 %, 95.1 % on average, on platform test programs).
  They need the platform and its programs. The end-to-end test prints the rate
  for its own random instruction stream (about 92 %). That stream is much
  denser in jumps and traps than real code. `tb_trace_workloads` measures
  program-shaped kernels instead (91.5 % to 99.2 %, see "Verification"); they
  are stand-ins, not the platform's programs.

## Verification

Each module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|-----------|----------------|
| `tb_te_reg` | register read/write, reset values, errors, support request and acknowledge |
| `tb_te_filter` | 5000 random blocks and settings against the filter rules, inclusive range bounds |
| `tb_te_branch_map` | random branch/flush/hold sequences on both lanes against a queue model, the full flag |
| `tb_te_resync_counter` | exact request cycle in cycle mode and packet mode (also two packets per cycle), clearing, disabling |
| `tb_te_priority` | 20000 random input sets against the rule table, including the hold |
| `tb_te_packet_emitter` | field-by-field decode of every packet kind, cut lengths, negative deltas, back-pressure |
| `tb_te_tip` | random two-port retirement streams against a block builder, both output lanes, FIFO overflow and lost count |
| `tb_te_encapsulator_axi` | 300 random packets on one or both lanes against a randomly stalling AXI slave: order, header, beats, strobes, WLAST, latency |
| `tb_trace_encoder` | a hand-worked block sequence whose twelve expected packets were derived by hand, fed one block per cycle, two per cycle and in random groups |
| `tb_trace_system` | end to end at default parameters (below) |
| `tb_trace_workloads` | compression of program-shaped streams at default parameters (below) |

`tb_trace_system` runs a random core model at the default parameters. Its
instruction stream has:

- 16- and 32-bit instructions;
- branches, uninferable jumps, exceptions and interrupts;
- exception returns that change privilege.

It has an AXI slave that decodes every packet. It checks three things:

- every decoded address is a real instruction address;
- the decoded branch outcomes equal the retired ones in order, until the
  deliberate overflow phase;
- the lost-block counter becomes non-zero.

It also counts each mechanism and fails if any never happens: start, trap
(exception and interrupt), F1, F2, full map, full and differential modes,
both resync modes, two-packet blocks, two blocks decided and two packets sent
in one cycle, privilege changes, filtering, both kinds of back-pressure, lost
blocks.

`tb_trace_workloads` feeds three program-shaped kernels through the whole
system: a 12×12×12 loop nest, a character loop that calls an output routine
per character (every return is an uninferable jump), and the loop nest again
with a timer interrupt every 200 instructions. For each kernel it checks that
every branch outcome is reported and that no block is lost. It also checks
that compression against 32 bits per instruction reaches a floor. The rates it
measures:

| kernel | instructions | packets | payload bytes | compression |
|--------|--------------|---------|---------------|-------------|
| loop nest | 9421 | 63 | 316 | 99.2 % |
| calls | 2988 | 202 | 1012 | 91.5 % |
| loop nest + timer | 9703 | 191 | 1478 | 96.2 % |

Loops cost almost nothing: a loop branch is one bit, and 31 of them fit in a
five-byte packet. Each return and each trap costs a packet with an address.
The differential address keeps those packets to a few bytes.

To simulate with Verilator 5 from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_trace_system \
  -Irtl -Itb -y rtl -y tb +libext+.sv rtl/te_pkg.sv tb/tb_trace_system.sv -o sim
./obj_dir/sim
```

Replace the top module and file name to run another testbench. All modules
import `te_pkg`, so it must come first. The widths of the block and of the
packet layout are package parameters in `te_pkg`. The FIFO depths, the commit
port count, the lane count `NLANES` and the AXI target address are parameters
of `trace_system`.
