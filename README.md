# A 2D-mesh NoC whose routers test themselves under control of their own cores

Testing the routers of a network on chip (NoC) from outside is hard: they
sit deep inside the chip, and a functional test has to push packets through
the network from a test access point. The design here lets the processor
core of each node test the router next to it. The core gets three extra
instructions. **test-apply** tells a small test packet generator to put up
to five test packets into the router's five input ports at once.
**test-gather HI** and **test-gather LO** read back a signature made from
everything that left the router during the test. During a test the router is
cut off from its neighbours by multiplexers. No test packet crosses a link,
and no tester is needed: the core compares the signature with the expected
one in software.

The design follows the hybrid software/hardware router self-test of Nazari,
Zolfy Lighvan, Daie Koozekonani and Sadeghi, "A Novel HW/SW Based NoC Router
Self-Testing Methodology". That paper evaluates it on a 4x4 mesh of the
Heracles platform, with 32-bit MIPS cores. It gives the test architecture, the
instruction formats and the signature generator. For the router it gives only
a list of properties: five ports, two virtual channels per input buffer,
bufferless outputs, XY routing. This RTL therefore builds its own router
with those properties. Every such choice is marked below.

## The node

```
                 neighbours N, S, W, E and the local core
                  |  in links            ^  out links
                  v                      |
          +------------------------------------------+
          |  test_mux: normal <-> test               |
          +------------------------------------------+
             ^ tpg_link    |                 |             |
             |             v                 v (observe)   |
  +----------------+  +---------+     +---------------+    |
  | test_packet_gen|  | router  |---->| signature_gen |    |
  +----------------+  +---------+     +---------------+    |
      ^ test-apply                        | sig            |
      |                            +----------------------+
  test_instr_decoder  <----------- | test_response_loader | --> core register
      ^ instruction word           +----------------------+
      core
```

`testable_router` is one node. `noc_mesh` is a ROWS x COLS array of nodes,
4x4 by default. It exposes every router's local port and every core's
test-instruction port as arrays indexed by `row*COLS + col`. The cores, and
the network interfaces that would turn core messages into flits, are not
part of the RTL.

## Flits and links

| field      | bits | meaning                                              |
|------------|------|------------------------------------------------------|
| `ftype`    | 2    | 00 body, 01 head, 10 tail, 11 head+tail (one-flit packet) |
| `dst_row`  | 2    | destination row (row 0 is the northern edge)         |
| `dst_col`  | 2    | destination column (column 0 is the western edge)    |
| `src_row`  | 2    | source row                                           |
| `src_col`  | 2    | source column                                        |
| `data`     | 32   | payload                                              |

A flit (`noc_pkg::flit_t`) is 42 bits. The published message format lists
these fields but gives no widths. With 2-bit coordinates and 32-bit data the
flit is exactly 42 bits. That matches the 42 flip-flops of the published
signature generator and the 210 = 5 x 42 flip-flops given for the crossbar.

On a link (`link_t`) the flit travels with a `valid` bit and a 1-bit VC id.
The VC id selects the input buffer at the next router. A flit keeps its VC id
from hop to hop.

Flow control is a ready level per VC going upstream. `in_ready[p][v]` means
"one more flit for VC v fits". It already counts a flit that is on the link
in the current cycle. An upstream whose output is registered can therefore
send on it without a credit counter and never overflows the buffer.

Ports are numbered N=0, S=1, W=2, E=3, L=4 (local core). This 3-bit code is
also the "requested output" code of the test-apply instruction.

## The router

The router (`router`) has four parts:

- **Buffer ports** (`buffer_port`, one per input). Each has two VC FIFOs
  (`vc_fifo`) of `DEPTH` = 4 flits.
  - Routing runs on the head flit of each VC. The route is kept until the
    tail has left, so body flits follow their head.
  - Each cycle the port picks one VC whose front flit can move, round-robin
    between the two VCs. A flit can move when the next hop has room in its
    VC. A head flit also needs its output to be free.
  - A buffer port has one crossbar input, so it sends at most one flit per
    cycle.
- **Routing logic** (`xy_route`). Dimension-order routing: first West/East
  until the column matches, then North/South, then out to the local core.
- **Switch arbiter** (`router_arbiter`).
  - For each output it grants one bidding input, round-robin starting after
    the last winner.
  - A head that is not also a tail then holds the output for its input and
    VC until its tail passes (wormhole switching). So the flits of one
    packet leave an output back to back.
  - `out_locked` reports which outputs are held, so buffer ports do not bid
    heads for them.
- **Crossbar** (`crossbar`). A 5x5 switch with one register per output; the
  outputs have no other buffering.

Timing: a flit that is on an input link in cycle t is written into its FIFO
at the end of cycle t. It bids and wins in cycle t+1 and is on the output
link in cycle t+2. So the minimum latency through a router is 2 cycles.
`idle` is high when all FIFOs are empty, no output register holds a flit and
no output is held by a packet.

All state uses a synchronous, active-low reset (`rst_n`).

## Test mode

### Instructions

The instruction encodings are MIPS32 codes that the base instruction set
leaves unused. The published formats fix the field sizes but not these code
values.

```
test-apply   31..26  25..21      20   19..5                 4     3..0
             0x3B    port valid  VC   out req, 3 bits/port   fill  0000
                                      (port p at bits 5+3p)

test-gather  31..26  25..21  20..16  15..11  10..6  5..0
             000000  00000   00000   rd      00000  0x28 = HI, 0x29 = LO
```

The published text counts 5 + 1 + 15 bits for the test-apply fields and says
that 28 bits are needed. That is one bit more than 6 + 5 + 1 + 15. Here the
extra bit is the **fill** value: the flit fields that do not steer the
router (source coordinates and data) are filled with it, all zeros or all
ones.

The core hands each instruction word to `testable_router` with a
valid/ready handshake (`instr_valid`, `instr`, `instr_ready`). While
`instr_ready` is low, the core stalls. A word that is not a test instruction
completes at once (`instr_is_test` = 0). A gather writes its result through
`wb_valid`, `wb_rd` and `wb_data` in the cycle it completes.

### What a test program does

1. **The first test-apply drains the router.**
   - The packet generator raises `test_req`. The multiplexers then close the
     input ports to new packets: a VC stays open only while a packet is
     part-way through it (`in_open`), so packets already started can finish.
   - The instruction stalls until the router and its input links are empty
     (`drained`).
   - Then the router enters test mode, and the signature is cleared.
2. **Each test-apply writes up to five test packets.** It writes one
   single-flit packet into each input port whose valid bit is set, all in the
   same cycle and all into the VC the instruction names.
   - The destination is this router's neighbour in the requested direction
     (the router itself for code 4, or for the unused codes 5 to 7). XY
     routing therefore sends the flit to the requested output. This maps an
     arbiter test pattern (valid inputs, VC, requested outputs) onto real
     packets.
   - An instruction waits until every VC it writes has room. The flits
     appear on the router's inputs in the next cycle.
3. **The signature builds up.** In test mode the router's outputs are
   hidden from the neighbours, and every output reports room. The signature
   generator observes the outputs:
   - Stage 1 adds the five output flits (an output whose valid bit is low
     adds zero) into one 42-bit word.
   - Stage 2 accumulates that word every cycle. All sums wrap modulo 2^42.
4. **test-gather LO, then HI, read the signature.**
   - The first gather waits until the router has drained. It then returns
     bits 31..0 (LO) or bits 41..32 zero-extended (HI), and returns the
     router to normal mode.
   - The signature only changes in test mode, so the second gather reads the
     same value.

In a fault-free router every test flit leaves exactly once and unchanged.
The expected signature is therefore simply the sum of all generated test
flits, and the core can compute it in software. It does not depend on
arbitration order or on timing. A fault that drops, duplicates or corrupts a
flit changes the sum. A fault that only sends a flit to the wrong output
does not change it, because the five outputs are added; nor does a wrong
VC id, which is not part of the sum. This limit comes
from the published adder-based signature.

While a router is in test mode, its neighbours see no room on the links
into it. Traffic toward it waits and resumes afterwards. Every router of the
mesh can be tested at the same time.

## Where this RTL departs from the published design, or fills gaps

- **Router internals.** FIFO depth 4, round-robin VC choice, round-robin
  switch arbitration with wormhole locking, an output register stage,
  ready-level flow control and VC ids kept from hop to hop are all this
  design's choices.
- **Orientation and codes.** Row index grows southwards and column index
  eastwards. Port codes, flit-type codes, opcode and FUNC values, and the
  bit order inside the test-apply fields are this design's choices.
- **Test packets.** Each test packet is a single flit.
- **Register stages in the test hardware.** The packet generator registers
  its five output links, so a test-apply's flits enter the router one cycle
  after it is accepted. The published gate count shows no flip-flops in the
  packet generator. A combinational path would tie the generator's
  acceptance to the buffers' ready levels within the same cycle; the
  register avoids that. The response loader and the multiplexers hold no
  state, as published. The signature register is 42 bits, also as
  published.
- **Mode changes.** How test mode is entered (drain first) and left (on the
  first gather) is not published, nor is a stall handshake; the scheme above
  is this design's.
- **Mesh edges.** Edge ports of the mesh are tied off: no input, no room.
  For an edge router, a test-apply that asks for a port the router does not
  have produces a destination that wraps around the coordinate range. That
  flit leaves by some other output. It still counts correctly in the
  signature, but that pattern does not test the intended output.
- **Not built.**
  - The MIPS core and its pipeline changes: only the decoding of the new
    instructions is built (`test_instr_decoder`).
  - The network interface.
  - The genetic algorithm that chose the published test set. It is offline
    software, and its 250 patterns are not published.

## Against the published numbers

- The 4x4 mesh of the evaluation is the default size of `noc_mesh`.
- The published test program applies 250 test patterns.
  `tb_test_program_250` runs 250 random patterns that obey the XY-routing
  constraint (a packet entering from North or South never asks for West or
  East), back to back on an interior router. With the two gathers it takes
  265 cycles. The paper reports 355 clock cycles for its program on the
  MIPS core, which also spends cycles fetching and issuing instructions.
- Fault coverage and gate counts depend on a gate-level fault simulation
  that is not reproduced here.

- The published evaluation injects single stuck-at faults one at a time and
  runs the whole test program for each. `tb_fault_coverage` does the same
  on a small scale: it forces each of the 440 stuck-at faults on the bits of
  the five crossbar output registers and runs a 60-instruction random test
  program. It detects 399 of them (90.7%). Undetected are the VC-id bits,
  which the signature does not add, and flit-type bits that every test flit
  sets to 1.

## Files

| file | content |
|------|---------|
| `rtl/noc_pkg.sv` | types and constants shared by all modules |
| `rtl/vc_fifo.sv` | FIFO of one virtual channel |
| `rtl/xy_route.sv`, `rtl/buffer_port.sv`, `rtl/router_arbiter.sv`, `rtl/crossbar.sv`, `rtl/router.sv` | the router |
| `rtl/test_instr_decoder.sv`, `rtl/test_packet_gen.sv`, `rtl/test_mux.sv`, `rtl/signature_gen.sv`, `rtl/test_response_loader.sv` | test hardware |
| `rtl/testable_router.sv` | one node |
| `rtl/noc_mesh.sv` | the mesh (top) |
| `tb/tb_<module>.sv` | a self-checking testbench per module |
| `tb/tb_test_program_250.sv` | the 250-pattern test program |
| `tb/tb_fault_coverage.sv` | stuck-at fault simulation of the self-test |

Every testbench checks its module against values worked out independently
in the testbench (a reference model, or the rule written another way). Each
prints `TB_RESULT checks=N failures=M`. A watchdog ends a hung run as a
failure.

`tb_noc_mesh` runs the whole 4x4 mesh at its default parameters, in about
900 cycles:

- 960 random packets of 1 to 4 flits, with back-pressure at every ejection
  port.
- Repeated test programs on two routers while that traffic flows.
- Test programs on all sixteen routers at once.

It checks that every packet arrives intact, that every signature is right,
and that each mechanism happened at least once: drain with a packet
part-way in, stalled test-apply, waiting gather, held injection, mode
switches.

To simulate, for example, the mesh:

```
verilator --binary --timing --assert -Wno-fatal rtl/noc_pkg.sv rtl/*.sv \
    tb/tb_noc_mesh.sv --top-module tb_noc_mesh -Mdir obj_mesh
./obj_mesh/Vtb_noc_mesh
```

Every other testbench builds the same way, with its own `--top-module`.
