# A racetrack-memory associative processor for CAM-only DNN inference

This design runs neural-network layers with no multipliers and no
arithmetic units. All work happens inside content-addressable memories
(CAMs). A CAM can search every row at once for a bit pattern. It can also
write a pattern into every row that matched. Repeat *search, then write*
with the right sequence of patterns and a whole column of numbers gets
added or subtracted bit by bit, in all rows at the same time.

With ternary weights (−1, 0, +1), a matrix-vector product reduces to
additions and subtractions. So a CAM array is enough to run a quantised
convolution layer:

- each row holds one output pixel;
- each column holds one operand;
- all rows compute in lockstep.

The cells store their bits in **racetrack memory (RTM)** nanowires. Each
nanowire is a magnetic track of 64 "domains", and each domain holds one
bit. A single access port reads or writes the domain that sits under it.
To reach a different domain, the whole track is shifted one position per
cycle. An operand's bits lie one after another along the track, with the
least significant bit (LSB) at the lowest domain. This fits bit-serial
arithmetic well: after each bit is processed, the track shifts by one and
the next bit is under the port. One CAM cell therefore stores 64 bits,
which is 16 four-bit values or 8 eight-bit values.

The RTL here covers the digital part of that machine:

- the CAM arrays with their tag, key and mask registers;
- the search/write lookup tables (LUTs) for addition and subtraction;
- a per-AP controller that executes a small instruction set;
- the bank/tile/AP hierarchy and its network, with tile and global buffers.

It is written in synthesizable SystemVerilog (IEEE 1800-2017).

## Hierarchy

```
rtm_ap_accel            NBANK = 3 banks (independent)
 └ bank                 NTILE = 4 tiles + global buffer + bank bus
    └ tile              NAP = 6 APs + tile buffer + tile bus + up/down link
       └ ap             associative processor
          ├ instr_cache     program memory, 256 instructions
          ├ ap_controller   sequencer (uses ap_lut)
          ├ key_mask_regs   key and mask registers
          ├ cam_array       256 rows × 256 columns of rtm_cam_column
          ├ tag_register    rows that matched the last search
          └ link_reg        network interface register
```

At default sizes there are 3 × 4 × 6 = 72 APs. Each AP has a 256 × 256 CAM
whose cells hold 64 bits each. The 256 × 256 array, the 64 domains, the six
APs per tile and the four tiles per bank are the published configuration.
The number of banks is not given. Three is the smallest number whose
72 arrays hold the largest network evaluated for this architecture:
ResNet18, which needs 49 arrays. The memory depths are this design's own
choice (see *Parameters*).

## The CAM column and how data sits in it

`rtm_cam_column` is one column of the array: ROWS nanowires with
DOMAINS bits each.

**Shared port position.** All tracks of a column shift together and share
one port position, `pos`. This follows the way racetrack tracks are grouped
into clusters that are accessed in parallel. A shift moves `pos` by one
domain per cycle. It saturates at both ends, so data never falls off a
track.

**Search.** In a search, each row compares the bit under its port with the
key bit, but only when the column's mask bit is set. The rows of
`cam_array` AND these per-cell results into one match line per row. A
mismatch in any selected column discharges the row.

**Write.** A write puts the key bit into the masked columns of every row
tagged in the tag register.

**Slice port.** A separate slice port reads or writes a whole column
(ROWS bits) at the current port position. The network uses it to move
data in and out.

**Storage and layout.** The array storage is not reset, since the real
memory is non-volatile. Testbenches initialise what they read. In the
worked example, output pixels are rows and kernel positions are columns.
Input channels are stacked along the domains: with n-bit operands, the
two channels an AP handles start at domains 0 and n.

## Arithmetic: search/write passes

An addition or subtraction touches four columns:

- **A**: the first operand;
- **B**: the second operand, and also the result for in-place operations;
- **R**: the result for out-of-place operations;
- **C**: a carry/borrow column, which always stays at the same domain.

For every bit position the controller runs a fixed list of passes. Each
pass is:

1. **Search** (1 cycle): the key is set to a value of {C, B, A}, the mask
   to those three columns, and the match lines are captured in the tag
   register.
2. **Write** (1 cycle): the new {C, D} is written into the tagged rows,
   where D is B for in-place operations and R for out-of-place ones.

The pass lists are in `ap_lut`:

| operation        | passes (search {C,B,A} → write {C,D})           | cycles/bit |
|------------------|-------------------------------------------------|-----------:|
| add, in place    | 011→10, 001→01, 100→01, 110→10                  | 8          |
| add, out of place| 001→01, 010→01, 100→01, 111→11, 011→10          | 10         |
| sub, in place    | 001→11, 011→00, 110→00, 100→11                  | 8          |
| sub, out of place| 001→11, 010→01, 100→11, 110→00, 111→11          | 10         |

**Pass order matters.** A row rewritten by one pass must not match a later
pass in the same bit. The orders above are chosen so that this never
happens. For example, in-place add handles 011 before 001: the 001 pass turns a
row into C=0, B=1, A=1, which the 011 pass would otherwise then rewrite.
Out-of-place operations write only the rows whose result bit is 1 or whose
carry changes. So **R must be zero before the operation**, and so must
every extra copy of the result.

**Shifting between bits.** On the last write of a bit, the A, B, R and copy
columns shift up one domain, while C stays where it is. The next bit then
starts straight away. An n-bit operation therefore takes 8n or 10n cycles.
It also takes one cycle to load its first key, two cycles of fetch/decode,
and any alignment shifts (see below). The carry is not cleared by the
operation itself: a `SET` of the carry column to 0 comes before each
add/sub. Operands are two's complement. The result has the width of the
operands and wraps around.

**Result copies.** An out-of-place operation can write its result into up
to three more columns in the same write cycles (`cp_en`, `cp_col`). This is
how a common subexpression is made available to several later operations
without spending cycles on a copy.

### A correction to the published out-of-place add table

The published table for out-of-place addition cannot be used as printed:

- It marks the row (C,B,A)=011 as "no change". But 1+1 with carry-in 0
  gives sum 0 and carry-out 1. R already holds the 0, but the carry must
  still be set. This pass has to run after the 111 pass, because the row
  it writes becomes 111.
- It lists row 110 as a write pass. That row's result equals what is
  already stored, so the pass is not needed.

The order used here is 001, 010, 100, 111, 011. It keeps the published
cost of five passes (10 cycles per bit). The file `ap_lut.sv` explains why
no row is visited twice. The LUT testbench runs every table on all eight
{C,B,A} row values at once, in pass order, and compares the result with a
full adder or subtractor. The table as printed fails that test.

### Negative-output LUTs: not built

The architecture is said to have LUTs that produce the negated result of an
operation (such as −x0 − x1) at the same cost. Their contents are not
published, so they are not implemented. A negated result can still be
formed in two steps: out-of-place subtract from a zero column, then use the
result. The worked example does this for y2 = −x7.

## Alignment: the cost of a racetrack

Before an instruction runs, every column it uses must have its port on the
operand's first domain. The controller's `ALIGN` state does this. Each
cycle, it compares every used column's `pos` with the target domain and
shifts those columns that are off by one step, all in parallel. When all
columns are aligned, it loads the first search key. So alignment costs as
many cycles as the largest distance any used column has to travel.

`RELU` is the exception. It aligns A on its *most significant* bit, then
steps downwards.

Operands whose bits follow directly on from the last instruction's bits
need no alignment at all. An example is channel k+1 stored right after
channel k. Shift cost is why the testbenches keep channels stacked
along the domains.

## Instruction set

Each AP runs its own program from its instruction memory. `start` (a
one-cycle pulse, shared by all APs) runs every program from address 0. A
tile's `done` is high once all its APs have executed `HALT`. The top-level
`done` is high once every bank is done. The instruction word `instr_t` is
defined in `rtm_ap_pkg`:

| op      | effect                                                                   |
|---------|--------------------------------------------------------------------------|
| ADD_IP  | B ← B + A (carry column C)                                               |
| ADD_OP  | R ← B + A, plus copies                                                   |
| SUB_IP  | B ← B − A (borrow column C)                                              |
| SUB_OP  | R ← B − A, plus copies                                                   |
| SET     | every row: R[bits] ← imm, one bit per cycle                              |
| RELU    | rows whose sign bit of A is 1 get A cleared                              |
| SEND    | for each bit of A: a write packet to `peer`, address `baddr + k`         |
| RECV    | write the next `nbits` incoming slices into R, one per bit               |
| LOADB   | for each bit: read request to buffer `peer` at `baddr + k`, answer → R   |
| HALT    | stop; raise `done`                                                       |

Every instruction carries:

- the column and first domain of each operand;
- the bit width `nbits`;
- for network instructions, a peer address and a buffer address.

The encoding is this design's own; none is published. In the full
architecture a compiler produces these programs. Its steps are building a
data-flow graph from the ternary weights, sharing common subexpressions,
scheduling, and choosing in-place or out-of-place LUTs. That compiler is
software and is not part of this RTL. `tb/tb_prog_pkg.sv` builds programs
by hand with small functions (`i_arith`, `i_copy`, `i_set`, `i_send`, ...).

## Network: moving bit slices

Data moves as **bit slices**: one bit position of one column, for all ROWS
rows. A packet is a header plus a ROWS-bit slice. The header
(`pkt_hdr_t`) holds:

- a kind: write, or read request;
- a destination and a source address, each {tile, endpoint};
- a buffer slot.

**Addresses.** Inside a tile, endpoints 0…NAP−1 are the APs and endpoint
NAP is the tile buffer. Tile number NTILE means the bank's global buffer.

**Building blocks:**

- `link_reg` is a one-entry valid/ready register. It is used as each AP's
  network interface and as a tile's uplink and downlink. It accepts only
  when empty, which keeps every path registered at the cost of half
  throughput.
- `bus_switch` is a shared bus with round-robin arbitration. The parent
  computes each input's destination port. An input is only eligible when
  its destination is ready, so one blocked receiver never holds up the
  bus. At most one transfer happens per cycle, and an assertion checks
  that.
- `slice_buffer` is a tile buffer or the global buffer. A write packet
  stores its slice. A read request is answered one cycle later with a
  write packet to the requester's source address. The global buffer also
  has a host port with a one-cycle read latency.

**Routing.** A tile routes a packet to one of its APs or its buffer if the
tile number matches, and to its uplink otherwise. The bank bus routes by
tile number to a tile's downlink or to the global buffer.

Banks have no link to each other. The published block diagram shows none,
so the top level is NBANK copies side by side, sharing the host ports.

**Partial sums.** Partial sums move between APs in an adder-tree fashion.
A leaf AP `SEND`s its partial-sum columns to another AP, which `RECV`s them
into a free column and adds them. The last AP applies `RELU` and `SEND`s
the output feature map to the global buffer. This is what
`tb_rtm_ap_accel` checks.

## Host interface (top level)

| signals | purpose |
|---|---|
| `im_we, im_bank, im_tile, im_ap, im_addr, im_wdata` | write one instruction into one AP's instruction memory |
| `gb_we, gb_re, gb_bank, gb_addr, gb_wdata, gb_rdata` | write/read the global buffer of a bank (read data one cycle after `gb_re`) |
| `start`, `done` | run all programs; all APs halted |

Reset is asynchronous and active low (`rst_n`). It clears control state,
registers and valid flags. It does not clear memories.

## Parameters

| parameter | default | origin |
|---|---:|---|
| ROWS × COLS | 256 × 256 | published array size |
| DOMAINS | 64 | published domains per nanowire |
| NAP | 6 | APs per tile in the published block diagram |
| NTILE | 4 | tiles per bank in the published block diagram |
| NBANK | 3 | own choice: smallest count holding the 49 arrays of ResNet18 |
| IC_DEPTH | 256 | own choice |
| TBUF_DEPTH / GBUF_DEPTH | 256 / 1024 slices | own choice |

Field widths in `rtm_ap_pkg` limit:

- COLS and DOMAINS to 256;
- NAP and NTILE to 7;
- buffers to 4096 slices.

## Worked example and what the tests show

The end-to-end test runs the published worked example. It is a 6 × 6
ternary matrix W applied to six inputs x0…x5 per pixel (a 6-tap patch),
for four input channels of 4-bit activations, computed on 10 bits. Every
bank does the same work on its own data:

- The host writes the patches into the bank's global buffer.
- Two APs do the work: the first AP of the first tile (the root) and the
  last AP of the last tile (the leaf). All other APs halt at once.
- Each of the two loads two channels from the global buffer (`LOADB`) and
  evaluates the six outputs with shared subexpressions:
  - x8 = x0 − x1, then copied on to y0;
  - x7 = x3 − x5;
  - x6 = x7 + x8;
  - and so on.
- Each then adds its two channels in place.
- The leaf sends its partial sums to the root, across tiles, through the
  tile uplink, the bank bus and the root tile's downlink.
- The root adds them, applies RELU and sends the result to the global
  buffer.
- The testbench reads the global buffer through the host port. It compares
  each output pixel with a direct computation of ReLU(W·x) summed over the
  channels.

**A conflict in the published example.** The text of the worked example
says the shared term is x8 = x0 + x1. But the matrix printed next to it
only gives the right y0, y4 and y5 with x8 = x0 − x1. The tests follow the
matrix.

Besides the results, the end-to-end test counts each mechanism and fails
if any count is zero:

- in-place and out-of-place add and subtract;
- result copies;
- racetrack alignment shifts;
- ReLU clears;
- buffer loads;
- AP sends and receives;
- cross-tile link traffic;
- bus contention;
- a stalled send.

The per-AP test (`tb_ap`) checks, from the controller's cycle counts, that
one bit costs exactly 8 cycles in place and 10 out of place.

**Test sizes.** `tb_rtm_ap_accel` uses a reduced configuration: 2 banks ×
2 tiles × 2 APs, 256 × 32 arrays (full row count, fewer columns) and
the full 64 domains, with a 128-word
instruction memory and a 512-slice global buffer. That is the largest
configuration in the test set. The whole design has never been
simulated at its default size of 72 APs with 256 × 256 × 64 arrays: the
Verilator model of it did not finish compiling within ten minutes. Each
block has, however, been compiled at its default parameters.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself.
Each has a watchdog. Example with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/rtm_ap_pkg.sv tb/tb_prog_pkg.sv tb/tb_rtm_ap_accel.sv \
    --top-module tb_rtm_ap_accel -Mdir obj && ./obj/Vtb_rtm_ap_accel
```

Block testbenches follow the same pattern. Only the end-to-end test
needs `tb_prog_pkg.sv`. To run it at other sizes, edit the localparams at
its top; they are passed to the top module. The default-size model is
large: 72 × 256 × 256 × 64 bits of array state, all as separate columns.
Verilator turns that into a very large C++ model.

## Known limits and departures

- **Out-of-place add LUT:** corrected; see the section above.
- **Negative-output LUTs:** not built.
- **Worked example:** follows the matrix (x8 = x0 − x1), not the sentence.
- **Carry:** cleared by an explicit `SET`, not by the operation.
- **Not published, so this design's own:**
  - alignment cost (one domain per cycle) and fetch/decode cost (2 cycles
    per instruction);
  - the instruction encoding;
  - the network (buses, link registers, buffers, addresses, packets);
  - all memory depths and the number of banks.
- **Activation:** only ReLU. The activation is not named in the
  description; ReLU matches the evaluated networks.
- **Not modelled:**
  - the analog side of the cell (NOR match circuit, precharge sense
    amplifier, domain-wall physics) and its energy and latency figures;
  - shift faults.
- **Instruction memory:** 256 words hold one small kernel, not a whole
  network layer. A host has to reload programs between layers.
