# A message-driven floating-point processing fabric

This fabric has no fixed dataflow and no central sequencer. Every transfer is a
64-bit message. A message carries an operation and a destination for now, and
an operation and a destination for later. A processing element (a **SiteO**)
that executes a message keeps the "later" half. When its result is ready, it
builds a new message from that half and sends it on. The host loads these
chains once. After that, one operand entering the fabric starts a whole
sequence of work: multiply, send to an adder, add, send to a RELU, compare.
No further control is needed.

## Message format

| bits  | field             |
|-------|-------------------|
| 3:0   | present opcode    |
| 15:4  | present destination (12-bit SiteO address) |
| 47:16 | value (IEEE 754 single precision) |
| 51:48 | next opcode       |
| 63:52 | next destination  |

The opcodes are in `rtl/mipu_pkg.sv`:

- Prog 0001 stores the value, the next opcode and the next destination.
- UPDATE, A_ADD, A_SUB, A_MUL, A_DIV, Av_ADD and CMP change the stored value in
  place. CMP keeps the maximum.
- A_ADDS, A_SUBS, A_MULS, A_DIVS and RELU are *stream* opcodes. They send the
  result on as a new message.
- Opcode 1110 (CNT) is this design's own addition. It sets how many operands a
  stream opcode collects before it sends anything. For example, a 3x3
  convolution sum collects nine products.

## Hierarchy and routing

- SiteM: 4x4 SiteOs (`sitem.sv`).
- Tile: 4x4 SiteMs (`tile.sv`).
- Block: 4x4 Tiles, 64x64 = 4096 SiteOs, which is the top `mipu_engine.sv`.

A 12-bit address names any SiteO of the Block. Its bit pairs, from the bottom,
are:

- `[1:0]` SiteO column and `[3:2]` SiteO row inside the SiteM;
- `[5:4]` SiteM column and `[7:6]` SiteM row inside the Tile;
- `[9:8]` Tile column and `[11:10]` Tile row.

All SiteOs form one mesh. A SiteO sends a message right if the destination is in
its own row, and down otherwise. Messages therefore go down their column, then
right along the destination row. A message addressed up or to the left of its
sender leaves the grid at the right or bottom edge. Those edge ports are the
result outputs.

Each SiteO column also has a **vertical bus**. A bus message is copied in one
cycle into the four SiteOs of that column within the SiteM named by the
destination. One image pixel or one element of a matrix thus meets four stored
weights at once.

## SiteO timing and flow control

Each SiteO has two input queues, Left and Top (`msg_fifo.sv`, depth 4). They
fall through when empty. A message reaching an idle SiteO appears at its output
one clock later. Each output is a register that holds its message while the
receiver reports `full`. The SiteO then stops taking messages that need that
output, its own queues fill up, and the stall spreads back to the senders. The
floating-point unit (`fp32_alu.sv`) is combinational, so the whole operation
fits in that cycle:

- rounding is to nearest, ties to even;
- subnormal inputs and results are flushed to zero;
- every NaN result is the quiet NaN `0x7FC00000`.

## Departures and gaps

Things this design chose where the source description is silent:

- the operand order: the stored value comes first, so A_SUB gives stored minus
  incoming;
- the CNT opcode;
- the bus addressing;
- the FIFO depth;
- round-robin service of the two input queues.

Results travel along a row by hopping from SiteO to SiteO, one message per link
per cycle, rather than over a separate horizontal bus. A matrix product therefore
takes more cycles than the N+P+2 the source architecture quotes.

Not modelled:

- the per-SiteO 8-word instruction buffer and weight SRAM;
- the buses between Blocks, the bus controller and the Quad level.

## Verification status

These testbenches pass:

- `tb_fp32_alu` checks the floating-point unit on 28,019 cases against a
  double-precision reference.
- `tb_msg_fifo` checks the queue against a queue model.
- `tb_siteo` checks one SiteO: every opcode, forwarding, the one-cycle
  turnaround, the fan-in counter and backpressure.

`sitem`, `tile` and `mipu_engine` pass a Verilator lint at small sizes. They
have no testbench yet, and a lint of the full-size engine takes several minutes.

Simulate with, for example:

    verilator --binary --timing --assert rtl/mipu_pkg.sv rtl/fp32_alu.sv \
      rtl/msg_fifo.sv rtl/siteo.sv tb/tb_siteo.sv --top tb_siteo
