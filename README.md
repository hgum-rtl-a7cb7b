# Schema-driven message serializers and deserializers for FPGA accelerators

Accelerators that talk to software, or to each other, exchange structured
messages: nested arrays, variable-length lists, fixed-size fields. Writing
the logic that turns such a message into a stream of fixed-width network
words (phits), and back, by hand for every message type is slow and easy
to get wrong. This design makes that logic generic. One serializer (SER)
and one deserializer (DES) walk a *schema tree* held in a small ROM. The
user logic sees a stream of **tokens**: one per field, plus markers where
arrays and lists begin and end. It never sees phits or byte offsets.

This RTL covers the three kinds of link the approach uses:

| link | block | wire format of an Array / List |
|---|---|---|
| software → hardware | `hgum_des`, `FRAMED=0` | element count **before** the elements |
| hardware → software | `hgum_ser`, `FRAMED=0` | element count **after** the elements (the host reads its buffer from the end) |
| hardware → hardware | `hgum_ser` / `hgum_des`, `FRAMED=1` | arrays: count before. Lists: **frames** (see below) |

The top level, `hgum_loopback`, chains all four modules. A message goes
from software to hardware, across a hardware-to-hardware link, and back to
software. That is the set-up used to measure throughput.

## Data model

A schema is built from three types:

- `[Bytes,n]`: a field of n bytes, at most 16 here;
- `[Array,T]`: the element count is known when the array starts;
- `[List,T]`: the producer does not know the length up front.

Structs are flattened into consecutive children. The example schema used
throughout is

```
struct Msg { List<Array<Tuple{u32 x; u64 y}>> a; u8 b; }
```

The ROM holds one `node_t` per node (`hgum_pkg.sv`):

- its kind (`BYTES`, `ARRAY`, `LIST`, `END`);
- a `last` flag for the last child of a parent;
- the field size;
- for an Array or List, the index of the first child;
- the tag to put on its token;
- for a container, the tag of its end token.

Children of one parent sit at consecutive addresses. The root's last child
is an `END` node, which marks the end of the message. `example_schema()`
(tags 1–7), `single_container_schema()` and `framing_schema()` in the
package build such ROMs. A different message type is a different `NODES`
parameter; no RTL changes.

Bytes are 8 bits. Byte 0 of the stream is in phit bits [7:0], and
multi-byte fields and counts are little-endian. Counts are 4 bytes. Every
message starts on a phit boundary, and the last phit of a message is zero
padded.

## Traversal: schema ROM plus context stack

Both SER and DES run the same walk. A pointer visits ROM nodes in order.

- **Bytes node.** Move one field: read it from the stream (DES) or write
  it (SER). Then go to the next sibling.
- **Array or List node.** Push a *context* onto `hgum_ctx_stack`, then go
  to the first child. A context holds:
  - the remaining or counted elements (`num`);
  - its type;
  - a pointer to the first child;
  - a pointer to the node after the container, or "none".
- **After the last child.** An array decrements `num` and restarts at the
  first child, or pops when `num` runs out. A list asks whether another
  element follows.

The stack is three entries deep by default, enough for three levels of
nested containers. It also counts the List contexts it holds. That count is
the *list level*, used by list-end tokens and by the framing protocol.

Tokens out of a DES (`des_tok_t`) carry:

- the kind (`DATA`, `ARRAY_LEN`, `ARRAY_END`, `LIST_BEGIN`, `LIST_END`);
- the node's tag;
- the list level;
- the valid byte count;
- up to 16 bytes of data.

Array-end tokens are optional per Array node. Tokens into a SER
(`ser_tok_t`) carry less: data, array length, and list end with the level
of the list that ends. The SER needs no list-begin. At the start of each
list element it looks at the next token. A `LIST_END` whose level equals
the current list count closes the list; anything else starts another
element. The level is what tells "the inner list is empty" apart from "the
outer list ends".

## Lists between two pieces of hardware: framing

Software can buffer a whole message, so a software receiver can take a list
count at either end. Two streaming hardware blocks cannot: the sender does
not know a list's length when the list starts, and the receiver has no room
to wait for the end. The HW-to-HW SER therefore cuts list data into
**frames**. Each frame has a one-phit header in front:

```
header phit: bits [15:0]  frame size in bytes (0 = empty frame)
             bits [19:16] ListLevel of all data in the frame
             other bits   zero
frame data:  'size' bytes, zero padded to a phit boundary
```

The SER follows four rules:

1. All bytes of one frame belong to one list level. A nested list starts a
   new frame, and the data after it starts another.
2. A frame closes when the next field would take it past
   `MAX_FRAME_PHITS` (500 by default), or when its list ends.
3. Every list, empty or not, ends with an empty frame of its own level.
4. Raw data outside any list is padded to a phit before a frame starts.

The DES fetches a header in two cases:

- it visits a List node while no frame is open;
- the current frame runs out while a list is open.

It then compares the header's level with its own list count. An empty frame
at the current level pops the list. A frame at a deeper level means
another element of the current list begins. Traversal goes on until the
two levels agree, so the DES is at the node where the SER opened the frame.

The frame is built in `hgum_frame_buffer`, a 512-phit FIFO with a second
write port:

1. When a frame opens, the SER flushes the byte packer to a phit boundary
   and *reserves* the next FIFO entry for the header.
2. The frame data is enqueued behind the reserved entry.
3. When the frame closes, the header is written into that entry through
   the second port.

The read side stops at a reserved entry until its header arrives. The
previous frame therefore drains to the link while the next one is being
filled. A frame of 500 phits plus its header fits the 512-entry buffer.

## Byte packing and unpacking

Fields are byte aligned but not phit aligned. `hgum_phit_unpack` keeps up to
three phits of incoming bytes and shows the oldest 16 as a window. The DES
names how many bytes it takes each cycle. `hgum_phit_pack` does the reverse
for the SER: it appends 0–16 bytes per cycle and emits full phits. On
`flush` it pads to a phit, and `out_nbytes` reports how many bytes of the
padded phit are real.

Both hold three phits rather than two. With two, a 16-byte field stream
that is offset by a 4-byte count from the phit grid moves only one phit
every two cycles. With three, the full rate holds at any offset, and no
combinational path runs from the consumer's ready back to the producer.

## Timing

Each SER and DES handles one token per cycle in steady state:

- A container start, an array pop and a message end cost a cycle or two
  each.
- A frame costs a few cycles: flush, header reservation, header fetch.
- A message ends with a flush of the last phit.

Throughput of the full loopback, with a 128-bit phit, 500-phit frames, no
input gaps and no output back-pressure (`tb_hgum_throughput`). Each cell is
the measured message rate as a fraction of one token per cycle, where an
array of n elements is n+1 tokens and a list is n+2:

| n | 1 | 2 | 8 | 32 | 128 | 512 | 2048 | 8192 |
|---|---|---|---|---|---|---|---|---|
| array | 0.29 | 0.38 | 0.64 | 0.87 | 0.96 | 0.99 | 1.00 | 1.00 |
| list  | 0.27 | 0.33 | 0.56 | 0.81 | 0.94 | 0.98 | 0.99 | 0.99 |

Short messages are dominated by the fixed per-message and per-container
cycles. Long lists stay slightly below arrays because every 500-phit frame
costs a few cycles.

## Files

`rtl/`:

- `hgum_pkg.sv`: sizes, ROM/context/token types, and the example schema
  builders.
- `hgum_schema_rom.sv`: the schema ROM.
- `hgum_ctx_stack.sv`: the context stack.
- `hgum_phit_unpack.sv`, `hgum_phit_pack.sv`: the byte windows.
- `hgum_frame_buffer.sv`: the FIFO with the header port.
- `hgum_des.sv`, `hgum_ser.sv`: the deserializer and serializer. `FRAMED`
  selects the software or the hardware link.
- `hgum_tok_adapter.sv`: turns DES tokens into SER tokens. It drops tags,
  list-begin and array-end.
- `hgum_loopback.sv`: the top. The HW-to-HW link is brought out on
  `link_*` so it can be observed.

Default parameters:

| parameter | value |
|---|---|
| phit | 128 bits |
| byte | 8 bits |
| largest field | 16 bytes |
| stack depth | 3 |
| frame | 500 phits |
| frame buffer | 512 phits |
| ROM depth | 64 nodes |

`tb/`: `hgum_tb_pkg.sv` holds the reference models. They are written per
schema straight from the wire formats above, not by walking a ROM, so they
check the RTL independently. Each block has a self-checking testbench:

| testbench | what it checks |
|---|---|
| `tb_hgum_schema_rom` | the ROM contents |
| `tb_hgum_ctx_stack` | the stack against a queue model |
| `tb_hgum_phit_unpack` | bytes, counts and full rate |
| `tb_hgum_phit_pack` | bytes, counts and full rate, padding included |
| `tb_hgum_frame_buffer` | header reservation and ordering |
| `tb_hgum_des` | both modes, token by token |
| `tb_hgum_ser` | both modes, phit by phit |
| `tb_hgum_loopback` | 40 random messages with 4-phit frames, random gaps and back-pressure |
| `tb_hgum_loopback_full` | every parameter at its default, with one list long enough to split a 500-phit frame |
| `tb_hgum_throughput` | the table above |

The two loopback tests count each mechanism and fail if one never happens:

- an empty list and an empty array;
- an array-end token;
- a frame split and an empty frame;
- a header fetch;
- an input stall and output back-pressure;
- several messages in flight at once.

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/hgum_pkg.sv tb/hgum_tb_pkg.sv rtl/hgum_schema_rom.sv rtl/hgum_ctx_stack.sv \
  rtl/hgum_phit_unpack.sv rtl/hgum_phit_pack.sv rtl/hgum_frame_buffer.sv \
  rtl/hgum_des.sv rtl/hgum_ser.sv rtl/hgum_tok_adapter.sv rtl/hgum_loopback.sv \
  tb/tb_hgum_loopback.sv --top-module tb_hgum_loopback -o sim
./obj_dir/sim
```

Each test ends with a line `TB_RESULT checks=N failures=M`.

## Where this departs from, or adds to, the original approach

- The original generates a dedicated SER/DES per schema. Here one RTL
  module per direction is steered by a schema ROM parameter. The
  traversal algorithm is the same.
- These formats are this design's own choices:
  - the frame header layout (one whole phit, size in bytes, 4-bit level);
  - 4-byte counts;
  - the padding of frames and messages to phit boundaries;
  - the token field widths.
- The HW-to-HW serializer writes array counts before the elements, as the
  software-to-hardware format does.
- The token adapter between a DES and the next SER is an addition. So is
  the `out_nbytes` output, which lets a host find the real end of a padded
  message.
- Not built here:
  - the host-side software serializer and deserializer (modelled only
    inside the testbenches);
  - the DMA/PCIe transport;
  - the application-specific adapter shims between tokens and an
    accelerator's own input format.
- Limits:
  - a schema deeper than `STACK_DEPTH` sets `err`;
  - a field larger than 16 bytes must be split into several fields;
  - a frame is limited to 65535 bytes by its 16-bit size field.
