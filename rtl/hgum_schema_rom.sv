// hgum_schema_rom: the schema tree of one message schema, stored as a ROM.
//
// Each entry is one node of the schema tree after structures have been
// inlined and non-structure array/list elements wrapped: a Bytes leaf, an
// Array or List internal node, or the END node that closes the root. Nodes
// with the same parent are consecutive, so "next sibling" is index+1, and an
// Array/List entry carries the index of its first child. The contents are a
// parameter, so every deserializer can carry its own client-schema tags.
//
// Interface: addr in, node out. Read is asynchronous (combinational); the
// paper speaks of a ROM IP core without giving its latency, and a
// combinational read keeps the traversal at one node per cycle.
module hgum_schema_rom
  import hgum_pkg::*;
#(
  parameter rom_t NODES = example_schema()
) (
  input  logic [ADDR_W-1:0] addr,
  output node_t             node
);
  node_t mem [ROM_DEPTH];

  always_comb begin
    for (int i = 0; i < ROM_DEPTH; i++) mem[i] = NODES[i];
  end

  assign node = mem[addr];
endmodule
