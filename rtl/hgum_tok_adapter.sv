// hgum_tok_adapter: turns a deserializer's token stream into a serializer's.
//
// The two token formats differ on purpose: a deserializer says as much as
// it can (tags, list-begin, optional array-end), a serializer asks for as
// little as it can. Forwarding a message from one link to the next
// therefore drops list-begin and array-end tokens, drops the tag, and
// passes data, array-length (with its count) and list-end (with the list's
// nesting level) tokens on. Combinational, valid/ready on both sides;
// dropped tokens are accepted at once. This forwarding block is this
// design's own; the loopback it serves is the paper's.
module hgum_tok_adapter
  import hgum_pkg::*;
(
  input  logic     in_valid,
  output logic     in_ready,
  input  des_tok_t in_tok,
  output logic     out_valid,
  input  logic     out_ready,
  output ser_tok_t out_tok
);
  logic keep;
  assign keep = (in_tok.kind == T_DATA) || (in_tok.kind == T_ARRAY_LEN) ||
                (in_tok.kind == T_LIST_END);

  assign out_valid     = in_valid && keep;
  assign in_ready      = keep ? out_ready : 1'b1;
  assign out_tok.kind  = in_tok.kind;
  assign out_tok.level = in_tok.level;
  assign out_tok.data  = in_tok.data;
endmodule
