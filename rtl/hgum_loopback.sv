// hgum_loopback: the message loopback used to measure SER/DES throughput.
//
// A message enters as the SW-to-HW phit stream a host serializer would DMA
// in (element counts ahead of the elements). It is deserialized into tagged
// tokens, serialized again for a hardware-to-hardware link (lists carried
// in frames), deserialized on the far side, and finally serialized for the
// host (counts after the elements):
//
//   in phits -> DES (SW-to-HW) -> SER (HW-to-HW) -> link phits
//            -> DES (HW-to-HW) -> SER (HW-to-SW) -> out phits
//
// Between a deserializer and the next serializer a token adapter drops the
// tokens only a receiver needs (tags, list-begin, array-end). All four
// engines share the schema NODES; a client schema's tags only matter to
// the deserializers. The host, its DMA buffers and the physical links are
// outside: the two phit streams are the top's ports, and the link is also
// visible on link_* for observation. Every stage is valid/ready and
// processes one token per cycle in steady state.
module hgum_loopback
  import hgum_pkg::*;
#(
  parameter rom_t        NODES           = example_schema(),
  parameter int unsigned STACK_DEPTH     = 3,
  parameter int unsigned MAX_FRAME_PHITS = 500,
  parameter int unsigned BUF_PHITS       = 512
) (
  input  logic              clk,
  input  logic              rst,
  // SW-to-HW phit stream
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [PHIT_W-1:0] in_data,
  // HW-to-SW phit stream
  output logic              out_valid,
  input  logic              out_ready,
  output logic [PHIT_W-1:0] out_data,
  output logic [CNT_W-1:0]  out_nbytes,
  // HW-to-HW link, observed
  output logic              link_valid,
  output logic              link_ready,
  output logic [PHIT_W-1:0] link_data,
  // message completion per stage: [0] SW-to-HW DES ... [3] HW-to-SW SER
  output logic [3:0]        msg_done,
  output logic [3:0]        err
);
  des_tok_t t0, t2;
  ser_tok_t s1, s3;
  logic t0_v, t0_r, s1_v, s1_r, t2_v, t2_r, s3_v, s3_r;

  hgum_des #(.NODES(NODES), .FRAMED(1'b0), .STACK_DEPTH(STACK_DEPTH)) u_des_sw2hw (
    .clk, .rst, .in_valid, .in_ready, .in_data,
    .tok_valid(t0_v), .tok_ready(t0_r), .tok(t0),
    .msg_done(msg_done[0]), .err(err[0])
  );

  hgum_tok_adapter u_ad0 (
    .in_valid(t0_v), .in_ready(t0_r), .in_tok(t0),
    .out_valid(s1_v), .out_ready(s1_r), .out_tok(s1)
  );

  hgum_ser #(.NODES(NODES), .FRAMED(1'b1), .STACK_DEPTH(STACK_DEPTH),
             .MAX_FRAME_PHITS(MAX_FRAME_PHITS), .BUF_PHITS(BUF_PHITS)) u_ser_hw2hw (
    .clk, .rst, .tok_valid(s1_v), .tok_ready(s1_r), .tok(s1),
    .out_valid(link_valid), .out_ready(link_ready), .out_data(link_data),
    .out_nbytes(), .msg_done(msg_done[1]), .err(err[1])
  );

  hgum_des #(.NODES(NODES), .FRAMED(1'b1), .STACK_DEPTH(STACK_DEPTH)) u_des_hw2hw (
    .clk, .rst, .in_valid(link_valid), .in_ready(link_ready), .in_data(link_data),
    .tok_valid(t2_v), .tok_ready(t2_r), .tok(t2),
    .msg_done(msg_done[2]), .err(err[2])
  );

  hgum_tok_adapter u_ad2 (
    .in_valid(t2_v), .in_ready(t2_r), .in_tok(t2),
    .out_valid(s3_v), .out_ready(s3_r), .out_tok(s3)
  );

  hgum_ser #(.NODES(NODES), .FRAMED(1'b0), .STACK_DEPTH(STACK_DEPTH)) u_ser_hw2sw (
    .clk, .rst, .tok_valid(s3_v), .tok_ready(s3_r), .tok(s3),
    .out_valid, .out_ready, .out_data, .out_nbytes,
    .msg_done(msg_done[3]), .err(err[3])
  );
endmodule
