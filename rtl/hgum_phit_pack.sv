// hgum_phit_pack: packs variable-size byte writes into fixed-width phits.
//
// The serializer writes `wr_n` bytes (0..MAX_FIELD_BYTES, byte 0 first) per
// cycle while `wr_ready` is high. Bytes collect in a three-phit buffer; as soon
// as a full phit is present it is offered on out_*. `flush` (taken together
// with the write of the same cycle) pads the buffer with zero bytes up to the
// next phit boundary, so the stream can be closed at a message or frame end.
// out_nbytes tells how many bytes of the offered phit are real, which lets a
// host-side reader find the true end of the data; `empty` says nothing is
// buffered. Only one padded phit may be held at a time: after a flush the
// writer waits for `empty` before the next flush. A write is accepted when at
// most 3*PHIT_BYTES-MAX_FIELD_BYTES bytes are held, which sustains one
// full-phit write per cycle at any byte offset without a combinational path
// from `out_ready` to `wr_ready`.
//
// The buffer organisation and the padding rule are this design's choices.
module hgum_phit_pack
  import hgum_pkg::*;
(
  input  logic              clk,
  input  logic              rst,
  input  logic              wr_valid,
  output logic              wr_ready,
  input  logic [NB_W-1:0]   wr_n,
  input  logic [DATA_W-1:0] wr_data,
  input  logic              flush,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [PHIT_W-1:0] out_data,
  output logic [CNT_W-1:0]  out_nbytes,
  output logic              empty
);
  localparam int unsigned CAP = 3 * PHIT_BYTES;

  logic [3*PHIT_W-1:0] buf_q;
  logic [CNT_W-1:0]    cnt_q;   // bytes held, padding included
  logic                padv_q;  // a padded phit is held ...
  logic [1:0]          padp_q;  // ... at phit slot 0, 1 or 2 ...
  logic [CNT_W-1:0]    padn_q;  // ... with this many padding bytes

  logic                pop;
  logic [3*PHIT_W-1:0] b1;
  logic [CNT_W-1:0]    c1, c2;
  logic                pv1, pads;
  logic [1:0]          pp1;
  logic [CNT_W-1:0]    pn1;
  logic [3*PHIT_W-1:0] dmask;

  assign wr_ready   = (cnt_q <= CNT_W'(CAP - MAX_FIELD_BYTES));
  assign out_valid  = (cnt_q >= CNT_W'(PHIT_BYTES));
  assign out_data   = buf_q[PHIT_W-1:0];
  assign out_nbytes = (padv_q && padp_q == 2'd0) ? CNT_W'(PHIT_BYTES) - padn_q : CNT_W'(PHIT_BYTES);
  assign empty      = (cnt_q == 0);
  assign pop        = out_valid && out_ready;

  always_comb begin
    // drop the phit that leaves
    b1 = pop ? (buf_q >> PHIT_W) : buf_q;
    c1 = pop ? (cnt_q - CNT_W'(PHIT_BYTES)) : cnt_q;
    pv1 = padv_q && !(pop && padp_q == 2'd0);
    pp1 = (pop && padp_q != 2'd0) ? padp_q - 2'd1 : padp_q;
    pn1 = padn_q;
    // append the write
    dmask = '0;
    if (wr_valid && wr_ready) begin
      for (int i = 0; i < MAX_FIELD_BYTES; i++)
        if (i < int'(wr_n)) dmask[i*BYTE_W +: BYTE_W] = {BYTE_W{1'b1}};
      b1 = b1 | (({{(3*PHIT_W-DATA_W){1'b0}}, wr_data} & dmask) << (c1 * BYTE_W));
      c1 = c1 + CNT_W'(wr_n);
    end
    // pad to a phit boundary
    c2 = c1;
    pads = flush && ((c1 % CNT_W'(PHIT_BYTES)) != 0);
    if (pads)
    begin
      c2  = c1 + CNT_W'(PHIT_BYTES) - (c1 % CNT_W'(PHIT_BYTES));
      pv1 = 1'b1;
      pp1 = 2'(c2 / CNT_W'(PHIT_BYTES) - 1'b1);
      pn1 = c2 - c1;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      buf_q  <= '0;
      cnt_q  <= '0;
      padv_q <= 1'b0;
      padp_q <= 2'd0;
      padn_q <= '0;
    end else begin
      buf_q  <= b1;
      cnt_q  <= c2;
      padv_q <= pv1;
      padp_q <= pp1;
      padn_q <= pn1;
    end
  end

  a_wr_n: assert property (@(posedge clk) disable iff (rst)
                           wr_valid |-> wr_n <= NB_W'(MAX_FIELD_BYTES));
  // only one padded phit may be held: flush again only once the last one left
  a_one_pad: assert property (@(posedge clk) disable iff (rst)
                              (pads && padv_q) |-> (pop && padp_q == 2'd0));
  a_cap:  assert property (@(posedge clk) disable iff (rst) cnt_q <= CNT_W'(CAP));
endmodule
