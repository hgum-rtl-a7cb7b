// hgum_phit_unpack: byte window over the incoming phit stream.
//
// Fields are byte aligned but not phit aligned, so the deserializer needs to
// take a variable number of bytes (a field, an element count, a padding
// remainder) from a stream that arrives one phit at a time. This block keeps
// up to three phits of bytes. `win` shows the oldest PHIT_BYTES bytes (win
// byte 0 = oldest) and `avail` how many of them are valid; the consumer
// names in `consume` how many to drop at the next edge (at most avail).
// A phit is accepted while at most two phits' worth of bytes are held, so a
// consumer that takes up to a full phit every cycle, at any byte offset,
// sees one phit per cycle with no combinational path from `consume` back
// to `in_ready`.
//
// Bytes are held in whole phits as they arrive, so `avail mod PHIT_BYTES`
// is the number of bytes left before the next phit boundary; the
// deserializer uses it to drop padding. The three-phit window is this
// design's choice; the paper only fixes that the network side is a FIFO
// interface of fixed-width phits.
module hgum_phit_unpack
  import hgum_pkg::*;
(
  input  logic              clk,
  input  logic              rst,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [PHIT_W-1:0] in_data,
  output logic [PHIT_W-1:0] win,
  output logic [CNT_W-1:0]  avail,
  input  logic [CNT_W-1:0]  consume
);
  logic [3*PHIT_W-1:0] buf_q;
  logic [CNT_W-1:0]    cnt_q;

  logic [3*PHIT_W-1:0] shifted;
  logic [CNT_W-1:0]    left;

  assign in_ready = (cnt_q <= CNT_W'(2 * PHIT_BYTES));
  assign win      = buf_q[PHIT_W-1:0];
  assign avail    = cnt_q;

  always_comb begin
    left    = cnt_q - consume;
    shifted = buf_q >> (consume * BYTE_W);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      buf_q <= '0;
      cnt_q <= '0;
    end else begin
      if (in_valid && in_ready) begin
        buf_q <= shifted | ({{(2*PHIT_W){1'b0}}, in_data} << (left * BYTE_W));
        cnt_q <= left + CNT_W'(PHIT_BYTES);
      end else begin
        buf_q <= shifted;
        cnt_q <= left;
      end
    end
  end

  a_consume_le_avail: assert property (@(posedge clk) disable iff (rst) consume <= cnt_q);
endmodule
