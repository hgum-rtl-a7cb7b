// hgum_frame_buffer: phit FIFO with a second write port for frame headers.
//
// The HW-to-HW serializer builds each frame of list data directly in this
// FIFO. When a frame opens it reserves one entry (`rsv`) for the header,
// then enqueues the frame's data phits behind it. Once the frame is closed
// and its size is known, `hdr_we` writes the header into the reserved entry
// through the extra write port. The read side never passes an entry that is
// reserved but not yet written, so the previous frame drains to the network
// while the next one is still being built. Raw phits outside any list go
// through the same FIFO in order.
//
// Interface: enqueue (enq_valid/enq_ready/enq_data), reserve (rsv, accepted
// with enq_ready, exclusive with enq_valid), header write (hdr_we/hdr_data,
// any time a reservation is outstanding), and the output FIFO
// (out_valid/out_ready/out_data). One reservation may be outstanding.
// DEPTH = 512 phits, one block RAM of the device the paper mentions.
module hgum_frame_buffer
  import hgum_pkg::*;
#(
  parameter int unsigned DEPTH = 512
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              enq_valid,
  input  logic [PHIT_W-1:0] enq_data,
  input  logic              rsv,
  output logic              enq_ready,
  output logic              rsv_pending,
  input  logic              hdr_we,
  input  logic [PHIT_W-1:0] hdr_data,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [PHIT_W-1:0] out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [PHIT_W-1:0]  mem [DEPTH];
  logic [AW-1:0]      wp, rp, hp;
  logic [AW:0]        cnt;
  logic               hv;     // reservation outstanding at hp
  logic               do_enq, do_deq;

  assign enq_ready   = (cnt != (AW+1)'(DEPTH));
  assign out_valid   = (cnt != 0) && !(hv && rp == hp);
  assign out_data    = mem[rp];
  assign rsv_pending = hv;
  assign count       = cnt;
  assign do_enq      = (enq_valid || rsv) && enq_ready;
  assign do_deq      = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (do_enq) mem[wp] <= enq_data;
    if (hdr_we) mem[hp] <= hdr_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wp  <= '0;
      rp  <= '0;
      hp  <= '0;
      hv  <= 1'b0;
      cnt <= '0;
    end else begin
      if (do_enq) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (do_deq) rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      cnt <= cnt + (AW+1)'(do_enq) - (AW+1)'(do_deq);
      if (rsv && enq_ready) begin
        hp <= wp;
        hv <= 1'b1;
      end else if (hdr_we) begin
        hv <= 1'b0;
      end
    end
  end

  a_rsv_excl:  assert property (@(posedge clk) disable iff (rst) !(rsv && enq_valid));
  a_one_rsv:   assert property (@(posedge clk) disable iff (rst) rsv |-> !hv);
  a_hdr_owned: assert property (@(posedge clk) disable iff (rst) hdr_we |-> hv);
endmodule
