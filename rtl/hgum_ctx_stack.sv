// hgum_ctx_stack: the context stack that steers the schema traversal.
//
// Every open Array or List on the path from the root to the node being
// visited owns one context (Num, Type, ChildPtr, NextPtr, plus the end-token
// tag). Bottom to top follows root to leaf. Besides push and pop, the top
// entry can be rewritten in place (decrementing Num, counting list elements).
// The stack also keeps the number of List contexts it holds, which is the
// list nesting level used by the HW-to-HW framing protocol.
//
// Interface: push/pop/upd are single-cycle operations at the clock edge,
// at most one per cycle; top, depth and list_cnt are registered views.
// DEPTH is the depth of the schema tree; three levels of nesting is the
// deepest schema the evaluation uses.
module hgum_ctx_stack
  import hgum_pkg::*;
#(
  parameter int unsigned DEPTH = 3
) (
  input  logic                      clk,
  input  logic                      rst,
  input  logic                      push,
  input  ctx_t                      push_ctx,
  input  logic                      pop,
  input  logic                      upd,
  input  ctx_t                      upd_ctx,
  output ctx_t                      top,
  output logic                      empty,
  output logic                      full,
  output logic [$clog2(DEPTH+1)-1:0] depth,
  output logic [LVL_W-1:0]          list_cnt
);
  localparam int unsigned DW = $clog2(DEPTH + 1);
  localparam int unsigned IW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  ctx_t           ent [DEPTH];
  logic [DW-1:0]  sp;      // number of valid entries
  logic [LVL_W-1:0] lcnt;

  always_ff @(posedge clk) begin
    if (rst) begin
      sp   <= '0;
      lcnt <= '0;
    end else if (push) begin
      ent[IW'(sp)] <= push_ctx;
      sp   <= sp + 1'b1;
      lcnt <= lcnt + LVL_W'(push_ctx.is_list);
    end else if (pop) begin
      sp   <= sp - 1'b1;
      lcnt <= lcnt - LVL_W'(top.is_list);
    end else if (upd) begin
      ent[IW'(sp) - 1'b1] <= upd_ctx;
    end
  end

  always_comb begin
    top = '0;
    if (sp != 0) top = ent[IW'(sp) - 1'b1];
  end

  assign empty    = (sp == 0);
  assign full     = (sp == DW'(DEPTH));
  assign depth    = sp;
  assign list_cnt = lcnt;

  // usage rules
  a_no_overflow:  assert property (@(posedge clk) disable iff (rst) push |-> !full);
  a_no_underflow: assert property (@(posedge clk) disable iff (rst) (pop || upd) |-> !empty);
  a_one_op:       assert property (@(posedge clk) disable iff (rst) !(push && pop));
endmodule
