// hgum_des: schema-driven deserializer (phit stream in, tagged tokens out).
//
// The deserializer walks the schema tree held in a schema ROM, guided by a
// context stack, and reads each field from the phit stream as it reaches the
// field's node. The walk is a pre-order traversal in which the subtree of an
// Array/List node is repeated once per element:
//   * Bytes node: take n bytes, emit one token with the node's tag, then go
//     to the next sibling; after the last sibling one element of the top
//     context is complete: decrement its Num and restart at ChildPtr, or
//     emit the array-end/list-end token, pop, and continue at the popped
//     context's NextPtr (or, when that is NULL, finish an element of the
//     context below in the same way).
//   * Array/List node: read the element count, emit array-length or
//     list-begin; push a context when the count is not zero, otherwise emit
//     the end token at once.
//   * END node: the message is complete; padding up to the next phit
//     boundary is dropped and the walk restarts for the next message.
// The FSM does not depend on the schema: the schema lives only in NODES.
//
// FRAMED = 0 is the SW-to-HW deserializer: Array and List are both sent as
// a count followed by the elements. FRAMED = 1 is the HW-to-HW
// deserializer: Arrays still carry their count, but the data under a List
// travels in frames, each a one-phit header {ListLevel, size in bytes}
// followed by the data padded to a phit boundary. An empty frame ends the
// list of its ListLevel. The deserializer fetches a header when it needs
// list-level data and holds none, and when an element of a List context is
// complete and the current frame is used up; it then ends the list (empty
// frame at this level) or starts another element, descending until the
// number of List contexts equals the header's ListLevel.
//
// Interface: phit FIFO in (in_valid/in_ready), token out (tok_valid/
// tok_ready, des_tok_t), msg_done pulses once per message, err is a sticky
// protocol-error flag (frame of the wrong level, context stack overflow).
// Timing: one token per cycle in steady state; an array costs about three
// extra cycles, a message one more, and each frame a few more cycles.
//
// Own choices, not given by the paper: 4-byte little-endian element counts,
// the frame-header layout and its phit alignment, messages padded to a phit
// boundary, list-begin tokens carrying no data, and the `level` field added
// to each token.
module hgum_des
  import hgum_pkg::*;
#(
  parameter rom_t        NODES       = example_schema(),
  parameter bit          FRAMED      = 1'b0,
  parameter int unsigned STACK_DEPTH = 3
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [PHIT_W-1:0] in_data,
  output logic              tok_valid,
  input  logic              tok_ready,
  output des_tok_t          tok,
  output logic              msg_done,
  output logic              err
);
  typedef enum logic [2:0] {
    S_VISIT, S_EMPTYEND, S_POP, S_ELEMEND, S_LBOUND, S_HDR, S_FIN
  } state_e;

  state_e            st, st_n, ret, ret_n;
  logic [ADDR_W-1:0] ptr, ptr_n;
  logic              frm_vld, frm_vld_n;
  logic [FSZ_W-1:0]  frm_rem, frm_rem_n;
  logic [LVL_W-1:0]  frm_lvl, frm_lvl_n;
  logic              err_n;

  // schema ROM
  node_t nd;
  hgum_schema_rom #(.NODES(NODES)) u_rom (.addr(ptr), .node(nd));

  // context stack
  logic       push, pop, upd;
  ctx_t       push_ctx, upd_ctx, top;
  logic       stk_empty, stk_full;
  logic [LVL_W-1:0] lcnt;
  hgum_ctx_stack #(.DEPTH(STACK_DEPTH)) u_stk (
    .clk, .rst, .push, .push_ctx, .pop, .upd, .upd_ctx,
    .top, .empty(stk_empty), .full(stk_full), .depth(), .list_cnt(lcnt)
  );

  // phit window
  logic [PHIT_W-1:0] win;
  logic [CNT_W-1:0]  avail, consume;
  hgum_phit_unpack u_unp (
    .clk, .rst, .in_valid, .in_ready, .in_data, .win, .avail, .consume
  );

  logic [CNT_W-1:0]  pad;
  assign pad = avail % CNT_W'(PHIT_BYTES);

  // List-level data has to come from a frame.
  logic inframe;
  assign inframe = FRAMED && (lcnt != 0);

  logic [LEN_W-1:0] count;
  assign count = win[LEN_W-1:0];

  function automatic logic [DATA_W-1:0] first_bytes(logic [PHIT_W-1:0] w, logic [NB_W-1:0] n);
    logic [DATA_W-1:0] d = '0;
    for (int i = 0; i < MAX_FIELD_BYTES; i++)
      if (i < int'(n)) d[i*BYTE_W +: BYTE_W] = w[i*BYTE_W +: BYTE_W];
    return d;
  endfunction

  logic [NB_W-1:0] need;
  logic            ok, go;

  always_comb begin
    need      = '0;
    ok        = 1'b0;
    go        = 1'b0;
    st_n      = st;
    ret_n     = ret;
    ptr_n     = ptr;
    frm_vld_n = frm_vld;
    frm_rem_n = frm_rem;
    frm_lvl_n = frm_lvl;
    err_n     = err;
    consume   = '0;
    tok_valid = 1'b0;
    tok       = '0;
    tok.level = lcnt;
    push      = 1'b0;
    push_ctx  = '0;
    pop       = 1'b0;
    upd       = 1'b0;
    upd_ctx   = top;
    msg_done  = 1'b0;

    unique case (st)
      S_VISIT: begin
        unique case (nd.kind)
          N_END: st_n = S_FIN;

          N_LIST, N_ARRAY, N_BYTES: begin
            if (FRAMED && nd.kind == N_LIST) begin
              // Framed list: no count in the stream; the frames say the rest.
              tok_valid  = !stk_full;
              tok.kind   = T_LIST_BEGIN;
              tok.tag    = nd.tag;
              tok.level  = lcnt + 1'b1;
              if (tok_ready && !stk_full) begin
                push              = 1'b1;
                push_ctx.is_list  = 1'b1;
                push_ctx.child    = nd.child;
                push_ctx.next_vld = !nd.last;
                push_ctx.next     = ptr + 1'b1;
                push_ctx.end_en   = 1'b1;
                push_ctx.end_tag  = nd.end_tag;
                st_n              = S_LBOUND;
              end
              if (stk_full) err_n = 1'b1;
            end else if (inframe && !frm_vld) begin
              // list-level data needed, fetch the next frame header
              st_n  = S_HDR;
              ret_n = S_VISIT;
            end else begin
              need = (nd.kind == N_BYTES) ? nd.nbytes : NB_W'(LEN_BYTES);
              ok   = 1'b1;
              if (inframe && (frm_lvl != lcnt || frm_rem < FSZ_W'(need))) begin
                ok    = 1'b0;
                err_n = 1'b1;
              end
              if (nd.kind != N_BYTES && count != 0 && stk_full) begin
                ok    = 1'b0;
                err_n = 1'b1;
              end
              if (ok && avail >= CNT_W'(need)) begin
                tok_valid  = 1'b1;
                tok.tag    = nd.tag;
                tok.nbytes = need;
                tok.data   = first_bytes(win, need);
                unique case (nd.kind)
                  N_ARRAY: tok.kind = T_ARRAY_LEN;
                  N_LIST:  begin tok.kind = T_LIST_BEGIN; tok.level = lcnt + 1'b1; end
                  default: tok.kind = T_DATA;
                endcase
                if (tok_ready) begin
                  consume = CNT_W'(need);
                  if (inframe) begin
                    frm_rem_n = frm_rem - FSZ_W'(need);
                    if (frm_rem_n == 0) frm_vld_n = 1'b0;
                  end
                  if (nd.kind == N_BYTES) begin
                    // advance to the next node
                    if (!nd.last) begin
                      ptr_n = ptr + 1'b1;
                    end else if (!top.is_list || !FRAMED) begin
                      if (top.num > 1) begin
                        upd         = 1'b1;
                        upd_ctx.num = top.num - 1'b1;
                        ptr_n       = top.child;
                      end else begin
                        st_n = S_POP;
                      end
                    end else if (frm_vld_n) begin
                      ptr_n = top.child;            // more of this list in the frame
                    end else begin
                      st_n = S_LBOUND;
                    end
                  end else if (count != 0) begin
                    push              = 1'b1;
                    push_ctx.num      = count;
                    push_ctx.len      = count;
                    push_ctx.is_list  = (nd.kind == N_LIST);
                    push_ctx.child    = nd.child;
                    push_ctx.next_vld = !nd.last;
                    push_ctx.next     = ptr + 1'b1;
                    push_ctx.end_en   = nd.end_en || (nd.kind == N_LIST);
                    push_ctx.end_tag  = nd.end_tag;
                    ptr_n             = nd.child;
                  end else begin
                    st_n = S_EMPTYEND;
                  end
                end
              end
            end
          end
          default: ;
        endcase
      end

      // zero-length Array/List at ptr: end token, then move on
      S_EMPTYEND: begin
        go = 1'b1;
        if (nd.end_en || nd.kind == N_LIST) begin
          tok_valid = 1'b1;
          tok.kind  = (nd.kind == N_LIST) ? T_LIST_END : T_ARRAY_END;
          tok.tag   = nd.end_tag;
          if (nd.kind == N_LIST) tok.level = lcnt + 1'b1;
          go = tok_ready;
        end
        if (go) begin
          st_n = S_VISIT;
          if (!nd.last) ptr_n = ptr + 1'b1;
          else          st_n  = S_ELEMEND;
        end
      end

      // top context complete: end token, pop, continue at NextPtr
      S_POP: begin
        go = 1'b1;
        if (top.end_en) begin
          tok_valid = 1'b1;
          tok.kind  = top.is_list ? T_LIST_END : T_ARRAY_END;
          tok.tag   = top.end_tag;
          go = tok_ready;
        end
        if (go) begin
          pop = 1'b1;
          if (top.next_vld) begin
            ptr_n = top.next;
            st_n  = S_VISIT;
          end else begin
            st_n  = S_ELEMEND;
          end
        end
      end

      // one element of the top context is complete
      S_ELEMEND: begin
        if (!top.is_list || !FRAMED) begin
          if (top.num > 1) begin
            upd         = 1'b1;
            upd_ctx.num = top.num - 1'b1;
            ptr_n       = top.child;
            st_n        = S_VISIT;
          end else begin
            st_n = S_POP;
          end
        end else if (frm_vld && frm_rem != 0) begin
          ptr_n = top.child;
          st_n  = S_VISIT;
        end else begin
          st_n = S_LBOUND;
        end
      end

      // framed List: end it (empty frame of its level) or start an element
      S_LBOUND: begin
        if (!frm_vld) begin
          st_n  = S_HDR;
          ret_n = S_LBOUND;
        end else if (frm_lvl == lcnt && frm_rem == 0) begin
          frm_vld_n = 1'b0;
          st_n      = S_POP;
        end else begin
          if (frm_lvl < lcnt) err_n = 1'b1;
          ptr_n = top.child;
          st_n  = S_VISIT;
        end
      end

      // fetch a frame header: drop padding, then take one phit
      S_HDR: begin
        if (pad != 0) begin
          consume = pad;
        end else if (avail >= CNT_W'(PHIT_BYTES)) begin
          consume   = CNT_W'(PHIT_BYTES);
          frm_vld_n = 1'b1;
          frm_rem_n = win[FSZ_W-1:0];
          frm_lvl_n = win[FSZ_W +: LVL_W];
          st_n      = ret;
        end
      end

      // end of message: drop padding, restart the walk
      S_FIN: begin
        if (pad != 0) begin
          consume = pad;
        end else begin
          msg_done = 1'b1;
          ptr_n    = '0;
          st_n     = S_VISIT;
        end
      end

      default: st_n = S_VISIT;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      st      <= S_VISIT;
      ret     <= S_VISIT;
      ptr     <= '0;
      frm_vld <= 1'b0;
      frm_rem <= '0;
      frm_lvl <= '0;
      err     <= 1'b0;
    end else begin
      st      <= st_n;
      ret     <= ret_n;
      ptr     <= ptr_n;
      frm_vld <= frm_vld_n;
      frm_rem <= frm_rem_n;
      frm_lvl <= frm_lvl_n;
      err     <= err_n;
    end
  end

  // token handshake: an offered token stays until taken
  a_tok_stable: assert property (@(posedge clk) disable iff (rst)
                                 tok_valid && !tok_ready |=> tok_valid && $stable(tok));
  a_end_empty:  assert property (@(posedge clk) disable iff (rst)
                                 msg_done |-> stk_empty);
endmodule
