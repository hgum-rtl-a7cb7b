// hgum_ser: schema-driven serializer (untagged tokens in, phit stream out).
//
// The serializer walks the same schema tree as the deserializer, but the
// tokens come from user logic and carry no tags: a data token per Bytes
// field, an array-length token per Array, and a list-end token (with the
// nesting level of the list, outermost = 1) per List. There is no
// list-begin token: at the start of each List element the serializer looks
// at the next token; a list-end token whose level equals the number of open
// List contexts closes the list, anything else starts another element. The
// level is what tells an empty inner list from the end of the outer one.
//
// FRAMED = 0 is the HW-to-SW serializer. The host buffers the whole message,
// so the element count of an Array or List is written after its elements
// (the host reads the buffer from its end). List contexts count their
// elements as they complete.
//
// FRAMED = 1 is the HW-to-HW serializer. Array counts come first, as the
// receiving hardware needs them. Data below a List is framed: the frame is
// built in hgum_frame_buffer behind a reserved header slot, and closed when
// it would exceed MAX_FRAME_PHITS, when a nested list starts, or when its
// list ends; then the packer is flushed to a phit boundary and the header
// {ListLevel, size in bytes} is written into the reserved slot. Every list
// ends with an empty frame (header only) of its own level, so all data of a
// frame sits under one List context. Raw data outside any list is padded
// to a phit boundary before a frame starts.
//
// Interface: token in (tok_valid/tok_ready, ser_tok_t), phit FIFO out
// (out_valid/out_ready, out_nbytes = real bytes of the phit, less than
// PHIT_BYTES only in a padded phit), msg_done pulse, sticky err (a token
// of the wrong kind). Each message ends padded to a phit boundary.
// Timing: one token per cycle in steady state; a list boundary costs no
// extra cycle, a frame a few cycles, a message about two.
//
// Own choices, not given by the paper: 4-byte little-endian counts, the
// one-phit frame header, phit-aligned frames and messages.
module hgum_ser
  import hgum_pkg::*;
#(
  parameter rom_t        NODES           = example_schema(),
  parameter bit          FRAMED          = 1'b0,
  parameter int unsigned STACK_DEPTH     = 3,
  parameter int unsigned MAX_FRAME_PHITS = 500,
  parameter int unsigned BUF_PHITS       = 512
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              tok_valid,
  output logic              tok_ready,
  input  ser_tok_t          tok,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [PHIT_W-1:0] out_data,
  output logic [CNT_W-1:0]  out_nbytes,
  output logic              msg_done,
  output logic              err
);
  localparam int unsigned MAX_FRAME_BYTES = MAX_FRAME_PHITS * PHIT_BYTES;

  typedef enum logic [2:0] {
    S_VISIT, S_POP, S_ELEMEND, S_FIN, S_OPEN, S_CLOSE, S_EFRAME
  } state_e;

  state_e            st, st_n, ret, ret_n;
  logic [ADDR_W-1:0] ptr, ptr_n;
  logic              lb, lb_n;          // at the start of an element of the top List
  logic              fo, fo_n;          // frame open
  logic [FSZ_W-1:0]  fbytes, fbytes_n;
  logic [LVL_W-1:0]  flvl, flvl_n;
  logic              err_n;

  node_t nd;
  hgum_schema_rom #(.NODES(NODES)) u_rom (.addr(ptr), .node(nd));

  logic       push, pop, upd;
  ctx_t       push_ctx, upd_ctx, top;
  logic       stk_empty, stk_full;
  logic [LVL_W-1:0] lcnt;
  hgum_ctx_stack #(.DEPTH(STACK_DEPTH)) u_stk (
    .clk, .rst, .push, .push_ctx, .pop, .upd, .upd_ctx,
    .top, .empty(stk_empty), .full(stk_full), .depth(), .list_cnt(lcnt)
  );

  // byte packer
  logic              wr_valid, wr_ready, flush, pk_empty;
  logic [NB_W-1:0]   wr_n;
  logic [DATA_W-1:0] wr_data;
  logic              pk_valid, pk_ready;
  logic [PHIT_W-1:0] pk_data;
  logic [CNT_W-1:0]  pk_nbytes;
  hgum_phit_pack u_pack (
    .clk, .rst, .wr_valid, .wr_ready, .wr_n, .wr_data, .flush,
    .out_valid(pk_valid), .out_ready(pk_ready), .out_data(pk_data),
    .out_nbytes(pk_nbytes), .empty(pk_empty)
  );

  // frame buffer (HW-to-HW) or straight output (HW-to-SW)
  logic              rsv, hdr_we, efr_enq, fb_ready;
  logic [PHIT_W-1:0] hdr_data;
  if (FRAMED) begin : g_framed
    logic fb_valid;
    logic [PHIT_W-1:0] fb_data;
    hgum_frame_buffer #(.DEPTH(BUF_PHITS)) u_fb (
      .clk, .rst,
      .enq_valid(pk_valid || efr_enq), .enq_data(efr_enq ? hdr_data : pk_data),
      .rsv, .enq_ready(fb_ready), .rsv_pending(),
      .hdr_we, .hdr_data,
      .out_valid(fb_valid), .out_ready, .out_data(fb_data), .count()
    );
    assign pk_ready   = fb_ready && !efr_enq && !rsv;
    assign out_valid  = fb_valid;
    assign out_data   = fb_data;
    assign out_nbytes = CNT_W'(PHIT_BYTES);
  end else begin : g_direct
    assign fb_ready   = 1'b1;
    assign pk_ready   = out_ready;
    assign out_valid  = pk_valid;
    assign out_data   = pk_data;
    assign out_nbytes = pk_nbytes;
  end

  logic inframe;
  assign inframe = FRAMED && (lcnt != 0);

  always_comb begin
    hdr_data = '0;
    hdr_data[FSZ_W-1:0]    = fbytes;
    hdr_data[FSZ_W +: LVL_W] = (st == S_EFRAME) ? lcnt : flvl;
    if (st == S_EFRAME) hdr_data[FSZ_W-1:0] = '0;
  end

  logic [NB_W-1:0]  n;
  logic [LEN_W-1:0] c;
  logic             wr_now, kind_ok, go;

  always_comb begin
    n        = '0;
    c        = '0;
    wr_now   = 1'b0;
    kind_ok  = 1'b0;
    go       = 1'b0;
    st_n     = st;
    ret_n    = ret;
    ptr_n    = ptr;
    lb_n     = lb;
    fo_n     = fo;
    fbytes_n = fbytes;
    flvl_n   = flvl;
    err_n    = err;
    tok_ready = 1'b0;
    wr_valid = 1'b0;
    wr_n     = '0;
    wr_data  = '0;
    flush    = 1'b0;
    rsv      = 1'b0;
    hdr_we   = 1'b0;
    efr_enq  = 1'b0;
    push     = 1'b0;
    push_ctx = '0;
    pop      = 1'b0;
    upd      = 1'b0;
    upd_ctx  = top;
    msg_done = 1'b0;

    unique case (st)
      S_VISIT: begin
        if (lb && !tok_valid) begin
          // wait: the next token decides whether the list goes on
        end else if (lb && tok.kind == T_LIST_END && tok.level == lcnt) begin
          // end of the top List
          if (FRAMED) begin
            tok_ready = 1'b1;
            lb_n      = 1'b0;
            st_n      = S_EFRAME;
          end else begin
            wr_valid = 1'b1;
            wr_n     = NB_W'(LEN_BYTES);
            wr_data  = DATA_W'(top.num);
            if (wr_ready) begin
              tok_ready = 1'b1;
              lb_n      = 1'b0;
              pop       = 1'b1;
              if (top.next_vld) ptr_n = top.next;
              else              st_n  = S_ELEMEND;
            end
          end
        end else begin
          unique case (nd.kind)
            N_END: begin
              lb_n = 1'b0;
              st_n = S_FIN;
            end

            N_LIST: begin
              if (FRAMED && fo) begin
                st_n  = S_CLOSE;          // a nested list starts a new frame
                ret_n = S_VISIT;
              end else if (stk_full) begin
                err_n = 1'b1;
              end else begin
                push              = 1'b1;
                push_ctx.is_list  = 1'b1;
                push_ctx.child    = nd.child;
                push_ctx.next_vld = !nd.last;
                push_ctx.next     = ptr + 1'b1;
                ptr_n             = nd.child;
                lb_n              = 1'b1;
              end
            end

            N_BYTES, N_ARRAY: begin
              c       = tok.data[LEN_W-1:0];
              n       = (nd.kind == N_BYTES) ? nd.nbytes : NB_W'(LEN_BYTES);
              kind_ok = (nd.kind == N_BYTES) ? (tok.kind == T_DATA) : (tok.kind == T_ARRAY_LEN);
              // HW-to-SW writes an array count after the elements; only an
              // empty array writes its (zero) count right away.
              wr_now  = (nd.kind == N_BYTES) || FRAMED || (c == 0);
              if (tok_valid && !kind_ok) err_n = 1'b1;
              if (!tok_valid || !kind_ok) begin
                // wait for a usable token
              end else if (inframe && wr_now && !fo) begin
                st_n  = S_OPEN;
                ret_n = S_VISIT;
              end else if (inframe && wr_now &&
                           (32'(fbytes) + 32'(n) > MAX_FRAME_BYTES)) begin
                st_n  = S_CLOSE;
                ret_n = S_VISIT;
              end else if (nd.kind == N_ARRAY && c != 0 && stk_full) begin
                err_n = 1'b1;
              end else begin
                wr_valid = wr_now;
                wr_n     = n;
                wr_data  = (nd.kind == N_BYTES) ? tok.data : DATA_W'(c);
                if (wr_ready || !wr_now) begin
                  tok_ready = 1'b1;
                  lb_n      = 1'b0;
                  if (inframe && wr_now) fbytes_n = fbytes + FSZ_W'(n);
                  if (nd.kind == N_ARRAY && c != 0) begin
                    push              = 1'b1;
                    push_ctx.num      = c;
                    push_ctx.len      = c;
                    push_ctx.child    = nd.child;
                    push_ctx.next_vld = !nd.last;
                    push_ctx.next     = ptr + 1'b1;
                    ptr_n             = nd.child;
                  end else if (!nd.last) begin
                    ptr_n = ptr + 1'b1;
                  end else if (top.is_list) begin
                    upd         = 1'b1;           // element done, list goes on?
                    upd_ctx.num = top.num + 1'b1;
                    ptr_n       = top.child;
                    lb_n        = 1'b1;
                  end else if (top.num > 1) begin
                    upd         = 1'b1;
                    upd_ctx.num = top.num - 1'b1;
                    ptr_n       = top.child;
                  end else begin
                    st_n = S_POP;
                  end
                end
              end
            end
            default: ;
          endcase
        end
      end

      // an Array is complete: HW-to-SW writes its count now
      S_POP: begin
        go = 1'b1;
        if (!FRAMED) begin
          wr_valid = 1'b1;
          wr_n     = NB_W'(LEN_BYTES);
          wr_data  = DATA_W'(top.len);
          go       = wr_ready;
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

      S_ELEMEND: begin
        st_n = S_VISIT;
        if (top.is_list) begin
          upd         = 1'b1;
          upd_ctx.num = top.num + 1'b1;
          ptr_n       = top.child;
          lb_n        = 1'b1;
        end else if (top.num > 1) begin
          upd         = 1'b1;
          upd_ctx.num = top.num - 1'b1;
          ptr_n       = top.child;
        end else begin
          st_n = S_POP;
        end
      end

      // message complete: pad the last phit and let it leave
      S_FIN: begin
        flush = 1'b1;
        if (!stk_empty || fo) err_n = 1'b1;
        if (pk_empty) begin
          msg_done = 1'b1;
          ptr_n    = '0;
          st_n     = S_VISIT;
        end
      end

      // open a frame: close the raw stream at a phit boundary, reserve the header
      S_OPEN: begin
        flush = 1'b1;
        if (pk_empty && fb_ready) begin
          rsv      = 1'b1;
          fo_n     = 1'b1;
          fbytes_n = '0;
          flvl_n   = lcnt;
          st_n     = ret;
        end
      end

      // close the open frame: pad, wait for its data, fill in the header
      S_CLOSE: begin
        flush = 1'b1;
        if (pk_empty) begin
          hdr_we = 1'b1;
          fo_n   = 1'b0;
          st_n   = ret;
        end
      end

      // end of a List in HW-to-HW: close its frame, send an empty frame, pop
      S_EFRAME: begin
        if (fo) begin
          st_n  = S_CLOSE;
          ret_n = S_EFRAME;
        end else begin
          flush = 1'b1;
          if (pk_empty && fb_ready) begin
            efr_enq = 1'b1;
            pop     = 1'b1;
            if (top.next_vld) begin
              ptr_n = top.next;
              st_n  = S_VISIT;
            end else begin
              st_n  = S_ELEMEND;
            end
          end
        end
      end

      default: st_n = S_VISIT;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      st     <= S_VISIT;
      ret    <= S_VISIT;
      ptr    <= '0;
      lb     <= 1'b0;
      fo     <= 1'b0;
      fbytes <= '0;
      flvl   <= '0;
      err    <= 1'b0;
    end else begin
      st     <= st_n;
      ret    <= ret_n;
      ptr    <= ptr_n;
      lb     <= lb_n;
      fo     <= fo_n;
      fbytes <= fbytes_n;
      flvl   <= flvl_n;
      err    <= err_n;
    end
  end

  a_out_stable: assert property (@(posedge clk) disable iff (rst)
                                 out_valid && !out_ready |=> out_valid && $stable(out_data));
  a_frame_level: assert property (@(posedge clk) disable iff (rst)
                                  (wr_valid && inframe) |-> (fo && flvl == lcnt));
endmodule
