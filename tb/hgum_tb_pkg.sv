// hgum_tb_pkg: reference models for the testbenches.
//
// The models are written out by hand for each test schema, straight from the
// wire formats (they do not walk a schema ROM), so they check the RTL
// independently:
//   * ExMsg  - struct Msg { List<Array<Tuple{u32 x; u64 y}>> a; u8 b; }
//   * FrMsg  - struct Msg { u32 a; List<Foo{List<u8> c; u16 d}> b; }
//   * VecMsg - a single [Array,[Bytes,16]] or [List,[Bytes,16]] field
// For each the package builds the SW-to-HW byte stream (count before
// elements), the HW-to-SW byte stream (count after elements), the HW-to-HW
// phit stream (lists in frames: one header phit {level, size}, data padded
// to a phit, an empty frame at the end of every list), the tokens a
// deserializer emits and the tokens a serializer takes.
package hgum_tb_pkg;
  import hgum_pkg::*;

  typedef logic [7:0]        byte_t;
  typedef logic [PHIT_W-1:0] phit_t;

  // ---------------------------------------------------------------- helpers
  function automatic void put(ref byte_t q[$], input logic [127:0] v, input int n);
    for (int i = 0; i < n; i++) q.push_back(v[i*8 +: 8]);
  endfunction

  // bytes -> phits, last phit zero padded
  function automatic void to_phits(ref byte_t q[$], ref phit_t p[$], ref int nb[$]);
    int i = 0;
    while (i < q.size()) begin
      phit_t ph = '0;
      int k = 0;
      for (k = 0; k < PHIT_BYTES && i < q.size(); k++, i++) ph[k*8 +: 8] = q[i];
      p.push_back(ph);
      nb.push_back(k);
    end
  endfunction

  function automatic des_tok_t dtok(tok_kind_e k, int tag, int lvl, int nb, logic [127:0] d);
    des_tok_t t = '0;
    t.kind = k; t.tag = TAG_W'(tag); t.level = LVL_W'(lvl); t.nbytes = NB_W'(nb);
    t.data = DATA_W'(d);
    return t;
  endfunction

  function automatic ser_tok_t stok(tok_kind_e k, int lvl, logic [127:0] d);
    ser_tok_t t = '0;
    t.kind = k; t.level = LVL_W'(lvl); t.data = DATA_W'(d);
    return t;
  endfunction

  // Frame builder used by the HW-to-HW model: mirrors the framing rules.
  class Framer;
    phit_t out[$];
    byte_t raw[$];     // unframed bytes waiting for a phit boundary
    byte_t fr[$];      // open frame data
    bit    open;
    int    lvl;
    int    maxb;
    int    nframes, nsplits, nempty;
    function new(int max_phits);
      maxb = max_phits * PHIT_BYTES; open = 0;
      nframes = 0; nsplits = 0; nempty = 0;
    endfunction
    // move bytes to phits, padding the last one
    function void emit_raw();
      phit_t ph;
      int i = 0;
      while (i < raw.size()) begin
        ph = '0;
        for (int k = 0; k < PHIT_BYTES && i < raw.size(); k++, i++) ph[k*8 +: 8] = raw[i];
        out.push_back(ph);
      end
      raw.delete();
    endfunction
    function void emit_frame();
      phit_t ph;
      int i = 0;
      while (i < fr.size()) begin
        ph = '0;
        for (int k = 0; k < PHIT_BYTES && i < fr.size(); k++, i++) ph[k*8 +: 8] = fr[i];
        out.push_back(ph);
      end
      fr.delete();
    endfunction
    function void close();
      phit_t h = '0;
      if (!open) return;
      h[15:0] = 16'(fr.size()); h[16 +: LVL_W] = LVL_W'(lvl);
      out.push_back(h);
      emit_frame();
      open = 0; nframes++;
    endfunction
    // write n bytes of v at list level l (0 = outside any list)
    function void wr(logic [127:0] v, int n, int l);
      if (l == 0) begin
        for (int i = 0; i < n; i++) raw.push_back(v[i*8 +: 8]);
        return;
      end
      if (open && fr.size() + n > maxb) begin close(); nsplits++; end
      if (!open) begin emit_raw(); open = 1; lvl = l; end
      for (int i = 0; i < n; i++) fr.push_back(v[i*8 +: 8]);
    endfunction
    function void nested_list();   // a List node is visited
      close();
    endfunction
    function void list_end(int l);
      phit_t h = '0;
      close();
      emit_raw();
      h[16 +: LVL_W] = LVL_W'(l);
      out.push_back(h);
      nempty++;
    endfunction
    function void finish();
      emit_raw();
    endfunction
  endclass

  // ------------------------------------------------------------- ExMsg
  class ExMsg;
    int unsigned alen[$];        // a[i].size()
    logic [31:0] x[$];           // all a[i][j].x, in order
    logic [63:0] y[$];
    logic [7:0]  b;

    function void randomize_msg(int max_list, int max_arr);
      int nl = $urandom_range(max_list, 0);
      alen.delete(); x.delete(); y.delete();
      for (int i = 0; i < nl; i++) begin
        int na = $urandom_range(max_arr, 0);
        alen.push_back(na);
        for (int j = 0; j < na; j++) begin
          x.push_back($urandom);
          y.push_back({$urandom, $urandom});
        end
      end
      b = 8'($urandom);
    endfunction

    function void sw_bytes(ref byte_t q[$]);
      int k = 0;
      put(q, 128'(alen.size()), 4);
      foreach (alen[i]) begin
        put(q, 128'(alen[i]), 4);
        for (int j = 0; j < alen[i]; j++, k++) begin put(q, 128'(x[k]), 4); put(q, 128'(y[k]), 8); end
      end
      put(q, 128'(b), 1);
      while (q.size() % PHIT_BYTES != 0) q.push_back(8'h00);
    endfunction

    function void hw2sw_bytes(ref byte_t q[$]);
      int k = 0;
      foreach (alen[i]) begin
        for (int j = 0; j < alen[i]; j++, k++) begin put(q, 128'(x[k]), 4); put(q, 128'(y[k]), 8); end
        put(q, 128'(alen[i]), 4);
      end
      put(q, 128'(alen.size()), 4);
      put(q, 128'(b), 1);
    endfunction

    function void hw2hw_phits(Framer f);
      int k = 0;
      f.nested_list();
      foreach (alen[i]) begin
        f.wr(128'(alen[i]), 4, 1);
        for (int j = 0; j < alen[i]; j++, k++) begin f.wr(128'(x[k]), 4, 1); f.wr(128'(y[k]), 8, 1); end
      end
      f.list_end(1);
      f.wr(128'(b), 1, 0);
      f.finish();
    endfunction

    // tokens of a deserializer with the example client schema (tags 1..7)
    function void des_tokens(ref des_tok_t t[$], input bit framed);
      int k = 0;
      if (framed) t.push_back(dtok(T_LIST_BEGIN, 1, 1, 0, 0));
      else        t.push_back(dtok(T_LIST_BEGIN, 1, 1, 4, 128'(alen.size())));
      foreach (alen[i]) begin
        t.push_back(dtok(T_ARRAY_LEN, 2, 1, 4, 128'(alen[i])));
        for (int j = 0; j < alen[i]; j++, k++) begin
          t.push_back(dtok(T_DATA, 3, 1, 4, 128'(x[k])));
          t.push_back(dtok(T_DATA, 4, 1, 8, 128'(y[k])));
        end
        t.push_back(dtok(T_ARRAY_END, 5, 1, 0, 0));
      end
      t.push_back(dtok(T_LIST_END, 6, 1, 0, 0));
      t.push_back(dtok(T_DATA, 7, 0, 1, 128'(b)));
    endfunction

    function void ser_tokens(ref ser_tok_t t[$]);
      int k = 0;
      foreach (alen[i]) begin
        t.push_back(stok(T_ARRAY_LEN, 0, 128'(alen[i])));
        for (int j = 0; j < alen[i]; j++, k++) begin
          t.push_back(stok(T_DATA, 0, 128'(x[k])));
          t.push_back(stok(T_DATA, 0, 128'(y[k])));
        end
      end
      t.push_back(stok(T_LIST_END, 1, 0));
      t.push_back(stok(T_DATA, 0, 128'(b)));
    endfunction
  endclass

  // ------------------------------------------------------------- FrMsg
  class FrMsg;
    logic [31:0] a;
    int unsigned clen[$];        // b[i].c.size()
    logic [7:0]  c[$];           // all c bytes, in order
    logic [15:0] d[$];           // b[i].d

    function void randomize_msg(int max_list, int max_c);
      int nb = $urandom_range(max_list, 0);
      clen.delete(); c.delete(); d.delete();
      a = $urandom;
      for (int i = 0; i < nb; i++) begin
        int nc = $urandom_range(max_c, 0);
        clen.push_back(nc);
        for (int j = 0; j < nc; j++) c.push_back(8'($urandom));
        d.push_back(16'($urandom));
      end
    endfunction

    function void hw2hw_phits(Framer f);
      int k = 0;
      f.wr(128'(a), 4, 0);
      f.nested_list();                       // b
      foreach (clen[i]) begin
        f.nested_list();                     // b[i].c
        for (int j = 0; j < clen[i]; j++, k++) f.wr(128'(c[k]), 1, 2);
        f.list_end(2);
        f.wr(128'(d[i]), 2, 1);
      end
      f.list_end(1);
      f.finish();
    endfunction

    function void des_tokens(ref des_tok_t t[$]);
      int k = 0;
      t.push_back(dtok(T_DATA, 1, 0, 4, 128'(a)));
      t.push_back(dtok(T_LIST_BEGIN, 2, 1, 0, 0));
      foreach (clen[i]) begin
        t.push_back(dtok(T_LIST_BEGIN, 3, 2, 0, 0));
        for (int j = 0; j < clen[i]; j++, k++) t.push_back(dtok(T_DATA, 4, 2, 1, 128'(c[k])));
        t.push_back(dtok(T_LIST_END, 5, 2, 0, 0));
        t.push_back(dtok(T_DATA, 6, 1, 2, 128'(d[i])));
      end
      t.push_back(dtok(T_LIST_END, 7, 1, 0, 0));
    endfunction

    function void ser_tokens(ref ser_tok_t t[$]);
      int k = 0;
      t.push_back(stok(T_DATA, 0, 128'(a)));
      foreach (clen[i]) begin
        for (int j = 0; j < clen[i]; j++, k++) t.push_back(stok(T_DATA, 0, 128'(c[k])));
        t.push_back(stok(T_LIST_END, 2, 0));
        t.push_back(stok(T_DATA, 0, 128'(d[i])));
      end
      t.push_back(stok(T_LIST_END, 1, 0));
    endfunction

    // HW-to-SW: counts after the elements
    function void hw2sw_bytes(ref byte_t q[$]);
      int k = 0;
      put(q, 128'(a), 4);
      foreach (clen[i]) begin
        for (int j = 0; j < clen[i]; j++, k++) put(q, 128'(c[k]), 1);
        put(q, 128'(clen[i]), 4);
        put(q, 128'(d[i]), 2);
      end
      put(q, 128'(clen.size()), 4);
    endfunction
  endclass

  // ------------------------------------------------------------- VecMsg
  class VecMsg;
    logic [127:0] v[$];
    function void fill(int n);
      v.delete();
      for (int i = 0; i < n; i++) v.push_back({$urandom, $urandom, $urandom, $urandom});
    endfunction
    function void sw_bytes(ref byte_t q[$]);
      put(q, 128'(v.size()), 4);
      foreach (v[i]) put(q, v[i], 16);
      while (q.size() % PHIT_BYTES != 0) q.push_back(8'h00);
    endfunction
    function void hw2sw_bytes(ref byte_t q[$]);
      foreach (v[i]) put(q, v[i], 16);
      put(q, 128'(v.size()), 4);
    endfunction
  endclass

endpackage
