// hgum_pkg: formats shared by the schema-driven serializers and deserializers.
//
// A message is a stream of bytes (BYTE_W bits each) carried in phits of
// PHIT_BYTES bytes. Byte 0 of a phit sits in bits [BYTE_W-1:0] and is the
// first byte of the stream; a multi-byte field is stored little-endian, its
// first byte holding the least significant bits (the 32-bit example phit
// 0x5678_1234 carries a=0x1234 then b=0x5678).
//
// The schema tree is held in a ROM of node_t entries. Children of one parent
// are stored consecutively, a node carries a `last` flag when it is the last
// child of its parent, and Array/List nodes hold the index of their first
// child. The root's last child is an END node.
//
// A 128-bit phit, 8-bit bytes and fields of at most one phit are the sizes
// used in the throughput evaluation this design follows. The width of an
// element count (LEN_BYTES), the tag width and the frame header layout are
// this design's own choices.
package hgum_pkg;

  // ---- stream format -------------------------------------------------------
  localparam int unsigned BYTE_W          = 8;    // configurable byte width, default 8
  localparam int unsigned PHIT_BYTES      = 16;   // 128-bit phit
  localparam int unsigned PHIT_W          = BYTE_W * PHIT_BYTES;
  localparam int unsigned MAX_FIELD_BYTES = 16;   // largest [Bytes,n] field, must be <= PHIT_BYTES
  localparam int unsigned DATA_W          = BYTE_W * MAX_FIELD_BYTES;
  localparam int unsigned LEN_BYTES       = 4;    // element count of an Array/List
  localparam int unsigned LEN_W           = BYTE_W * LEN_BYTES;
  localparam int unsigned CNT_W           = $clog2(3 * PHIT_BYTES + 1); // byte counts in a 3-phit window
  localparam int unsigned NB_W            = $clog2(MAX_FIELD_BYTES + 1);

  // ---- schema ROM and context stack ---------------------------------------
  localparam int unsigned ROM_DEPTH = 64;
  localparam int unsigned ADDR_W    = $clog2(ROM_DEPTH);
  localparam int unsigned TAG_W     = 8;
  localparam int unsigned LVL_W     = 4;          // list nesting level

  // ---- HW-to-HW frame header: one whole phit --------------------------------
  // bits [15:0]  frame size in bytes (0 = empty frame = end of a list)
  // bits [19:16] ListLevel of the data inside the frame (LVL_W bits)
  localparam int unsigned FSZ_W = 16;

  typedef enum logic [1:0] {
    N_BYTES = 2'd0,
    N_ARRAY = 2'd1,
    N_LIST  = 2'd2,
    N_END   = 2'd3
  } node_kind_e;

  typedef struct packed {
    node_kind_e        kind;
    logic              last;     // last child of its parent
    logic [NB_W-1:0]   nbytes;   // field size of a Bytes node
    logic [ADDR_W-1:0] child;    // first child of an Array/List node
    logic [TAG_W-1:0]  tag;      // tag of a Bytes token, or of array-length/list-begin
    logic              end_en;   // emit array-end token (list-end is always emitted)
    logic [TAG_W-1:0]  end_tag;  // tag of the array-end/list-end token
  } node_t;

  typedef node_t [ROM_DEPTH-1:0] rom_t;

  typedef struct packed {
    logic [LEN_W-1:0]  num;      // elements still to traverse (Array) / started so far (List in SER)
    logic [LEN_W-1:0]  len;      // element count as announced (SER of an Array)
    logic              is_list;  // Type: 1 = List, 0 = Array
    logic [ADDR_W-1:0] child;    // ChildPtr
    logic              next_vld; // NextPtr != NULL
    logic [ADDR_W-1:0] next;     // NextPtr
    logic              end_en;
    logic [TAG_W-1:0]  end_tag;
  } ctx_t;

  // ---- tokens ----------------------------------------------------------------
  typedef enum logic [2:0] {
    T_DATA       = 3'd0,
    T_ARRAY_LEN  = 3'd1,
    T_ARRAY_END  = 3'd2,
    T_LIST_BEGIN = 3'd3,
    T_LIST_END   = 3'd4
  } tok_kind_e;

  // Token leaving a deserializer: tag from the client schema, plus the kind,
  // the list nesting level and the number of valid bytes.
  typedef struct packed {
    tok_kind_e         kind;
    logic [TAG_W-1:0]  tag;
    logic [LVL_W-1:0]  level;    // List contexts open when the token is emitted
    logic [NB_W-1:0]   nbytes;   // bytes of data (LEN_BYTES for array-length)
    logic [DATA_W-1:0] data;
  } des_tok_t;

  // Token entering a serializer: no tag, no list-begin and no array-end.
  // kind is T_DATA, T_ARRAY_LEN (data = element count) or T_LIST_END
  // (level = nesting level of the list that ends, outermost list = 1).
  typedef struct packed {
    tok_kind_e         kind;
    logic [LVL_W-1:0]  level;
    logic [DATA_W-1:0] data;
  } ser_tok_t;

  // ---- helpers to build schema ROMs -----------------------------------------
  function automatic node_t mk_bytes(int unsigned n, int unsigned tag, bit last);
    node_t x = '0;
    x.kind = N_BYTES; x.nbytes = NB_W'(n); x.tag = TAG_W'(tag); x.last = last;
    return x;
  endfunction

  function automatic node_t mk_cont(node_kind_e k, int unsigned child, int unsigned tag,
                                    bit end_en, int unsigned end_tag, bit last);
    node_t x = '0;
    x.kind = k; x.child = ADDR_W'(child); x.tag = TAG_W'(tag);
    x.end_en = end_en; x.end_tag = TAG_W'(end_tag); x.last = last;
    return x;
  endfunction

  function automatic node_t mk_end();
    node_t x = '0;
    x.kind = N_END; x.last = 1'b1;
    return x;
  endfunction

  // Schema of the IDL example: struct Msg { List<Array<Tuple{u32 x; u64 y}>> a; u8 b; }
  // with the client-schema tags /a/start=1, /a/elem/start=2, x=3, y=4,
  // /a/elem/end=5, /a/end=6, /b=7.
  function automatic rom_t example_schema();
    rom_t r = '0;
    r[0] = mk_cont(N_LIST,  3, 1, 1'b1, 6, 1'b0);  // a : List
    r[1] = mk_bytes(1, 7, 1'b0);                    // b : Bytes 1
    r[2] = mk_end();                                // END
    r[3] = mk_cont(N_ARRAY, 4, 2, 1'b1, 5, 1'b1);  // a[i] : Array
    r[4] = mk_bytes(4, 3, 1'b0);                    // a[i][j].x
    r[5] = mk_bytes(8, 4, 1'b1);                    // a[i][j].y
    return r;
  endfunction

  // Throughput schemas: one field [Array,[Bytes,16]] (no array-end token) or
  // [List,[Bytes,16]]. Tags: start=1, element=2, end=3.
  function automatic rom_t single_container_schema(bit is_list);
    rom_t r = '0;
    r[0] = mk_cont(is_list ? N_LIST : N_ARRAY, 2, 1, 1'b0, 3, 1'b0);
    r[1] = mk_end();
    r[2] = mk_bytes(16, 2, 1'b1);
    return r;
  endfunction

  // Framing example: struct Msg { u32 a; List<Foo{List<u8> c; u16 d}> b; }
  // Tags: a=1, b.start=2, c.start=3, c.elem=4, c.end=5, d=6, b.end=7.
  function automatic rom_t framing_schema();
    rom_t r = '0;
    r[0] = mk_bytes(4, 1, 1'b0);                    // a
    r[1] = mk_cont(N_LIST, 3, 2, 1'b1, 7, 1'b0);    // b : List<Foo>
    r[2] = mk_end();
    r[3] = mk_cont(N_LIST, 5, 3, 1'b1, 5, 1'b0);    // b[i].c : List<u8>
    r[4] = mk_bytes(2, 6, 1'b1);                    // b[i].d
    r[5] = mk_bytes(1, 4, 1'b1);                    // b[i].c[k]
    return r;
  endfunction

endpackage
