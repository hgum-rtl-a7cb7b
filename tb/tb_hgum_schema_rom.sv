// tb_hgum_schema_rom: checks the schema ROM against the example message
// struct Msg { List<Array<Tuple{u32 x; u64 y}>> a; u8 b; }.
//
// The expected node table is written out here by hand from the schema
// (siblings consecutive, `last` on the last child, END as the root's last
// child, tags 1..7 of the client schema) and every address is read back.
// The ROM is combinational: the node is checked one cycle after its address
// is applied. Unused addresses must read as zero.
module tb_hgum_schema_rom;
  import hgum_pkg::*;

  logic              clk = 0;
  logic [ADDR_W-1:0] addr;
  node_t             node;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  hgum_schema_rom dut (.addr, .node);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // expected fields: kind, last, nbytes, child, tag, end_en, end_tag
  typedef struct { node_kind_e k; bit l; int nb; int ch; int tg; bit ee; int et; } exp_t;
  exp_t e [6] = '{
    '{N_LIST,  0, 0, 3, 1, 1, 6},   // a
    '{N_BYTES, 0, 1, 0, 7, 0, 0},   // b
    '{N_END,   1, 0, 0, 0, 0, 0},   // end of message
    '{N_ARRAY, 1, 0, 4, 2, 1, 5},   // a[i]
    '{N_BYTES, 0, 4, 0, 3, 0, 0},   // x
    '{N_BYTES, 1, 8, 0, 4, 0, 0}    // y
  };

  initial begin
    for (int a = 0; a < ROM_DEPTH; a++) begin
      addr = ADDR_W'(a);
      @(posedge clk);
      if (a < 6) begin
        check(node.kind == e[a].k && node.last == e[a].l && int'(node.nbytes) == e[a].nb &&
              int'(node.child) == e[a].ch && int'(node.tag) == e[a].tg &&
              node.end_en == e[a].ee && int'(node.end_tag) == e[a].et,
              $sformatf("node %0d = %p", a, node));
      end else begin
        check(node == '0, $sformatf("unused node %0d not zero", a));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
