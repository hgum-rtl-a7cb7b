// tb_hgum_ctx_stack: random push/pop/update traffic against a queue model.
//
// Each cycle one of push, pop, update or idle is chosen at random among the
// operations that are legal (no push when full, no pop or update when
// empty). After every edge the registered top entry, empty, full, depth and
// the count of List contexts are compared with a SystemVerilog queue that
// models the stack. The test reaches full and empty many times.
module tb_hgum_ctx_stack;
  import hgum_pkg::*;

  localparam int DEPTH = 3;
  localparam int NCYC  = 4000;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic push, pop, upd, empty, full;
  ctx_t push_ctx, upd_ctx, top;
  logic [$clog2(DEPTH+1)-1:0] depth;
  logic [LVL_W-1:0] list_cnt;

  hgum_ctx_stack #(.DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0, n_full = 0, n_empty = 0;
  ctx_t model[$];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 5) $display("FAIL @%0t: %s", $time, what); end
  endtask

  function automatic ctx_t rnd_ctx();
    ctx_t c;
    c = {$urandom, $urandom, $urandom, $urandom};
    return c;
  endfunction

  function automatic int lists();
    int n = 0;
    foreach (model[i]) n += model[i].is_list;
    return n;
  endfunction

  initial begin
    push = 0; pop = 0; upd = 0; push_ctx = '0; upd_ctx = '0;
    repeat (2) @(posedge clk);
    rst = 0;
    for (int i = 0; i < NCYC; i++) begin
      int op;
      @(negedge clk);
      op = $urandom_range(3, 0);          // 0 push, 1 pop, 2 update, 3 idle
      if (op == 0 && model.size() == DEPTH) op = 3;
      if ((op == 1 || op == 2) && model.size() == 0) op = 0;
      push = (op == 0); pop = (op == 1); upd = (op == 2);
      push_ctx = rnd_ctx(); upd_ctx = rnd_ctx();
      if (push) model.push_back(push_ctx);
      if (pop)  void'(model.pop_back());
      if (upd) begin                      // an update never changes the Type
        upd_ctx.is_list = model[$].is_list;
        model[$] = upd_ctx;
      end
      @(posedge clk);
      #1;
      check(empty == (model.size() == 0), "empty");
      check(full == (model.size() == DEPTH), "full");
      check(int'(depth) == model.size(), $sformatf("depth %0d vs %0d", depth, model.size()));
      check(int'(list_cnt) == lists(), $sformatf("list_cnt %0d vs %0d", list_cnt, lists()));
      if (model.size() != 0) check(top == model[$], "top entry");
      if (full) n_full++;
      if (empty) n_empty++;
    end
    check(n_full > 0, "stack never full");
    check(n_empty > 0, "stack never empty");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NCYC * 2 + 100) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
