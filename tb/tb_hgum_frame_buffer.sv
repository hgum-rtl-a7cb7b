// tb_hgum_frame_buffer: header reservation and late header write.
//
// The driver mimics the serializer: it reserves a header slot, enqueues a
// random number of data phits, writes the header some cycles later and
// sometimes enqueues raw phits between frames. The model keeps the expected
// output order with the header filled in; the output is drained with
// random back-pressure (long stalls fill the buffer). Checked: every phit
// and its order, that the read side never passes a reserved slot whose
// header is not yet written, and that the buffer really becomes full.
module tb_hgum_frame_buffer;
  import hgum_pkg::*;

  localparam int DEPTH  = 16;
  localparam int NFRAME = 300;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic              enq_valid, rsv, enq_ready, rsv_pending, hdr_we, out_valid, out_ready;
  logic [PHIT_W-1:0] enq_data, hdr_data, out_data;
  logic [$clog2(DEPTH+1)-1:0] count;

  hgum_frame_buffer #(.DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0, n_full = 0, n_blocked = 0;
  logic [PHIT_W-1:0] exp_q[$];
  bit                hole[$];        // entry is a header not yet written
  int                hpos;           // absolute index of the open header
  int                popped = 0;     // entries already read

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 5) $display("FAIL @%0t: %s", $time, what); end
  endtask

  always @(posedge clk) if (!rst) begin
    if (count == DEPTH) n_full++;
    if (exp_q.size() != 0 && hole[0]) begin
      n_blocked++;
      check(!out_valid, "reserved slot read before its header was written");
    end
    if (out_valid && out_ready) begin
      check(exp_q.size() != 0 && !hole[0] && out_data == exp_q[0],
            $sformatf("phit %h, expected %h", out_data, exp_q.size() ? exp_q[0] : '0));
      void'(exp_q.pop_front()); void'(hole.pop_front()); popped++;
    end
  end

  // drain: random, with long stalls
  int stall = 0;
  always @(negedge clk) begin
    if (stall > 0) begin out_ready = 0; stall--; end
    else if ($urandom_range(60, 0) == 0) begin out_ready = 0; stall = 40; end
    else out_ready = ($urandom_range(2, 0) != 0);
  end

  task automatic idle();
    @(negedge clk); enq_valid = 0; rsv = 0; hdr_we = 0;
  endtask

  task automatic enq(logic [PHIT_W-1:0] d);
    @(negedge clk); rsv = 0; hdr_we = 0;
    enq_valid = 1; enq_data = d;
    while (!enq_ready) @(negedge clk);
    exp_q.push_back(d); hole.push_back(1'b0);
    @(posedge clk);
    #1 enq_valid = 0;
  endtask

  initial begin
    enq_valid = 0; rsv = 0; hdr_we = 0; enq_data = '0; hdr_data = '0; out_ready = 0;
    repeat (2) @(posedge clk);
    rst = 0;
    for (int f = 0; f < NFRAME; f++) begin
      int nd, nr;
      nr = $urandom_range(2, 0);
      for (int i = 0; i < nr; i++) enq({$urandom, $urandom, $urandom, $urandom});
      // reserve the header slot
      @(negedge clk); rsv = 1;
      while (!enq_ready) @(negedge clk);
      hpos = popped + exp_q.size();
      exp_q.push_back('0); hole.push_back(1'b1);
      @(posedge clk);
      #1 rsv = 0;
      nd = $urandom_range(DEPTH - 1, 0);   // a frame and its header fit, as in the serializer
      for (int i = 0; i < nd; i++) enq({$urandom, $urandom, $urandom, $urandom});
      repeat ($urandom_range(3, 0)) idle();
      // fill in the header
      @(negedge clk);
      hdr_we = 1; hdr_data = {$urandom, $urandom, $urandom, 32'(f)};
      exp_q[hpos - popped] = hdr_data; hole[hpos - popped] = 1'b0;
      @(posedge clk);
      #1 hdr_we = 0;
    end
    repeat (300) @(negedge clk);
    check(exp_q.size() == 0, "phits missing");
    check(n_full > 0, "buffer never full");
    check(n_blocked > 0, "read side never waited for a header");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NFRAME * 200) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
