// tb_hgum_phit_pack: byte packing and padding against a byte-queue model.
//
// Writes of 0..16 random bytes are offered at random; now and then a write
// carries `flush`, after which the writer waits for `empty` as the packer
// requires. The model appends the written bytes to a queue and, on a flush,
// zero pads it to a phit boundary, remembering how many bytes of that phit
// are real. Output phits are drained with random back-pressure and compared
// with the model, valid-byte count included. A last phase writes 16 bytes
// every cycle with the output always ready and must produce one phit per
// cycle.
module tb_hgum_phit_pack;
  import hgum_pkg::*;

  localparam int NWR   = 3000;
  localparam int NFAST = 200;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic              wr_valid, wr_ready, flush, out_valid, out_ready, empty;
  logic [NB_W-1:0]   wr_n;
  logic [DATA_W-1:0] wr_data;
  logic [PHIT_W-1:0] out_data;
  logic [CNT_W-1:0]  out_nbytes;

  hgum_phit_pack dut (.*);

  int checks = 0, failures = 0, n_bp = 0, n_flush = 0, n_out = 0;
  logic [7:0] pend[$];                // bytes not yet forming a complete phit
  logic [PHIT_W-1:0] exp_q[$];
  int exp_nb[$];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 5) $display("FAIL @%0t: %s", $time, what); end
  endtask

  function automatic void cut(bit pad);
    int real_n;
    if (pad && pend.size() % PHIT_BYTES != 0) begin
      real_n = pend.size() % PHIT_BYTES;
      while (pend.size() % PHIT_BYTES != 0) pend.push_back(8'h00);
    end else begin
      real_n = PHIT_BYTES;
    end
    while (pend.size() >= PHIT_BYTES) begin
      logic [PHIT_W-1:0] p;
      for (int b = 0; b < PHIT_BYTES; b++) p[b*8 +: 8] = pend.pop_front();
      exp_q.push_back(p);
      exp_nb.push_back(pend.size() == 0 ? real_n : PHIT_BYTES);
    end
  endfunction

  // output side, sampled at the edge
  always @(posedge clk) if (!rst) begin
    if (out_valid && !out_ready) n_bp++;
    if (out_valid && out_ready) begin
      n_out++;
      check(exp_q.size() != 0, "unexpected phit");
      if (exp_q.size() != 0) begin
        check(out_data == exp_q[0] && int'(out_nbytes) == exp_nb[0],
              $sformatf("phit %h/%0d, expected %h/%0d", out_data, out_nbytes, exp_q[0], exp_nb[0]));
        void'(exp_q.pop_front()); void'(exp_nb.pop_front());
      end
    end
  end

  task automatic write(bit fast);
    int n;
    bit f;
    @(negedge clk);
    out_ready = fast ? 1'b1 : ($urandom_range(3, 0) != 0);
    n = fast ? 16 : $urandom_range(16, 0);
    f = !fast && ($urandom_range(9, 0) == 0);
    wr_valid = fast || ($urandom_range(3, 0) != 0);
    wr_n     = NB_W'(n);
    wr_data  = {$urandom, $urandom, $urandom, $urandom};
    flush    = f && wr_valid && wr_ready;
    if (wr_valid && wr_ready) begin
      for (int b = 0; b < n; b++) pend.push_back(wr_data[b*8 +: 8]);
      cut(flush);
    end
    @(posedge clk);
    if (flush) begin
      n_flush++;
      @(negedge clk);
      wr_valid = 0; flush = 0;
      while (!empty) begin
        out_ready = ($urandom_range(3, 0) != 0);
        @(negedge clk);
      end
    end
  endtask

  initial begin
    int t0, o0;
    wr_valid = 0; wr_n = '0; wr_data = '0; flush = 0; out_ready = 0;
    repeat (2) @(posedge clk);
    rst = 0;
    for (int i = 0; i < NWR; i++) write(1'b0);
    // flush the remainder
    @(negedge clk);
    flush = 1; wr_valid = 0; cut(1'b1);
    @(posedge clk);
    @(negedge clk); flush = 0; out_ready = 1;
    while (!empty) @(negedge clk);
    check(exp_q.size() == 0, "phits missing");
    t0 = $time; o0 = n_out;
    for (int i = 0; i < NFAST; i++) write(1'b1);
    @(negedge clk); wr_valid = 0;
    check(n_out - o0 >= NFAST - 2, $sformatf("full rate: %0d phits in %0d cycles", n_out - o0, NFAST));
    check(n_bp > 0 && n_flush > 0, "no back-pressure or no flush");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NWR * 20) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
