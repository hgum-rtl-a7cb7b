// tb_hgum_loopback: end-to-end test of the four-stage message loopback.
//
// Random messages of the schema Msg { List<Array<Tuple{u32 x; u64 y}>> a;
// u8 b; } are fed in as SW-to-HW phit streams with random gaps, and the
// HW-to-SW output is drained with random back-pressure. The output phits
// (and their valid-byte counts) are compared with the HW-to-SW stream built
// by the reference model, and the phits on the HW-to-HW link with the
// framed stream the model builds. Frames are limited to 4 phits here so
// that long lists split into several frames.
//
// Every mechanism is counted and must occur: empty list, empty array,
// array-end tokens, frame splits, empty frames, input stalls, output
// back-pressure and several messages in flight.
module tb_hgum_loopback;
  import hgum_pkg::*;
  import hgum_tb_pkg::*;

  localparam int NMSG      = 40;
  localparam int MAXF      = 4;
  localparam int WATCHDOG  = 200000;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic              in_valid, in_ready, out_valid, out_ready;
  logic [PHIT_W-1:0] in_data, out_data, link_data;
  logic [CNT_W-1:0]  out_nbytes;
  logic              link_valid, link_ready;
  logic [3:0]        msg_done, err;

  hgum_loopback #(.MAX_FRAME_PHITS(MAXF)) dut (.*);

  int checks = 0, failures = 0;
  phit_t in_q[$], exp_q[$], link_q[$];
  int    exp_nb[$];
  int    n_empty_list = 0, n_empty_arr = 0, n_splits = 0, n_efr = 0;
  int    n_in_stall = 0, n_out_bp = 0, n_aend = 0, n_hdr = 0, n_inflight = 0;
  int    done_cnt [4];
  int    cyc = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 4) $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  function automatic void add_msg(Framer f, bit force_empty);
    ExMsg  msg = new();
    byte_t sb[$], ob[$];
    int    nb[$];
    msg.randomize_msg(4, 12);
    if (force_empty) begin msg.alen.delete(); msg.x.delete(); msg.y.delete(); end
    if (msg.alen.size() == 0) n_empty_list++;
    foreach (msg.alen[i]) if (msg.alen[i] == 0) n_empty_arr++;
    msg.sw_bytes(sb);
    to_phits(sb, in_q, nb);
    msg.hw2sw_bytes(ob);
    to_phits(ob, exp_q, exp_nb);
    msg.hw2hw_phits(f);
  endfunction

  initial begin
    Framer f = new(MAXF);
    for (int m = 0; m < NMSG; m++) add_msg(f, m == 0);
    link_q = f.out;
    n_splits = f.nsplits;
    n_efr    = f.nempty;
  end

  // input driver with random gaps (registered, so the DUT never sees a race)
  always_ff @(posedge clk) begin
    if (rst) begin
      in_valid <= 1'b0;
      in_data  <= '0;
    end else begin
      if (in_valid && !in_ready) n_in_stall++;
      if (!in_valid || in_ready) begin
        if (in_q.size() != 0 && $urandom_range(7, 0) != 0) begin
          in_valid <= 1'b1;
          in_data  <= in_q.pop_front();
        end else begin
          in_valid <= 1'b0;
        end
      end
    end
  end

  // outputs
  always_ff @(posedge clk) out_ready <= ($urandom_range(3, 0) != 0);

  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (!rst) begin
      if (out_valid && !out_ready) n_out_bp++;
      if (out_valid && out_ready) begin
        check(exp_q.size() != 0, "unexpected output phit");
        if (exp_q.size() != 0) begin
          check(out_data == exp_q[0] && 32'(out_nbytes) == exp_nb[0],
                $sformatf("out phit %h/%0d, expected %h/%0d", out_data, out_nbytes, exp_q[0], exp_nb[0]));
          void'(exp_q.pop_front()); void'(exp_nb.pop_front());
        end
      end
      if (link_valid && link_ready) begin
        check(link_q.size() != 0, "unexpected link phit");
        if (link_q.size() != 0) begin
          check(link_data == link_q[0], $sformatf("link phit %h, expected %h", link_data, link_q[0]));
          void'(link_q.pop_front());
        end
      end
      if (dut.u_des_sw2hw.tok_valid && dut.u_des_sw2hw.tok_ready &&
          dut.u_des_sw2hw.tok.kind == T_ARRAY_END) n_aend++;
      if (dut.u_des_hw2hw.frm_vld_n && !dut.u_des_hw2hw.frm_vld) n_hdr++;
      for (int s = 0; s < 4; s++) if (msg_done[s]) done_cnt[s]++;
      if (done_cnt[0] > done_cnt[3] + 1) n_inflight++;
      check(err == 0, $sformatf("err = %b", err));
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    wait (done_cnt[3] == NMSG);
    repeat (20) @(posedge clk);
    check(exp_q.size() == 0, "output phits missing");
    check(link_q.size() == 0, "link phits missing");
    for (int s = 0; s < 4; s++) check(done_cnt[s] == NMSG, $sformatf("stage %0d finished %0d messages", s, done_cnt[s]));
    $display("mechanisms: empty_list=%0d empty_array=%0d array_end=%0d frame_split=%0d empty_frame=%0d hdr_fetch=%0d in_stall=%0d out_backpressure=%0d overlap=%0d",
             n_empty_list, n_empty_arr, n_aend, n_splits, n_efr, n_hdr, n_in_stall, n_out_bp, n_inflight);
    check(n_empty_list > 0, "no empty list");
    check(n_empty_arr > 0, "no empty array");
    check(n_aend > 0, "no array-end token");
    check(n_splits > 0, "no frame split");
    check(n_efr > 0, "no empty frame");
    check(n_hdr > 0, "no header fetch");
    check(n_in_stall > 0, "no input stall");
    check(n_out_bp > 0, "no output back-pressure");
    check(n_inflight > 0, "no overlapping messages");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog: %0d/%0d messages done", done_cnt[3], NMSG);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
