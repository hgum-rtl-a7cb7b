// tb_hgum_throughput: message rate of the full loopback for the two
// single-field schemas [Array,[Bytes,16]] and [List,[Bytes,16]].
//
// Two loopbacks run side by side, one per schema, with frames of the
// default 500 phits, no input gaps and the output always ready. For each
// length n in 1, 2, 8, 32, 128, 512, 2048, 8192 a train of messages of that
// length is sent back to back and the steady-state period between message
// completions is measured. An n-element array is n+1 tokens and an
// n-element list n+2, and one token per cycle per stage is the ideal, so
// the ratio ideal/measured is printed for every length. Checked: the
// output data of every message, that no length beats the ideal, that the
// ratio grows with n, and that long arrays and lists come close to the
// ideal (at least 0.95 for arrays and 0.90 for lists at n = 8192; these
// bounds are this test's own).
module tb_hgum_throughput;
  import hgum_pkg::*;
  import hgum_tb_pkg::*;

  localparam int NLEN = 8;
  localparam int LENS [NLEN] = '{1, 2, 8, 32, 128, 512, 2048, 8192};
  localparam int WATCHDOG = 600000;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 5) $display("FAIL @%0t: %s", $time, what); end
  endfunction

  logic              iv[2], ir[2], ov[2], lv[2], lr[2];
  logic [PHIT_W-1:0] id[2], od[2], ld[2];
  logic [CNT_W-1:0]  onb[2];
  logic [3:0]        done[2], err[2];
  phit_t             in_q[2][$], exp_q[2][$];
  int                exp_nb[2][$];
  int                ndone[2];
  longint            tdone[2][$];
  int                cyc = 0;

  hgum_loopback #(.NODES(single_container_schema(1'b0))) u_arr (
    .clk, .rst, .in_valid(iv[0]), .in_ready(ir[0]), .in_data(id[0]),
    .out_valid(ov[0]), .out_ready(1'b1), .out_data(od[0]), .out_nbytes(onb[0]),
    .link_valid(lv[0]), .link_ready(lr[0]), .link_data(ld[0]), .msg_done(done[0]), .err(err[0]));
  hgum_loopback #(.NODES(single_container_schema(1'b1))) u_lst (
    .clk, .rst, .in_valid(iv[1]), .in_ready(ir[1]), .in_data(id[1]),
    .out_valid(ov[1]), .out_ready(1'b1), .out_data(od[1]), .out_nbytes(onb[1]),
    .link_valid(lv[1]), .link_ready(lr[1]), .link_data(ld[1]), .msg_done(done[1]), .err(err[1]));

  always_ff @(posedge clk) cyc <= cyc + 1;

  for (genvar g = 0; g < 2; g++) begin : g_port
    always_ff @(posedge clk) begin
      if (rst) begin
        iv[g] <= 1'b0; id[g] <= '0;
      end else begin
        if (!iv[g] || ir[g]) begin
          if (in_q[g].size() != 0) begin iv[g] <= 1'b1; id[g] <= in_q[g].pop_front(); end
          else iv[g] <= 1'b0;
        end
        if (ov[g]) begin
          check(exp_q[g].size() != 0 && od[g] == exp_q[g][0] && int'(onb[g]) == exp_nb[g][0],
                $sformatf("loopback %0d: wrong output phit", g));
          if (exp_q[g].size() != 0) begin void'(exp_q[g].pop_front()); void'(exp_nb[g].pop_front()); end
        end
        if (done[g][3]) begin ndone[g]++; tdone[g].push_back(cyc); end
        check(err[g] == 0, $sformatf("loopback %0d: err", g));
      end
    end
  end

  function automatic void load(int g, int n, int k);
    for (int m = 0; m < k; m++) begin
      VecMsg v = new();
      byte_t sb[$], ob[$];
      int    nb[$];
      v.fill(n);
      v.sw_bytes(sb);
      to_phits(sb, in_q[g], nb);
      v.hw2sw_bytes(ob);
      to_phits(ob, exp_q[g], exp_nb[g]);
    end
  endfunction

  initial begin
    real ratio[2][NLEN];
    repeat (3) @(posedge clk);
    rst = 0;
    for (int li = 0; li < NLEN; li++) begin
      int n, k;
      n = LENS[li];
      k = (n >= 2048) ? 3 : (n >= 128 ? 5 : 12);
      for (int g = 0; g < 2; g++) begin ndone[g] = 0; tdone[g].delete(); load(g, n, k); end
      wait (ndone[0] == k && ndone[1] == k);
      for (int g = 0; g < 2; g++) begin
        real period;
        period = real'(tdone[g][k-1] - tdone[g][0]) / real'(k - 1);
        ratio[g][li] = real'(n + 1 + g) / period;
        check(ratio[g][li] <= 1.0, $sformatf("%s n=%0d beats one token per cycle", g ? "list" : "array", n));
        if (li > 0) check(ratio[g][li] >= ratio[g][li-1] - 0.01, $sformatf("ratio falls at n=%0d", n));
      end
      $display("n=%0d  array: %.3f of ideal   list: %.3f of ideal", n, ratio[0][li], ratio[1][li]);
    end
    check(ratio[0][NLEN-1] >= 0.95, "long arrays far from the ideal rate");
    check(ratio[1][NLEN-1] >= 0.90, "long lists far from the ideal rate");
    check(exp_q[0].size() == 0 && exp_q[1].size() == 0, "output missing");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
