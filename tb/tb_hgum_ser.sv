// tb_hgum_ser: both serializer modes against the reference models.
//
// Instance u_sw (FRAMED = 0, HW-to-SW) is fed the untagged tokens of random
// messages of the example schema struct Msg { List<Array<Tuple{u32 x;
// u64 y}>> a; u8 b; } and must write each array count after its elements,
// the list count after the list, and pad every message to a phit; the byte
// count of each phit is checked too. Instance u_hw (FRAMED = 1, HW-to-HW)
// is fed messages of struct Msg { u32 a; List<Foo{List<u8> c; u16 d}> b; }
// with frames limited to 3 phits and must produce the framed stream of the
// model: header phit, padded frame data, splits at the size limit, a new
// frame per nested list and an empty frame per list end. Tokens arrive
// with random gaps and the output sees random back-pressure.
module tb_hgum_ser;
  import hgum_pkg::*;
  import hgum_tb_pkg::*;

  localparam int NMSG     = 60;
  localparam int MAXF     = 3;
  localparam int WATCHDOG = 100000;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  int checks = 0, failures = 0, n_bp = 0, n_split = 0, n_empty = 0;

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 5) $display("FAIL @%0t: %s", $time, what); end
  endfunction

  logic              tv[2], tr[2], ov[2], orr[2], done[2], err[2];
  ser_tok_t          tk[2];
  logic [PHIT_W-1:0] od[2];
  logic [CNT_W-1:0]  onb[2];
  ser_tok_t          in_q[2][$];
  phit_t             exp_q[2][$];
  int                exp_nb[2][$];
  int                ndone[2];

  hgum_ser #(.NODES(example_schema()), .FRAMED(1'b0)) u_sw (
    .clk, .rst, .tok_valid(tv[0]), .tok_ready(tr[0]), .tok(tk[0]),
    .out_valid(ov[0]), .out_ready(orr[0]), .out_data(od[0]), .out_nbytes(onb[0]),
    .msg_done(done[0]), .err(err[0]));
  hgum_ser #(.NODES(framing_schema()), .FRAMED(1'b1), .MAX_FRAME_PHITS(MAXF)) u_hw (
    .clk, .rst, .tok_valid(tv[1]), .tok_ready(tr[1]), .tok(tk[1]),
    .out_valid(ov[1]), .out_ready(orr[1]), .out_data(od[1]), .out_nbytes(onb[1]),
    .msg_done(done[1]), .err(err[1]));

  for (genvar g = 0; g < 2; g++) begin : g_port
    always_ff @(posedge clk) begin
      if (rst) begin
        tv[g] <= 1'b0; tk[g] <= '0; orr[g] <= 1'b0;
      end else begin
        orr[g] <= ($urandom_range(3, 0) != 0);
        if (!tv[g] || tr[g]) begin
          if (in_q[g].size() != 0 && $urandom_range(5, 0) != 0) begin
            tv[g] <= 1'b1; tk[g] <= in_q[g].pop_front();
          end else tv[g] <= 1'b0;
        end
        if (ov[g] && !orr[g]) n_bp++;
        if (ov[g] && orr[g]) begin
          check(exp_q[g].size() != 0, $sformatf("ser %0d: unexpected phit", g));
          if (exp_q[g].size() != 0) begin
            check(od[g] == exp_q[g][0] && (g == 1 || int'(onb[g]) == exp_nb[g][0]),
                  $sformatf("ser %0d: phit %h/%0d, expected %h/%0d", g, od[g], onb[g], exp_q[g][0], exp_nb[g][0]));
            void'(exp_q[g].pop_front()); void'(exp_nb[g].pop_front());
          end
        end
        if (done[g]) ndone[g]++;
        check(!err[g], $sformatf("ser %0d: err", g));
      end
    end
  end

  function automatic void build();
    Framer f = new(MAXF);
    for (int m = 0; m < NMSG; m++) begin
      ExMsg  e = new();
      FrMsg  r = new();
      byte_t ob[$];
      e.randomize_msg(4, 6);
      if (m == 0) begin e.alen.delete(); e.x.delete(); e.y.delete(); end
      e.ser_tokens(in_q[0]);
      e.hw2sw_bytes(ob);
      to_phits(ob, exp_q[0], exp_nb[0]);
      r.randomize_msg(4, 80);
      if (m == 1) begin r.clen.delete(); r.c.delete(); r.d.delete(); end
      r.ser_tokens(in_q[1]);
      r.hw2hw_phits(f);
    end
    exp_q[1] = f.out;
    foreach (exp_q[1][i]) exp_nb[1].push_back(PHIT_BYTES);
    n_split = f.nsplits;
    n_empty = f.nempty;
  endfunction

  initial begin
    build();
    repeat (3) @(posedge clk);
    rst = 0;
    wait (ndone[0] == NMSG && ndone[1] == NMSG);
    repeat (20) @(posedge clk);
    check(exp_q[0].size() == 0 && exp_q[1].size() == 0, "phits missing");
    check(n_split > 0 && n_empty > 0 && n_bp > 0, "no frame split, empty frame or back-pressure");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog: %0d/%0d messages", ndone[0], ndone[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
