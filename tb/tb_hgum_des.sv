// tb_hgum_des: both deserializer modes against the reference models.
//
// Instance u_sw (FRAMED = 0) takes SW-to-HW messages of the example schema
// struct Msg { List<Array<Tuple{u32 x; u64 y}>> a; u8 b; }: element counts
// before the elements, every message padded to a phit. Instance u_hw
// (FRAMED = 1) takes HW-to-HW streams of struct Msg { u32 a;
// List<Foo{List<u8> c; u16 d}> b; } built with 3-phit frames, so lists split
// into several frames, nested lists start new frames and every list ends
// with an empty frame. Phits arrive with random gaps, tokens are taken with
// random back-pressure, and every token (kind, tag, level, byte count,
// data) is compared with the model's. Empty lists, empty arrays and frame
// splits must all occur.
module tb_hgum_des;
  import hgum_pkg::*;
  import hgum_tb_pkg::*;

  localparam int NMSG     = 60;
  localparam int MAXF     = 3;
  localparam int WATCHDOG = 100000;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  int checks = 0, failures = 0, n_empty_list = 0, n_empty_arr = 0;

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 5) $display("FAIL @%0t: %s", $time, what); end
  endfunction

  // ---- two DUTs with their own stimulus
  logic              iv[2], ir[2], tv[2], tr[2], done[2], err[2];
  logic [PHIT_W-1:0] id[2];
  des_tok_t          tk[2];
  phit_t             in_q[2][$];
  des_tok_t          exp_q[2][$];
  int                ndone[2];

  hgum_des #(.NODES(example_schema()), .FRAMED(1'b0)) u_sw (
    .clk, .rst, .in_valid(iv[0]), .in_ready(ir[0]), .in_data(id[0]),
    .tok_valid(tv[0]), .tok_ready(tr[0]), .tok(tk[0]), .msg_done(done[0]), .err(err[0]));
  hgum_des #(.NODES(framing_schema()), .FRAMED(1'b1)) u_hw (
    .clk, .rst, .in_valid(iv[1]), .in_ready(ir[1]), .in_data(id[1]),
    .tok_valid(tv[1]), .tok_ready(tr[1]), .tok(tk[1]), .msg_done(done[1]), .err(err[1]));

  for (genvar g = 0; g < 2; g++) begin : g_port
    always_ff @(posedge clk) begin
      if (rst) begin
        iv[g] <= 1'b0; id[g] <= '0; tr[g] <= 1'b0;
      end else begin
        tr[g] <= ($urandom_range(3, 0) != 0);
        if (!iv[g] || ir[g]) begin
          if (in_q[g].size() != 0 && $urandom_range(5, 0) != 0) begin
            iv[g] <= 1'b1; id[g] <= in_q[g].pop_front();
          end else iv[g] <= 1'b0;
        end
        if (tv[g] && tr[g]) begin
          check(exp_q[g].size() != 0, $sformatf("des %0d: unexpected token", g));
          if (exp_q[g].size() != 0) begin
            check(tk[g] == exp_q[g][0], $sformatf("des %0d: token %p, expected %p", g, tk[g], exp_q[g][0]));
            void'(exp_q[g].pop_front());
          end
        end
        if (done[g]) ndone[g]++;
        check(!err[g], $sformatf("des %0d: err", g));
      end
    end
  end

  function automatic void build();
    Framer f = new(MAXF);
    for (int m = 0; m < NMSG; m++) begin
      ExMsg  e = new();
      FrMsg  r = new();
      byte_t sb[$];
      int    nb[$];
      e.randomize_msg(4, 6);
      if (m == 0) begin e.alen.delete(); e.x.delete(); e.y.delete(); end
      if (e.alen.size() == 0) n_empty_list++;
      foreach (e.alen[i]) if (e.alen[i] == 0) n_empty_arr++;
      e.sw_bytes(sb);
      to_phits(sb, in_q[0], nb);
      e.des_tokens(exp_q[0], 1'b0);
      r.randomize_msg(4, 80);
      if (m == 1) begin r.clen.delete(); r.c.delete(); r.d.delete(); end
      r.hw2hw_phits(f);
      r.des_tokens(exp_q[1]);
    end
    in_q[1] = f.out;
    check(f.nsplits > 0, "no frame split in the stimulus");
  endfunction

  initial begin
    build();
    repeat (3) @(posedge clk);
    rst = 0;
    wait (ndone[0] == NMSG && ndone[1] == NMSG);
    repeat (10) @(posedge clk);
    check(exp_q[0].size() == 0 && exp_q[1].size() == 0, "tokens missing");
    check(n_empty_list > 0 && n_empty_arr > 0, "no empty list or array");
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
