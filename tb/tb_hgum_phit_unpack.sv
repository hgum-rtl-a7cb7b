// tb_hgum_phit_unpack: byte window over a random phit stream.
//
// Phits of random bytes are offered with random gaps while the consumer
// takes a random number of bytes (0..avail) each cycle. Before every edge
// the valid part of the window is compared with the byte stream model and
// `avail` with the bytes accepted minus the bytes consumed. A second phase
// starts 4 bytes off the phit grid, offers phits back to back and consumes
// a whole phit per cycle; it must sustain one phit per cycle.
module tb_hgum_phit_unpack;
  import hgum_pkg::*;

  localparam int NPHIT = 2000;
  localparam int NFAST = 200;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic              in_valid, in_ready;
  logic [PHIT_W-1:0] in_data, win;
  logic [CNT_W-1:0]  avail, consume;

  hgum_phit_unpack dut (.*);

  int checks = 0, failures = 0;
  logic [7:0] stream[$];      // every byte of every phit, in order
  int sent = 0, rd = 0;       // phits accepted, bytes consumed
  int force_c = -1;           // >= 0: consume exactly this many bytes

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 5) $display("FAIL @%0t: %s", $time, what); end
  endtask

  function automatic logic [PHIT_W-1:0] phit_at(int k);
    logic [PHIT_W-1:0] p;
    for (int b = 0; b < PHIT_BYTES; b++) p[b*8 +: 8] = stream[k*PHIT_BYTES + b];
    return p;
  endfunction

  task automatic step(bit offer, bit full_take);
    int c;
    @(negedge clk);
    check(int'(avail) == sent * PHIT_BYTES - rd, $sformatf("avail %0d, expected %0d", avail, sent*PHIT_BYTES-rd));
    for (int b = 0; b < int'(avail) && b < PHIT_BYTES; b++)
      check(win[b*8 +: 8] == stream[rd + b], $sformatf("window byte %0d", b));
    in_valid = offer;
    in_data  = phit_at(sent);
    c = (int'(avail) < PHIT_BYTES) ? int'(avail) : PHIT_BYTES;
    if (full_take) c = (c == PHIT_BYTES) ? c : 0;
    else           c = $urandom_range(c, 0);
    if (force_c >= 0) c = force_c;
    consume = CNT_W'(c);
    @(posedge clk);
    if (in_valid && in_ready) sent++;
    rd += c;
  endtask

  initial begin
    int t0;
    for (int i = 0; i < (NPHIT + NFAST + 4) * PHIT_BYTES; i++) stream.push_back(8'($urandom));
    in_valid = 0; in_data = '0; consume = '0;
    repeat (2) @(posedge clk);
    rst = 0;
    while (sent < NPHIT) step($urandom_range(3, 0) != 0, 1'b0);
    // drain what is left, then the full-rate phase
    while (int'(avail) > 0 || sent * PHIT_BYTES != rd) step(1'b0, 1'b0);
    // start the full-rate phase 4 bytes off the phit grid, as after a count
    step(1'b1, 1'b0);
    force_c = 4; step(1'b0, 1'b0); force_c = -1;
    t0 = $time;
    while (sent < NPHIT + NFAST) step(1'b1, 1'b1);
    // one phit enters per cycle: NFAST phits in NFAST cycles (+1 to fill)
    check(($time - t0) / 10 <= NFAST + 1, $sformatf("full rate: %0d cycles for %0d phits", ($time - t0) / 10, NFAST));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NPHIT * 8 + NFAST * 4) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
