// tb_addr_window: self-checking test of the SR address-window control.
// Directed cases first (empty queues at each granularity, requests before
// and after the address, a window wider than four units), then random
// queue contents around a random address.  Each result is compared with a
// reference written with 64-bit integers from the rules: start = A-G plus
// 64B per memory-queue request inside [A-G, A+G), end = A+G minus 64B per
// SR-queue request inside it, both rounded to the nearest 256B, A's block
// kept, and at most four units taken around the middle.
//
// No ports; combinational DUT checked against a reference model written
// independently in the testbench (same rule as in the paper's Fig. 9: shift
// by 64B per queue entry, round to 256B).  Clipping to 1..4 units and the
// choice of which entries count are this design's, checked as such.
module tb_addr_window;
  import cxl_pkg::*;
  localparam int MQ = 32, SQ = 32;
  logic [ADDR_W-1:0] addr;
  logic [2:0] gran_units;
  logic mq_valid [MQ]; logic [ADDR_W-1:0] mq_addr [MQ];
  logic sq_valid [SQ]; logic [ADDR_W-1:0] sq_addr [SQ];
  logic [ADDR_W-1:0] win_start; logic [2:0] win_units;
  logic [5:0] m_cnt, n_cnt;
  int checks = 0, failures = 0;

  addr_window #(.MQ_DEPTH(MQ), .SQ_DEPTH(SQ)) dut (.*);

  function automatic void ref_win(output longint rs, output int ru);
    longint a, g, lo, hi, s, e, blk, sb, eb, u;
    int m, n;
    a  = longint'(addr) / 64 * 64;
    g  = longint'(gran_units) * 256;
    lo = (a >= g) ? a - g : 0;
    hi = a + g;
    m = 0; n = 0;
    for (int i = 0; i < MQ; i++) if (mq_valid[i] && longint'(mq_addr[i]) >= lo && longint'(mq_addr[i]) < hi) m++;
    for (int i = 0; i < SQ; i++) if (sq_valid[i] && longint'(sq_addr[i]) >= lo && longint'(sq_addr[i]) < hi) n++;
    s = lo + 64 * m;
    e = hi - 64 * n; if (e < 0) e = 0;
    if (s > a) s = a;
    if (e < a + 64) e = a + 64;
    blk = a / 256;
    sb = (s + 128) / 256; eb = (e + 128) / 256;
    if (sb > blk) sb = blk;
    if (eb < blk + 1) eb = blk + 1;
    u = eb - sb;
    if (u > 4) begin
      sb = sb + (u - 4) / 2;
      if (sb > blk) sb = blk;
      if (sb + 3 < blk) sb = blk - 3;
      u = 4;
    end
    rs = sb * 256; ru = int'(u);
  endfunction

  task automatic clear();
    for (int i = 0; i < MQ; i++) begin mq_valid[i] = 0; mq_addr[i] = 0; end
    for (int i = 0; i < SQ; i++) begin sq_valid[i] = 0; sq_addr[i] = 0; end
  endtask

  task automatic check(string what, longint exp_s = -1, int exp_u = -1);
    longint rs; int ru;
    #1;
    ref_win(rs, ru);
    if (exp_s >= 0) begin rs = exp_s; ru = exp_u; end
    checks++;
    if (longint'(win_start) != rs || int'(win_units) != ru) begin
      failures++;
      $display("FAIL %s: addr %h g %0d -> %h/%0d expected %h/%0d", what, addr, gran_units, win_start, win_units, rs, ru);
    end
  endtask

  initial begin
    clear();
    // empty queues, 256B granularity, A on a 256B boundary: [A-256, A+256)
    addr = 48'h10000; gran_units = 1; check("empty g1", 'h0ff00, 2);
    // 1024B granularity: window of 8 units cut to 4 around the middle
    gran_units = 4; check("empty g4", 'h0fe00, 4);
    // four earlier requests in the memory queue move the start up by 256B
    gran_units = 1;
    for (int i = 0; i < 4; i++) begin mq_valid[i] = 1; mq_addr[i] = 48'h0ff00 + 48'(64 * i); end
    check("mq shifts start", 'h10000, 1);
    clear();
    // four later requests in the SR queue move the end down by 256B
    for (int i = 0; i < 4; i++) begin sq_valid[i] = 1; sq_addr[i] = 48'h10000 + 48'(64 * i); end
    check("sq shifts end", 'h0ff00, 2);
    // requests outside the window do not count
    clear();
    for (int i = 0; i < 8; i++) begin mq_valid[i] = 1; mq_addr[i] = 48'h20000 + 48'(64 * i); end
    check("outside", 'h0ff00, 2);
    // random
    for (int n = 0; n < 4000; n++) begin
      longint base;
      clear();
      base = longint'($urandom_range(0, 'hfffff)) * 64;
      addr = ADDR_W'(base + $urandom_range(0, 63));
      gran_units = 3'($urandom_range(1, 4));
      for (int i = 0; i < MQ; i++) begin
        mq_valid[i] = ($urandom_range(0, 2) != 0);
        mq_addr[i]  = ADDR_W'(base + 64 * ($urandom_range(0, 40) - 20));
      end
      for (int i = 0; i < SQ; i++) begin
        sq_valid[i] = ($urandom_range(0, 2) != 0);
        sq_addr[i]  = ADDR_W'(base + 64 * ($urandom_range(0, 40) - 20));
      end
      check("random");
      // the window always holds the requested line and is 1..4 units
      checks++;
      if (win_units < 1 || win_units > 4 || addr < win_start ||
          addr >= win_start + ADDR_W'(256 * int'(win_units))) begin
        failures++; $display("FAIL containment %h %h %0d", addr, win_start, win_units);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
