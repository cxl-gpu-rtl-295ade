// tb_sr_reader: self-checking test of the SR reader (with its ring buffer
// and address-window control inside).
// The SR queue head, memory-queue room and output readiness are driven by
// the test.  For each load it checks that the load is moved on unchanged,
// that a MemSpecRd is made exactly when SR is enabled, not halted and the
// address is not inside a range recorded by an earlier MemSpecRd, and that
// its address carries the expected 256B offset with (units-1) in bits [7:6].
// Stall rules: nothing moves without memory-queue room, and a load that
// needs an SR waits while the previous MemSpecRd has not been taken.
//
// No ports; checks each MemSpecRd against a reference window and ring
// buffer (paper: record address and length, bypass covered loads) and the
// halt behaviour; ring depth is this design's.
module tb_sr_reader;
  import cxl_pkg::*;
  localparam int MQ = 32, SQ = 32, RING = 32;
  logic clk = 0, rst_n = 0;
  logic sr_en = 1, halted = 0;
  logic [2:0] gran_units = 1;
  logic head_valid = 0; logic [ADDR_W-1:0] head_addr = 0; logic [ID_W-1:0] head_id = 0;
  logic pop;
  logic sq_valid [SQ]; logic [ADDR_W-1:0] sq_addr [SQ];
  logic alloc_valid, alloc_ready = 1; logic [ADDR_W-1:0] alloc_addr; logic [ID_W-1:0] alloc_id;
  logic mq_valid [MQ]; logic [ADDR_W-1:0] mq_addr [MQ];
  logic spec_valid, spec_ready = 1; m2s_msg_t spec_msg;
  logic ev_sr, ev_ring_hit, ev_halt_skip;
  int checks = 0, failures = 0;
  int n_sr = 0, n_hit = 0, n_halt = 0;

  sr_reader #(.MQ_DEPTH(MQ), .SQ_DEPTH(SQ), .RING_DEPTH(RING)) dut (.*);
  always #5 clk = ~clk;

  longint ring_s [$]; int ring_u [$];

  task automatic fail(string s); failures++; $display("FAIL %s", s); endtask

  // expected window with empty queues
  function automatic void exp_win(longint a, int g, output longint s, output int u);
    longint lo, hi, sb, eb, blk, uu;
    a = a / 64 * 64;
    lo = (a >= 256 * g) ? a - 256 * g : 0; hi = a + 256 * g;
    blk = a / 256; sb = (lo + 128) / 256; eb = (hi + 128) / 256;
    if (sb > blk) sb = blk;
    if (eb < blk + 1) eb = blk + 1;
    uu = eb - sb;
    if (uu > 4) begin sb = sb + (uu - 4) / 2; if (sb > blk) sb = blk; if (sb + 3 < blk) sb = blk - 3; uu = 4; end
    s = sb * 256; u = int'(uu);
  endfunction

  function automatic bit in_ring(longint a);
    for (int i = 0; i < ring_s.size(); i++)
      if (a / 256 >= ring_s[i] / 256 && a / 256 < ring_s[i] / 256 + ring_u[i]) return 1;
    return 0;
  endfunction

  // present one load; returns when it has been popped
  task automatic one_load(longint a, int id);
    bit want; longint s; int u;
    @(negedge clk);
    head_valid = 1; head_addr = ADDR_W'(a); head_id = ID_W'(id);
    want = sr_en && !halted && !in_ring(a);
    #1;
    while (!pop) begin @(negedge clk); #1; end
    checks++;
    if (!alloc_valid || alloc_addr != ADDR_W'(a) || alloc_id != ID_W'(id)) fail("alloc mismatch");
    checks++;
    if (ev_sr != want || ev_ring_hit != (sr_en && in_ring(a)) ||
        ev_halt_skip != (sr_en && halted && !in_ring(a)))
      fail($sformatf("events a=%h sr %0d want %0d", a, ev_sr, want));
    @(posedge clk); #1;
    head_valid = 0;
    if (want) begin
      exp_win(a, int'(gran_units), s, u);
      checks++;
      if (!spec_valid || spec_msg.op != M2S_MEMSPECRD ||
          longint'(spec_msg.addr) != (s | (longint'(u - 1) << 6)))
        fail($sformatf("spec addr %h exp %h", spec_msg.addr, s | (longint'(u - 1) << 6)));
      ring_s.push_back(s); ring_u.push_back(u);
      if (ring_s.size() > RING) begin void'(ring_s.pop_front()); void'(ring_u.pop_front()); end
      n_sr++;
    end else if (sr_en && in_ring(a)) n_hit++;
    else if (sr_en) n_halt++;
  endtask

  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < MQ; i++) begin mq_valid[i] = 0; mq_addr[i] = 0; end
    for (int i = 0; i < SQ; i++) begin sq_valid[i] = 0; sq_addr[i] = 0; end
    repeat (3) @(negedge clk); rst_n = 1;
    // first SR: 0x10000 at 256B -> [0xff00, 0x10100), 2 units -> address 0xff40
    one_load('h10000, 1);
    checks++; if (spec_msg.addr != 48'hff40) fail("spec encoding");
    one_load('h10040, 2);            // covered by the ring
    halted = 1; one_load('h50000, 3); halted = 0;
    sr_en = 0; one_load('h60000, 4); sr_en = 1;
    // no memory-queue room: nothing moves
    alloc_ready = 0;
    @(negedge clk); head_valid = 1; head_addr = 'h70000;
    repeat (5) begin @(negedge clk); #1; checks++; if (pop) fail("pop while mq full"); end
    head_valid = 0; alloc_ready = 1;
    // MemSpecRd not taken: the next load that needs an SR waits
    spec_ready = 0;
    one_load('h80000, 5);
    @(negedge clk); head_valid = 1; head_addr = 'h90000; head_id = 6;
    repeat (4) begin @(negedge clk); #1; checks++; if (pop) fail("pop while spec busy"); end
    head_valid = 0; spec_ready = 1;
    @(negedge clk); @(negedge clk);
    one_load('h90000, 6);
    // random loads at random granularity
    for (int n = 0; n < 3000; n++) begin
      gran_units = 3'($urandom_range(1, 4));
      halted = ($urandom_range(0, 9) == 0);
      sr_en  = ($urandom_range(0, 19) != 0);
      one_load(longint'($urandom_range(0, 'h3fff)) * 64 + $urandom_range(0, 63), $urandom_range(0, 255));
    end
    checks++; if (n_sr == 0 || n_hit == 0 || n_halt == 0) fail("coverage");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
