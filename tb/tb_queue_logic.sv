// tb_queue_logic: self-checking test of the read path with speculative read.
// A responder in the test answers MemRd out of order after a random delay
// with the line's content and a DevLoad value set by the test phase; it
// records the 256B blocks announced by MemSpecRd.
// Phases: (1) a sequential stream under light load - every load must return
// its own data and id, fewer MemSpecRd than loads must be sent (ring-buffer
// hits) and the granularity must reach four units (1024B); (2) moderate
// overload must bring the granularity back to one unit; (3) severe overload
// must stop MemSpecRd while loads still complete; (4) SR disabled sends no
// MemSpecRd; (5) a stalled responder fills the memory queue, the SR queue
// backs up (ld_ready falls) and everything drains afterwards.
//
// No ports.  From the paper: granularity 256B..1024B by DevLoad, halt on so,
// ring-buffer bypass, loads waiting in the SR queue while the memory queue
// is full.  Latencies and the traffic pattern are this test's choices.
module tb_queue_logic;
  import cxl_pkg::*;
  import tb_pkg::*;
  logic clk = 0, rst_n = 0, sr_en = 1;
  logic ld_valid = 0, ld_ready; logic [ADDR_W-1:0] ld_addr = 0; logic [ID_W-1:0] ld_id = 0;
  logic rd_valid, rd_ready = 1; m2s_msg_t rd_msg;
  logic spec_valid, spec_ready = 1; m2s_msg_t spec_msg;
  logic s2m_valid, s2m_ready; s2m_msg_t s2m_msg;
  logic rsp_valid, rsp_ready = 1; logic [ID_W-1:0] rsp_id; logic [DATA_W-1:0] rsp_data;
  logic dl_valid; devload_e dl;
  logic [2:0] gran_units; logic sr_halted, mq_full, ev_sr, ev_ring_hit, ev_halt_skip;
  int checks = 0, failures = 0;

  queue_logic dut (.*);
  always #5 clk = ~clk;
  task automatic chk(bit c, string s); checks++; if (!c) begin failures++; $display("FAIL %s", s); end endtask

  // responder
  devload_e rdl = DL_LIGHT; bit hold = 0;
  m2s_msg_t pend [$]; int pwait [$];
  int n_spec = 0, n_rd = 0, max_gran = 0, saw_ld_stall = 0, saw_full = 0;
  int sel;
  always_comb begin
    sel = -1;
    for (int i = 0; i < pend.size(); i++) if (sel < 0 && pwait[i] == 0) sel = i;
  end
  always @(posedge clk) begin
    if (rst_n) begin
      if (s2m_valid && s2m_ready) begin pend.delete(sel); pwait.delete(sel); end
      if (rd_valid && rd_ready) begin pend.push_back(rd_msg); pwait.push_back(hold ? 1000000 : $urandom_range(1, 20)); n_rd++; end
      if (spec_valid && spec_ready) n_spec++;
      foreach (pwait[i]) if (pwait[i] > 0 && !(hold && pwait[i] > 100000 && 0)) pwait[i]--;
      if (int'(gran_units) > max_gran) max_gran = int'(gran_units);
      if (ld_valid && !ld_ready) saw_ld_stall++;
      if (mq_full) saw_full++;
    end
  end
  always_comb begin
    s2m_valid = rst_n && (sel >= 0);
    s2m_msg = '0;
    if (sel >= 0) begin
      s2m_msg.op = S2M_MEMDATA; s2m_msg.tag = pend[sel].tag; s2m_msg.devload = rdl;
      s2m_msg.data = init_line(longint'(pend[sel].addr));
    end
  end

  // load driver / checker
  longint exp_line [int];
  int nid = 0;
  always @(posedge clk)
    if (rst_n && rsp_valid && rsp_ready) begin
      chk(exp_line.exists(int'(rsp_id)), "unknown id");
      if (exp_line.exists(int'(rsp_id))) begin
        chk(rsp_data == init_line(exp_line[int'(rsp_id)]), $sformatf("data for id %0d", rsp_id));
        exp_line.delete(int'(rsp_id));
      end
    end

  task automatic load(longint a);
    while (exp_line.exists(nid % 256)) @(negedge clk);
    @(negedge clk);
    ld_valid = 1; ld_addr = ADDR_W'(a); ld_id = ID_W'(nid % 256);
    exp_line[nid % 256] = a / 64 * 64;
    nid++;
    @(posedge clk); while (!ld_ready) @(posedge clk);
    #1 ld_valid = 0;
  endtask

  task automatic drain();
    int k = 0;
    while (exp_line.num() > 0 && k < 20000) begin @(negedge clk); k++; end
    chk(exp_line.num() == 0, $sformatf("%0d loads unanswered", exp_line.num()));
  endtask

  initial begin
    #3000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int s0;
    repeat (3) @(negedge clk); rst_n = 1;
    // 1. sequential, light load
    for (int i = 0; i < 400; i++) load('h100000 + 64 * i);
    drain();
    chk(n_spec > 0 && n_spec < n_rd, $sformatf("spec %0d rd %0d", n_spec, n_rd));
    chk(max_gran == 4, "granularity never reached 1024B");
    // 2. moderate overload
    rdl = DL_MODERATE;
    for (int i = 0; i < 40; i++) load('h200000 + 64 * 37 * i);
    drain();
    chk(gran_units == 1, "granularity not reduced");
    // 3. severe overload: SR halted
    rdl = DL_SEVERE;
    load('h300000); drain();
    chk(sr_halted, "not halted");
    s0 = n_spec;
    for (int i = 0; i < 40; i++) load('h400000 + 64 * 29 * i);
    drain();
    chk(n_spec == s0, "MemSpecRd sent while halted");
    rdl = DL_LIGHT; load('h500000); drain();
    chk(!sr_halted, "halt not lifted by light load");
    // 4. SR disabled
    sr_en = 0; s0 = n_spec;
    for (int i = 0; i < 40; i++) load('h600000 + 64 * 13 * i);
    drain();
    chk(n_spec == s0, "MemSpecRd with SR disabled");
    sr_en = 1;
    // 5. stalled endpoint: memory queue full, SR queue backs up
    hold = 1;
    fork
      for (int i = 0; i < 70; i++) load('h700000 + 64 * i);
    join_none
    repeat (300) @(negedge clk);
    chk(mq_full, "memory queue not full");
    chk(saw_ld_stall > 0, "SR queue never backed up");
    hold = 0;
    foreach (pwait[i]) pwait[i] = $urandom_range(1, 20);
    wait fork;
    drain();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
