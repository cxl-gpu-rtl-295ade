// tb_mem_queue: self-checking test of the memory queue and its profiler.
// Fills all 32 slots (alloc_ready must then drop), checks that MemRd messages
// leave in arrival order with the right line address and a tag naming a
// live slot, answers them out of order and checks the returned id and data,
// the DevLoad handed to the load control, and that freed slots are reused.
// A second phase runs random traffic against a reference scoreboard.
//
// No ports; random loads and out-of-order S2M responses; checks tags, ids,
// data, slot release and DevLoad pass-through (paper: profiler removes the
// completed request and reads DevLoad).  Slot-number tags are own choice.
module tb_mem_queue;
  import cxl_pkg::*;
  localparam int DEPTH = 32;
  logic clk = 0, rst_n = 0;
  logic alloc_valid = 0, alloc_ready;
  logic [ADDR_W-1:0] alloc_addr = 0; logic [ID_W-1:0] alloc_id = 0;
  logic rd_valid, rd_ready = 0; m2s_msg_t rd_msg;
  logic s2m_valid = 0, s2m_ready; s2m_msg_t s2m_msg = '0;
  logic rsp_valid, rsp_ready = 1; logic [ID_W-1:0] rsp_id; logic [DATA_W-1:0] rsp_data;
  logic dl_valid; devload_e dl;
  logic ent_valid [DEPTH]; logic [ADDR_W-1:0] ent_addr [DEPTH]; logic full;
  int checks = 0, failures = 0;

  mem_queue #(.DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  // reference
  longint exp_addr [$]; int exp_id [$];
  int tag_id [int]; longint tag_addr [int];

  task automatic fail(string s); failures++; $display("FAIL %s", s); endtask

  task automatic alloc(longint a, int id);
    alloc_valid = 1; alloc_addr = ADDR_W'(a); alloc_id = ID_W'(id);
    @(posedge clk); while (!alloc_ready) @(posedge clk);
    #1 alloc_valid = 0;
    exp_addr.push_back(a / 64 * 64); exp_id.push_back(id);
  endtask

  task automatic take_rd();
    @(negedge clk); while (!rd_valid) @(negedge clk);
    rd_ready = 1;
    checks++;
    if (rd_msg.op != M2S_MEMRD || longint'(rd_msg.addr) != exp_addr[0]) fail($sformatf("rd addr %h exp %h", rd_msg.addr, exp_addr[0]));
    tag_id[int'(rd_msg.tag)] = exp_id[0]; tag_addr[int'(rd_msg.tag)] = exp_addr[0];
    void'(exp_addr.pop_front()); void'(exp_id.pop_front());
    @(posedge clk); #1 rd_ready = 0;
  endtask

  task automatic respond(int tag, devload_e d);
    s2m_valid = 1; s2m_msg = '0; s2m_msg.op = S2M_MEMDATA; s2m_msg.tag = TAG_W'(tag);
    s2m_msg.devload = d; s2m_msg.data = {8{64'(tag_addr[tag]) ^ 64'hA5A5}};
    #1;
    checks++;
    if (!rsp_valid || int'(rsp_id) != tag_id[tag] || rsp_data != s2m_msg.data || !dl_valid || dl != d)
      fail($sformatf("rsp tag %0d id %0d exp %0d", tag, rsp_id, tag_id[tag]));
    @(posedge clk); #1 s2m_valid = 0;
    tag_id.delete(tag); tag_addr.delete(tag);
  endtask

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(negedge clk); rst_n = 1; @(negedge clk);
    for (int i = 0; i < DEPTH; i++) alloc(64'h4000 + 64 * i + 7, i);
    @(negedge clk);
    checks++; if (alloc_ready || !full) fail("not full after 32");
    begin
      int nv = 0; for (int i = 0; i < DEPTH; i++) nv += ent_valid[i];
      checks++; if (nv != DEPTH) fail("ent_valid count");
    end
    for (int i = 0; i < DEPTH; i++) take_rd();
    @(negedge clk);
    checks++; if (rd_valid) fail("extra MemRd");
    // answer in reverse tag order
    for (int t = DEPTH - 1; t >= 0; t--) respond(t, devload_e'(t % 4));
    @(negedge clk);
    checks++; if (full || !alloc_ready) fail("not empty");
    // random phase
    for (int n = 0; n < 2000; n++) begin
      int act;
      act = $urandom_range(0, 2);
      @(negedge clk);
      if (act == 0 && alloc_ready) alloc(longint'($urandom_range(0, 'hfffff)) * 64, $urandom_range(0, 255));
      else if (act == 1 && exp_addr.size() > 0) take_rd();
      else if (tag_id.num() > 0) begin
        int keys [$]; int k;
        keys.delete();
        foreach (tag_id[t]) keys.push_back(t);
        k = keys[$urandom_range(0, keys.size() - 1)];
        respond(k, devload_e'($urandom_range(0, 3)));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
