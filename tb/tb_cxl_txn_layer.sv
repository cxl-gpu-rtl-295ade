// tb_cxl_txn_layer: self-checking test of the CXL.mem transaction layer.
// Random valid/ready traffic on the three M2S sources: checks that a pending
// MemSpecRd always wins, that MemRd and MemWr alternate when both wait, that
// every accepted message leaves unchanged and nothing is lost.  S2M: data
// responses reach the read path (and wait for it), completions reach the
// store path at once, and DevLoad is repeated for each accepted message.
//
// No ports; random M2S sources and S2M messages with random back-pressure.
// Checks MemSpecRd priority (own choice, so the prefetch leads the load),
// MemRd/MemWr alternation, and routing of MemData/Cmp/DevLoad (paper).
module tb_cxl_txn_layer;
  import cxl_pkg::*;
  logic clk = 0, rst_n = 0;
  logic spec_valid = 0, spec_ready, rd_valid = 0, rd_ready, wr_valid = 0, wr_ready;
  m2s_msg_t spec_msg = '0, rd_msg = '0, wr_msg = '0, out_msg;
  logic out_valid, out_ready = 1;
  logic s2m_valid = 0, s2m_ready; s2m_msg_t s2m_msg = '0;
  logic data_valid, data_ready = 1; s2m_msg_t data_msg;
  logic cmp_valid; s2m_msg_t cmp_msg;
  logic dl_valid; devload_e dl;
  int checks = 0, failures = 0;
  int last = -1, alt_seen = 0;

  cxl_txn_layer dut (.*);
  always #5 clk = ~clk;
  task automatic chk(bit c, string s); checks++; if (!c) begin failures++; $display("FAIL %s", s); end endtask

  initial begin
    #500000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      spec_valid = ($urandom_range(0, 3) == 0);
      rd_valid   = ($urandom_range(0, 1) == 0);
      wr_valid   = ($urandom_range(0, 1) == 0);
      out_ready  = ($urandom_range(0, 4) != 0);
      spec_msg = '0; spec_msg.op = M2S_MEMSPECRD; spec_msg.addr = ADDR_W'($urandom);
      rd_msg   = '0; rd_msg.op = M2S_MEMRD; rd_msg.addr = ADDR_W'($urandom); rd_msg.tag = TAG_W'($urandom);
      wr_msg   = '0; wr_msg.op = M2S_MEMWR; wr_msg.addr = ADDR_W'($urandom); wr_msg.data = {16{$urandom}};
      #1;
      chk(out_valid == (spec_valid || rd_valid || wr_valid), "out_valid");
      if (spec_valid) chk(out_msg == spec_msg && spec_ready == out_ready && !rd_ready && !wr_ready, "spec priority");
      else if (rd_valid && wr_valid) begin
        chk(rd_ready != wr_ready || !out_ready, "one grant");
        if (out_ready) begin
          int g;
          g = rd_ready ? 0 : 1;
          chk(last != g, "MemRd/MemWr alternate");
          alt_seen++; last = g;
          chk(out_msg == (rd_ready ? rd_msg : wr_msg), "granted message");
        end
      end else if (rd_valid) begin chk(out_msg == rd_msg && rd_ready == out_ready, "rd alone"); end
      else if (wr_valid) begin chk(out_msg == wr_msg && wr_ready == out_ready, "wr alone"); end
      // S2M side
      s2m_valid = ($urandom_range(0, 1) == 0);
      data_ready = ($urandom_range(0, 3) != 0);
      s2m_msg = '0; s2m_msg.op = s2m_op_e'($urandom_range(0, 1)); s2m_msg.tag = TAG_W'($urandom);
      s2m_msg.devload = devload_e'($urandom_range(0, 3)); s2m_msg.data = {16{$urandom}};
      #1;
      if (s2m_valid && s2m_msg.op == S2M_MEMDATA)
        chk(data_valid && !cmp_valid && data_msg == s2m_msg && s2m_ready == data_ready, "data route");
      else if (s2m_valid)
        chk(cmp_valid && !data_valid && cmp_msg == s2m_msg && s2m_ready, "cmp route");
      chk(dl_valid == (s2m_valid && s2m_ready) && (!dl_valid || dl == s2m_msg.devload), "devload");
    end
    chk(alt_seen > 50, "alternation exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
