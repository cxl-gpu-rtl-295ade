// tb_ds_ctrl: self-checking test of the deterministic-store controller.
// A small SSD responder in the test completes MemWr after ssd_lat cycles and
// reports ssd_dl as DevLoad; a behavioural GPU memory holds the stack.
// Checked, in order:
//   1. normal mode: a store is acknowledged before its SSD completion and
//      sent to the SSD with its data; nothing is written to GPU memory
//   2. DevLoad "moderate overload" suspends the port: stores are
//      acknowledged, not sent to the SSD, and stacked in GPU memory at
//      RESV_BASE + 64*slot; a second store to the same line overwrites it
//   3. a load of a buffered line is answered from GPU memory with the newest
//      data; a load of another line is passed to the read path
//   4. DevLoad "light" resumes the port; the stack is flushed last-in first-
//      out with the right addresses and data
//   5. a completion that does not come for TAIL_THRESH cycles suspends too
//   6. ds_en = 0: the store is acknowledged only after the SSD completion
//   7. random loads and stores to 16 lines while DevLoad swings between
//      light and moderate and the SSD latency varies: every store is
//      acknowledged; a load is either answered with the newest data or passed
//      to the read path only when the SSD already holds the newest data; after
//      the final flush the SSD holds the newest data of every line
//
// No ports; small STACK_DEPTH/TAIL_THRESH/CHECK_PERIOD to reach every state
// quickly.  Behaviour checked follows the paper's DS (immediate release,
// stack in GPU memory, background flush, reads from GPU memory); the
// thresholds and probe flush are this design's.
module tb_ds_ctrl;
  import cxl_pkg::*;
  localparam logic [ADDR_W-1:0] RB = 48'h0000_F000_0000;
  logic clk = 0, rst_n = 0, ds_en = 1;
  logic req_valid = 0, req_ready; sb_req_t req = '0;
  logic ld_valid, ld_ready = 1; logic [ADDR_W-1:0] ld_addr; logic [ID_W-1:0] ld_id;
  logic rsp_valid, rsp_ready = 1; sb_rsp_t rsp;
  logic wr_valid, wr_ready = 1; m2s_msg_t wr_msg;
  logic cmp_valid = 0; s2m_msg_t cmp_msg = '0;
  logic dl_valid = 0; devload_e dl = DL_LIGHT;
  logic gm_valid, gm_ready; gm_req_t gm_req;
  logic gm_rsp_valid; logic [DATA_W-1:0] gm_rsp_data;
  logic suspended; logic [3:0] stack_count;
  logic ev_dual, ev_buffer, ev_flush, ev_gm_hit, ev_suspend;
  int checks = 0, failures = 0;

  ds_ctrl #(.STACK_DEPTH(8), .WR_TAGS(4), .TAIL_THRESH(16), .CHECK_PERIOD(32), .RESV_BASE(RB)) dut (.*);
  gpu_mem_model #(.LATENCY(5)) u_gm (.clk, .rst_n, .req_valid(gm_valid), .req_ready(gm_ready),
    .req(gm_req), .rsp_valid(gm_rsp_valid), .rsp_data(gm_rsp_data));
  always #5 clk = ~clk;

  // SSD responder and monitors
  longint cyc = 0;
  int ssd_lat = 20; devload_e ssd_dl = DL_LIGHT; bit ssd_hold = 0;
  longint due [$]; logic [TAG_W-1:0] tags [$];
  m2s_msg_t wr_log [$];
  int gm_writes = 0;
  gm_req_t gm_log [$];
  sb_rsp_t rsp_log [$]; longint rsp_cyc [$];
  logic [DATA_W-1:0] ssd_img [longint];
  int ld_fwd_id = -1;
  int n_buf = 0, n_hit = 0, n_flush = 0, n_dual = 0;
  always @(posedge clk) if (rst_n) begin
    n_buf += int'(ev_buffer); n_hit += int'(ev_gm_hit); n_flush += int'(ev_flush); n_dual += int'(ev_dual);
  end
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (wr_valid && wr_ready) ssd_img[longint'(wr_msg.addr)] = wr_msg.data;
    if (ld_valid && ld_ready) ld_fwd_id = int'(ld_id);
    cmp_valid <= 0;
    if (wr_valid && wr_ready) begin
      wr_log.push_back(wr_msg); due.push_back(cyc + ssd_lat); tags.push_back(wr_msg.tag);
    end
    if (!ssd_hold && due.size() > 0 && due[0] <= cyc) begin
      cmp_valid <= 1; cmp_msg <= '0; cmp_msg.op <= S2M_CMP; cmp_msg.tag <= tags[0]; cmp_msg.devload <= ssd_dl;
      void'(due.pop_front()); void'(tags.pop_front());
    end
    if (gm_valid && gm_ready && gm_req.write) begin gm_writes++; gm_log.push_back(gm_req); end
    if (rsp_valid && rsp_ready) begin rsp_log.push_back(rsp); rsp_cyc.push_back(cyc); end
  end

  task automatic fail(string s); failures++; $display("FAIL %s", s); endtask
  task automatic chk(bit c, string s); checks++; if (!c) fail(s); endtask

  task automatic send(bit w, longint a, int id, logic [DATA_W-1:0] d = '0);
    @(negedge clk);
    req_valid = 1; req = '0; req.write = w; req.addr = ADDR_W'(a); req.id = ID_W'(id); req.data = d;
    @(posedge clk); while (!req_ready) @(posedge clk);
    #1 req_valid = 0;
  endtask

  task automatic wait_rsp(int id, output sb_rsp_t r, output longint c);
    int k = 0;
    while (1) begin
      for (int i = 0; i < rsp_log.size(); i++)
        if (int'(rsp_log[i].id) == id) begin r = rsp_log[i]; c = rsp_cyc[i]; rsp_log.delete(i); rsp_cyc.delete(i); return; end
      @(negedge clk); k++;
      if (k > 2000) begin fail($sformatf("no response for id %0d", id)); r = '0; c = 0; return; end
    end
  endtask

  function automatic logic [DATA_W-1:0] pat(int n); return {16{32'(n) * 32'h01010101 + 32'h1234}}; endfunction

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    sb_rsp_t r; longint c, t0;
    repeat (3) @(negedge clk); rst_n = 1; repeat (2) @(negedge clk);
    // 1. normal store
    t0 = cyc;
    send(1, 'h1000, 1, pat(1));
    wait_rsp(1, r, c);
    chk(r.write && (c - t0) < 10, $sformatf("normal ack late: %0d cycles", c - t0));
    chk(wr_log.size() == 1 && wr_log[0].op == M2S_MEMWR && wr_log[0].addr == 48'h1000 && wr_log[0].data == pat(1), "normal MemWr");
    chk(gm_writes == 0, "normal mode wrote GPU memory");
    chk(!suspended, "suspended too early");
    repeat (30) @(negedge clk);
    // 2. DevLoad moderate -> suspend
    @(negedge clk); dl_valid = 1; dl = DL_MODERATE; @(negedge clk); dl_valid = 0;
    @(negedge clk);
    chk(suspended, "not suspended on DevLoad mo");
    wr_log.delete();
    send(1, 'h2000, 2, pat(2)); wait_rsp(2, r, c);
    send(1, 'h3000, 3, pat(3)); wait_rsp(3, r, c);
    send(1, 'h2000, 4, pat(4)); wait_rsp(4, r, c);
    repeat (3) @(negedge clk);
    chk(wr_log.size() == 0, "store reached SSD while suspended");
    chk(stack_count == 2, $sformatf("stack count %0d", stack_count));
    chk(gm_log.size() == 3 && gm_log[0].addr == RB && gm_log[1].addr == RB + 64 && gm_log[2].addr == RB &&
        gm_log[2].data == pat(4), "stack slots in GPU memory");
    // 3. loads
    send(0, 'h2000, 5); wait_rsp(5, r, c);
    chk(!r.write && r.data == pat(4), "buffered load data");
    @(negedge clk); ld_ready = 0;
    send(0, 'h5000, 6);
    @(negedge clk);
    chk(ld_valid && ld_addr == 48'h5000 && ld_id == 6, "miss passed to read path");
    ld_ready = 1; @(negedge clk);
    // 4. resume and flush
    @(negedge clk); dl_valid = 1; dl = DL_LIGHT; @(negedge clk); dl_valid = 0;
    repeat (80) @(negedge clk);
    chk(!suspended, "not resumed");
    chk(stack_count == 0, "stack not flushed");
    chk(wr_log.size() == 2 && wr_log[0].addr == 48'h3000 && wr_log[0].data == pat(3) &&
        wr_log[1].addr == 48'h2000 && wr_log[1].data == pat(4), "flush order/data");
    // 5. overdue completion
    ssd_hold = 1;
    send(1, 'h7000, 7, pat(7)); wait_rsp(7, r, c);
    repeat (25) @(negedge clk);
    chk(suspended, "no suspend on overdue write");
    ssd_hold = 0;
    repeat (80) @(negedge clk);
    chk(!suspended, "no resume after overdue write completed");
    // 6. ds disabled
    ds_en = 0; ssd_lat = 40;
    t0 = cyc;
    send(1, 'h8000, 8, pat(8)); wait_rsp(8, r, c);
    chk((c - t0) >= 40, $sformatf("ds off: ack after %0d cycles", c - t0));
    // 7. random traffic against a reference image
    ds_en = 1; ssd_lat = 10;
    begin
      logic [DATA_W-1:0] ref_img [longint];
      logic [DATA_W-1:0] d;
      longint a; int id, k;
      ssd_img.delete();
      n_buf = 0; n_hit = 0; n_flush = 0; n_dual = 0;
      for (int n = 0; n < 600; n++) begin
        if (n % 60 == 0) begin
          @(negedge clk); dl_valid = 1; dl = (n % 120 == 0) ? DL_MODERATE : DL_LIGHT;
          ssd_dl = dl; @(negedge clk); dl_valid = 0;
        end
        ssd_lat = $urandom_range(5, 60);
        a = 'h10000 + 64 * longint'($urandom_range(0, 15));
        id = 100 + n % 100;
        if ($urandom_range(0, 1) == 1) begin
          d = {16{$urandom}};
          ref_img[a] = d;
          send(1, a, id, d); wait_rsp(id, r, c);
          chk(r.write && !r.err, "random store ack");
        end else begin
          ld_fwd_id = -1;
          send(0, a, id);
          k = 0;
          while (k < 2000 && ld_fwd_id != id && rsp_log.size() == 0) begin @(negedge clk); k++; end
          if (ld_fwd_id == id)
            chk(!ref_img.exists(a) || (ssd_img.exists(a) && ssd_img[a] == ref_img[a]),
                $sformatf("load of %h sent to the SSD before it holds the newest data", a));
          else begin
            wait_rsp(id, r, c);
            chk(!r.write && ref_img.exists(a) && r.data == ref_img[a], $sformatf("buffered load %h", a));
          end
        end
      end
      ssd_dl = DL_LIGHT;
      @(negedge clk); dl_valid = 1; dl = DL_LIGHT; @(negedge clk); dl_valid = 0;
      repeat (600) @(negedge clk);
      chk(stack_count == 0, "stack not empty at the end");
      $display("phase 7: buffered %0d, GPU-memory hits %0d, flushed %0d, dual writes %0d", n_buf, n_hit, n_flush, n_dual);
      chk(n_buf > 0 && n_hit > 0 && n_flush > 0 && n_dual > 0, "phase 7 did not exercise every DS path");
      foreach (ref_img[l]) chk(ssd_img.exists(l) && ssd_img[l] == ref_img[l], $sformatf("SSD image %h", l));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
