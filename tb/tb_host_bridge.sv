// tb_host_bridge: self-checking test of the host bridge.
// Three simple root-port stand-ins in the test accept requests with random
// back-pressure and answer them after a random delay.  The test programs the
// decoder with the example ranges, sends random requests (some to no range)
// and checks that each goes to the right port unchanged, that unclaimed
// requests come back with err = 1, and that every request is answered
// exactly once with its id.
//
// No ports; registered stand-ins for the root ports answer with random
// delay; checks routing by the HDM table (paper) and the error answer for
// unmapped addresses and round-robin merge (own choices).
module tb_host_bridge;
  import cxl_pkg::*;
  localparam int N = 3;
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0, cfg_en = 0; logic [1:0] cfg_idx = 0; logic [ADDR_W-1:0] cfg_base = 0, cfg_size = 0;
  logic sb_req_valid = 0, sb_req_ready; sb_req_t sb_req = '0;
  logic sb_rsp_valid, sb_rsp_ready = 1; sb_rsp_t sb_rsp;
  logic rp_req_valid [N], rp_req_ready [N]; sb_req_t rp_req;
  logic rp_rsp_valid [N], rp_rsp_ready [N]; sb_rsp_t rp_rsp [N];
  logic ev_unmapped;
  int checks = 0, failures = 0;

  host_bridge #(.NUM_RP(N)) dut (.*);
  always #5 clk = ~clk;
  task automatic chk(bit c, string s); checks++; if (!c) begin failures++; $display("FAIL %s", s); end endtask

  // port stand-ins
  int q_id [N][$]; int q_wait [N][$];
  always @(posedge clk) begin
    for (int p = 0; p < N; p++) begin
      if (rp_req_valid[p] && rp_req_ready[p]) begin
        chk(rp_req == sb_req, "request passed unchanged");
        chk(p == ((sb_req.addr < 'h20) ? 0 : (sb_req.addr < 'h40) ? 1 : 2) && sb_req.addr < 'h80, "port choice");
        q_id[p].push_back(int'(rp_req.id)); q_wait[p].push_back($urandom_range(0, 8));
      end
      if (rp_rsp_valid[p] && rp_rsp_ready[p]) begin void'(q_id[p].pop_front()); void'(q_wait[p].pop_front()); end
      if (q_wait[p].size() > 0 && q_wait[p][0] > 0) q_wait[p][0]--;
      rp_req_ready[p] <= ($urandom_range(0, 2) != 0);
      rp_rsp_valid[p] <= (q_id[p].size() > 0) && (q_wait[p][0] == 0);
      rp_rsp[p]       <= '0;
      rp_rsp[p].id    <= (q_id[p].size() > 0) ? ID_W'(q_id[p][0]) : '0;
      rp_rsp[p].data  <= DATA_W'(p);
    end
  end

  bit stop_rnd = 0;
  always @(negedge clk) sb_rsp_ready <= stop_rnd || ($urandom_range(0, 3) != 0);
  int expect_port [int]; int got [int];
  always @(posedge clk)
    if (rst_n && sb_rsp_valid && sb_rsp_ready) begin
      int id;
      id = int'(sb_rsp.id);
      chk(expect_port.exists(id), $sformatf("unexpected response id %0d err %0d t=%0t", id, sb_rsp.err, $time));
      if (expect_port.exists(id)) begin
        chk(sb_rsp.err == (expect_port[id] < 0), "err flag");
        if (expect_port[id] >= 0) chk(int'(sb_rsp.data) == expect_port[id], "response from right port");
        expect_port.delete(id);
      end
    end

  task automatic prog(int i, longint b, longint s);
    @(negedge clk); cfg_we = 1; cfg_idx = 2'(i); cfg_base = ADDR_W'(b); cfg_size = ADDR_W'(s); cfg_en = 1;
    @(negedge clk); cfg_we = 0;
  endtask

  initial begin
    #2000000; failures++;
    $display("v %0d %0d %0d r %0d %0d %0d sel %0d rr %0d errv %0d sbv %0d sbr %0d", rp_rsp_valid[0], rp_rsp_valid[1], rp_rsp_valid[2], rp_rsp_ready[0], rp_rsp_ready[1], rp_rsp_ready[2], dut.sel, dut.rr, dut.err_v, sb_rsp_valid, sb_rsp_ready);
    foreach (expect_port[i]) $display("pending id %0d port %0d", i, expect_port[i]);
    for (int p = 0; p < N; p++) $display("port %0d queue %0d", p, q_id[p].size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int p = 0; p < N; p++) begin rp_req_ready[p] = 0; rp_rsp_valid[p] = 0; rp_rsp[p] = '0; end
    repeat (3) @(negedge clk); rst_n = 1;
    prog(0, 'h00, 'h20); prog(1, 'h20, 'h20); prog(2, 'h40, 'h40);
    for (int n = 0; n < 2000; n++) begin
      longint a; int id, port;
      id = n % 256;
      while (expect_port.exists(id)) @(negedge clk);
      a = $urandom_range(0, 'h9f);
      port = (a < 'h20) ? 0 : (a < 'h40) ? 1 : (a < 'h80) ? 2 : -1;
      expect_port[id] = port;
      @(negedge clk);
      sb_req_valid = 1; sb_req = '0; sb_req.addr = ADDR_W'(a); sb_req.id = ID_W'(id); sb_req.write = $urandom_range(0, 1);
      @(posedge clk); while (!sb_req_ready) @(posedge clk);
      #1 sb_req_valid = 0;
    end
    stop_rnd = 1;
    repeat (3000) @(negedge clk);
    chk(expect_port.num() == 0, $sformatf("%0d requests unanswered", expect_port.num()));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
