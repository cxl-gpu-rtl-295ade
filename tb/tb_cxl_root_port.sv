// tb_cxl_root_port: self-checking test of one root port with an SSD-like
// endpoint model and a GPU-memory model.
// Runs random loads and stores (never two in flight to one line) in three
// configurations of the port: plain CXL (sr_en = ds_en = 0), CXL-SR and
// CXL-DS, the last with the endpoint in garbage collection for a while.
// Every load must return the last value stored to its line; every store must
// be acknowledged.  Under DS, stores must be acknowledged quickly even while
// the endpoint's writes take LAT_WR_GC cycles, and under plain CXL they must
// wait for the endpoint.  MemSpecRd must appear only when SR is on.
// First, on the idle port, a load must reach the link as MemRd within 4
// cycles and its MemData must become the response within 2 (the paper gives
// only the controller's round trip, "in the range of tens of nanoseconds";
// these bounds are this test's).
//
// No ports; one root port with reduced TAIL_THRESH/CHECK_PERIOD, behavioural
// endpoint and GPU memory.  The configurations are the paper's CXL, CXL-SR
// and CXL-DS; latencies and traffic mix are this test's choices.
module tb_cxl_root_port;
  import cxl_pkg::*;
  import tb_pkg::*;
  logic clk = 0, rst_n = 0, sr_en = 0, ds_en = 0;
  logic req_valid = 0, req_ready; sb_req_t req = '0;
  logic rsp_valid, rsp_ready = 1; sb_rsp_t rsp;
  logic io_valid = 0, io_ready; logic [M2S_W-1:0] io_payload = '0;
  logic link_valid, link_ready; link_tx_t link_tx;
  logic s2m_valid, s2m_ready; s2m_msg_t s2m_msg;
  logic gm_valid, gm_ready; gm_req_t gm_req; logic gm_rsp_valid; logic [DATA_W-1:0] gm_rsp_data;
  logic [2:0] sr_gran_units; logic sr_halted, ds_suspended; logic [6:0] ds_stack_count;
  rp_events_t ev;
  logic gc = 0, dl_force_en = 0; devload_e dl_force = DL_LIGHT;
  int checks = 0, failures = 0;
  longint cyc = 0;

  cxl_root_port #(.TAIL_THRESH(32), .CHECK_PERIOD(64)) dut (.*);
  cxl_ep_model #(.LAT_HIT(4), .LAT_MISS(100), .LAT_WR(30), .LAT_WR_GC(300)) ep (.clk, .rst_n,
    .link_valid, .link_ready, .link_tx, .s2m_valid, .s2m_ready, .s2m_msg, .gc, .dl_force_en, .dl_force);
  gpu_mem_model #(.LATENCY(6), .STALL_PCT(20)) gm (.clk, .rst_n, .req_valid(gm_valid), .req_ready(gm_ready),
    .req(gm_req), .rsp_valid(gm_rsp_valid), .rsp_data(gm_rsp_data));
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic chk(bit c, string s); checks++; if (!c) begin failures++; $display("FAIL %s", s); end endtask

  logic [DATA_W-1:0] mem [longint];
  bit busy [longint];
  typedef struct { bit write; longint line; logic [DATA_W-1:0] data; longint t; } out_t;
  out_t outst [int];
  int n_spec_seen = 0; longint max_st_lat = 0, min_st_lat = 1000000;

  m2s_msg_t link_msg;
  assign link_msg = m2s_msg_t'(link_tx.payload);
  always @(posedge clk) if (rst_n) begin
    if (link_valid && link_ready && !link_tx.io && link_msg.op == M2S_MEMSPECRD) n_spec_seen++;
    if (rsp_valid && rsp_ready) begin
      int id;
      id = int'(rsp.id);
      chk(outst.exists(id), "unknown id");
      if (outst.exists(id)) begin
        chk(rsp.write == outst[id].write && !rsp.err, "flags");
        if (!outst[id].write) chk(rsp.data == outst[id].data, $sformatf("load data %h", outst[id].line));
        else begin
          if (cyc - outst[id].t > max_st_lat) max_st_lat = cyc - outst[id].t;
          if (cyc - outst[id].t < min_st_lat) min_st_lat = cyc - outst[id].t;
        end
        busy.delete(outst[id].line);
        outst.delete(id);
      end
    end
  end

  int next_id = 0;
  task automatic issue(bit w, longint a);
    longint line; int id;
    line = a / 64 * 64;
    while (busy.exists(line) || outst.num() >= 100) @(negedge clk);
    while (outst.exists(next_id)) next_id = (next_id + 1) % 256;
    id = next_id; next_id = (next_id + 1) % 256;
    @(negedge clk);
    req_valid = 1; req = '0; req.write = w; req.addr = ADDR_W'(a); req.id = ID_W'(id); req.data = {16{$urandom}};
    outst[id] = '{write: w, line: line, data: w ? '0 : (mem.exists(line) ? mem[line] : init_line(line)), t: cyc};
    busy[line] = 1;
    if (w) mem[line] = req.data;
    @(posedge clk); while (!req_ready) @(posedge clk);
    #1 req_valid = 0;
  endtask

  task automatic drain();
    int k = 0;
    while (outst.num() > 0 && k < 50000) begin @(negedge clk); k++; end
    chk(outst.num() == 0, $sformatf("%0d unanswered", outst.num()));
  endtask

  task automatic traffic(int n);
    for (int i = 0; i < n; i++)
      issue($urandom_range(0, 2) == 0, 'h4000_0000 + 64 * longint'($urandom_range(0, 1023)));
    drain();
  endtask

  initial begin
    #20ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // idle-port latency: request accepted -> MemRd on the link, and
  // MemData from the endpoint -> response on the system bus
  longint t_req = -1, t_link = -1, t_s2m = -1, t_rsp = -1;
  always @(posedge clk) if (rst_n && t_req >= 0) begin
    if (t_link < 0 && link_valid && link_ready && !link_tx.io && link_msg.op == M2S_MEMRD) t_link = cyc;
    if (t_s2m < 0 && s2m_valid && s2m_ready) t_s2m = cyc;
    if (t_rsp < 0 && rsp_valid && rsp_ready) t_rsp = cyc;
  end

  initial begin
    repeat (4) @(negedge clk); rst_n = 1; repeat (2) @(negedge clk);
    @(negedge clk); t_req = cyc; issue(0, 'h4000_0000); drain();
    $display("idle latency: request -> MemRd %0d cycles, MemData -> response %0d cycles", t_link - t_req, t_rsp - t_s2m);
    chk(t_link - t_req <= 4 && t_rsp - t_s2m <= 2, "root port adds too much latency");
    // plain CXL
    traffic(400);
    chk(n_spec_seen == 0, "MemSpecRd with SR off");
    chk(min_st_lat >= 30, $sformatf("plain store acked after %0d cycles", min_st_lat));
    // CXL-SR
    sr_en = 1; traffic(400);
    chk(n_spec_seen > 0, "no MemSpecRd with SR on");
    // CXL-DS with garbage collection
    ds_en = 1; gc = 1; max_st_lat = 0;
    traffic(600);
    chk(max_st_lat < 100, $sformatf("DS store latency %0d under GC", max_st_lat));
    gc = 0;
    repeat (3000) @(negedge clk);
    chk(ds_stack_count == 0, "stack not empty");
    traffic(300);
    // read back everything
    foreach (mem[l]) issue(0, l);
    drain();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
