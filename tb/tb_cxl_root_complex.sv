// tb_cxl_root_complex: end-to-end test of the CXL root complex at its
// default sizes (three root ports, 32-entry queues, 64-entry stack).
// Port 0 has a DRAM-like endpoint (plain CXL: no SR, no DS); ports 1 and 2
// have SSD-like endpoints (long miss latency, slow writes under garbage
// collection) with SR and DS on.  GPU memory is a behavioural model per port.
// The test programs the HDM decoder like firmware would, then runs phases of
// system-bus traffic from a scoreboard that never has two requests to one
// line in flight, so every load has exactly one right answer:
//   A  mixed loads/stores, sequential and random, on all ports
//   B  garbage collection plus moderate-overload DevLoad on port 2: stores
//      are buffered in GPU memory, loads of them are served from there,
//      then the stack is flushed to the SSD once DevLoad falls
//   C  severe-overload DevLoad on port 1: speculative reads stop
//   D  requests to an address no port claims: error responses
//   E  a burst of loads to port 2: its memory queue fills
//   F  CXL.io traffic on port 0 competes with CXL.mem for the link
// It counts how often each mechanism happened and fails for any that never
// did, checks every response (data, id, error flag), and finally checks that
// every load returns the last value stored, wherever the line now lives.
//
// No ports; the top is instantiated without parameter overrides, so this is
// the full-size test.  Paper mechanisms counted: SR, ring-buffer bypass, SR
// halt, granularity change, memory-queue full, dual write, buffering, flush,
// GPU-memory hit, suspension, PCIe turn, unmapped address (own choice).
module tb_cxl_root_complex;
  import cxl_pkg::*;
  import tb_pkg::*;
  localparam int N = 3;
  localparam longint SPAN = 64'h0100_0000;      // 16MB per port
  localparam longint BASE [N] = '{64'h1000_0000, 64'h2000_0000, 64'h3000_0000};

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0, cfg_en = 0; logic [1:0] cfg_idx = 0; logic [ADDR_W-1:0] cfg_base = 0, cfg_size = 0;
  logic sr_en [N], ds_en [N];
  logic sb_req_valid = 0, sb_req_ready; sb_req_t sb_req = '0;
  logic sb_rsp_valid, sb_rsp_ready = 1; sb_rsp_t sb_rsp;
  logic io_valid [N], io_ready [N]; logic [M2S_W-1:0] io_payload [N];
  logic link_valid [N], link_ready [N]; link_tx_t link_tx [N];
  logic s2m_valid [N], s2m_ready [N]; s2m_msg_t s2m_msg [N];
  logic gm_valid [N], gm_ready [N]; gm_req_t gm_req [N];
  logic gm_rsp_valid [N]; logic [DATA_W-1:0] gm_rsp_data [N];
  logic [2:0] sr_gran_units [N]; logic sr_halted [N], ds_suspended [N];
  logic [6:0] ds_stack_count [N];
  rp_events_t ev [N]; logic ev_unmapped;
  logic gc [N], dl_force_en [N]; devload_e dl_force [N];
  int checks = 0, failures = 0;
  longint cyc = 0;

  cxl_root_complex dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  cxl_ep_model #(.LAT_HIT(4), .LAT_MISS(40),  .LAT_WR(8),  .LAT_WR_GC(8))   ep0 (.clk, .rst_n,
    .link_valid(link_valid[0]), .link_ready(link_ready[0]), .link_tx(link_tx[0]),
    .s2m_valid(s2m_valid[0]), .s2m_ready(s2m_ready[0]), .s2m_msg(s2m_msg[0]),
    .gc(gc[0]), .dl_force_en(dl_force_en[0]), .dl_force(dl_force[0]));
  cxl_ep_model #(.LAT_HIT(4), .LAT_MISS(150), .LAT_WR(20), .LAT_WR_GC(400)) ep1 (.clk, .rst_n,
    .link_valid(link_valid[1]), .link_ready(link_ready[1]), .link_tx(link_tx[1]),
    .s2m_valid(s2m_valid[1]), .s2m_ready(s2m_ready[1]), .s2m_msg(s2m_msg[1]),
    .gc(gc[1]), .dl_force_en(dl_force_en[1]), .dl_force(dl_force[1]));
  cxl_ep_model #(.LAT_HIT(4), .LAT_MISS(200), .LAT_WR(20), .LAT_WR_GC(400)) ep2 (.clk, .rst_n,
    .link_valid(link_valid[2]), .link_ready(link_ready[2]), .link_tx(link_tx[2]),
    .s2m_valid(s2m_valid[2]), .s2m_ready(s2m_ready[2]), .s2m_msg(s2m_msg[2]),
    .gc(gc[2]), .dl_force_en(dl_force_en[2]), .dl_force(dl_force[2]));

  for (genvar p = 0; p < N; p++) begin : g_gm
    gpu_mem_model #(.LATENCY(6)) u_gm (.clk, .rst_n, .req_valid(gm_valid[p]), .req_ready(gm_ready[p]),
      .req(gm_req[p]), .rsp_valid(gm_rsp_valid[p]), .rsp_data(gm_rsp_data[p]));
  end

  task automatic chk(bit c, string s); checks++; if (!c) begin failures++; $display("FAIL %s", s); end endtask

  // ------------------------------------------------------------ mechanisms
  typedef enum int { M_SR, M_RING, M_HALT, M_GRAN4, M_MQFULL, M_DUAL, M_BUFFER, M_FLUSH,
                     M_GMHIT, M_SUSPEND, M_IOTURN, M_UNMAPPED, M_NUM } mech_e;
  int mech [M_NUM];
  always @(posedge clk) if (rst_n) begin
    for (int p = 0; p < N; p++) begin
      if (ev[p].sr)        mech[M_SR]++;
      if (ev[p].ring_hit)  mech[M_RING]++;
      if (ev[p].halt_skip) mech[M_HALT]++;
      if (ev[p].mq_full)   mech[M_MQFULL]++;
      if (ev[p].dual)      mech[M_DUAL]++;
      if (ev[p].buffer)    mech[M_BUFFER]++;
      if (ev[p].flush)     mech[M_FLUSH]++;
      if (ev[p].gm_hit)    mech[M_GMHIT]++;
      if (ev[p].suspend)   mech[M_SUSPEND]++;
      if (ev[p].io_turn) mech[M_IOTURN]++;
      if (sr_gran_units[p] == 3'd4) mech[M_GRAN4]++;
    end
    if (ev_unmapped && sb_req_ready) mech[M_UNMAPPED]++;
  end

  // ------------------------------------------------------------ scoreboard
  logic [DATA_W-1:0] mem [longint];          // line address -> last stored data
  bit busy [longint];                        // line has a request in flight
  typedef struct { bit write; longint line; logic [DATA_W-1:0] data; bit err; } out_t;
  out_t outst [int];
  int n_ld = 0, n_st = 0, n_err = 0;

  function automatic logic [DATA_W-1:0] cur(longint line);
    return mem.exists(line) ? mem[line] : init_line(line);
  endfunction

  always @(posedge clk)
    if (rst_n && sb_rsp_valid && sb_rsp_ready) begin
      int id;
      id = int'(sb_rsp.id);
      chk(outst.exists(id), $sformatf("response for idle id %0d", id));
      if (outst.exists(id)) begin
        out_t o;
        o = outst[id];
        chk(sb_rsp.err == o.err && sb_rsp.write == o.write, $sformatf("id %0d flags", id));
        if (!o.write && !o.err) begin
          chk(sb_rsp.data == o.data, $sformatf("load data line %h", o.line));
          n_ld++;
        end
        if (o.write && !o.err) n_st++;
        if (o.err) n_err++;
        if (!o.err) busy.delete(o.line);
        outst.delete(id);
      end
    end

  int next_id = 0;
  task automatic issue(bit w, longint a, bit expect_err = 0);
    longint line; int id;
    line = a / 64 * 64;
    while (busy.exists(line) || outst.num() >= 200) @(negedge clk);
    while (outst.exists(next_id)) next_id = (next_id + 1) % 256;
    id = next_id; next_id = (next_id + 1) % 256;
    @(negedge clk);
    sb_req_valid = 1; sb_req = '0; sb_req.write = w; sb_req.addr = ADDR_W'(a); sb_req.id = ID_W'(id);
    sb_req.data = {16{$urandom}};
    outst[id] = '{write: w, line: line, data: w ? '0 : cur(line), err: expect_err};
    if (!expect_err) busy[line] = 1;
    if (w && !expect_err) mem[line] = sb_req.data;
    @(posedge clk); while (!sb_req_ready) @(posedge clk);
    #1 sb_req_valid = 0;
  endtask

  task automatic drain(int max_cycles = 40000);
    int k = 0;
    while (outst.num() > 0 && k < max_cycles) begin @(negedge clk); k++; end
    chk(outst.num() == 0, $sformatf("%0d requests unanswered", outst.num()));
  endtask

  // CXL.io traffic generator for port 0 (phase F)
  bit io_on = 0;
  int io_sent = 0;
  always @(posedge clk) begin
    if (io_valid[0] && io_ready[0]) io_sent++;
    io_valid[0] <= io_on && ($urandom_range(0, 1) == 0 || (io_valid[0] && !io_ready[0]));
    if (!(io_valid[0] && !io_ready[0])) io_payload[0] <= M2S_W'({$urandom, $urandom});
  end

  initial begin
    #20ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int p = 0; p < N; p++) begin
      gc[p] = 0; dl_force_en[p] = 0; dl_force[p] = DL_LIGHT;
      sr_en[p] = (p != 0); ds_en[p] = (p != 0);
      link_ready[p] = 1; s2m_ready[p] = 1; io_valid[p] = 0; io_payload[p] = '0;
    end
    repeat (4) @(negedge clk); rst_n = 1; @(negedge clk);
    // firmware: HDM decoder
    for (int p = 0; p < N; p++) begin
      @(negedge clk); cfg_we = 1; cfg_idx = 2'(p); cfg_base = ADDR_W'(BASE[p]); cfg_size = ADDR_W'(SPAN); cfg_en = 1;
    end
    @(negedge clk); cfg_we = 0;

    // A: mixed traffic
    for (int i = 0; i < 1500; i++) begin
      int p; longint off;
      p = $urandom_range(0, N - 1);
      off = ($urandom_range(0, 3) != 0) ? 64 * longint'(i) : 64 * longint'($urandom_range(0, 4095));
      issue($urandom_range(0, 3) == 0, BASE[p] + off);
    end
    drain();
    $display("phase A done at cycle %0d", cyc);

    // B: GC and moderate overload on port 2 -> DS buffering
    gc[2] = 1; dl_force_en[2] = 1; dl_force[2] = DL_MODERATE;
    issue(1, BASE[2] + 'h80_0000);                // first write sees the slow SSD
    repeat (100) @(negedge clk);
    chk(ds_suspended[2], "port 2 not suspended under GC");
    for (int i = 0; i < 40; i++) issue(1, BASE[2] + 'h80_0000 + 64 * longint'(i + 1));
    for (int i = 0; i < 40; i++) issue(0, BASE[2] + 'h80_0000 + 64 * longint'(i + 1));
    drain();
    // a probe flush may already have written one entry back
    chk(ds_stack_count[2] >= 38 && ds_stack_count[2] <= 40, $sformatf("stack holds %0d", ds_stack_count[2]));
    gc[2] = 0; dl_force_en[2] = 0;
    while (ds_suspended[2]) @(negedge clk);
    // stores to lines still in the stack while it drains: dual writes
    for (int i = 1; i <= 5; i++) issue(1, BASE[2] + 'h80_0000 + 64 * longint'(i));
    repeat (3000) @(negedge clk);
    chk(ds_stack_count[2] == 0 && !ds_suspended[2], "stack not flushed after GC");
    for (int i = 0; i < 41; i++) issue(0, BASE[2] + 'h80_0000 + 64 * longint'(i));
    drain();
    $display("phase B done at cycle %0d", cyc);

    // C: severe overload on port 1 -> SR halted
    dl_force_en[1] = 1; dl_force[1] = DL_SEVERE;
    issue(0, BASE[1] + 'h40_0000); drain();
    chk(sr_halted[1], "port 1 SR not halted");
    for (int i = 1; i < 60; i++) issue(0, BASE[1] + 'h40_0000 + 'h1000 * longint'(i));
    drain();
    dl_force[1] = DL_LIGHT;
    issue(0, BASE[1] + 'h50_0000); drain();
    chk(!sr_halted[1], "port 1 SR still halted");
    dl_force_en[1] = 0;

    // D: unmapped
    for (int i = 0; i < 5; i++) issue($urandom_range(0, 1), 64'h7000_0000 + 64 * longint'(i), 1);
    drain();

    // E: load burst on port 2
    for (int i = 0; i < 120; i++) issue(0, BASE[2] + 'hC0_0000 + 'h400 * longint'(i));
    drain();

    // F: CXL.io on port 0 alongside loads
    io_on = 1;
    for (int i = 0; i < 200; i++) issue(0, BASE[0] + 'h20_0000 + 64 * longint'(i));
    io_on = 0;
    drain();

    // final read-back of everything stored
    foreach (mem[l]) issue(0, l);
    drain();

    $display("loads %0d stores %0d errors %0d io %0d cycles %0d", n_ld, n_st, n_err, io_sent, cyc);
    $display("EP0 rd %0d hit %0d | EP1 rd %0d hit %0d spec %0d | EP2 rd %0d hit %0d spec %0d wr %0d",
             ep0.n_rd, ep0.n_hit, ep1.n_rd, ep1.n_hit, ep1.n_spec, ep2.n_rd, ep2.n_hit, ep2.n_spec, ep2.n_wr);
    for (int m = 0; m < M_NUM; m++) begin
      $display("mechanism %s: %0d", mech_e'(m), mech[m]);
      chk(mech[m] > 0, $sformatf("mechanism %s never happened", mech_e'(m)));
    end
    chk(n_err == 5, "error responses");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
