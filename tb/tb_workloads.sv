// tb_workloads: runs the access patterns of the evaluated GPU workloads
// through the root complex at its default parameters, once per port
// configuration, and compares the cycle counts.
// Port 0 is configured as plain CXL, port 1 as CXL-SR (speculative read),
// port 2 as CXL-DS (speculative read and deterministic store).  All three
// have the same SSD-like endpoint (a low-latency flash: 150-cycle miss,
// 4-cycle hit in its internal DRAM, 20-cycle writes, 400 during garbage
// collection).  For each workload the same access trace is sent to each port
// in turn and the cycles until the last response are counted.
//
// A trace has 300 accesses to 64B lines.  Each access is a load with the
// probability of the workload's load ratio (from the paper's workload table)
// and a store otherwise.  Address patterns are this test's reading of each
// program: sequential streams (rsum, vadd, saxpy), a row-by-row 2D walk
// (gemm, gauss), a 5-point neighbourhood sweep (stencil, conv3, cfd), random
// lines (path, bfs, as the paper classifies them) and two merged streams
// (sort); gnn and mri concatenate their parts (bfs+vadd+gemm, sort+conv3) as
// the paper composes them.  Store-intensive workloads run with the endpoint
// in garbage collection for 1500 of every 3000 cycles.  Input sizes and the
// compute phases of the programs are not modelled: the paper gives neither.
//
// Checks: every response carries the right id and the newest data; the
// load-intensive set runs in fewer cycles with SR than without, and the
// store-intensive set in fewer cycles with DS than with SR only - the two
// effects the paper attributes to the mechanisms.  No ports; no parameter
// overrides on the top; a watchdog ends a hung run.
module tb_workloads;
  import cxl_pkg::*;
  import tb_pkg::*;
  localparam int N = 3;
  localparam longint SPAN = 64'h0100_0000;
  localparam longint BASE [N] = '{64'h1000_0000, 64'h2000_0000, 64'h3000_0000};
  localparam int NACC = 300;

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

  for (genvar p = 0; p < N; p++) begin : g_dev
    cxl_ep_model #(.LAT_HIT(4), .LAT_MISS(150), .LAT_WR(20), .LAT_WR_GC(400)) u_ep (.clk, .rst_n,
      .link_valid(link_valid[p]), .link_ready(link_ready[p]), .link_tx(link_tx[p]),
      .s2m_valid(s2m_valid[p]), .s2m_ready(s2m_ready[p]), .s2m_msg(s2m_msg[p]),
      .gc(gc[p]), .dl_force_en(dl_force_en[p]), .dl_force(dl_force[p]));
    gpu_mem_model #(.LATENCY(6)) u_gm (.clk, .rst_n, .req_valid(gm_valid[p]), .req_ready(gm_ready[p]),
      .req(gm_req[p]), .rsp_valid(gm_rsp_valid[p]), .rsp_data(gm_rsp_data[p]));
  end

  task automatic chk(bit c, string s); checks++; if (!c) begin failures++; $display("FAIL %s", s); end endtask

  // ------------------------------------------------------------ scoreboard
  logic [DATA_W-1:0] mem [longint];
  bit busy [longint];
  typedef struct { bit write; longint line; logic [DATA_W-1:0] data; } out_t;
  out_t outst [int];

  always @(posedge clk)
    if (rst_n && sb_rsp_valid && sb_rsp_ready) begin
      int id;
      id = int'(sb_rsp.id);
      chk(outst.exists(id), $sformatf("response for idle id %0d", id));
      if (outst.exists(id)) begin
        chk(sb_rsp.write == outst[id].write && !sb_rsp.err, "response flags");
        if (!outst[id].write) chk(sb_rsp.data == outst[id].data, $sformatf("load data %h", outst[id].line));
        busy.delete(outst[id].line);
        outst.delete(id);
      end
    end

  int next_id = 0;
  task automatic issue(bit w, longint a);
    longint line; int id;
    line = a / 64 * 64;
    while (busy.exists(line) || outst.num() >= 200) @(negedge clk);
    while (outst.exists(next_id)) next_id = (next_id + 1) % 256;
    id = next_id; next_id = (next_id + 1) % 256;
    @(negedge clk);
    sb_req_valid = 1; sb_req = '0; sb_req.write = w; sb_req.addr = ADDR_W'(a); sb_req.id = ID_W'(id);
    sb_req.data = {16{$urandom}};
    outst[id] = '{write: w, line: line, data: w ? '0 : (mem.exists(line) ? mem[line] : init_line(line))};
    busy[line] = 1;
    if (w) mem[line] = sb_req.data;
    @(posedge clk); while (!sb_req_ready) @(posedge clk);
    #1 sb_req_valid = 0;
  endtask

  task automatic drain();
    int k = 0;
    while (outst.num() > 0 && k < 100000) begin @(negedge clk); k++; end
    chk(outst.num() == 0, $sformatf("%0d requests unanswered", outst.num()));
  endtask

  // ------------------------------------------------------------ traces
  typedef enum int { P_SEQ, P_2D, P_AROUND, P_RAND, P_MERGE } pat_e;
  typedef struct { string name; int cls; int load_pm; pat_e p0; pat_e p1; pat_e p2; int parts; } wl_t;
  // cls: 0 compute, 1 load, 2 store, 3 real-world; load_pm = load ratio in 1/1000
  localparam int NW = 13;
  wl_t wl [NW];
  initial begin
    wl[0]  = '{"rsum",    0, 533, P_SEQ,    P_SEQ,    P_SEQ, 1};
    wl[1]  = '{"stencil", 0, 725, P_AROUND, P_SEQ,    P_SEQ, 1};
    wl[2]  = '{"sort",    0, 987, P_MERGE,  P_SEQ,    P_SEQ, 1};
    wl[3]  = '{"gemm",    1, 999, P_2D,     P_SEQ,    P_SEQ, 1};
    wl[4]  = '{"vadd",    1, 691, P_SEQ,    P_SEQ,    P_SEQ, 1};
    wl[5]  = '{"saxpy",   1, 692, P_SEQ,    P_SEQ,    P_SEQ, 1};
    wl[6]  = '{"conv3",   1, 786, P_AROUND, P_SEQ,    P_SEQ, 1};
    wl[7]  = '{"path",    1, 927, P_RAND,   P_SEQ,    P_SEQ, 1};
    wl[8]  = '{"cfd",     2, 426, P_AROUND, P_SEQ,    P_SEQ, 1};
    wl[9]  = '{"gauss",   2, 485, P_2D,     P_SEQ,    P_SEQ, 1};
    wl[10] = '{"bfs",     2, 432, P_RAND,   P_SEQ,    P_SEQ, 1};
    wl[11] = '{"gnn",     3, 738, P_RAND,   P_SEQ,    P_2D,  3};
    wl[12] = '{"mri",     3, 533, P_MERGE,  P_AROUND, P_SEQ, 2};
  end

  // offset of access i of a pattern (region r keeps workloads apart)
  function automatic longint pat_off(pat_e p, int i, int seed);
    longint row = 4096;
    case (p)
      P_SEQ:    return 64 * longint'(i);
      P_2D:     return (i % 2 == 0) ? 64 * longint'(i / 2)                       // row of A
                                    : row * longint'((i / 2) % 64) + 64 * longint'(i / 128); // column of B
      P_AROUND: begin
        longint c; int k;
        c = 64 * longint'(i / 5) + row;
        k = i % 5;
        return k == 0 ? c : k == 1 ? c - 64 : k == 2 ? c + 64 : k == 3 ? c - row : c + row;
      end
      P_RAND:   return 64 * longint'((longint'(i) * 7919 + seed * 104729) % 4096);
      default:  return (i % 2 == 0) ? 64 * longint'(i / 2) : 'h2_0000 + 64 * longint'(i / 2);
    endcase
  endfunction

  // trace for workload w: kind and offset of each access
  bit     tr_w   [NACC];
  longint tr_off [NACC];
  task automatic make_trace(int w);
    for (int i = 0; i < NACC; i++) begin
      int part; int j; pat_e p;
      part = i * wl[w].parts / NACC;
      j = i - part * NACC / wl[w].parts;
      p = part == 0 ? wl[w].p0 : part == 1 ? wl[w].p1 : wl[w].p2;
      tr_off[i] = 'h10_0000 * longint'(w) + 'h4_0000 * longint'(part) + pat_off(p, j, w);
      tr_w[i]   = $urandom_range(0, 999) >= wl[w].load_pm;
    end
  endtask

  // garbage collection schedule for store-intensive runs
  bit gc_on = 0; longint gc_t0 = 0;
  always @(negedge clk)
    for (int p = 0; p < N; p++) gc[p] = gc_on && ((cyc - gc_t0) % 3000 < 1500);

  longint cycles [NW][N];

  initial begin
    #50ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    longint sum_l [N], sum_s [N];
    for (int p = 0; p < N; p++) begin
      dl_force_en[p] = 0; dl_force[p] = DL_LIGHT;
      sr_en[p] = (p != 0); ds_en[p] = (p == 2);
      link_ready[p] = 1; s2m_ready[p] = 1; io_valid[p] = 0; io_payload[p] = '0;
      sum_l[p] = 0; sum_s[p] = 0;
    end
    repeat (4) @(negedge clk); rst_n = 1; @(negedge clk);
    for (int p = 0; p < N; p++) begin
      @(negedge clk); cfg_we = 1; cfg_idx = 2'(p); cfg_base = ADDR_W'(BASE[p]); cfg_size = ADDR_W'(SPAN); cfg_en = 1;
    end
    @(negedge clk); cfg_we = 0;

    $display("workload   CXL      CXL-SR   CXL-DS   (cycles for %0d accesses)", NACC);
    for (int w = 0; w < NW; w++) begin
      make_trace(w);
      for (int p = 0; p < N; p++) begin
        longint t0;
        repeat (200) @(negedge clk);             // let the previous run settle
        gc_on = (wl[w].cls == 2); gc_t0 = cyc;
        t0 = cyc;
        for (int i = 0; i < NACC; i++) issue(tr_w[i], BASE[p] + tr_off[i]);
        drain();
        cycles[w][p] = cyc - t0;
        gc_on = 0;
        if (wl[w].cls == 1) sum_l[p] += cycles[w][p];
        if (wl[w].cls == 2) sum_s[p] += cycles[w][p];
      end
      $display("%-9s %6d   %6d   %6d", wl[w].name, cycles[w][0], cycles[w][1], cycles[w][2]);
    end
    $display("load-intensive total:  CXL %0d, CXL-SR %0d", sum_l[0], sum_l[1]);
    $display("store-intensive total: CXL-SR %0d, CXL-DS %0d", sum_s[1], sum_s[2]);
    chk(sum_l[1] < sum_l[0], "speculative read does not speed up the load-intensive set");
    chk(sum_s[2] < sum_s[1], "deterministic store does not speed up the store-intensive set");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
