// cxl_ep_model: behavioural model of a CXL memory-expander endpoint.
// Not synthesizable; testbench only.  Takes the root port's link-side
// stream: MemRd returns the line after LAT_HIT cycles when its 256B block
// is in the internal DRAM cache, LAT_MISS otherwise (the block is then
// cached); MemSpecRd loads the 1..4 blocks it names into the cache; MemWr
// updates the backing store and completes after LAT_WR cycles, LAT_WR_GC
// while gc is high (an internal task such as garbage collection).  DevLoad
// in every response follows the number of outstanding requests
// (<8 ll, <16 ol, <24 mo, else so) unless dl_force_en is set.  CXL.io
// payloads are counted and dropped.  Responses may leave out of order.
//
// Interface: the root port's link side (link_valid/ready/tx in, s2m out) plus gc and a
// DevLoad override.  Timing: per-request latencies LAT_HIT/LAT_MISS/LAT_WR(_GC).
// From the paper: endpoints with internal DRAM caching SSD data, MemSpecRd
// prefetch into that DRAM, DevLoad in every response, slow writes during GC.
// Own choices: all latencies, the cache organisation and the DevLoad thresholds.
module cxl_ep_model
  import cxl_pkg::*;
  import tb_pkg::*;
#(
  parameter int LAT_HIT   = 4,
  parameter int LAT_MISS  = 40,
  parameter int LAT_WR    = 8,
  parameter int LAT_WR_GC = 300
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      link_valid,
  output logic      link_ready,
  input  link_tx_t  link_tx,
  output logic      s2m_valid,
  input  logic      s2m_ready,
  output s2m_msg_t  s2m_msg,
  input  logic      gc,
  input  logic      dl_force_en,
  input  devload_e  dl_force
);
  logic [DATA_W-1:0] mem [longint];
  bit cache [longint];
  typedef struct { longint due; s2m_msg_t m; } pend_t;
  pend_t pend [$];
  longint cyc = 0;
  int n_rd = 0, n_hit = 0, n_spec = 0, n_wr = 0, n_io = 0;

  assign link_ready = rst_n;

  function automatic devload_e cur_dl();
    if (dl_force_en) return dl_force;
    if (pend.size() < 8) return DL_LIGHT;
    if (pend.size() < 16) return DL_OPTIMAL;
    if (pend.size() < 24) return DL_MODERATE;
    return DL_SEVERE;
  endfunction

  int sel;
  always_comb begin
    sel = -1;
    for (int i = 0; i < pend.size(); i++)
      if (sel < 0 && pend[i].due <= cyc) sel = i;
    s2m_valid = rst_n && (sel >= 0);
    s2m_msg   = '0;
    if (sel >= 0) begin
      s2m_msg = pend[sel].m;
      s2m_msg.devload = cur_dl();
    end
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (!rst_n) pend.delete();
    else begin
      if (s2m_valid && s2m_ready) pend.delete(sel);
      if (link_valid && link_ready) begin
        if (link_tx.io) n_io++;
        else begin
          m2s_msg_t m;
          pend_t p;
          longint line;
          m = m2s_msg_t'(link_tx.payload);
          line = longint'(m.addr) / 64;
          p.m = '0;
          p.m.tag = m.tag;
          case (m.op)
            M2S_MEMRD: begin
              bit hit;
              hit = cache.exists(line / 4);
              n_rd++; if (hit) n_hit++;
              cache[line / 4] = 1;
              p.due = cyc + (hit ? LAT_HIT : LAT_MISS);
              p.m.op = S2M_MEMDATA;
              p.m.data = mem.exists(line) ? mem[line] : init_line(line * 64);
              pend.push_back(p);
            end
            M2S_MEMSPECRD: begin
              longint b;
              int u;
              b = longint'(m.addr) / 256;
              u = int'(m.addr[7:6]) + 1;
              n_spec++;
              for (int k = 0; k < u; k++) cache[b + k] = 1;
            end
            M2S_MEMWR: begin
              n_wr++;
              mem[line] = m.data;
              p.due = cyc + (gc ? LAT_WR_GC : LAT_WR);
              p.m.op = S2M_CMP;
              pend.push_back(p);
            end
            default: ;
          endcase
        end
      end
    end
  end
endmodule
