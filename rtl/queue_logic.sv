// queue_logic: read path beneath a CXL root port, with speculative read.
//
// Loads enter the SR queue.  The SR reader moves them one per cycle into the
// memory queue whenever it has room (otherwise they wait in the SR queue) and
// sends a MemSpecRd ahead of each load not already covered, so the endpoint
// can prefetch into its internal DRAM.  The memory queue issues the loads as
// MemRd; the profiler frees each on its data response and feeds the DevLoad
// field to the load control, which sets the SR granularity (256B..1024B) and
// halts SR under severe overload.  The address-window control uses the memory
// queue (earlier requests) and the SR queue (later requests) to place each
// SR's range.
//
// Interface: valid/ready on every stream.  ld_* loads in; rd_* MemRd out;
// spec_* MemSpecRd out; s2m_* data responses in; rsp_* load data out.
// dl_valid/dl repeat every DevLoad sample for the store path.  sr_en = 0
// gives the plain CXL configuration (no MemSpecRd at all).
// Latency with empty queues: a load enters the SR queue on cycle 0, is moved
// to the memory queue on cycle 1, and its MemRd can leave on cycle 2, one
// cycle behind its MemSpecRd's register.
//
// From the paper: the structure (two 32-entry queues, reader, ring buffer,
// profiler) and the SR rules.  Own choices are listed in the submodules.
module queue_logic
  import cxl_pkg::*;
#(
  parameter int SQ_DEPTH   = 32,
  parameter int MQ_DEPTH   = 32,
  parameter int RING_DEPTH = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              sr_en,
  input  logic              ld_valid,
  output logic              ld_ready,
  input  logic [ADDR_W-1:0] ld_addr,
  input  logic [ID_W-1:0]   ld_id,
  output logic              rd_valid,
  input  logic              rd_ready,
  output m2s_msg_t          rd_msg,
  output logic              spec_valid,
  input  logic              spec_ready,
  output m2s_msg_t          spec_msg,
  input  logic              s2m_valid,
  output logic              s2m_ready,
  input  s2m_msg_t          s2m_msg,
  output logic              rsp_valid,
  input  logic              rsp_ready,
  output logic [ID_W-1:0]   rsp_id,
  output logic [DATA_W-1:0] rsp_data,
  output logic              dl_valid,
  output devload_e          dl,
  output logic [2:0]        gran_units,
  output logic              sr_halted,
  output logic              mq_full,
  output logic              ev_sr,
  output logic              ev_ring_hit,
  output logic              ev_halt_skip
);

  logic              h_valid, h_pop;
  logic [ADDR_W-1:0] h_addr;
  logic [ID_W-1:0]   h_id;
  logic              sq_v [SQ_DEPTH];
  logic [ADDR_W-1:0] sq_a [SQ_DEPTH];
  logic [$clog2(SQ_DEPTH+1)-1:0] sq_count;

  logic              mq_v [MQ_DEPTH];
  logic [ADDR_W-1:0] mq_a [MQ_DEPTH];
  logic              a_valid, a_ready;
  logic [ADDR_W-1:0] a_addr;
  logic [ID_W-1:0]   a_id;

  sr_queue #(.DEPTH(SQ_DEPTH)) u_srq (
    .clk, .rst_n,
    .push_valid(ld_valid), .push_ready(ld_ready),
    .push_addr(ld_addr), .push_id(ld_id),
    .head_valid(h_valid), .pop(h_pop), .head_addr(h_addr), .head_id(h_id),
    .tail_valid(sq_v), .tail_addr(sq_a), .count(sq_count)
  );

  sr_reader #(.MQ_DEPTH(MQ_DEPTH), .SQ_DEPTH(SQ_DEPTH), .RING_DEPTH(RING_DEPTH)) u_rdr (
    .clk, .rst_n, .sr_en, .gran_units, .halted(sr_halted),
    .head_valid(h_valid), .head_addr(h_addr), .head_id(h_id), .pop(h_pop),
    .sq_valid(sq_v), .sq_addr(sq_a),
    .alloc_valid(a_valid), .alloc_ready(a_ready), .alloc_addr(a_addr), .alloc_id(a_id),
    .mq_valid(mq_v), .mq_addr(mq_a),
    .spec_valid, .spec_ready, .spec_msg,
    .ev_sr, .ev_ring_hit, .ev_halt_skip
  );

  mem_queue #(.DEPTH(MQ_DEPTH)) u_mq (
    .clk, .rst_n,
    .alloc_valid(a_valid), .alloc_ready(a_ready), .alloc_addr(a_addr), .alloc_id(a_id),
    .rd_valid, .rd_ready, .rd_msg,
    .s2m_valid, .s2m_ready, .s2m_msg,
    .rsp_valid, .rsp_ready, .rsp_id, .rsp_data,
    .dl_valid, .dl,
    .ent_valid(mq_v), .ent_addr(mq_a), .full(mq_full)
  );

  sr_load_ctrl u_lc (
    .clk, .rst_n, .dl_valid, .dl, .gran_units, .halted(sr_halted)
  );

endmodule
