// cxl_root_port: one CXL root port of the GPU's CXL root complex.
//
// Receives the system-bus requests that the host bridge routed to this port
// and talks CXL.mem to one DRAM- or SSD-backed endpoint:
//
//   req -> ds_ctrl --stores--> MemWr ------------------+
//            |  (loads that miss the GPU-memory buffer) |
//            v                                          v
//         queue_logic --MemSpecRd, MemRd--> cxl_txn_layer -> cxl_arbitrator -> link
//            ^                                  |               ^
//            +----------- MemData --------------+ Cmp -> ds_ctrl  CXL.io
//
// Responses to the system bus come from ds_ctrl (store acknowledgements,
// loads served from GPU memory) and from the queue logic (endpoint data);
// ds_ctrl has priority.  DevLoad from every response reaches both the SR
// load control and ds_ctrl.  sr_en and ds_en select the plain CXL, CXL-SR
// and CXL-DS behaviours per port; both are meant for SSD endpoints.
//
// Interface: valid/ready streams throughout; link_tx is the transaction-level
// stream a CXL link layer would pack into flits (the link and physical layers
// are outside this RTL).  The GPU-memory port answers reads in order.
//
// From the paper: the root port holding queue logic beneath it, the
// deterministic store, the transaction layer and the PCIe/CXL arbitrator.
// Own choices: how the parts are chained and the response priority.
module cxl_root_port
  import cxl_pkg::*;
#(
  parameter int                SQ_DEPTH     = 32,
  parameter int                MQ_DEPTH     = 32,
  parameter int                RING_DEPTH   = 32,
  parameter int                STACK_DEPTH  = 64,
  parameter int                WR_TAGS      = 32,
  parameter int                TAIL_THRESH  = 64,
  parameter int                CHECK_PERIOD = 256,
  parameter logic [ADDR_W-1:0] RESV_BASE    = 48'h0000_F000_0000,
  parameter int                MEM_QUANTUM  = 8,
  parameter int                IO_QUANTUM   = 2
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              sr_en,
  input  logic              ds_en,
  input  logic              req_valid,
  output logic              req_ready,
  input  sb_req_t           req,
  output logic              rsp_valid,
  input  logic              rsp_ready,
  output sb_rsp_t           rsp,
  input  logic              io_valid,
  output logic              io_ready,
  input  logic [M2S_W-1:0]  io_payload,
  output logic              link_valid,
  input  logic              link_ready,
  output link_tx_t          link_tx,
  input  logic              s2m_valid,
  output logic              s2m_ready,
  input  s2m_msg_t          s2m_msg,
  output logic              gm_valid,
  input  logic              gm_ready,
  output gm_req_t           gm_req,
  input  logic              gm_rsp_valid,
  input  logic [DATA_W-1:0] gm_rsp_data,
  output logic [2:0]        sr_gran_units,
  output logic              sr_halted,
  output logic              ds_suspended,
  output logic [$clog2(STACK_DEPTH+1)-1:0] ds_stack_count,
  output rp_events_t        ev
);

  // ds_ctrl <-> queue logic
  logic              ld_valid, ld_ready;
  logic [ADDR_W-1:0] ld_addr;
  logic [ID_W-1:0]   ld_id;
  logic              ds_rsp_valid, ds_rsp_ready;
  sb_rsp_t           ds_rsp;
  logic              q_rsp_valid, q_rsp_ready;
  logic [ID_W-1:0]   q_rsp_id;
  logic [DATA_W-1:0] q_rsp_data;
  // messages
  logic              rd_valid, rd_ready, spec_valid, spec_ready, wr_valid, wr_ready;
  m2s_msg_t          rd_msg, spec_msg, wr_msg;
  logic              mem_valid, mem_ready;
  m2s_msg_t          mem_msg;
  logic              data_valid, data_ready, cmp_valid, t_dl_valid, q_dl_valid;
  s2m_msg_t          data_msg, cmp_msg;
  devload_e          t_dl, q_dl;
  logic              mq_full, io_state;

  ds_ctrl #(
    .STACK_DEPTH(STACK_DEPTH), .WR_TAGS(WR_TAGS), .TAIL_THRESH(TAIL_THRESH),
    .CHECK_PERIOD(CHECK_PERIOD), .RESV_BASE(RESV_BASE)
  ) u_ds (
    .clk, .rst_n, .ds_en,
    .req_valid, .req_ready, .req,
    .ld_valid, .ld_ready, .ld_addr, .ld_id,
    .rsp_valid(ds_rsp_valid), .rsp_ready(ds_rsp_ready), .rsp(ds_rsp),
    .wr_valid, .wr_ready, .wr_msg,
    .cmp_valid, .cmp_msg,
    .dl_valid(t_dl_valid && !cmp_valid), .dl(t_dl),
    .gm_valid, .gm_ready, .gm_req, .gm_rsp_valid, .gm_rsp_data,
    .suspended(ds_suspended), .stack_count(ds_stack_count),
    .ev_dual(ev.dual), .ev_buffer(ev.buffer), .ev_flush(ev.flush),
    .ev_gm_hit(ev.gm_hit), .ev_suspend(ev.suspend)
  );

  queue_logic #(.SQ_DEPTH(SQ_DEPTH), .MQ_DEPTH(MQ_DEPTH), .RING_DEPTH(RING_DEPTH)) u_ql (
    .clk, .rst_n, .sr_en,
    .ld_valid, .ld_ready, .ld_addr, .ld_id,
    .rd_valid, .rd_ready, .rd_msg,
    .spec_valid, .spec_ready, .spec_msg,
    .s2m_valid(data_valid), .s2m_ready(data_ready), .s2m_msg(data_msg),
    .rsp_valid(q_rsp_valid), .rsp_ready(q_rsp_ready), .rsp_id(q_rsp_id), .rsp_data(q_rsp_data),
    .dl_valid(q_dl_valid), .dl(q_dl),
    .gran_units(sr_gran_units), .sr_halted, .mq_full,
    .ev_sr(ev.sr), .ev_ring_hit(ev.ring_hit), .ev_halt_skip(ev.halt_skip)
  );

  cxl_txn_layer u_txn (
    .clk, .rst_n,
    .spec_valid, .spec_ready, .spec_msg,
    .rd_valid, .rd_ready, .rd_msg,
    .wr_valid, .wr_ready, .wr_msg,
    .out_valid(mem_valid), .out_ready(mem_ready), .out_msg(mem_msg),
    .s2m_valid, .s2m_ready, .s2m_msg,
    .data_valid, .data_ready, .data_msg,
    .cmp_valid, .cmp_msg,
    .dl_valid(t_dl_valid), .dl(t_dl)
  );

  cxl_arbitrator #(.MEM_QUANTUM(MEM_QUANTUM), .IO_QUANTUM(IO_QUANTUM)) u_arb (
    .clk, .rst_n,
    .mem_valid, .mem_ready, .mem_msg,
    .io_valid, .io_ready, .io_payload,
    .link_valid, .link_ready, .link_tx,
    .in_io_state(io_state)
  );

  // response merge: ds_ctrl first
  always_comb begin
    rsp_valid    = ds_rsp_valid || q_rsp_valid;
    ds_rsp_ready = rsp_ready;
    q_rsp_ready  = rsp_ready && !ds_rsp_valid;
    if (ds_rsp_valid) rsp = ds_rsp;
    else begin
      rsp       = '0;
      rsp.write = 1'b0;
      rsp.id    = q_rsp_id;
      rsp.data  = q_rsp_data;
    end
  end

  assign ev.mq_full = mq_full;
  assign ev.io_turn = io_state;

endmodule
