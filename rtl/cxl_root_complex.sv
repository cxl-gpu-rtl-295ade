// cxl_root_complex: CXL root complex for a GPU (top of this design).
//
// Lets a GPU use CXL memory expanders - DRAM- or SSD-backed - as part of its
// own memory map, with no host software on the access path.  The block hangs
// off the GPU system bus next to the local-memory controller; loads and
// stores from the last-level cache that fall into the expanders' address
// ranges arrive at its system-bus port.  A host bridge looks each address up
// in its HDM decoder and routes it to one of NUM_RP root ports.  Each root
// port turns requests into CXL.mem messages (MemRd, MemSpecRd, MemWr) for its
// endpoint, optionally with
//   * speculative read (sr_en): announce upcoming loads with MemSpecRd so the
//     endpoint prefetches into its internal DRAM, sized and placed by the
//     endpoint's DevLoad and by the queued requests, and
//   * deterministic store (ds_en): acknowledge stores at once and, while the
//     SSD is slow, park them in a reserved stack in GPU memory, flushing them
//     to the SSD later.
//
// Ports: the system-bus request/response pair; the HDM decoder write port
// for the firmware core; per root port sr_en/ds_en, a CXL.io input from the
// PCIe layers, the link-side transaction stream (to the CXL link layer) and
// the S2M stream back, and a GPU-local-memory port used by deterministic
// store.  Link layer, Flex Bus physical layer/PCS and PHY are not part of
// this RTL; their place is the link_* and s2m_* ports.
//
// From the paper: structure (host bridge, HDM decoder, multiple root ports,
// queue logic, SR, DS, arbitrator).  Own choices: NUM_RP = 3 follows the
// three rows of the paper's HDM decoder example; all widths and handshakes.
module cxl_root_complex
  import cxl_pkg::*;
#(
  parameter int                NUM_RP       = 3,
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
  input  logic                      clk,
  input  logic                      rst_n,
  // HDM decoder programming (firmware core)
  input  logic                      cfg_we,
  input  logic [$clog2(NUM_RP)-1:0] cfg_idx,
  input  logic [ADDR_W-1:0]         cfg_base,
  input  logic [ADDR_W-1:0]         cfg_size,
  input  logic                      cfg_en,
  input  logic                      sr_en        [NUM_RP],
  input  logic                      ds_en        [NUM_RP],
  // system bus port
  input  logic                      sb_req_valid,
  output logic                      sb_req_ready,
  input  sb_req_t                   sb_req,
  output logic                      sb_rsp_valid,
  input  logic                      sb_rsp_ready,
  output sb_rsp_t                   sb_rsp,
  // per root port: CXL.io in, link out, S2M in
  input  logic                      io_valid     [NUM_RP],
  output logic                      io_ready     [NUM_RP],
  input  logic [M2S_W-1:0]          io_payload   [NUM_RP],
  output logic                      link_valid   [NUM_RP],
  input  logic                      link_ready   [NUM_RP],
  output link_tx_t                  link_tx      [NUM_RP],
  input  logic                      s2m_valid    [NUM_RP],
  output logic                      s2m_ready    [NUM_RP],
  input  s2m_msg_t                  s2m_msg      [NUM_RP],
  // per root port: GPU local memory (deterministic store)
  output logic                      gm_valid     [NUM_RP],
  input  logic                      gm_ready     [NUM_RP],
  output gm_req_t                   gm_req       [NUM_RP],
  input  logic                      gm_rsp_valid [NUM_RP],
  input  logic [DATA_W-1:0]         gm_rsp_data  [NUM_RP],
  // status and events
  output logic [2:0]                sr_gran_units[NUM_RP],
  output logic                      sr_halted    [NUM_RP],
  output logic                      ds_suspended [NUM_RP],
  output logic [$clog2(STACK_DEPTH+1)-1:0] ds_stack_count [NUM_RP],
  output rp_events_t                ev           [NUM_RP],
  output logic                      ev_unmapped
);

  logic    rp_req_valid [NUM_RP];
  logic    rp_req_ready [NUM_RP];
  sb_req_t rp_req;
  logic    rp_rsp_valid [NUM_RP];
  logic    rp_rsp_ready [NUM_RP];
  sb_rsp_t rp_rsp       [NUM_RP];

  host_bridge #(.NUM_RP(NUM_RP)) u_hb (
    .clk, .rst_n, .cfg_we, .cfg_idx, .cfg_base, .cfg_size, .cfg_en,
    .sb_req_valid, .sb_req_ready, .sb_req,
    .sb_rsp_valid, .sb_rsp_ready, .sb_rsp,
    .rp_req_valid, .rp_req_ready, .rp_req,
    .rp_rsp_valid, .rp_rsp_ready, .rp_rsp,
    .ev_unmapped
  );

  for (genvar p = 0; p < NUM_RP; p++) begin : g_rp
    cxl_root_port #(
      .SQ_DEPTH(SQ_DEPTH), .MQ_DEPTH(MQ_DEPTH), .RING_DEPTH(RING_DEPTH),
      .STACK_DEPTH(STACK_DEPTH), .WR_TAGS(WR_TAGS), .TAIL_THRESH(TAIL_THRESH),
      .CHECK_PERIOD(CHECK_PERIOD), .RESV_BASE(RESV_BASE + ADDR_W'(p) * ADDR_W'(STACK_DEPTH * LINE_B)),
      .MEM_QUANTUM(MEM_QUANTUM), .IO_QUANTUM(IO_QUANTUM)
    ) u_rp (
      .clk, .rst_n, .sr_en(sr_en[p]), .ds_en(ds_en[p]),
      .req_valid(rp_req_valid[p]), .req_ready(rp_req_ready[p]), .req(rp_req),
      .rsp_valid(rp_rsp_valid[p]), .rsp_ready(rp_rsp_ready[p]), .rsp(rp_rsp[p]),
      .io_valid(io_valid[p]), .io_ready(io_ready[p]), .io_payload(io_payload[p]),
      .link_valid(link_valid[p]), .link_ready(link_ready[p]), .link_tx(link_tx[p]),
      .s2m_valid(s2m_valid[p]), .s2m_ready(s2m_ready[p]), .s2m_msg(s2m_msg[p]),
      .gm_valid(gm_valid[p]), .gm_ready(gm_ready[p]), .gm_req(gm_req[p]),
      .gm_rsp_valid(gm_rsp_valid[p]), .gm_rsp_data(gm_rsp_data[p]),
      .sr_gran_units(sr_gran_units[p]), .sr_halted(sr_halted[p]),
      .ds_suspended(ds_suspended[p]), .ds_stack_count(ds_stack_count[p]),
      .ev(ev[p])
    );
  end

endmodule
