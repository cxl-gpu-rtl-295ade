// cxl_txn_layer: CXL.mem transaction layer of a root port's controller.
//
// Host-to-device: three sources of CXL.mem messages share one output -
// MemSpecRd from the SR reader, MemRd from the memory queue and MemWr from
// the deterministic-store block.  A pending MemSpecRd always goes first, so
// the endpoint sees the speculative read before the reads it announces; MemRd
// and MemWr then take turns (round robin).  Device-to-host: each S2M message
// is sorted by its opcode - data responses (MemData) go to the read path,
// completions (Cmp) to the store path - and the DevLoad field of every
// message is repeated on dl_valid/dl.
//
// All paths are combinational; out_valid/out_ready and s2m_valid/s2m_ready
// are valid/ready handshakes.  Completions are always accepted; a data
// response waits for data_ready.
//
// From the paper: the transaction layer turns memory requests into CXL.mem
// messages and back, and DevLoad travels in the response.  Own choices: the
// priority order, and the simplified one-message-per-transfer format in place
// of CXL's packed flits (the flit packing, like the link and physical layers,
// is defined by the CXL specification and not described in the paper).
module cxl_txn_layer
  import cxl_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     spec_valid,
  output logic     spec_ready,
  input  m2s_msg_t spec_msg,
  input  logic     rd_valid,
  output logic     rd_ready,
  input  m2s_msg_t rd_msg,
  input  logic     wr_valid,
  output logic     wr_ready,
  input  m2s_msg_t wr_msg,
  output logic     out_valid,
  input  logic     out_ready,
  output m2s_msg_t out_msg,
  // device to host
  input  logic     s2m_valid,
  output logic     s2m_ready,
  input  s2m_msg_t s2m_msg,
  output logic     data_valid,
  input  logic     data_ready,
  output s2m_msg_t data_msg,
  output logic     cmp_valid,
  output s2m_msg_t cmp_msg,
  output logic     dl_valid,
  output devload_e dl
);

  logic wr_turn;   // round robin between MemRd and MemWr
  logic g_spec, g_rd, g_wr;

  always_comb begin
    g_spec = spec_valid;
    g_rd   = !g_spec && rd_valid && (!wr_valid || !wr_turn);
    g_wr   = !g_spec && wr_valid && (!rd_valid ||  wr_turn);
    out_valid = g_spec || g_rd || g_wr;
    out_msg   = g_spec ? spec_msg : (g_rd ? rd_msg : wr_msg);
    spec_ready = g_spec && out_ready;
    rd_ready   = g_rd   && out_ready;
    wr_ready   = g_wr   && out_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                      wr_turn <= 1'b0;
    else if (rd_ready && wr_valid)   wr_turn <= 1'b1;
    else if (wr_ready && rd_valid)   wr_turn <= 1'b0;
  end

  wire is_data = (s2m_msg.op == S2M_MEMDATA);
  assign data_valid = s2m_valid && is_data;
  assign data_msg   = s2m_msg;
  assign cmp_valid  = s2m_valid && !is_data;
  assign cmp_msg    = s2m_msg;
  assign s2m_ready  = is_data ? data_ready : 1'b1;
  assign dl_valid   = s2m_valid && s2m_ready;
  assign dl         = s2m_msg.devload;

endmodule
