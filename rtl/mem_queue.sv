// mem_queue: memory queue and profiler of the root port's queue logic.
//
// Holds up to DEPTH loads from the moment the SR reader passes them on until
// the endpoint's data comes back.  A load is written into the lowest free
// slot; the slot number is its CXL.mem tag.  Loads leave as MemRd messages
// in the order they arrived (a small index FIFO keeps that order) but stay
// in their slot.  The profiler part takes each S2M data response, frees the
// slot named by its tag, returns the data with the original request id, and
// hands the DevLoad field of the response to the SR load control.
//
// Timing: alloc_ready is high while a slot is free; a MemRd can leave the
// cycle after its load was written; the response path is combinational
// (rsp_valid follows s2m_valid, s2m_ready follows rsp_ready).  The slot
// contents are visible for the address window (ent_valid/ent_addr).
//
// From the paper: a 32-entry memory queue whose requests go to the
// transaction layer, and a profiler that removes completed requests and reads
// DevLoad from the response.  Own choices: slot-number tags, in-order issue,
// lowest-free-slot allocation.
module mem_queue
  import cxl_pkg::*;
#(
  parameter int DEPTH = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  // loads from the SR reader
  input  logic              alloc_valid,
  output logic              alloc_ready,
  input  logic [ADDR_W-1:0] alloc_addr,
  input  logic [ID_W-1:0]   alloc_id,
  // MemRd towards the transaction layer
  output logic              rd_valid,
  input  logic              rd_ready,
  output m2s_msg_t          rd_msg,
  // S2M data responses
  input  logic              s2m_valid,
  output logic              s2m_ready,
  input  s2m_msg_t          s2m_msg,
  // load responses
  output logic              rsp_valid,
  input  logic              rsp_ready,
  output logic [ID_W-1:0]   rsp_id,
  output logic [DATA_W-1:0] rsp_data,
  // profiler: DevLoad of every accepted response
  output logic              dl_valid,
  output devload_e          dl,
  // queue contents
  output logic              ent_valid [DEPTH],
  output logic [ADDR_W-1:0] ent_addr  [DEPTH],
  output logic              full
);

  localparam int PW = $clog2(DEPTH);

  logic [ADDR_W-1:0] e_addr [DEPTH];
  logic [ID_W-1:0]   e_id   [DEPTH];
  logic              e_v    [DEPTH];

  // issue-order FIFO of slot numbers
  logic [PW-1:0]     ord    [DEPTH];
  logic [PW-1:0]     o_rd, o_wr;
  logic [PW:0]       o_cnt;

  logic [PW-1:0] free_idx;
  logic          any_free;

  always_comb begin
    any_free = 1'b0;
    free_idx = '0;
    for (int i = DEPTH - 1; i >= 0; i--)
      if (!e_v[i]) begin
        any_free = 1'b1;
        free_idx = PW'(i);
      end
  end

  assign full        = !any_free;
  assign alloc_ready = any_free;

  wire do_alloc = alloc_valid && alloc_ready;
  wire do_issue = rd_valid && rd_ready;
  wire do_rsp   = s2m_valid && s2m_ready;
  wire [PW-1:0] rsp_idx = s2m_msg.tag[PW-1:0];

  assign rd_valid = (o_cnt != '0);
  always_comb begin
    rd_msg      = '0;
    rd_msg.op   = M2S_MEMRD;
    rd_msg.addr = {e_addr[ord[o_rd]][ADDR_W-1:LINE_LSB], {LINE_LSB{1'b0}}};
    rd_msg.tag  = TAG_W'(ord[o_rd]);
  end

  // profiler
  assign s2m_ready = rsp_ready;
  assign rsp_valid = s2m_valid;
  assign rsp_id    = e_id[rsp_idx];
  assign rsp_data  = s2m_msg.data;
  assign dl_valid  = do_rsp;
  assign dl        = s2m_msg.devload;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) e_v[i] <= 1'b0;
      o_rd  <= '0;
      o_wr  <= '0;
      o_cnt <= '0;
    end else begin
      if (do_rsp)   e_v[rsp_idx]  <= 1'b0;
      if (do_alloc) e_v[free_idx] <= 1'b1;
      if (do_alloc) o_wr <= (int'(o_wr) == DEPTH - 1) ? '0 : o_wr + 1'b1;
      if (do_issue) o_rd <= (int'(o_rd) == DEPTH - 1) ? '0 : o_rd + 1'b1;
      o_cnt <= o_cnt + (PW+1)'(do_alloc) - (PW+1)'(do_issue);
    end
  end

  always_ff @(posedge clk) begin
    if (do_alloc) begin
      e_addr[free_idx] <= alloc_addr;
      e_id[free_idx]   <= alloc_id;
      ord[o_wr]        <= free_idx;
    end
  end

  always_comb
    for (int i = 0; i < DEPTH; i++) begin
      ent_valid[i] = e_v[i];
      ent_addr[i]  = e_addr[i];
    end

  a_rsp_live: assert property (@(posedge clk) disable iff (!rst_n)
    s2m_valid |-> e_v[rsp_idx]);

endmodule
