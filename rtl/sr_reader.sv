// sr_reader: the SR reader of the root port's queue logic.
//
// Takes the load at the head of the SR queue whenever the memory queue has a
// free slot, moves it into the memory queue and, unless speculation is off,
// sends a MemSpecRd ahead of it so that the endpoint can start fetching the
// data from its backend media before the real read arrives.
//
// For each load the reader
//   * asks the ring buffer whether an earlier MemSpecRd already covers the
//     address; if so no new SR is made (the load goes on as a plain read);
//   * otherwise, when SR is enabled and the load control has not halted it,
//     takes the window from the address-window control (start, 1..4 units
//     of 256B) and builds a MemSpecRd whose address holds the 256B offset,
//     with units-1 in address bits [7:6]; the range goes into the ring.
// One load per cycle.  The MemSpecRd waits in a one-entry output register;
// while it is not taken the reader stalls if the next load needs an SR.
// The ev_* outputs pulse for one cycle per SR sent, per SR saved by the
// ring buffer, and per SR dropped because the load control halted SR.
//
// From the paper: SR queue -> reader -> memory queue flow, stall while the
// memory queue is full, ring buffer of issued SRs, length in the two LSBs.
// Own choices: the output register and the event pulses.
module sr_reader
  import cxl_pkg::*;
#(
  parameter int MQ_DEPTH   = 32,
  parameter int SQ_DEPTH   = 32,
  parameter int RING_DEPTH = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              sr_en,
  input  logic [2:0]        gran_units,
  input  logic              halted,
  // SR queue head and contents behind it
  input  logic              head_valid,
  input  logic [ADDR_W-1:0] head_addr,
  input  logic [ID_W-1:0]   head_id,
  output logic              pop,
  input  logic              sq_valid [SQ_DEPTH],
  input  logic [ADDR_W-1:0] sq_addr  [SQ_DEPTH],
  // memory queue
  output logic              alloc_valid,
  input  logic              alloc_ready,
  output logic [ADDR_W-1:0] alloc_addr,
  output logic [ID_W-1:0]   alloc_id,
  input  logic              mq_valid [MQ_DEPTH],
  input  logic [ADDR_W-1:0] mq_addr  [MQ_DEPTH],
  // MemSpecRd towards the transaction layer
  output logic              spec_valid,
  input  logic              spec_ready,
  output m2s_msg_t          spec_msg,
  // events
  output logic              ev_sr,
  output logic              ev_ring_hit,
  output logic              ev_halt_skip
);

  logic              ring_hit;
  logic [ADDR_W-1:0] win_start;
  logic [2:0]        win_units;
  logic [$clog2(MQ_DEPTH+1)-1:0] m_cnt;
  logic [$clog2(SQ_DEPTH+1)-1:0] n_cnt;

  addr_window #(.MQ_DEPTH(MQ_DEPTH), .SQ_DEPTH(SQ_DEPTH)) u_win (
    .addr(head_addr), .gran_units(gran_units),
    .mq_valid(mq_valid), .mq_addr(mq_addr),
    .sq_valid(sq_valid), .sq_addr(sq_addr),
    .win_start(win_start), .win_units(win_units),
    .m_cnt(m_cnt), .n_cnt(n_cnt)
  );

  wire need_sr  = sr_en && !halted && !ring_hit;
  wire spec_busy = spec_valid && !spec_ready;
  wire go = head_valid && alloc_ready && !(need_sr && spec_busy);

  sr_ring_buffer #(.DEPTH(RING_DEPTH)) u_ring (
    .clk, .rst_n,
    .wr(go && need_sr), .wr_start(win_start), .wr_units(win_units),
    .lk_addr(head_addr), .lk_hit(ring_hit)
  );

  assign pop         = go;
  assign alloc_valid = head_valid && !(need_sr && spec_busy);
  assign alloc_addr  = head_addr;
  assign alloc_id    = head_id;

  assign ev_sr        = go && need_sr;
  assign ev_ring_hit  = go && sr_en && ring_hit;
  assign ev_halt_skip = go && sr_en && halted && !ring_hit;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      spec_valid <= 1'b0;
      spec_msg   <= '0;
    end else begin
      if (spec_valid && spec_ready) spec_valid <= 1'b0;
      if (go && need_sr) begin
        spec_valid    <= 1'b1;
        spec_msg      <= '0;
        spec_msg.op   <= M2S_MEMSPECRD;
        spec_msg.addr <= spec_addr(win_start, win_units);
      end
    end
  end

endmodule
