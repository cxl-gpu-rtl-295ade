// ds_ctrl: deterministic store (DS) for an SSD-backed CXL root port.
//
// Makes stores to a slow or tail-prone SSD endpoint look fixed-latency to the
// GPU.  Every store is acknowledged as soon as it has been handed on, and the
// controller chooses where the data goes:
//   * normal     the store goes to the SSD as MemWr.  If the line is already
//                held in the GPU-memory buffer, that copy is written as well,
//                so GPU memory and SSD stay equal (dual write).
//   * suspended  the SSD looks slow (the last DevLoad was moderate or severe
//                overload, or a write has waited TAIL_THRESH cycles for its
//                completion).  Stores are not sent to the SSD; they are
//                pushed onto a stack in a reserved region of GPU memory
//                (slot k at RESV_BASE + 64*k) and their address goes into the
//                address list, an on-chip table beside the stack.  A store to
//                a line already in the list overwrites its slot.
//   * flushing   once the port is normal again, the stack is emptied in the
//                background: the top slot is read from GPU memory and written
//                to the SSD, then popped.
// Loads first search the address list; a hit is served from GPU memory, a
// miss is passed on to the read path (queue logic).  Every CHECK_PERIOD
// cycles a suspended port is re-examined; if no write is outstanding and the
// stack is not empty, one entry is flushed as a probe so that a fresh DevLoad
// comes back.  With ds_en = 0 the block is a plain store path: the store is
// acknowledged when the SSD's completion arrives.  When the stack is full a
// suspended port sends stores to the SSD after all.
//
// Interface: valid/ready streams (req in, ld out, rsp out, wr out, GPU
// memory request out); cmp_* write completions and dl_* read DevLoad samples
// are always accepted; GPU memory answers reads in order on gm_rsp_*.
// One request or flush step is handled at a time; a store in normal mode is
// acknowledged two cycles after it is taken when the SSD and GPU memory
// accept at once.
//
// From the paper: concurrent write to GPU memory and SSD with immediate
// release, buffering in a GPU-memory stack with an address list in on-chip
// SRAM during tails, background flush, DevLoad-triggered suspension with
// periodic re-check, reads served from the buffer.  Own choices: the tail
// thresholds, the probe flush, the stack depth, and a plain searched table
// for the address list where the paper keeps its state in a red-black tree;
// in normal mode GPU memory is written only for lines already buffered.
module ds_ctrl
  import cxl_pkg::*;
#(
  parameter int                STACK_DEPTH  = 64,
  parameter int                WR_TAGS      = 32,
  parameter int                TAIL_THRESH  = 64,
  parameter int                CHECK_PERIOD = 256,
  parameter logic [ADDR_W-1:0] RESV_BASE    = 48'h0000_F000_0000
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              ds_en,
  // requests for this port
  input  logic              req_valid,
  output logic              req_ready,
  input  sb_req_t           req,
  // loads that miss the buffer
  output logic              ld_valid,
  input  logic              ld_ready,
  output logic [ADDR_W-1:0] ld_addr,
  output logic [ID_W-1:0]   ld_id,
  // responses (store acks, buffered loads)
  output logic              rsp_valid,
  input  logic              rsp_ready,
  output sb_rsp_t           rsp,
  // MemWr towards the transaction layer
  output logic              wr_valid,
  input  logic              wr_ready,
  output m2s_msg_t          wr_msg,
  // write completions and DevLoad samples of read responses
  input  logic              cmp_valid,
  input  s2m_msg_t          cmp_msg,
  input  logic              dl_valid,
  input  devload_e          dl,
  // GPU local memory
  output logic              gm_valid,
  input  logic              gm_ready,
  output gm_req_t           gm_req,
  input  logic              gm_rsp_valid,
  input  logic [DATA_W-1:0] gm_rsp_data,
  // status and events
  output logic              suspended,
  output logic [$clog2(STACK_DEPTH+1)-1:0] stack_count,
  output logic              ev_dual,
  output logic              ev_buffer,
  output logic              ev_flush,
  output logic              ev_gm_hit,
  output logic              ev_suspend
);

  localparam int SW = $clog2(STACK_DEPTH);
  localparam int SC = $clog2(STACK_DEPTH + 1);
  localparam int TW = $clog2(WR_TAGS);

  // ---------------------------------------------------------------- state
  typedef enum logic [3:0] {
    S_IDLE, S_FWD, S_STORE, S_ACK, S_GMRD, S_GMWAIT, S_RSP,
    S_FLRD, S_FLWAIT, S_FLWR
  } state_e;
  state_e st;

  logic [ADDR_W-1:0] al_addr [STACK_DEPTH];   // address list
  logic              al_v    [STACK_DEPTH];
  logic [SC-1:0]     sp;                      // stack pointer = entries

  logic              wt_v    [WR_TAGS];       // outstanding MemWr tags
  logic              wt_ack  [WR_TAGS];       // acknowledge on completion
  logic              wt_done [WR_TAGS];
  logic [ID_W-1:0]   wt_id   [WR_TAGS];
  logic [TW:0]       wr_out;

  sb_req_t           r;                       // request being handled
  logic              r_need_gm, r_need_ssd, r_ack_now, gm_done, ssd_done;
  logic [SW-1:0]     r_slot;
  logic [DATA_W-1:0] buf_data;
  logic              last_flush, probe;
  devload_e          dl_last;
  logic [$clog2(TAIL_THRESH+1)-1:0]  wait_cnt;
  logic [$clog2(CHECK_PERIOD)-1:0]   tick_cnt;
  logic              tick;

  assign stack_count = sp;

  // ------------------------------------------------------ list lookup (CAM)
  logic          hit;
  logic [SW-1:0] hit_idx;
  always_comb begin
    hit = 1'b0;
    hit_idx = '0;
    for (int i = 0; i < STACK_DEPTH; i++)
      if (al_v[i] && al_addr[i][ADDR_W-1:LINE_LSB] == req.addr[ADDR_W-1:LINE_LSB]) begin
        hit = 1'b1;
        hit_idx = SW'(i);
      end
  end

  // ------------------------------------------------------ free write tag
  logic          tag_free;
  logic [TW-1:0] free_tag;
  always_comb begin
    tag_free = 1'b0;
    free_tag = '0;
    for (int i = WR_TAGS - 1; i >= 0; i--)
      if (!wt_v[i]) begin
        tag_free = 1'b1;
        free_tag = TW'(i);
      end
  end

  // deferred acknowledgement (ds_en = 0): a completed tag waiting for rsp
  logic          dack;
  logic [TW-1:0] dack_tag;
  always_comb begin
    dack = 1'b0;
    dack_tag = '0;
    for (int i = WR_TAGS - 1; i >= 0; i--)
      if (wt_v[i] && wt_done[i] && wt_ack[i]) begin
        dack = 1'b1;
        dack_tag = TW'(i);
      end
  end

  // ------------------------------------------------------ tail detection
  wire tail_cond = (dl_last == DL_MODERATE) || (dl_last == DL_SEVERE) ||
                   (int'(wait_cnt) >= TAIL_THRESH);
  assign tick = (int'(tick_cnt) == CHECK_PERIOD - 1);

  // flush is started in idle when the stack holds data and the port is
  // normal (or a probe is due); it alternates with requests
  logic flush_go;
  assign flush_go = ds_en && sp != '0 && tag_free && (!suspended || probe) &&
                    (!req_valid || !last_flush);

  // ------------------------------------------------------ outputs
  wire fsm_rsp = (st == S_ACK) || (st == S_RSP);
  wire [TW-1:0] cmp_tag = cmp_msg.tag[TW-1:0];

  always_comb begin
    req_ready = 1'b0;
    ld_valid  = (st == S_FWD);
    ld_addr   = r.addr;
    ld_id     = r.id;

    rsp_valid = fsm_rsp || dack;
    rsp       = '0;
    if (fsm_rsp) begin
      rsp.write = r.write;
      rsp.id    = r.id;
      rsp.data  = (st == S_RSP) ? buf_data : '0;
    end else begin
      rsp.write = 1'b1;
      rsp.id    = wt_id[dack_tag];
    end

    wr_valid = 1'b0;
    wr_msg   = '0;
    wr_msg.op  = M2S_MEMWR;
    wr_msg.tag = TAG_W'({1'b1, free_tag});
    if (st == S_STORE && r_need_ssd && !ssd_done && tag_free) begin
      wr_valid     = 1'b1;
      wr_msg.addr  = {r.addr[ADDR_W-1:LINE_LSB], {LINE_LSB{1'b0}}};
      wr_msg.data  = r.data;
    end else if (st == S_FLWR && tag_free) begin
      wr_valid     = 1'b1;
      wr_msg.addr  = {al_addr[SW'(sp - 1'b1)][ADDR_W-1:LINE_LSB], {LINE_LSB{1'b0}}};
      wr_msg.data  = buf_data;
    end

    gm_valid = 1'b0;
    gm_req   = '0;
    gm_req.addr = RESV_BASE + (ADDR_W'(r_slot) << LINE_LSB);
    if (st == S_STORE && r_need_gm && !gm_done) begin
      gm_valid     = 1'b1;
      gm_req.write = 1'b1;
      gm_req.data  = r.data;
    end else if (st == S_GMRD) begin
      gm_valid     = 1'b1;
    end else if (st == S_FLRD) begin
      gm_valid     = 1'b1;
      gm_req.addr  = RESV_BASE + (ADDR_W'(sp - 1'b1) << LINE_LSB);
    end

    if (st == S_IDLE && !(flush_go)) req_ready = 1'b1;
  end

  assign ev_dual    = (st == S_STORE) && r_need_gm && r_need_ssd && gm_valid && gm_ready;
  assign ev_buffer  = (st == S_STORE) && r_need_gm && !r_need_ssd && gm_valid && gm_ready;
  assign ev_flush   = (st == S_FLWR) && wr_valid && wr_ready;
  assign ev_gm_hit  = (st == S_RSP) && rsp_ready;

  // store step finished on the GPU-memory and the SSD side
  logic gd, sd;
  assign gd = gm_done  || !r_need_gm  || (gm_valid && gm_ready);
  assign sd = ssd_done || !r_need_ssd || (wr_valid && wr_ready);

  // ------------------------------------------------------ sequential
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= S_IDLE;
      sp         <= '0;
      r          <= '0;
      r_need_gm  <= 1'b0;
      r_need_ssd <= 1'b0;
      r_ack_now  <= 1'b0;
      r_slot     <= '0;
      gm_done    <= 1'b0;
      ssd_done   <= 1'b0;
      buf_data   <= '0;
      last_flush <= 1'b0;
      probe      <= 1'b0;
      suspended  <= 1'b0;
      ev_suspend <= 1'b0;
      dl_last    <= DL_LIGHT;
      wait_cnt   <= '0;
      tick_cnt   <= '0;
      wr_out     <= '0;
      for (int i = 0; i < STACK_DEPTH; i++) begin
        al_v[i]    <= 1'b0;
        al_addr[i] <= '0;
      end
      for (int i = 0; i < WR_TAGS; i++) begin
        wt_v[i]    <= 1'b0;
        wt_ack[i]  <= 1'b0;
        wt_done[i] <= 1'b0;
        wt_id[i]   <= '0;
      end
    end else begin
      ev_suspend <= 1'b0;

      // DevLoad monitoring
      if (cmp_valid)      dl_last <= cmp_msg.devload;
      else if (dl_valid)  dl_last <= dl;

      tick_cnt <= tick ? '0 : tick_cnt + 1'b1;
      if (cmp_valid || wr_out == '0)             wait_cnt <= '0;
      else if (int'(wait_cnt) < TAIL_THRESH)     wait_cnt <= wait_cnt + 1'b1;

      if (ds_en && tail_cond) begin
        if (!suspended) ev_suspend <= 1'b1;
        suspended <= 1'b1;
      end else if (suspended && (tick || !ds_en)) begin
        suspended <= 1'b0;
      end
      if (suspended && tick && wr_out == '0 && sp != '0) probe <= 1'b1;

      // write tags
      if (cmp_valid) wt_done[cmp_tag] <= 1'b1;
      if (wr_valid && wr_ready) begin
        wt_v[free_tag]    <= 1'b1;
        wt_done[free_tag] <= 1'b0;
        wt_ack[free_tag]  <= (st == S_STORE) && !r_ack_now;
        wt_id[free_tag]   <= r.id;
      end
      // a tag is released on completion, or after its deferred ack
      for (int i = 0; i < WR_TAGS; i++)
        if (wt_v[i] && wt_done[i] && !wt_ack[i]) wt_v[i] <= 1'b0;
      if (!fsm_rsp && dack && rsp_ready) wt_v[dack_tag] <= 1'b0;
      wr_out <= wr_out + (TW+1)'(wr_valid && wr_ready) - (TW+1)'(cmp_valid);

      unique case (st)
        S_IDLE: begin
          if (flush_go) begin
            st         <= S_FLRD;
            last_flush <= 1'b1;
            probe      <= 1'b0;
          end else if (req_valid) begin
            r          <= req;
            last_flush <= 1'b0;
            gm_done    <= 1'b0;
            ssd_done   <= 1'b0;
            r_slot     <= hit_idx;
            if (!req.write) begin
              st <= (ds_en && hit) ? S_GMRD : S_FWD;
            end else if (!ds_en) begin
              r_need_gm <= 1'b0; r_need_ssd <= 1'b1; r_ack_now <= 1'b0;
              st <= S_STORE;
            end else if (!suspended) begin
              r_need_gm <= hit;  r_need_ssd <= 1'b1; r_ack_now <= 1'b1;
              st <= S_STORE;
            end else if (hit) begin
              r_need_gm <= 1'b1; r_need_ssd <= 1'b0; r_ack_now <= 1'b1;
              st <= S_STORE;
            end else if (int'(sp) < STACK_DEPTH) begin
              r_need_gm <= 1'b1; r_need_ssd <= 1'b0; r_ack_now <= 1'b1;
              r_slot    <= SW'(sp);
              al_v[SW'(sp)]    <= 1'b1;
              al_addr[SW'(sp)] <= req.addr;
              sp        <= sp + 1'b1;
              st <= S_STORE;
            end else begin
              r_need_gm <= 1'b0; r_need_ssd <= 1'b1; r_ack_now <= 1'b1;
              st <= S_STORE;
            end
          end
        end
        S_FWD:  if (ld_ready) st <= S_IDLE;
        S_STORE: begin
          gm_done  <= gd;
          ssd_done <= sd;
          if (gd && sd) st <= r_ack_now ? S_ACK : S_IDLE;
        end
        S_ACK:    if (rsp_ready) st <= S_IDLE;
        S_GMRD:   if (gm_ready) st <= S_GMWAIT;
        S_GMWAIT: if (gm_rsp_valid) begin buf_data <= gm_rsp_data; st <= S_RSP; end
        S_RSP:    if (rsp_ready) st <= S_IDLE;
        S_FLRD:   if (gm_ready) st <= S_FLWAIT;
        S_FLWAIT: if (gm_rsp_valid) begin buf_data <= gm_rsp_data; st <= S_FLWR; end
        S_FLWR: if (wr_valid && wr_ready) begin
          al_v[SW'(sp - 1'b1)] <= 1'b0;
          sp <= sp - 1'b1;
          st <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  a_stack_bound: assert property (@(posedge clk) disable iff (!rst_n)
    int'(sp) <= STACK_DEPTH);
  a_cmp_known: assert property (@(posedge clk) disable iff (!rst_n)
    cmp_valid |-> wt_v[cmp_tag]);

endmodule
