// sr_queue: the SR queue of the root port's queue logic.
//
// A DEPTH-entry first-in first-out queue of loads (address, request id)
// waiting for the SR reader.  Besides the usual push/pop handshake it shows
// the addresses of all queued loads behind the head (tail_valid/tail_addr),
// which the address-window control counts as "requests still to come".
// Push and pop may happen in the same cycle; push is refused when full.
// The head is visible combinationally; a push is visible the next cycle.
//
// From the paper: an SR queue of 32 entries that receives load requests.
// Own choices: the circular-buffer form and the visible entries.
module sr_queue
  import cxl_pkg::*;
#(
  parameter int DEPTH = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              push_valid,
  output logic              push_ready,
  input  logic [ADDR_W-1:0] push_addr,
  input  logic [ID_W-1:0]   push_id,
  output logic              head_valid,
  input  logic              pop,
  output logic [ADDR_W-1:0] head_addr,
  output logic [ID_W-1:0]   head_id,
  output logic              tail_valid [DEPTH],
  output logic [ADDR_W-1:0] tail_addr  [DEPTH],
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int PW = $clog2(DEPTH);

  logic [ADDR_W-1:0] q_addr [DEPTH];
  logic [ID_W-1:0]   q_id   [DEPTH];
  logic [PW-1:0]     rd_ptr, wr_ptr;

  assign push_ready = (count < ($clog2(DEPTH+1))'(DEPTH));
  assign head_valid = (count != '0);
  assign head_addr  = q_addr[rd_ptr];
  assign head_id    = q_id[rd_ptr];

  wire do_push = push_valid && push_ready;
  wire do_pop  = pop && head_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) wr_ptr <= (int'(wr_ptr) == DEPTH - 1) ? '0 : wr_ptr + 1'b1;
      if (do_pop)  rd_ptr <= (int'(rd_ptr) == DEPTH - 1) ? '0 : rd_ptr + 1'b1;
      count <= count + ($bits(count))'(do_push) - ($bits(count))'(do_pop);
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) begin
      q_addr[wr_ptr] <= push_addr;
      q_id[wr_ptr]   <= push_id;
    end
  end

  // slot i is occupied (and not the head) when its distance from rd_ptr is
  // between 1 and count-1
  always_comb begin
    for (int i = 0; i < DEPTH; i++) begin
      int d_i;
      d_i = (i - int'(rd_ptr) + DEPTH) % DEPTH;
      tail_valid[i] = (d_i >= 1) && (d_i < int'(count));
      tail_addr[i]  = q_addr[i];
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    count <= ($clog2(DEPTH+1))'(DEPTH));

endmodule
