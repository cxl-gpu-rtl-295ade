// sr_ring_buffer: record of the speculative reads already issued.
//
// The SR reader writes the 256B-aligned start and the length (1..4 units)
// of every MemSpecRd it sends into the next slot of a DEPTH-slot ring,
// overwriting the oldest.  A lookup asks whether a load's address lies in a
// range that is still recorded; if it does, the data is already being
// prefetched and the load is sent on as a plain memory read without a new
// SR.  Lookup is combinational; a write is seen from the next cycle.
//
// From the paper: the reader records address and length of each issued SR
// in a ring buffer and forwards matching requests directly.  Own choices:
// the depth, and "matches" read as "falls inside the recorded range".
module sr_ring_buffer
  import cxl_pkg::*;
#(
  parameter int DEPTH = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              wr,
  input  logic [ADDR_W-1:0] wr_start,
  input  logic [2:0]        wr_units,
  input  logic [ADDR_W-1:0] lk_addr,
  output logic              lk_hit
);

  localparam int PW = $clog2(DEPTH);
  localparam int BW = ADDR_W - UNIT_LSB;   // block-number width

  logic          v   [DEPTH];
  logic [BW-1:0] sblk[DEPTH];
  logic [2:0]    len [DEPTH];
  logic [PW-1:0] wp;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      for (int i = 0; i < DEPTH; i++) v[i] <= 1'b0;
    end else if (wr) begin
      v[wp] <= 1'b1;
      wp    <= (int'(wp) == DEPTH - 1) ? '0 : wp + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (wr) begin
      sblk[wp] <= wr_start[ADDR_W-1:UNIT_LSB];
      len[wp]  <= wr_units;
    end
  end

  always_comb begin
    logic [BW-1:0] b;
    b = lk_addr[ADDR_W-1:UNIT_LSB];
    lk_hit = 1'b0;
    for (int i = 0; i < DEPTH; i++)
      if (v[i] && b >= sblk[i] && (b - sblk[i]) < BW'(len[i]))
        lk_hit = 1'b1;
  end

endmodule
