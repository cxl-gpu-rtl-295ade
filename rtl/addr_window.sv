// addr_window: address-window control for a speculative read (SR).
//
// Decides which 256B-aligned range a MemSpecRd should cover so that data is
// not prefetched in the wrong direction.  For an SR at line address A with
// granularity G (256B..1024B):
//   1. initial window  [A - G, A + G)
//   2. every memory-queue request inside the initial window (a request that
//      came before) moves the start up by 64B; every SR-queue request inside
//      it (a request still to come) moves the end down by 64B
//   3. start and end are rounded to the nearest 256B boundary
// The window always keeps the 256B block that holds A.  A MemSpecRd can name
// at most four 256B units, so a wider window is cut to four units around its
// middle, again keeping A's block.  Purely combinational.
//
// From the paper: steps 1-3 and the 64B / 256B sizes.  Own choices: only
// requests that fall inside the initial window are counted (the paper says
// "for each request in the memory queue"); "upwards" is read as towards
// higher addresses; the clamp that keeps A's block, and the cut to four
// units, which the 2-bit length field forces.
module addr_window
  import cxl_pkg::*;
#(
  parameter int MQ_DEPTH = 32,
  parameter int SQ_DEPTH = 32
) (
  input  logic [ADDR_W-1:0] addr,
  input  logic [2:0]        gran_units,            // 1..4 x 256B
  input  logic              mq_valid [MQ_DEPTH],
  input  logic [ADDR_W-1:0] mq_addr  [MQ_DEPTH],
  input  logic              sq_valid [SQ_DEPTH],
  input  logic [ADDR_W-1:0] sq_addr  [SQ_DEPTH],
  output logic [ADDR_W-1:0] win_start,             // 256B aligned
  output logic [2:0]        win_units,             // 1..4
  output logic [$clog2(MQ_DEPTH+1)-1:0] m_cnt,
  output logic [$clog2(SQ_DEPTH+1)-1:0] n_cnt
);

  localparam int W = ADDR_W + 2;

  logic [W-1:0] line, g, lo, hi, s, e, blk, sb, eb, units, sc;

  always_comb begin
    line = W'({addr[ADDR_W-1:LINE_LSB], {LINE_LSB{1'b0}}});
    g    = W'(gran_units) << UNIT_LSB;
    lo   = (line >= g) ? line - g : '0;
    hi   = line + g;

    m_cnt = '0;
    for (int i = 0; i < MQ_DEPTH; i++)
      if (mq_valid[i] && W'(mq_addr[i]) >= lo && W'(mq_addr[i]) < hi)
        m_cnt = m_cnt + 1'b1;
    n_cnt = '0;
    for (int i = 0; i < SQ_DEPTH; i++)
      if (sq_valid[i] && W'(sq_addr[i]) >= lo && W'(sq_addr[i]) < hi)
        n_cnt = n_cnt + 1'b1;

    s = lo + (W'(m_cnt) << LINE_LSB);
    e = (hi >= (W'(n_cnt) << LINE_LSB)) ? hi - (W'(n_cnt) << LINE_LSB) : '0;
    if (s > line) s = line;
    if (e < line + W'(LINE_B)) e = line + W'(LINE_B);

    // nearest 256B boundary, as block numbers
    blk = line >> UNIT_LSB;
    sb  = (s + W'(SR_UNIT / 2)) >> UNIT_LSB;
    eb  = (e + W'(SR_UNIT / 2)) >> UNIT_LSB;
    if (sb > blk) sb = blk;
    if (eb < blk + 1) eb = blk + 1;

    units = eb - sb;
    sc    = sb;
    if (units > W'(SR_MAX_UNITS)) begin
      sc = sb + ((units - W'(SR_MAX_UNITS)) >> 1);
      if (sc > blk) sc = blk;
      if (sc + W'(SR_MAX_UNITS - 1) < blk) sc = blk - W'(SR_MAX_UNITS - 1);
      units = W'(SR_MAX_UNITS);
    end
    win_start = ADDR_W'(sc << UNIT_LSB);
    win_units = units[2:0];
  end

endmodule
