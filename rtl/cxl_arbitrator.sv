// cxl_arbitrator: arbitrator state machine between PCIe (CXL.io) and CXL.mem.
//
// The controller carries both PCIe-style traffic (CXL.io: enumeration,
// configuration and management) and CXL.mem messages over one link.  This
// state machine shares the link between them.  In state MEM the CXL.mem
// stream is served; once MEM_QUANTUM CXL.mem messages have been sent while
// CXL.io traffic waits, the machine moves to state IO and serves up to
// IO_QUANTUM CXL.io payloads before returning.  An idle side never holds the
// link: if the favoured stream has nothing to send, the other one goes.
//
// Interface: two valid/ready inputs, one valid/ready output carrying
// link_tx_t (io bit + payload).  Combinational grant, registered state.
//
// From the paper: an arbitrator state machine shares resources between PCIe
// and CXL tasks.  Own choices: the two states, the quanta and the work-
// conserving rule; power-management handling is not modelled.
module cxl_arbitrator
  import cxl_pkg::*;
#(
  parameter int MEM_QUANTUM = 8,
  parameter int IO_QUANTUM  = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             mem_valid,
  output logic             mem_ready,
  input  m2s_msg_t         mem_msg,
  input  logic             io_valid,
  output logic             io_ready,
  input  logic [M2S_W-1:0] io_payload,
  output logic             link_valid,
  input  logic             link_ready,
  output link_tx_t         link_tx,
  output logic             in_io_state
);

  typedef enum logic { ST_MEM, ST_IO } arb_state_e;
  arb_state_e st;
  localparam int CW = $clog2((MEM_QUANTUM > IO_QUANTUM ? MEM_QUANTUM : IO_QUANTUM) + 1);
  logic [CW-1:0] cnt;
  logic g_mem, g_io;

  always_comb begin
    if (st == ST_MEM) begin
      g_mem = mem_valid;
      g_io  = !mem_valid && io_valid;
    end else begin
      g_io  = io_valid;
      g_mem = !io_valid && mem_valid;
    end
    link_valid      = g_mem || g_io;
    link_tx.io      = g_io;
    link_tx.payload = g_io ? io_payload : M2S_W'(mem_msg);
    mem_ready       = g_mem && link_ready;
    io_ready        = g_io  && link_ready;
  end

  assign in_io_state = (st == ST_IO);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st  <= ST_MEM;
      cnt <= '0;
    end else if (st == ST_MEM) begin
      if (mem_ready && io_valid) begin
        if (int'(cnt) + 1 >= MEM_QUANTUM) begin
          st  <= ST_IO;
          cnt <= '0;
        end else cnt <= cnt + 1'b1;
      end else if (!io_valid) cnt <= '0;
    end else begin
      if (io_ready) begin
        if (int'(cnt) + 1 >= IO_QUANTUM) begin
          st  <= ST_MEM;
          cnt <= '0;
        end else cnt <= cnt + 1'b1;
      end else if (!io_valid) begin
        st  <= ST_MEM;
        cnt <= '0;
      end
    end
  end

endmodule
