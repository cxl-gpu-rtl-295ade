// cxl_pkg: types and constants shared by the GPU-side CXL root complex.
//
// The root complex sits on the GPU system bus and turns 64-byte memory
// requests into CXL.mem messages for DRAM- or SSD-backed expanders.  This
// package holds the bus structs (system bus, GPU local memory, CXL.mem
// M2S/S2M messages), the DevLoad encoding and the MemSpecRd length encoding.
//
// Taken from the paper: 64B CXL request granularity, 256B SR offset unit,
// SR length carried in the two least significant address bits (1..4 units),
// the four DevLoad states (two bits).  Own choices: address, data, id and tag
// widths, the message structs (a simplified form of CXL.mem messages, one
// message per transfer rather than packed 68B/256B flits) and the DevLoad
// code values, which follow the order in which the paper lists the states.
package cxl_pkg;

  localparam int ADDR_W  = 48;   // byte address (HPA)
  localparam int DATA_W  = 512;  // one 64B cache line
  localparam int ID_W    = 8;    // system-bus request id
  localparam int TAG_W   = 16;   // CXL.mem tag

  localparam int LINE_B  = 64;   // CXL.mem request granularity
  localparam int SR_UNIT = 256;  // MemSpecRd offset unit
  localparam int LINE_LSB = 6;   // log2(LINE_B)
  localparam int UNIT_LSB = 8;   // log2(SR_UNIT)
  localparam int SR_MAX_UNITS = 4; // 2-bit length field: 1..4 units (256B..1024B)

  // DevLoad QoS telemetry carried in every S2M response.
  typedef enum logic [1:0] {
    DL_LIGHT    = 2'd0,  // ll: light load
    DL_OPTIMAL  = 2'd1,  // ol: optimal load
    DL_MODERATE = 2'd2,  // mo: moderate overload
    DL_SEVERE   = 2'd3   // so: severe overload
  } devload_e;

  typedef enum logic [1:0] {
    M2S_MEMRD     = 2'd0,
    M2S_MEMSPECRD = 2'd1,
    M2S_MEMWR     = 2'd2
  } m2s_op_e;

  typedef enum logic [0:0] {
    S2M_CMP     = 1'b0,  // NDR completion for a write
    S2M_MEMDATA = 1'b1   // DRS data response for a read
  } s2m_op_e;

  // Host-to-device CXL.mem message.  For MemSpecRd the address field is
  // {256B offset, len-1} above bit 6: bits [7:6] hold the length.
  typedef struct packed {
    m2s_op_e                 op;
    logic [ADDR_W-1:0]       addr;
    logic [TAG_W-1:0]        tag;
    logic [DATA_W-1:0]       data;
  } m2s_msg_t;

  // Device-to-host CXL.mem message.
  typedef struct packed {
    s2m_op_e                 op;
    logic [TAG_W-1:0]        tag;
    devload_e                devload;
    logic [DATA_W-1:0]       data;
  } s2m_msg_t;

  // One transfer on the link side of the arbitrator: CXL.io (PCIe) payloads
  // are opaque to the root port and share the width of a CXL.mem message.
  localparam int M2S_W = $bits(m2s_msg_t);
  typedef struct packed {
    logic              io;       // 1: CXL.io payload, 0: CXL.mem message
    logic [M2S_W-1:0]  payload;
  } link_tx_t;

  // System-bus request and response (LLC side).
  typedef struct packed {
    logic                write;
    logic [ADDR_W-1:0]   addr;
    logic [ID_W-1:0]     id;
    logic [DATA_W-1:0]   data;
  } sb_req_t;

  typedef struct packed {
    logic                write;
    logic                err;    // address not claimed by any root port
    logic [ID_W-1:0]     id;
    logic [DATA_W-1:0]   data;
  } sb_rsp_t;

  // GPU local-memory port used by deterministic store (responses in order).
  typedef struct packed {
    logic                write;
    logic [ADDR_W-1:0]   addr;
    logic [DATA_W-1:0]   data;
  } gm_req_t;

  // One-cycle event pulses of a root port, for performance counters.
  typedef struct packed {
    logic sr;         // MemSpecRd generated
    logic ring_hit;   // load already covered by an earlier MemSpecRd
    logic halt_skip;  // SR dropped: severe overload
    logic mq_full;    // memory queue full (SR queue backs up)
    logic dual;       // store written to SSD and to its buffered copy
    logic buffer;     // store held in the GPU-memory stack only
    logic flush;      // stack entry written back to the SSD
    logic gm_hit;     // load served from GPU memory
    logic suspend;    // port entered the suspended (tail) state
    logic io_turn;    // link arbitrator in its CXL.io state
  } rp_events_t;

  // MemSpecRd address: 256B-aligned start with (units-1) in bits [7:6].
  function automatic logic [ADDR_W-1:0] spec_addr(logic [ADDR_W-1:0] start,
                                                  logic [2:0] units);
    logic [ADDR_W-1:0] a;
    a = {start[ADDR_W-1:UNIT_LSB], 2'b00, 6'b0};
    a[7:6] = 2'(units - 3'd1);
    return a;
  endfunction

endpackage
