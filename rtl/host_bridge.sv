// host_bridge: host bridge of the GPU's CXL root complex.
//
// Sits between the GPU system-bus port and NUM_RP CXL root ports.  Each
// incoming request is looked up in the HDM decoder and handed to the root
// port whose host-physical-address range holds it; the address is passed
// unchanged.  A request no port claims is answered by the bridge itself with
// err = 1.  Responses from the ports are merged onto the single system-bus
// response channel round robin; a pending error response goes first.
//
// Interface: request and response are valid/ready; the request path is
// combinational (lookup and routing in the same cycle), the error response
// is registered.  The HDM decoder is written through cfg_* by the firmware
// core that enumerates the endpoints.
//
// From the paper: host bridge between the system bus port and several root
// ports, HDM decoder lookup per request.  Own choices: error answer for
// unclaimed addresses and the round-robin response merge.
module host_bridge
  import cxl_pkg::*;
#(
  parameter int NUM_RP = 3
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      cfg_we,
  input  logic [$clog2(NUM_RP)-1:0] cfg_idx,
  input  logic [ADDR_W-1:0]         cfg_base,
  input  logic [ADDR_W-1:0]         cfg_size,
  input  logic                      cfg_en,
  // system bus side
  input  logic                      sb_req_valid,
  output logic                      sb_req_ready,
  input  sb_req_t                   sb_req,
  output logic                      sb_rsp_valid,
  input  logic                      sb_rsp_ready,
  output sb_rsp_t                   sb_rsp,
  // root port side
  output logic                      rp_req_valid [NUM_RP],
  input  logic                      rp_req_ready [NUM_RP],
  output sb_req_t                   rp_req,
  input  logic                      rp_rsp_valid [NUM_RP],
  output logic                      rp_rsp_ready [NUM_RP],
  input  sb_rsp_t                   rp_rsp       [NUM_RP],
  output logic                      ev_unmapped
);

  localparam int PW = $clog2(NUM_RP);

  logic          lk_hit;
  logic [PW-1:0] lk_port;

  hdm_decoder #(.NUM_RP(NUM_RP)) u_hdm (
    .clk, .rst_n, .cfg_we, .cfg_idx, .cfg_base, .cfg_size, .cfg_en,
    .lk_addr(sb_req.addr), .lk_hit, .lk_port
  );

  // error response register
  logic    err_v;
  sb_rsp_t err_rsp;

  always_comb begin
    rp_req = sb_req;
    for (int i = 0; i < NUM_RP; i++)
      rp_req_valid[i] = sb_req_valid && lk_hit && (lk_port == PW'(i));
    sb_req_ready = lk_hit ? rp_req_ready[lk_port] : !err_v;
  end
  assign ev_unmapped = sb_req_valid && !lk_hit && !err_v;

  // round-robin response merge
  logic [PW-1:0] rr;
  logic          sel_v;
  logic [PW-1:0] sel;
  always_comb begin
    sel_v = 1'b0;
    sel   = '0;
    for (int k = NUM_RP - 1; k >= 0; k--) begin
      int j;
      j = (int'(rr) + k) % NUM_RP;
      if (rp_rsp_valid[j]) begin
        sel_v = 1'b1;
        sel   = PW'(j);
      end
    end
    sb_rsp_valid = err_v || sel_v;
    sb_rsp       = err_v ? err_rsp : rp_rsp[sel];
    for (int i = 0; i < NUM_RP; i++)
      rp_rsp_ready[i] = !err_v && sel_v && (sel == PW'(i)) && sb_rsp_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      err_v   <= 1'b0;
      err_rsp <= '0;
      rr      <= '0;
    end else begin
      if (err_v && sb_rsp_ready) err_v <= 1'b0;
      else if (ev_unmapped) begin
        err_v         <= 1'b1;
        err_rsp       <= '0;
        err_rsp.write <= sb_req.write;
        err_rsp.err   <= 1'b1;
        err_rsp.id    <= sb_req.id;
      end
      if (!err_v && sel_v && sb_rsp_ready)
        rr <= (int'(sel) == NUM_RP - 1) ? '0 : sel + 1'b1;
    end
  end

endmodule
