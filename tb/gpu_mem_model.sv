// gpu_mem_model: behavioural model of the GPU local-memory controller.
// Not synthesizable; testbench only.  Accepts one request per cycle
// (optionally stalling at random), stores writes by 64B line and answers
// reads in order LATENCY cycles later.  Unwritten lines read as zero.
//
// Interface: gm_req valid/ready in, in-order read data out after LATENCY cycles;
// STALL_PCT% of cycles refuse requests.  Not synthesizable (associative array).
// The paper only names GPU local memory; everything here is this model's choice.
module gpu_mem_model
  import cxl_pkg::*;
#(
  parameter int LATENCY = 6,
  parameter int STALL_PCT = 0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              req_valid,
  output logic              req_ready,
  input  gm_req_t           req,
  output logic              rsp_valid,
  output logic [DATA_W-1:0] rsp_data
);
  logic [DATA_W-1:0] mem [longint];
  longint due_q [$];
  logic [DATA_W-1:0] dat_q [$];
  longint cyc = 0;
  int n_wr = 0, n_rd = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    req_ready <= ($urandom_range(0, 99) >= STALL_PCT);
    rsp_valid <= 1'b0;
    if (!rst_n) begin
      due_q.delete(); dat_q.delete(); req_ready <= 1'b0;
    end else begin
      if (req_valid && req_ready) begin
        longint a;
        a = longint'(req.addr) / 64;
        if (req.write) begin mem[a] = req.data; n_wr++; end
        else begin
          due_q.push_back(cyc + LATENCY);
          dat_q.push_back(mem.exists(a) ? mem[a] : '0);
          n_rd++;
        end
      end
      if (due_q.size() > 0 && due_q[0] <= cyc) begin
        rsp_valid <= 1'b1;
        rsp_data  <= dat_q[0];
        void'(due_q.pop_front()); void'(dat_q.pop_front());
      end
    end
  end
endmodule
