// tb_cxl_arbitrator: self-checking test of the PCIe/CXL arbitrator.
// With both streams always waiting, the link must carry exactly MEM_QUANTUM
// CXL.mem messages, then IO_QUANTUM CXL.io payloads, and so on.  With one
// stream idle the other must get every cycle.  Payloads and the io bit are
// checked for every transfer; random link back-pressure is applied.
//
// No ports; drives random CXL.mem and CXL.io traffic with random link
// back-pressure and checks quanta, work conservation and message order.
// The paper names only an arbitrator state machine; quanta are this design's.
module tb_cxl_arbitrator;
  import cxl_pkg::*;
  localparam int MQ = 8, IQ = 2;
  logic clk = 0, rst_n = 0;
  logic mem_valid = 0, mem_ready, io_valid = 0, io_ready, link_valid, link_ready = 1, in_io_state;
  m2s_msg_t mem_msg = '0; logic [M2S_W-1:0] io_payload = '0; link_tx_t link_tx;
  int checks = 0, failures = 0;

  cxl_arbitrator #(.MEM_QUANTUM(MQ), .IO_QUANTUM(IQ)) dut (.*);
  always #5 clk = ~clk;
  task automatic chk(bit c, string s); checks++; if (!c) begin failures++; $display("FAIL %s", s); end endtask

  initial begin
    #500000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int run_mem, run_io, sent;
    repeat (3) @(negedge clk); rst_n = 1;
    // both busy: pattern MQ mem, IQ io
    link_ready = 0; mem_valid = 1; io_valid = 1; run_mem = 0; run_io = 0; sent = 0;
    while (sent < 400) begin
      @(negedge clk);
      link_ready = ($urandom_range(0, 3) != 0);
      mem_msg = '0; mem_msg.addr = ADDR_W'($urandom); io_payload = M2S_W'({$urandom, $urandom});
      #1;
      chk(link_valid, "link idle with traffic");
      if (link_ready) begin
        sent++;
        if (link_tx.io) begin
          chk(link_tx.payload == io_payload && io_ready && !mem_ready, "io payload");
          chk(run_mem == MQ || run_io > 0, $sformatf("io after %0d mem", run_mem));
          run_io++; run_mem = 0;
        end else begin
          chk(link_tx.payload == M2S_W'(mem_msg) && mem_ready && !io_ready, "mem payload");
          chk(run_io == IQ || run_mem > 0 || sent == 1, $sformatf("mem after %0d io", run_io));
          run_mem++; run_io = 0;
          chk(run_mem <= MQ, "mem quantum exceeded");
        end
      end
    end
    // only mem
    io_valid = 0;
    for (int n = 0; n < 100; n++) begin
      @(negedge clk); link_ready = 1; #1;
      chk(link_valid && !link_tx.io && mem_ready, "mem alone");
    end
    // only io
    mem_valid = 0; io_valid = 1;
    for (int n = 0; n < 100; n++) begin
      @(negedge clk); #1;
      chk(link_valid && link_tx.io && io_ready, "io alone");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
