// tb_hdm_decoder: self-checking test of the HDM decoder.
// Programs the three ranges of the example decoder table (0x00-0x1F -> port
// 0, 0x20-0x3F -> port 1, 0x40-0x7F -> port 2), then checks every address in
// and around them and a batch of random ranges against a reference lookup.
// Also checks that a disabled entry claims nothing.
//
// No ports; programs random base/size per port and checks random and
// boundary addresses against a reference lookup.  Lowest-index-wins on
// overlap is this design's rule.
module tb_hdm_decoder;
  import cxl_pkg::*;
  localparam int NUM_RP = 3;
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0, cfg_en = 0;
  logic [1:0] cfg_idx = 0;
  logic [ADDR_W-1:0] cfg_base = 0, cfg_size = 0, lk_addr = 0;
  logic lk_hit; logic [1:0] lk_port;
  int checks = 0, failures = 0;
  longint rb [NUM_RP], rs [NUM_RP]; bit ren [NUM_RP];

  hdm_decoder #(.NUM_RP(NUM_RP)) dut (.*);
  always #5 clk = ~clk;

  task automatic prog(int i, longint b, longint s, bit en);
    @(negedge clk); cfg_we = 1; cfg_idx = 2'(i); cfg_base = ADDR_W'(b); cfg_size = ADDR_W'(s); cfg_en = en;
    @(negedge clk); cfg_we = 0;
    rb[i] = b; rs[i] = s; ren[i] = en;
  endtask

  task automatic check_addr(longint a);
    bit eh; int ep;
    eh = 0; ep = 0;
    for (int i = 0; i < NUM_RP; i++)
      if (!eh && ren[i] && a >= rb[i] && a < rb[i] + rs[i]) begin eh = 1; ep = i; end
    lk_addr = ADDR_W'(a); #1;
    checks++;
    if (lk_hit !== eh || (eh && int'(lk_port) != ep)) begin
      failures++;
      $display("FAIL addr %h hit %0d port %0d expected %0d %0d", a, lk_hit, lk_port, eh, ep);
    end
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < NUM_RP; i++) begin rb[i] = 0; rs[i] = 0; ren[i] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;
    check_addr(0);                 // nothing programmed
    prog(0, 'h00, 'h20, 1);
    prog(1, 'h20, 'h20, 1);
    prog(2, 'h40, 'h40, 1);
    for (longint a = 0; a < 'h90; a++) check_addr(a);
    prog(1, 'h20, 'h20, 0);        // disable port 1
    for (longint a = 'h1e; a < 'h42; a++) check_addr(a);
    for (int n = 0; n < 20; n++) begin
      for (int i = 0; i < NUM_RP; i++)
        prog(i, longint'($urandom_range(0, 'hffff)) << 12, longint'($urandom_range(1, 'h4000)) << 6, 1);
      for (int k = 0; k < 50; k++) check_addr(longint'($urandom_range(0, 'h1_0000)) << 12 | longint'($urandom_range(0, 4095)));
      for (int i = 0; i < NUM_RP; i++) begin
        check_addr(rb[i]); check_addr(rb[i] + rs[i] - 1); check_addr(rb[i] + rs[i]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
