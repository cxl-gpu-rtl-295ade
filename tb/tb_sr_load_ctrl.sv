// tb_sr_load_ctrl: self-checking test of the DevLoad load control.
// Feeds random DevLoad samples (and idle cycles) and compares granularity and
// halt flag every cycle with a reference: ll grows by one 256B unit up to
// four and lifts a halt, ol keeps, mo shrinks to one unit, so halts.
// Also checks the outputs change exactly one cycle after a sample.
//
// No ports; random DevLoad sequences against a reference model of the
// ll/ol/mo/so rules of the paper; the one-unit step is this design's.
module tb_sr_load_ctrl;
  import cxl_pkg::*;
  logic clk = 0, rst_n = 0;
  logic dl_valid = 0;
  devload_e dl = DL_LIGHT;
  logic [2:0] gran_units; logic halted;
  int checks = 0, failures = 0;
  int eg = 1; bit eh = 0;
  int seen_max = 0, seen_halt = 0;

  sr_load_ctrl dut (.*);
  always #5 clk = ~clk;

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk);
    checks++; if (gran_units != 3'd1 || halted) begin failures++; $display("FAIL reset"); end
    // walk up to 1024B with ll, then down with mo
    for (int n = 0; n < 3000; n++) begin
      dl_valid = ($urandom_range(0, 3) != 0);
      if (n < 6) dl = DL_LIGHT;
      else if (n < 12) dl = DL_MODERATE;
      else dl = devload_e'($urandom_range(0, 3));
      @(posedge clk);
      if (dl_valid) begin
        case (dl)
          DL_LIGHT:    begin eh = 0; if (eg < 4) eg++; end
          DL_MODERATE: if (eg > 1) eg--;
          DL_SEVERE:   eh = 1;
          default: ;
        endcase
      end
      @(negedge clk);
      checks++;
      if (int'(gran_units) != eg || halted != eh) begin
        failures++;
        $display("FAIL n=%0d gran %0d/%0d halt %0d/%0d", n, gran_units, eg, halted, eh);
      end
      if (eg == 4) seen_max++;
      if (eh) seen_halt++;
    end
    checks++; if (seen_max == 0 || seen_halt == 0) begin failures++; $display("FAIL coverage"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
