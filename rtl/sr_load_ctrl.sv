// sr_load_ctrl: DevLoad-driven load control for speculative reads (SR).
//
// Every S2M response carries the endpoint's two-bit DevLoad telemetry.  The
// profiler hands each sample to this block, which keeps the SR granularity
// (in 256B units, 1..4, i.e. 256B..1024B) and a halt flag:
//   light load (ll)         -> granularity grows by one unit, up to 1024B;
//                              a halt is lifted
//   optimal load (ol)       -> granularity kept
//   moderate overload (mo)  -> granularity shrinks by one unit, down to 256B
//   severe overload (so)    -> SR halted until an ll sample arrives
// The outputs are registered and change the cycle after a sample.
//
// From the paper: the four states and the action for each, the 256B..1024B
// range, halting under so until ll returns.  Own choices: the step of one
// 256B unit per sample and the reset value of 256B, not halted.
module sr_load_ctrl
  import cxl_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       dl_valid,
  input  devload_e   dl,
  output logic [2:0] gran_units,   // 1..4 x 256B
  output logic       halted
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gran_units <= 3'd1;
      halted     <= 1'b0;
    end else if (dl_valid) begin
      unique case (dl)
        DL_LIGHT: begin
          halted <= 1'b0;
          if (gran_units < 3'(SR_MAX_UNITS)) gran_units <= gran_units + 3'd1;
        end
        DL_OPTIMAL: ;
        DL_MODERATE: if (gran_units > 3'd1) gran_units <= gran_units - 3'd1;
        DL_SEVERE:   halted <= 1'b1;
      endcase
    end
  end

  a_gran_range: assert property (@(posedge clk) disable iff (!rst_n)
    gran_units >= 3'd1 && gran_units <= 3'(SR_MAX_UNITS));

endmodule
