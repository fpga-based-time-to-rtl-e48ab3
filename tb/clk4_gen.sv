// clk4_gen: testbench source of the four 400 MHz sampling clocks.
// clk rises at 1.25 ns + k*2.5 ns; clk90, clk180 and clk270 rise 0.625,
// 1.25 and 1.875 ns later.  In silicon these come from the FPGA's clock
// manager.
`timescale 1ns/1ps
module clk4_gen (
  output logic clk,
  output logic clk90,
  output logic clk180,
  output logic clk270
);
  initial begin
    clk = 1'b0; clk90 = 1'b0; clk180 = 1'b1; clk270 = 1'b1;
    #1.25;
    forever begin
      clk = 1'b1; clk180 = 1'b0; #0.625;
      clk90 = 1'b1; clk270 = 1'b0; #0.625;
      clk = 1'b0; clk180 = 1'b1; #0.625;
      clk90 = 1'b0; clk270 = 1'b1; #0.625;
    end
  end
endmodule
