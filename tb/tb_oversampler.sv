// tb_oversampler: drives the input with a random level in every quarter
// period (changing 0.3 ns after each quarter boundary) and checks that three
// clk cycles after clk edge k the four outputs hold the input as it was at
// edge k + 0, 1/4, 2/4 and 3/4 of a period.
`timescale 1ns/1ps
module tb_oversampler;
  logic clk, clk90, clk180, clk270, din;
  logic [3:0] samples;
  int checks = 0, failures = 0;
  localparam int NSLOT = 4000;
  bit val [NSLOT];

  clk4_gen u_clk (.*);
  oversampler dut (.*);

  // quarter slot j starts at 1.25 + j*0.625 ns; the level of slot j is set 0.3 ns in
  initial begin
    din = 1'b0;
    foreach (val[j]) val[j] = 1'($urandom_range(0, 1));
    #1.25;
    for (int j = 0; j < NSLOT; j++) begin
      #0.3 din = val[j];
      #0.325;
    end
  end

  // edge m of clk (m = 0 at 1.25 ns): samples of edge m-3
  int m = 0;
  always @(posedge clk) begin
    #0.1;
    if (m >= 5 && 4*(m-3)+2 < NSLOT) begin
      automatic int k = m - 3;
      automatic logic [3:0] exp = {val[4*k+2], val[4*k+1], val[4*k], val[4*k-1]};
      checks++;
      if (samples !== exp) begin
        failures++;
        if (failures < 10) $display("edge %0d: samples %b expected %b", m, samples, exp);
      end
    end
    m++;
    if (4*(m-3)+2 >= NSLOT) begin
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  initial begin
    #10000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
