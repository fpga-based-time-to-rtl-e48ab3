// tb_scaler: random hit strobes on 8 channels; each counter must equal the
// number of strobes of its channel since the last clear.
`timescale 1ns/1ps
module tb_scaler;
  localparam int N = 8;
  logic clk = 0, rst, clear;
  logic [N-1:0] hits;
  logic [31:0] counts [N];
  int checks = 0, failures = 0;
  int model [N];

  scaler #(.N_CH(N)) dut (.*);

  always #1.25 clk = ~clk;

  always @(posedge clk) begin
    for (int c = 0; c < N; c++) begin
      if (rst || clear) model[c] = 0;
      else if (hits[c]) model[c]++;
    end
  end

  initial begin
    rst = 1; clear = 0; hits = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int r = 0; r < 20; r++) begin
      repeat ($urandom_range(20, 200)) begin
        @(negedge clk);
        for (int c = 0; c < N; c++) hits[c] = ($urandom_range(0, c + 1) == 0);
        clear = 0;
      end
      @(negedge clk);
      hits = '0;
      for (int c = 0; c < N; c++) begin
        checks++;
        if (counts[c] != 32'(model[c])) begin failures++; $display("ch %0d count %0d expected %0d", c, counts[c], model[c]); end
      end
      if (r % 4 == 3) clear = 1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
