// tb_data_fifo: random writes and reads on a 16-word FIFO against a queue
// model: valid/rdata show the oldest word, full stops writes at exactly
// DEPTH words (+ nothing lost or duplicated), count is exact.  A second
// instance at the full 32768-word size is filled completely once and then
// emptied, to check full, count and order at the real size.
`timescale 1ns/1ps
module tb_data_fifo;
  logic clk = 0, rst, we, rd, full, valid;
  logic [63:0] wdata, rdata;
  logic [5:0] count;
  logic we2, rd2, full2, valid2;
  logic [63:0] wdata2, rdata2;
  logic [16:0] count2;
  int checks = 0, failures = 0, n_full = 0;

  data_fifo #(.DEPTH(16)) dut (.*);
  data_fifo dut_big (.clk, .rst, .we(we2), .wdata(wdata2), .full(full2), .rd(rd2),
                     .rdata(rdata2), .valid(valid2), .count(count2));

  always #1.25 clk = ~clk;

  logic [63:0] q[$];
  int qt[$];
  int cyc = 0;
  bit exp_valid;
  // a word written into an empty FIFO reaches the output register one cycle
  // after the write, so it is visible from the second edge after the write
  always @(posedge clk) if (!rst) begin
    cyc++;
    exp_valid = (q.size() > 0) && (cyc - qt[0] >= 2);
    checks++;
    if (valid !== exp_valid || (valid && rdata !== q[0]) || int'(count) != q.size() || full !== (q.size() >= 16)) begin
      failures++;
      if (failures < 10) $display("%t valid %b rdata %h count %0d; model %0d words head %h", $time, valid, rdata, count, q.size(), (q.size() > 0) ? q[0] : 64'h0);
    end
    if (full) n_full++;
    if (rd && valid) begin void'(q.pop_front()); void'(qt.pop_front()); end
    if (we && !full) begin q.push_back(wdata); qt.push_back(cyc); end
  end

  initial begin
    rst = 1; we = 0; rd = 0; wdata = '0; we2 = 0; rd2 = 0; wdata2 = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int ph = 0; ph < 8; ph++) begin
      repeat (300) begin
        @(negedge clk);
        we = ($urandom_range(0, 3) < ((ph % 2 != 0) ? 1 : 3));
        rd = ($urandom_range(0, 3) < ((ph % 2 != 0) ? 3 : 1));
        wdata = {$urandom, $urandom};
      end
    end
    @(negedge clk); we = 0; rd = 1;
    repeat (40) @(negedge clk);
    rd = 0;
    checks++;
    if (n_full == 0) begin failures++; $display("never full"); end
    // full-size instance: 32768 writes, one more refused, then read back
    for (int i = 0; i < 32769; i++) begin
      @(negedge clk); we2 = 1; wdata2 = 64'(i) * 64'h9E37_79B9_7F4A_7C15;
    end
    @(negedge clk); we2 = 0;
    @(negedge clk);
    checks++;
    if (!full2 || count2 != 17'd32768) begin failures++; $display("big: full %b count %0d", full2, count2); end
    for (int i = 0; i < 32768; i++) begin
      @(negedge clk);
      rd2 = 0;
      if (!valid2) begin @(negedge clk); end
      checks++;
      if (!valid2 || rdata2 !== 64'(i) * 64'h9E37_79B9_7F4A_7C15) begin
        failures++;
        if (failures < 10) $display("big word %0d: %h", i, rdata2);
      end
      rd2 = 1;
    end
    @(negedge clk); rd2 = 0;
    @(negedge clk);
    checks++;
    if (valid2 || count2 != 0) begin failures++; $display("big: not empty at the end"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
