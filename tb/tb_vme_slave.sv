// tb_vme_slave: a VME master model runs A32 D32 writes and reads against a
// register file model, MBLT block reads against a FIFO model, and cycles
// that must be ignored (other base address, unsupported AM).  Checks the
// register bus address/data, the read data, the FIFO order and pops, the
// all-ones word from an empty FIFO and that DTACK* stays high when the
// board is not addressed.
`timescale 1ns/1ps
module tb_vme_slave;
  logic clk = 0, rst, as_n, write_n, dout_en, dtack_n, reg_wr, fifo_rd, fifo_valid;
  logic [1:0] ds_n;
  logic [5:0] am;
  logic [31:0] addr, reg_wdata, reg_rdata;
  logic [63:0] din, dout, fifo_rdata;
  logic [11:0] reg_addr;
  int checks = 0, failures = 0;

  vme_slave #(.BASE(8'h10)) dut (.*);

  always #1.25 clk = ~clk;

  // register file model behind the register bus
  logic [31:0] regs [1024];
  assign reg_rdata = regs[reg_addr[11:2]];
  always @(posedge clk) if (reg_wr) regs[reg_addr[11:2]] <= reg_wdata;

  // FIFO model
  logic [63:0] fq[$];
  assign fifo_valid = fq.size() > 0;
  assign fifo_rdata = fifo_valid ? fq[0] : 64'h0;
  always @(posedge clk) if (fifo_rd && fq.size() > 0) void'(fq.pop_front());

  task automatic beat(input logic wr, input bit abeat, input logic [63:0] d, output logic [63:0] q, output bit acked);
    int t = 0;
    write_n = !wr; din = d;
    #7 ds_n = 2'b00;
    while (dtack_n && t < 100) begin #1; t++; end
    acked = !dtack_n;
    q = dout;
    if (acked && !wr && !abeat && !dout_en) begin failures++; $display("dout_en low on a read"); end
    #3 ds_n = 2'b11;
    t = 0;
    while (!dtack_n && t < 100) begin #1; t++; end
    #5;
  endtask

  task automatic d32(input logic wr, input logic [31:0] a, input logic [5:0] m, input logic [31:0] d,
                     output logic [31:0] q, output bit acked);
    logic [63:0] q64;
    addr = a; am = m;
    #5 as_n = 0;
    beat(wr, 1'b0, {32'h0, d}, q64, acked);
    q = q64[31:0];
    as_n = 1;
    #10;
  endtask

  task automatic mblt(input logic [31:0] a, input int n, output logic [63:0] q [$]);
    logic [63:0] w;
    bit acked;
    q.delete();
    addr = a; am = 6'h08;
    #5 as_n = 0;
    beat(1'b0, 1'b1, 64'h0, w, acked);    // address beat
    checks++;
    if (!acked) begin failures++; $display("MBLT address beat not acknowledged"); end
    for (int i = 0; i < n; i++) begin
      beat(1'b0, 1'b0, 64'h0, w, acked);
      checks++;
      if (!acked) begin failures++; $display("MBLT beat %0d not acknowledged", i); end
      q.push_back(w);
    end
    as_n = 1;
    #10;
  endtask

  initial begin
    logic [31:0] r;
    logic [63:0] got [$];
    logic [63:0] exp [$];
    bit acked;
    rst = 1; as_n = 1; ds_n = 2'b11; write_n = 1; am = 0; addr = 0; din = 0;
    foreach (regs[i]) regs[i] = 32'(i) ^ 32'h5A5A_0000;
    #20 rst = 0;
    #20;
    for (int i = 0; i < 40; i++) begin
      automatic logic [9:0] idx = 10'($urandom);
      automatic logic [31:0] v = $urandom;
      d32(1'b1, {8'h10, 12'h000, idx, 2'b00}, ($urandom_range(0, 1) != 0) ? 6'h09 : 6'h0D, v, r, acked);
      checks++;
      if (!acked || regs[idx] !== v) begin failures++; $display("write %0d: acked %b reg %h expected %h", idx, acked, regs[idx], v); end
      d32(1'b0, {8'h10, 12'h000, idx, 2'b00}, 6'h09, 32'h0, r, acked);
      checks++;
      if (!acked || r !== v) begin failures++; $display("read %0d: acked %b %h expected %h", idx, acked, r, v); end
    end
    // not addressed: other base, register window out of range, wrong AM
    d32(1'b1, 32'h2000_0004, 6'h09, 32'hDEAD, r, acked);
    checks++; if (acked) begin failures++; $display("acked another base"); end
    d32(1'b0, 32'h1000_1004, 6'h09, 32'h0, r, acked);
    checks++; if (acked) begin failures++; $display("acked outside the register window"); end
    d32(1'b0, 32'h1000_0004, 6'h29, 32'h0, r, acked);
    checks++; if (acked) begin failures++; $display("acked an A16 cycle"); end
    // MBLT: 3 blocks, the last one runs past the FIFO content
    for (int b = 0; b < 3; b++) begin
      automatic int n = $urandom_range(4, 20);
      automatic int have = (b == 2) ? n - 3 : n;
      exp.delete();
      for (int i = 0; i < have; i++) begin
        automatic logic [63:0] w = {$urandom, $urandom};
        fq.push_back(w); exp.push_back(w);
      end
      for (int i = have; i < n; i++) exp.push_back('1);
      mblt(32'h1000_0000, n, got);
      foreach (exp[i]) begin
        checks++;
        if (got[i] !== exp[i]) begin failures++; $display("MBLT %0d word %0d: %h expected %h", b, i, got[i], exp[i]); end
      end
      checks++;
      if (fq.size() != 0) begin failures++; $display("FIFO left with %0d words", fq.size()); end
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
