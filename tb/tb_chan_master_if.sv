// tb_chan_master_if: a queue stands in for the RAM buffer's committed
// words.  The master side acknowledges at random.  Checks: data_rdy only
// while a T2 is pending and a word is there; data is the queued word with the
// channel number inserted; the RAM buffer is popped exactly on ack; the
// channel trailer ends one pending T2, so the words of a second event are
// not offered before its T2.
`timescale 1ns/1ps
module tb_chan_master_if;
  import het_pkg::*;
  localparam int CHAN = 21;
  logic clk = 0, rst, t2, ram_avail, ram_rd, data_rdy, ack;
  chan_word_t ram_rdata, data;
  int checks = 0, failures = 0, n_blocked = 0;

  chan_master_if #(.CHAN(CHAN)) dut (.*);

  always #1.25 clk = ~clk;

  chan_word_t q[$];
  int pending = 0;
  assign ram_avail = (q.size() > 0);
  assign ram_rdata = (q.size() > 0) ? q[0] : '0;

  always @(posedge clk) if (!rst) begin
    automatic bit exp_rdy = (pending > 0) && (q.size() > 0);
    automatic chan_word_t exp_d = ram_rdata;
    exp_d.chan = 5'(CHAN);
    checks++;
    if (data_rdy !== exp_rdy || ram_rd !== (ack && exp_rdy) || (exp_rdy && data !== exp_d)) begin
      failures++;
      if (failures < 10) $display("%t rdy %b rd %b data %h; expected %b %h", $time, data_rdy, ram_rd, data, exp_rdy, exp_d);
    end
    if (!exp_rdy && q.size() > 0) n_blocked++;
    if (ack && exp_rdy) begin
      if (q[0].kind == KIND_CTRL) pending--;
      void'(q.pop_front());
    end
    if (t2) pending++;
  end

  always @(negedge clk) ack = ($urandom_range(0, 1) == 0);

  initial begin
    rst = 1; t2 = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int e = 0; e < 200; e++) begin
      automatic int n = $urandom_range(0, 5);
      for (int i = 0; i < n; i++) q.push_back(meas_word(4'($urandom_range(0, 1)), TIME_W'($urandom)));
      q.push_back(ctrl_word(1'($urandom_range(0, 1)), 16'(n)));
      repeat ($urandom_range(0, 8)) @(negedge clk);
      t2 = 1;
      @(negedge clk);
      t2 = 0;
    end
    repeat (1000) @(negedge clk);
    checks++;
    if (q.size() != 0 || pending != 0 || n_blocked == 0) begin
      failures++; $display("left %0d words, %0d pending, blocked %0d", q.size(), pending, n_blocked);
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
