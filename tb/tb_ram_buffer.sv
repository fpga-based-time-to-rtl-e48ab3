// tb_ram_buffer: runs selections the way the Data Selector and the Trigger
// Manager produce them (T1, words, trailer with sel_done, T2 before or after
// the end of the selection, or no T2 and a new T1) against an 8-word buffer,
// with a reader popping at random.  A model of committed and pending words
// checks rd_avail, rdata and space every cycle: words become readable only
// when both T2 and sel_done have been seen, and are thrown away by a T1 that
// follows a selection without T2.
`timescale 1ns/1ps
module tb_ram_buffer;
  import het_pkg::*;
  localparam int DEPTH = 8;
  logic clk = 0, rst, we, sel_done, t1, t2, rd_en, rd_avail;
  chan_word_t wdata, rdata;
  logic [3:0] space;
  int checks = 0, failures = 0, n_commit = 0, n_rollback = 0, n_early_t2 = 0;

  ram_buffer #(.DEPTH(DEPTH)) dut (.*);

  always #1.25 clk = ~clk;

  chan_word_t cq[$], sq[$];
  bit m_t2 = 0, m_done = 0;

  always @(posedge clk) if (!rst) begin
    // compare outputs before the edge
    checks++;
    if (rd_avail !== (cq.size() > 0) || (cq.size() > 0 && rdata !== cq[0]) ||
        int'(space) != DEPTH - cq.size() - sq.size()) begin
      failures++;
      if (failures < 10) $display("%t avail %b rdata %h space %0d; model %0d committed %0d pending", $time, rd_avail, rdata, space, cq.size(), sq.size());
    end
    if (we && cq.size() + sq.size() < DEPTH) sq.push_back(wdata);
    if (rd_en && cq.size() > 0) void'(cq.pop_front());
    if ((m_t2 || t2) && (m_done || sel_done)) begin
      while (sq.size() > 0) cq.push_back(sq.pop_front());
      m_t2 = 0; m_done = 0; n_commit++;
    end else begin
      if (t2) m_t2 = 1;
      if (sel_done) m_done = 1;
    end
    if (t1 && !m_t2 && !t2) begin
      if (sq.size() > 0) n_rollback++;
      sq.delete(); m_done = 0;
    end
  end

  always @(negedge clk) rd_en = ($urandom_range(0, 2) == 0);

  task automatic cyc; @(negedge clk); we = 0; sel_done = 0; t1 = 0; t2 = 0; endtask

  initial begin
    rst = 1; we = 0; sel_done = 0; t1 = 0; t2 = 0; wdata = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int e = 0; e < 300; e++) begin
      automatic int n = $urandom_range(0, 4);
      automatic int mode = $urandom_range(0, 2);  // 0: T2 after, 1: T2 during, 2: no T2
      cyc(); t1 = 1;
      for (int i = 0; i < n; i++) begin
        cyc(); we = 1; wdata = chan_word_t'($urandom);
        if (mode == 1 && i == 0) begin t2 = 1; n_early_t2++; end
      end
      cyc(); we = 1; wdata = ctrl_word(1'b0, 16'(n)); sel_done = 1;
      if (mode == 1 && n == 0) begin t2 = 1; n_early_t2++; end
      repeat ($urandom_range(0, 4)) cyc();
      if (mode == 0) begin cyc(); t2 = 1; end
      repeat ($urandom_range(1, 6)) cyc();
    end
    repeat (40) cyc();
    checks++;
    if (n_commit == 0 || n_rollback == 0 || n_early_t2 == 0) begin
      failures++; $display("coverage commit %0d rollback %0d early T2 %0d", n_commit, n_rollback, n_early_t2);
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
