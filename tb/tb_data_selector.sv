// tb_data_selector: the Stack buffer is replaced by a small model holding a
// random history of measures and Fiducial Tags, and the RAM buffer by a
// sink with a settable free space.  For each T1 the words written must be
// the measures newer than the NTAGS-th newest tag, newest first, each with
// its Fiducial cycle index, followed by one trailer with the count; with a
// small free space the measures beyond it are dropped and the trailer's ovf
// bit is set.  busy must last 2 cycles per stack word read, plus 1 (stopped
// by a tag) or 2 (stopped by an empty stack).
`timescale 1ns/1ps
module tb_data_selector;
  import het_pkg::*;
  localparam int NTAGS = 2;
  logic clk = 0, rst, t1, snapshot, pop, stk_valid, stk_empty, ram_we, busy, done;
  stack_word_t stk_dout;
  chan_word_t  ram_wdata;
  logic [7:0]  ram_space;
  int checks = 0, failures = 0, n_ovf = 0, n_tagstop = 0, n_emptystop = 0;

  data_selector #(.NTAGS(NTAGS), .SW(8)) dut (.*);

  always #1.25 clk = ~clk;

  // stack model
  stack_word_t words[$];
  int ptr = -1;
  assign stk_empty = (ptr < 0);
  always @(posedge clk) begin
    stk_valid <= 1'b0;
    if (snapshot) ptr <= words.size() - 1;
    else if (pop && ptr >= 0) begin
      stk_dout  <= words[ptr];
      stk_valid <= 1'b1;
      ptr       <= ptr - 1;
    end
  end

  chan_word_t got[$];
  int busy_cycles;
  always @(posedge clk) begin
    if (ram_we) begin
      got.push_back(ram_wdata);
      if (ram_space != 0) ram_space <= ram_space - 1;
    end
    if (busy) busy_cycles++;
  end

  task automatic run_one(int n_words, int space);
    chan_word_t exp[$];
    int tags = 0, nread = 0, nmeas = 0;
    bit ovf = 0, tagstop = 0;
    words.delete();
    for (int i = 0; i < n_words; i++) begin
      stack_word_t w;
      w.is_tag  = ($urandom_range(0, 4) == 0);
      w.payload = w.is_tag ? SEQ_W'(i) : SEQ_W'($urandom_range(0, 16383));
      words.push_back(w);
    end
    // expected selection
    for (int i = n_words - 1; i >= 0; i--) begin
      nread++;
      if (words[i].is_tag) begin
        tags++;
        if (tags >= NTAGS) begin tagstop = 1; break; end
      end else if (space - nmeas > 1) begin
        exp.push_back(meas_word(4'(tags), TIME_W'(words[i].payload)));
        nmeas++;
      end else ovf = 1;
    end
    exp.push_back(ctrl_word(ovf, 16'(nmeas)));
    if (ovf) n_ovf++;
    if (tagstop) n_tagstop++; else n_emptystop++;
    got.delete();
    busy_cycles = 0;
    @(negedge clk);
    ram_space = 8'(space);
    t1 = 1;
    @(negedge clk);
    t1 = 0;
    wait (done);
    @(negedge clk);
    repeat (3) @(negedge clk);
    checks++;
    if (got.size() != exp.size()) begin
      failures++; $display("words %0d expected %0d", got.size(), exp.size());
    end else
      foreach (exp[i]) begin
        checks++;
        if (got[i] !== exp[i]) begin failures++; $display("word %0d %h expected %h", i, got[i], exp[i]); end
      end
    checks++;
    if (busy_cycles != 2*nread + (tagstop ? 1 : 2)) begin
      failures++; $display("busy %0d cycles, expected %0d", busy_cycles, 2*nread + (tagstop ? 1 : 2));
    end
  endtask

  initial begin
    rst = 1; t1 = 0; ram_space = 8'd64;
    repeat (3) @(negedge clk);
    rst = 0;
    run_one(0, 64);
    for (int r = 0; r < 50; r++) run_one($urandom_range(1, 40), (r % 5 == 0) ? $urandom_range(1, 6) : 64);
    checks++;
    if (n_ovf == 0 || n_tagstop == 0 || n_emptystop == 0) begin
      failures++; $display("coverage ovf %0d tagstop %0d emptystop %0d", n_ovf, n_tagstop, n_emptystop);
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
