// tb_stack_buffer: random measures and Fiducials are pushed while read-backs
// run (with a 16-word ring, so that the ring wraps and read-backs are cut by
// overwriting).  A model keeps the full history of pushed words; a read-back
// must return the newest words first, exactly as pushed, stop (empty) where
// the model says the remaining words have been overwritten, and a measure
// coinciding with a Fiducial must precede its tag.
`timescale 1ns/1ps
module tb_stack_buffer;
  import het_pkg::*;
  localparam int DEPTH = 16;
  logic clk = 0, rst, data_rdy, fiducial, snapshot, pop, dout_valid, empty;
  logic [TIME_W-1:0] data_in;
  stack_word_t dout;
  int checks = 0, failures = 0;
  int n_ovw_cut = 0, n_coinc = 0;

  stack_buffer #(.DEPTH(DEPTH)) dut (.*);

  always #1.25 clk = ~clk;

  // model
  stack_word_t hist[$];
  int lo = 0, hi = -1;     // unread read-back region, indices into hist
  bit pend = 0;
  int seq = 0;
  bit exp_valid = 0;
  stack_word_t exp_word;

  always @(posedge clk) if (!rst) begin
    automatic bit        pushed = 0;
    automatic stack_word_t w = '0;
    automatic int        total = hist.size();
    // check the word popped in the previous cycle
    checks++;
    if (dout_valid !== exp_valid || (exp_valid && dout !== exp_word)) begin
      failures++;
      if (failures < 10) $display("%t dout_valid %b dout %h expected %b %h", $time, dout_valid, dout, exp_valid, exp_word);
    end
    checks++;
    if (empty !== !(lo <= hi)) begin
      failures++;
      if (failures < 10) $display("%t empty %b model region %0d..%0d", $time, empty, lo, hi);
    end
    // this cycle's push
    if (data_rdy) begin
      pushed = 1; w.is_tag = 0; w.payload = SEQ_W'(data_in);
      if (fiducial) n_coinc++;
    end else if (fiducial || pend) begin
      pushed = 1; w.is_tag = 1; w.payload = SEQ_W'(seq); seq++;
    end
    pend = data_rdy && (fiducial || pend);
    // read-back
    exp_valid = 0;
    if (snapshot) begin
      lo = (total > DEPTH) ? total - DEPTH : 0;
      hi = total - 1;
    end else if (pop && lo <= hi) begin
      exp_valid = 1; exp_word = hist[hi]; hi--;
    end
    if (pushed) begin
      if (total >= DEPTH && lo <= hi && total - DEPTH == lo) begin lo++; n_ovw_cut++; end
      hist.push_back(w);
    end
  end

  int last_fid = 0;
  initial begin
    rst = 1; data_rdy = 0; fiducial = 0; snapshot = 0; pop = 0; data_in = '0;
    repeat (4) @(negedge clk);
    rst = 0;
    for (int r = 0; r < 60; r++) begin
      // fill phase
      repeat ($urandom_range(5, 40)) begin
        @(negedge clk);
        data_rdy = ($urandom_range(0, 2) == 0);
        data_in  = TIME_W'($urandom);
        fiducial = (last_fid > 3) && ($urandom_range(0, 5) == 0);
        last_fid = fiducial ? 0 : last_fid + 1;
        snapshot = 0; pop = 0;
      end
      @(negedge clk);
      data_rdy = 0; fiducial = 0; snapshot = 1; pop = 0;
      // read-back phase with concurrent pushes
      for (int k = 0; k < 40; k++) begin
        @(negedge clk);
        snapshot = 0;
        pop      = ($urandom_range(0, 3) != 0);
        data_rdy = (r % 2 == 0) ? ($urandom_range(0, 1) == 0) : 1'b0;
        data_in  = TIME_W'($urandom);
        fiducial = (last_fid > 3) && ($urandom_range(0, 7) == 0);
        last_fid = fiducial ? 0 : last_fid + 1;
      end
    end
    @(negedge clk);
    data_rdy = 0; fiducial = 0; pop = 0;
    repeat (2) @(negedge clk);
    checks++;
    if (n_ovw_cut == 0 || n_coinc == 0) begin
      failures++; $display("coverage: cuts %0d coincidences %0d", n_ovw_cut, n_coinc);
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
