// tb_fsm_master: four channel lanes are modelled as queues of per-event
// words (measures then a channel trailer), offered with random delays, and
// the Data FIFO as a sink that is randomly full.  For every T2 the FIFO must
// receive, in order, the header (event number, KLOE word), the measures of
// channel 0..3 packed two per 64-bit word (earlier one in the upper half,
// odd one padded with zero), and the trailer (overflow, measure count, word
// count).  A channel word must never be taken while the FIFO is full.
`timescale 1ns/1ps
module tb_fsm_master;
  import het_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst, t2, fifo_we, fifo_full;
  logic [7:0] t2_info;
  chan_word_t ch_data [N];
  logic [N-1:0] ch_rdy, ch_ack;
  logic [63:0] fifo_wdata;
  logic [23:0] n_events;
  logic [31:0] n_evq_lost;
  int checks = 0, failures = 0, n_stall = 0, n_odd = 0, n_ovf = 0;

  fsm_master #(.N_CH(N), .EVQ_DEPTH(8), .KLOE_W(8)) dut (.*);

  always #1.25 clk = ~clk;

  chan_word_t cq [N][$];
  int pend [N];
  bit gate [N];
  logic [63:0] exp_q[$];

  always_comb
    for (int c = 0; c < N; c++) begin
      ch_rdy[c]  = gate[c] && pend[c] > 0 && cq[c].size() > 0;
      ch_data[c] = (cq[c].size() > 0) ? cq[c][0] : '0;
    end

  always @(posedge clk) if (!rst) begin
    for (int c = 0; c < N; c++) if (ch_ack[c]) begin
      checks++;
      if (!ch_rdy[c] || fifo_full) begin failures++; $display("%t ack ch %0d rdy %b full %b", $time, c, ch_rdy[c], fifo_full); end
      if (cq[c][0].kind == KIND_CTRL) pend[c]--;
      void'(cq[c].pop_front());
    end
    if (fifo_full) n_stall++;
    if (fifo_we) begin
      checks++;
      if (fifo_full || exp_q.size() == 0 || fifo_wdata !== exp_q[0]) begin
        failures++;
        if (failures < 10) $display("%t fifo %h expected %h (full %b)", $time, fifo_wdata, (exp_q.size() > 0) ? exp_q[0] : 64'h0, fifo_full);
      end
      if (exp_q.size() > 0) void'(exp_q.pop_front());
    end
  end

  always @(negedge clk) begin
    fifo_full = ($urandom_range(0, 5) == 0);
    for (int c = 0; c < N; c++) gate[c] = ($urandom_range(0, 2) != 0);
  end

  initial begin
    static int evno = 0;
    rst = 1; t2 = 0; t2_info = 0;
    for (int c = 0; c < N; c++) pend[c] = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int e = 0; e < 150; e++) begin
      automatic logic [7:0] k = 8'($urandom);
      automatic chan_word_t all[$];
      automatic bit ovf = 0;
      automatic int nw;
      evt_header_t h;
      evt_trailer_t tr;
      for (int c = 0; c < N; c++) begin
        automatic int n = ($urandom_range(0, 2) == 0) ? $urandom_range(1, 5) : 0;
        automatic bit o = ($urandom_range(0, 15) == 0);
        for (int i = 0; i < n; i++) begin
          automatic chan_word_t w = meas_word(4'($urandom_range(0, 1)), TIME_W'($urandom));
          w.chan = 5'(c);
          cq[c].push_back(w);
          all.push_back(w);
        end
        begin
          automatic chan_word_t t = ctrl_word(o, 16'(n));
          t.chan = 5'(c);
          cq[c].push_back(t);
        end
        ovf |= o;
      end
      if (ovf) n_ovf++;
      h = '0; h.id = HDR_ID; h.event_no = 24'(evno); h.kloe = k;
      exp_q.push_back(h);
      for (int i = 0; i < all.size(); i += 2)
        exp_q.push_back({all[i], (i + 1 < all.size()) ? all[i+1] : 32'h0});
      if (all.size() % 2 != 0) n_odd++;
      nw = 2 + (all.size() + 1) / 2;
      tr = '0; tr.id = TRL_ID; tr.event_no = 24'(evno); tr.ovf = ovf;
      tr.n_meas = 15'(all.size()); tr.n_words = 16'(nw);
      exp_q.push_back(tr);
      evno++;
      @(negedge clk);
      t2 = 1; t2_info = k;
      for (int c = 0; c < N; c++) pend[c]++;
      @(negedge clk);
      t2 = 0;
      repeat ($urandom_range(0, 30)) @(negedge clk);
    end
    repeat (1000) @(negedge clk);
    checks++;
    if (exp_q.size() != 0 || n_events != 24'(evno) || n_evq_lost != 0) begin
      failures++; $display("%0d words missing, events %0d of %0d", exp_q.size(), n_events, evno);
    end
    checks++;
    if (n_stall == 0 || n_odd == 0 || n_ovf == 0) begin failures++; $display("coverage"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #500000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
