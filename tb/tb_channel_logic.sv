// tb_channel_logic: one complete channel, from the analog-side input to the
// 32-bit lane.  A Fiducial starts every 60-cycle "revolution"; random hits
// fall in the middle of each revolution, and near its end a T1 is sent,
// followed by a T2 for most of them.  For every T2 the lane must deliver the
// measures of the current revolution (cycle index 0) and of the previous one
// (cycle index 1), newest first, then a trailer with their number; events
// without T2 must deliver nothing.  Times are checked to the 625 ps slot:
// a measure equals (slot of the first high sample - 4 * Fiducial cycle)
// plus one pipeline constant taken from the first measure.
`timescale 1ns/1ps
module tb_channel_logic;
  import het_pkg::*;
  localparam int CHAN = 5, FP = 60;   // Fiducial period in clk cycles
  logic clk, clk90, clk180, clk270, rst, hit, fiducial, t1, t2, data_rdy, ack, hit_strobe, busy;
  chan_word_t data;
  int checks = 0, failures = 0;
  int slot = 0, n_hits = 0, n_strobes = 0, n_words = 0, n_t2 = 0, n_not = 0;
  int offset; bit have_offset = 0;

  clk4_gen u_clk (.*);
  channel_logic #(.CHAN(CHAN), .NTAGS(2), .STACK_DEPTH(64), .RAM_DEPTH(16)) dut (.*);

  task automatic step(int n = 1);
    repeat (n) begin #0.625; slot++; end
  endtask

  int per_hits [$][$];       // per revolution: slot_rel of each hit, oldest first
  chan_word_t exp_q[$];

  always @(posedge clk) begin
    if (!rst && hit_strobe) n_strobes++;
    if (!rst && data_rdy && ack) begin
      n_words++;
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("unexpected word %h", data);
      end else begin
        automatic chan_word_t e = exp_q.pop_front();
        if (e.kind == KIND_MEAS) begin
          automatic int d = int'(data.value) - int'(e.value);
          if (!have_offset) begin offset = d; have_offset = 1; end
          e.value = 16'(int'(e.value) + offset);
        end
        if (data !== e) begin failures++; $display("word %h expected %h", data, e); end
      end
    end
  end

  always @(negedge clk) ack = ($urandom_range(0, 2) != 0);

  initial begin
    rst = 1; hit = 0; fiducial = 0; t1 = 0; t2 = 0;
    #1.55;                       // 0.3 ns into slot 0
    step(40);
    rst = 0;
    step(8);
    for (int p = 0; p < 40; p++) begin
      automatic int fid_cycle;
      automatic int start = slot;
      automatic int hits_p[$];
      // Fiducial at the start of the revolution
      fiducial = 1;
      fid_cycle = (slot + 1 + 3) / 4;
      step(16);
      fiducial = 0;
      step(40 - 16);                       // quiet 10 cycles
      // hits between cycles 10 and 48 of the revolution
      forever begin
        automatic int gap = $urandom_range(12, 60);
        if (slot + gap - start > 4 * 46) break;
        step(gap);
        hit = 1;
        hits_p.push_back((slot + 1) - 4 * fid_cycle);
        n_hits++;
        step(6);
        hit = 0;
      end
      per_hits.push_back(hits_p);
      while (slot - start < 4 * 52) step();
      // T1 at cycle 52: move to 2 slots after a clk edge
      while (slot % 4 != 2) step();
      t1 = 1; step(4); t1 = 0;
      if ($urandom_range(0, 3) != 0) begin
        // expected words of this event
        automatic int n = 0;
        for (int c = 0; c < 2 && p - c >= 0; c++)
          for (int i = per_hits[p-c].size() - 1; i >= 0; i--) begin
            automatic chan_word_t w = meas_word(4'(c), TIME_W'(per_hits[p-c][i]));
            w.chan = 5'(CHAN);
            exp_q.push_back(w);
            n++;
          end
        begin
          automatic chan_word_t w = ctrl_word(1'b0, 16'(n));
          w.chan = 5'(CHAN);
          exp_q.push_back(w);
        end
        step(4 * $urandom_range(0, 3));
        t2 = 1; step(4); t2 = 0;
        n_t2++;
      end else n_not++;
      while (slot - start < 4 * FP) step();
    end
    step(4 * 200);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d words never delivered", exp_q.size()); end
    checks++;
    if (n_strobes != n_hits) begin failures++; $display("strobes %0d hits %0d", n_strobes, n_hits); end
    checks++;
    if (n_t2 == 0 || n_not == 0) begin failures++; $display("coverage"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
