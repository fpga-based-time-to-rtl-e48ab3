// tb_het_daq_top: end-to-end run of the complete design with its default
// parameters (32 channels, 256 kB Data FIFO).
//
// The stimulus imitates the DAFNE machine on a 625 ps grid: a Fiducial
// every 518 slots (323.75 ns, one revolution of 120 bunches 2.7 ns apart),
// particle hits on random channels at bunch crossings 0..99, and KLOE
// triggers near the end of each revolution: T1 followed by T2 (normal
// event), T1 without T2 (event dropped), a second T1 while the Data
// Selectors are still busy (T1 lost), a T2 with no T1 (orphan), and two
// revolutions in which channel 7 fires at every third bunch so that its
// RAM buffer overflows.  A VME master reads the FIFO level with D32 cycles
// and drains the Data FIFO with MBLT block transfers while data are taken.
// Every event read back is compared word by word with the model: header
// (event number, KLOE word), the measures of the current and the previous
// revolution per channel (newest first, channel, cycle index, time to the
// slot, with one pipeline constant taken from the first measure), the
// overflow bit and the counts in the trailer.  At the end the trigger
// counters and all 32 scalers are read over VME and compared, and every
// mechanism above must have happened at least once.
`timescale 1ns/1ps
module tb_het_daq_top;
  import het_pkg::*;
  localparam int N_CH = 32, REV = 518, NREV = 26, RAMD = 64;

  logic clk, clk90, clk180, clk270, rst;
  logic [N_CH-1:0] hit_in;
  logic fiducial, t1_in, t2_in;
  logic [7:0] kloe_sig;
  logic vme_as_n, vme_write_n, vme_dout_en, vme_dtack_n;
  logic [1:0] vme_ds_n;
  logic [5:0] vme_am;
  logic [31:0] vme_addr;
  logic [63:0] vme_din, vme_dout;

  clk4_gen u_clk (.*);
  het_daq_top dut (.*);

  int checks = 0, failures = 0;
  int n_hits_total = 0, n_events_ok = 0, n_t1_sent_lost = 0, n_rollback = 0, n_orphan = 0;
  int n_ovf_seen = 0, n_empty_words = 0, n_t1_acc = 0, n_t2_acc = 0;
  int ch_hits [N_CH];
  int slot = 0;

  task automatic step(int n = 1);
    repeat (n) begin #0.625; slot++; end
  endtask

  // hits of each revolution: slot_rel per channel, oldest first
  int rev_hits [NREV][N_CH][$];
  int pulse_end [N_CH];
  // expected FIFO stream; measure values hold slot_rel
  logic [63:0] exp_q[$];
  bit stim_done = 0;

  function automatic chan_word_t cw_meas(int c, int cyc, int rel);
    chan_word_t w = meas_word(4'(cyc), TIME_W'(rel));
    w.chan = 5'(c);
    return w;
  endfunction

  task automatic expect_event(int p, int evno, logic [7:0] k);
    chan_word_t all[$];
    bit ovf = 0;
    evt_header_t h;
    evt_trailer_t tr;
    for (int c = 0; c < N_CH; c++) begin
      chan_word_t l[$];
      for (int cy = 0; cy < 2 && p - cy >= 0; cy++)
        for (int i = rev_hits[p-cy][c].size() - 1; i >= 0; i--)
          l.push_back(cw_meas(c, cy, rev_hits[p-cy][c][i]));
      if (l.size() > RAMD - 1) begin ovf = 1; l = l[0:RAMD-2]; end
      foreach (l[i]) all.push_back(l[i]);
    end
    h = '0; h.id = HDR_ID; h.event_no = 24'(evno); h.kloe = k;
    exp_q.push_back(h);
    for (int i = 0; i < all.size(); i += 2)
      exp_q.push_back({all[i], (i + 1 < all.size()) ? all[i+1] : 32'h0});
    tr = '0; tr.id = TRL_ID; tr.event_no = 24'(evno); tr.ovf = ovf;
    tr.n_meas = 15'(all.size()); tr.n_words = 16'(2 + (all.size() + 1) / 2);
    exp_q.push_back(tr);
  endtask

  // ---------------- stimulus: machine, detector, triggers ----------------
  initial begin
    static int evno = 0;
    static int prev_kind = 0;
    rst = 1; hit_in = '0; fiducial = 0; t1_in = 0; t2_in = 0; kloe_sig = 0;
    foreach (pulse_end[c]) pulse_end[c] = 0;
    foreach (ch_hits[c]) ch_hits[c] = 0;
    #1.55;                                   // 0.3 ns into slot 0
    step(40);
    rst = 0;
    wait (vme_ready);
    while (slot % 4 != 0) step();
    for (int p = 0; p < NREV; p++) begin
      automatic int F = slot;
      automatic int fid_cycle = (F + 1 + 3) / 4;
      automatic int hit_at [N_CH][$];        // absolute start slots
      automatic bit dense = (p == 10 || p == 11);
      automatic int kind;                    // 0 normal, 1 no T2, 2 lost T1, 3 orphan first, 4 none
      automatic logic [7:0] k = 8'($urandom);
      if (p == 12) kind = 4;
      else if (p >= 2 && p % 5 == 3) kind = 1;
      else if (p >= 2 && p % 6 == 4) kind = 2;
      else if (p >= 2 && p % 7 == 5 && prev_kind != 1) kind = 3;
      else kind = 0;
      // choose the hits of this revolution
      for (int c = 0; c < N_CH; c++) begin
        automatic int b = (dense && c == 7) ? 0 : $urandom_range(0, 30);
        while (b < 100) begin
          if (dense && c == 7) begin
            hit_at[c].push_back(F + 20 + (b * 432 + 50) / 100); b += 3;
          end else if ($urandom_range(0, 9) == 0) begin
            hit_at[c].push_back(F + 20 + (b * 432 + 50) / 100); b += $urandom_range(3, 40);
          end else b += $urandom_range(3, 40);
        end
        foreach (hit_at[c][i]) begin
          rev_hits[p][c].push_back(hit_at[c][i] + 1 - 4 * fid_cycle);
          ch_hits[c]++; n_hits_total++;
        end
      end
      // walk through the revolution slot by slot
      for (int s = 0; s < REV; s++) begin
        automatic int rel = slot - F;
        fiducial = (rel < 16);
        for (int c = 0; c < N_CH; c++) begin
          if (hit_at[c].size() > 0 && hit_at[c][0] == slot) begin
            hit_in[c] = 1; pulse_end[c] = slot + 6; void'(hit_at[c].pop_front());
          end else if (slot >= pulse_end[c]) hit_in[c] = 0;
        end
        // triggers
        if (kind == 3) t2_in = (rel >= 100 && rel < 108);
        if (kind != 4) t1_in = (rel >= 470 && rel < 478) || (kind == 2 && rel >= 486 && rel < 494);
        if (kind == 0 || kind == 2 || kind == 3) begin
          if (rel == 496) kloe_sig = k;
          t2_in = t2_in | (rel >= 500 && rel < 508);
          if (rel == 508) t2_in = 0;
        end
        if (rel == 108) t2_in = 0;
        step();
      end
      prev_kind = kind;
      if (kind == 3) n_orphan++;
      if (kind == 2) n_t1_sent_lost++;
      if (kind == 1) n_rollback++;
      if (kind != 4) n_t1_acc++;
      if (kind == 0 || kind == 2 || kind == 3) begin
        expect_event(p, evno, k); evno++; n_t2_acc++;
      end
    end
    step(4 * 400);
    stim_done = 1;
  end

  // ---------------- VME master ----------------
  bit vme_ready = 0;

  task automatic beat(input logic wr, input logic [63:0] d, output logic [63:0] q, output bit acked);
    int t = 0;
    vme_write_n = !wr; vme_din = d;
    #7 vme_ds_n = 2'b00;
    while (vme_dtack_n && t < 200) begin #1; t++; end
    acked = !vme_dtack_n;
    q = vme_dout;
    #3 vme_ds_n = 2'b11;
    t = 0;
    while (!vme_dtack_n && t < 200) begin #1; t++; end
    #5;
  endtask

  task automatic d32(input logic wr, input logic [11:0] off, input logic [31:0] d, output logic [31:0] q);
    logic [63:0] q64;
    bit acked;
    vme_addr = {8'h10, 12'h000, off}; vme_am = 6'h09;
    #5 vme_as_n = 0;
    beat(wr, {32'h0, d}, q64, acked);
    q = q64[31:0];
    vme_as_n = 1;
    #10;
    checks++;
    if (!acked) begin failures++; $display("D32 at %h not acknowledged", off); end
  endtask

  // compare one 64-bit FIFO word with the model
  int offset; bit have_offset = 0;
  function automatic bit half_ok(chan_word_t g, chan_word_t e);
    if (e.kind != KIND_MEAS) return g === e;
    if (!have_offset) begin offset = int'(g.value) - int'(e.value); have_offset = 1; end
    e.value = 16'(int'(e.value) + offset);
    return g === e;
  endfunction

  task automatic check_word(logic [63:0] w);
    logic [63:0] e;
    bit ok;
    if (w == '1) begin n_empty_words++; return; end
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("extra FIFO word %h", w); return; end
    e = exp_q.pop_front();
    if (e[63:56] == HDR_ID || e[63:56] == TRL_ID) ok = (w === e);
    else ok = half_ok(w[63:32], e[63:32]) && half_ok(w[31:0], e[31:0]);
    if (!ok) begin
      failures++;
      if (failures < 12) $display("FIFO word %h expected %h (pipeline offset %0d)", w, e, offset);
    end
    if (e[63:56] == TRL_ID) begin
      if (e[31]) n_ovf_seen++;
      if (ok) n_events_ok++;
    end
  endtask

  initial begin
    logic [31:0] r;
    logic [63:0] w;
    bit acked;
    vme_as_n = 1; vme_ds_n = 2'b11; vme_write_n = 1; vme_am = 0; vme_addr = 0; vme_din = 0;
    #150;
    d32(1'b1, 12'h000, 32'h3, r);            // enable, clear scalers
    vme_ready = 1;
    forever begin
      d32(1'b0, 12'h008, 32'h0, r);          // FIFO level
      if (r == 0 && stim_done) break;
      if (r != 0) begin
        // MBLT of the words present plus one more, which must come back empty
        automatic int n = (r > 64) ? 64 : int'(r) + 1;
        vme_addr = 32'h1000_0000; vme_am = 6'h08;
        #5 vme_as_n = 0;
        beat(1'b0, 64'h0, w, acked);         // address beat
        for (int i = 0; i < n; i++) begin
          beat(1'b0, 64'h0, w, acked);
          check_word(w);
        end
        vme_as_n = 1;
        #10;
      end else #200;
    end
    // counters and scalers
    d32(1'b0, 12'h00C, 0, r); checks++; if (r != 32'(n_t1_acc)) begin failures++; $display("N_T1 %0d expected %0d", r, n_t1_acc); end
    d32(1'b0, 12'h010, 0, r); checks++; if (r != 32'(n_t1_sent_lost)) begin failures++; $display("N_T1_LOST %0d expected %0d", r, n_t1_sent_lost); end
    d32(1'b0, 12'h014, 0, r); checks++; if (r != 32'(n_t2_acc)) begin failures++; $display("N_T2 %0d expected %0d", r, n_t2_acc); end
    d32(1'b0, 12'h018, 0, r); checks++; if (r != 32'(n_orphan)) begin failures++; $display("N_T2_ORPH %0d expected %0d", r, n_orphan); end
    d32(1'b0, 12'h01C, 0, r); checks++; if (r != 32'(n_t2_acc)) begin failures++; $display("N_EVENTS %0d expected %0d", r, n_t2_acc); end
    for (int c = 0; c < N_CH; c++) begin
      d32(1'b0, 12'h100 + 12'(4*c), 0, r);
      checks++;
      if (r != 32'(ch_hits[c])) begin failures++; $display("scaler %0d = %0d expected %0d", c, r, ch_hits[c]); end
    end
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d FIFO words never read", exp_q.size()); end
    $display("hits %0d, events %0d, T1 lost %0d, T1 without T2 %0d, orphan T2 %0d, overflow events %0d, empty MBLT words %0d",
             n_hits_total, n_events_ok, n_t1_sent_lost, n_rollback, n_orphan, n_ovf_seen, n_empty_words);
    checks++;
    if (n_hits_total == 0 || n_events_ok == 0 || n_t1_sent_lost == 0 || n_rollback == 0 ||
        n_orphan == 0 || n_ovf_seen == 0 || n_empty_words == 0) begin
      failures++; $display("a mechanism never happened");
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
