// tb_event_size: event size against the number of measures per T2, the
// relation the zero suppression is judged by.  The complete design (default
// parameters) is given events with exactly n = 0, 1, ..., 28 measures,
// spread over the channels, each event in a revolution of its own followed
// by an empty revolution, so that the selection window (current and previous
// revolution) holds exactly those n measures.  The events are read back over
// VME and, for each n, the trailer must report n measures and
// 2 + ceil(n/2) words, i.e. 16 + 8*ceil(n/2) bytes, and the block must hold
// exactly that many words.  The sizes are printed as a table.
`timescale 1ns/1ps
module tb_event_size;
  import het_pkg::*;
  localparam int N_CH = 32, REV = 518, NMAX = 28;

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
  int slot = 0;
  bit stim_done = 0, vme_ready = 0;

  task automatic step(int n = 1);
    repeat (n) begin #0.625; slot++; end
  endtask

  initial begin
    rst = 1; hit_in = '0; fiducial = 0; t1_in = 0; t2_in = 0; kloe_sig = 0;
    #1.55;
    step(40);
    rst = 0;
    wait (vme_ready);
    for (int n = 0; n <= NMAX; n++) begin
      for (int half = 0; half < 2; half++) begin
        automatic int F = slot;
        for (int s = 0; s < REV; s++) begin
          automatic int rel = slot - F;
          fiducial = (rel < 16);
          // event revolution: measure i on channel i % 32, bunch 3*(i / 32) + 10
          hit_in = '0;
          if (half == 0)
            for (int i = 0; i < n; i++) begin
              automatic int st = 20 + ((3 * (i / N_CH) + 10) * 432 + 50) / 100 + 4 * (i % 8);
              if (rel >= st && rel < st + 6) hit_in[i % N_CH] = 1'b1;
            end
          t1_in = (half == 0) && rel >= 470 && rel < 478;
          t2_in = (half == 0) && rel >= 500 && rel < 508;
          kloe_sig = 8'(n);
          step();
        end
      end
    end
    step(4 * 400);
    stim_done = 1;
  end

  task automatic beat(output logic [63:0] q);
    int t = 0;
    vme_write_n = 1;
    #7 vme_ds_n = 2'b00;
    while (vme_dtack_n && t < 200) begin #1; t++; end
    q = vme_dout;
    #3 vme_ds_n = 2'b11;
    t = 0;
    while (!vme_dtack_n && t < 200) begin #1; t++; end
    #5;
  endtask

  int ev_words = 0, n_seen = 0;
  task automatic take(logic [63:0] w);
    evt_trailer_t tr;
    if (w == '1) return;
    ev_words++;
    if (w[63:56] == TRL_ID) begin
      automatic int n = n_seen;
      automatic int exp_w = 2 + (n + 1) / 2;
      tr = w;
      checks++;
      if (int'(tr.n_meas) != n || int'(tr.n_words) != exp_w || ev_words != exp_w || tr.ovf) begin
        failures++;
        $display("n=%0d: trailer says %0d measures, %0d words; %0d words read; expected %0d words",
                 n, tr.n_meas, tr.n_words, ev_words, exp_w);
      end
      $display("measures per T2 %2d : event size %3d bytes", n, 8 * ev_words);
      ev_words = 0;
      n_seen++;
    end
  endtask

  initial begin
    logic [63:0] w;
    vme_as_n = 1; vme_ds_n = 2'b11; vme_write_n = 1; vme_am = 0; vme_addr = 0; vme_din = 0;
    #150;
    // enable acquisition (D32 write to CONTROL)
    vme_addr = 32'h1000_0000; vme_am = 6'h09; vme_din = 64'h1; vme_write_n = 0;
    #5 vme_as_n = 0;
    #7 vme_ds_n = 2'b00;
    wait (!vme_dtack_n);
    #3 vme_ds_n = 2'b11;
    wait (vme_dtack_n);
    vme_as_n = 1; vme_write_n = 1;
    #10 vme_ready = 1;
    while (!stim_done || n_seen <= NMAX) begin
      if (stim_done && n_seen <= NMAX && $realtime > 200000.0) break;
      vme_addr = 32'h1000_0000; vme_am = 6'h08;
      #5 vme_as_n = 0;
      beat(w);                              // address beat
      for (int i = 0; i < 16; i++) begin beat(w); take(w); end
      vme_as_n = 1;
      #100;
    end
    checks++;
    if (n_seen != NMAX + 1) begin failures++; $display("%0d events read, expected %0d", n_seen, NMAX + 1); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #300000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
