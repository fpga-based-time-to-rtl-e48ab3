// tb_tdc: places Fiducial and hit edges at known quarter-period slots and
// checks every measure: fine = slot index of the first high sample modulo
// 4, and {coarse, fine} grows by exactly one per 625 ps slot between the
// Fiducial and the hit (one fixed pipeline offset, taken from the first
// hit, is allowed).  Also checks one data_rdy per hit and one fid_pulse per
// Fiducial, and that the coarse count restarts at every Fiducial.
`timescale 1ns/1ps
module tb_tdc;
  import het_pkg::*;
  logic clk, clk90, clk180, clk270, rst, hit, fiducial;
  logic data_rdy, fid_pulse;
  logic [TIME_W-1:0] data;
  int checks = 0, failures = 0;
  int n_hits = 0, n_meas = 0, n_fid = 0, n_fidp = 0;
  int exp_q[$];        // expected slot distance hit - fiducial edge cycle*4
  int offset;
  bit have_offset = 0;
  int slot = 0;        // current quarter slot index
  int fid_cycle;       // clk cycle index in which the fiducial is sampled high

  clk4_gen u_clk (.*);
  tdc dut (.*);

  task automatic wait_slots(int n);
    repeat (n) begin #0.625; slot++; end
  endtask

  initial begin
    rst = 1; hit = 0; fiducial = 0;
    #1.25; #0.3;                 // 0.3 ns into slot 0
    wait_slots(40);
    rst = 0;
    wait_slots(8);
    for (int f = 0; f < 12; f++) begin
      // Fiducial edge in this slot: first sampled at boundary slot+1,
      // i.e. by the clk edge of cycle ceil((slot+1)/4)
      fiducial = 1;
      fid_cycle = (slot + 1 + 3) / 4;
      n_fid++;
      wait_slots(8);
      fiducial = 0;
      for (int h = 0; h < 6; h++) begin
        wait_slots($urandom_range(12, 40));
        hit = 1;
        exp_q.push_back((slot + 1) - 4 * fid_cycle);
        n_hits++;
        wait_slots(6);
        hit = 0;
      end
      wait_slots(20);
    end
    wait_slots(40);
    checks++;
    if (n_meas != n_hits) begin failures++; $display("measures %0d hits %0d", n_meas, n_hits); end
    checks++;
    if (n_fidp != n_fid) begin failures++; $display("fid pulses %0d fiducials %0d", n_fidp, n_fid); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (!rst && fid_pulse) n_fidp++;
    if (!rst && data_rdy) begin
      automatic int e;
      n_meas++;
      if (exp_q.size() == 0) begin
        failures++; checks++;
        $display("unexpected measure %0d", data);
      end else begin
        e = exp_q.pop_front();
        checks++;
        if (data[1:0] != 2'(e)) begin
          failures++; $display("fine %0d expected %0d", data[1:0], 2'(e));
        end
        if (!have_offset) begin
          offset = int'(data) - e; have_offset = 1;
        end else begin
          checks++;
          if (int'(data) - e != offset) begin
            failures++; $display("time %0d expected %0d", data, e + offset);
          end
        end
      end
    end
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
