// tb_trigger_manager: sends T1 and T2 pulses with random enable, busy and
// KLOE words (held steady around each pulse).  A T1 must give exactly one t1
// pulse, three clk edges after the input rises, if and only if acquisition
// is enabled and no channel is busy; a T2 must give a t2 pulse (with the
// KLOE word on t2_info) only after an accepted T1 and at most once per T1.
// The four counters are compared with the model at the end.
`timescale 1ns/1ps
module tb_trigger_manager;
  logic clk = 0, rst, t1_in, t2_in, enable, busy, t1, t2;
  logic [7:0] kloe_sig, t2_info;
  logic [31:0] n_t1, n_t1_lost, n_t2, n_t2_orphan;
  int checks = 0, failures = 0;
  int m_t1 = 0, m_t1_lost = 0, m_t2 = 0, m_t2_orphan = 0;
  bit armed = 0;
  int seen_t1, seen_t2;

  trigger_manager #(.KLOE_W(8)) dut (.*);

  always #1.25 clk = ~clk;

  always @(posedge clk) begin
    if (t1) seen_t1++;
    if (t2) seen_t2++;
  end

  task automatic pulse_t1(bit en, bit bz);
    int n_prev;
    @(negedge clk);
    enable = en; busy = bz;
    repeat (2) @(negedge clk);
    n_prev = seen_t1;
    t1_in = 1;
    repeat (3) @(posedge clk);
    #0.1;
    checks++;
    if (t1 !== (en && !bz)) begin failures++; $display("t1 %b expected %b (latency)", t1, en && !bz); end
    repeat (3) @(negedge clk);
    t1_in = 0;
    repeat (4) @(negedge clk);
    checks++;
    if (seen_t1 - n_prev != int'(en && !bz)) begin failures++; $display("t1 pulses %0d", seen_t1 - n_prev); end
    if (en && !bz) begin m_t1++; armed = 1; end else m_t1_lost++;
    busy = 0;
  endtask

  task automatic pulse_t2(logic [7:0] k);
    int n_prev;
    bit exp;
    @(negedge clk);
    kloe_sig = k;
    repeat (3) @(negedge clk);
    n_prev = seen_t2;
    exp = armed;
    t2_in = 1;
    repeat (3) @(posedge clk);
    #0.1;
    checks++;
    if (t2 !== exp || (exp && t2_info !== k)) begin failures++; $display("t2 %b info %h expected %b %h", t2, t2_info, exp, k); end
    repeat (3) @(negedge clk);
    t2_in = 0;
    repeat (4) @(negedge clk);
    checks++;
    if (seen_t2 - n_prev != int'(exp)) begin failures++; $display("t2 pulses %0d", seen_t2 - n_prev); end
    if (exp) begin m_t2++; armed = 0; end else m_t2_orphan++;
  endtask

  initial begin
    rst = 1; t1_in = 0; t2_in = 0; enable = 0; busy = 0; kloe_sig = 0;
    seen_t1 = 0; seen_t2 = 0;
    repeat (4) @(negedge clk);
    rst = 0;
    for (int i = 0; i < 200; i++) begin
      case ($urandom_range(0, 3))
        0, 1: pulse_t1($urandom_range(0, 5) != 0, $urandom_range(0, 4) == 0);
        default: pulse_t2(8'($urandom));
      endcase
    end
    checks++;
    if (n_t1 != m_t1 || n_t1_lost != m_t1_lost || n_t2 != m_t2 || n_t2_orphan != m_t2_orphan) begin
      failures++;
      $display("counters %0d %0d %0d %0d model %0d %0d %0d %0d", n_t1, n_t1_lost, n_t2, n_t2_orphan, m_t1, m_t1_lost, m_t2, m_t2_orphan);
    end
    checks++;
    if (m_t1 == 0 || m_t1_lost == 0 || m_t2 == 0 || m_t2_orphan == 0) begin failures++; $display("coverage"); end
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
