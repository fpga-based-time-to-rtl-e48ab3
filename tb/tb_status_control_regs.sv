// tb_status_control_regs: writes the control register, reads back every
// mapped register with random status inputs and scaler values, and checks
// that the scaler-clear bit gives a one-cycle pulse and reads back as 0.
`timescale 1ns/1ps
module tb_status_control_regs;
  localparam int N = 32;
  logic clk = 0, rst, reg_wr, enable, scaler_clear, fifo_valid, fifo_full;
  logic [11:0] reg_addr;
  logic [31:0] reg_wdata, reg_rdata, fifo_count, n_t1, n_t1_lost, n_t2, n_t2_orphan, n_events, n_evq_lost;
  logic [31:0] scaler_counts [N];
  int checks = 0, failures = 0, n_clr = 0;

  status_control_regs #(.N_CH(N)) dut (.*);

  always #1.25 clk = ~clk;
  always @(posedge clk) if (scaler_clear) n_clr++;

  task automatic expect_reg(logic [11:0] a, logic [31:0] v);
    reg_addr = a;
    #0.1;
    checks++;
    if (reg_rdata !== v) begin failures++; $display("reg %h = %h expected %h", a, reg_rdata, v); end
  endtask

  initial begin
    rst = 1; reg_wr = 0; reg_addr = 0; reg_wdata = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int r = 0; r < 30; r++) begin
      automatic bit en = 1'($urandom);
      fifo_valid = 1'($urandom); fifo_full = 1'($urandom);
      fifo_count = $urandom; n_t1 = $urandom; n_t1_lost = $urandom; n_t2 = $urandom;
      n_t2_orphan = $urandom; n_events = $urandom; n_evq_lost = $urandom;
      foreach (scaler_counts[c]) scaler_counts[c] = $urandom;
      @(negedge clk);
      reg_wr = 1; reg_addr = 12'h000; reg_wdata = {30'h0, 1'b1, en};
      @(negedge clk);
      reg_wr = 0;
      checks++;
      if (enable !== en || scaler_clear !== 1'b1) begin failures++; $display("enable %b clear %b", enable, scaler_clear); end
      @(negedge clk);
      checks++;
      if (scaler_clear !== 1'b0) begin failures++; $display("clear not a pulse"); end
      expect_reg(12'h000, {31'h0, en});
      expect_reg(12'h004, {29'h0, en, fifo_full, fifo_valid});
      expect_reg(12'h008, fifo_count);
      expect_reg(12'h00C, n_t1);
      expect_reg(12'h010, n_t1_lost);
      expect_reg(12'h014, n_t2);
      expect_reg(12'h018, n_t2_orphan);
      expect_reg(12'h01C, n_events);
      expect_reg(12'h020, n_evq_lost);
      for (int c = 0; c < N; c++) expect_reg(12'h100 + 12'(4*c), scaler_counts[c]);
      expect_reg(12'h300, 32'h0);
    end
    checks++;
    if (n_clr != 30) begin failures++; $display("%0d clear pulses", n_clr); end
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
