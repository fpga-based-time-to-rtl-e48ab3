// status_control_regs: the registers seen by VME D32 single cycles.
//
// Register map (byte offsets inside the board's A32 space):
//   0x000 CONTROL  rw  bit 0 acquisition enable (T1 accepted only when 1)
//                      bit 1 write 1: clear the scalers (reads 0)
//   0x004 STATUS   r   bit 0 Data FIFO has data, bit 1 Data FIFO full,
//                      bit 2 acquisition enabled
//   0x008 FIFO_CNT r   64-bit words held in the Data FIFO
//   0x00C N_T1     r   accepted T1
//   0x010 N_T1_LOST r  T1 rejected (busy or disabled)
//   0x014 N_T2     r   accepted T2
//   0x018 N_T2_ORPH r  T2 with no T1 before it
//   0x01C N_EVENTS r   events completed in the Data FIFO
//   0x020 N_EVQ_LOST r T2 lost because the FSM Master's queue was full
//   0x100 + 4*c    r   scaler of channel c
// Unmapped offsets read 0.  reg_rdata is combinational from reg_addr;
// writes take effect on the clock edge of reg_wr.  The map is this design's
// own.
module status_control_regs #(
  parameter int unsigned N_CH = 32
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        reg_wr,
  input  logic [11:0] reg_addr,
  input  logic [31:0] reg_wdata,
  output logic [31:0] reg_rdata,
  output logic        enable,
  output logic        scaler_clear,
  input  logic        fifo_valid,
  input  logic        fifo_full,
  input  logic [31:0] fifo_count,
  input  logic [31:0] n_t1,
  input  logic [31:0] n_t1_lost,
  input  logic [31:0] n_t2,
  input  logic [31:0] n_t2_orphan,
  input  logic [31:0] n_events,
  input  logic [31:0] n_evq_lost,
  input  logic [31:0] scaler_counts [N_CH]
);

  always_ff @(posedge clk) begin
    if (rst) begin
      enable       <= 1'b0;
      scaler_clear <= 1'b0;
    end else begin
      scaler_clear <= 1'b0;
      if (reg_wr && reg_addr == 12'h000) begin
        enable       <= reg_wdata[0];
        scaler_clear <= reg_wdata[1];
      end
    end
  end

  always_comb begin
    reg_rdata = '0;
    unique case (reg_addr)
      12'h000: reg_rdata = {31'b0, enable};
      12'h004: reg_rdata = {29'b0, enable, fifo_full, fifo_valid};
      12'h008: reg_rdata = fifo_count;
      12'h00C: reg_rdata = n_t1;
      12'h010: reg_rdata = n_t1_lost;
      12'h014: reg_rdata = n_t2;
      12'h018: reg_rdata = n_t2_orphan;
      12'h01C: reg_rdata = n_events;
      12'h020: reg_rdata = n_evq_lost;
      default:
        if (reg_addr[11:8] == 4'h1 && 32'(reg_addr[7:2]) < N_CH)
          reg_rdata = scaler_counts[5'(reg_addr[7:2])];
    endcase
  end

endmodule
