// het_daq_top: 32-channel TDC and data acquisition for the KLOE-2 High
// Energy Tagger, as one FPGA design.
//
// Every channel input is time-stamped by a 4xOversampling TDC (625 ps LSB at
// 400 MHz) relative to the machine Fiducial and kept in that channel's Stack
// buffer.  A first-level trigger T1 makes every channel's Data Selector copy
// the measures of the most recent Fiducial cycles into its RAM buffer; the
// second-level trigger T2 confirms them, and the FSM Master then gathers
// channels 0..N_CH-1 into one event in the 256 kB Data FIFO, which is read
// over VME with 64-bit block transfers.  The Trigger Manager conditions T1
// and T2; Status and Control Registers and a per-channel scaler are reached
// with VME D32 cycles.
//
// Clocks: clk and its 90/180/270-degree copies (400 MHz), supplied from
// outside (on the FPGA by a clock manager).  All logic except the sampling
// flip-flops runs on clk, with synchronous active-high rst.  T1, T2, the
// Fiducial, the KLOE signals and the VME strobes are asynchronous and are
// synchronised inside.  The VME data lines are split into din/dout/dout_en
// for the external bus drivers.
module het_daq_top
  import het_pkg::*;
#(
  parameter int unsigned N_CH        = 32,
  parameter int unsigned NTAGS       = 2,
  parameter int unsigned STACK_DEPTH = 1024,
  parameter int unsigned RAM_DEPTH   = 64,
  parameter int unsigned FIFO_DEPTH  = 32768,
  parameter int unsigned EVQ_DEPTH   = 8,
  parameter int unsigned KLOE_W      = 8,
  parameter logic [7:0]  VME_BASE    = 8'h10
) (
  input  logic              clk,
  input  logic              clk90,
  input  logic              clk180,
  input  logic              clk270,
  input  logic              rst,
  input  logic [N_CH-1:0]   hit_in,
  input  logic              fiducial,
  input  logic              t1_in,
  input  logic              t2_in,
  input  logic [KLOE_W-1:0] kloe_sig,
  input  logic              vme_as_n,
  input  logic [1:0]        vme_ds_n,
  input  logic              vme_write_n,
  input  logic [5:0]        vme_am,
  input  logic [31:0]       vme_addr,
  input  logic [63:0]       vme_din,
  output logic [63:0]       vme_dout,
  output logic              vme_dout_en,
  output logic              vme_dtack_n
);

  localparam int unsigned FAW = $clog2(FIFO_DEPTH);

  logic              t1, t2;
  logic [KLOE_W-1:0] t2_info;
  logic [31:0]       n_t1, n_t1_lost, n_t2, n_t2_orphan, n_evq_lost;
  logic [23:0]       n_events;
  logic [N_CH-1:0]   ch_busy, ch_rdy, ch_ack, ch_hit;
  chan_word_t        ch_data [N_CH];
  logic              enable, scaler_clear;
  logic [31:0]       counts [N_CH];
  logic              fifo_we, fifo_full, fifo_rd, fifo_valid;
  logic [63:0]       fifo_wdata, fifo_rdata;
  logic [FAW+1:0]    fifo_count;
  logic              reg_wr;
  logic [11:0]       reg_addr;
  logic [31:0]       reg_wdata, reg_rdata;

  trigger_manager #(.KLOE_W(KLOE_W)) u_trig (
    .clk, .rst, .t1_in, .t2_in, .kloe_sig, .enable, .busy(|ch_busy),
    .t1, .t2, .t2_info, .n_t1, .n_t1_lost, .n_t2, .n_t2_orphan
  );

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    channel_logic #(
      .CHAN(c), .NTAGS(NTAGS), .STACK_DEPTH(STACK_DEPTH), .RAM_DEPTH(RAM_DEPTH)
    ) u_ch (
      .clk, .clk90, .clk180, .clk270, .rst,
      .hit(hit_in[c]), .fiducial, .t1, .t2,
      .data(ch_data[c]), .data_rdy(ch_rdy[c]), .ack(ch_ack[c]),
      .hit_strobe(ch_hit[c]), .busy(ch_busy[c])
    );
  end

  fsm_master #(.N_CH(N_CH), .EVQ_DEPTH(EVQ_DEPTH), .KLOE_W(KLOE_W)) u_master (
    .clk, .rst, .t2, .t2_info,
    .ch_data, .ch_rdy, .ch_ack,
    .fifo_we, .fifo_wdata, .fifo_full,
    .n_events, .n_evq_lost
  );

  data_fifo #(.DEPTH(FIFO_DEPTH), .WIDTH(64)) u_fifo (
    .clk, .rst,
    .we(fifo_we), .wdata(fifo_wdata), .full(fifo_full),
    .rd(fifo_rd), .rdata(fifo_rdata), .valid(fifo_valid), .count(fifo_count)
  );

  scaler #(.N_CH(N_CH)) u_scaler (
    .clk, .rst, .hits(ch_hit), .clear(scaler_clear), .counts
  );

  status_control_regs #(.N_CH(N_CH)) u_regs (
    .clk, .rst, .reg_wr, .reg_addr, .reg_wdata, .reg_rdata,
    .enable, .scaler_clear,
    .fifo_valid, .fifo_full, .fifo_count(32'(fifo_count)),
    .n_t1, .n_t1_lost, .n_t2, .n_t2_orphan,
    .n_events(32'(n_events)), .n_evq_lost,
    .scaler_counts(counts)
  );

  vme_slave #(.BASE(VME_BASE)) u_vme (
    .clk, .rst,
    .as_n(vme_as_n), .ds_n(vme_ds_n), .write_n(vme_write_n), .am(vme_am),
    .addr(vme_addr), .din(vme_din), .dout(vme_dout), .dout_en(vme_dout_en),
    .dtack_n(vme_dtack_n),
    .reg_wr, .reg_addr, .reg_wdata, .reg_rdata,
    .fifo_rd, .fifo_rdata, .fifo_valid
  );

endmodule
