// channel_logic: the read-out chain of one TDC channel (replicated 32 times).
//
// TDC -> Stack buffer -> Data Selector -> RAM buffer -> Channel to Master
// Interface, as in the block scheme of the system.  T1 starts the Data
// Selector (and rolls back an unconfirmed RAM buffer selection); T2 commits
// the RAM buffer and is counted by the Channel to Master Interface.  The
// output is one 32-bit lane with data_rdy/ack towards the FSM Master.
// hit_strobe (one clk cycle per measure) feeds the scaler; busy is the Data
// Selector's busy.  All logic runs on clk; clk90/180/270 only clock the
// sampling flip-flops.
module channel_logic
  import het_pkg::*;
#(
  parameter int unsigned CHAN        = 0,
  parameter int unsigned NTAGS       = 2,
  parameter int unsigned STACK_DEPTH = 1024,
  parameter int unsigned RAM_DEPTH   = 64
) (
  input  logic       clk,
  input  logic       clk90,
  input  logic       clk180,
  input  logic       clk270,
  input  logic       rst,
  input  logic       hit,
  input  logic       fiducial,
  input  logic       t1,
  input  logic       t2,
  output chan_word_t data,
  output logic       data_rdy,
  input  logic       ack,
  output logic       hit_strobe,
  output logic       busy
);

  localparam int unsigned RW = $clog2(RAM_DEPTH) + 1;

  logic              tdc_rdy, fid_pulse;
  logic [TIME_W-1:0] tdc_data;
  logic              snapshot, pop, stk_valid, stk_empty;
  stack_word_t       stk_dout;
  logic              ram_we, sel_done, ram_rd, ram_avail;
  chan_word_t        ram_wdata, ram_rdata;
  logic [RW-1:0]     ram_space;

  tdc u_tdc (
    .clk, .clk90, .clk180, .clk270, .rst,
    .hit, .fiducial,
    .data_rdy(tdc_rdy), .data(tdc_data), .fid_pulse
  );

  stack_buffer #(.DEPTH(STACK_DEPTH)) u_stack (
    .clk, .rst,
    .data_rdy(tdc_rdy), .data_in(tdc_data), .fiducial(fid_pulse),
    .snapshot, .pop, .dout(stk_dout), .dout_valid(stk_valid), .empty(stk_empty)
  );

  data_selector #(.NTAGS(NTAGS), .SW(RW)) u_sel (
    .clk, .rst, .t1,
    .snapshot, .pop, .stk_dout, .stk_valid, .stk_empty,
    .ram_we, .ram_wdata, .ram_space,
    .busy, .done(sel_done)
  );

  ram_buffer #(.DEPTH(RAM_DEPTH)) u_ram (
    .clk, .rst,
    .we(ram_we), .wdata(ram_wdata), .sel_done, .t1, .t2,
    .rd_en(ram_rd), .rdata(ram_rdata), .rd_avail(ram_avail), .space(ram_space)
  );

  chan_master_if #(.CHAN(CHAN)) u_c2m (
    .clk, .rst, .t2,
    .ram_rdata, .ram_avail, .ram_rd,
    .data, .data_rdy, .ack
  );

  assign hit_strobe = tdc_rdy;

endmodule
