// chan_master_if: Channel to Master Interface of one channel.
//
// It hands the FSM Master the words of the channel, one confirmed event at a
// time, over one 32-bit lane with a ready bit (the lanes of all channels
// together form the 32 x 32-bit data path and the 32 ready lines into the
// master).  It counts T2 triggers not yet served; while at least one is
// pending and the RAM buffer has a committed word, data_rdy is high and data
// shows that word with the channel number written into its chan field.  The
// master takes it by raising ack for one cycle (the word is then popped from
// the RAM buffer).  The channel trailer (kind CTRL) is the last word of the
// channel's part of an event; passing it closes one pending T2.
//
// data and data_rdy are combinational from the RAM buffer outputs and the
// pending count; ack may be high in the same cycle as data_rdy.  The source
// design counts this interface among its three data-moving state machines;
// here its state is just the pending count (zero = idle, non-zero = sending).
// The ack handshake and the word format are choices of this design.
module chan_master_if
  import het_pkg::*;
#(
  parameter int unsigned CHAN = 0
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       t2,
  input  chan_word_t ram_rdata,
  input  logic       ram_avail,
  output logic       ram_rd,
  output chan_word_t data,
  output logic       data_rdy,
  input  logic       ack
);

  logic [7:0] pending;   // never more than the events a RAM buffer can hold
  logic       close;

  always_comb begin
    data      = ram_rdata;
    data.chan = 5'(CHAN);
  end

  assign data_rdy = (pending != '0) && ram_avail;
  assign ram_rd   = ack && data_rdy;
  assign close    = ram_rd && (ram_rdata.kind == KIND_CTRL);

  always_ff @(posedge clk) begin
    if (rst)
      pending <= '0;
    else if (t2 && !close && pending != '1)
      pending <= pending + 1'b1;
    else if (close && !t2)
      pending <= pending - 1'b1;
  end

endmodule
