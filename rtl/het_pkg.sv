// het_pkg: word formats and constants shared by the HET TDC / DAQ blocks.
//
// Three word formats travel through the read-out chain:
//   * stack word (16 bit): written into the Stack buffer by the TDC side.
//     A measure holds the 14-bit time {coarse[11:0], fine[1:0]} in units of
//     T_clk/4 (625 ps at 400 MHz); a Fiducial Tag holds a 15-bit sequence
//     number of the Fiducial it marks.
//   * channel word (32 bit): what the Data Selector writes into the RAM
//     buffer and what the Channel to Master Interface hands to the FSM Master
//     (one 32-bit lane per channel).  Kind MEAS carries one measure and the
//     index of the Fiducial cycle it belongs to (0 = newest); kind CTRL is the
//     channel trailer that closes one channel's part of an event.
//   * FIFO word (64 bit): what the FSM Master writes into the Data FIFO and
//     VME reads with D64 transfers: event header, two channel words packed per
//     FIFO word, event trailer.
// All bit layouts are choices of this design; only the 625 ps LSB, the
// 2-bit fine measure and the 32/64-bit widths at the master come from the
// description of the system.
package het_pkg;

  localparam int unsigned FINE_W   = 2;   // 4xOversampling -> 2-bit fine time
  localparam int unsigned COARSE_W = 12;  // coarse clock counter
  localparam int unsigned TIME_W   = COARSE_W + FINE_W;
  localparam int unsigned SEQ_W    = 15;  // Fiducial Tag sequence number

  // ---- stack word -------------------------------------------------------
  typedef struct packed {
    logic              is_tag;   // 1: Fiducial Tag, 0: measure
    logic [SEQ_W-1:0]  payload;  // tag: sequence number; measure: {1'b0, time}
  } stack_word_t;

  // ---- channel word -----------------------------------------------------
  typedef enum logic [1:0] {
    KIND_FILL = 2'b00,  // padding in a FIFO word
    KIND_MEAS = 2'b01,  // one measure
    KIND_CTRL = 2'b10,  // channel trailer
    KIND_NONE = 2'b11   // read of an empty FIFO
  } kind_e;

  typedef struct packed {
    kind_e        kind;      // [31:30]
    logic [4:0]   chan;      // [29:25]
    logic         ovf;       // [24]   trailer: RAM buffer overflowed
    logic [3:0]   rsvd;      // [23:20]
    logic [3:0]   cycle;     // [19:16] measure: Fiducial cycle index, 0 = newest
    logic [15:0]  value;     // [15:0]  measure: {2'b0, time}; trailer: hit count
  } chan_word_t;

  // ---- FIFO word --------------------------------------------------------
  localparam logic [7:0] HDR_ID = 8'hE0;
  localparam logic [7:0] TRL_ID = 8'hF0;

  typedef struct packed {
    logic [7:0]  id;         // HDR_ID
    logic [23:0] event_no;   // count of events written, from 0
    logic [7:0]  kloe;       // KLOE signals latched with T2
    logic [23:0] rsvd;
  } evt_header_t;

  typedef struct packed {
    logic [7:0]  id;         // TRL_ID
    logic [23:0] event_no;
    logic        ovf;        // some channel dropped measures
    logic [14:0] n_meas;     // measures in the event
    logic [15:0] n_words;    // 64-bit words of the event, header and trailer included
  } evt_trailer_t;

  function automatic chan_word_t meas_word(input logic [3:0] cycle, input logic [TIME_W-1:0] t);
    chan_word_t w;
    w = '0;
    w.kind  = KIND_MEAS;
    w.cycle = cycle;
    w.value = 16'(t);
    return w;
  endfunction

  function automatic chan_word_t ctrl_word(input logic ovf, input logic [15:0] n);
    chan_word_t w;
    w = '0;
    w.kind  = KIND_CTRL;
    w.ovf   = ovf;
    w.value = n;
    return w;
  endfunction

endpackage
