// fsm_master: builds the events in the Data FIFO.
//
// Every accepted T2 is one event.  T2 pulses (with the KLOE signals word
// latched by the Trigger Manager) are queued, EVQ_DEPTH deep, so that a new
// T2 can arrive while an older event is still being collected.  For each
// queued event the FSM writes
//   1. a header word   {HDR_ID, event_no, kloe, 0},
//   2. the measures of channel 0, 1, ..., N_CH-1 in that order, taken from
//      the channel lanes (ch_data/ch_rdy, taken with a one-cycle ch_ack) and
//      packed two 32-bit channel words per 64-bit FIFO word, the earlier in
//      bits [63:32]; an odd last word is padded with a KIND_FILL word,
//   3. a trailer word  {TRL_ID, event_no, ovf, n_meas, n_words},
// where n_words counts the event's FIFO words, header and trailer included.
// A channel's part ends with its channel trailer, which is consumed here and
// not copied (its overflow bit is OR-ed into the event trailer).  The FSM
// waits for each channel in turn, so a channel whose selection is still
// running simply stalls the event.  Nothing is acknowledged or written while
// the FIFO is full.  A T2 arriving with the queue full is counted in
// n_evq_lost.  Event format and queue are choices of this design.
module fsm_master
  import het_pkg::*;
#(
  parameter int unsigned N_CH      = 32,
  parameter int unsigned EVQ_DEPTH = 8,
  parameter int unsigned KLOE_W    = 8
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              t2,
  input  logic [KLOE_W-1:0] t2_info,
  input  chan_word_t        ch_data [N_CH],
  input  logic [N_CH-1:0]   ch_rdy,
  output logic [N_CH-1:0]   ch_ack,
  output logic              fifo_we,
  output logic [63:0]       fifo_wdata,
  input  logic              fifo_full,
  output logic [23:0]       n_events,
  output logic [31:0]       n_evq_lost
);

  localparam int unsigned QW = $clog2(EVQ_DEPTH);
  localparam int unsigned CW = (N_CH > 1) ? $clog2(N_CH) : 1;

  typedef enum logic [2:0] {M_IDLE, M_HDR, M_CHAN, M_FLUSH, M_TRL} mstate_e;

  logic [KLOE_W-1:0] evq [EVQ_DEPTH];
  logic [QW:0]       qw, qr;
  logic              q_empty, q_full;

  mstate_e      state;
  logic [CW-1:0] ch;
  logic [7:0]   kloe;
  chan_word_t   half;
  logic         half_v;
  logic [14:0]  n_meas;
  logic [15:0]  n_words;
  logic         ovf;
  chan_word_t   w;
  logic         take;
  evt_header_t  hdr;
  evt_trailer_t trl;

  assign q_empty = (qw == qr);
  assign q_full  = ((qw - qr) == (QW+1)'(EVQ_DEPTH));

  assign w    = ch_data[ch];
  assign take = (state == M_CHAN) && ch_rdy[ch] && !fifo_full;

  always_comb begin
    hdr          = '0;
    hdr.id       = HDR_ID;
    hdr.event_no = n_events;
    hdr.kloe     = kloe;
    trl          = '0;
    trl.id       = TRL_ID;
    trl.event_no = n_events;
    trl.ovf      = ovf;
    trl.n_meas   = n_meas;
    trl.n_words  = n_words + 1'b1;

    ch_ack     = '0;
    fifo_we    = 1'b0;
    fifo_wdata = '0;
    unique case (state)
      M_HDR: if (!fifo_full) begin
        fifo_we    = 1'b1;
        fifo_wdata = hdr;
      end
      M_CHAN: if (take) begin
        ch_ack[ch] = 1'b1;
        if (w.kind == KIND_MEAS && half_v) begin
          fifo_we    = 1'b1;
          fifo_wdata = {half, w};
        end
      end
      M_FLUSH: if (half_v && !fifo_full) begin
        fifo_we    = 1'b1;
        fifo_wdata = {half, 32'h0};
      end
      M_TRL: if (!fifo_full) begin
        fifo_we    = 1'b1;
        fifo_wdata = trl;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (t2 && !q_full) evq[qw[QW-1:0]] <= t2_info;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      qw <= '0; qr <= '0;
      state <= M_IDLE; ch <= '0; kloe <= '0;
      half <= '0; half_v <= 1'b0; n_meas <= '0; n_words <= '0; ovf <= 1'b0;
      n_events <= '0; n_evq_lost <= '0;
    end else begin
      if (t2) begin
        if (!q_full) qw <= qw + 1'b1;
        else         n_evq_lost <= n_evq_lost + 1;
      end
      unique case (state)
        M_IDLE: if (!q_empty) begin
          kloe  <= 8'(evq[qr[QW-1:0]]);
          qr    <= qr + 1'b1;
          state <= M_HDR;
        end
        M_HDR: if (!fifo_full) begin
          n_words <= 16'd1;
          n_meas  <= '0;
          ovf     <= 1'b0;
          half_v  <= 1'b0;
          ch      <= '0;
          state   <= M_CHAN;
        end
        M_CHAN: if (take) begin
          if (w.kind == KIND_MEAS) begin
            n_meas <= n_meas + 1'b1;
            if (half_v) begin
              half_v  <= 1'b0;
              n_words <= n_words + 1'b1;
            end else begin
              half    <= w;
              half_v  <= 1'b1;
            end
          end else if (w.kind == KIND_CTRL) begin
            ovf <= ovf | w.ovf;
            if (32'(ch) == N_CH - 1) state <= M_FLUSH;
            else                     ch    <= ch + 1'b1;
          end
        end
        M_FLUSH: if (!half_v) begin
          state <= M_TRL;
        end else if (!fifo_full) begin
          half_v  <= 1'b0;
          n_words <= n_words + 1'b1;
          state   <= M_TRL;
        end
        M_TRL: if (!fifo_full) begin
          n_events <= n_events + 1'b1;
          state    <= M_IDLE;
        end
        default: state <= M_IDLE;
      endcase
    end
  end

endmodule
