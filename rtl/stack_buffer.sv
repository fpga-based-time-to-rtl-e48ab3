// stack_buffer: first buffer stage of a channel, a "stack" of the most recent
// TDC words.
//
// Every TDC measure (data_rdy) and every Fiducial (fiducial) pushes one word:
// the measure itself, or a Fiducial Tag holding a running sequence number.
// The tags split the stream into revolutions of the machine, so a reader that
// starts from the newest word and walks back can tell which cycle each
// measure belongs to and stop after the cycles it wants.
//
// The memory is a ring of DEPTH words that is written continuously and
// overwrites its oldest word when full; it never stops for the reader.
// snapshot starts a read-back at the newest word written so far; each pop
// then returns the next older word one cycle later (dout_valid).  avail
// counts the words of the read-back that are still intact: it drops by one
// per pop and by one whenever a new push overwrites the oldest of them, so a
// reader never gets a word that has been overwritten.  empty = (avail == 0).
//
// When a measure and a Fiducial arrive in the same cycle the measure (taken
// with the old coarse count) is written first and the tag in the next cycle;
// the TDC's one-cycle dead time keeps that cycle free.  Ring organisation,
// depth, tag numbering width and read latency are choices of this design.
module stack_buffer
  import het_pkg::*;
#(
  parameter int unsigned DEPTH  = 1024,
  parameter int unsigned TIME_W_P = TIME_W
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                data_rdy,
  input  logic [TIME_W_P-1:0] data_in,
  input  logic                fiducial,
  input  logic                snapshot,
  input  logic                pop,
  output stack_word_t         dout,
  output logic                dout_valid,
  output logic                empty
);

  localparam int unsigned AW = $clog2(DEPTH);

  stack_word_t   mem [DEPTH];
  logic [AW-1:0] wr_ptr, rd_ptr;
  logic [AW:0]   fill, avail;
  logic [SEQ_W-1:0] seq;
  logic          tag_pending;

  logic          push;
  stack_word_t   push_word;
  logic [AW-1:0] rd_n;
  logic [AW:0]   av_n;
  logic          do_pop;

  // push arbitration (a measure wins; a coincident tag waits one cycle)
  always_comb begin
    push      = 1'b0;
    push_word = '0;
    if (data_rdy) begin
      push              = 1'b1;
      push_word.is_tag  = 1'b0;
      push_word.payload = SEQ_W'(data_in);
    end else if (fiducial || tag_pending) begin
      push              = 1'b1;
      push_word.is_tag  = 1'b1;
      push_word.payload = seq;
    end
  end

  // read-back pointer bookkeeping
  always_comb begin
    do_pop = 1'b0;
    if (snapshot) begin
      rd_n = wr_ptr - 1'b1;
      av_n = fill;
    end else begin
      rd_n = rd_ptr;
      av_n = avail;
      if (pop && avail != '0) begin
        do_pop = 1'b1;
        rd_n   = rd_ptr - 1'b1;
        av_n   = avail - 1'b1;
      end
    end
    // a push into a full ring destroys the oldest word; if that word is part
    // of the read-back, shorten it
    if (push && av_n != '0 && fill == (AW+1)'(DEPTH) &&
        wr_ptr == AW'(rd_n - av_n[AW-1:0] + 1'b1))
      av_n = av_n - 1'b1;
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= push_word;
    if (do_pop) dout <= mem[rd_ptr];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wr_ptr      <= '0;
      rd_ptr      <= '0;
      fill        <= '0;
      avail       <= '0;
      seq         <= '0;
      tag_pending <= 1'b0;
      dout_valid  <= 1'b0;
    end else begin
      if (push) begin
        wr_ptr <= wr_ptr + 1'b1;
        if (fill != (AW+1)'(DEPTH)) fill <= fill + 1'b1;
        if (push_word.is_tag) seq <= seq + 1'b1;
      end
      tag_pending <= (data_rdy && fiducial) || (data_rdy && tag_pending);
      rd_ptr      <= rd_n;
      avail       <= av_n;
      dout_valid  <= do_pop;
    end
  end

  assign empty = (avail == '0);

endmodule
