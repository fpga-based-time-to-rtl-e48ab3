// ram_buffer: second buffer stage of a channel, holding the words selected
// for a T1 until the second-level trigger T2 decides about the event.
//
// It is a circular buffer of DEPTH 32-bit channel words with three pointers:
// wr (next word the Data Selector writes), cm (end of the committed words)
// and rd (next word the Channel to Master Interface reads).  Words between cm
// and wr belong to the selection that is waiting for T2 and cannot be read.
// The event is committed (cm <= wr) once both T2 has arrived and the Data
// Selector has written its trailer (sel_done), in whichever order they come.
// A new T1 with no T2 for the previous selection rolls wr back to cm, which
// throws that selection away.
//
// Interface: we/wdata write port; rd_en pops the oldest committed word,
// rdata shows it combinationally (first-word fall-through) while rd_avail is
// high; space is the number of free words (committed and pending words both
// take space).  Everything is in the clk domain with synchronous reset.
// The commit/roll-back scheme and the depth are choices of this design.
module ram_buffer
  import het_pkg::*;
#(
  parameter int unsigned DEPTH = 64,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        we,
  input  chan_word_t  wdata,
  input  logic        sel_done,
  input  logic        t1,
  input  logic        t2,
  input  logic        rd_en,
  output chan_word_t  rdata,
  output logic        rd_avail,
  output logic [AW:0] space
);

  chan_word_t  mem [DEPTH];
  logic [AW:0] wr, cm, rd;
  logic        have_t2, have_done;
  logic        commit;
  logic [AW:0] wr_n;

  assign space    = (AW+1)'(DEPTH) - (wr - rd);
  assign rd_avail = (cm != rd);
  assign rdata    = mem[rd[AW-1:0]];

  assign wr_n   = wr + (AW+1)'(we && space != '0);
  assign commit = (have_t2 || t2) && (have_done || sel_done);

  always_ff @(posedge clk)
    if (we && space != '0) mem[wr[AW-1:0]] <= wdata;

  always_ff @(posedge clk) begin
    if (rst) begin
      wr        <= '0;
      cm        <= '0;
      rd        <= '0;
      have_t2   <= 1'b0;
      have_done <= 1'b0;
    end else begin
      wr <= wr_n;
      if (rd_en && rd_avail) rd <= rd + 1'b1;
      if (commit) begin
        cm        <= wr_n;
        have_t2   <= 1'b0;
        have_done <= 1'b0;
      end else begin
        if (t2)       have_t2   <= 1'b1;
        if (sel_done) have_done <= 1'b1;
      end
      if (t1 && !have_t2 && !t2) begin
        wr        <= cm;       // drop the unconfirmed selection
        have_done <= 1'b0;
      end
    end
  end

endmodule
