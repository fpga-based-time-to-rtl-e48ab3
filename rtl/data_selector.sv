// data_selector: the zero-suppression state machine of one channel.
//
// The TDC measures all the time; a measure is worth keeping only if it lies
// in the machine revolutions that a first-level trigger (T1) refers to.  On
// each accepted T1 this FSM freezes a read-back of the Stack buffer at the
// newest word and pops it word by word, newest first.  Measures are copied
// to the RAM buffer with the index of the Fiducial cycle they belong to
// (0 = the cycle running at T1, 1 = the one before, ...); each Fiducial Tag
// passed moves to the next older cycle, and after the NTAGS-th tag (or when
// the stack has nothing older) the selection ends.  Everything older is
// never read, which is the suppression.  A channel trailer with the number
// of measures copied closes the selection; if the RAM buffer is short of
// space, measures are dropped (one word is always kept for the trailer) and
// the trailer's ovf bit is set.
//
// Timing: the snapshot is taken in the T1 cycle; each stack word then costs
// two cycles (pop, then data), and the trailer one more, so a selection of
// W stack words takes about 2*W + 2 cycles.  busy is high from the cycle
// after T1 until the trailer is written; done pulses with the trailer write.
// The selection window (NTAGS cycles) and the word formats are choices of
// this design.
module data_selector
  import het_pkg::*;
#(
  parameter int unsigned NTAGS = 2,
  parameter int unsigned SW    = 8      // width of ram_space
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          t1,
  output logic          snapshot,
  output logic          pop,
  input  stack_word_t   stk_dout,
  input  logic          stk_valid,
  input  logic          stk_empty,
  output logic          ram_we,
  output chan_word_t    ram_wdata,
  input  logic [SW-1:0] ram_space,
  output logic          busy,
  output logic          done
);

  typedef enum logic [1:0] {S_IDLE, S_ISSUE, S_WAIT, S_TRAIL} state_e;

  state_e      state;
  logic [3:0]  ntag;
  logic [15:0] nhits;
  logic        ovf;

  always_comb begin
    snapshot  = (state == S_IDLE) && t1;
    pop       = (state == S_ISSUE) && !stk_empty;
    ram_we    = 1'b0;
    ram_wdata = '0;
    done      = 1'b0;
    if (state == S_WAIT && stk_valid && !stk_dout.is_tag && ram_space > SW'(1)) begin
      ram_we    = 1'b1;
      ram_wdata = meas_word(ntag, TIME_W'(stk_dout.payload));
    end
    if (state == S_TRAIL && ram_space != '0) begin
      ram_we    = 1'b1;
      ram_wdata = ctrl_word(ovf, nhits);
      done      = 1'b1;
    end
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= S_IDLE;
      ntag  <= '0;
      nhits <= '0;
      ovf   <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: if (t1) begin
          state <= S_ISSUE;
          ntag  <= '0;
          nhits <= '0;
          ovf   <= 1'b0;
        end
        S_ISSUE: state <= stk_empty ? S_TRAIL : S_WAIT;
        S_WAIT: begin
          state <= S_ISSUE;
          if (stk_valid) begin
            if (stk_dout.is_tag) begin
              if (32'(ntag) + 1 >= NTAGS) state <= S_TRAIL;
              else ntag <= ntag + 1'b1;
            end else if (ram_space > SW'(1)) begin
              nhits <= nhits + 1'b1;
            end else begin
              ovf <= 1'b1;
            end
          end
        end
        S_TRAIL: if (ram_space != '0) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
