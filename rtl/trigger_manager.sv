// trigger_manager: entry point of the KLOE-2 trigger signals.
//
// T1 (first-level trigger) and T2 (second-level confirmation) arrive from
// the experiment asynchronously.  Each passes a three-flip-flop synchroniser
// and a rising-edge detector, and becomes a one-clk-cycle pulse:
//   * t1 is issued if acquisition is enabled and no channel's Data Selector
//     is still busy with the previous T1; otherwise the T1 is counted as lost.
//   * t2 is issued only if an accepted T1 is waiting for it, so every T2 that
//     reaches the channels and the FSM Master has exactly one selection
//     behind it; a T2 with no T1 before it is counted as an orphan.
// With each issued t2 the (synchronised) KLOE signals word is latched on
// t2_info for the event header.  Four 32-bit counters report accepted and
// rejected triggers.
// Which KLOE signals exist and what they mean is not specified; here they
// are an opaque KLOE_W-bit word.  The acceptance rules are choices of this
// design.
module trigger_manager #(
  parameter int unsigned KLOE_W = 8
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              t1_in,
  input  logic              t2_in,
  input  logic [KLOE_W-1:0] kloe_sig,
  input  logic              enable,
  input  logic              busy,
  output logic              t1,
  output logic              t2,
  output logic [KLOE_W-1:0] t2_info,
  output logic [31:0]       n_t1,
  output logic [31:0]       n_t1_lost,
  output logic [31:0]       n_t2,
  output logic [31:0]       n_t2_orphan
);

  logic [2:0]        s1, s2;
  logic [KLOE_W-1:0] k1, k2;
  logic              e1, e2;
  logic              armed;

  assign e1 = s1[1] && !s1[2];
  assign e2 = s2[1] && !s2[2];

  always_ff @(posedge clk) begin
    if (rst) begin
      s1 <= '0; s2 <= '0; k1 <= '0; k2 <= '0;
      t1 <= 1'b0; t2 <= 1'b0; t2_info <= '0; armed <= 1'b0;
      n_t1 <= '0; n_t1_lost <= '0; n_t2 <= '0; n_t2_orphan <= '0;
    end else begin
      s1 <= {s1[1:0], t1_in};
      s2 <= {s2[1:0], t2_in};
      k1 <= kloe_sig;
      k2 <= k1;
      t1 <= 1'b0;
      t2 <= 1'b0;
      if (e2) begin
        if (armed) begin
          t2      <= 1'b1;
          t2_info <= k2;
          n_t2    <= n_t2 + 1;
        end else begin
          n_t2_orphan <= n_t2_orphan + 1;
        end
      end
      if (e1) begin
        if (enable && !busy && !t1) begin
          t1    <= 1'b1;
          n_t1  <= n_t1 + 1;
        end else begin
          n_t1_lost <= n_t1_lost + 1;
        end
      end
      // an accepted T1 arms the next T2; a T2 disarms
      if (e1 && enable && !busy && !t1) armed <= 1'b1;
      else if (e2)                      armed <= 1'b0;
    end
  end

endmodule
