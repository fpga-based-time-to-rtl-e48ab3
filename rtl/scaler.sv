// scaler: per-channel hit counters used to monitor the detection rates.
//
// Every TDC measure of channel c (a one-cycle strobe on hits[c]) adds one to
// counts[c].  The 32-bit counters stop at their maximum instead of wrapping
// and are all zeroed by clear (from the control register).  Rates are
// obtained by software from two readings and the time between them.
// Saturation and clearing are choices of this design.
module scaler #(
  parameter int unsigned N_CH = 32
) (
  input  logic              clk,
  input  logic              rst,
  input  logic [N_CH-1:0]   hits,
  input  logic              clear,
  output logic [31:0]       counts [N_CH]
);

  always_ff @(posedge clk) begin
    for (int c = 0; c < N_CH; c++) begin
      if (rst || clear)
        counts[c] <= '0;
      else if (hits[c] && counts[c] != '1)
        counts[c] <= counts[c] + 1;
    end
  end

endmodule
