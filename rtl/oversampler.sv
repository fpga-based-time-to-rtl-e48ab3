// oversampler: the 4xOversampling input stage of one TDC channel.
//
// The channel input is sampled by four flip-flops clocked by four copies of
// the 400 MHz clock spaced by 90 degrees (clk, clk90, clk180, clk270), so in
// every clk period it is looked at four times, T_clk/4 = 625 ps apart.  Each
// sample is then handed from phase to phase, always to an earlier phase, until
// it reaches the clk domain, and all four rows are made equally long (four
// flip-flops), so samples[0..3] leave together, three clk cycles after the
// clk edge of the first sample.
//
// The flip-flop rows and the clock of every stage follow the input-stage
// schematic of the design exactly:
//   Output1: clk    -> clk    -> clk   -> clk
//   Output2: clk90  -> clk    -> clk   -> clk
//   Output3: clk180 -> clk90  -> clk   -> clk
//   Output4: clk270 -> clk180 -> clk90 -> clk
// samples[0] is Output1 (the earliest sample), samples[3] Output4.  The first
// flip-flop of each row may go metastable; the following stages give it most
// of a clock period to settle.  There is no reset: the chains are flushed
// within four cycles.
module oversampler (
  input  logic       clk,
  input  logic       clk90,
  input  logic       clk180,
  input  logic       clk270,
  input  logic       din,
  output logic [3:0] samples
);

  logic r1_a, r1_b, r1_c, r1_d;
  logic r2_a, r2_b, r2_c, r2_d;
  logic r3_a, r3_b, r3_c, r3_d;
  logic r4_a, r4_b, r4_c, r4_d;

  // row 1: sample at instant 0
  always_ff @(posedge clk) begin
    r1_a <= din;
    r1_b <= r1_a;
    r1_c <= r1_b;
    r1_d <= r1_c;
  end

  // row 2: sample after 1/4 clk
  always_ff @(posedge clk90) r2_a <= din;
  always_ff @(posedge clk) begin
    r2_b <= r2_a;
    r2_c <= r2_b;
    r2_d <= r2_c;
  end

  // row 3: sample after 2/4 clk
  always_ff @(posedge clk180) r3_a <= din;
  always_ff @(posedge clk90)  r3_b <= r3_a;
  always_ff @(posedge clk) begin
    r3_c <= r3_b;
    r3_d <= r3_c;
  end

  // row 4: sample after 3/4 clk
  always_ff @(posedge clk270) r4_a <= din;
  always_ff @(posedge clk180) r4_b <= r4_a;
  always_ff @(posedge clk90)  r4_c <= r4_b;
  always_ff @(posedge clk)    r4_d <= r4_c;

  assign samples = {r4_d, r3_d, r2_d, r1_d};

endmodule
