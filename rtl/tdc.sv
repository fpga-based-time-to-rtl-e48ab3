// tdc: one channel of the 4xOversampling time-to-digital converter.
//
// The input is sampled four times per 400 MHz clock period by the oversampler
// (Output1..Output4, 625 ps apart).  The decision logic looks at the five
// samples {Output4 of the previous cycle, Output1..Output4 of this cycle} and
// finds the first 0 -> 1 step; the index of the first high sample (0..3) is
// the 2-bit fine time.  A coarse counter of clk cycles, restarted by the
// rising edge of the machine Fiducial, gives the rest, so a measure is
//     time = {coarse, fine}   in units of T_clk/4 = 625 ps
// counted from the Fiducial (plus a fixed pipeline offset that is the same
// for every channel).  The Fiducial is brought to clk by two flip-flops.
//
// Outputs (clk domain, registered):
//   data_rdy  one-cycle strobe, data holds the measure
//   fid_pulse one-cycle strobe at each Fiducial rising edge; a measure taken
//             in the same cycle still carries the old coarse count
// Choices of this design (the description gives only the principle): the
// counter width (COARSE_W), saturation of the counter when Fiducials are
// missing, and one clock cycle of dead time after each hit.
module tdc
  import het_pkg::*;
#(
  parameter int unsigned CW = COARSE_W
) (
  input  logic              clk,
  input  logic              clk90,
  input  logic              clk180,
  input  logic              clk270,
  input  logic              rst,
  input  logic              hit,
  input  logic              fiducial,
  output logic              data_rdy,
  output logic [CW+1:0]     data,
  output logic              fid_pulse
);

  logic [3:0]    s;
  logic          prev4;
  logic [2:0]    fid_sync;
  logic          fid_edge;
  logic [CW-1:0] coarse;
  logic          dead;
  logic          rise;
  logic [1:0]    fine;

  oversampler u_os (
    .clk, .clk90, .clk180, .clk270,
    .din(hit), .samples(s)
  );

  // decision logic: first 0->1 step in {prev4, s[0], s[1], s[2], s[3]}
  always_comb begin
    rise = 1'b0;
    fine = 2'd0;
    if (!prev4 && s[0]) begin
      rise = 1'b1; fine = 2'd0;
    end else if (!s[0] && s[1]) begin
      rise = 1'b1; fine = 2'd1;
    end else if (!s[1] && s[2]) begin
      rise = 1'b1; fine = 2'd2;
    end else if (!s[2] && s[3]) begin
      rise = 1'b1; fine = 2'd3;
    end
  end

  assign fid_edge = fid_sync[1] && !fid_sync[2];

  always_ff @(posedge clk) begin
    if (rst) begin
      prev4     <= 1'b1;   // no hit reported for a level already high at reset
      fid_sync  <= '0;
      coarse    <= '1;
      dead      <= 1'b0;
      data_rdy  <= 1'b0;
      data      <= '0;
      fid_pulse <= 1'b0;
    end else begin
      prev4    <= s[3];
      fid_sync <= {fid_sync[1:0], fiducial};
      if (fid_edge)
        coarse <= '0;
      else if (coarse != '1)
        coarse <= coarse + 1'b1;
      data_rdy  <= rise && !dead;
      data      <= {coarse, fine};
      dead      <= rise && !dead;
      fid_pulse <= fid_edge;
    end
  end

endmodule
