// data_fifo: the main event buffer, 256 kB = 32768 words of 64 bits,
// between the FSM Master (writer) and the VME slave interface (reader).
//
// A single-clock FIFO built on a simple dual-port memory with a synchronous
// read port, turned into a first-word-fall-through FIFO by an output
// register: whenever the output register is empty or is being read, the next
// word is fetched, so rdata/valid show the oldest word and rd takes it.
// full stops the writer once DEPTH words are held, output register
// included (a write while full is ignored); count is the number of words held.
// Same clock on both sides and the FWFT read style are choices of this
// design; the size is that of the original system.
module data_fifo #(
  parameter int unsigned DEPTH = 32768,
  parameter int unsigned WIDTH = 64,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             we,
  input  logic [WIDTH-1:0] wdata,
  output logic             full,
  input  logic             rd,
  output logic [WIDTH-1:0] rdata,
  output logic             valid,
  output logic [AW+1:0]    count
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0]      wp, rp;
  logic [AW:0]      used;
  logic             mem_empty, load;

  assign used      = wp - rp;
  assign mem_empty = (used == '0);
  assign count     = {1'b0, used} + (AW+2)'(valid);
  assign full      = (count >= (AW+2)'(DEPTH));
  assign load      = (!valid || rd) && !mem_empty;

  always_ff @(posedge clk) begin
    if (we && !full) mem[wp[AW-1:0]] <= wdata;
    if (load)        rdata <= mem[rp[AW-1:0]];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wp    <= '0;
      rp    <= '0;
      valid <= 1'b0;
    end else begin
      if (we && !full) wp <= wp + 1'b1;
      if (load) begin
        rp    <= rp + 1'b1;
        valid <= 1'b1;
      end else if (rd) begin
        valid <= 1'b0;
      end
    end
  end

endmodule
