// vme_slave: A32/D64 VME64x slave interface of the board.
//
// Two kinds of cycle are served when the top byte of the A32 address equals
// BASE:
//   * A32 D32 single cycles (AM 0x09, 0x0D) to the register bus: offset =
//     addr[11:0], only for addr[23:12] == 0.  A write pulses reg_wr with
//     din[31:0]; a read returns reg_rdata in dout[31:0].
//   * A32 MBLT, 64-bit block transfers (AM 0x08, 0x0C), which read the Data
//     FIFO: the first data strobe after the address strobe is the address
//     beat (acknowledged, no data); each later beat returns one FIFO word
//     and pops it.  An empty FIFO returns all ones (kind NONE in both
//     halves).  MBLT writes are acknowledged and ignored.
// Handshake: after AS* and then DS0*/DS1* go low the slave drives dout
// (dout_en for the external drivers, which also multiplex the MBLT data onto
// the address lines) and pulls DTACK* low; it releases DTACK* when the data
// strobes go high again.  Strobes pass a two-flip-flop synchroniser;
// address, AM, WRITE* and data are sampled once the synchronised strobe is
// seen, when the bus guarantees they are stable.  No BERR, no CR/CSR space.
// Only "A32/D64 VME64x" is specified; the rest is this design's choice.
module vme_slave #(
  parameter logic [7:0] BASE = 8'h10
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        as_n,
  input  logic [1:0]  ds_n,
  input  logic        write_n,
  input  logic [5:0]  am,
  input  logic [31:0] addr,
  input  logic [63:0] din,
  output logic [63:0] dout,
  output logic        dout_en,
  output logic        dtack_n,
  output logic        reg_wr,
  output logic [11:0] reg_addr,
  output logic [31:0] reg_wdata,
  input  logic [31:0] reg_rdata,
  output logic        fifo_rd,
  input  logic [63:0] fifo_rdata,
  input  logic        fifo_valid
);

  typedef enum logic [1:0] {V_IDLE, V_ADDR, V_ACK} vstate_e;

  logic [1:0] as_s, ds_s;
  logic       as_a, ds_a;
  vstate_e    state;
  logic       sel, mblt, first;

  assign as_a = as_s[1];
  assign ds_a = ds_s[1];

  always_ff @(posedge clk) begin
    if (rst) begin
      as_s <= '0; ds_s <= '0;
      state <= V_IDLE; sel <= 1'b0; mblt <= 1'b0; first <= 1'b0;
      dout <= '0; dout_en <= 1'b0; dtack_n <= 1'b1;
      reg_wr <= 1'b0; reg_addr <= '0; reg_wdata <= '0; fifo_rd <= 1'b0;
    end else begin
      as_s    <= {as_s[0], !as_n};
      ds_s    <= {ds_s[0], !(ds_n[0] && ds_n[1])};
      reg_wr  <= 1'b0;
      fifo_rd <= 1'b0;
      unique case (state)
        V_IDLE: if (as_a) begin
          reg_addr <= addr[11:0];
          mblt  <= (am == 6'h08) || (am == 6'h0C);
          sel   <= (addr[31:24] == BASE) &&
                   (((am == 6'h09 || am == 6'h0D) && addr[23:12] == 12'h000) ||
                     am == 6'h08 || am == 6'h0C);
          first <= 1'b1;
          state <= V_ADDR;
        end
        V_ADDR: begin
          if (!as_a) begin
            state <= V_IDLE;
          end else if (ds_a && sel) begin
            dtack_n <= 1'b0;
            state   <= V_ACK;
            if (!mblt) begin
              if (!write_n) begin
                reg_wr    <= 1'b1;
                reg_wdata <= din[31:0];
              end else begin
                dout    <= {32'h0, reg_rdata};
                dout_en <= 1'b1;
              end
            end else if (first) begin
              first <= 1'b0;                   // MBLT address beat
            end else if (write_n) begin
              dout    <= fifo_valid ? fifo_rdata : '1;
              dout_en <= 1'b1;
              fifo_rd <= fifo_valid;
            end
          end
        end
        V_ACK: if (!ds_a) begin
          dtack_n <= 1'b1;
          dout_en <= 1'b0;
          state   <= as_a ? V_ADDR : V_IDLE;
        end
        default: state <= V_IDLE;
      endcase
    end
  end

endmodule
