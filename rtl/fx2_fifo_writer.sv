// fx2_fifo_writer: writes 16-bit words into an endpoint FIFO of a CY7C68013A
// (FX2) USB controller running in synchronous slave-FIFO mode.
// The FX2 samples FD and the active-low SLWR# on each rising edge of IFCLK
// (clk) and writes the word into the endpoint selected by FIFOADR (EP_ADDR,
// 2'b00 = EP2). full_n is the endpoint's active-low full flag.
// A word is accepted (in_valid && in_ready) only when the FIFO is not full and
// no write is in flight; it is put on fd with slwr_n low for exactly one clock
// in the following cycle. The one idle cycle between writes gives the full
// flag time to update. Packet commit is left to the FX2's auto-commit.
// Sending words to the PC through this chip in slave-FIFO mode follows the
// published design; the bus protocol comes from the chip's data sheet, and the
// pacing is this design's choice.
`timescale 1ps/1ps
module fx2_fifo_writer #(
  parameter int unsigned W       = 16,
  parameter logic [1:0]  EP_ADDR = 2'b00
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic [W-1:0] in_data,
  output logic         in_ready,
  output logic [W-1:0] fd,
  output logic         slwr_n,
  output logic [1:0]   fifoadr,
  input  logic         full_n
);
  assign fifoadr  = EP_ADDR;
  assign in_ready = full_n && slwr_n;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      slwr_n <= 1'b1;
      fd     <= '0;
    end else if (in_valid && in_ready) begin
      slwr_n <= 1'b0;
      fd     <= in_data;
    end else begin
      slwr_n <= 1'b1;
    end

  // A write strobe lasts a single clock.
  a_single_strobe: assert property (@(posedge clk) disable iff (!rst_n)
    !slwr_n |=> slwr_n);
endmodule
