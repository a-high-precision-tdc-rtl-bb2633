// gray_counter: free-running WIDTH-bit Gray-code counter on Clock1.
// A binary register counts; the Gray image of its next value is registered as
// well, so gray changes exactly one bit per clock and comes straight from
// flip-flops. It can therefore be sampled by an asynchronous edge (Start, Stop)
// with an error of at most one count. Asynchronous active-low reset to zero.
// The Gray counter and its 9-bit width follow the published design; the
// binary-plus-Gray register structure and the reset are this design's choices.
`timescale 1ps/1ps
module gray_counter #(
  parameter int unsigned WIDTH = 9
) (
  input  logic             clk,
  input  logic             rst_n,
  output logic [WIDTH-1:0] gray
);
  logic [WIDTH-1:0] bin, bin_next;

  assign bin_next = bin + 1'b1;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      bin  <= '0;
      gray <= '0;
    end else begin
      bin  <= bin_next;
      gray <= bin_next ^ (bin_next >> 1);
    end
endmodule
