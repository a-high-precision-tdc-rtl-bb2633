// coarse_module: coarse time of the interval in Clock1 periods.
// A free-running Gray counter on Clock1 is latched into a start register by the
// rising edge of start and into a stop register by the rising edge of stop.
// Both are converted to binary and coarse = stop - start (modulo 2^COARSE_W).
// Because the counter is Gray coded, latching it at an arbitrary moment yields
// either the old or the new count, never a mix. Each latched count is the
// number of Clock1 rising edges before the edge, so coarse counts the Clock1
// edges between start and stop; together with the fine phases (fine_module)
// the interval is coarse*8 + fine_stop - fine_start bins of T/8.
// start/stop act as clocks, clr clears both registers asynchronously. coarse is
// valid once stop has risen and stays until clr. The structure (Gray counter,
// latching flip-flops, Gray-to-binary) follows the published design; taking the
// difference in hardware modulo 2^9 is this design's reading of it.
`timescale 1ps/1ps
module coarse_module #(
  parameter int unsigned COARSE_W = 9
) (
  input  logic                clk1,
  input  logic                rst_n,
  input  logic                start,
  input  logic                stop,
  input  logic                clr,
  output logic [COARSE_W-1:0] coarse
);
  logic [COARSE_W-1:0] gray, start_g, stop_g, start_b, stop_b;

  gray_counter #(.WIDTH(COARSE_W)) u_counter (.clk(clk1), .rst_n(rst_n), .gray(gray));

  always_ff @(posedge start or posedge clr)
    if (clr) start_g <= '0;
    else     start_g <= gray;

  always_ff @(posedge stop or posedge clr)
    if (clr) stop_g <= '0;
    else     stop_g <= gray;

  gray_to_bin #(.WIDTH(COARSE_W)) u_g2b_start (.gray(start_g), .bin(start_b));
  gray_to_bin #(.WIDTH(COARSE_W)) u_g2b_stop  (.gray(stop_g),  .bin(stop_b));

  assign coarse = stop_b - start_b;
endmodule
