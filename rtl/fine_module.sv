// fine_module: fine times of the Start and Stop edges. Two fine_channel
// interpolators, one clocked by start and one by stop, each sample the four
// phase clocks and encode the phase of the edge after the last Clock1 rise in
// units of T/8 (125 ps at 1 GHz). The 6-bit result is fine_start and fine_stop;
// each is valid from its edge until clr. Follows the published design, which
// shows one fine module with Start and Stop inputs and a 6-bit output.
`timescale 1ps/1ps
module fine_module (
  input  logic [3:0] clk_ph,
  input  logic       start,
  input  logic       stop,
  input  logic       clr,
  output logic [2:0] fine_start,
  output logic [2:0] fine_stop
);
  fine_channel u_start (.signal(start), .clr(clr), .clk_ph(clk_ph), .code(fine_start));
  fine_channel u_stop  (.signal(stop),  .clr(clr), .clk_ph(clk_ph), .code(fine_stop));
endmodule
