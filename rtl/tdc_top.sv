// tdc_top: time-to-digital converter built from a multi-phase clock.
// signal1 and signal2 are two pulses; the TDC reports the time between their
// rising edges with a resolution of 1/8 of the 1 GHz clock period (125 ps),
// without being told which one comes first.
//   pll_4phase     125 MHz clk_osc -> Clock1..Clock4, 1 GHz, 0/45/90/135 deg
//   discriminator  first edge -> start, second edge -> stop, polarity bit
//   coarse_module  9-bit Gray counter on Clock1 latched by start and stop
//   fine_module    Clock1..Clock4 sampled by start and by stop, encoded to 3 bits
//   combine_data   16-bit word, hand-off, then clear for the next interval
//   fx2_fifo_writer  word -> CY7C68013A EP2 slave FIFO (fd, slwr_n, fifoadr)
// Measured interval = (coarse*8 + fine_stop - fine_start) * 125 ps; polarity=1
// means signal1 came first. The controller and USB interface run on ifclk,
// the FX2's interface clock. The internal reset is rst_n combined with the PLL
// lock (this design's choice). The PLL is a behavioural model, so this top
// simulates but does not synthesize as a whole; on an FPGA the vendor PLL takes
// its place.
`timescale 1ps/1ps
module tdc_top
  import tdc_pkg::*;
(
  input  logic        clk_osc,
  input  logic        ifclk,
  input  logic        rst_n,
  input  logic        signal1,
  input  logic        signal2,
  output logic [15:0] fd,
  output logic        slwr_n,
  output logic [1:0]  fifoadr,
  input  logic        full_n
);
  logic [NPHASE-1:0]   clk_ph;
  logic                locked, sys_rst_n;
  logic                start, stop, polarity, clr;
  logic [COARSE_W-1:0] coarse;
  logic [FINE_W-1:0]   fine_start, fine_stop;
  tdc_word_t           word;
  logic                word_valid, word_ready;

  pll_4phase u_pll (.clk_ref(clk_osc), .clk_ph(clk_ph), .locked(locked));

  assign sys_rst_n = rst_n && locked;

  discriminator u_disc (
    .signal1(signal1), .signal2(signal2), .clr(clr),
    .start(start), .stop(stop), .polarity(polarity)
  );

  coarse_module #(.COARSE_W(COARSE_W)) u_coarse (
    .clk1(clk_ph[0]), .rst_n(sys_rst_n), .start(start), .stop(stop), .clr(clr),
    .coarse(coarse)
  );

  fine_module u_fine (
    .clk_ph(clk_ph), .start(start), .stop(stop), .clr(clr),
    .fine_start(fine_start), .fine_stop(fine_stop)
  );

  combine_data u_combine (
    .clk(ifclk), .rst_n(sys_rst_n), .stop(stop), .polarity(polarity),
    .coarse(coarse), .fine_start(fine_start), .fine_stop(fine_stop),
    .clr(clr), .word(word), .word_valid(word_valid), .word_ready(word_ready)
  );

  fx2_fifo_writer #(.W(WORD_W)) u_usb (
    .clk(ifclk), .rst_n(sys_rst_n), .in_valid(word_valid), .in_data(word),
    .in_ready(word_ready), .fd(fd), .slwr_n(slwr_n), .fifoadr(fifoadr),
    .full_n(full_n)
  );
endmodule
