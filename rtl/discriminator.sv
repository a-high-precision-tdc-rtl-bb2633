// discriminator: decides which of two input pulses is the start and which the
// stop of an interval, so the two inputs need not be labelled in advance.
// Pulse stretching: each input's rising edge sets a flip-flop that holds until
// clr, turning a pulse of any width into a level. start is the OR of the two
// levels (it rises at the first edge), stop is their AND (it rises at the
// second edge). Identification: a flip-flop clocked by signal1 records whether
// signal2 had not yet been seen; polarity is 1 when signal1 came first, 0 when
// signal2 came first, as in the published design.
// The circuit is edge driven: signal1 and signal2 act as clocks, clr is an
// asynchronous clear. Only the first pulse on each input counts until clr.
// The OR/AND structure and the clear behaviour are this design's choices; the
// published design only names a pulse stretcher and an identification circuit.
`timescale 1ps/1ps
module discriminator (
  input  logic signal1,
  input  logic signal2,
  input  logic clr,
  output logic start,
  output logic stop,
  output logic polarity
);
  logic seen1, seen2, first1;

  always_ff @(posedge signal1 or posedge clr)
    if (clr) seen1 <= 1'b0;
    else     seen1 <= 1'b1;

  always_ff @(posedge signal2 or posedge clr)
    if (clr) seen2 <= 1'b0;
    else     seen2 <= 1'b1;

  // Sampled at signal1's first edge: 1 if signal2 has not arrived yet.
  always_ff @(posedge signal1 or posedge clr)
    if (clr)         first1 <= 1'b0;
    else if (!seen1) first1 <= !seen2;

  assign start    = seen1 | seen2;
  assign stop     = seen1 & seen2;
  assign polarity = first1;
endmodule
