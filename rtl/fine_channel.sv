// fine_channel: one fine-time interpolator. Four D flip-flops clocked by the
// rising edge of signal sample Clock1..Clock4 (clk_ph[0..3]); fine_encoder turns
// the 4-bit sample into the 3-bit phase of the edge within the Clock1 period.
// clr clears the flip-flops asynchronously. This is the published fine-time
// circuit for one signal.
`timescale 1ps/1ps
module fine_channel (
  input  logic       signal,
  input  logic       clr,
  input  logic [3:0] clk_ph,
  output logic [2:0] code
);
  logic [3:0] sample;  // {Clock1, Clock2, Clock3, Clock4}

  always_ff @(posedge signal or posedge clr)
    if (clr) sample <= '0;
    else     sample <= {clk_ph[0], clk_ph[1], clk_ph[2], clk_ph[3]};

  fine_encoder u_encoder (.therm(sample), .code(code));
endmodule
