// fine_encoder: 4-to-3 encoder of the sampled clock phases.
// therm = {Clock1, Clock2, Clock3, Clock4} as sampled by one signal edge. Over
// one Clock1 period the four 45-degree clocks pass through eight states,
// 1000 1100 1110 1111 0111 0011 0001 0000, which encode to 0..7: the number of
// 125 ps bins between the last Clock1 rising edge and the signal edge. The
// eight valid states follow the published table. The other eight patterns can
// only come from a metastable sample; this design maps them with the rule that
// reproduces the table: Clock1 high gives (ones - 1), Clock1 low gives
// (7 - ones). Purely combinational.
`timescale 1ps/1ps
module fine_encoder (
  input  logic [3:0] therm,
  output logic [2:0] code
);
  logic [2:0] ones;

  always_comb begin
    ones = 3'($countones(therm));
    unique case (therm)
      4'b1000: code = 3'd0;
      4'b1100: code = 3'd1;
      4'b1110: code = 3'd2;
      4'b1111: code = 3'd3;
      4'b0111: code = 3'd4;
      4'b0011: code = 3'd5;
      4'b0001: code = 3'd6;
      4'b0000: code = 3'd7;
      default: code = therm[3] ? ones - 3'd1 : 3'd7 - ones;
    endcase
  end
endmodule
