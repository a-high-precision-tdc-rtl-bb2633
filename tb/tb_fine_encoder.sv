// tb_fine_encoder: applies all 16 input patterns to fine_encoder. The eight
// thermometer states must give the table codes 0..7; every other pattern is
// checked against the rule "Clock1 high: ones-1, Clock1 low: 7-ones",
// computed here bit by bit.
`timescale 1ps/1ps
module tb_fine_encoder;
  logic [3:0] therm;
  logic [2:0] code;
  int checks = 0, failures = 0;

  fine_encoder dut (.therm(therm), .code(code));

  // Table: sampled {Clock1..Clock4} -> code.
  localparam logic [3:0] TABLE [8] = '{4'b1000, 4'b1100, 4'b1110, 4'b1111,
                                       4'b0111, 4'b0011, 4'b0001, 4'b0000};

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 8; k++) begin
      therm = TABLE[k];
      #10;
      checks++;
      if (code != 3'(k)) begin
        failures++;
        $display("FAIL table %b -> %0d, expected %0d", therm, code, k);
      end
    end
    for (int v = 0; v < 16; v++) begin
      int n;
      int exp_code;
      therm = 4'(v);
      n = int'(therm[0]) + int'(therm[1]) + int'(therm[2]) + int'(therm[3]);
      exp_code = therm[3] ? n - 1 : 7 - n;
      #10;
      checks++;
      if (int'(code) != exp_code) begin
        failures++;
        $display("FAIL rule %b -> %0d, expected %0d", therm, code, exp_code);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
