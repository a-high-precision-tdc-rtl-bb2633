// gray_to_bin: combinational Gray-to-binary conversion, b[i] = XOR of g[W-1:i].
`timescale 1ps/1ps
module gray_to_bin #(
  parameter int unsigned WIDTH = 9
) (
  input  logic [WIDTH-1:0] gray,
  output logic [WIDTH-1:0] bin
);
  always_comb begin
    bin[WIDTH-1] = gray[WIDTH-1];
    for (int i = int'(WIDTH) - 2; i >= 0; i--)
      bin[i] = bin[i+1] ^ gray[i];
  end
endmodule
