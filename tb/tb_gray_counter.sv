// tb_gray_counter: runs the 9-bit Gray counter through more than one full
// wrap. Each clock the output must equal n ^ (n >> 1) for a reference count n
// kept here, and exactly one bit may change.
`timescale 1ps/1ps
module tb_gray_counter;
  localparam int W = 9;
  logic clk = 0, rst_n = 1;
  logic [W-1:0] gray, prev;
  int checks = 0, failures = 0;
  int n;

  gray_counter #(.WIDTH(W)) dut (.clk(clk), .rst_n(rst_n), .gray(gray));

  always #500 clk = ~clk;

  initial begin
    #10_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100 rst_n = 0;
    #1100;
    checks++;
    if (gray != '0) begin failures++; $display("FAIL reset value %h", gray); end
    @(negedge clk);
    rst_n = 1;
    n = 0;
    prev = gray;
    for (int i = 0; i < 1200; i++) begin
      @(posedge clk);
      #1;
      n = (n + 1) % (1 << W);
      checks++;
      if (gray != W'(n ^ (n >> 1))) begin
        failures++;
        if (failures < 10) $display("FAIL step %0d: gray %h expected %h", i, gray, n ^ (n >> 1));
      end
      checks++;
      if ($countones(gray ^ prev) != 1) begin
        failures++;
        if (failures < 10) $display("FAIL step %0d: %h -> %h changes %0d bits", i, prev, gray, $countones(gray ^ prev));
      end
      prev = gray;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
