// tb_coarse_module: Clock1 at 1 GHz (rising edges at 500 ps + k*1000 ps).
// Start and stop are raised at random times that never coincide with a clock
// edge; the expected coarse value is the number of Clock1 rising edges between
// them, modulo 512, computed from the edge times alone. Intervals from a few
// ns up to beyond the 512 ns range (to exercise the wrap) are used, and the
// counter is left to wrap between measurements.
`timescale 1ps/1ps
module tb_coarse_module;
  localparam int W = 9;
  localparam longint T = 1000, EDGE0 = 500;
  logic clk1 = 0, rst_n = 1, start = 0, stop = 0, clr = 0;
  logic [W-1:0] coarse;
  int checks = 0, failures = 0, wraps = 0;

  coarse_module #(.COARSE_W(W)) dut (.clk1(clk1), .rst_n(rst_n), .start(start),
                                     .stop(stop), .clr(clr), .coarse(coarse));

  always #500 clk1 = ~clk1;

  function automatic longint edges_before(input longint t);
    return (t - EDGE0 + T) / T;   // rising edges at EDGE0 + kT strictly before t
  endfunction

  task automatic measure(input longint gap);
    longint ts, tp, off;
    longint exp_c;
    clr = 1; #(200); clr = 0;
    off = 1 + longint'($urandom_range(0, 997));
    if (off == EDGE0) off++;
    // move to a point 'off' ps past a falling edge-aligned grid position
    @(posedge clk1); #(off);
    ts = $time; start = 1;
    #(gap);
    tp = $time;
    if ((tp - EDGE0) % T == 0) begin #(1); tp = $time; end
    stop = 1;
    #(10);
    exp_c = (edges_before(tp) - edges_before(ts)) % 512;
    if (gap >= 512 * T) wraps++;
    checks++;
    if (coarse != W'(exp_c)) begin
      failures++;
      $display("FAIL start %0d stop %0d: coarse %0d expected %0d", ts, tp, coarse, exp_c);
    end
    #(100); start = 0; stop = 0;
  endtask

  initial begin
    #2_000_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100 rst_n = 0;
    #1200 rst_n = 1;
    measure(10_300);
    measure(27_000);
    measure(217_000);
    measure(300_040);
    measure(511_900);
    measure(600_000);   // beyond range: wraps to (600 - 512)
    for (int i = 0; i < 60; i++)
      measure(longint'($urandom_range(100, 500_000)));
    checks++;
    if (wraps == 0) begin failures++; $display("FAIL no wrap case"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
