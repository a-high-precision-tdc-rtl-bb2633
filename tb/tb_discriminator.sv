// tb_discriminator: feeds pulse pairs in both orders, with extra pulses and
// pulses of different widths, and checks start (first edge), stop (second
// edge), polarity (1 when signal1 leads) and the asynchronous clear.
`timescale 1ps/1ps
module tb_discriminator;
  logic signal1 = 0, signal2 = 0, clr = 0;
  logic start, stop, polarity;
  int checks = 0, failures = 0;

  discriminator dut (.signal1(signal1), .signal2(signal2), .clr(clr),
                     .start(start), .stop(stop), .polarity(polarity));

  task automatic expect3(input logic e_start, e_stop, e_pol, input string what);
    checks++;
    if (start !== e_start || stop !== e_stop || (e_stop && polarity !== e_pol)) begin
      failures++;
      $display("FAIL %s: start=%b stop=%b pol=%b, expected %b %b %b", what, start, stop,
               polarity, e_start, e_stop, e_pol);
    end
  endtask

  task automatic pulse(input int which, input int width);
    if (which == 1) begin signal1 = 1; #(width); signal1 = 0; end
    else            begin signal2 = 1; #(width); signal2 = 0; end
  endtask

  task automatic pair(input bit s1_first, input int gap, input int w1, input int w2);
    clr = 1; #100; clr = 0; #100;
    expect3(0, 0, 0, "idle");
    fork
      begin pulse(s1_first ? 1 : 2, w1); end
      begin #(gap); pulse(s1_first ? 2 : 1, w2); end
    join_none
    #(gap / 2);
    expect3(1, 0, 0, "after first edge");
    #(gap);
    expect3(1, 1, s1_first, "after second edge");
    #(w1 + w2 + 1000);
    // stretched: still held after both pulses ended
    expect3(1, 1, s1_first, "held");
    // a further pulse on either input must not change anything
    pulse(s1_first ? 2 : 1, 300);
    #100;
    expect3(1, 1, s1_first, "extra pulse ignored");
    clr = 1; #10;
    expect3(0, 0, 0, "cleared");
  endtask

  initial begin
    #100_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pair(1, 5000, 2000, 2000);
    pair(0, 5000, 2000, 2000);
    pair(1, 300, 100, 5000);      // short first pulse, second arrives after it ends
    pair(0, 800, 2000, 50);       // second edge while first pulse still high
    for (int i = 0; i < 40; i++)
      pair(1'($urandom_range(0, 1)), 200 + int'($urandom_range(0, 20000)),
           50 + int'($urandom_range(0, 3000)), 50 + int'($urandom_range(0, 3000)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
