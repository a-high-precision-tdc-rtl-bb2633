// tb_fine_module: four 1 GHz clocks shifted by 0/125/250/375 ps are generated
// here. Start and stop edges are placed at random times (never on a clock
// edge); each fine output must equal the number of whole 125 ps bins between
// the last Clock1 rising edge and the edge. All eight bins must be seen on
// both channels; clr must clear both.
`timescale 1ps/1ps
module tb_fine_module;
  localparam longint T = 1000, BIN = 125, T0 = 2000;
  logic [3:0] clk_ph = '0;
  logic start = 0, stop = 0, clr = 1;
  logic [2:0] fine_start, fine_stop;
  int checks = 0, failures = 0;
  bit [7:0] seen_start = '0, seen_stop = '0;

  fine_module dut (.clk_ph(clk_ph), .start(start), .stop(stop), .clr(clr),
                   .fine_start(fine_start), .fine_stop(fine_stop));

  for (genvar p = 0; p < 4; p++) begin : g_clk
    initial begin
      #(T0 + p * BIN);
      forever begin
        clk_ph[p] = 1; #(T / 2);
        clk_ph[p] = 0; #(T / 2);
      end
    end
  end

  function automatic int bin_of(input longint t);
    return int'(((t - T0) % T) / BIN);
  endfunction

  // wait until an absolute time that is not on a 125 ps grid point
  task automatic go_to_free_time(input longint delta);
    longint t;
    #(delta);
    t = $time;
    if ((t - T0) % BIN == 0) #(7);
  endtask

  task automatic measure(input longint d1, input longint d2);
    longint ts, tp;
    clr = 1; #(50); clr = 0;
    go_to_free_time(d1);
    ts = $time; start = 1;
    go_to_free_time(d2);
    tp = $time; stop = 1;
    #(5);
    checks += 2;
    if (int'(fine_start) != bin_of(ts)) begin
      failures++;
      $display("FAIL start at %0d: %0d expected %0d", ts, fine_start, bin_of(ts));
    end
    if (int'(fine_stop) != bin_of(tp)) begin
      failures++;
      $display("FAIL stop at %0d: %0d expected %0d", tp, fine_stop, bin_of(tp));
    end
    seen_start[bin_of(ts)] = 1'b1;
    seen_stop[bin_of(tp)]  = 1'b1;
    #(50); start = 0; stop = 0;
  endtask

  initial begin
    #1_000_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(T0 + 3 * T);
    for (int b = 0; b < 8; b++) measure(longint'(b) * 131 + 3, 1000 + longint'(b) * 97);
    for (int i = 0; i < 200; i++)
      measure(longint'($urandom_range(1, 3000)), longint'($urandom_range(1, 50_000)));
    checks += 2;
    if (seen_start != 8'hFF || seen_stop != 8'hFF) begin
      failures++;
      $display("FAIL bins not all covered: %b %b", seen_start, seen_stop);
    end
    clr = 1; #(10);
    if (fine_start != 3'd7 || fine_stop != 3'd7) begin   // cleared sample 0000 encodes to 7
      failures++;
      $display("FAIL clear: %0d %0d", fine_start, fine_stop);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
