// tb_tdc_top: end-to-end test of the whole TDC at its default sizes.
// A 125 MHz oscillator feeds the PLL model; a 48 MHz interface clock runs the
// controller and the USB side; a model of the FX2 endpoint FIFO (capacity CAP
// words, drained at random and sometimes not at all, so that it fills up)
// receives the words. For each measurement two pulses of random width are
// placed on signal1 and signal2, in either order, at times that never fall on
// a 125 ps phase boundary. The expected word is worked out from the edge times
// alone: Clock1 rises at t0 + k*1000 ps (t0 = first oscillator rising edge),
//   fine     = floor(((t - t0) mod 1000) / 125)
//   coarse   = floor((t_second - t0)/1000) - floor((t_first - t0)/1000)  mod 512
//   polarity = 1 if signal1 came first,
// and the decoded interval coarse*8 + fine_stop - fine_start must lie within
// one 125 ps bin of the set interval.
// Runs: the two intervals of the resolution measurement (27 ns, 217 ns), the
// linearity sweep 10..300 ns in 10 ns steps, and random intervals up to 500 ns.
// Mechanisms counted (each must occur): signal1 first, signal2 first, every
// fine code on both channels, Gray counter wrap inside an interval, the writer
// stalled by a full FIFO, and the clear after each word (every word after
// the first can only be produced if the TDC was cleared after the previous).
`timescale 1ps/1ps
module tb_tdc_top;
  localparam longint TOSC = 8000, TIF = 20834, T = 1000, BIN = 125;
  localparam int CAP = 3;

  logic clk_osc = 0, ifclk = 0, rst_n = 1, signal1 = 0, signal2 = 0;
  logic [15:0] fd;
  logic slwr_n, full_n;
  logic [1:0] fifoadr;

  int checks = 0, failures = 0;
  int n_s1_first = 0, n_s2_first = 0, n_wrap = 0, n_full_stall = 0, n_clear = 0;
  bit [7:0] seen_fs = '0, seen_fp = '0;
  longint t0 = -1;

  // FX2 endpoint model
  int count = 0, received = 0;
  bit drain_hold = 0;
  logic [15:0] expect_q [$];

  tdc_top dut (.clk_osc(clk_osc), .ifclk(ifclk), .rst_n(rst_n), .signal1(signal1),
               .signal2(signal2), .fd(fd), .slwr_n(slwr_n), .fifoadr(fifoadr),
               .full_n(full_n));

  always #(TOSC / 2) clk_osc = ~clk_osc;
  always #(TIF / 2) ifclk = ~ifclk;
  always @(posedge clk_osc) if (t0 < 0) t0 = $time;

  assign full_n = count < CAP;

  always @(posedge ifclk) begin
    int c;
    c = count;
    if (!slwr_n) begin
      checks++;
      if (c >= CAP || fifoadr != 2'b00) begin
        failures++;
        $display("FAIL write while full or to wrong endpoint");
      end
      checks++;
      if (expect_q.size() == 0) begin
        failures++;
        $display("FAIL unexpected word %h", fd);
      end else begin
        logic [15:0] e;
        e = expect_q.pop_front();
        if (fd != e) begin
          failures++;
          $display("FAIL word %h expected %h (pol %b coarse %0d fs %0d fp %0d)", fd, e,
                   e[15], e[14:6], e[5:3], e[2:0]);
        end
      end
      c++;
      received++;
    end
    if (!drain_hold && c > 0 && $urandom_range(0, 1) == 0) c--;
    if (expect_q.size() > 0 && !full_n) n_full_stall++;  // a word waits on a full FIFO
    count <= c;
  end

  function automatic longint fl(input longint t);  // Clock1 rises before t
    return (t - t0) / T;
  endfunction
  function automatic int fine_of(input longint t);
    return int'(((t - t0) % T) / BIN);
  endfunction

  // delay to the next time that is not on a 125 ps boundary of Clock1
  task automatic off_grid();
    if (($time - t0) % BIN == 0) #(3);
  endtask

  task automatic pulse1(input longint w);
    signal1 = 1; #(w); signal1 = 0;
  endtask
  task automatic pulse2(input longint w);
    signal2 = 1; #(w); signal2 = 0;
  endtask

  task automatic measure(input longint d, input bit s1_first);
    longint ta, tb2, dd, w1, w2;
    int fs, fp, coarse, meas;
    logic [15:0] e;
    int n_before;
    n_before = received;
    #(longint'($urandom_range(0, 7999)));
    off_grid();
    ta = $time;
    dd = d;
    if ((ta + dd - t0) % BIN == 0) dd += 5;
    tb2 = ta + dd;
    fs = fine_of(ta);
    fp = fine_of(tb2);
    coarse = int'((fl(tb2) - fl(ta)) % 512);
    if ((fl(ta) % 512) + longint'(coarse) >= 512) n_wrap++;
    e = {s1_first, 9'(coarse), 3'(fs), 3'(fp)};
    expect_q.push_back(e);
    meas = coarse * 8 + fp - fs;
    checks++;
    if (meas * BIN > dd + BIN || meas * BIN < dd - BIN) begin
      failures++;
      $display("FAIL model interval %0d bins for %0d ps", meas, dd);
    end
    seen_fs[fs] = 1; seen_fp[fp] = 1;
    if (s1_first) n_s1_first++; else n_s2_first++;
    w1 = 2000 + longint'($urandom_range(0, 40000));
    w2 = 2000 + longint'($urandom_range(0, 40000));
    fork
      if (s1_first) pulse1(w1); else pulse2(w1);
      begin #(dd); if (s1_first) pulse2(w2); else pulse1(w2); end
    join
    // wait until the word has been written and the TDC cleared again
    while (received == n_before) @(posedge ifclk);
    if (received > 1) n_clear++;  // this word needed the clear after the previous one
    #(8 * TIF);
  endtask

  initial begin
    #50_000_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000 rst_n = 0;
    #(10 * TOSC) rst_n = 1;
    #(10 * TOSC);
    // resolution runs: 27 ns and 217 ns
    for (int i = 0; i < 40; i++) measure(27_000, i % 2 == 0);
    for (int i = 0; i < 40; i++) measure(217_000, i % 2 == 1);
    // linearity sweep 10..300 ns
    for (int k = 1; k <= 30; k++)
      for (int i = 0; i < 8; i++) begin
        if (i == 3)  // the PC stops reading for 3 us: the FIFO fills up
          fork begin drain_hold = 1; #3_000_000; drain_hold = 0; end join_none
        measure(longint'(k) * 10_000, 1'($urandom_range(0, 1)));
      end
    // random intervals, including values off the 125 ps grid
    for (int i = 0; i < 150; i++)
      measure(longint'($urandom_range(1000, 500_000)), 1'($urandom_range(0, 1)));
    #(20 * TIF);
    checks++;
    if (expect_q.size() != 0) begin failures++; $display("FAIL %0d words missing", expect_q.size()); end
    $display("signal1 first %0d, signal2 first %0d, wraps %0d, full stalls %0d, clears %0d, fine bins %b %b",
             n_s1_first, n_s2_first, n_wrap, n_full_stall, n_clear, seen_fs, seen_fp);
    checks += 6;
    if (n_s1_first == 0) begin failures++; $display("FAIL never signal1 first"); end
    if (n_s2_first == 0) begin failures++; $display("FAIL never signal2 first"); end
    if (n_wrap == 0) begin failures++; $display("FAIL counter never wrapped in an interval"); end
    if (n_full_stall == 0) begin failures++; $display("FAIL FIFO never full"); end
    if (n_clear != received - 1) begin failures++; $display("FAIL clears %0d < words %0d", n_clear, received); end
    if (seen_fs != 8'hFF || seen_fp != 8'hFF) begin failures++; $display("FAIL fine codes not all seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
