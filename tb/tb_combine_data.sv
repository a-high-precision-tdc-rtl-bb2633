// tb_combine_data: plays the role of the capture circuits. It sets polarity,
// coarse and fine values, raises stop at a random moment, and checks: the word
// appears exactly SYNC_STAGES+1 clock edges after stop, with the fields in
// the order {polarity, coarse, fine_start, fine_stop}; it is held while ready
// is low (stall); clr is raised only after the handshake and is held until the
// synchronised stop has fallen (stop is dropped here when clr rises, as the
// real capture flip-flops do); clr rises right after reset and clears a
// stale stop.
`timescale 1ps/1ps
module tb_combine_data;
  import tdc_pkg::*;
  localparam longint TCLK = 20_000;
  logic clk = 0, rst_n = 1, stop = 0, polarity = 0, word_ready = 0;
  logic [COARSE_W-1:0] coarse = '0;
  logic [FINE_W-1:0] fine_start = '0, fine_stop = '0;
  logic clr, word_valid;
  tdc_word_t word;
  int checks = 0, failures = 0, stalls = 0;

  combine_data dut (.clk(clk), .rst_n(rst_n), .stop(stop), .polarity(polarity),
                    .coarse(coarse), .fine_start(fine_start), .fine_stop(fine_stop),
                    .clr(clr), .word(word), .word_valid(word_valid), .word_ready(word_ready));

  always #(TCLK / 2) clk = ~clk;

  // the capture flip-flops are cleared asynchronously by clr
  always @(posedge clr) stop = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic one(input int stall_cycles);
    logic [15:0] exp_word;
    int edges;
    polarity   = 1'($urandom_range(0, 1));
    coarse     = 9'($urandom_range(0, 511));
    fine_start = 3'($urandom_range(0, 7));
    fine_stop  = 3'($urandom_range(0, 7));
    exp_word   = {polarity, coarse, fine_start, fine_stop};
    #(longint'($urandom_range(1, 19_000)));
    stop = 1;
    edges = 0;
    while (!word_valid && edges < 10) begin @(posedge clk); edges++; #1; end
    check(edges == 3, $sformatf("latency %0d edges", edges));
    check(word == exp_word, $sformatf("word %h expected %h", word, exp_word));
    check(!clr, "clr before handshake");
    for (int i = 0; i < stall_cycles; i++) begin
      @(posedge clk); #1;
      check(word_valid && word == exp_word && !clr, "hold during stall");
      stalls++;
    end
    word_ready = 1;
    @(posedge clk); #1;
    word_ready = 0;
    check(!word_valid && clr, "clear after handshake");
    edges = 0;
    while (clr && edges < 10) begin @(posedge clk); edges++; #1; end
    check(!clr && !stop, "clear released");
    check(edges == 3, $sformatf("clear length %0d", edges));
    repeat (2) @(posedge clk);
    #1;
    check(!word_valid, "idle after clear");
  endtask

  initial begin
    #10_000_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100 rst_n = 0;
    #(3 * TCLK);
    check(clr == 1'b0, "clr low during reset");
    stop = 1;                      // a stale stop from power-up
    @(negedge clk) rst_n = 1;
    @(posedge clk); #1;
    check(clr == 1'b1, "clr raised after reset");
    repeat (4) @(posedge clk);
    #1;
    check(clr == 1'b0 && !word_valid, "idle after reset");
    for (int i = 0; i < 50; i++) one(i % 3 == 0 ? int'($urandom_range(1, 5)) : 0);
    check(stalls > 0, "stall exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
