// tb_fx2_fifo_writer: a random source offers words on the valid/ready side; a
// model of the FX2 endpoint FIFO (capacity CAP words, drained at random)
// stores a word on each clock edge with slwr_n low and drives full_n low when
// it holds CAP words. Checks: every word arrives once and in order, no write
// happens while the FIFO is full, strobes last one cycle, fifoadr selects EP2,
// and the writer stalls while full.
`timescale 1ps/1ps
module tb_fx2_fifo_writer;
  localparam int CAP = 4;
  localparam longint TCLK = 20_000;
  logic clk = 0, rst_n = 1, in_valid = 0;
  logic [15:0] in_data = '0;
  logic in_ready, slwr_n;
  logic [15:0] fd;
  logic [1:0] fifoadr;
  logic full_n;
  int checks = 0, failures = 0, count = 0, full_stalls = 0, received = 0;
  logic [15:0] sent [$];

  fx2_fifo_writer dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_data(in_data),
                       .in_ready(in_ready), .fd(fd), .slwr_n(slwr_n), .fifoadr(fifoadr),
                       .full_n(full_n));

  always #(TCLK / 2) clk = ~clk;
  assign full_n = count < CAP;

  // FX2 endpoint model; count changes with nonblocking assignments so the
  // writer sees the flag of the previous edge
  always @(posedge clk) begin
    if (rst_n) begin
      int c;
      c = count;
      if (!slwr_n) begin
        logic [15:0] exp_w;
        checks++;
        if (c >= CAP) begin failures++; $display("FAIL write while full"); end
        checks++;
        if (fifoadr != 2'b00) begin failures++; $display("FAIL fifoadr %b", fifoadr); end
        exp_w = sent.size() > 0 ? sent.pop_front() : 16'h0000;
        checks++;
        if (fd != exp_w) begin failures++; $display("FAIL data %h expected %h", fd, exp_w); end
        c++;
        received++;
      end
      if (c > 0 && $urandom_range(0, 3) == 0) c--;
      if (in_valid && !full_n) full_stalls++;
      count <= c;
    end
  end

  initial begin
    #1_000_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100 rst_n = 0;
    #(3 * TCLK) rst_n = 1;
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      in_valid = 1;
      in_data  = 16'($urandom);
      while (!in_ready) @(negedge clk);
      sent.push_back(in_data);
      @(posedge clk);
      #1;
      in_valid = 0;
      if ($urandom_range(0, 2) == 0) repeat ($urandom_range(1, 4)) @(posedge clk);
    end
    repeat (4) @(posedge clk);
    #1;
    checks++;
    if (received != 300 || sent.size() != 0) begin failures++; $display("FAIL received %0d", received); end
    checks++;
    if (full_stalls == 0) begin failures++; $display("FAIL full never happened"); end
    $display("full stalls: %0d", full_stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
