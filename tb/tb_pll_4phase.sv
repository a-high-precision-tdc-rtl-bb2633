// tb_pll_4phase: drives the 125 MHz reference and measures the model's
// outputs: every phase must have a 1000 ps period, 500 ps high time, and
// phase p must rise 125*p ps after Clock1; locked must rise after the
// reference starts.
`timescale 1ps/1ps
module tb_pll_4phase;
  logic clk_ref = 0;
  logic [3:0] clk_ph;
  logic locked;
  int checks = 0, failures = 0;
  longint rise [4];
  longint fall [4];
  int nrise [4] = '{0, 0, 0, 0};

  pll_4phase dut (.clk_ref(clk_ref), .clk_ph(clk_ph), .locked(locked));

  initial begin #20_000; forever #4000 clk_ref = ~clk_ref; end

  for (genvar p = 0; p < 4; p++) begin : g_mon
    always @(posedge clk_ph[p]) begin
      longint t;
      t = $time;
      if (nrise[p] > 0) begin
        checks++;
        if (t - rise[p] != 1000) begin
          failures++;
          $display("FAIL phase %0d period %0d", p, t - rise[p]);
        end
      end
      if (p > 0 && nrise[0] > 0) begin
        checks++;
        if ((t - rise[0]) != 125 * p) begin
          failures++;
          $display("FAIL phase %0d offset %0d", p, t - rise[0]);
        end
      end
      rise[p] = t;
      nrise[p]++;
    end
    always @(negedge clk_ph[p]) if (nrise[p] > 0) begin
      fall[p] = $time;
      checks++;
      if (fall[p] - rise[p] != 500) begin
        failures++;
        $display("FAIL phase %0d high time %0d", p, fall[p] - rise[p]);
      end
    end
  end

  initial begin
    #10_000;
    checks++;
    if (locked !== 1'b0 || clk_ph !== 4'b0000) begin failures++; $display("FAIL before reference"); end
    #200_000;
    checks++;
    if (locked !== 1'b1) begin failures++; $display("FAIL not locked"); end
    checks++;
    if (nrise[0] < 150) begin failures++; $display("FAIL too few edges %0d", nrise[0]); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
