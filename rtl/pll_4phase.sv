// pll_4phase: BEHAVIOURAL MODEL (not synthesizable) of the FPGA's hard PLL.
// The real part is the vendor PLL macro, configured rather than designed: it
// multiplies the 125 MHz oscillator by MULT (8) and drives NPHASE (4) outputs
// of equal frequency, 50% duty cycle, shifted by PHASE_STEP_DEG (45) degrees
// each, so that the four outputs split one 1 ns period into eight 125 ps bins.
// clk_ph[0] is Clock1 (0 deg, also the coarse counting clock), clk_ph[3] is
// Clock4 (135 deg).
// Model: all outputs are low until the first rising edge of clk_ref; from then
// Clock1 free-runs at REF_PERIOD_PS/MULT and each other output is Clock1
// delayed by its phase offset. locked rises on the LOCK_CYCLES-th reference
// edge (lock time is this model's
// choice). The model does not track drift of clk_ref. Times are in ps.
`timescale 1ps/1ps
module pll_4phase #(
  parameter int unsigned MULT           = 8,
  parameter int unsigned NPHASE         = 4,
  parameter int unsigned PHASE_STEP_DEG = 45,
  parameter int unsigned REF_PERIOD_PS  = 8000,
  parameter int unsigned LOCK_CYCLES    = 4
) (
  input  logic              clk_ref,
  output logic [NPHASE-1:0] clk_ph,
  output logic              locked
);
  localparam int unsigned OUT_PERIOD_PS = REF_PERIOD_PS / MULT;
  localparam int unsigned HALF_PS       = OUT_PERIOD_PS / 2;

  logic        running = 1'b0;  // set by the first reference edge
  logic        clock1  = 1'b0;  // 0 degree output
  int unsigned ref_edges = 0;

  always @(posedge clk_ref) begin
    running <= 1'b1;
    if (ref_edges < LOCK_CYCLES) ref_edges <= ref_edges + 1;
  end

  assign locked = (ref_edges >= LOCK_CYCLES);

  // Clock1: first rising edge at the first reference edge, then free-running.
  always @(posedge running) begin
    while (running) begin
      clock1 = 1'b1;
      #(HALF_PS);
      clock1 = 1'b0;
      #(OUT_PERIOD_PS - HALF_PS);
    end
  end

  // The other outputs are Clock1 delayed by p * PHASE_STEP_DEG.
  for (genvar p = 0; p < NPHASE; p++) begin : g_phase
    localparam int unsigned OFFSET_PS = OUT_PERIOD_PS * p * PHASE_STEP_DEG / 360;
    if (p == 0) begin : g_ref
      assign clk_ph[p] = clock1;
    end else begin : g_delayed
      assign #(OFFSET_PS) clk_ph[p] = clock1;
    end
  end
endmodule
