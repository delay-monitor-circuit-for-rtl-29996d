// pll_clkmux: behavioural model (not synthesizable) of the PLL and clock
// multiplexer that make the system clock (PLLs_CLKMUX of the reference test
// bench).
//
// From the reference clock clk_in (100 MHz) the real block synthesises the
// system clock. The model counts LOCK_CYCLES rising edges of clk_in after
// reset_pll falls, then raises locked and starts clk_out. Each clk_out cycle
// is NOM_PERIOD_PS long (400 MHz) while selection_clk is low and
// RED_PERIOD_PS long (reduced-frequency mode) while it is high; the choice is
// made at each edge of clk_in, so a switch never makes a short pulse, and
// clk_out is phase-aligned to clk_in. Half a reference period must be a
// whole number of output periods. While reset_pll is high, locked and
// clk_out are low.
//
// Following the design description: 100 MHz in, 400 MHz out, a selection input
// that lowers the frequency after a delay change is detected. This model's own
// choices: the reduced frequency (half, which doubles the slack and so meets
// the requirement slack > 2 DC_th when slack > DC_th holds at full speed),
// the lock time and switching at a reference-clock edge.
`timescale 1ps/1ps
module pll_clkmux #(
  parameter int unsigned REF_PERIOD_PS   = sdc_pkg::REF_PERIOD_PS,
  parameter int unsigned NOM_PERIOD_PS   = sdc_pkg::NOM_PERIOD_PS,
  parameter int unsigned RED_PERIOD_PS   = sdc_pkg::RED_PERIOD_PS,
  parameter int unsigned LOCK_CYCLES     = sdc_pkg::PLL_LOCK_CYCLES
) (
  input  logic clk_in,
  input  logic reset_pll,
  input  logic selection_clk,
  output logic clk_out,
  output logic locked
);

  logic [$clog2(LOCK_CYCLES+1)-1:0] lock_cnt;

  always_ff @(posedge clk_in or posedge reset_pll) begin
    if (reset_pll) begin
      lock_cnt <= '0;
      locked   <= 1'b0;
    end else if (!locked) begin
      lock_cnt <= lock_cnt + 1'b1;
      locked   <= (lock_cnt == $bits(lock_cnt)'(LOCK_CYCLES - 1));
    end
  end

  // Clock synthesis: each edge of the reference starts a burst of output
  // cycles that fills the reference half period, so clk_out stays aligned
  // to clk_in. The last low phase is left to the next reference edge.
  localparam int unsigned N_NOM = (REF_PERIOD_PS / 2) / NOM_PERIOD_PS;
  localparam int unsigned N_RED = (REF_PERIOD_PS / 2) / RED_PERIOD_PS;

  always @(clk_in) begin
    if (locked && !reset_pll) begin
      if (selection_clk) begin
        for (int i = 0; i < N_RED; i++) begin
          clk_out = 1'b1;
          #(RED_PERIOD_PS / 2);
          clk_out = 1'b0;
          if (i != N_RED - 1) #(RED_PERIOD_PS - RED_PERIOD_PS / 2);
        end
      end else begin
        for (int i = 0; i < N_NOM; i++) begin
          clk_out = 1'b1;
          #(NOM_PERIOD_PS / 2);
          clk_out = 1'b0;
          if (i != N_NOM - 1) #(NOM_PERIOD_PS - NOM_PERIOD_PS / 2);
        end
      end
    end else begin
      clk_out = 1'b0;
    end
  end

endmodule
