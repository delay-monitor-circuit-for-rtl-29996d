// clk_sel_dff: the flip-flop that turns a monitor's SDC flag into the clock
// selection of the PLL (DFF1 of the reference test bench).
//
// Its data input is tied high and its clock enable is the SDC flag, so the
// first clock edge at which the flag is high sets q, and q stays set (the
// reduced-frequency mode) until rst. The design description asks that the
// reduced frequency be kept until the affected circuit is reconfigured and
// its state restored; rst stands for that return to nominal speed.
//
// Interface: clk, rst (asynchronous, active high, q = 0), en (the SDC
// flag), d (tied to 1 by the test system), q (the clock selection).
// Port names follow the test-bench drawing (D, CLK, CLK_EN, RESET, Q); the
// reset polarity and its asynchronous action are this design's choices.
`timescale 1ps/1ps
module clk_sel_dff (
  input  logic clk,
  input  logic rst,
  input  logic en,
  input  logic d,
  output logic q
);

  always_ff @(posedge clk or posedge rst) begin
    if (rst)     q <= 1'b0;
    else if (en) q <= d;
  end

endmodule
