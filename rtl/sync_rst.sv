// sync_rst: reset synchroniser of the reference test bench (SYNC_RST).
//
// A chain of STAGES flip-flops is set asynchronously by set, so dout (the
// active-high SYNC RESET of the LFSR and the monitors) rises at once. When
// set falls the chain shifts din in on each clock, so dout falls STAGES
// clock edges later, in step with clk: the reset is asserted asynchronously
// and released synchronously.
//
// Interface: clk, set (asynchronous, active high), din (level shifted in
// once set is released; the test system ties it low), dout.
// The block, its name and its pins CLK, DIN, SET, DOUT come from the test-bench
// drawing, which also prints a VCC tie next to the block; which pin that tie
// reaches is not printed. This design ties DIN low so that the released
// reset is low; the two-stage depth is this design's own choice.
`timescale 1ps/1ps
module sync_rst #(
  parameter int unsigned STAGES = 2
) (
  input  logic clk,
  input  logic set,
  input  logic din,
  output logic dout
);

  logic [STAGES-1:0] chain;

  always_ff @(posedge clk or posedge set) begin
    if (set) chain <= '1;
    else     chain <= {chain[STAGES-2:0], din};
  end

  assign dout = chain[STAGES-1];

endmodule
