// sdc_monitor: SUT-delayed monitor for single delay change (SDC) detection.
//
// A node whose timing slack is small (a sensitive node) carries the signal
// under test, sut. FF1 samples sut directly; FF2 samples sut after the
// adjustable delay line. The line is set so that, with the node's nominal
// delay, both copies still arrive before the clock edge:
//   slack >= tau1 + tau2 + tau4 + tau_ADL + DC_th.
// Then both flip-flops hold the same value and sdc_flag is low. If an upset
// in the routing adds more than DC_th to the node, a transition that still
// reaches FF1 in time reaches FF2 after the edge: the two samples differ
// and sdc_flag goes high, one cycle after the late edge, for as long as they
// differ (one cycle per late transition). A delay change larger than the
// node's slack makes FF1 itself miss the edge; FF1 and FF2 then agree and
// the change is a real delay fault that this monitor does not report.
//
// Interface: clk is the system clock, rst an asynchronous active-high
// reset of both flip-flops (both start at 0), tap_sel the delay-line
// setting (see adl). ff1_q is the sampled SUT value, usable as the node's
// end point; ff2_q the delayed sample.
//
// Following the design description: the two flip-flops with common clock and
// reset, the delay line in the FF2 branch only, and a flag raised when the
// two samples differ (drawn as a two-input gate). The reset polarity and
// asynchronous reset are this design's own choices.
//
// The routing delays of the drawing are parameters (behavioural, ignored by
// synthesis, 0 by default): TAU1_PS from the SUT pin to the branch point A,
// TAU2_PS from A to the delay line input B, TAU3_PS from A to FF1, TAU4_PS
// from the delay line output C to FF2. With them, FF2's input lags the SUT
// by TAU1+TAU2+tau_ADL+TAU4 and FF1's by TAU1+TAU3. Flip-flop setup time is
// zero in simulation.
`timescale 1ps/1ps
module sdc_monitor #(
  parameter int unsigned N_CARRY4 = sdc_pkg::ADL_N_CARRY4,
  parameter int unsigned TAU1_PS  = 0,
  parameter int unsigned TAU2_PS  = 0,
  parameter int unsigned TAU3_PS  = 0,
  parameter int unsigned TAU4_PS  = 0,
  localparam int unsigned TAP_W   = $clog2(8 * N_CARRY4)
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             sut,
  input  logic [TAP_W-1:0] tap_sel,
  output logic             ff1_q,
  output logic             ff2_q,
  output logic             sdc_flag
);

  logic node_a, node_b, node_c, d_ff1, d_ff2;

  route_delay #(.DELAY_PS(TAU1_PS)) u_tau1 (.i(sut),    .o(node_a));
  route_delay #(.DELAY_PS(TAU2_PS)) u_tau2 (.i(node_a), .o(node_b));
  route_delay #(.DELAY_PS(TAU3_PS)) u_tau3 (.i(node_a), .o(d_ff1));

  adl #(.N_CARRY4(N_CARRY4)) u_adl (
    .din    (node_b),
    .tap_sel(tap_sel),
    .dout   (node_c)
  );

  route_delay #(.DELAY_PS(TAU4_PS)) u_tau4 (.i(node_c), .o(d_ff2));

  always_ff @(posedge clk or posedge rst) begin
    if (rst) begin
      ff1_q <= 1'b0;
      ff2_q <= 1'b0;
    end else begin
      ff1_q <= d_ff1;
      ff2_q <= d_ff2;
    end
  end

  assign sdc_flag = ff1_q ^ ff2_q;

endmodule
