// route_delay: behavioural model (the delay is ignored by synthesis) of one
// routed FPGA net with a fixed propagation delay of DELAY_PS. With the
// default of 0 it is a plain wire. Used for the routing delays tau1..tau4
// inside the SDC monitor, whose sizes depend on placement and routing.
`timescale 1ps/1ps
module route_delay #(
  parameter int unsigned DELAY_PS = 0
) (
  input  logic i,
  output logic o
);

  if (DELAY_PS == 0) begin : g_wire
    assign o = i;
  end else begin : g_delay
    assign #(DELAY_PS) o = i;
  end

endmodule
