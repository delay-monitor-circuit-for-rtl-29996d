// adl: adjustable delay line built from the slice carry chain.
//
// N_CARRY4 carry4 blocks are chained through their carry output (CO[3] of
// one block feeds CI of the next) with every select input high, so the input
// edge ripples down the carry multiplexers. Each carry stage gives two taps:
// its sum output O[i] and its carry output CO[i]. The sum output of a
// propagating stage is the inverse of the carry it receives, so it is
// re-inverted here. The taps are numbered in order of arrival,
//   tap 2j   = ~O[j],   tap 2j+1 = CO[j]      (j = carry stage, 0..4*N_CARRY4-1)
// and tap k lags the input by (k+1) * 20 ps with the default carry4 delays.
// tap_sel picks the tap that drives dout; in the FPGA it is a static choice
// made when the monitor is configured for the slack of its node, and here it
// is a port so that one line can be set to any threshold.
//
// Following the design description: delay line made of carry logic, output
// chosen among the sum-type and carry-mux outputs, ~20 ps per step. This
// design's own choices: two CARRY4 blocks (16 taps) by default, the tap
// numbering, and the inversion of the sum taps (the description calls them
// OR-gate outputs; the vendor's primitive has an XOR there, which is modelled).
// The tap multiplexer itself is modelled without delay; its delay is part of
// the fixed routing delays tau2/tau4 of the monitor.
`timescale 1ps/1ps
module adl #(
  parameter int unsigned N_CARRY4 = sdc_pkg::ADL_N_CARRY4,
  localparam int unsigned N_TAPS = 8 * N_CARRY4,
  localparam int unsigned TAP_W  = $clog2(N_TAPS)
) (
  input  logic             din,
  input  logic [TAP_W-1:0] tap_sel,
  output logic             dout
);

  logic [N_CARRY4:0]     carry;   // carry[b] enters block b
  logic [N_TAPS-1:0]     tap;

  assign carry[0] = din;

  for (genvar b = 0; b < N_CARRY4; b++) begin : g_blk
    logic [3:0] o, co;

    carry4 u_carry4 (
      .CI    (carry[b]),
      .CYINIT(1'b0),
      .DI    (4'b0000),
      .S     (4'b1111),
      .O     (o),
      .CO    (co)
    );

    assign carry[b+1] = co[3];

    for (genvar i = 0; i < 4; i++) begin : g_tap
      assign tap[8*b + 2*i]     = ~o[i];
      assign tap[8*b + 2*i + 1] = co[i];
    end
  end

  always_comb dout = tap[tap_sel];

endmodule
