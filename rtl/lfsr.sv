// lfsr: Fibonacci linear feedback shift register that produces the signal
// under test (SUT) of the reference test bench, one new bit per system clock.
//
// Each clock the register shifts up by one and the new bit 0 is the XOR of
// the state bits selected by TAPS; out is the most significant bit. With the
// default mask (x^64 + x^63 + x^61 + x^60 + 1) the sequence is maximal,
// 2^64 - 1 states, so the SUT toggles on about half the cycles in a
// pseudo-random pattern. rst (asynchronous, active high) loads SEED, which
// must not be zero.
//
// The 64-bit width and the use of the register as the SUT source at the
// system-clock rate follow the design description; the polynomial, the
// Fibonacci form, the seed and the reset are this design's own choices.
`timescale 1ps/1ps
module lfsr #(
  parameter int unsigned      WIDTH = sdc_pkg::LFSR_WIDTH,
  parameter logic [WIDTH-1:0] TAPS  = WIDTH'(sdc_pkg::LFSR64_TAPS),
  parameter logic [WIDTH-1:0] SEED  = WIDTH'(sdc_pkg::LFSR64_SEED)
) (
  input  logic             clk,
  input  logic             rst,
  output logic [WIDTH-1:0] state,
  output logic             out
);

  always_ff @(posedge clk or posedge rst) begin
    if (rst) state <= SEED;
    else     state <= {state[WIDTH-2:0], ^(state & TAPS)};
  end

  assign out = state[WIDTH-1];

endmodule
