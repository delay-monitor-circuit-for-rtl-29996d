// carry4: behavioural model (not synthesizable as a delay element) of the
// four-stage fast carry logic found in one FPGA slice.
//
// Each stage i has a carry multiplexer (MUXCY) and a sum gate (XORCY):
//   c[0]    = CI | CYINIT
//   c[i+1]  = S[i] ? c[i] : DI[i]       -> CO[i], after MUXCY_PS
//   O[i]    = S[i] ^ c[i]               -> O[i],  after XORCY_PS
// With every select S[i] high the block is a chain of four carry muxes, and
// its eight outputs give eight delayed copies of the carry input; that is how
// the adjustable delay line uses it. The port names follow the FPGA vendor's
// primitive. The stage delays are parameters; their defaults are chosen so
// that successive outputs (O0, CO0, O1, CO1, ...) are 20 ps apart, the tap
// resolution reported for a 65 nm device. The split between mux and sum gate
// delay is this model's own choice.
//
// The delays are continuous-assignment delays. Pulses much shorter than a
// stage delay do not occur at the clock rates used, so whether the
// simulator swallows them does not matter here.
`timescale 1ps/1ps
module carry4 #(
  parameter int unsigned MUXCY_PS = sdc_pkg::MUXCY_PS,
  parameter int unsigned XORCY_PS = sdc_pkg::XORCY_PS
) (
  input  logic       CI,
  input  logic       CYINIT,
  input  logic [3:0] DI,
  input  logic [3:0] S,
  output logic [3:0] O,
  output logic [3:0] CO
);

  logic [4:0] c;

  assign c[0] = CI | CYINIT;

  for (genvar i = 0; i < 4; i++) begin : g_stage
    assign #(MUXCY_PS) c[i+1] = S[i] ? c[i] : DI[i];
    assign #(XORCY_PS) O[i]   = S[i] ^ c[i];
  end

  assign CO = c[4:1];

endmodule
