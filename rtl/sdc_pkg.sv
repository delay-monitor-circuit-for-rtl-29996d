// sdc_pkg: constants shared by the single-delay-change (SDC) monitor and the
// test system around it.
//
// Times are in picoseconds. The numbers that come from the design description
// are the 400 MHz system clock (2500 ps period), the 100 MHz reference clock,
// the 128 ps timing slack of the monitored node, the ~20 ps step of one carry
// logic output, the 64-bit LFSR and the twelve monitors used for cumulative
// delay-change measurement. The reduced-frequency period, the number of CARRY4
// blocks per delay line and the LFSR polynomial and seed are this design's own
// choices.
`timescale 1ps/1ps
package sdc_pkg;

  // Clocks
  localparam int unsigned REF_PERIOD_PS = 10_000;  // CLK_100MHz input
  localparam int unsigned NOM_PERIOD_PS = 2_500;   // 400 MHz system clock
  localparam int unsigned RED_PERIOD_PS = 5_000;   // reduced-frequency mode (own choice: half rate)
  localparam int unsigned PLL_LOCK_CYCLES = 8;     // reference cycles before LOCKED (own choice)

  // Timing budget of the sensitive node in the reference test bench
  localparam int unsigned SLACK_PS = 128;

  // Carry-chain delay line
  localparam int unsigned TAP_STEP_PS   = 20;                 // delay between adjacent ADL taps
  localparam int unsigned MUXCY_PS      = 2 * TAP_STEP_PS;    // carry mux, one stage
  localparam int unsigned XORCY_PS      = TAP_STEP_PS;        // sum output after the stage's carry in
  localparam int unsigned ADL_N_CARRY4  = 2;                  // CARRY4 blocks per delay line
  localparam int unsigned ADL_N_TAPS    = 8 * ADL_N_CARRY4;   // two outputs per carry stage
  localparam int unsigned ADL_TAP_W     = $clog2(ADL_N_TAPS);

  typedef logic [ADL_TAP_W-1:0] tap_sel_t;

  // Monitors on one signal under test
  localparam int unsigned N_MONITORS = 12;

  // Signal source
  localparam int unsigned LFSR_WIDTH = 64;
  // x^64 + x^63 + x^61 + x^60 + 1 (maximal length), as a Fibonacci tap mask
  localparam logic [63:0] LFSR64_TAPS = 64'hD800_0000_0000_0000;
  localparam logic [63:0] LFSR64_SEED = 64'h0123_4567_89AB_CDEF;

  // Delay of ADL tap k, from the line's input to its output
  function automatic int unsigned adl_tap_delay_ps(int unsigned k);
    return TAP_STEP_PS * (k + 1);
  endfunction

endpackage
