// sdc_test_system: the reference test bench circuit with a bank of SDC
// monitors on one signal under test, wired as the delay-change experiments
// use them.
//
// Blocks and connections:
//   pll_clkmux   clk_100mhz -> sys_clk (400 MHz, or the reduced frequency
//                while clk_sel is set); reset_pll = reset.
//   sync_rst     makes sync_reset from reset and the PLL's lock state, in
//                step with sys_clk.
//   lfsr         64-bit LFSR clocked by sys_clk; its top bit leaves the block
//                as sut_out.
//   (fabric)     sut_out travels through the FPGA's routing to the monitors.
//                That path, where radiation adds delay, is outside this
//                module: it comes back in as sut_in.
//   sdc_monitor  N_MON monitors, all on sut_in, each with its own delay-line
//                setting tap_sel[m] and so its own threshold DC_th; flag m
//                rises when a transition of sut_in arrives later than
//                slack - tau_ADL(m) would allow.
//   clk_sel_dff  the OR of the flags sets clk_sel, which switches the PLL to
//                the reduced frequency and keeps it there until reset. It is
//                cleared by sync_reset, so it ignores the monitors while they
//                are still being reset.
// endpoint_q is monitor 0's FF1, the end-point sample of the SUT.
//
// Timing: every register runs on sys_clk. A flag is visible one sys_clk
// cycle after the late edge; clk_sel is set at the next edge, and the PLL
// makes its next cycle a long one.
//
// Following the design description: the PLL with clock selection, the
// flag-driven flip-flop feeding the selection, the reset synchroniser, the
// LFSR as SUT source, and twelve monitors with different thresholds on the
// same SUT. This design's own choices: one OR of all flags drives the
// selection flip-flop (the drawing has one monitor), sync_rst is held set
// while the PLL is unlocked, and the selection flip-flop is cleared by the
// synchronised reset (an external reset reaches it through the PLL's loss
// of lock and sync_rst).
`timescale 1ps/1ps
module sdc_test_system #(
  parameter int unsigned N_MON         = sdc_pkg::N_MONITORS,
  parameter int unsigned N_CARRY4      = sdc_pkg::ADL_N_CARRY4,
  parameter int unsigned LFSR_WIDTH    = sdc_pkg::LFSR_WIDTH,
  parameter int unsigned NOM_PERIOD_PS = sdc_pkg::NOM_PERIOD_PS,
  parameter int unsigned RED_PERIOD_PS = sdc_pkg::RED_PERIOD_PS,
  localparam int unsigned TAP_W        = $clog2(8 * N_CARRY4)
) (
  input  logic             clk_100mhz,
  input  logic             reset,
  // signal under test, to and from the monitored fabric path
  output logic             sut_out,
  input  logic             sut_in,
  // monitor configuration and results
  input  logic [TAP_W-1:0] tap_sel [N_MON],
  output logic [N_MON-1:0] sdc_flag,
  output logic             sdc_flag_any,
  output logic             clk_sel,
  output logic             endpoint_q,
  // clocking and reset status
  output logic             sys_clk,
  output logic             locked,
  output logic             sync_reset
);

  logic [N_MON-1:0] ff1_q, ff2_q;
  logic [LFSR_WIDTH-1:0] lfsr_state;

  pll_clkmux #(
    .NOM_PERIOD_PS(NOM_PERIOD_PS),
    .RED_PERIOD_PS(RED_PERIOD_PS)
  ) u_pll (
    .clk_in       (clk_100mhz),
    .reset_pll    (reset),
    .selection_clk(clk_sel),
    .clk_out      (sys_clk),
    .locked       (locked)
  );

  sync_rst u_sync_rst (
    .clk (sys_clk),
    .set (reset | ~locked),
    .din (1'b0),
    .dout(sync_reset)
  );

  lfsr #(.WIDTH(LFSR_WIDTH)) u_lfsr (
    .clk  (sys_clk),
    .rst  (sync_reset),
    .state(lfsr_state),
    .out  (sut_out)
  );

  for (genvar m = 0; m < N_MON; m++) begin : g_mon
    sdc_monitor #(.N_CARRY4(N_CARRY4)) u_mon (
      .clk     (sys_clk),
      .rst     (sync_reset),
      .sut     (sut_in),
      .tap_sel (tap_sel[m]),
      .ff1_q   (ff1_q[m]),
      .ff2_q   (ff2_q[m]),
      .sdc_flag(sdc_flag[m])
    );
  end

  assign sdc_flag_any = |sdc_flag;
  assign endpoint_q   = ff1_q[0];

  clk_sel_dff u_dff1 (
    .clk(sys_clk),
    .rst(sync_reset),
    .en (sdc_flag_any),
    .d  (1'b1),
    .q  (clk_sel)
  );

endmodule
