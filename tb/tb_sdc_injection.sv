// tb_sdc_injection: the single-delay-change scenario at the reference operating
// point, on the full test system at its default size: 400 MHz system clock,
// a sensitive node with 128 ps of slack, and a delay change of 100 ps
// injected on the node at 576 ns.
//
// Monitor m uses tap (m mod 6), so its threshold is 128 - 20*(m mod 6 + 1)
// ps: 108, 88, 68, 48, 28, 8 ps, twice. Checks:
//   - before the change, no monitor flags and the end point samples the SUT
//     correctly;
//   - the first SUT transition launched after the change is late for every
//     monitor whose threshold is below 100 ps, and their flags rise exactly
//     one clock period after that launch edge, the others stay low;
//   - the end point still samples the right value (100 ps < 128 ps slack:
//     no delay fault);
//   - the flag switches the system to the reduced frequency.
`timescale 1ps/1ps
module tb_sdc_injection;
  import sdc_pkg::*;

  localparam int unsigned NOMINAL_PATH = NOM_PERIOD_PS - SLACK_PS;
  localparam int unsigned DC_PS        = 100;
  localparam time         T_INJECT     = 576_000;

  logic clk_100mhz = 1'b0, reset;
  logic sut_out, sut_in;
  logic [ADL_TAP_W-1:0] tap_sel [N_MONITORS];
  logic [N_MONITORS-1:0] sdc_flag, exp_set;
  logic sdc_flag_any, clk_sel, endpoint_q, sys_clk, locked, sync_reset;
  int checks = 0, failures = 0;
  int unsigned path_ps;

  always #(REF_PERIOD_PS / 2) clk_100mhz = ~clk_100mhz;

  sdc_test_system dut (
    .clk_100mhz(clk_100mhz), .reset(reset),
    .sut_out(sut_out), .sut_in(sut_in),
    .tap_sel(tap_sel), .sdc_flag(sdc_flag), .sdc_flag_any(sdc_flag_any),
    .clk_sel(clk_sel), .endpoint_q(endpoint_q),
    .sys_clk(sys_clk), .locked(locked), .sync_reset(sync_reset)
  );

  initial sut_in = 1'b0;
  always @(sut_out) sut_in <= #(path_ps) sut_out;

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #5_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // end-point reference: value of sut_in just before each edge
  logic ref_ep;
  bit   running = 1'b0;
  always @(posedge sys_clk) ref_ep = sut_in;
  always @(negedge sys_clk)
    if (running) check("end-point sample", endpoint_q == ref_ep);

  initial begin
    time t_launch, t_flag;
    logic prev;
    for (int m = 0; m < N_MONITORS; m++) begin
      tap_sel[m] = ADL_TAP_W'(m % 6);
      exp_set[m] = (SLACK_PS < DC_PS + adl_tap_delay_ps(m % 6));
    end
    path_ps = NOMINAL_PATH + 1;    // 127 ps before the edge
    reset = 1'b0;
    #1 reset = 1'b1;  // a real edge, whatever the power-up value
    #(2 * REF_PERIOD_PS);
    reset = 1'b0;
    wait (locked);
    wait (!sync_reset);
    @(posedge sys_clk);
    running = 1'b1;
    // nominal operation up to the injection time
    while ($time < T_INJECT - NOM_PERIOD_PS) begin
      @(negedge sys_clk);
      check("no flag before the change", sdc_flag == '0 && !clk_sel);
    end
    wait ($time >= T_INJECT);
    @(negedge sys_clk);
    path_ps = NOMINAL_PATH + 1 + DC_PS;
    // first edge whose launch toggles the SUT
    prev = sut_out;
    do begin
      @(posedge sys_clk);
      #1;
    end while (sut_out == prev);
    t_launch = $time - 1;
    @(posedge sdc_flag_any);
    t_flag = $time;
    check($sformatf("flag latency %0t", t_flag - t_launch), t_flag - t_launch == time'(NOM_PERIOD_PS));
    #1;
    check($sformatf("flagged monitors %b expected %b", sdc_flag, exp_set), sdc_flag == exp_set);
    repeat (3) @(posedge sys_clk);
    check("reduced-frequency mode entered", clk_sel == 1'b1);
    repeat (50) @(posedge sys_clk);
    $display("injection at %0t, launch edge %0t, flag at %0t", T_INJECT, t_launch, t_flag);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
