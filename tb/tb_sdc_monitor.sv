// tb_sdc_monitor: one monitor on a 400 MHz clock. Each cycle the test bench
// launches a random SUT bit that reaches the monitor ARR ps after the clock
// edge (the node's path delay). For every tap setting and a set of path
// delays, the expected FF1/FF2 samples and flag are worked out from the
// arrival times alone: FF2 gets the new bit only if ARR + 20*(k+1) < 2500.
// The flag must be high exactly in the cycles after a late transition, and
// the check is made in every cycle, so a flag one cycle early or late fails.
// A second monitor has non-zero routing delays tau1..tau4 (30, 15, 25 and
// 10 ps) and is checked against the same arrival-time rule with its FF1
// path tau1+tau3 and its FF2 path tau1+tau2+tau_ADL+tau4 (Eq. (1) of the
// design: a change is flagged once it exceeds
// slack - tau1 - tau2 - tau4 - tau_ADL); for late arrivals its FF1 misses
// the edge too, a delay fault that must not be flagged.
// Finally a delay change is injected in the middle of a run, as in the
// post-layout simulation of the design, and the first flagged cycle must be
// the first cycle after the change in which the SUT toggles.
`timescale 1ps/1ps
module tb_sdc_monitor;
  import sdc_pkg::*;

  localparam int unsigned T = NOM_PERIOD_PS;

  logic clk = 1'b0, rst, sut;
  logic ff1_q, ff2_q, sdc_flag;
  logic [ADL_TAP_W-1:0] tap_sel;
  int unsigned arr;
  int checks = 0, failures = 0;
  int n_flags = 0;

  always #(T / 2) clk = ~clk;

  sdc_monitor dut (.clk(clk), .rst(rst), .sut(sut), .tap_sel(tap_sel),
                   .ff1_q(ff1_q), .ff2_q(ff2_q), .sdc_flag(sdc_flag));

  // previous and current launched bits
  logic cur_bit, prev_bit;

  localparam int unsigned TAU1 = 30, TAU2 = 15, TAU3 = 25, TAU4 = 10;
  logic r_ff1_q, r_ff2_q, r_sdc_flag;
  sdc_monitor #(.TAU1_PS(TAU1), .TAU2_PS(TAU2), .TAU3_PS(TAU3), .TAU4_PS(TAU4)) dut_routed (
    .clk(clk), .rst(rst), .sut(sut), .tap_sel(tap_sel),
    .ff1_q(r_ff1_q), .ff2_q(r_ff2_q), .sdc_flag(r_sdc_flag));
  int n_routed_faults = 0;

  // expected samples of the routed monitor
  task automatic check_routed(int unsigned k);
    logic e1, e2;
    e1 = (arr + TAU1 + TAU3 < T) ? cur_bit : prev_bit;
    e2 = (arr + TAU1 + TAU2 + adl_tap_delay_ps(k) + TAU4 < T) ? cur_bit : prev_bit;
    check($sformatf("routed ff1 k=%0d arr=%0d", k, arr), r_ff1_q == e1);
    check($sformatf("routed ff2 k=%0d arr=%0d", k, arr), r_ff2_q == e2);
    check($sformatf("routed flag k=%0d arr=%0d", k, arr), r_sdc_flag == (e1 ^ e2));
    if (arr + TAU1 + TAU3 >= T) n_routed_faults++;
  endtask

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #200_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end


  // one cycle: launch a bit at the edge, arriving arr later; check after edge
  task automatic run_cycles(int n, int unsigned k);
    logic e1, e2;
    for (int c = 0; c < n; c++) begin
      @(posedge clk);
      prev_bit = cur_bit;
      cur_bit  = 1'($urandom);
      fork
        begin
          automatic logic v = cur_bit;
          #(arr) sut = v;
        end
      join_none
      @(posedge clk);
      #1;
      // the bit launched one edge ago reached FF1 in time (arr < T)
      e1 = cur_bit;
      e2 = (arr + adl_tap_delay_ps(k) < T) ? cur_bit : prev_bit;
      check($sformatf("ff1 k=%0d arr=%0d", k, arr), ff1_q == e1);
      check($sformatf("ff2 k=%0d arr=%0d", k, arr), ff2_q == e2);
      check($sformatf("flag k=%0d arr=%0d", k, arr), sdc_flag == (e1 ^ e2));
      check_routed(k);
      if (sdc_flag) n_flags++;
      // go back one edge so that launches are every cycle
      prev_bit = cur_bit;
      cur_bit  = 1'($urandom);
      fork
        begin
          automatic logic v = cur_bit;
          #(arr - 1) sut = v;
        end
      join_none
      @(posedge clk);
      #1;
      e1 = cur_bit;
      e2 = (arr + adl_tap_delay_ps(k) < T) ? cur_bit : prev_bit;
      check($sformatf("ff1b k=%0d arr=%0d", k, arr), ff1_q == e1);
      check($sformatf("ff2b k=%0d arr=%0d", k, arr), ff2_q == e2);
      check($sformatf("flagb k=%0d arr=%0d", k, arr), sdc_flag == (e1 ^ e2));
      check_routed(k);
      if (sdc_flag) n_flags++;
      // align: the launch task above consumed two edges; restart next loop
    end
  endtask

  initial begin
    int unsigned arrs [5] = '{1001, 2201, 2371, 2411, 2479};
    int first_flag_cycle;
    rst = 1'b0; sut = 1'b0; cur_bit = 1'b0; prev_bit = 1'b0;
    #1 rst = 1'b1;  // a real edge, whatever the power-up value
    tap_sel = '0; arr = 1001;
    #3100;
    check("reset ff1", ff1_q == 1'b0);
    check("reset ff2", ff2_q == 1'b0);
    check("reset flag", sdc_flag == 1'b0);
    @(negedge clk) rst = 1'b0;
    for (int k = 0; k < ADL_N_TAPS; k++) begin
      tap_sel = ADL_TAP_W'(k);
      foreach (arrs[a]) begin
        arr = arrs[a];
        // settle: one full cycle with the new arrival time
        run_cycles(1, k);
        run_cycles(12, k);
      end
    end
    check("some flags seen", n_flags > 0);
    check("routed monitor met a delay fault", n_routed_faults > 0);

    // delay change injection: slack 128 ps, tap 2 (60 ps), DC_th = 68 ps
    tap_sel = 2;
    arr = T - SLACK_PS + 1;     // nominal arrival, 127 ps before the edge
    run_cycles(20, 2);
    n_flags = 0;
    run_cycles(1, 2);
    check("no flag without delay change", n_flags == 0);
    arr = T - SLACK_PS + 1 + 100;   // SDC of 100 ps > DC_th, < slack
    first_flag_cycle = -1;
    for (int c = 0; c < 40 && first_flag_cycle < 0; c++) begin
      n_flags = 0;
      run_cycles(1, 2);
      if (n_flags > 0) first_flag_cycle = c;
    end
    check("SDC detected", first_flag_cycle >= 0);
    $display("n_flags=%0d first_flag_cycle=%0d", n_flags, first_flag_cycle);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
