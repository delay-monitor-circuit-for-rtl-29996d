// tb_sdc_test_system: end-to-end run of the test system at its default size
// (64-bit LFSR, twelve monitors, 400 MHz), playing the delay-change
// experiment.
//
// The fabric path from the LFSR to the monitors is modelled here: sut_in
// follows sut_out after path_ps. Its nominal value leaves SLACK = 300 ps
// before the next 400 MHz edge. Monitor m uses tap m, so its delay line is
// 20*(m+1) ps and its threshold DC_th(m) = SLACK - 20*(m+1) (280 ... 60 ps).
//
// Sequence and checks:
//   1. Reset, PLL lock, synchronous reset release. 300 cycles with no delay
//      change: no flag, 2500 ps clock period, LFSR sequence equal to the
//      reference polynomial, end-point sample equal to the SUT.
//   2. First delay change of 71 ps: exactly monitor 11 (DC_th 60) must flag.
//      The flag must set clk_sel, the clock must slow to a 5000 ps period,
//      and in reduced-frequency mode no monitor may flag any more.
//   3. A second change of 60 ps arrives while the system is reset (the
//      reset stands for the reconfiguration that ends the reduced mode);
//      after restart the 131 ps in all must be flagged by monitors 8..11.
//   4. Likewise a third change of 60 ps, 191 ps in all: monitors 5..11.
//   5. Still in reduced-frequency mode, a fourth change of 150 ps (341 ps in
//      all, more than the 300 ps slack at full speed): the node must keep
//      delivering correct data, which is what the slow mode is for.
//   6. Restart at full speed with the 341 ps still there: now the node has a
//      real delay fault (the end point samples the previous bit), and no
//      monitor flags it, because FF1 and FF2 are both late.
// Throughout, the end-point sample is compared with the bit the LFSR
// launched one cycle earlier; a mismatch is a delay fault.
// Each mechanism (detection, clock switch, reduced-frequency operation,
// return to nominal speed, cumulative detection) is counted, and one that
// never happened counts as a failure.
`timescale 1ps/1ps
module tb_sdc_test_system;
  import sdc_pkg::*;

  localparam int unsigned SLACK = 300;
  localparam int unsigned NOMINAL_PATH = NOM_PERIOD_PS - SLACK;

  logic clk_100mhz = 1'b0, reset;
  logic sut_out, sut_in;
  logic [ADL_TAP_W-1:0] tap_sel [N_MONITORS];
  logic [N_MONITORS-1:0] sdc_flag;
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

  // fabric path with a programmable delay
  // transport delay: every edge of sut_out reaches sut_in path_ps later
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
    #50_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference LFSR, end-point sample, clock period and flag bookkeeping
  logic [63:0] ref_lfsr;
  logic        ref_ep;
  time         last_rise = 0;
  int          sel_age = 0;
  int unsigned n_nom_cycles = 0, n_red_cycles = 0;
  logic [N_MONITORS-1:0] flags_seen;
  int unsigned n_flag_cycles = 0, n_flags_in_reduced = 0;
  bit          running = 1'b0;
  logic        ref_data;
  int unsigned n_data_errors = 0, n_data_checked = 0;

  always @(posedge sys_clk) begin
    automatic time p = $time - last_rise;
    last_rise = $time;
    if (running && !sync_reset) begin
      if (!clk_sel && sel_age == 0) begin
        check($sformatf("nominal period %0t", p), p == time'(NOM_PERIOD_PS));
        n_nom_cycles++;
      end else if (sel_age >= 4) begin
        check($sformatf("reduced period %0t", p), p == time'(RED_PERIOD_PS));
        n_red_cycles++;
      end
    end
    sel_age = clk_sel ? sel_age + 1 : 0;
    ref_ep = sut_in;
    ref_data = sut_out;   // bit launched at the previous edge
  end

  always @(posedge sys_clk or posedge sync_reset) begin
    if (sync_reset) ref_lfsr <= LFSR64_SEED;
    else            ref_lfsr <= {ref_lfsr[62:0], ref_lfsr[63] ^ ref_lfsr[62] ^ ref_lfsr[60] ^ ref_lfsr[59]};
  end

  always @(negedge sys_clk) begin
    if (running && !sync_reset) begin
      check("lfsr out", sut_out == ref_lfsr[63]);
      check("end-point sample", endpoint_q == ref_ep);
      n_data_checked++;
      if (endpoint_q != ref_data) n_data_errors++;
      if (sdc_flag_any) n_flag_cycles++;
      if (sdc_flag_any && sel_age >= 4) n_flags_in_reduced++;
      flags_seen |= sdc_flag;
    end
  end

  task automatic restart();
    running = 1'b0;
    reset = 1'b1;
    #(3 * REF_PERIOD_PS);
    check("reset clears clk_sel", clk_sel == 1'b0);
    reset = 1'b0;
    wait (locked);
    wait (!sync_reset);
    @(posedge sys_clk);
    running = 1'b1;
  endtask

  // run with the given path delay; returns after n cycles
  task automatic phase(string name, int unsigned dc_total, logic [N_MONITORS-1:0] expect_set,
                       output bit switched);
    flags_seen = '0;
    n_flag_cycles = 0;
    n_flags_in_reduced = 0;
    // 50 nominal cycles with the old delay first
    if (path_ps == NOMINAL_PATH) begin
      repeat (50) @(posedge sys_clk);
      check({name, ": clean before change"}, flags_seen == '0 && !clk_sel);
    end
    @(negedge sys_clk);
    path_ps = NOMINAL_PATH + dc_total;
    repeat (300) @(posedge sys_clk);
    check($sformatf("%s: flagged set %b expected %b", name, flags_seen, expect_set),
          flags_seen == expect_set);
    switched = clk_sel;
    if (expect_set != '0) begin
      check({name, ": clock switched"}, clk_sel == 1'b1);
      check({name, ": no flags in reduced mode"}, n_flags_in_reduced == 0);
    end else begin
      check({name, ": still nominal"}, clk_sel == 1'b0);
    end
  endtask

  function automatic logic [N_MONITORS-1:0] expected_set(int unsigned dc);
    logic [N_MONITORS-1:0] e;
    for (int m = 0; m < N_MONITORS; m++)
      e[m] = (NOMINAL_PATH + dc + adl_tap_delay_ps(m) > NOM_PERIOD_PS);
    return e;
  endfunction

  int unsigned n_detect = 0, n_switch = 0, n_restore = 0, n_cumulative = 0;
  int unsigned n_absorbed = 0, n_fault_unflagged = 0;

  initial begin
    bit sw;
    static int unsigned dcs [3] = '{71, 131, 191};
    for (int m = 0; m < N_MONITORS; m++) tap_sel[m] = ADL_TAP_W'(m);
    path_ps = NOMINAL_PATH;
    reset = 1'b0;
    #1 reset = 1'b1;  // a real edge, whatever the power-up value
    #(2 * REF_PERIOD_PS);
    check("no clock during reset", !locked);
    restart();
    // 1. nominal
    phase("no change", 0, '0, sw);
    check("nominal cycles", n_nom_cycles > 300);
    // 2..4. first, second and third (cumulative) delay change
    for (int i = 0; i < 3; i++) begin
      if (i > 0) begin
        // the next change adds to the previous ones while the system is
        // being restored
        path_ps = NOMINAL_PATH + dcs[i];
        restart();
        n_restore++;
        check("nominal after restore", clk_sel == 1'b0);
      end
      phase($sformatf("delay change %0d (%0d ps)", i + 1, dcs[i]), dcs[i], expected_set(dcs[i]), sw);
      if (flags_seen != '0) n_detect++;
      if (sw) n_switch++;
      if (i > 0 && flags_seen == expected_set(dcs[i]) && $countones(flags_seen) > 1) n_cumulative++;
    end
    check("no delay fault in phases 1-4", n_data_errors == 0 && n_data_checked > 1000);
    // 5. fourth change while in reduced-frequency mode
    check("still in reduced mode", clk_sel == 1'b1);
    @(negedge sys_clk);
    path_ps = NOMINAL_PATH + 341;
    n_data_errors = 0;
    n_data_checked = 0;
    repeat (100) @(posedge sys_clk);
    check($sformatf("reduced mode absorbs 341 ps: %0d errors", n_data_errors),
          n_data_errors == 0 && n_data_checked >= 99);
    if (n_data_errors == 0 && clk_sel) n_absorbed++;
    // 6. back to full speed with the delay still there
    restart();
    n_data_errors = 0;
    flags_seen = '0;
    repeat (200) @(posedge sys_clk);
    check($sformatf("delay fault at full speed: %0d errors", n_data_errors), n_data_errors > 20);
    check("delay fault is not flagged", flags_seen == '0 && !clk_sel);
    if (n_data_errors > 0 && flags_seen == '0) n_fault_unflagged++;
    $display("detections=%0d clock_switches=%0d reduced_cycles=%0d restores=%0d cumulative=%0d absorbed=%0d unflagged_faults=%0d",
             n_detect, n_switch, n_red_cycles, n_restore, n_cumulative, n_absorbed, n_fault_unflagged);
    check("mechanism: SDC detection", n_detect == 3);
    check("mechanism: clock switch", n_switch == 3);
    check("mechanism: reduced-frequency operation", n_red_cycles > 100);
    check("mechanism: return to nominal", n_restore == 2);
    check("mechanism: cumulative detection", n_cumulative == 2);
    check("mechanism: change absorbed in reduced mode", n_absorbed == 1);
    check("mechanism: unflagged delay fault beyond the slack", n_fault_unflagged == 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
