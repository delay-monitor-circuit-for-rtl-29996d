// tb_pll_clkmux: 100 MHz reference; checks that locked rises after the lock
// count, that clk_out has a 2500 ps period and 50% duty cycle in nominal
// mode and a 5000 ps period in reduced mode, that the switch happens within
// one reference half period with no short pulse, and that reset stops the
// clock.
`timescale 1ps/1ps
module tb_pll_clkmux;
  import sdc_pkg::*;

  logic clk_in = 1'b0, reset_pll, sel, clk_out, locked;
  int checks = 0, failures = 0;
  time last_rise, last_fall, period, high;
  int  n_rise;

  always #(REF_PERIOD_PS / 2) clk_in = ~clk_in;

  pll_clkmux dut (.clk_in(clk_in), .reset_pll(reset_pll), .selection_clk(sel),
                  .clk_out(clk_out), .locked(locked));

  always @(posedge clk_out) begin
    period = $time - last_rise;
    last_rise = $time;
    n_rise++;
  end
  always @(negedge clk_out) begin
    high = $time - last_rise;
    last_fall = $time;
  end

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    n_rise = 0; last_rise = 0; last_fall = 0; period = 0; high = 0;
    reset_pll = 1'b0; sel = 1'b0;
    #1 reset_pll = 1'b1;  // a real edge, whatever the power-up value
    #(3 * REF_PERIOD_PS + 100);
    check("no clock in reset", n_rise == 0 && !locked);
    reset_pll = 1'b0;
    repeat (PLL_LOCK_CYCLES - 1) @(posedge clk_in);
    #1;
    check("not yet locked", !locked);
    @(posedge clk_in); #1;
    check("locked", locked);
    // nominal mode
    repeat (3) @(posedge clk_in);
    for (int n = 0; n < 40; n++) begin
      @(posedge clk_out); #1;
      check($sformatf("nominal period %0t", period), period == NOM_PERIOD_PS);
      @(negedge clk_out); #1;
      check("nominal high", high == NOM_PERIOD_PS / 2);
    end
    begin
      int r0;
      @(posedge clk_in); #1;
      r0 = n_rise;
      repeat (10) @(posedge clk_in);
      #1;
      check("4 cycles per reference", n_rise - r0 == 40);
    end
    // switch to reduced mode at a random point
    #($urandom_range(REF_PERIOD_PS));
    sel = 1'b1;
    repeat (2) @(posedge clk_in);
    for (int n = 0; n < 40; n++) begin
      @(posedge clk_out); #1;
      check($sformatf("reduced period %0t", period), period == RED_PERIOD_PS);
      check("never a short high", high >= NOM_PERIOD_PS / 2);
    end
    // back to nominal
    sel = 1'b0;
    repeat (2) @(posedge clk_in);
    for (int n = 0; n < 8; n++) begin
      @(posedge clk_out); #1;
      check("nominal again", period == NOM_PERIOD_PS);
    end
    reset_pll = 1'b1;
    #1;
    check("unlock on reset", !locked);
    begin
      int r0;
      r0 = n_rise;
      #(3 * REF_PERIOD_PS);
      check("clock stopped", n_rise == r0 && clk_out == 1'b0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
