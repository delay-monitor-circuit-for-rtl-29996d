// tb_adl: for every tap setting, toggles the delay line input and measures
// the time until the output follows, for rising and falling edges. Expected
// delay of tap k: 20*(k+1) ps. Also checks that the output level equals the
// input once settled (the sum taps are re-inverted).
`timescale 1ps/1ps
module tb_adl;
  import sdc_pkg::*;

  logic din, dout;
  logic [ADL_TAP_W-1:0] tap_sel;
  int checks = 0, failures = 0;

  adl dut (.din(din), .tap_sel(tap_sel), .dout(dout));

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

  initial begin
    time t0, t1;
    din = 1'b0;
    tap_sel = '0;
    #1000;
    for (int k = 0; k < ADL_N_TAPS; k++) begin
      tap_sel = ADL_TAP_W'(k);
      #1000;
      check($sformatf("tap %0d settled low", k), dout == 1'b0);
      for (int e = 0; e < 2; e++) begin
        t0 = $time;
        din = ~din;
        fork
          begin wait (dout == din); t1 = $time; end
          begin #5000; t1 = 0; end
        join_any
        disable fork;
        check($sformatf("tap %0d edge %0d delay %0t", k, e, t1 - t0),
              (t1 - t0) == time'(adl_tap_delay_ps(k)));
        #1000;
        check($sformatf("tap %0d level", k), dout == din);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
