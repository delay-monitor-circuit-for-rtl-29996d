// tb_lfsr: compares the default 64-bit LFSR cycle by cycle with a reference
// computed from the polynomial x^64 + x^63 + x^61 + x^60 + 1, checks the
// reset value, and checks that an 8-bit instance (x^8 + x^6 + x^5 + x^4 + 1)
// has the maximal period of 255 with no repeated state in between.
`timescale 1ps/1ps
module tb_lfsr;
  import sdc_pkg::*;

  logic clk = 1'b0, rst;
  logic [63:0] state;
  logic        out;
  logic [7:0]  state8;
  logic        out8;
  int checks = 0, failures = 0;

  always #(NOM_PERIOD_PS / 2) clk = ~clk;

  lfsr dut (.clk(clk), .rst(rst), .state(state), .out(out));
  lfsr #(.WIDTH(8), .TAPS(8'hB8), .SEED(8'h01)) dut8 (.clk(clk), .rst(rst), .state(state8), .out(out8));

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
    logic [63:0] r;
    logic        fb;
    bit          seen [256];
    int          period;
    rst = 1'b0;
    #1 rst = 1'b1;  // a real edge, whatever the power-up value
    #3000;
    r = 64'h0123_4567_89AB_CDEF;
    check("reset value", state == r && out == r[63]);
    check("reset value 8", state8 == 8'h01);
    @(negedge clk) rst = 1'b0;
    for (int n = 0; n < 1000; n++) begin
      @(negedge clk);
      fb = r[63] ^ r[62] ^ r[60] ^ r[59];
      r  = {r[62:0], fb};
      check($sformatf("state n=%0d", n), state == r && out == r[63]);
    end
    // period of the 8-bit register
    rst = 1'b1;
    @(negedge clk) rst = 1'b0;
    period = 0;
    foreach (seen[i]) seen[i] = 1'b0;
    seen[8'h01] = 1'b1;
    do begin
      @(negedge clk);
      period++;
      if (state8 != 8'h01) begin
        check($sformatf("8-bit state %0h new", state8), !seen[state8] && state8 != 8'h00);
        seen[state8] = 1'b1;
      end
    end while (state8 != 8'h01 && period < 300);
    check($sformatf("8-bit period %0d", period), period == 255);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
