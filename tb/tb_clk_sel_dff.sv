// tb_clk_sel_dff: drives random enable pulses and data into the selection
// flip-flop and compares q after every edge with a reference model of an
// enabled flip-flop with asynchronous reset; then checks the sticky use with
// d tied high: one flag pulse sets q, which stays set until reset.
`timescale 1ps/1ps
module tb_clk_sel_dff;
  logic clk = 1'b0, rst, en, d, q;
  logic exp_q;
  int checks = 0, failures = 0;

  always #1250 clk = ~clk;

  clk_sel_dff dut (.clk(clk), .rst(rst), .en(en), .d(d), .q(q));

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
    rst = 1'b0; en = 1'b0; d = 1'b0; exp_q = 1'b0;
    #1 rst = 1'b1;  // a real edge, whatever the power-up value
    #3000;
    check("reset", q == 1'b0);
    @(negedge clk) rst = 1'b0;
    for (int n = 0; n < 300; n++) begin
      en = 1'($urandom);
      d  = 1'($urandom);
      @(posedge clk);
      if (en) exp_q = d;
      @(negedge clk);
      check($sformatf("random n=%0d", n), q == exp_q);
    end
    // sticky use: d = 1
    rst = 1'b1; #10; rst = 1'b0; d = 1'b1; en = 1'b0;
    repeat (5) @(negedge clk);
    check("idle stays 0", q == 1'b0);
    en = 1'b1;
    @(negedge clk);
    en = 1'b0;
    check("set by pulse", q == 1'b1);
    repeat (10) @(negedge clk);
    check("sticky", q == 1'b1);
    rst = 1'b1; #10;
    check("cleared by reset", q == 1'b0);
    rst = 1'b0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
