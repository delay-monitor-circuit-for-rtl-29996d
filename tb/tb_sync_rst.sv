// tb_sync_rst: checks that dout rises as soon as set rises (no clock edge
// needed), stays high while set is high, and falls exactly on the second
// clock edge after set falls. Repeated with set released at random phases.
`timescale 1ps/1ps
module tb_sync_rst;
  logic clk = 1'b0, set, dout;
  int checks = 0, failures = 0;

  always #1250 clk = ~clk;

  sync_rst dut (.clk(clk), .set(set), .din(1'b0), .dout(dout));

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
    set = 1'b0;
    #1 set = 1'b1;  // a real edge, whatever the power-up value
    #3000;
    set = 1'b0;
    repeat (4) @(posedge clk);
    #100;
    for (int n = 0; n < 40; n++) begin
      // assert between edges
      @(posedge clk);
      #(100 + $urandom_range(2000));
      check("low before set", dout == 1'b0);
      set = 1'b1;
      #1;
      check("async assert", dout == 1'b1);
      repeat ($urandom_range(3)) @(posedge clk);
      #(100 + $urandom_range(2000));
      set = 1'b0;
      @(posedge clk); #1;
      check("held after 1st edge", dout == 1'b1);
      @(posedge clk); #1;
      check("released after 2nd edge", dout == 1'b0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
