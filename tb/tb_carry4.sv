// tb_carry4: checks the carry4 model's logic function for random inputs
// (after the outputs settle) and the arrival time of every output of the
// propagate-mode chain after a step on CI: output k of the sequence
// O0, CO0, O1, CO1, ... must change 20*(k+1) ps after CI, not earlier.
`timescale 1ps/1ps
module tb_carry4;
  import sdc_pkg::*;

  logic       ci, cyinit;
  logic [3:0] di, s, o, co;
  int checks = 0, failures = 0;

  carry4 dut (.CI(ci), .CYINIT(cyinit), .DI(di), .S(s), .O(o), .CO(co));

  // independent reference of the logic function
  function automatic logic [7:0] ref_out(logic ci_i, logic cy_i, logic [3:0] di_i, logic [3:0] s_i);
    logic c;
    logic [3:0] ro, rco;
    c = ci_i | cy_i;
    for (int i = 0; i < 4; i++) begin
      ro[i]  = s_i[i] ^ c;
      rco[i] = s_i[i] ? c : di_i[i];
      c = rco[i];
    end
    return {rco, ro};
  endfunction

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #100_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    time t0;
    logic [7:0] exp;
    // logic function
    for (int n = 0; n < 200; n++) begin
      {ci, cyinit} = 2'($urandom);
      di = 4'($urandom);
      s  = 4'($urandom);
      #1000;
      exp = ref_out(ci, cyinit, di, s);
      check($sformatf("logic n=%0d", n), {co, o} == exp);
    end
    // timing of the propagate chain
    s = 4'hF; di = 4'h0; cyinit = 1'b0; ci = 1'b0;
    #1000;
    t0 = $time;
    ci = 1'b1;
    for (int k = 0; k < 8; k++) begin
      // tap k: even k is O[k/2] (inverted copy), odd k is CO[k/2]
      #(t0 + time'(TAP_STEP_PS * (k + 1)) - 1 - $time);
      check($sformatf("tap %0d early", k), (k % 2 == 0) ? (o[k/2] == 1'b1) : (co[k/2] == 1'b0));
      #2;
      check($sformatf("tap %0d arrived", k), (k % 2 == 0) ? (o[k/2] == 1'b0) : (co[k/2] == 1'b1));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
