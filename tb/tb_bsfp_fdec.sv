// tb_bsfp_fdec -- checks that the full-exponent decoder restores every FP16
// exponent 0..15 from its BSFP encoding, and that unflagged codes pass through.
//
// Reference: the paper's remapping table, as coded in tb_util_pkg.
// Combinational block: each input is checked after a 1 ns settle.
// Structure: no ports; the clock (where there is one) runs with a 10 ns
// period, inputs change on the falling edge and outputs are sampled there.
// A watchdog ends a run that hangs with one failure.  Result line:
// TB_RESULT checks=<n> failures=<n>, then $finish.
module tb_bsfp_fdec;
  import tb_util_pkg::*;
  logic [2:0] code;
  logic       flag, e0;
  logic [3:0] exp4;
  int checks = 0, failures = 0;

  bsfp_fdec dut (.code, .flag, .e0, .exp4);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int e = 0; e < 16; e++) begin
      automatic logic [4:0] f = bsfp_exp_field(4'(e));
      {flag, code, e0} = f; #1;
      checks++;
      if (int'(exp4) != e) begin
        failures++; $display("exp %0d: field %b -> %0d", e, f, exp4);
      end
    end
    for (int c = 0; c < 8; c++) begin
      for (int b = 0; b < 2; b++) begin
        flag = 1'b0; code = 3'(c); e0 = 1'(b); #1;
        checks++;
        if (exp4 != {code, e0}) begin
          failures++; $display("unflagged %b %b -> %b", code, e0, exp4);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
