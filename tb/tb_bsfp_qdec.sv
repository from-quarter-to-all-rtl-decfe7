// tb_bsfp_qdec -- checks the draft-exponent decoder against the remapping
// table: every code, and every FP16 exponent 0..15 through the encoder.
//
// Reference: the draft values the paper's remapping table gives.
// Combinational block: each input is checked after a 1 ns settle.
// Structure: no ports; the clock (where there is one) runs with a 10 ns
// period, inputs change on the falling edge and outputs are sampled there.
// A watchdog ends a run that hangs with one failure.  Result line:
// TB_RESULT checks=<n> failures=<n>, then $finish.
module tb_bsfp_qdec;
  import tb_util_pkg::*;
  logic [2:0] code;
  logic [3:0] exp4;
  int checks = 0, failures = 0;

  bsfp_qdec dut (.code, .exp4);

  // decoded value of each code, from the remapping table
  localparam int CODE_VAL [8] = '{9, 2, 11, 6, 8, 10, 12, 14};

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < 8; c++) begin
      code = 3'(c); #1;
      checks++;
      if (int'(exp4) != CODE_VAL[c]) begin
        failures++; $display("code %b -> %0d, want %0d", code, exp4, CODE_VAL[c]);
      end
    end
    for (int e = 0; e < 16; e++) begin
      automatic logic [4:0] f = bsfp_exp_field(4'(e));
      code = f[3:1]; #1;
      checks++;
      if (int'(exp4) != draft_exp(4'(e))) begin
        failures++; $display("exp %0d -> %0d, want %0d", e, exp4, draft_exp(4'(e)));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
