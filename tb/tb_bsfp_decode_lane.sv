// tb_bsfp_decode_lane -- random BSFP lanes in both modes; the decoded PE word
// must equal the original FP16 weight without exponent bit 4 (full mode) or
// the three remapped draft exponents (quantize mode).
//
// The remapping table follows the paper; the lane packing checked here is
// this design's own.  Reference: tb_util_pkg's encoder and draft table.
// Structure: no ports; the clock (where there is one) runs with a 10 ns
// period, inputs change on the falling edge and outputs are sampled there.
// A watchdog ends a run that hangs with one failure.  Result line:
// TB_RESULT checks=<n> failures=<n>, then $finish.
module tb_bsfp_decode_lane;
  import speq_pkg::*;
  import tb_util_pkg::*;
  mode_e       mode;
  logic [15:0] lane;
  logic [14:0] pew, want;
  logic [15:0] h [3];
  int checks = 0, failures = 0;

  bsfp_decode_lane dut (.mode, .lane, .pew);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 500; n++) begin
      h[0] = rand_fp16(0, 15);
      mode = MODE_FULL; lane = bsfp_encode(h[0]); #1;
      want = {h[0][15], h[0][13:0]};
      checks++;
      if (pew != want) begin
        failures++; $display("full %h: got %h want %h", h[0], pew, want);
      end
      for (int k = 0; k < 3; k++) h[k] = rand_fp16(0, 15);
      mode = MODE_QUANT;
      lane = {4'($urandom), bsfp_wq(h[2]), bsfp_wq(h[1]), bsfp_wq(h[0])}; #1;
      for (int k = 0; k < 3; k++) begin
        checks++;
        if (pew[5*k +: 5] != {h[k][15], 4'(draft_exp(h[k][13:10]))}) begin
          failures++; $display("quant %0d %h: got %b", k, h[k], pew[5*k +: 5]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
