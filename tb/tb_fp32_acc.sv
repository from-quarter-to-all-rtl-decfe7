// tb_fp32_acc -- sequences of random products accumulated in FP32.
// The running sum is compared after every cycle with a double-precision
// reference; the error bound is n * 2^-23 of the sum of magnitudes.  Also
// checks that `first` restarts the sum, that `held` changes only on `last`,
// and that the sum appears one cycle after `en`.
//
// The paper fixes only FP32 accumulation; the rounding bound used here
// follows this design's round-to-nearest-even, flush-to-zero rules.
// Structure: no ports; the clock (where there is one) runs with a 10 ns
// period, inputs change on the falling edge and outputs are sampled there.
// A watchdog ends a run that hangs with one failure.  Result line:
// TB_RESULT checks=<n> failures=<n>, then $finish.
module tb_fp32_acc;
  import speq_pkg::*;
  import tb_util_pkg::*;
  logic  clk = 0, rst_n = 0, en = 0, first = 0, last = 0;
  prod_t p;
  fp32_t acc, held;
  real   ref_sum, ref_abs, ref_held, v, tol;
  int    checks = 0, failures = 0, cyc = 0;

  fp32_acc dut (.clk, .rst_n, .en, .first, .last, .p, .acc, .held);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    wait (cyc == 20000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real prod_value(prod_t q);
    real r = real'(q.sig) * pow2(int'(q.exp) - 50);
    return q.sign ? -r : r;
  endfunction

  initial begin
    p = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    ref_held = 0.0;
    for (int s = 0; s < 200; s++) begin
      automatic int len = 1 + ($urandom % 20);
      ref_sum = 0.0; ref_abs = 0.0;
      for (int i = 0; i < len; i++) begin
        @(negedge clk);
        en = 1; first = (i == 0); last = (i == len - 1);
        p.sign = 1'($urandom);
        p.exp  = 6'(20 + ($urandom % 20));
        p.sig  = (s % 7 == 3) ? 22'($urandom % 1024) : 22'($urandom);  // some small, unnormalised
        v = prod_value(p);
        ref_sum = ref_sum + v; ref_abs = ref_abs + rabs(v);
        @(posedge clk); #1;
        tol = ref_abs * real'(i + 1) * pow2(-23) + pow2(-100);
        checks++;
        if (rabs(fp32_to_real(acc) - ref_sum) > tol) begin
          failures++; $display("seq %0d step %0d: got %g want %g", s, i, fp32_to_real(acc), ref_sum);
        end
        if (last) ref_held = fp32_to_real(acc);
        checks++;
        if (fp32_to_real(held) != ref_held) begin
          failures++; $display("held %g want %g", fp32_to_real(held), ref_held);
        end
      end
      // an idle cycle must change nothing
      @(negedge clk); en = 0; first = 0; last = 0; p = '1;
      @(posedge clk); #1;
      checks++;
      if (rabs(fp32_to_real(acc) - ref_sum) > ref_abs * 21.0 * pow2(-23) + pow2(-100)) begin
        failures++; $display("idle changed acc");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
