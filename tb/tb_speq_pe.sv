// tb_speq_pe -- random FP16 activations (subnormals included) against
// random decoded weights in both modes.  Full mode: one FP16 x FP16 product
// per cycle into accumulator #0, #1 and #2 untouched.  Quantize mode: three
// products a * (-1)^s * 2^(e-15).  Every running sum is compared with a
// double-precision reference after every cycle (one-cycle latency); held
// sums are checked after each `last`.
//
// The PE's modes and parts follow the paper; the subnormal reading and
// the exact 22-bit significand are this design's choices checked here.
// Structure: no ports; the clock (where there is one) runs with a 10 ns
// period, inputs change on the falling edge and outputs are sampled there.
// A watchdog ends a run that hangs with one failure.  Result line:
// TB_RESULT checks=<n> failures=<n>, then $finish.
module tb_speq_pe;
  import speq_pkg::*;
  import tb_util_pkg::*;
  logic        clk = 0, rst_n = 0, en = 0, first = 0, last = 0;
  mode_e       mode;
  fp16_t       a;
  logic [14:0] w;
  fp32_t       acc [3], held [3];
  real         rs [3], ra [3], v [3], frozen [3];
  int          checks = 0, failures = 0, cyc = 0;

  speq_pe dut (.clk, .rst_n, .mode, .en, .first, .last, .a, .w, .acc, .held);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    wait (cyc == 50000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a = '0; w = '0; mode = MODE_FULL;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < 300; s++) begin
      automatic int len = 1 + ($urandom % 16);
      mode = (s % 2) ? MODE_QUANT : MODE_FULL;
      for (int k = 0; k < 3; k++) begin rs[k] = 0.0; ra[k] = 0.0; frozen[k] = fp32_to_real(acc[k]); end
      for (int i = 0; i < len; i++) begin
        logic [15:0] ah, wh;
        @(negedge clk);
        en = 1; first = (i == 0); last = (i == len - 1);
        ah = (s % 10 == 4) ? rand_fp16(0, 2) : rand_fp16(1, 20);
        a  = fp16_t'(ah);
        if (mode == MODE_FULL) begin
          wh = rand_fp16(0, 15);
          w  = {wh[15], wh[13:0]};
          v[0] = fp16_to_real(ah) * fp16_to_real(wh);
          v[1] = 0.0; v[2] = 0.0;
        end else begin
          for (int k = 0; k < 3; k++) begin
            logic       sg;
            logic [3:0] qe;
            sg = 1'($urandom); qe = 4'($urandom);
            w[5*k +: 5] = {sg, qe};
            v[k] = fp16_to_real(ah) * pow2(int'(qe) - 15) * (sg ? -1.0 : 1.0);
          end
        end
        for (int k = 0; k < 3; k++) begin rs[k] += v[k]; ra[k] += rabs(v[k]); end
        @(posedge clk); #1;
        for (int k = 0; k < 3; k++) begin
          automatic real got = fp32_to_real(acc[k]);
          automatic real want = (mode == MODE_FULL && k > 0) ? frozen[k] : rs[k];
          checks++;
          if (rabs(got - want) > ra[k] * real'(i + 1) * pow2(-23) + pow2(-60)) begin
            failures++;
            $display("seq %0d mode %0d step %0d acc%0d: got %g want %g", s, mode, i, k, got, want);
          end
        end
      end
      for (int k = 0; k < ((mode == MODE_FULL) ? 1 : 3); k++) begin
        checks++;
        if (held[k] != acc[k]) begin failures++; $display("held%0d mismatch", k); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
