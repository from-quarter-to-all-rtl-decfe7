// tb_group_scaler -- random group sums, scales and output words; checks
// base + scale * g (quantize mode), base + g (full mode, lanes 3t only),
// and that `first` ignores the old output word.
//
// Reference: FP32 values computed in `real` and rounded back to FP32; a
// tolerance of two roundings is allowed.  Combinational block.
// Structure: no ports; the clock (where there is one) runs with a 10 ns
// period, inputs change on the falling edge and outputs are sampled there.
// A watchdog ends a run that hangs with one failure.  Result line:
// TB_RESULT checks=<n> failures=<n>, then $finish.
module tb_group_scaler;
  import speq_pkg::*;
  import tb_util_pkg::*;
  localparam int L = 6;
  mode_e mode;
  logic  first;
  fp32_t g [L], scale [L], base [L], out [L];
  real   want, tol, gv, sv, bv;
  int    checks = 0, failures = 0;

  group_scaler #(.LANES(L)) dut (.mode, .first, .g, .scale, .base, .out);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic fp32_t rnd32(int lo, int hi);
    return {1'($urandom), 8'(lo + ($urandom % (hi - lo + 1))), 23'($urandom)};
  endfunction

  initial begin
    for (int n = 0; n < 400; n++) begin
      mode  = (n % 2) ? MODE_QUANT : MODE_FULL;
      first = (n % 5 == 0);
      for (int l = 0; l < L; l++) begin
        g[l] = rnd32(110, 140); scale[l] = rnd32(115, 130); base[l] = rnd32(105, 145);
      end
      #1;
      for (int l = 0; l < L; l++) begin
        gv = fp32_to_real(g[l]); sv = fp32_to_real(scale[l]); bv = fp32_to_real(base[l]);
        if (mode == MODE_FULL && (l % 3) != 0) want = 0.0;
        else want = (first ? 0.0 : bv) + ((mode == MODE_QUANT) ? sv * gv : gv);
        tol = (rabs(bv) + rabs(sv * gv) + rabs(gv)) * pow2(-22);
        checks++;
        if (rabs(fp32_to_real(out[l]) - want) > tol) begin
          failures++; $display("n %0d lane %0d: got %g want %g", n, l, fp32_to_real(out[l]), want);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
