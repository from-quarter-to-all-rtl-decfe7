// tb_pe_array -- 2 tiles x 4 PEs fed with BSFP-encoded weight words.
// Full mode must reproduce the exact FP16 dot products; quantize mode the
// dot products with the remapped E3M0 draft weights, three columns per PE.
// Each tile gets its own activation.  Results are read through the drain port.
//
// Parameters are reduced (2 tiles, 4 PEs) to keep the run short; the
// per-tile activation lanes and drain port are this design's choices.
// Structure: no ports; the clock (where there is one) runs with a 10 ns
// period, inputs change on the falling edge and outputs are sampled there.
// A watchdog ends a run that hangs with one failure.  Result line:
// TB_RESULT checks=<n> failures=<n>, then $finish.
module tb_pe_array;
  import speq_pkg::*;
  import tb_util_pkg::*;
  localparam int T = 2, N = 4, LEN = 8;
  logic        clk = 0, rst_n = 0, en = 0, first = 0, last = 0;
  mode_e       mode;
  logic [T*16-1:0]   act;
  logic [T*N*16-1:0] wword;
  logic [1:0]  drain_idx;
  fp32_t       dout [3*T];
  real         rs [T][N][3], ra [T][N][3];
  int          checks = 0, failures = 0, cyc = 0, remapped = 0;

  pe_array #(.N_TILES(T), .N_PE(N)) dut (.clk, .rst_n, .mode, .en, .first, .last,
                                          .act, .wword, .drain_idx, .dout);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    wait (cyc == 20000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    act = '0; wword = '0; mode = MODE_FULL; drain_idx = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < 30; s++) begin
      automatic mode_e m = (s % 2) ? MODE_QUANT : MODE_FULL;
      mode = m;
      for (int t = 0; t < T; t++) for (int i = 0; i < N; i++) for (int k = 0; k < 3; k++) begin
        rs[t][i][k] = 0.0; ra[t][i][k] = 0.0;
      end
      for (int r = 0; r < LEN; r++) begin
        @(negedge clk);
        en = 1; first = (r == 0); last = (r == LEN - 1);
        for (int t = 0; t < T; t++) begin
          logic [15:0] ah;
          ah = rand_fp16(8, 22);
          act[16*t +: 16] = ah;
          for (int i = 0; i < N; i++) begin
            logic [15:0] wh [3];
            for (int k = 0; k < 3; k++) begin
              wh[k] = rand_fp16(0, 15);
              if (bsfp_encode(wh[k]) != wh[k]) remapped++;
            end
            if (m == MODE_FULL) begin
              wword[16*(t*N+i) +: 16] = bsfp_encode(wh[0]);
              rs[t][i][0] += fp16_to_real(ah) * fp16_to_real(wh[0]);
              ra[t][i][0] += rabs(fp16_to_real(ah) * fp16_to_real(wh[0]));
            end else begin
              wword[16*(t*N+i) +: 16] = {4'($urandom), bsfp_wq(wh[2]), bsfp_wq(wh[1]), bsfp_wq(wh[0])};
              for (int k = 0; k < 3; k++) begin
                automatic real pv = fp16_to_real(ah) * draft_value(wh[k]);
                rs[t][i][k] += pv; ra[t][i][k] += rabs(pv);
              end
            end
          end
        end
      end
      @(negedge clk); en = 0; first = 0; last = 0;
      for (int i = 0; i < N; i++) begin
        drain_idx = 2'(i); #1;
        for (int t = 0; t < T; t++)
          for (int k = 0; k < ((m == MODE_FULL) ? 1 : 3); k++) begin
            checks++;
            if (rabs(fp32_to_real(dout[3*t+k]) - rs[t][i][k]) > ra[t][i][k] * LEN * pow2(-23) + pow2(-60)) begin
              failures++;
              $display("mode %0d tile %0d pe %0d acc %0d: got %g want %g", m, t, i, k,
                       fp32_to_real(dout[3*t+k]), rs[t][i][k]);
            end
          end
      end
    end
    checks++;
    if (remapped == 0) begin failures++; $display("no remapped weight was exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
