// tb_pe_tile -- a 4-PE tile: one shared activation stream, per-PE weights,
// passes of 6 rows in alternating modes.  After each pass every PE's held
// sums are read through the drain port and compared with a reference; the
// drain is repeated during the next pass to check the held values stay put.
//
// N_PE is reduced to 4; the sharing of one activation by all PEs of a
// tile follows the paper, the drain port is this design's own.
// Structure: no ports; the clock (where there is one) runs with a 10 ns
// period, inputs change on the falling edge and outputs are sampled there.
// A watchdog ends a run that hangs with one failure.  Result line:
// TB_RESULT checks=<n> failures=<n>, then $finish.
module tb_pe_tile;
  import speq_pkg::*;
  import tb_util_pkg::*;
  localparam int N = 4, LEN = 6;
  logic        clk = 0, rst_n = 0, en = 0, first = 0, last = 0;
  mode_e       mode;
  fp16_t       a;
  logic [N*15-1:0] w;
  logic [1:0]  drain_idx;
  fp32_t       dout [3];
  real         rs [N][3], ra [N][3];
  int          checks = 0, failures = 0, cyc = 0;

  pe_tile #(.N_PE(N)) dut (.clk, .rst_n, .mode, .en, .first, .last, .a, .w, .drain_idx, .dout);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    wait (cyc == 20000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_drain(input mode_e m);
    for (int i = 0; i < N; i++) begin
      drain_idx = 2'(i); #1;
      for (int k = 0; k < ((m == MODE_FULL) ? 1 : 3); k++) begin
        checks++;
        if (rabs(fp32_to_real(dout[k]) - rs[i][k]) > ra[i][k] * LEN * pow2(-23) + pow2(-60)) begin
          failures++; $display("pe %0d acc %0d: got %g want %g", i, k, fp32_to_real(dout[k]), rs[i][k]);
        end
      end
    end
  endtask

  initial begin
    a = '0; w = '0; mode = MODE_FULL; drain_idx = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < 40; s++) begin
      automatic mode_e m = (s % 2) ? MODE_QUANT : MODE_FULL;
      mode = m;
      for (int i = 0; i < N; i++) for (int k = 0; k < 3; k++) begin rs[i][k] = 0.0; ra[i][k] = 0.0; end
      for (int r = 0; r < LEN; r++) begin
        logic [15:0] ah;
        @(negedge clk);
        en = 1; first = (r == 0); last = (r == LEN - 1);
        ah = rand_fp16(5, 20); a = fp16_t'(ah);
        for (int i = 0; i < N; i++) begin
          if (m == MODE_FULL) begin
            logic [15:0] wh;
            wh = rand_fp16(0, 15);
            w[15*i +: 15] = {wh[15], wh[13:0]};
            rs[i][0] += fp16_to_real(ah) * fp16_to_real(wh);
            ra[i][0] += rabs(fp16_to_real(ah) * fp16_to_real(wh));
          end else begin
            for (int k = 0; k < 3; k++) begin
              logic [4:0] q;
              real        pv;
              q = 5'($urandom);
              w[15*i + 5*k +: 5] = q;
              pv = fp16_to_real(ah) * pow2(int'(q[3:0]) - 15) * (q[4] ? -1.0 : 1.0);
              rs[i][k] += pv; ra[i][k] += rabs(pv);
            end
          end
        end
      end
      @(negedge clk); en = 0; first = 0; last = 0;
      check_drain(m);
      // a pass in progress must not disturb the held sums
      @(negedge clk); en = 1; first = 1; a = fp16_t'(rand_fp16(5, 20));
      @(negedge clk); en = 0; first = 0;
      check_drain(m);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
