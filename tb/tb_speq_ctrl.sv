// tb_speq_ctrl -- runs jobs of 1..4 groups of 8 rows and checks every stream
// cycle by cycle: buffer read addresses, PE enables one cycle after the
// reads, first/last marks, drain and scale addresses, write-back one cycle
// after the drain read, overwrite only in the first group, and the job time
// of N_GROUPS*GROUP + GROUP + 3 cycles.
//
// GROUP is reduced to 8 rows and the address widths are narrowed; the
// schedule checked here is this design's own (the paper gives none).
// Structure: no ports; the clock (where there is one) runs with a 10 ns
// period, inputs change on the falling edge and outputs are sampled there.
// A watchdog ends a run that hangs with one failure.  Result line:
// TB_RESULT checks=<n> failures=<n>, then $finish.
module tb_speq_ctrl;
  import speq_pkg::*;
  localparam int G = 8;
  logic clk = 0, rst_n = 0, start = 0, accum = 0;
  mode_e mode_in, mode;
  logic [7:0] n_groups;
  logic [7:0] w_base, w_raddr, o_base, o_raddr, o_waddr, s_base, s_raddr;
  logic [9:0] a_base, a_raddr;
  logic busy, done, w_re, a_re, pe_en, pe_first, pe_last, drain_act, o_re, s_re;
  logic wb_valid, wb_first;
  logic [2:0] drain_idx;
  int checks = 0, failures = 0, cyc = 0;

  speq_ctrl #(.GROUP(G), .GW(8), .WAW(8), .AAW(10), .OAW(8), .SAW(8)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    wait (cyc == 5000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("cycle %0d: %s", cyc, what); end
  endtask

  task automatic run_job(input int ng, input mode_e m, input bit acc = 0);
    int t0, n_w = 0, n_pe = 0, n_first = 0, n_last = 0, n_dr = 0, n_wb = 0, n_wbf = 0;
    logic prev_w_re = 0, prev_o_re = 0;
    logic [7:0] prev_o_raddr = '0;
    @(negedge clk);
    start = 1; mode_in = m; n_groups = 8'(ng); accum = acc;
    w_base = 8'($urandom % 64); a_base = 10'($urandom % 512);
    o_base = 8'($urandom % 64); s_base = 8'($urandom % 64);
    @(posedge clk); t0 = cyc;
    @(negedge clk); start = 0;
    while (!done) begin
      // sampled mid-cycle
      chk(pe_en == prev_w_re, "pe_en not one cycle after the buffer read");
      chk(wb_valid == prev_o_re, "write-back not one cycle after the drain read");
      if (wb_valid) chk(o_waddr == prev_o_raddr, "write-back address");
      if (w_re) begin
        chk(w_raddr == 8'(w_base + n_w) && a_raddr == 10'(a_base + n_w), "buffer read address");
        n_w++;
      end
      if (pe_en) n_pe++;
      if (pe_first) begin chk(n_pe % G == 1, "pe_first position"); n_first++; end
      if (pe_last)  begin chk(n_pe % G == 0, "pe_last position");  n_last++;  end
      if (o_re) begin
        chk(o_raddr == 8'(o_base + n_dr % G), "output read address");
        chk(s_raddr == 8'(s_base + n_dr), "scale read address");
        chk(int'(drain_idx) == n_dr % G, "drain index");
        n_dr++;
      end
      if (wb_valid) begin n_wb++; if (wb_first) n_wbf++; end
      chk(mode == m, "mode held for the job");
      prev_w_re = w_re; prev_o_re = o_re; prev_o_raddr = o_raddr;
      @(negedge clk);
    end
    chk(cyc - t0 == ng * G + G + 3, $sformatf("job time %0d, expected %0d", cyc - t0, ng * G + G + 3));
    chk(n_w == ng * G && n_pe == ng * G, "row count");
    chk(n_first == ng && n_last == ng, "group marks");
    chk(n_dr == ng * G && n_wb == ng * G, "drain count");
    chk(n_wbf == (acc ? 0 : G), "only the first group overwrites, and only without accum");
    @(negedge clk);
    chk(!busy && !done, "idle after done");
  endtask

  initial begin
    mode_in = MODE_FULL; n_groups = '0;
    w_base = '0; a_base = '0; o_base = '0; s_base = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_job(3, MODE_QUANT);
    run_job(1, MODE_FULL);
    run_job(4, MODE_FULL);
    run_job(2, MODE_QUANT, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
