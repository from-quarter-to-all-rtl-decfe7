// tb_spec_ctrl -- decoding rounds with the default L = 16 and gamma = 0.6:
// a round that drafts the full 16 tokens, rounds that stop early on a
// low-probability token (including the very first), a probability exactly
// at gamma (must continue), and an accept count larger than the drafts.
// Checks the requests, the mode during each phase and the emitted length.
//
// L = 16 and gamma = 0.6 are the paper's settings; the handshake and the
// Q0.16 probability format are this design's.
// Structure: no ports; the clock (where there is one) runs with a 10 ns
// period, inputs change on the falling edge and outputs are sampled there.
// A watchdog ends a run that hangs with one failure.  Result line:
// TB_RESULT checks=<n> failures=<n>, then $finish.
module tb_spec_ctrl;
  import speq_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, tok_valid = 0, verify_done = 0;
  logic [15:0] tok_prob;
  logic [4:0]  n_accept, n_drafted, out_len;
  logic draft_req, verify_req, round_done, early_exit;
  mode_e mode;
  int checks = 0, failures = 0, cyc = 0;

  spec_ctrl dut (.*);

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

  // stop_at: index of the first token below gamma (-1: none)
  task automatic round(input int stop_at, input int accept, input bit at_gamma);
    int drafts = 0, want_drafts;
    want_drafts = (stop_at < 0 || stop_at > 16) ? 16 : stop_at;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    forever begin
      if (draft_req) begin
        chk(mode == MODE_QUANT, "draft pass not in quantize mode");
        repeat (3) @(negedge clk);               // the draft forward pass
        tok_valid = 1;
        if (drafts == stop_at)  tok_prob = 16'($urandom % 39322);
        else if (at_gamma)      tok_prob = 16'd39322;
        else                    tok_prob = 16'(39322 + $urandom % 26000);
        @(negedge clk); tok_valid = 0;
        if (drafts != stop_at) drafts++;
      end else if (verify_req) begin
        chk(int'(n_drafted) == want_drafts, $sformatf("drafted %0d, want %0d", n_drafted, want_drafts));
        chk(early_exit == (stop_at >= 0 && stop_at < 16), "early-exit flag");
        repeat (5) begin @(negedge clk); chk(mode == MODE_FULL, "verify pass not in full mode"); end
        verify_done = 1; n_accept = 5'(accept);
        @(negedge clk); verify_done = 0;
        chk(round_done, "round_done missing");
        chk(int'(out_len) == ((accept > want_drafts) ? want_drafts : accept) + 1, "emitted length");
        break;
      end else begin
        @(negedge clk);
      end
    end
    chk(drafts == want_drafts, "draft passes requested");
  endtask

  initial begin
    tok_prob = '0; n_accept = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    round(-1, 12, 0);   // full length
    round(5, 5, 0);     // early exit after 5 drafts
    round(0, 0, 0);     // early exit on the first token
    round(-1, 16, 1);   // probability exactly gamma keeps drafting
    round(3, 9, 0);     // accept count clamped to the drafts
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
