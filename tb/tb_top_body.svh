// tb_top_body.svh -- end-to-end test body shared by tb_speq_top (reduced
// sizes) and tb_speq_top_full (default sizes).  The including module defines
// T, N, NG, L_MAX_TB and instantiates speq_top as `dut`.
//
// One FP16 weight matrix W[K][3*T*N] (K = NG*N rows, exponents 0..15, about
// a third of them remapped by BSFP) is stored twice in the buffers: as Wq
// nibbles for the draft model (three columns per PE lane) and as full BSFP
// words for columns 0..T*N-1.  A decoding round then runs draft jobs in
// quantize mode (scaled by per-group FP32 scales) and a verification job in
// full mode with a different token in each tile.  Every output is compared
// with a double-precision reference.  Mechanisms counted: quantize job, full
// job, drain overlapping the next group, accumulation across groups,
// remapped weights, early exit on gamma, draft stop at L_MAX.

  localparam int K  = NG * N;
  localparam int C  = 3 * T * N;
  localparam int WW = T * N * 16;
  localparam int OW = 3 * T * 32;

  logic [15:0] wmat [K][C];
  logic [15:0] act  [T][K];
  real         scl  [NG][C];
  int checks = 0, failures = 0, cyc = 0;
  int n_quant_jobs = 0, n_full_jobs = 0, n_overlap = 0, n_accum = 0, n_remap = 0;
  int n_early = 0, n_maxlen = 0, n_accjob = 0;

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc++;
    if (dut.u_ctrl.drain_act && dut.pe_en) n_overlap++;
    if (dut.wb_valid && !dut.wb_first) n_accum++;
  end

  initial begin
    wait (cyc == WATCHDOG);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("cycle %0d: %s", cyc, what); end
  endtask

  task automatic fill_buffers();
    logic [WW-1:0] wq_word, wf_word;
    logic [T*16-1:0] a_word;
    logic [OW-1:0] s_word;
    // rows 0..K-1: draft words, rows K..2K-1: full words
    for (int k = 0; k < K; k++) begin
      for (int l = 0; l < T * N; l++) begin
        wq_word[16*l +: 16] = {4'd0, bsfp_wq(wmat[k][3*l+2]), bsfp_wq(wmat[k][3*l+1]), bsfp_wq(wmat[k][3*l])};
        wf_word[16*l +: 16] = bsfp_encode(wmat[k][l]);
      end
      @(negedge clk); w_wr_en = 1; w_wr_addr = WAW'(k);     w_wr_data = wq_word;
      @(negedge clk); w_wr_en = 1; w_wr_addr = WAW'(K + k); w_wr_data = wf_word;
      // A rows 0..K-1: one token in every tile; rows K..2K-1: token t in tile t
      for (int t = 0; t < T; t++) a_word[16*t +: 16] = act[0][k];
      a_wr_en = 1; a_wr_addr = AAW'(k); a_wr_data = a_word;
      @(negedge clk);
      for (int t = 0; t < T; t++) a_word[16*t +: 16] = act[t][k];
      a_wr_addr = AAW'(K + k); a_wr_data = a_word;
    end
    @(negedge clk); w_wr_en = 0; a_wr_en = 0;
    for (int g = 0; g < NG; g++)
      for (int i = 0; i < N; i++) begin
        for (int t = 0; t < T; t++)
          for (int j = 0; j < 3; j++)
            s_word[32*(3*t+j) +: 32] = real_to_fp32(scl[g][3*(t*N+i)+j]);
        s_wr_en = 1; s_wr_addr = SAW'(g*N + i); s_wr_data = s_word;
        @(negedge clk);
      end
    s_wr_en = 0;
  endtask

  task automatic run_job(input int w_base, input int a_base, input int o_base, input bit acc = 0);
    int t0;
    @(negedge clk);
    job_start = 1; job_n_groups = 8'(NG); job_accum = acc;
    job_w_base = WAW'(w_base); job_a_base = AAW'(a_base);
    job_o_base = OAW'(o_base); job_s_base = '0;
    @(posedge clk); t0 = cyc;
    @(negedge clk); job_start = 0;
    while (!job_done) @(negedge clk);
    chk(cyc - t0 == NG * N + N + 3, $sformatf("job took %0d cycles, expected %0d", cyc - t0, NG * N + N + 3));
  endtask

  task automatic check_outputs(input int o_base, input bit quant, input real factor = 1.0);
    for (int i = 0; i < N; i++) begin
      @(negedge clk); o_rd_en = 1; o_rd_addr = OAW'(o_base + i);
      @(negedge clk); o_rd_en = 0;
      for (int t = 0; t < T; t++)
        for (int j = 0; j < 3; j++) begin
          real want = 0.0, mag = 0.0, got;
          got = fp32_to_real(o_rd_data[32*(3*t+j) +: 32]);
          if (quant) begin
            int c = 3*(t*N+i)+j;
            for (int g = 0; g < NG; g++) begin
              real gs = 0.0, gm = 0.0;
              for (int k = g*N; k < (g+1)*N; k++) begin
                gs += fp16_to_real(act[0][k]) * draft_value(wmat[k][c]);
                gm += rabs(fp16_to_real(act[0][k]) * draft_value(wmat[k][c]));
              end
              want += scl[g][c] * gs; mag += rabs(scl[g][c]) * gm;
            end
          end else if (j == 0) begin
            int c = t*N+i;
            for (int k = 0; k < K; k++) begin
              want += fp16_to_real(act[t][k]) * fp16_to_real(wmat[k][c]);
              mag  += rabs(fp16_to_real(act[t][k]) * fp16_to_real(wmat[k][c]));
            end
          end
          want = want * factor; mag = mag * factor;
          checks++;
          if (rabs(got - want) > mag * real'(N + NG + 2) * pow2(-23) + pow2(-80)) begin
            failures++;
            $display("%s out %0d lane %0d: got %g want %g", quant ? "draft" : "verify", i, 3*t+j, got, want);
          end
        end
    end
  endtask

  // one decoding round; stop_at = index of the low-probability draft token
  task automatic decode_round(input int stop_at, input int accept);
    int drafts = 0;
    @(negedge clk); spec_start = 1;
    @(negedge clk); spec_start = 0;
    forever begin
      if (draft_req) begin
        chk(mode == MODE_QUANT, "draft request outside quantize mode");
        run_job(0, 0, 0);
        n_quant_jobs++;
        check_outputs(0, 1'b1);
        @(negedge clk);
        tok_valid = 1;
        tok_prob = (drafts == stop_at) ? 16'd1000 : 16'd60000;
        @(negedge clk); tok_valid = 0;
        if (drafts != stop_at) drafts++;
      end else if (verify_req) begin
        chk(mode == MODE_FULL, "verify request outside full mode");
        if (early_exit) n_early++;
        if (int'(n_drafted) == L_MAX_TB) n_maxlen++;
        run_job(K, K, N);
        n_full_jobs++;
        check_outputs(N, 1'b0);
        @(negedge clk); verify_done = 1; n_accept = '0 + accept;
        @(negedge clk); verify_done = 0;
        chk(round_done && int'(out_len) == ((accept > drafts) ? drafts : accept) + 1, "round result");
        break;
      end else @(negedge clk);
    end
  endtask

  initial begin
    {w_wr_en, a_wr_en, s_wr_en, o_rd_en, job_start, spec_start, tok_valid, verify_done} = '0;
    w_wr_addr = '0; w_wr_data = '0; a_wr_addr = '0; a_wr_data = '0; s_wr_addr = '0; s_wr_data = '0;
    o_rd_addr = '0; job_n_groups = '0; job_w_base = '0; job_a_base = '0; job_o_base = '0;
    job_s_base = '0; tok_prob = '0; n_accept = '0;
    for (int k = 0; k < K; k++) begin
      for (int c = 0; c < C; c++) begin
        wmat[k][c] = rand_fp16(0, 15);
        if (bsfp_encode(wmat[k][c]) != wmat[k][c]) n_remap++;
      end
      for (int t = 0; t < T; t++) act[t][k] = rand_fp16(10, 20);
    end
    for (int g = 0; g < NG; g++)
      for (int c = 0; c < C; c++) scl[g][c] = 0.5 + real'($urandom % 1000) / 1000.0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    fill_buffers();
    decode_round(1, 1);            // one draft, then early exit
    decode_round(-1, L_MAX_TB + 1);   // drafts up to L_MAX, accept count above it
    begin
      // a second job with accum set adds onto the verification results
      run_job(K, K, N, 1'b1);
      n_accjob++;
      check_outputs(N, 1'b0, 2.0);
    end
    chk(n_quant_jobs > 0, "no quantize-mode job");
    chk(n_full_jobs > 0,  "no full-mode job");
    if (NG > 1) chk(n_overlap > 0, "drain never overlapped the next group");
    if (NG > 1) chk(n_accum > 0,   "no accumulation across groups");
    chk(n_remap > 0,      "no remapped weight");
    chk(n_early > 0,      "no early exit");
    chk(n_maxlen > 0 && n_accjob > 0, "draft length limit or job accumulation never reached");
    $display("mechanisms: quant_jobs=%0d full_jobs=%0d overlap=%0d accum=%0d remapped=%0d early_exit=%0d max_len=%0d accum_jobs=%0d",
             n_quant_jobs, n_full_jobs, n_overlap, n_accum, n_remap, n_early, n_maxlen, n_accjob);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
