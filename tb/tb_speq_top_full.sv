// tb_speq_top_full -- end-to-end test of the accelerator at its default
// size (8 tiles x 128 PEs, 512 KB buffers, L_MAX = 16): the weight buffer is
// filled with a 128 x 3072 draft matrix and its 128 x 1024 full-precision
// counterpart.  Two decoding rounds follow: one that drafts a token and
// stops on the gamma early exit, and one that drafts the full 16 tokens;
// each draft is a quantize-mode job, each verification a full-mode job.  A
// last full-mode job with job_accum set adds onto the verification results.
// The test body is in tb_top_body.svh.
//
// No parameter of speq_top is overridden.  The job time
// N_GROUPS*N_PE + N_PE + 3 cycles is checked.
// Structure, watchdog and result line: see tb_top_body.svh.
module tb_speq_top_full;
  import speq_pkg::*;
  import tb_util_pkg::*;
  localparam int T = 8, N = 128, NG = 1, L_MAX_TB = 16;
  localparam int WATCHDOG = 60000;
  localparam int WAW = 8, AAW = 15, OAW = 13, SAW = 10, LW = 5;

  logic clk = 0, rst_n = 0;
  logic w_wr_en, a_wr_en, s_wr_en, o_rd_en;
  logic [WAW-1:0] w_wr_addr;
  logic [T*N*16-1:0] w_wr_data;
  logic [AAW-1:0] a_wr_addr;
  logic [T*16-1:0] a_wr_data;
  logic [SAW-1:0] s_wr_addr;
  logic [3*T*32-1:0] s_wr_data, o_rd_data;
  logic [OAW-1:0] o_rd_addr;
  logic job_start, job_busy, job_done;
  logic [7:0] job_n_groups;
  logic job_accum = 0;
  logic [WAW-1:0] job_w_base;
  logic [AAW-1:0] job_a_base;
  logic [OAW-1:0] job_o_base;
  logic [SAW-1:0] job_s_base;
  logic spec_start, tok_valid, verify_done, draft_req, verify_req, round_done, early_exit;
  logic [15:0] tok_prob;
  logic [LW-1:0] n_accept, n_drafted, out_len;
  mode_e mode;

  speq_top dut (.*);

  `include "tb_top_body.svh"
endmodule
