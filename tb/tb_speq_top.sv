// tb_speq_top -- end-to-end test of the accelerator at reduced size
// (2 tiles x 8 PEs, 2 groups, L_MAX = 2): two decoding rounds, one ending on
// the gamma early exit and one on the draft-length limit.  The test body is
// in tb_top_body.svh.
//
// The job time N_GROUPS*N_PE + N_PE + 3 is checked for every job.
// Structure, watchdog and result line: see tb_top_body.svh.
module tb_speq_top;
  import speq_pkg::*;
  import tb_util_pkg::*;
  localparam int T = 2, N = 8, NG = 2, L_MAX_TB = 2;
  localparam int WATCHDOG = 20000;
  localparam int WAW = 6, AAW = 6, OAW = 5, SAW = 6, LW = 2;

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

  speq_top #(.N_TILES(T), .N_PE(N), .W_DEPTH(64), .A_DEPTH(64), .O_DEPTH(32),
             .S_DEPTH(64), .L_MAX(L_MAX_TB)) dut (.*);

  `include "tb_top_body.svh"
endmodule
