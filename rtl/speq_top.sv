// speq_top -- SPEQ speculative-decoding accelerator core.
//
// Blocks: weight buffer (BSFP words, one 16-bit lane per PE), activation
// buffer (one FP16 per tile per row), BSFP decode stage, reconfigurable PE
// array (N_TILES x N_PE), group scaler, output buffer (FP32), a small scale
// store, the control unit for one matrix-vector job, and the draft/verify
// sequencer.  DRAM and the special function unit are outside: the buffers
// are filled and the output buffer is read through the ports below.
// Operation: the host fills the buffers, then
//   spec_start   starts a decoding round; draft_req asks for a draft forward
//                pass, which the host runs as jobs (job_start ...) while
//                `mode` is quantize, and closes with tok_valid/tok_prob;
//   verify_req   asks for the verification pass, run as jobs in full mode
//                and closed with verify_done/n_accept.
// A job takes job_n_groups x N_PE rows; each row is one W word and one A
// word; results for drain index i land in output word job_o_base + i, lane
// 3t+k = accumulator k of PE i in tile t (column 3*(t*N_PE+i)+k in quantize
// mode, column t*N_PE+i in full mode).  Quantize-mode group results are
// multiplied by the FP32 scale in lane 3t+k of scale word
// job_s_base + g*N_PE + i.  Timing: see speq_ctrl (N_GROUPS*N_PE + N_PE + 3
// cycles per job).
// Sizes: 8 x 128 PEs and 512 KB for each of the W, A and output buffers, as
// in the paper; the scale store, word widths and job interface are this
// design's choices.
module speq_top
  import speq_pkg::*;
#(
  parameter int unsigned N_TILES = 8,
  parameter int unsigned N_PE    = 128,
  parameter int unsigned W_DEPTH = 256,     // 512 KB / (1024 lanes x 2 B)
  parameter int unsigned A_DEPTH = 32768,   // 512 KB / (8 x 2 B)
  parameter int unsigned O_DEPTH = 5461,    // 512 KB / (24 x 4 B)
  parameter int unsigned S_DEPTH = 1024,
  parameter int unsigned L_MAX   = 16,
  localparam int unsigned WW  = N_TILES * N_PE * LANE_BITS,
  localparam int unsigned AWD = N_TILES * 16,
  localparam int unsigned OWD = 3 * N_TILES * 32,
  localparam int unsigned WAW = $clog2(W_DEPTH),
  localparam int unsigned AAW = $clog2(A_DEPTH),
  localparam int unsigned OAW = $clog2(O_DEPTH),
  localparam int unsigned SAW = $clog2(S_DEPTH),
  localparam int unsigned LW  = $clog2(L_MAX + 2)
) (
  input  logic           clk,
  input  logic           rst_n,
  // buffer fill and result read (DRAM side)
  input  logic           w_wr_en,
  input  logic [WAW-1:0] w_wr_addr,
  input  logic [WW-1:0]  w_wr_data,
  input  logic           a_wr_en,
  input  logic [AAW-1:0] a_wr_addr,
  input  logic [AWD-1:0] a_wr_data,
  input  logic           s_wr_en,
  input  logic [SAW-1:0] s_wr_addr,
  input  logic [OWD-1:0] s_wr_data,
  input  logic           o_rd_en,
  input  logic [OAW-1:0] o_rd_addr,
  output logic [OWD-1:0] o_rd_data,
  // matrix-vector job
  input  logic           job_start,
  input  logic [7:0]     job_n_groups,
  input  logic           job_accum,
  input  logic [WAW-1:0] job_w_base,
  input  logic [AAW-1:0] job_a_base,
  input  logic [OAW-1:0] job_o_base,
  input  logic [SAW-1:0] job_s_base,
  output logic           job_busy,
  output logic           job_done,
  // speculative decoding round
  input  logic           spec_start,
  input  logic           tok_valid,
  input  logic [15:0]    tok_prob,
  input  logic           verify_done,
  input  logic [LW-1:0]  n_accept,
  output mode_e          mode,
  output logic           draft_req,
  output logic           verify_req,
  output logic           round_done,
  output logic           early_exit,
  output logic [LW-1:0]  n_drafted,
  output logic [LW-1:0]  out_len
);
  localparam int unsigned KW = $clog2(N_PE);

  mode_e           job_mode;
  logic            w_re, a_re, o_re, s_re;
  logic [WAW-1:0]  w_raddr;
  logic [AAW-1:0]  a_raddr;
  logic [OAW-1:0]  o_raddr, o_waddr;
  logic [SAW-1:0]  s_raddr;
  logic [WW-1:0]   w_rdata;
  logic [AWD-1:0]  a_rdata;
  logic [OWD-1:0]  s_rdata, o_wdata;
  logic            pe_en, pe_first, pe_last;
  logic            drain_act, wb_valid, wb_first;
  logic [KW-1:0]   drain_idx;
  fp32_t           dout [3*N_TILES];
  fp32_t           drain_q [3*N_TILES];
  fp32_t           sc_scale [3*N_TILES];
  fp32_t           sc_base [3*N_TILES];
  fp32_t           sc_out [3*N_TILES];

  spec_ctrl #(.L_MAX(L_MAX)) u_spec (
    .clk, .rst_n,
    .start (spec_start), .tok_valid, .tok_prob, .verify_done, .n_accept,
    .mode, .draft_req, .verify_req, .round_done, .early_exit,
    .n_drafted, .out_len
  );

  speq_ctrl #(.GROUP(N_PE), .GW(8), .WAW(WAW), .AAW(AAW), .OAW(OAW), .SAW(SAW)) u_ctrl (
    .clk, .rst_n,
    .start (job_start), .mode_in (mode), .n_groups (job_n_groups),
    .accum (job_accum),
    .w_base (job_w_base), .a_base (job_a_base), .o_base (job_o_base),
    .s_base (job_s_base),
    .busy (job_busy), .done (job_done), .mode (job_mode),
    .w_re, .w_raddr, .a_re, .a_raddr,
    .pe_en, .pe_first, .pe_last,
    .drain_act, .drain_idx, .o_re, .o_raddr, .s_re, .s_raddr,
    .wb_valid, .wb_first, .o_waddr
  );

  speq_sram #(.WIDTH(WW), .DEPTH(W_DEPTH)) u_wbuf (
    .clk, .we (w_wr_en), .waddr (w_wr_addr), .wdata (w_wr_data),
    .re (w_re), .raddr (w_raddr), .rdata (w_rdata)
  );

  speq_sram #(.WIDTH(AWD), .DEPTH(A_DEPTH)) u_abuf (
    .clk, .we (a_wr_en), .waddr (a_wr_addr), .wdata (a_wr_data),
    .re (a_re), .raddr (a_raddr), .rdata (a_rdata)
  );

  speq_sram #(.WIDTH(OWD), .DEPTH(S_DEPTH)) u_sbuf (
    .clk, .we (s_wr_en), .waddr (s_wr_addr), .wdata (s_wr_data),
    .re (s_re), .raddr (s_raddr), .rdata (s_rdata)
  );

  // output buffer: the drain owns the read port while a job drains
  speq_sram #(.WIDTH(OWD), .DEPTH(O_DEPTH)) u_obuf (
    .clk, .we (wb_valid), .waddr (o_waddr), .wdata (o_wdata),
    .re    (o_re || o_rd_en),
    .raddr (o_re ? o_raddr : o_rd_addr),
    .rdata (o_rd_data)
  );

  pe_array #(.N_TILES(N_TILES), .N_PE(N_PE)) u_array (
    .clk, .rst_n, .mode (job_mode),
    .en (pe_en), .first (pe_first), .last (pe_last),
    .act (a_rdata), .wword (w_rdata),
    .drain_idx, .dout
  );

  // drain pipeline register, aligned with the output/scale buffer reads
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < 3*N_TILES; l++) drain_q[l] <= FP32_ZERO;
    end else if (drain_act) begin
      drain_q <= dout;
    end
  end

  always_comb begin
    for (int l = 0; l < 3*N_TILES; l++) begin
      sc_scale[l] = fp32_t'(s_rdata[32*l +: 32]);
      sc_base[l]  = fp32_t'(o_rd_data[32*l +: 32]);
      o_wdata[32*l +: 32] = sc_out[l];
    end
  end

  group_scaler #(.LANES(3*N_TILES)) u_scaler (
    .mode (job_mode), .first (wb_first),
    .g (drain_q), .scale (sc_scale), .base (sc_base), .out (sc_out)
  );
endmodule
