// spec_ctrl -- draft / verify sequencing of self-speculative decoding.
//
// One decoding round: the quantized draft model (quantize mode) produces
// draft tokens one at a time; then the full model (full mode) checks all of
// them in one verification pass.  Drafting stops early when the largest
// draft probability of a new token falls below GAMMA (early exit), or when
// L_MAX tokens have been drafted.
// Handshake (all single-cycle pulses):
//   start        -> begin a round; the unit raises draft_req
//   tok_valid    <- a draft forward pass has finished, with tok_prob, the
//                   maximum draft probability (unsigned fraction, 2^-PW units)
//   draft_req    -> ask for the next draft forward pass
//   verify_req   -> drafting over; ask for the verification pass
//   verify_done  <- verification finished; n_accept = accepted draft tokens
//   round_done   -> round over; out_len = n_accept + 1 tokens are emitted
//                   (the accepted drafts plus the target model's own token)
// `mode` is MODE_QUANT while drafting and MODE_FULL otherwise; it is the
// mode the PE array runs in.  A token whose probability is below GAMMA is
// not counted as drafted.
// L = 16 and gamma = 0.6 are the paper's default settings; the handshake and
// the fixed-point probability format are this design's choices.
module spec_ctrl
  import speq_pkg::*;
#(
  parameter int unsigned L_MAX = 16,
  parameter int unsigned PW    = 16,
  parameter logic [PW-1:0] GAMMA = PW'(39322),   // 0.6 * 2^16
  localparam int unsigned LW   = $clog2(L_MAX + 2)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          tok_valid,
  input  logic [PW-1:0] tok_prob,
  input  logic          verify_done,
  input  logic [LW-1:0] n_accept,
  output mode_e         mode,
  output logic          draft_req,
  output logic          verify_req,
  output logic          round_done,
  output logic          early_exit,   // last round stopped on GAMMA
  output logic [LW-1:0] n_drafted,
  output logic [LW-1:0] out_len
);
  typedef enum logic [1:0] {S_IDLE, S_DRAFT, S_VERIFY} state_e;
  state_e state;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      draft_req  <= 1'b0;
      verify_req <= 1'b0;
      round_done <= 1'b0;
      early_exit <= 1'b0;
      n_drafted  <= '0;
      out_len    <= '0;
    end else begin
      draft_req  <= 1'b0;
      verify_req <= 1'b0;
      round_done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state      <= S_DRAFT;
          n_drafted  <= '0;
          early_exit <= 1'b0;
          draft_req  <= 1'b1;
        end
        S_DRAFT: if (tok_valid) begin
          if (tok_prob < GAMMA) begin
            early_exit <= 1'b1;
            state      <= S_VERIFY;
            verify_req <= 1'b1;
          end else if (n_drafted == LW'(L_MAX - 1)) begin
            n_drafted  <= n_drafted + 1'b1;
            state      <= S_VERIFY;
            verify_req <= 1'b1;
          end else begin
            n_drafted  <= n_drafted + 1'b1;
            draft_req  <= 1'b1;
          end
        end
        S_VERIFY: if (verify_done) begin
          out_len    <= ((n_accept > n_drafted) ? n_drafted : n_accept) + 1'b1;
          round_done <= 1'b1;
          state      <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign mode = (state == S_DRAFT) ? MODE_QUANT : MODE_FULL;
endmodule
