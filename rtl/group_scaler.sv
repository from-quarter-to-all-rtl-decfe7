// group_scaler -- applies the per-group scale and accumulates into the output.
//
// A BSFP draft weight is (-1)^s * 2^(e-15); the group scale s (one per
// 128-element group of one output column, chosen offline to minimise the
// squared error) is applied once to the group's dot product rather than to
// every weight.  For each of LANES lanes this unit computes
//   quantize mode : out = base + scale * g
//   full mode     : out = base + g            (lanes with acc_sel != 0 give 0)
// where base is the previous output-buffer word, or zero for the first group.
// In full mode only accumulator #0 of each PE is in use, so lanes 3t+1 and
// 3t+2 are written as zero.  FP32 throughout, round to nearest even.
// Combinational; the top registers its inputs and writes its output.
// Scaling the group output follows the paper; the FP32 scale format and the
// read-modify-write accumulation are this design's choices.
module group_scaler
  import speq_pkg::*;
#(
  parameter int unsigned LANES = 24
) (
  input  mode_e  mode,
  input  logic   first,
  input  fp32_t  g     [LANES],
  input  fp32_t  scale [LANES],
  input  fp32_t  base  [LANES],
  output fp32_t  out   [LANES]
);
  for (genvar l = 0; l < LANES; l++) begin : g_lane
    fp32_t prod, term, b, sum;

    fp32_mul u_mul (.a(g[l]), .b(scale[l]), .y(prod));

    always_comb begin
      term = (mode == MODE_QUANT) ? prod : g[l];
      b    = first ? FP32_ZERO : base[l];
    end

    fp_add_core u_add (
      .sa (b.sign),    .ea (11'(signed'({3'b000, b.exp}))),
      .ma ((b.exp == 8'd0) ? 25'd0 : {1'b1, b.man, 1'b0}),
      .sb (term.sign), .eb (11'(signed'({3'b000, term.exp}))),
      .mb ((term.exp == 8'd0) ? 25'd0 : {1'b1, term.man, 1'b0}),
      .y  (sum)
    );

    always_comb begin
      if (mode == MODE_FULL && (l % 3) != 0) out[l] = FP32_ZERO;
      else                                   out[l] = sum;
    end
  end
endmodule
