// fp32_acc -- FP32 accumulation unit of a PE.
//
// Adds one product per enabled cycle into an FP32 accumulator register.
// The product arrives in the multiplier's raw form (prod_t: sign, 6-bit sum
// of the two biased FP16 exponents, 22-bit significand with 20 fraction
// bits); it is normalised here and added with fp_add_core (round to nearest
// even, no subnormals).  When `first` is set the product is added to zero
// instead of the register, which starts a new accumulation without a
// separate clear cycle.  When `last` is set the new sum is also copied into
// the `held` register, where it stays for the whole of the next accumulation
// so that results can be drained while the PE keeps computing.
// Timing: one product per cycle, the sum is visible in `acc` one cycle after
// `en`.  The accumulate-in-FP32 behaviour follows the paper; first/last and
// the hold register are this design's own.
module fp32_acc
  import speq_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,
  input  logic  first,
  input  logic  last,
  input  prod_t p,
  output fp32_t acc,
  output fp32_t held
);
  logic               a_s;
  logic signed [10:0] a_e, p_e;
  logic [24:0]        a_m, p_m, p_ext;
  logic [4:0]         p_lz;
  fp32_t              sum;

  always_comb begin
    // accumulator operand (subnormals and zero read as zero)
    a_s = acc.sign;
    a_e = 11'(signed'({3'b000, acc.exp}));
    a_m = (first || acc.exp == 8'd0) ? 25'd0 : {1'b1, acc.man, 1'b0};
    // product operand: value = (p.sig << 3) * 2^((p.exp + 98) - 151)
    p_ext = {p.sig, 3'b000};
    p_lz  = 5'd0;
    for (int i = 0; i <= 24; i++)
      if (p_ext[i]) p_lz = 5'(24 - i);
    p_m = p_ext << p_lz;
    p_e = 11'(signed'({5'd0, p.exp})) + 11'sd98 - 11'(signed'({6'd0, p_lz}));
  end

  fp_add_core u_add (
    .sa(a_s), .ea(a_e), .ma(a_m),
    .sb(p.sign), .eb(p_e), .mb(p_m),
    .y(sum)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc  <= FP32_ZERO;
      held <= FP32_ZERO;
    end else if (en) begin
      acc <= sum;
      if (last) held <= sum;
    end
  end
endmodule
