// fp_add_core -- shared floating-point adder core with FP32 output.
//
// Each operand arrives as sign, biased exponent (FP32 bias 127, signed so
// that it may leave the FP32 range before rounding) and a 25-bit significand
// that is either zero or normalised with its leading one at bit 24:
//   value = (-1)^s * sig * 2^(exp - 127 - 24).
// The smaller operand is aligned with three extra bits (guard, round and a
// sticky bit), the two are added or subtracted, the result is normalised and
// rounded to nearest-even to a 24-bit significand.  Results above the FP32
// range become infinity, results below the normal range become zero (no
// subnormals are produced).  Combinational.
// The paper asks only for "FP32 accumulation"; the rounding mode and the
// handling of the range limits are this design's choices.
module fp_add_core
  import speq_pkg::*;
(
  input  logic               sa,
  input  logic signed [10:0] ea,
  input  logic [24:0]        ma,
  input  logic               sb,
  input  logic signed [10:0] eb,
  input  logic [24:0]        mb,
  output fp32_t              y
);
  logic               s_big, s_sml;
  logic signed [10:0] e_big, e_sml, e_res;
  logic [24:0]        m_big, m_sml;
  logic [10:0]        d;
  logic [27:0]        x_big, x_sml, mask;
  logic               sticky;
  logic [28:0]        sum;
  logic [27:0]        norm;
  logic [4:0]         lz;
  logic [24:0]        rnd;
  logic               up;

  always_comb begin
    mask   = '0;
    x_sml  = '0;
    sticky = 1'b0;
    // order the operands by magnitude
    if (mb == 25'd0 || (ma != 25'd0 && (ea > eb || (ea == eb && ma >= mb)))) begin
      s_big = sa; e_big = ea; m_big = ma;
      s_sml = sb; e_sml = eb; m_sml = mb;
    end else begin
      s_big = sb; e_big = eb; m_big = mb;
      s_sml = sa; e_sml = ea; m_sml = ma;
    end

    // align the smaller operand
    d      = (m_sml == 25'd0) ? 11'd0 : 11'(e_big - e_sml);
    x_big  = {m_big, 3'b000};
    if (d >= 11'd28) begin
      x_sml  = 28'd0;
      sticky = (m_sml != 25'd0);
    end else begin
      mask   = (28'd1 << d[4:0]) - 28'd1;
      x_sml  = {m_sml, 3'b000} >> d[4:0];
      sticky = (({m_sml, 3'b000} & mask) != 28'd0);
    end
    x_sml[0] = x_sml[0] | sticky;

    // add or subtract
    if (s_big == s_sml) sum = {1'b0, x_big} + {1'b0, x_sml};
    else                sum = {1'b0, x_big} - {1'b0, x_sml};

    // normalise: leading one to bit 27
    e_res = e_big;
    lz    = 5'd0;
    norm  = '0;
    if (sum[28]) begin
      norm  = sum[28:1];
      norm[0] = norm[0] | sum[0];
      e_res = e_big + 11'sd1;
    end else begin
      for (int i = 0; i <= 27; i++)
        if (sum[i]) lz = 5'(27 - i);
      norm  = sum[27:0] << lz;
      e_res = e_big - 11'(signed'({6'd0, lz}));
    end

    // round to nearest even on bit 4
    up  = norm[3] & ((norm[2:0] != 3'd0) | norm[4]);
    rnd = {1'b0, norm[27:4]} + 25'(up);
    if (rnd[24]) begin
      rnd   = rnd >> 1;
      e_res = e_res + 11'sd1;
    end

    // pack
    if (m_big == 25'd0 || sum == 29'd0) begin
      y = '{sign: (m_big == 25'd0) ? 1'b0 : (s_big & s_sml), exp: 8'd0, man: 23'd0};
    end else if (e_res >= 11'sd255) begin
      y = '{sign: s_big, exp: 8'hFF, man: 23'd0};
    end else if (e_res <= 11'sd0) begin
      y = '{sign: s_big, exp: 8'd0, man: 23'd0};
    end else begin
      y = '{sign: s_big, exp: e_res[7:0], man: rnd[22:0]};
    end
  end
endmodule
