// fp32_mul -- FP32 multiplier used to apply the per-group scale.
//
// Multiplies two FP32 numbers: 24x24-bit significand product, normalise by
// at most one place, round to nearest even.  Subnormal inputs read as zero,
// results above the range become infinity and below it zero.  Combinational.
// The paper only says that the scale multiplies the group output; the number
// format of that multiply is this design's choice.
module fp32_mul
  import speq_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);
  logic [47:0]        prod;
  logic [23:0]        m;
  logic               g, st, up;
  logic [24:0]        rnd;
  logic signed [10:0] e;
  logic               s;

  always_comb begin
    s    = a.sign ^ b.sign;
    prod = {1'b1, a.man} * {1'b1, b.man};
    e    = 11'(signed'({3'b000, a.exp})) + 11'(signed'({3'b000, b.exp})) - 11'sd127;
    if (prod[47]) begin
      m  = prod[47:24];
      g  = prod[23];
      st = (prod[22:0] != 23'd0);
      e  = e + 11'sd1;
    end else begin
      m  = prod[46:23];
      g  = prod[22];
      st = (prod[21:0] != 22'd0);
    end
    up  = g & (st | m[0]);
    rnd = {1'b0, m} + 25'(up);
    if (rnd[24]) begin
      rnd = rnd >> 1;
      e   = e + 11'sd1;
    end
    if (a.exp == 8'd0 || b.exp == 8'd0)
      y = '{sign: s, exp: 8'd0, man: 23'd0};
    else if (e >= 11'sd255)
      y = '{sign: s, exp: 8'hFF, man: 23'd0};
    else if (e <= 11'sd0)
      y = '{sign: s, exp: 8'd0, man: 23'd0};
    else
      y = '{sign: s, exp: e[7:0], man: rnd[22:0]};
  end
endmodule
