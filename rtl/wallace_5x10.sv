// wallace_5x10 -- 5-bit x 10-bit Wallace-tree multiplier with a reusable
// final adder.
//
// Multiply mode (add_mode = 0): prod = a * b, 15 bits.  The five partial
// products are reduced to two rows by three levels of 3:2 carry-save adders,
// and a final carry-propagate adder sums the two rows.
// Add mode (add_mode = 1): the partial products are masked to zero and the
// final adder is fed with x and y instead, so prod = x + y (5b + 4b, 6-bit
// result).  This is how the PE computes the exponent sums of its second and
// third draft weights without extra adders (Sec. IV-C).
// The paper gives the split into two 5b x 10b trees and the reuse of their
// adders; the exact reduction schedule is this design's own.  Combinational.
module wallace_5x10 (
  input  logic        add_mode,
  input  logic [4:0]  a,      // weight mantissa segment
  input  logic [9:0]  b,      // activation mantissa
  input  logic [4:0]  x,      // add mode: activation exponent
  input  logic [3:0]  y,      // add mode: weight exponent
  output logic [14:0] prod
);
  logic [14:0] pp [5];
  logic [14:0] s1, c1, s2, c2, s3, c3;
  logic [14:0] fa_x, fa_y;

  function automatic void csa(input logic [14:0] i0, i1, i2,
                              output logic [14:0] s, c);
    s = i0 ^ i1 ^ i2;
    c = ((i0 & i1) | (i0 & i2) | (i1 & i2)) << 1;
  endfunction

  always_comb begin
    for (int i = 0; i < 5; i++)
      pp[i] = (a[i] && !add_mode) ? (15'(b) << i) : 15'd0;
    csa(pp[0], pp[1], pp[2], s1, c1);   // level 1
    csa(s1, c1, pp[3], s2, c2);         // level 2
    csa(s2, c2, pp[4], s3, c3);         // level 3
    fa_x = add_mode ? 15'(x) : s3;
    fa_y = add_mode ? 15'(y) : c3;
    prod = fa_x + fa_y;                 // shared final adder
  end
endmodule
