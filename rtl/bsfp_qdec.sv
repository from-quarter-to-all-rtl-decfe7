// bsfp_qdec -- exponent decoder for the quantized (draft) BSFP weight.
//
// The draft weight keeps only the middle three FP16 exponent bits {e3,e2,e1}.
// With plain truncation the draft exponent would be {code,0}.  BSFP remaps two
// codes so that the large exponents 9 and 11 keep their own values: code 000
// means 9 and code 010 means 11 (small exponents 0..3 and 4..7 are folded onto
// 2 and 6 instead, by the offline encoder).  The decoder detects the two
// remapped codes with a NOR of code bits 2 and 0; for them it outputs
// {1, 0, code[1], 1}, otherwise it appends a zero to the code.
// Structure (NOR, constants "0", "10", "1", 2:1 mux) as printed in the paper's
// decoder figure; the figure numbers bits MSB first, this file LSB first.
// Purely combinational.
module bsfp_qdec (
  input  logic [2:0] code,   // Wq exponent code
  output logic [3:0] exp4    // decoded exponent, value 2^(exp4-15)
);
  logic lookup;

  always_comb begin
    lookup = ~(code[2] | code[0]);
    if (lookup) exp4 = {1'b1, 1'b0, code[1], 1'b1};
    else        exp4 = {code, 1'b0};
  end
endmodule
