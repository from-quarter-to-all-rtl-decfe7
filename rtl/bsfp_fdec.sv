// bsfp_fdec -- exponent decoder for the full BSFP weight.
//
// Rebuilds the original FP16 exponent bits e3..e0 from the 3-bit draft code in
// Wq and the two exponent bits kept in Wr: the remap flag (stored in FP16
// exponent bit 4) and e0.  When the flag is clear the code is the original
// {e3,e2,e1}.  When it is set, the code's two low bits select the original
// {e3,e2,e1} from a 4-entry constant table:
//   code[1:0] = 00 -> 100   (code 000 held exponent 8/9)
//               01 -> 000   (code 001 held exponent 0/1)
//               10 -> 101   (code 010 held exponent 10/11)
//               11 -> 010   (code 011 held exponent 4/5)
// e0 is appended below in both cases.  The table and the mux structure are
// printed in the paper's decoder figure; the paper's text says the mux output
// is joined with "the 0th bit" of Wr-exp, while the figure routes the other
// Wr-exp bit (e0) there.  The figure is followed, since joining the flag would
// always give an odd exponent.  Purely combinational.
module bsfp_fdec (
  input  logic [2:0] code,   // Wq exponent code
  input  logic       flag,   // Wr remap flag
  input  logic       e0,     // Wr exponent bit 0
  output logic [3:0] exp4    // original FP16 exponent bits 3..0
);
  logic [2:0] lut;

  always_comb begin
    unique case (code[1:0])
      2'b00:   lut = 3'b100;
      2'b01:   lut = 3'b000;
      2'b10:   lut = 3'b101;
      default: lut = 3'b010;
    endcase
    exp4 = flag ? {lut, e0} : {code, e0};
  end
endmodule
