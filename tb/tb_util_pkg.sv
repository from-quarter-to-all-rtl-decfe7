// tb_util_pkg -- reference models shared by the testbenches.
//
// Number conversions done with `real` arithmetic, independent of the RTL, and
// a BSFP encoder written straight from the remapping table:
//   FP16 exponent  0, 1 -> flag 1, code 001     (draft value 2)
//                  4, 5 -> flag 1, code 011     (draft value 6)
//                  9    -> flag 1, code 000     (draft value 9)
//                  11   -> flag 1, code 010     (draft value 11)
//   all other exponents -> flag 0, code e[3:1]  (draft value {e[3:1],0})
package tb_util_pkg;

  function automatic real pow2(int e);
    real r = 1.0;
    if (e >= 0) for (int i = 0; i < e; i++) r = r * 2.0;
    else        for (int i = 0; i < -e; i++) r = r / 2.0;
    return r;
  endfunction

  function automatic real fp16_to_real(logic [15:0] h);
    real m;
    int  e = int'(h[14:10]);
    if (e == 0) m = real'(h[9:0]) / 1024.0 * pow2(-14);
    else        m = (1.0 + real'(h[9:0]) / 1024.0) * pow2(e - 15);
    return h[15] ? -m : m;
  endfunction

  function automatic real fp32_to_real(logic [31:0] f);
    real m;
    int  e = int'(f[30:23]);
    if (e == 0) return 0.0;
    m = (1.0 + real'(f[22:0]) / 8388608.0) * pow2(e - 127);
    return f[31] ? -m : m;
  endfunction

  // nearest FP32 (normal range only), truncating beyond 24 bits is enough
  // for building test inputs
  function automatic logic [31:0] real_to_fp32(real r);
    logic s = (r < 0.0);
    real  a = s ? -r : r;
    int   e = 0;
    if (a == 0.0) return 32'd0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0)  begin a = a * 2.0; e--; end
    return {s, 8'(e + 127), 23'($rtoi((a - 1.0) * 8388608.0))};
  endfunction

  function automatic logic [4:0] bsfp_exp_field(logic [3:0] e);
    // returns {flag, code[2:0], e0}
    case (e)
      4'd0:    return 5'b1_001_0;
      4'd1:    return 5'b1_001_1;
      4'd4:    return 5'b1_011_0;
      4'd5:    return 5'b1_011_1;
      4'd9:    return 5'b1_000_1;
      4'd11:   return 5'b1_010_1;
      default: return {1'b0, e};
    endcase
  endfunction

  // BSFP word of an FP16 weight whose exponent is below 16
  function automatic logic [15:0] bsfp_encode(logic [15:0] h);
    return {h[15], bsfp_exp_field(h[13:10]), h[9:0]};
  endfunction

  // Wq nibble {sign, code} of an FP16 weight
  function automatic logic [3:0] bsfp_wq(logic [15:0] h);
    logic [4:0] f = bsfp_exp_field(h[13:10]);
    return {h[15], f[3:1]};
  endfunction

  // draft exponent the remapped E3M0 value stands for
  function automatic int draft_exp(logic [3:0] e);
    case (e)
      4'd0, 4'd1, 4'd2, 4'd3:  return 2;
      4'd4, 4'd5, 4'd6, 4'd7:  return 6;
      4'd12, 4'd13:            return 12;
      4'd14, 4'd15:            return 14;
      default:                 return int'(e);   // 8, 9, 10, 11 kept
    endcase
  endfunction

  // draft value of a weight (without the group scale)
  function automatic real draft_value(logic [15:0] h);
    real v = pow2(draft_exp(h[13:10]) - 15);
    return h[15] ? -v : v;
  endfunction

  // random FP16 with exponent field in [lo, hi]
  function automatic logic [15:0] rand_fp16(int lo, int hi);
    logic [4:0] e = 5'(lo + ($urandom % (hi - lo + 1)));
    return {1'($urandom), e, 10'($urandom)};
  endfunction

  function automatic real rabs(real r);
    return (r < 0.0) ? -r : r;
  endfunction

endpackage
