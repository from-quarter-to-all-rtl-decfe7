// speq_pkg -- types and constants shared by the SPEQ accelerator RTL.
//
// BSFP (bit-sharing floating point) keeps an FP16 weight in its usual 16 bit
// positions, but splits them into two separately stored parts:
//   Wq = {sign, e3, e2, e1}         4 bits, the draft (E3M0) weight
//   Wr = {e4, e0, mantissa[9:0]}   12 bits, the rest of the FP16 word
// The exponent bit e4 is never needed by a weight (all weight exponents are
// below 16), so it is reused as a "remapped" flag.  The 3-bit code in Wq is a
// remapped version of e3..e1 (see bsfp_qdec / bsfp_fdec).
// The bit split follows the paper; the field order inside Wq and Wr, and the
// packing of lanes into buffer words, are this design's own choices.
package speq_pkg;

  // Operating mode of the PE array.  Quantize mode runs the draft model,
  // full mode runs the verification (target) model.
  typedef enum logic {
    MODE_FULL  = 1'b0,
    MODE_QUANT = 1'b1
  } mode_e;

  typedef struct packed {
    logic       sign;
    logic [2:0] code;   // remapped middle exponent bits
  } wq_t;

  typedef struct packed {
    logic       flag;   // stored in FP16 exponent bit 4: 1 = code was remapped
    logic       e0;     // FP16 exponent bit 0
    logic [9:0] man;
  } wr_t;

  // One PE lane of the weight buffer: the BSFP word of one weight (full mode)
  // or three Wq codes (quantize mode, lower 12 bits used).
  localparam int unsigned LANE_BITS = 16;
  // Decoded weight bits fed to one PE: 15 in both modes (Sec. IV-C).
  localparam int unsigned PEW_BITS  = 15;

  typedef struct packed {
    logic       sign;
    logic [3:0] exp;    // exponent bits 3..0, bit 4 is zero after decoding
  } qw_t;               // decoded draft weight, value (-1)^s * 2^(exp-15)

  typedef struct packed {
    logic       sign;
    logic [3:0] exp;
    logic [9:0] man;
  } fw_t;               // decoded full weight, FP16 with exponent bit 4 = 0

  typedef struct packed {
    logic       sign;
    logic [4:0] exp;
    logic [9:0] man;
  } fp16_t;

  typedef struct packed {
    logic        sign;
    logic [7:0]  exp;
    logic [22:0] man;
  } fp32_t;

  // Product handed from the multiplier to an accumulation unit:
  // value = (-1)^sign * sig * 2^-20 * 2^(exp - 30), exp = biased exponent sum.
  typedef struct packed {
    logic        sign;
    logic [5:0]  exp;
    logic [21:0] sig;
  } prod_t;

  localparam fp32_t FP32_ZERO = '0;

endpackage
