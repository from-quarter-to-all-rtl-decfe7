// bsfp_decode_lane -- decode unit for one PE lane (the "Decode" stage between
// the weight buffer and the PE array).
//
// Input is one 16-bit lane of a weight-buffer word:
//   full mode     : the BSFP word of one weight, laid out like FP16 with the
//                   remapped bits in place: {sign, flag, code[2:0], e0, man}.
//                   Wq = {sign, code}, Wr = {flag, e0, man}.
//   quantize mode : three Wq nibbles {wq2, wq1, wq0}, each {sign, code[2:0]},
//                   in bits 11:0; bits 15:12 are ignored.
// Output is the 15-bit PE weight word (Sec. IV-C: 15 bits in both modes):
//   full mode     : fw_t {sign, exp[3:0], man}; exponent bit 4 is dropped.
//   quantize mode : {qw2, qw1, qw0}, each qw_t {sign, exp[3:0]}.
// Holds three quantize decoders and one full decoder; combinational.
// The paper gives the two decoders and the 15-bit PE input; the lane packing
// is this design's choice.
module bsfp_decode_lane
  import speq_pkg::*;
(
  input  mode_e                  mode,
  input  logic [LANE_BITS-1:0]   lane,
  output logic [PEW_BITS-1:0]    pew
);
  wq_t        wq [3];
  logic [3:0] qexp [3];
  logic [3:0] fexp;

  always_comb begin
    for (int k = 0; k < 3; k++) wq[k] = wq_t'(lane[4*k +: 4]);
  end

  for (genvar k = 0; k < 3; k++) begin : g_q
    bsfp_qdec u_qdec (.code(wq[k].code), .exp4(qexp[k]));
  end

  bsfp_fdec u_fdec (
    .code (lane[13:11]),
    .flag (lane[14]),
    .e0   (lane[10]),
    .exp4 (fexp)
  );

  always_comb begin
    if (mode == MODE_QUANT) begin
      pew = {qw_t'{sign: wq[2].sign, exp: qexp[2]},
             qw_t'{sign: wq[1].sign, exp: qexp[1]},
             qw_t'{sign: wq[0].sign, exp: qexp[0]}};
    end else begin
      pew = fw_t'{sign: lane[15], exp: fexp, man: lane[9:0]};
    end
  end
endmodule
