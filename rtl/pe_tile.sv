// pe_tile -- one tile of the reconfigurable PE array.
//
// N_PE processing elements (128 in the paper) receive the same FP16
// activation each cycle and each its own 15-bit decoded weight word.  Over a
// pass of 128 cycles (one quantization group: activation elements k = 0..127
// of a group), PE i accumulates the dot product of the activation group with
// its weight column(s): one column in full mode, three columns in quantize
// mode, so a tile covers 128 or 384 output columns per pass.
// Drain port: `drain_idx` selects one PE whose held (finished) sums appear on
// `dout` combinationally; a controller walks it over all PEs while the next
// pass is being computed.
// The tile size and the three-columns-per-PE mapping follow the paper; the
// broadcast activation and the drain mux are this design's choices.
module pe_tile
  import speq_pkg::*;
#(
  parameter int unsigned N_PE = 128
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  mode_e                       mode,
  input  logic                        en,
  input  logic                        first,
  input  logic                        last,
  input  fp16_t                       a,
  input  logic [N_PE*PEW_BITS-1:0]    w,
  input  logic [$clog2(N_PE)-1:0]     drain_idx,
  output fp32_t                       dout [3]
);
  fp32_t held [N_PE][3];

  for (genvar i = 0; i < N_PE; i++) begin : g_pe
    fp32_t acc_unused [3];
    fp32_t held_i [3];
    speq_pe u_pe (
      .clk, .rst_n, .mode, .en, .first, .last, .a,
      .w    (w[i*PEW_BITS +: PEW_BITS]),
      .acc  (acc_unused),
      .held (held_i)
    );
    assign held[i] = held_i;
  end

  always_comb begin
    for (int k = 0; k < 3; k++) dout[k] = held[drain_idx][k];
  end
endmodule
