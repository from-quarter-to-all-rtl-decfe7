// pe_array -- reconfigurable PE array with its BSFP decode stage.
//
// N_TILES tiles of N_PE PEs (8 x 128 = 1024 PEs, the paper's 32 x 32 array).
// A weight-buffer word holds one 16-bit lane per PE; each lane passes through
// a bsfp_decode_lane (the Decode block) before reaching its PE.  Each tile
// takes its own FP16 activation from the activation word (tile t uses bits
// 16t+15:16t), so the tiles may work on the same token or on different ones.
// Drain: for the PE index `drain_idx`, every tile presents its three held
// sums; dout[3*t + k] is accumulator #k of that PE in tile t.
// Timing: combinational decode in front of the PEs, so weights and
// activations presented in a cycle with `en` are accumulated at its end.
module pe_array
  import speq_pkg::*;
#(
  parameter int unsigned N_TILES = 8,
  parameter int unsigned N_PE    = 128
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  mode_e                                mode,
  input  logic                                 en,
  input  logic                                 first,
  input  logic                                 last,
  input  logic [N_TILES*16-1:0]                act,
  input  logic [N_TILES*N_PE*LANE_BITS-1:0]    wword,
  input  logic [$clog2(N_PE)-1:0]              drain_idx,
  output fp32_t                                dout [3*N_TILES]
);
  for (genvar t = 0; t < N_TILES; t++) begin : g_tile
    logic [N_PE*PEW_BITS-1:0] pew;
    fp32_t                    td [3];

    for (genvar i = 0; i < N_PE; i++) begin : g_dec
      bsfp_decode_lane u_dec (
        .mode,
        .lane (wword[(t*N_PE + i)*LANE_BITS +: LANE_BITS]),
        .pew  (pew[i*PEW_BITS +: PEW_BITS])
      );
    end

    pe_tile #(.N_PE(N_PE)) u_tile (
      .clk, .rst_n, .mode, .en, .first, .last,
      .a         (fp16_t'(act[t*16 +: 16])),
      .w         (pew),
      .drain_idx,
      .dout      (td)
    );

    for (genvar k = 0; k < 3; k++) begin : g_out
      assign dout[3*t + k] = td[k];
    end
  end
endmodule
