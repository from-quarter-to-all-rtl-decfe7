// speq_pe -- reconfigurable processing element.
//
// Every cycle with `en` set the PE takes one FP16 activation and a 15-bit
// decoded weight word and accumulates in FP32:
//   full mode     : w = {sign, exp[3:0], man[9:0]}, one FP16 x FP16 product
//                   into accumulator #0.
//   quantize mode : w = {qw2, qw1, qw0}, three draft weights of the form
//                   (-1)^s * 2^(exp-15); each product with the activation is
//                   an exponent addition, into accumulators #0, #1, #2.
// Four parts, as in the paper: a sign unit (XOR per product), an exponent
// adder (5b + 4b), a multiplier made of two 5b x 10b Wallace trees (upper
// and lower half of the weight mantissa), and FP32 accumulation units.  In
// quantize mode the two Wallace trees are switched to add mode and compute
// the exponent sums of draft weights 1 and 2, so the same 31 input bits
// (16 activation + 15 weight) keep all parts busy in both modes.
// Preprocess: an FP16 exponent field of 0 is read as exponent 1 with a
// hidden bit of 0 (subnormal); the hidden-bit terms of the full-mode
// significand product (1*1, 1*mw, ma*1) are added to the tree output after
// the mux.  These two steps are this design's reading of the "preprocess"
// block and the adder after the mux in the paper's PE figure.
// Timing: results appear in acc_* one cycle after `en`; `first` starts a new
// sum, `last` copies the finished sum into held_* (see fp32_acc).
module speq_pe
  import speq_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  mode_e               mode,
  input  logic                en,
  input  logic                first,
  input  logic                last,
  input  fp16_t               a,
  input  logic [PEW_BITS-1:0] w,
  output fp32_t               acc  [3],
  output fp32_t               held [3]
);
  logic        q;
  fw_t         fw;
  qw_t         qw [3];
  logic        a_h, w_h;
  logic [4:0]  a_e;
  logic [3:0]  w_e;
  logic [5:0]  e_sum0;
  logic [14:0] t_hi, t_lo;
  logic [19:0] mm;
  logic [21:0] sig_full;
  logic [2:0]  s;
  prod_t       p [3];

  always_comb begin
    q  = (mode == MODE_QUANT);
    fw = fw_t'(w);
    for (int k = 0; k < 3; k++) qw[k] = qw_t'(w[5*k +: 5]);
    // preprocess: hidden bits and effective exponents
    a_h = (a.exp != 5'd0);
    a_e = a_h ? a.exp : 5'd1;
    w_h = (fw.exp != 4'd0);
    w_e = w_h ? fw.exp : 4'd1;
    // sign processing unit
    s[0] = a.sign ^ (q ? qw[0].sign : fw.sign);
    s[1] = a.sign ^ qw[1].sign;
    s[2] = a.sign ^ qw[2].sign;
    // exponent adder
    e_sum0 = 6'(a_e) + 6'(q ? qw[0].exp : w_e);
  end

  // multiplication unit: two 5b x 10b Wallace trees
  wallace_5x10 u_hi (.add_mode(q), .a(fw.man[9:5]), .b(a.man),
                     .x(a_e), .y(qw[1].exp), .prod(t_hi));
  wallace_5x10 u_lo (.add_mode(q), .a(fw.man[4:0]), .b(a.man),
                     .x(a_e), .y(qw[2].exp), .prod(t_lo));

  always_comb begin
    mm       = (20'(t_hi) << 5) + 20'(t_lo);
    sig_full = 22'(mm)
             + ((a_h & w_h) ? 22'(1) << 20 : 22'd0)
             + (a_h ? 22'(fw.man) << 10 : 22'd0)
             + (w_h ? 22'(a.man)  << 10 : 22'd0);
    if (q) begin
      p[0] = '{sign: s[0], exp: e_sum0,     sig: 22'({a_h, a.man, 10'd0})};
      p[1] = '{sign: s[1], exp: t_hi[5:0],  sig: 22'({a_h, a.man, 10'd0})};
      p[2] = '{sign: s[2], exp: t_lo[5:0],  sig: 22'({a_h, a.man, 10'd0})};
    end else begin
      p[0] = '{sign: s[0], exp: e_sum0, sig: sig_full};
      p[1] = '0;
      p[2] = '0;
    end
  end

  // accumulation units; #1 and #2 only run in quantize mode
  for (genvar k = 0; k < 3; k++) begin : g_acc
    fp32_acc u_acc (
      .clk, .rst_n,
      .en    (en && (k == 0 || q)),
      .first, .last,
      .p     (p[k]),
      .acc   (acc[k]),
      .held  (held[k])
    );
  end
endmodule
