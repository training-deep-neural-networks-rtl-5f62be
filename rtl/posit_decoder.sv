// posit_decoder: (N,ES) posit -> sign, effective exponent, fraction (low-latency decoder).
//
// How it works. A negative posit is first two's-complemented, so the body below the sign
// bit, in[n-2:0], is a positive posit. Its regime is measured twice in parallel: a
// leading-one detector (LOD) counts a run of r zeros (negative regime, k = -r, the LOD
// output is negated in two's complement to form neg_regime), and a leading-zero detector
// (LZD) counts a run of ones (positive regime k, pos_regime). The regime field is r+1 bits
// wide for k<0 and k+2 bits wide for k>=0; with the first regime bit already dropped, the
// remaining bits in[n-3:0] must be left-shifted by r or by k+1. Instead of an adder that
// forms k+1 ahead of one shifter, two shifters run side by side: Left Shifter1 shifts by r,
// Left Shifter2 shifts by k and is followed by a fixed <<1. A 2:1 mux, selected by the
// regime polarity, picks the result. Its top ES bits are the posit exponent, the rest the
// fraction. effective_exp is the concatenation {regime, posit_exp} = k*2^ES + e.
//
// Interface: in_posit (N bits) -> sign, eff_exp (signed, exp_w bits), mantissa (fraction
// without hidden one, frac_w = N-3-ES bits, MSB aligned), is_zero (000..0) and is_inf
// (100..0, +-infinity in the posit definition). Exponent and fraction read 0 for the two
// special codes. Purely combinational, no clock.
//
// Follows the paper: the LOD/LZD pair, the negation on the LOD path, the two left
// shifters with a <<1 after the second, the output mux, and the {regime, exp}
// concatenation. Own choices: the mux select is driven by the regime polarity of the
// complemented body (the paper's figure labels this wire in[n-1]); the LZD reads in[n-3:0]
// so that it returns k rather than k+1; the sign is handled by two's complement in front
// of the datapath; the is_zero / is_inf flags.
module posit_decoder
  import posit_pkg::*;
#(
  parameter int N  = 16,
  parameter int ES = 1,
  localparam int EW = exp_w(N, ES),
  localparam int FW = frac_w(N, ES)
) (
  input  logic                 [N-1:0]  in_posit,
  output logic                          sign,
  output logic signed          [EW-1:0] eff_exp,
  output logic                 [FW-1:0] mantissa,
  output logic                          is_zero,
  output logic                          is_inf
);
  localparam int CW = cnt_w(N);
  localparam int RW = regime_w(N);
  localparam int ESW = (ES > 0) ? ES : 1;

  logic [N-2:0]  body;           // in[n-2:0] of the figure
  logic          regime_neg;     // mux select
  logic [CW-1:0] abs_regime;     // LOD output, r
  logic [CW-1:0] pos_regime;     // LZD output, k
  logic signed [RW-1:0] neg_regime, regime;
  logic [N-3:0]  sh1, sh2, sh;   // shifted in[n-3:0]
  logic [ESW-1:0] posit_exp;     // exponent field (unused bit when ES = 0)

  assign sign    = in_posit[N-1];
  assign is_zero = (in_posit == '0);
  assign is_inf  = (in_posit == {1'b1, {(N-1){1'b0}}});
  assign body    = sign ? (~in_posit[N-2:0] + 1'b1) : in_posit[N-2:0];
  assign regime_neg = ~body[N-2];

  posit_lod #(.W(N-1), .CW(CW)) u_lod (.din(body),        .count(abs_regime));
  posit_lzd #(.W(N-2), .CW(CW)) u_lzd (.din(body[N-3:0]), .count(pos_regime));

  assign neg_regime = ~RW'(abs_regime) + 1'b1;
  assign regime     = regime_neg ? neg_regime : RW'(pos_regime);

  // Two parallel left shifters replace the "+1" adder in front of a single shifter.
  assign sh1 = body[N-3:0] << abs_regime;
  assign sh2 = (body[N-3:0] << pos_regime) << 1;
  assign sh  = regime_neg ? sh1 : sh2;

  // Top ES bits of the shifter output are the exponent, the next FW bits the fraction
  // (the LSB is always zero because the shift is at least one).
  assign posit_exp = ESW'(sh >> (N - 2 - ES));

  // Every regime is at least one bit past the dropped first bit, so the shift is at least
  // one and the shifter output's LSB is always zero.
  always_comb begin
    if (!is_zero && !is_inf) assert (sh[0] == 1'b0) else $error("decoder shift below one");
  end

  always_comb begin
    if (is_zero || is_inf) begin
      eff_exp  = '0;
      mantissa = '0;
    end else begin
      eff_exp  = (EW'(regime) <<< ES) | EW'(posit_exp);
      mantissa = FW'(sh >> 1);
    end
  end
endmodule
