// posit_mac: posit multiply-accumulate z = a*b + c for one (N,ES) posit format.
//
// Three low-latency decoders turn a, b and c into sign / effective exponent / fraction,
// a fused floating-point multiply-add computes a*b + c exactly and truncates once, and a
// low-latency encoder packs the result back into an (N,ES) posit, rounding toward zero and
// saturating at maxpos. The datapath is combinational from a, b, c to z (no clock); the
// paper reports the unit synthesised against a 750 MHz constraint, which a user meets by
// placing registers around this block.
//
// Default (16,1) is the format the paper uses for forward pass and weight update; (16,2)
// for gradients, (8,1) and (8,2) for the CIFAR-10 convolution layers are the same RTL with
// other parameters. The decoder / FP MAC / encoder split follows the paper; the
// fraction width carried through the FP MAC, the single rounding and the special-value
// handling are this design's choices.
module posit_mac
  import posit_pkg::*;
#(
  parameter int N  = 16,
  parameter int ES = 1
) (
  input  logic [N-1:0] a,
  input  logic [N-1:0] b,
  input  logic [N-1:0] c,
  output logic [N-1:0] z
);
  localparam int EW  = exp_w(N, ES);
  localparam int FW  = frac_w(N, ES);
  localparam int OEW = mac_exp_w(N, ES);

  logic                  s_a, s_b, s_c, s_z;
  logic signed [EW-1:0]  exp_a, exp_b, exp_c;
  logic signed [OEW-1:0] exp_z;
  logic [FW-1:0]         f_a, f_b, f_c, f_z;
  logic                  zero_a, zero_b, zero_c, zero_z;
  logic                  inf_a, inf_b, inf_c, inf_z;

  posit_decoder #(.N(N), .ES(ES)) u_dec_a (
    .in_posit(a), .sign(s_a), .eff_exp(exp_a), .mantissa(f_a), .is_zero(zero_a), .is_inf(inf_a));
  posit_decoder #(.N(N), .ES(ES)) u_dec_b (
    .in_posit(b), .sign(s_b), .eff_exp(exp_b), .mantissa(f_b), .is_zero(zero_b), .is_inf(inf_b));
  posit_decoder #(.N(N), .ES(ES)) u_dec_c (
    .in_posit(c), .sign(s_c), .eff_exp(exp_c), .mantissa(f_c), .is_zero(zero_c), .is_inf(inf_c));

  fp_mac #(.EW(EW), .FW(FW), .OEW(OEW)) u_fp_mac (
    .s_a(s_a), .s_b(s_b), .s_c(s_c),
    .exp_a(exp_a), .exp_b(exp_b), .exp_c(exp_c),
    .f_a(f_a), .f_b(f_b), .f_c(f_c),
    .zero_a(zero_a), .zero_b(zero_b), .zero_c(zero_c),
    .inf_a(inf_a), .inf_b(inf_b), .inf_c(inf_c),
    .s_z(s_z), .exp_z(exp_z), .f_z(f_z), .zero_z(zero_z), .inf_z(inf_z));

  posit_encoder #(.N(N), .ES(ES), .EXPW(OEW), .MW(FW)) u_enc (
    .sign(s_z), .eff_exp(exp_z), .mantissa(f_z), .is_zero(zero_z), .is_inf(inf_z),
    .out_posit(z));
endmodule
