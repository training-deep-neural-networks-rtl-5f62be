// posit_encoder: sign, effective exponent, fraction -> (N,ES) posit (low-latency encoder).
//
// How it works. |effective_exp| is split into abs(regime) = |exp| >> ES and its low ES
// bits. For a negative exponent whose low bits are non-zero the regime is one further from
// zero and the exponent field is the two's-complement low bits; a flag for that case
// (exponent negative and low bits non-zero) drives the mux that picks the exponent field. A 2N-bit word
// REM is built as {regime fill (~sign of exp), terminator (sign of exp), ES exponent bits,
// fraction}. Shifting REM right by the regime size (r or r+1, r = abs(regime)) lays down
// the run-length regime in front of exponent and fraction. The +1 is not added to the shift
// amount: the shifter shifts by abs(regime) and a mux chooses its output or that output
// shifted right once more (>>1), taken when the exponent is non-negative or in the case
// flagged above.
// Bits that fall off the end are dropped, i.e. the magnitude is rounded toward zero.
// Exponents above maxpos saturate to maxpos; exponents below minpos give zero. The sign
// is applied last by two's complement.
//
// Interface: sign, eff_exp (signed EXPW bits), mantissa (MW bits, hidden one removed,
// MSB aligned), is_zero, is_inf -> out_posit (N bits). Purely combinational.
//
// Follows the paper: absolute value, the select logic, the exponent-field mux,
// the REM word of 2n bits, one right shifter by abs(regime) plus a >>1 path and the output
// mux. Own choices: rounding toward zero (the rule the paper picks for its posit
// transformation), saturation to maxpos / flush below minpos (as in its transformation
// algorithm), the sign handling and the zero / infinity inputs.
module posit_encoder
  import posit_pkg::*;
#(
  parameter int N    = 16,
  parameter int ES   = 1,
  parameter int EXPW = mac_exp_w(N, ES),
  parameter int MW   = frac_w(N, ES)
) (
  input  logic                   sign,
  input  logic signed [EXPW-1:0] eff_exp,
  input  logic        [MW-1:0]   mantissa,
  input  logic                   is_zero,
  input  logic                   is_inf,
  output logic        [N-1:0]    out_posit
);
  localparam int ESW    = (ES > 0) ? ES : 1;
  localparam int MAXEXP = (N - 2) * (1 << ES);       // exponent of maxpos
  localparam int LOWB   = N - 1 - ES;                // REM bits below the exponent field

  logic            exp_neg;
  logic [EXPW-1:0] abs_exp;
  logic [EXPW-1:0] abs_regime;
  logic [ESW-1:0]  abs_low, exp_low, exp_field;
  logic            low_nz, and_o, or_o;
  logic [2*N-1:0]  rem, rsh;
  logic [N-2:0]    body;
  logic            overflow, underflow;

  assign exp_neg    = eff_exp[EXPW-1];
  assign abs_exp    = exp_neg ? (~eff_exp + 1'b1) : eff_exp;
  assign abs_regime = abs_exp >> ES;
  assign abs_low    = ESW'(abs_exp) & ESW'((1 << ES) - 1);
  assign exp_low    = ESW'(eff_exp) & ESW'((1 << ES) - 1);
  assign low_nz     = |abs_low;
  assign and_o      = exp_neg & low_nz;
  assign or_o       = ~exp_neg | and_o;
  assign exp_field  = and_o ? exp_low : abs_low;

  // REM = {N regime fill bits, terminator, exponent field, fraction, zero padding}.
  always_comb begin
    logic [N-1:0] low;
    low = '0;
    low[N-1] = exp_neg;
    if (ES > 0)
      low = low | (N'(exp_field) << LOWB);
    if (MW >= LOWB)
      low = low | N'(mantissa >> (MW - LOWB));
    else
      low = low | (N'(mantissa) << (LOWB - MW));
    rem = {{N{~exp_neg}}, low};
  end

  assign rsh     = rem >> abs_regime;
  // Output mux: shifter result, or one further right (the regime size is r+1).
  assign body    = or_o ? rsh[N:2] : rsh[N-1:1];

  assign overflow  = !exp_neg && (abs_exp > EXPW'(MAXEXP));
  assign underflow =  exp_neg && (abs_exp > EXPW'(MAXEXP));

  always_comb begin
    logic [N-1:0] m;
    if (overflow) m = {1'b0, {(N-1){1'b1}}};
    else          m = {1'b0, body};
    if (is_inf)                      out_posit = {1'b1, {(N-1){1'b0}}};
    else if (is_zero || underflow)   out_posit = '0;
    else if (sign)                   out_posit = ~m + 1'b1;
    else                             out_posit = m;
  end
endmodule
