// fp_mac: fused floating-point multiply-add z = a*b + c on decoded posit operands.
//
// How it works. Each operand arrives as sign, signed exponent and an FW-bit fraction with
// an implied leading one. The two significands of a and b are multiplied exactly
// (2*(FW+1) bits, value in [1,4)) and their exponents added. The operand with the smaller
// exponent is aligned to the other by a right shift; bits shifted out are kept as one
// sticky bit. Same signs add; different signs subtract the smaller magnitude from the
// larger, the sticky bit being subtracted as one extra LSB so that the later truncation
// still rounds the exact result toward zero. The sum is normalised by a leading-one search
// and the FW bits below the leading one are passed on, truncated. Zero operands bypass the
// arithmetic (a*b = 0 gives c exactly); any infinite operand gives infinity.
//
// Interface: for each of a, b, c: s_*, exp_* (signed EW bits), f_* (FW bits), zero_*,
// inf_*. Result: s_z, exp_z (signed OEW bits), f_z (FW bits), zero_z, inf_z. Purely
// combinational; the result is rounded once, toward zero.
//
// The paper names this block ("FP MAC") and places it between three decoders and one
// encoder, but does not describe its insides. The fused single-rounding datapath, the
// three guard bits, sticky handling and rounding toward zero are this design's choices.
module fp_mac #(
  parameter int EW  = 6,
  parameter int FW  = 12,
  parameter int OEW = EW + 3
) (
  input  logic                  s_a, s_b, s_c,
  input  logic signed [EW-1:0]  exp_a, exp_b, exp_c,
  input  logic        [FW-1:0]  f_a, f_b, f_c,
  input  logic                  zero_a, zero_b, zero_c,
  input  logic                  inf_a, inf_b, inf_c,
  output logic                  s_z,
  output logic signed [OEW-1:0] exp_z,
  output logic        [FW-1:0]  f_z,
  output logic                  zero_z,
  output logic                  inf_z
);
  localparam int PW  = 2 * (FW + 1);   // exact product width
  localparam int G   = 3;              // guard bits below the product
  localparam int D   = PW + G;         // aligned datapath width
  localparam int BP  = 2 * FW + G;     // binary point: weight 2^0 sits at bit BP
  localparam int SW  = $clog2(D + 2);  // shift / position width

  logic [PW-1:0]         prod;
  logic [D-1:0]          p_sig, c_sig;
  logic signed [OEW-1:0] e_p, e_c;
  logic                  s_p, p_zero;

  assign prod   = {1'b1, f_a} * {1'b1, f_b};
  assign p_sig  = {prod, {G{1'b0}}};
  assign c_sig  = {2'b01, f_c, {(FW + G){1'b0}}};
  assign e_p    = OEW'(exp_a) + OEW'(exp_b);
  assign e_c    = OEW'(exp_c);
  assign s_p    = s_a ^ s_b;
  assign p_zero = zero_a | zero_b;

  // Operand order: op_hi has the larger exponent, op_lo is aligned to it.
  logic                  p_hi, s_hi, s_lo, sticky, found;
  logic signed [OEW-1:0] e_base, diff;
  logic [D-1:0]          op_hi, op_lo, op_lo_al, lost_mask;
  logic [D:0]            sum;
  logic                  s_sum;
  logic [SW-1:0]         lead;
  logic [D:0]            norm;

  assign p_hi   = (e_p >= e_c);
  assign e_base = p_hi ? e_p : e_c;
  assign diff   = p_hi ? (e_p - e_c) : (e_c - e_p);
  assign op_hi  = p_hi ? p_sig : c_sig;
  assign op_lo  = p_hi ? c_sig : p_sig;
  assign s_hi   = p_hi ? s_p : s_c;
  assign s_lo   = p_hi ? s_c : s_p;

  // Align the smaller-exponent operand, collecting shifted-out bits into a sticky bit.
  assign lost_mask = (diff >= OEW'(D)) ? {D{1'b1}} : ~({D{1'b1}} << diff);
  assign sticky    = |(op_lo & lost_mask);
  assign op_lo_al  = (diff >= OEW'(D)) ? '0 : (op_lo >> diff);

  // Bits are lost in alignment only when the exponents differ by more than the guard bits;
  // the aligned operand is then strictly smaller, which the sticky subtraction relies on.
  always_comb begin
    if (sticky) assert (diff > OEW'(G) && op_hi > op_lo_al) else $error("sticky with close exponents");
  end

  // Add, or subtract the smaller magnitude from the larger (sticky as one extra LSB).
  always_comb begin
    if (s_hi == s_lo) begin
      sum   = {1'b0, op_hi} + {1'b0, op_lo_al};
      s_sum = s_hi;
    end else if (op_hi >= op_lo_al) begin
      sum   = {1'b0, op_hi} - {1'b0, op_lo_al} - (D+1)'(sticky);
      s_sum = s_hi;
    end else begin
      sum   = {1'b0, op_lo_al} - {1'b0, op_hi};
      s_sum = s_lo;
    end
  end

  // Leading-one search over the sum.
  always_comb begin
    found = 1'b0;
    lead  = '0;
    for (int i = D; i >= 0; i--) begin
      if (!found && sum[i]) begin
        lead  = SW'(i);
        found = 1'b1;
      end
    end
  end

  assign norm = sum << (SW'(D) - lead);

  // Result selection, special operands first.
  always_comb begin
    s_z    = s_sum;
    exp_z  = e_base + OEW'(signed'({1'b0, lead})) - OEW'(BP);
    f_z    = norm[D-1 -: FW];
    zero_z = ~found;
    inf_z  = 1'b0;
    if (inf_a || inf_b || inf_c) begin
      inf_z  = 1'b1;
      zero_z = 1'b0;
      s_z    = 1'b0;
      exp_z  = '0;
      f_z    = '0;
    end else if (p_zero && zero_c) begin
      zero_z = 1'b1;
      s_z    = 1'b0;
      exp_z  = '0;
      f_z    = '0;
    end else if (p_zero) begin
      zero_z = 1'b0;
      s_z    = s_c;
      exp_z  = e_c;
      f_z    = f_c;
    end else if (zero_c) begin
      zero_z = 1'b0;
      s_z    = s_p;
      exp_z  = e_p + OEW'(prod[PW-1]);
      f_z    = prod[PW-1] ? prod[PW-2 -: FW] : prod[PW-3 -: FW];
    end else if (!found) begin
      s_z    = 1'b0;
      exp_z  = '0;
      f_z    = '0;
    end
  end
endmodule
