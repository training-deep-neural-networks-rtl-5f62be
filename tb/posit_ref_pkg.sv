// posit_ref_pkg: bit-serial reference model of (n,es) posits for the testbenches.
//
// It decodes a posit by walking its bits one at a time (sign, regime run, terminator,
// exponent bits, fraction), holds exact values in a 1024-bit two's-complement fixed-point
// accumulator with QF fraction bits, and encodes an exact value back to a posit by laying
// the regime, exponent and fraction bits down one by one, dropping whatever does not fit
// (round toward zero), flushing values below minpos to zero and clipping values above
// maxpos to maxpos. It shares no code or structure with the shifter-based RTL.
package posit_ref_pkg;

  localparam int QW = 1024;
  localparam int QF = 200;
  typedef logic signed [QW-1:0] quire_t;

  typedef struct {
    bit          zero;
    bit          inf;
    bit          sign;
    int          k;
    int          e;
    int          eff;     // k*2^es + e
    longint      frac;    // fraction bits present in the word
    int          fb;      // how many
  } dec_t;

  function automatic dec_t decode(int n, int es, logic [63:0] p);
    dec_t d;
    logic [63:0] mag, mask;
    int i, run;
    bit first;
    mask = (n == 64) ? '1 : ((64'd1 << n) - 1);
    p    = p & mask;
    d    = '{default: 0};
    d.zero = (p == 0);
    d.inf  = (p == (64'd1 << (n - 1)));
    if (d.zero || d.inf) return d;
    d.sign = p[n-1];
    mag = d.sign ? ((~p + 1) & mask) : p;
    i = n - 2;
    first = mag[i];
    run = 0;
    while (i >= 0 && mag[i] == first) begin run++; i--; end
    d.k = first ? run - 1 : -run;
    i--;                                   // terminator
    d.e = 0;
    for (int j = 0; j < es; j++) begin
      d.e = d.e * 2 + ((i >= 0) ? int'(mag[i]) : 0);
      i--;
    end
    d.fb   = (i >= 0) ? i + 1 : 0;
    d.frac = (d.fb > 0) ? longint'(mag & ((64'd1 << d.fb) - 1)) : 0;
    d.eff  = d.k * (1 << es) + d.e;
    return d;
  endfunction

  // Exact value of a posit as a fixed-point number with QF fraction bits.
  function automatic quire_t to_quire(int n, int es, logic [63:0] p);
    dec_t d;
    quire_t q;
    d = decode(n, es, p);
    if (d.zero || d.inf) return '0;
    q = quire_t'((64'd1 << d.fb) | d.frac);
    if (d.eff - d.fb + QF >= 0) q = q <<< (d.eff - d.fb + QF);
    else                        q = q >>> -(d.eff - d.fb + QF);
    if (d.sign) q = -q;
    return q;
  endfunction

  // Encode sign * 1.mant * 2^exp, with mant given MSB-first in 64 bits (bits after the
  // leading one), into an (n,es) posit rounding toward zero.
  function automatic logic [63:0] encode(int n, int es, bit sign, int exp, logic [63:0] mant);
    logic [63:0] mag, mask;
    int maxexp, k, e, pos, fpos;
    mask   = (n == 64) ? '1 : ((64'd1 << n) - 1);
    maxexp = (n - 2) * (1 << es);
    if (exp < -maxexp) return 64'd0;
    if (exp > maxexp) begin
      mag = (64'd1 << (n - 1)) - 1;
    end else begin
      k = (exp >= 0) ? exp / (1 << es) : -((-exp + (1 << es) - 1) / (1 << es));
      e = exp - k * (1 << es);
      mag = 0;
      pos = n - 2;                         // next bit position to fill
      if (k >= 0) begin
        for (int j = 0; j < k + 1; j++) if (pos >= 0) begin mag[pos] = 1'b1; pos--; end
        if (pos >= 0) begin mag[pos] = 1'b0; pos--; end
      end else begin
        for (int j = 0; j < -k; j++) if (pos >= 0) begin mag[pos] = 1'b0; pos--; end
        if (pos >= 0) begin mag[pos] = 1'b1; pos--; end
      end
      for (int j = es - 1; j >= 0; j--) if (pos >= 0) begin mag[pos] = e[j]; pos--; end
      fpos = 63;
      while (pos >= 0) begin mag[pos] = mant[fpos]; pos--; fpos--; end
    end
    return sign ? ((~mag + 1) & mask) : mag;
  endfunction

  // Encode an exact fixed-point value.
  function automatic logic [63:0] encode_quire(int n, int es, quire_t q);
    quire_t mag;
    int lead;
    logic [63:0] mant;
    if (q == 0) return 64'd0;
    mag  = (q < 0) ? -q : q;
    lead = 0;
    for (int i = QW - 1; i >= 0; i--) if (mag[i]) begin lead = i; break; end
    mant = 64'((mag << (QW - lead)) >> (QW - 64));
    return encode(n, es, q < 0, lead - QF, mant);
  endfunction

  // Exponent and top fb fraction bits of an exact value (truncated), for checking an
  // unpacked floating-point result.
  function automatic void split_quire(quire_t q, int fb, output bit sign, output int exp,
                                      output longint frac);
    quire_t mag;
    int lead;
    sign = (q < 0);
    mag  = sign ? -q : q;
    lead = 0;
    for (int i = QW - 1; i >= 0; i--) if (mag[i]) begin lead = i; break; end
    exp  = lead - QF;
    frac = longint'((mag << (QW - lead)) >> (QW - fb));
  endfunction

endpackage
