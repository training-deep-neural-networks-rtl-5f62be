// tb_posit_encoder: self-checking test of the low-latency posit encoder.
//
// Four encoders are instantiated: the default (16,1) and (8,0), (8,2), (32,3). Each gets
// random (sign, effective exponent, fraction) triples whose exponents run a few regimes
// past maxpos and minpos, so saturation, flush-to-zero and every regime length occur, and
// the zero / infinity inputs. Results are compared with a bit-serial reference encoder
// that rounds toward zero. A round trip over every (16,1) code word (reference decode,
// then encode) must return the word itself.
module tb_posit_encoder;
  import posit_ref_pkg::*;

  int checks = 0, failures = 0;
  int n_sat = 0, n_flush = 0, n_plus1 = 0, n_noplus1 = 0;

  logic s16, s8_0, s8_2, s32;
  logic z16, z8_0, z8_2, z32, i16, i8_0, i8_2, i32;
  logic signed [8:0]  x16;  logic [11:0] m16;  logic [15:0] o16;
  logic signed [6:0]  x8_0; logic [4:0]  m8_0; logic [7:0]  o8_0;
  logic signed [8:0]  x8_2; logic [2:0]  m8_2; logic [7:0]  o8_2;
  logic signed [11:0] x32;  logic [25:0] m32;  logic [31:0] o32;

  posit_encoder dut (.sign(s16), .eff_exp(x16), .mantissa(m16), .is_zero(z16), .is_inf(i16),
                     .out_posit(o16));
  posit_encoder #(.N(8), .ES(0)) e8_0 (.sign(s8_0), .eff_exp(x8_0), .mantissa(m8_0),
                     .is_zero(z8_0), .is_inf(i8_0), .out_posit(o8_0));
  posit_encoder #(.N(8), .ES(2)) e8_2 (.sign(s8_2), .eff_exp(x8_2), .mantissa(m8_2),
                     .is_zero(z8_2), .is_inf(i8_2), .out_posit(o8_2));
  posit_encoder #(.N(32), .ES(3)) e32 (.sign(s32), .eff_exp(x32), .mantissa(m32),
                     .is_zero(z32), .is_inf(i32), .out_posit(o32));

  function automatic int rand_exp(int n, int es);
    int span;
    span = (n - 2 + 3) * (1 << es);
    return int'($urandom_range(0, 2 * span)) - span;
  endfunction

  task automatic check(int n, int es, int mw, bit s, int x, longint m, bit z, bit inf,
                       logic [63:0] got);
    logic [63:0] want;
    int maxexp;
    maxexp = (n - 2) * (1 << es);
    if (inf)    want = 64'd1 << (n - 1);
    else if (z) want = 0;
    else        want = encode(n, es, s, x, 64'(m) << (64 - mw));
    checks++;
    if (!z && !inf) begin
      if (x > maxexp) n_sat++;
      if (x < -maxexp) n_flush++;
    end
    if (got !== want) begin
      failures++;
      if (failures < 10)
        $display("FAIL (%0d,%0d) s=%0d x=%0d m=%h z=%0d i=%0d: got %h want %h",
                 n, es, s, x, m, z, inf, got, want);
    end
  endtask

  initial begin
    for (int t = 0; t < 40000; t++) begin
      bit zz, ii;
      zz = ($urandom_range(0, 63) == 0);
      ii = !zz && ($urandom_range(0, 63) == 0);
      s16  = 1'($urandom); x16  = 9'(rand_exp(16, 1)); m16  = 12'($urandom);
      s8_0 = 1'($urandom); x8_0 = 7'(rand_exp(8, 0));  m8_0 = 5'($urandom);
      s8_2 = 1'($urandom); x8_2 = 9'(rand_exp(8, 2));  m8_2 = 3'($urandom);
      s32  = 1'($urandom); x32  = 12'(rand_exp(32, 3)); m32 = 26'($urandom);
      {z16, z8_0, z8_2, z32} = {4{zz}};
      {i16, i8_0, i8_2, i32} = {4{ii}};
      #1;
      if (dut.or_o) n_plus1++; else n_noplus1++;
      check(16, 1, 12, s16,  int'(x16),  longint'(m16),  z16,  i16,  64'(o16));
      check(8,  0, 5,  s8_0, int'(x8_0), longint'(m8_0), z8_0, i8_0, 64'(o8_0));
      check(8,  2, 3,  s8_2, int'(x8_2), longint'(m8_2), z8_2, i8_2, 64'(o8_2));
      check(32, 3, 26, s32,  int'(x32),  longint'(m32),  z32,  i32,  64'(o32));
    end
    // Round trip: every (16,1) word, decoded by the reference, must re-encode to itself.
    for (int v = 0; v < 65536; v++) begin
      dec_t d;
      d = decode(16, 1, 64'(v));
      s16 = d.sign; x16 = 9'(d.eff); m16 = 12'(d.frac << (12 - d.fb));
      z16 = d.zero; i16 = d.inf;
      #1;
      checks++;
      if (o16 !== 16'(v)) begin
        failures++;
        if (failures < 10) $display("FAIL round trip %h -> %h", v[15:0], o16);
      end
    end
    if (n_sat == 0 || n_flush == 0 || n_plus1 == 0 || n_noplus1 == 0) begin
      failures++;
      $display("FAIL coverage: saturate=%0d flush=%0d shift+1=%0d shift=%0d",
               n_sat, n_flush, n_plus1, n_noplus1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
