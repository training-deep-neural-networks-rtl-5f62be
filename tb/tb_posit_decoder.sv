// tb_posit_decoder: self-checking test of the low-latency posit decoder.
//
// Six decoders are instantiated: the default (16,1) and the other formats the design is
// used or benchmarked with, (8,0), (8,1), (8,2), (16,2) and (32,3). 8- and 16-bit formats
// are checked exhaustively over all code words, (32,3) on random words plus the regime
// extremes. Sign, effective exponent, fraction, zero and infinity flags are compared with
// a bit-serial reference decoder. A seventh, (5,1) decoder is checked against the real
// values of the positive (5,1) words as the posit definition tabulates them. The decoder is combinational, so each word is applied and
// read back after #1.
module tb_posit_decoder;
  import posit_ref_pkg::*;

  int checks = 0, failures = 0;

  logic [15:0] p16_1, p16_2;
  logic [7:0]  p8_0, p8_1, p8_2;
  logic [31:0] p32_3;

  logic s16_1, s16_2, s8_0, s8_1, s8_2, s32_3;
  logic z16_1, z16_2, z8_0, z8_1, z8_2, z32_3;
  logic i16_1, i16_2, i8_0, i8_1, i8_2, i32_3;
  logic signed [5:0]  e16_1;  logic [11:0] m16_1;
  logic signed [6:0]  e16_2;  logic [10:0] m16_2;
  logic signed [3:0]  e8_0;   logic [4:0]  m8_0;
  logic signed [4:0]  e8_1;   logic [3:0]  m8_1;
  logic signed [5:0]  e8_2;   logic [2:0]  m8_2;
  logic signed [8:0]  e32_3;  logic [25:0] m32_3;
  logic [4:0] p5; logic s5, z5, i5; logic signed [4:0] e5; logic [0:0] m5;

  // Positive (5,1) posits and their real values, as listed in the paper's Table I.
  real table1 [16] = '{0.0, 1.0/64, 1.0/16, 1.0/8, 1.0/4, 3.0/8, 1.0/2, 3.0/4,
                       1.0, 3.0/2, 2.0, 3.0, 4.0, 8.0, 16.0, 64.0};

  posit_decoder dut (.in_posit(p16_1), .sign(s16_1), .eff_exp(e16_1), .mantissa(m16_1),
                     .is_zero(z16_1), .is_inf(i16_1));
  posit_decoder #(.N(16), .ES(2)) d16_2 (.in_posit(p16_2), .sign(s16_2), .eff_exp(e16_2),
                     .mantissa(m16_2), .is_zero(z16_2), .is_inf(i16_2));
  posit_decoder #(.N(8), .ES(0)) d8_0 (.in_posit(p8_0), .sign(s8_0), .eff_exp(e8_0),
                     .mantissa(m8_0), .is_zero(z8_0), .is_inf(i8_0));
  posit_decoder #(.N(8), .ES(1)) d8_1 (.in_posit(p8_1), .sign(s8_1), .eff_exp(e8_1),
                     .mantissa(m8_1), .is_zero(z8_1), .is_inf(i8_1));
  posit_decoder #(.N(8), .ES(2)) d8_2 (.in_posit(p8_2), .sign(s8_2), .eff_exp(e8_2),
                     .mantissa(m8_2), .is_zero(z8_2), .is_inf(i8_2));
  posit_decoder #(.N(5), .ES(1)) d5_1 (.in_posit(p5), .sign(s5), .eff_exp(e5),
                     .mantissa(m5), .is_zero(z5), .is_inf(i5));
  posit_decoder #(.N(32), .ES(3)) d32_3 (.in_posit(p32_3), .sign(s32_3), .eff_exp(e32_3),
                     .mantissa(m32_3), .is_zero(z32_3), .is_inf(i32_3));

  // Compare one decoder output against the reference.
  task automatic check(int n, int es, logic [63:0] p, bit s, int eff, longint mant,
                       bit z, bit inf);
    dec_t d;
    int   fw;
    longint exp_mant;
    fw = n - 3 - es;
    d  = decode(n, es, p);
    exp_mant = (d.zero || d.inf) ? 0 : (d.frac << (fw - d.fb));
    checks++;
    if (z !== d.zero || inf !== d.inf || (!d.zero && !d.inf &&
        (s !== d.sign || eff != d.eff || mant != exp_mant))) begin
      failures++;
      if (failures < 10)
        $display("FAIL (%0d,%0d) p=%h: got s=%0d eff=%0d m=%h z=%0d i=%0d, want s=%0d eff=%0d m=%h z=%0d i=%0d",
                 n, es, p, s, eff, mant, z, inf, d.sign, d.eff, exp_mant, d.zero, d.inf);
    end
  endtask

  initial begin
    for (int v = 0; v < 65536; v++) begin
      p16_1 = 16'(v); p16_2 = 16'(v); p8_0 = 8'(v); p8_1 = 8'(v); p8_2 = 8'(v);
      p32_3 = (v < 2) ? {v[0], 31'd0} : (v < 34) ? (32'hFFFF_FFFF >> (v - 2)) : $urandom;
      #1;
      check(16, 1, 64'(p16_1), s16_1, int'(e16_1), longint'(m16_1), z16_1, i16_1);
      check(16, 2, 64'(p16_2), s16_2, int'(e16_2), longint'(m16_2), z16_2, i16_2);
      check(32, 3, 64'(p32_3), s32_3, int'(e32_3), longint'(m32_3), z32_3, i32_3);
      if (v < 256) begin
        check(8, 0, 64'(p8_0), s8_0, int'(e8_0), longint'(m8_0), z8_0, i8_0);
        check(8, 1, 64'(p8_1), s8_1, int'(e8_1), longint'(m8_1), z8_1, i8_1);
        check(8, 2, 64'(p8_2), s8_2, int'(e8_2), longint'(m8_2), z8_2, i8_2);
      end
    end
    // The (5,1) table: value = 2^eff_exp * (1 + mantissa/2).
    for (int v = 0; v < 16; v++) begin
      real got, scale;
      p5 = 5'(v);
      #1;
      scale = 1.0;
      for (int j = 0; j < int'(e5); j++) scale = scale * 2.0;
      for (int j = 0; j > int'(e5); j--) scale = scale / 2.0;
      got = z5 ? 0.0 : scale * (1.0 + real'(m5) / 2.0);
      checks++;
      if (got != table1[v] || s5) begin
        failures++;
        $display("FAIL (5,1) table row %b: got %f want %f", p5, got, table1[v]);
      end
    end
    // Directed (16,1) points: 1.0, maxpos, minpos, -1.0.
    p16_1 = 16'h4000; #1; checks++; if (e16_1 != 0 || m16_1 != 0) failures++;
    p16_1 = 16'h7FFF; #1; checks++; if (e16_1 != 28) failures++;
    p16_1 = 16'h0001; #1; checks++; if (e16_1 != -28) failures++;
    p16_1 = 16'hC000; #1; checks++; if (e16_1 != 0 || !s16_1) failures++;
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
