// tb_fp_mac: self-checking test of the fused floating-point multiply-add.
//
// The block runs at its default widths, which are those of the (16,1) posit MAC: 6-bit
// operand exponents, 12-bit fractions, 9-bit result exponent. Operands are random, with a
// third of the cases steering c close to -(a*b) so that the sum cancels, and a share of
// zero and infinite operands. The exact value of a*b + c is formed in a 1024-bit fixed-point
// accumulator; the block must return its sign, exponent and the first 12 fraction bits,
// truncated. Coverage counters make sure alignment with a sticky bit, carry-out,
// cancellation, an exact zero sum and the zero / infinity bypasses all occur.
module tb_fp_mac;
  import posit_ref_pkg::*;

  localparam int EW = 6, FW = 12;

  int checks = 0, failures = 0;
  int n_sticky = 0, n_carry = 0, n_cancel = 0, n_exact0 = 0, n_zero_in = 0, n_inf = 0;

  logic s_a, s_b, s_c, z_a, z_b, z_c, i_a, i_b, i_c;
  logic signed [EW-1:0] e_a, e_b, e_c;
  logic [FW-1:0] f_a, f_b, f_c;
  logic s_z, zero_z, inf_z;
  logic signed [8:0] e_z;
  logic [FW-1:0] f_z;

  fp_mac dut (.s_a(s_a), .s_b(s_b), .s_c(s_c), .exp_a(e_a), .exp_b(e_b), .exp_c(e_c),
              .f_a(f_a), .f_b(f_b), .f_c(f_c), .zero_a(z_a), .zero_b(z_b), .zero_c(z_c),
              .inf_a(i_a), .inf_b(i_b), .inf_c(i_c),
              .s_z(s_z), .exp_z(e_z), .f_z(f_z), .zero_z(zero_z), .inf_z(inf_z));

  function automatic quire_t val(bit s, int e, longint f, bit z);
    quire_t q;
    if (z) return '0;
    q = quire_t'((longint'(1) << FW) | f) <<< (e - FW + QF);
    return s ? -q : q;
  endfunction

  initial begin
    for (int t = 0; t < 200000; t++) begin
      quire_t qa, qb, qc, q;
      bit ws;
      int we;
      longint wf;
      int mode;
      mode = $urandom_range(0, 29);
      s_a = 1'($urandom); s_b = 1'($urandom); s_c = 1'($urandom);
      e_a = 6'($urandom_range(0, 58) - 29); e_b = 6'($urandom_range(0, 58) - 29);
      e_c = 6'($urandom_range(0, 58) - 29);
      f_a = 12'($urandom); f_b = 12'($urandom); f_c = 12'($urandom);
      {z_a, z_b, z_c, i_a, i_b, i_c} = '0;
      if (mode < 10) begin
        // Steer c towards -(a*b): close exponent, opposite sign.
        s_c = ~(s_a ^ s_b);
        e_c = 6'(int'(e_a) + int'(e_b) + int'($urandom_range(0, 2)) - 1);
        if (int'(e_a) + int'(e_b) > 30 || int'(e_a) + int'(e_b) < -31) e_c = e_a;
        if (mode < 2) f_c = 12'(((longint'(4096) + f_a) * (4096 + f_b)) >> 12);
        if (mode == 0) begin f_b = 0; f_c = f_a; e_c = 6'(int'(e_a) + int'(e_b));
          if (int'(e_a) + int'(e_b) > 31 || int'(e_a) + int'(e_b) < -32) e_c = e_a; end
      end else if (mode == 10) begin
        z_a = 1'b1; f_a = 0; e_a = 0;
      end else if (mode == 11) begin
        z_c = 1'b1; f_c = 0; e_c = 0;
      end else if (mode == 12) begin
        z_b = 1'b1; z_c = 1'b1; f_b = 0; f_c = 0; e_b = 0; e_c = 0;
      end else if (mode == 13) begin
        i_b = 1'b1; f_b = 0; e_b = 0;
      end
      #1;
      qa = val(s_a, int'(e_a), longint'(f_a), z_a);
      qb = val(s_b, int'(e_b), longint'(f_b), z_b);
      qc = val(s_c, int'(e_c), longint'(f_c), z_c);
      q  = ((qa * qb) >>> QF) + qc;
      checks++;
      if (i_a || i_b || i_c) begin
        n_inf++;
        if (!inf_z) failures++;
      end else if (q == 0) begin
        if (!z_c) n_exact0++;
        if (!zero_z || inf_z) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d: want zero", t);
        end
      end else begin
        split_quire(q, FW, ws, we, wf);
        if (z_a || z_b || z_c) n_zero_in++;
        if (!(z_a || z_b || z_c)) begin
          if (dut.sticky) n_sticky++;
          if (dut.lead == 5'(2 * FW + 3 + 2)) n_carry++;
          if (we < int'(e_a) + int'(e_b) - 2 && we < int'(e_c) - 2) n_cancel++;
        end
        if (zero_z || inf_z || s_z !== ws || int'(e_z) != we || longint'(f_z) != wf) begin
          failures++;
          if (failures < 10)
            $display("FAIL t=%0d a=%0d/%0d/%h b=%0d/%0d/%h c=%0d/%0d/%h: got %0d/%0d/%h want %0d/%0d/%h",
                     t, s_a, e_a, f_a, s_b, e_b, f_b, s_c, e_c, f_c, s_z, e_z, f_z, ws, we, wf);
        end
      end
    end
    $display("coverage: sticky=%0d carry=%0d cancel=%0d exact0=%0d zero_in=%0d inf=%0d",
             n_sticky, n_carry, n_cancel, n_exact0, n_zero_in, n_inf);
    if (n_sticky == 0 || n_carry == 0 || n_cancel == 0 || n_exact0 == 0 || n_zero_in == 0 ||
        n_inf == 0) begin
      failures++;
      $display("FAIL coverage");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
