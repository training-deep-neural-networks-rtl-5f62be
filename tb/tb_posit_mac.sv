// tb_posit_mac: end-to-end test of the (16,1) posit multiply-accumulate unit.
//
// The unit is instantiated with its default parameters. Each case applies posit words
// a, b, c and compares z with a reference built from exact arithmetic: a, b and c are
// expanded to a 1024-bit fixed-point value, a*b + c is formed exactly and the result is
// encoded to a posit bit by bit, rounding toward zero and clipping to maxpos / flushing
// below minpos. Stimulus mixes uniform random words, words near 1.0 (where training data
// is concentrated after scaling), cases that cancel, overflow and underflow on purpose,
// and zero / infinity operands. Every mechanism of the datapath is counted and a run in
// which one of them never happened fails: both decoder shifter paths (negative and
// positive regime), alignment with a sticky bit, carry-out, cancellation, zero bypass,
// infinity, both encoder shift paths, saturation to maxpos and flush to zero.
module tb_posit_mac;
  import posit_ref_pkg::*;

  localparam int N = 16, ES = 1;
  localparam int CASES = 300000;

  int checks = 0, failures = 0;
  int n_rneg = 0, n_rpos = 0, n_sticky = 0, n_carry = 0, n_cancel = 0, n_zero = 0,
      n_inf = 0, n_enc_p1 = 0, n_enc_p0 = 0, n_sat = 0, n_flush = 0;

  logic [N-1:0] a, b, c, z;

  posit_mac dut (.a(a), .b(b), .c(c), .z(z));

  function automatic logic [N-1:0] near_one();
    // Exponent within +-6 of 1.0: regime 110, 10, 01, 001 ...
    logic [63:0] w;
    w = encode(N, ES, 1'($urandom), int'($urandom_range(0, 12)) - 6, {$urandom, $urandom});
    return N'(w);
  endfunction

  initial begin
    for (int t = 0; t < CASES; t++) begin
      quire_t q;
      logic [N-1:0] want;
      int mode;
      mode = $urandom_range(0, 19);
      a = N'($urandom); b = N'($urandom); c = N'($urandom);
      case (mode)
        0, 1, 2, 3, 4, 5: begin a = near_one(); b = near_one(); c = near_one(); end
        6, 7: begin  // c close to -(a*b): cancellation
          a = near_one(); b = near_one();
          c = N'(encode_quire(N, ES, -((to_quire(N, ES, 64'(a)) * to_quire(N, ES, 64'(b))) >>> QF)));
          if ($urandom_range(0, 1) == 1) c = c + N'($urandom_range(0, 2)) - 1'b1;
        end
        8: begin a = 16'h7F00 | N'($urandom_range(0, 255)); b = 16'h7800 | N'($urandom_range(0, 2047)); end
        9: begin a = N'($urandom_range(1, 255)); b = N'($urandom_range(1, 2047)); c = 0; end
        10: a = 0;
        11: c = 0;
        12: b = 16'h8000;
        default: ;
      endcase
      #1;
      if (a == 16'h8000 || b == 16'h8000 || c == 16'h8000) begin
        want = 16'h8000;
      end else begin
        q = ((to_quire(N, ES, 64'(a)) * to_quire(N, ES, 64'(b))) >>> QF) + to_quire(N, ES, 64'(c));
        want = N'(encode_quire(N, ES, q));
      end
      checks++;
      if (z !== want) begin
        failures++;
        if (failures < 10) $display("FAIL a=%h b=%h c=%h: z=%h want %h", a, b, c, z, want);
      end
      // Mechanism coverage.
      if (a != 0 && a != 16'h8000) begin
        if (dut.u_dec_a.regime_neg) n_rneg++; else n_rpos++;
      end
      if (dut.inf_a || dut.inf_b || dut.inf_c) n_inf++;
      else if (dut.zero_a || dut.zero_b || dut.zero_c) n_zero++;
      else begin
        if (dut.u_fp_mac.sticky) n_sticky++;
        if (dut.u_fp_mac.lead == 5'(dut.u_fp_mac.D)) n_carry++;
        if (dut.u_fp_mac.found && dut.u_fp_mac.lead < 5'(dut.u_fp_mac.BP - 1)) n_cancel++;
      end
      if (!dut.inf_z && !dut.zero_z) begin
        if (dut.u_enc.overflow) n_sat++;
        else if (dut.u_enc.underflow) n_flush++;
        else if (dut.u_enc.or_o) n_enc_p1++;
        else n_enc_p0++;
      end
    end
    $display("coverage: regime<0=%0d regime>=0=%0d sticky=%0d carry=%0d cancel=%0d zero=%0d inf=%0d",
             n_rneg, n_rpos, n_sticky, n_carry, n_cancel, n_zero, n_inf);
    $display("          encoder shift r+1=%0d shift r=%0d saturate=%0d flush=%0d",
             n_enc_p1, n_enc_p0, n_sat, n_flush);
    if (n_rneg == 0 || n_rpos == 0 || n_sticky == 0 || n_carry == 0 || n_cancel == 0 ||
        n_zero == 0 || n_inf == 0 || n_enc_p1 == 0 || n_enc_p0 == 0 || n_sat == 0 ||
        n_flush == 0) begin
      failures++;
      $display("FAIL: a mechanism was never exercised");
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
