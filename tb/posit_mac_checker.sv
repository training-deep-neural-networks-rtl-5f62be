// posit_mac_checker: random self-check of one posit_mac instance of a given format.
//
// Used by tb_posit_mac_formats to run the same end-to-end check on several (N,ES)
// formats side by side. Each case draws a, b, c either uniformly or near 1.0, or forces a
// cancelling c, an overflow, an underflow or a zero / infinity operand, and compares z
// with the exact-arithmetic reference encoder (round toward zero). It counts saturation
// and flush-to-zero results and raises `done` after CASES cases.
module posit_mac_checker #(
  parameter int N     = 8,
  parameter int ES    = 1,
  parameter int CASES = 1000
) (
  output int   checks,
  output int   failures,
  output int   n_sat,
  output int   n_flush,
  output logic done
);
  import posit_ref_pkg::*;

  localparam logic [N-1:0] NAR    = {1'b1, {(N-1){1'b0}}};
  localparam logic [N-1:0] MAXPOS = {1'b0, {(N-1){1'b1}}};

  logic [N-1:0] a, b, c, z;

  posit_mac #(.N(N), .ES(ES)) dut (.a(a), .b(b), .c(c), .z(z));

  function automatic logic [N-1:0] near_one();
    return N'(encode(N, ES, 1'($urandom), int'($urandom_range(0, 8)) - 4, {$urandom, $urandom}));
  endfunction

  initial begin
    checks = 0; failures = 0; n_sat = 0; n_flush = 0; done = 1'b0;
    for (int t = 0; t < CASES; t++) begin
      quire_t q, qa, qb;
      logic [N-1:0] want;
      int mode;
      mode = $urandom_range(0, 15);
      a = N'($urandom); b = N'($urandom); c = N'($urandom);
      case (mode)
        0, 1, 2, 3, 4: begin a = near_one(); b = near_one(); c = near_one(); end
        5, 6: begin
          a = near_one(); b = near_one();
          c = N'(encode_quire(N, ES, -((to_quire(N, ES, 64'(a)) * to_quire(N, ES, 64'(b))) >>> QF)));
        end
        7: begin a = MAXPOS - N'($urandom_range(0, 3)); b = MAXPOS - N'($urandom_range(0, 3)); end
        8: begin a = N'($urandom_range(1, 3)); b = N'($urandom_range(1, 3)); c = 0; end
        9: a = 0;
        10: c = NAR;
        default: ;
      endcase
      #1;
      if (a == NAR || b == NAR || c == NAR) begin
        want = NAR;
      end else begin
        qa = to_quire(N, ES, 64'(a));
        qb = to_quire(N, ES, 64'(b));
        q  = ((qa * qb) >>> QF) + to_quire(N, ES, 64'(c));
        want = N'(encode_quire(N, ES, q));
        if (q != 0 && want == 0) n_flush++;
        if (want == MAXPOS || want == -MAXPOS) n_sat++;
      end
      checks++;
      if (z !== want) begin
        failures++;
        if (failures < 5)
          $display("FAIL (%0d,%0d) a=%h b=%h c=%h: z=%h want %h", N, ES, a, b, c, z, want);
      end
    end
    done = 1'b1;
  end
endmodule
