// tb_posit_lzd: exhaustive test of the leading-zero detector at the widths the (16,1) and
// (8,1) decoders use (14 and 6 bits). The expected count of leading ones is computed from
// the bitwise complement as W-1-floor(log2(~x)) with $clog2, independent of the
// bit-scanning RTL; an all-ones input must return W.
module tb_posit_lzd;
  int checks = 0, failures = 0;
  logic [13:0] d14; logic [3:0] c14;
  logic [5:0]  d6;  logic [2:0] c6;

  posit_lzd dut (.din(d14), .count(c14));
  posit_lzd #(.W(6)) u6 (.din(d6), .count(c6));

  function automatic int ref_lo(int w, int x);
    int nx;
    nx = ~x & ((1 << w) - 1);
    if (nx == 0) return w;
    return w - $clog2(nx + 1);
  endfunction

  initial begin
    for (int v = 0; v < (1 << 14); v++) begin
      d14 = 14'(v); d6 = 6'(v);
      #1;
      checks++;
      if (int'(c14) != ref_lo(14, v)) begin
        failures++;
        if (failures < 10) $display("FAIL W=14 x=%h count=%0d want %0d", d14, c14, ref_lo(14, v));
      end
      if (v < 64) begin
        checks++;
        if (int'(c6) != ref_lo(6, v)) failures++;
      end
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
