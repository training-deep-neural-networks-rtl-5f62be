// tb_posit_lod: exhaustive test of the leading-one detector at the widths the (16,1) and
// (8,1) decoders use (15 and 7 bits). The expected count of leading zeros is computed as
// W-1-floor(log2(x)) with $clog2, independent of the bit-scanning RTL; zero input must
// return W.
module tb_posit_lod;
  int checks = 0, failures = 0;
  logic [14:0] d15; logic [3:0] c15;
  logic [6:0]  d7;  logic [2:0] c7;

  posit_lod dut (.din(d15), .count(c15));
  posit_lod #(.W(7)) u7 (.din(d7), .count(c7));

  function automatic int ref_lz(int w, int x);
    if (x == 0) return w;
    return w - $clog2(x + 1);
  endfunction

  initial begin
    for (int v = 0; v < (1 << 15); v++) begin
      d15 = 15'(v); d7 = 7'(v);
      #1;
      checks++;
      if (int'(c15) != ref_lz(15, v)) begin
        failures++;
        if (failures < 10) $display("FAIL W=15 x=%h count=%0d want %0d", d15, c15, ref_lz(15, v));
      end
      if (v < 128) begin
        checks++;
        if (int'(c7) != ref_lz(7, v)) failures++;
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
