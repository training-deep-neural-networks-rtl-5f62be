// tb_posit_mac_formats: the posit MAC in the three other formats used for training.
//
// Besides the default (16,1), the training recipe uses (16,2) for the backward pass, and
// (8,1) / (8,2) for the convolution layers of the small-image network. This bench runs
// the same end-to-end random check on all three side by side (one posit_mac_checker
// each) and requires every format to hit both maxpos saturation and flush to zero.
module tb_posit_mac_formats;
  int c81, f81, s81, z81, c82, f82, s82, z82, c162, f162, s162, z162;
  logic d81, d82, d162;
  int checks, failures;

  posit_mac_checker #(.N(8),  .ES(1), .CASES(100000)) u81  (c81,  f81,  s81,  z81,  d81);
  posit_mac_checker #(.N(8),  .ES(2), .CASES(100000)) u82  (c82,  f82,  s82,  z82,  d82);
  posit_mac_checker #(.N(16), .ES(2), .CASES(100000)) u162 (c162, f162, s162, z162, d162);

  initial begin
    wait (d81 === 1'b1 && d82 === 1'b1 && d162 === 1'b1);
    checks   = c81 + c82 + c162;
    failures = f81 + f82 + f162;
    $display("(8,1): checks=%0d failures=%0d saturate=%0d flush=%0d", c81, f81, s81, z81);
    $display("(8,2): checks=%0d failures=%0d saturate=%0d flush=%0d", c82, f82, s82, z82);
    $display("(16,2): checks=%0d failures=%0d saturate=%0d flush=%0d", c162, f162, s162, z162);
    if (s81 == 0 || z81 == 0 || s82 == 0 || z82 == 0 || s162 == 0 || z162 == 0) begin
      failures++;
      $display("FAIL: saturation or flush never happened in some format");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10_000_000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c81 + c82 + c162, f81 + f82 + f162 + 1);
    $finish;
  end
endmodule
