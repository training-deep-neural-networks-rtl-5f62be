// posit_lzd: leading-zero detector. Returns the number of ones above the most significant
// zero of `din`, i.e. the index of the leading zero counted from the MSB. In the posit
// decoder it measures a positive regime: a run of k+1 ones ended by a zero means k.
// An all-one input returns W. Purely combinational.
module posit_lzd #(
  parameter int W  = 14,
  parameter int CW = $clog2(W + 1)
) (
  input  logic [W-1:0]  din,
  output logic [CW-1:0] count
);
  always_comb begin
    logic found;
    found = 1'b0;
    count = CW'(W);
    for (int i = W - 1; i >= 0; i--) begin
      if (!found && !din[i]) begin
        count = CW'(W - 1 - i);
        found = 1'b1;
      end
    end
  end
endmodule
