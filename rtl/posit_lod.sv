// posit_lod: leading-one detector. Returns the number of zeros above the most significant
// one of `din`, i.e. the index of the leading one counted from the MSB. In the posit
// decoder it measures a negative regime: a run of r zeros ended by a one means k = -r.
// An all-zero input returns W. Purely combinational.
module posit_lod #(
  parameter int W  = 15,
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
      if (!found && din[i]) begin
        count = CW'(W - 1 - i);
        found = 1'b1;
      end
    end
  end
endmodule
