// norm_unit: normalisation of the output layer.
//
// The last fully-connected layer is not binarised; its class scores leave the
// accelerator as integers.  The score is the distance of the bit count y from
// the class threshold c, z = y - c, which is the quantity whose sign the
// hidden layers keep.  With per-class thresholds this shifts each class score
// by its normalisation offset; the published design names this step but does
// not give its arithmetic, so the subtraction is this design's reading.
//
// Purely combinational, N lanes with one threshold each.
module norm_unit #(
  parameter int N  = 1,
  parameter int YW = 16
) (
  input  logic [N*YW-1:0] y,
  input  logic [N*YW-1:0] c,
  output logic [N*YW-1:0] z
);
  always_comb
    for (int i = 0; i < N; i++)
      z[i*YW +: YW] = YW'($signed(y[i*YW +: YW]) - $signed(c[i*YW +: YW]));
endmodule
