// fp_pe: fixed-point processing element of the first layer.
//
// The first layer sees the real-valued image, rescaled to 6-bit signed
// integers, and 2-bit signed weights.  This PE forms the dot product of UF
// such pixels and weights (UF = 27 covers a whole 3x3x3 filter window) in one
// step.  Pixels are packed a[k*AW +: AW], weights w[k*WW +: WW].
//
// Timing: y and out_valid follow a, w and in_valid by one clock; one result
// per cycle.  The operand formats follow the published design; the flat
// multiply-and-sum structure with one output register is this design's own.
module fp_pe #(
  parameter int UF = 27,
  parameter int AW = 6,
  parameter int WW = 2,
  parameter int YW = 16
) (
  input  logic                 clk,
  input  logic                 in_valid,
  input  logic [UF*AW-1:0]     a,
  input  logic [UF*WW-1:0]     w,
  output logic                 out_valid,
  output logic signed [YW-1:0] y
);
  logic signed [YW-1:0] sum;

  always_comb begin
    sum = '0;
    for (int k = 0; k < UF; k++)
      sum = sum + YW'($signed(a[k*AW +: AW]) * $signed(w[k*WW +: WW]));
  end

  always_ff @(posedge clk) begin
    out_valid <= in_valid;
    y         <= sum;
  end
endmodule
