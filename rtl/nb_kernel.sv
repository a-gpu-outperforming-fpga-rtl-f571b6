// nb_kernel: NormBinarize kernel, an array of N threshold comparators.
//
// Batch normalisation, the sign function and the correction from the 1/0 bit
// count to the +1/-1 sum fold into one comparison per output: the output bit
// is 1 when the sum y reaches the precomputed threshold c, else 0.  All N
// lanes belong to the same output channel and share its threshold.
//
// Interface: y[i*YW +: YW] is the signed sum of lane i, bits[i] its result.
// Timing: one clock from in_valid to out_valid.
module nb_kernel #(
  parameter int N  = 16,
  parameter int YW = 16
) (
  input  logic                 clk,
  input  logic                 in_valid,
  input  logic [N*YW-1:0]      y,
  input  logic signed [YW-1:0] c,
  output logic                 out_valid,
  output logic [N-1:0]         bits
);
  always_ff @(posedge clk) begin
    out_valid <= in_valid;
    for (int i = 0; i < N; i++) bits[i] <= ($signed(y[i*YW +: YW]) >= c);
  end
endmodule
