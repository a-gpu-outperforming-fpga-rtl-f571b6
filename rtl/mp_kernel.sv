// mp_kernel: row buffer and 2x2 max-pooling kernel.
//
// A convolution layer with pooling produces one output row (P accumulated
// sums of one output channel) per step.  Rows arrive in pairs: the even row
// is kept in a buffer, and when the odd row arrives each pooling unit takes
// the maximum of a 2x2 window (columns 2j and 2j+1 of both rows), stride 2.
// Pooling is done on the integer sums, ahead of the threshold comparison,
// which gives the same bits as pooling after it because the comparison is
// monotonic.
//
// Interface: din carries P signed YW-bit sums, din[j*YW +: YW] = column j;
// dout carries P/2 pooled values.  Timing: out_valid and dout follow the odd
// row by one clock; an even row produces no output.  The buffer in front of
// the pooling units follows the published kernel; holding it in registers
// rather than block RAM is this design's choice.
module mp_kernel #(
  parameter int P  = 32,
  parameter int YW = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic              odd_row,
  input  logic [P*YW-1:0]   din,
  output logic              out_valid,
  output logic [P/2*YW-1:0] dout
);
  logic [P*YW-1:0]   rowbuf;
  logic [P/2*YW-1:0] pooled;

  function automatic logic signed [YW-1:0] max2(logic signed [YW-1:0] a,
                                                logic signed [YW-1:0] b);
    return (a > b) ? a : b;
  endfunction

  always_comb begin
    for (int j = 0; j < P/2; j++)
      pooled[j*YW +: YW] = max2(max2($signed(rowbuf[(2*j)*YW +: YW]), $signed(rowbuf[(2*j+1)*YW +: YW])),
                                max2($signed(din[(2*j)*YW +: YW]),    $signed(din[(2*j+1)*YW +: YW])));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      rowbuf    <= '0;
      dout      <= '0;
    end else begin
      out_valid <= in_valid && odd_row;
      if (in_valid && !odd_row) rowbuf <= din;
      if (in_valid && odd_row)  dout   <= pooled;
    end
  end
endmodule
