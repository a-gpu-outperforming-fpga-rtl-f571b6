// accumulator: sums successive PE outputs belonging to one output pixel.
//
// A binary convolution layer unfolds a 3x3xFD filter along its width and
// depth, so each PE delivers the count of one filter row per cycle and the
// accumulator adds the FH = 3 rows.  `first` marks the first term (the sum
// restarts), `last` the final one; y and out_valid are produced with the
// clock edge that takes in the last term.  On the FPGA this maps to a DSP48
// slice with its feedback path.
//
// Timing: one term per cycle; out_valid is high for one cycle after the edge
// that accepted a term with `last` set.  Terms are unsigned PE counts of IW
// bits, the sum is a signed YW-bit value.
module accumulator #(
  parameter int IW = 11,
  parameter int YW = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic                 first,
  input  logic                 last,
  input  logic [IW-1:0]        din,
  output logic                 out_valid,
  output logic signed [YW-1:0] y
);
  logic signed [YW-1:0] acc;
  logic signed [YW-1:0] nxt;

  assign nxt = (first ? YW'(0) : acc) + YW'(din);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      y         <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid && last;
      if (in_valid) begin
        acc <= nxt;
        if (last) y <= nxt;
      end
    end
  end
endmodule
