// xnor_pe: binary processing element.
//
// An array of UF two-input XNOR gates compares a weight vector with a feature
// map vector bit by bit; a parallel bit count adds up the XNOR outputs.  With
// the +1 -> 1 / -1 -> 0 encoding the count is the number of agreeing
// positions, i.e. the XNOR dot product of the binary network.
//
// Interface: w and x are UF bits wide, count is $clog2(UF+1) bits.
// Timing: one result per cycle (initiation interval 1); count and out_valid
// appear one clock after w, x and in_valid.  The gate array and the adder tree
// follow the published PE; the single output register is this design's choice
// so that the PE forms one pipeline stage.
module xnor_pe #(
  parameter int UF = 384,
  parameter int CW = $clog2(UF + 1)
) (
  input  logic          clk,
  input  logic          in_valid,
  input  logic [UF-1:0] w,
  input  logic [UF-1:0] x,
  output logic          out_valid,
  output logic [CW-1:0] count
);
  logic [UF-1:0] match;
  logic [CW-1:0] sum;

  assign match = ~(w ^ x);        // UF XNOR gates

  // Parallelised bit count: a population count, which synthesis builds as
  // an adder tree over the UF XNOR outputs.
  assign sum = CW'($countones(match));

  always_ff @(posedge clk) begin
    out_valid <= in_valid;
    count     <= sum;
  end
endmodule
