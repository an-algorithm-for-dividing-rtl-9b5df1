// hadamard2: the 2x2 Hadamard butterfly H2 = [[1,1],[1,-1]].
//
// It is the rectangle of the algorithm's data flow diagrams: from inputs a and b it forms
// a+b and a-b. It is purely combinational, one adder and one subtractor. The output is
// one bit wider than the inputs so that neither result can overflow. All the butterflies
// of the divider (W(0), W(1) and their tilde forms) are built from this module.
module hadamard2 #(
  parameter int unsigned W = 16   // input width; outputs are W+1 bits
) (
  input  logic signed [W-1:0] a,
  input  logic signed [W-1:0] b,
  output logic signed [W:0]   sum,   // a + b
  output logic signed [W:0]   diff   // a - b
);
  always_comb begin
    sum  = (W+1)'(a) + (W+1)'(b);
    diff = (W+1)'(a) - (W+1)'(b);
  end
endmodule
