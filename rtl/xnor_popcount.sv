// xnor_popcount: binary dot-product kernel of a binarized layer.
//
// With +1 coded as bit 1 and -1 as bit 0, the product of a weight and an
// activation is +1 exactly where the two bits agree, so the layer's
// multiply-accumulate becomes an XNOR followed by a population count. This
// module returns that count; the caller turns it into the +-1 dot product
// as 2*count - W. Purely combinational: the synthesis tool builds the adder
// tree. The operation is the one of the BNN formulation; the structure is left
// to synthesis.
module xnor_popcount #(
  parameter int unsigned W = 16
) (
  input  logic [W-1:0]         w,      // weight bits
  input  logic [W-1:0]         x,      // activation bits
  output logic [$clog2(W+1)-1:0] count // number of positions where w == x
);
  always_comb begin
    logic [W-1:0] agree;
    agree = ~(w ^ x);
    count = '0;
    for (int i = 0; i < W; i++) count += $clog2(W+1)'(agree[i]);
  end
endmodule
