// threshold_act: threshold activation of one neuron or channel.
//
// Batch normalization followed by Sign() collapses into a single comparison
// against a per-neuron threshold tau, so the binary activation is
// x = +1 (bit 1) when o >= tau and x = -1 (bit 0) otherwise, as in the BPN
// network. o and tau are signed integers of the same width; the width is this
// design's choice. Combinational.
module threshold_act #(
  parameter int unsigned ACC_W = 18
) (
  input  logic signed [ACC_W-1:0] o,    // layer output before activation
  input  logic signed [ACC_W-1:0] tau,  // learned threshold
  output logic                    x     // 1 = +1, 0 = -1
);
  assign x = (o >= tau);
endmodule
