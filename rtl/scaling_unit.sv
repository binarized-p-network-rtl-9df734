// scaling_unit: output scaling of the last binary layer.
//
// A binary FC layer can only produce integers in [-N, N]. The BPN network
// widens that range with one learned scale lambda: P(s, a_m) = lambda * o_L,m.
// Here lambda is signed fixed point with LAMBDA_FRAC fraction bits (Q8.8 by
// default) and P keeps those fraction bits. The product is registered: a
// result appears one cycle after its input, with its action index. Number
// formats are this design's choice.
module scaling_unit
  import bpn_pkg::*;
#(
  parameter int unsigned O_W   = 8,
  parameter int unsigned AIDX_W = 5
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic [AIDX_W-1:0]      in_idx,
  input  logic signed [O_W-1:0] in_o,
  input  lambda_t               lambda,
  output logic                  out_valid,
  output logic [AIDX_W-1:0]      out_idx,
  output pref_t                 out_p
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_idx   <= '0;
      out_p     <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_idx <= in_idx;
        out_p   <= P_W'(in_o) * P_W'(lambda);
      end
    end
  end
endmodule
