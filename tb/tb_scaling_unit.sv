// tb_scaling_unit: feeds a stream of random o_L values (range [-100, 100])
// with random signed Q8.8 lambdas and checks P = lambda * o_L, the action
// index, and that each result appears exactly one cycle after its input.
module tb_scaling_unit;
  import bpn_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic [4:0] in_idx = '0;
  logic signed [7:0] in_o = '0;
  lambda_t lambda = '0;
  logic out_valid;
  logic [4:0] out_idx;
  pref_t out_p;

  scaling_unit #(.O_W(8), .AIDX_W(5)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 400; t++) begin
      int o, l, v;
      o = int'($urandom % 201) - 100;
      l = int'($urandom % 65536) - 32768;
      v = int'($urandom % 4 != 0);
      in_valid = v[0]; in_idx = 5'(t % 17); in_o = 8'(o); lambda = 16'(l);
      @(negedge clk);
      checks++;
      if (out_valid != v[0]) begin failures++; $display("valid %0d expected %0d", out_valid, v); end
      if (v != 0) begin
        checks++;
        if (out_p != P_W'(o * l) || out_idx != 5'(t % 17)) begin
          failures++;
          $display("o=%0d lambda=%0d: P=%0d idx=%0d, expected %0d", o, l, out_p, out_idx, o * l);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
