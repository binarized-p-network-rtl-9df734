// tb_param_loader: writes every threshold register and lambda through the
// host address map and checks the stored signed values; checks that image and
// weight writes raise exactly the right strobe with index, lane and data
// passed through, and that no strobe rises without a write.
module tb_param_loader;
  import bpn_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  logic host_we = 1'b0;
  logic [HOST_AW-1:0] host_addr = '0;
  logic [31:0] host_wdata = '0;
  logic img_we;
  logic [4:0] w_we;
  logic [IDX_W-1:0] wr_idx;
  logic [LANE_W-1:0] wr_lane;
  logic [31:0] wr_data;
  tau_t tau1 [C1], tau2 [C2], tau3 [C3], tau4 [N_HID];
  lambda_t lambda;
  int e1 [C1], e2 [C2], e3 [C3], e4 [N_HID];

  param_loader dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic hw(region_e r, int idx, int lane, logic [31:0] d);
    host_we = 1'b1; host_addr = host_address(r, idx, lane); host_wdata = d;
    @(negedge clk);
    host_we = 1'b0;
  endtask

  function automatic int rv();
    return int'($urandom % 200001) - 100000;
  endfunction

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    foreach (e1[i]) begin e1[i] = rv(); hw(RGN_TAU1, i, 0, 32'(e1[i])); end
    foreach (e2[i]) begin e2[i] = rv(); hw(RGN_TAU2, i, 0, 32'(e2[i])); end
    foreach (e3[i]) begin e3[i] = rv(); hw(RGN_TAU3, i, 0, 32'(e3[i])); end
    foreach (e4[i]) begin e4[i] = rv(); hw(RGN_TAU4, i, 0, 32'(e4[i])); end
    hw(RGN_LAMBDA, 0, 0, 32'(-300));
    foreach (e1[i]) begin checks++; if (int'(tau1[i]) != e1[i]) begin failures++; $display("tau1[%0d]=%0d exp %0d", i, tau1[i], e1[i]); end end
    foreach (e2[i]) begin checks++; if (int'(tau2[i]) != e2[i]) begin failures++; $display("tau2[%0d]=%0d exp %0d", i, tau2[i], e2[i]); end end
    foreach (e3[i]) begin checks++; if (int'(tau3[i]) != e3[i]) begin failures++; $display("tau3[%0d]=%0d exp %0d", i, tau3[i], e3[i]); end end
    foreach (e4[i]) begin checks++; if (int'(tau4[i]) != e4[i]) begin failures++; $display("tau4[%0d]=%0d exp %0d", i, tau4[i], e4[i]); end end
    checks++; if (int'(lambda) != -300) begin failures++; $display("lambda=%0d", lambda); end
    // RAM strobes
    for (int r = 0; r <= 5; r++) begin
      int idx, lane;
      logic [31:0] d;
      idx = int'($urandom % 5000); lane = int'($urandom % 8); d = $urandom;
      host_we = 1'b1; host_addr = host_address(region_e'(r), idx, lane); host_wdata = d;
      #1;
      checks++;
      if (img_we != (r == 0) || w_we != ((r == 0) ? 5'd0 : 5'(1 << (r - 1))) ||
          int'(wr_idx) != idx || int'(wr_lane) != lane || wr_data != d) begin
        failures++;
        $display("region %0d: img_we %0d w_we %b idx %0d lane %0d", r, img_we, w_we, wr_idx, wr_lane);
      end
      @(negedge clk);
      host_we = 1'b0;
      #1;
      checks++;
      if (img_we || w_we != 0) begin failures++; $display("strobe without write"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
