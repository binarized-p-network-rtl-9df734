// tb_bconv_layer: runs the binary convolution engine with layer 2's shape
// (8 input channels, 20x20 input, 4x4 kernel, stride 2, 16 output channels:
// 9x9 outputs) and once with layer 3's shape (16 channels, 9x9, 3x3,
// stride 1: 7x7). Inputs, weights and thresholds are random; memories are
// modelled here with one cycle of read latency. Each output word is compared
// with a +-1 dot product computed here, each address must be written once,
// and start-to-done must take K*K*H_OUT*H_OUT + 2 cycles.
module tb_bconv_layer;
  import bpn_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- layer-2 shaped instance --------------------------------------------------
  localparam int CI_A = 8, CO_A = 16, K_A = 4, S_A = 2, HI_A = 20, HO_A = 9;
  logic start_a = 1'b0, busy_a, done_a;
  logic [$clog2(HI_A*HI_A)-1:0] in_addr_a;
  logic [CI_A-1:0] in_data_a;
  logic [$clog2(K_A*K_A)-1:0] w_addr_a;
  logic [CO_A*CI_A-1:0] w_data_a;
  tau_t tau_a [CO_A];
  logic out_we_a;
  logic [$clog2(HO_A*HO_A)-1:0] out_addr_a;
  logic [CO_A-1:0] out_data_a;
  logic [CI_A-1:0] fin_a [HI_A*HI_A];
  logic [CO_A*CI_A-1:0] wm_a [K_A*K_A];
  logic [CO_A-1:0] got_a [HO_A*HO_A];
  int wr_a [HO_A*HO_A];

  bconv_layer #(.CIN(CI_A), .COUT(CO_A), .K(K_A), .S(S_A), .H_IN(HI_A)) dut_a (
    .clk, .rst_n, .start(start_a), .busy(busy_a), .done(done_a),
    .in_addr(in_addr_a), .in_data(in_data_a), .w_addr(w_addr_a), .w_data(w_data_a), .tau(tau_a),
    .out_we(out_we_a), .out_addr(out_addr_a), .out_data(out_data_a));

  always_ff @(posedge clk) begin
    in_data_a <= fin_a[in_addr_a];
    w_data_a  <= wm_a[w_addr_a];
    if (out_we_a) begin got_a[out_addr_a] <= out_data_a; wr_a[out_addr_a] <= wr_a[out_addr_a] + 1; end
  end

  // ---- layer-3 shaped instance --------------------------------------------------
  localparam int CI_B = 16, CO_B = 16, K_B = 3, S_B = 1, HI_B = 9, HO_B = 7;
  logic start_b = 1'b0, busy_b, done_b;
  logic [$clog2(HI_B*HI_B)-1:0] in_addr_b;
  logic [CI_B-1:0] in_data_b;
  logic [$clog2(K_B*K_B)-1:0] w_addr_b;
  logic [CO_B*CI_B-1:0] w_data_b;
  tau_t tau_b [CO_B];
  logic out_we_b;
  logic [$clog2(HO_B*HO_B)-1:0] out_addr_b;
  logic [CO_B-1:0] out_data_b;
  logic [CI_B-1:0] fin_b [HI_B*HI_B];
  logic [CO_B*CI_B-1:0] wm_b [K_B*K_B];
  logic [CO_B-1:0] got_b [HO_B*HO_B];
  int wr_b [HO_B*HO_B];

  bconv_layer #(.CIN(CI_B), .COUT(CO_B), .K(K_B), .S(S_B), .H_IN(HI_B)) dut_b (
    .clk, .rst_n, .start(start_b), .busy(busy_b), .done(done_b),
    .in_addr(in_addr_b), .in_data(in_data_b), .w_addr(w_addr_b), .w_data(w_data_b), .tau(tau_b),
    .out_we(out_we_b), .out_addr(out_addr_b), .out_data(out_data_b));

  always_ff @(posedge clk) begin
    in_data_b <= fin_b[in_addr_b];
    w_data_b  <= wm_b[w_addr_b];
    if (out_we_b) begin got_b[out_addr_b] <= out_data_b; wr_b[out_addr_b] <= wr_b[out_addr_b] + 1; end
  end

  // reference: +-1 dot product of one output channel at one output pixel
  function automatic int dot(int cin, int k, int s, int hin, int oy, int ox, int co,
                             logic [255:0] w [], logic [15:0] f []);
    int o;
    o = 0;
    for (int ky = 0; ky < k; ky++)
      for (int kx = 0; kx < k; kx++)
        for (int ci = 0; ci < cin; ci++) begin
          bit wb, xb;
          wb = w[ky*k + kx][co*cin + ci];
          xb = f[(oy*s + ky)*hin + ox*s + kx][ci];
          o += (wb == xb) ? 1 : -1;
        end
    return o;
  endfunction

  logic [255:0] wd [];
  logic [15:0]  fd [];

  initial begin
    longint t0, t1;
    int v_ho_a = HO_A, v_ho_b = HO_B, v_co = 16;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // layer-2 shape
    foreach (fin_a[i]) fin_a[i] = CI_A'($urandom);
    foreach (wm_a[i]) wm_a[i] = {$urandom, $urandom, $urandom, $urandom};
    foreach (tau_a[i]) tau_a[i] = TAU_W'(int'($urandom % 17) - 8);
    foreach (wr_a[i]) wr_a[i] = 0;
    @(negedge clk); start_a = 1'b1; @(posedge clk); t0 = $time; @(negedge clk); start_a = 1'b0;
    while (!done_a) @(posedge clk);
    t1 = $time;
    checks++;
    if ((t1 - t0) / 10 != K_A*K_A*HO_A*HO_A + 2) begin
      failures++; $display("A: latency %0d", (t1 - t0) / 10);
    end
    @(negedge clk);
    wd = new[K_A*K_A]; fd = new[HI_A*HI_A];
    foreach (wm_a[i]) wd[i] = 256'(wm_a[i]);
    foreach (fin_a[i]) fd[i] = 16'(fin_a[i]);
    for (int oy = 0; oy < v_ho_a; oy++)
      for (int ox = 0; ox < v_ho_a; ox++) begin
        logic [15:0] e;
        for (int co = 0; co < v_co; co++)
          e[co] = dot(CI_A, K_A, S_A, HI_A, oy, ox, co, wd, fd) >= int'(tau_a[co]);
        checks++;
        if (got_a[oy*HO_A + ox] !== e || wr_a[oy*HO_A + ox] != 1) begin
          failures++; $display("A (%0d,%0d): got %h expected %h", oy, ox, got_a[oy*HO_A + ox], e);
        end
      end
    // layer-3 shape
    foreach (fin_b[i]) fin_b[i] = CI_B'($urandom);
    foreach (wm_b[i]) wm_b[i] = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    foreach (tau_b[i]) tau_b[i] = TAU_W'(int'($urandom % 17) - 8);
    foreach (wr_b[i]) wr_b[i] = 0;
    @(negedge clk); start_b = 1'b1; @(posedge clk); t0 = $time; @(negedge clk); start_b = 1'b0;
    while (!done_b) @(posedge clk);
    t1 = $time;
    checks++;
    if ((t1 - t0) / 10 != K_B*K_B*HO_B*HO_B + 2) begin
      failures++; $display("B: latency %0d", (t1 - t0) / 10);
    end
    @(negedge clk);
    wd = new[K_B*K_B]; fd = new[HI_B*HI_B];
    foreach (wm_b[i]) wd[i] = wm_b[i];
    foreach (fin_b[i]) fd[i] = fin_b[i];
    for (int oy = 0; oy < v_ho_b; oy++)
      for (int ox = 0; ox < v_ho_b; ox++) begin
        logic [15:0] e;
        for (int co = 0; co < v_co; co++)
          e[co] = dot(CI_B, K_B, S_B, HI_B, oy, ox, co, wd, fd) >= int'(tau_b[co]);
        checks++;
        if (got_b[oy*HO_B + ox] !== e || wr_b[oy*HO_B + ox] != 1) begin
          failures++; $display("B (%0d,%0d): got %h expected %h", oy, ox, got_b[oy*HO_B + ox], e);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
