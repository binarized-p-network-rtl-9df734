// tb_bfc_layer: runs the binary FC engine with 64 inputs in 16-bit slices
// and 10 outputs, and with 100 inputs in one slice and 17 outputs (the output
// layer's shape). Inputs and weights are random; memories are modelled here
// with one cycle of read latency. Every emitted o is compared with a +-1 dot
// product computed here, the neuron indices must come in order 0..N_OUT-1, and
// start-to-done must take N_OUT*NCH + 2 cycles.
module tb_bfc_layer;
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

  // ---- 64 -> 10, slices of 16 ------------------------------------------------------
  localparam int NI_A = 64, NO_A = 10, CH_A = 16, NC_A = NI_A / CH_A;
  logic start_a = 1'b0, busy_a, done_a, ov_a;
  logic [1:0] ia_a;
  logic [CH_A-1:0] id_a, wd_a;
  logic [$clog2(NO_A*NC_A)-1:0] wa_a;
  logic [3:0] oi_a;
  logic signed [7:0] o_a;
  logic [CH_A-1:0] xin_a [NC_A];
  logic [CH_A-1:0] wm_a [NO_A*NC_A];

  bfc_layer #(.N_IN(NI_A), .N_OUT(NO_A), .CHUNK(CH_A)) dut_a (
    .clk, .rst_n, .start(start_a), .busy(busy_a), .done(done_a),
    .in_addr(ia_a), .in_data(id_a), .w_addr(wa_a), .w_data(wd_a),
    .o_valid(ov_a), .o_idx(oi_a), .o_val(o_a));

  always_ff @(posedge clk) begin
    id_a <= xin_a[ia_a];
    wd_a <= wm_a[wa_a];
  end

  // ---- 100 -> 17, one slice --------------------------------------------------------
  localparam int NI_B = 100, NO_B = 17;
  logic start_b = 1'b0, busy_b, done_b, ov_b;
  logic ia_b;
  logic [NI_B-1:0] id_b, wd_b;
  logic [4:0] wa_b, oi_b;
  logic signed [7:0] o_b;
  logic [NI_B-1:0] xin_b;
  logic [NI_B-1:0] wm_b [NO_B];

  bfc_layer #(.N_IN(NI_B), .N_OUT(NO_B), .CHUNK(NI_B)) dut_b (
    .clk, .rst_n, .start(start_b), .busy(busy_b), .done(done_b),
    .in_addr(ia_b), .in_data(id_b), .w_addr(wa_b), .w_data(wd_b),
    .o_valid(ov_b), .o_idx(oi_b), .o_val(o_b));

  always_ff @(posedge clk) begin
    id_b <= xin_b;
    wd_b <= wm_b[wa_b];
  end

  int exp_a [NO_A], exp_b [NO_B];
  int next_a = 0, next_b = 0;

  always @(posedge clk) begin
    if (ov_a) begin
      checks++;
      if (int'(oi_a) != next_a || int'(o_a) != exp_a[next_a % NO_A]) begin
        failures++; $display("A neuron %0d (expected index %0d): o=%0d expected %0d", oi_a, next_a, o_a, exp_a[next_a % NO_A]);
      end
      next_a++;
    end
    if (ov_b) begin
      checks++;
      if (int'(oi_b) != next_b || int'(o_b) != exp_b[next_b % NO_B]) begin
        failures++; $display("B neuron %0d (expected index %0d): o=%0d expected %0d", oi_b, next_b, o_b, exp_b[next_b % NO_B]);
      end
      next_b++;
    end
  end

  initial begin
    longint t0, t1;
    int v_noa = NO_A, v_nob = NO_B, v_nia = NI_A, v_nib = NI_B;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    foreach (xin_a[i]) xin_a[i] = CH_A'($urandom);
    foreach (wm_a[i]) wm_a[i] = CH_A'($urandom);
    xin_b = {$urandom, $urandom, $urandom, $urandom};
    foreach (wm_b[i]) wm_b[i] = {$urandom, $urandom, $urandom, $urandom};
    wm_b[3] = xin_b;    // o = +100
    wm_b[4] = ~xin_b;   // o = -100
    for (int n = 0; n < v_noa; n++) begin
      exp_a[n] = 0;
      for (int i = 0; i < v_nia; i++)
        exp_a[n] += (wm_a[n*NC_A + i/CH_A][i%CH_A] == xin_a[i/CH_A][i%CH_A]) ? 1 : -1;
    end
    for (int n = 0; n < v_nob; n++) begin
      exp_b[n] = 0;
      for (int i = 0; i < v_nib; i++) exp_b[n] += (wm_b[n][i] == xin_b[i]) ? 1 : -1;
    end
    @(negedge clk); start_a = 1'b1; @(posedge clk); t0 = $time; @(negedge clk); start_a = 1'b0;
    while (!done_a) @(posedge clk);
    t1 = $time;
    checks++;
    if ((t1 - t0) / 10 != NO_A*NC_A + 2 || next_a != NO_A) begin
      failures++; $display("A: latency %0d, %0d outputs", (t1 - t0) / 10, next_a);
    end
    @(negedge clk); start_b = 1'b1; @(posedge clk); t0 = $time; @(negedge clk); start_b = 1'b0;
    while (!done_b) @(posedge clk);
    t1 = $time;
    checks++;
    if ((t1 - t0) / 10 != NO_B + 2 || next_b != NO_B) begin
      failures++; $display("B: latency %0d, %0d outputs", (t1 - t0) / 10, next_b);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
