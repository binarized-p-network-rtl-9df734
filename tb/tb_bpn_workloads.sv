// tb_bpn_workloads: runs the smaller network configurations of the
// simulation studies on the accelerator at its default size, without changing
// the hardware:
//   reaching: one grayscale 84x84 frame, 14 actions, N = 30 and N = 10;
//   simulated tracking: two RGB frames, 7 actions, N = 50.
// Unused input channels are loaded with zero pixels; unused hidden neurons get
// tau = -784 (output always +1) and are paired with opposite output-layer
// weights so that their contributions cancel. The expected preferences come
// from a behavioural model of the *reduced* network alone (only the used
// channels, neurons and actions), so the test shows that the padded
// configuration computes exactly the smaller network.
module tb_bpn_workloads;
  import bpn_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic host_we = 1'b0;
  logic [HOST_AW-1:0] host_addr = '0;
  logic [31:0] host_wdata = '0;
  logic start = 1'b0, busy, done;
  pref_t p_out [N_ACT];

  bpn_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // watchdog
  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- model data ---------------------------------------------------------
  byte unsigned img [IMG_C][IMG_H][IMG_H];
  bit  w1 [C1][IMG_C][K1][K1];
  bit  w2 [C2][C1][K2][K2];
  bit  w3 [C3][C2][K3][K3];
  bit  w4 [N_HID][N_FLAT];
  bit  w5 [N_ACT][N_HID];
  int  t1 [C1], t2 [C2], t3 [C3], t4 [N_HID];
  int  lam;
  int  n_ch = IMG_C, n_hid = N_HID, n_act = N_ACT;   // size of the configuration run
  bit  x1 [C1][H1][H1];
  bit  x2 [C2][H2][H2];
  bit  x3 [C3][H3][H3];
  bit  x4 [N_HID];
  int  o5 [N_ACT];
  longint pref [N_ACT];

  // mechanism counters
  int th_pos [4], th_neg [4];
  int p_negative = 0, p_positive = 0, reloads = 0, ignored_starts = 0;

  function automatic int pm(bit b); return b ? 1 : -1; endfunction

  function automatic int rnd(int lo, int hi);
    return lo + int'($urandom % (hi - lo + 1));
  endfunction

  task automatic randomize_all(int bias);
    foreach (img[c, y, x]) img[c][y][x] = byte'($urandom);
    foreach (w1[a, b, c, d]) w1[a][b][c][d] = 1'($urandom);
    foreach (w2[a, b, c, d]) w2[a][b][c][d] = 1'($urandom);
    foreach (w3[a, b, c, d]) w3[a][b][c][d] = 1'($urandom);
    foreach (w4[a, b]) w4[a][b] = 1'($urandom);
    foreach (w5[a, b]) w5[a][b] = 1'($urandom);
    foreach (t1[i]) t1[i] = rnd(-1500, 1500);
    foreach (t2[i]) t2[i] = rnd(-8, 8);
    foreach (t3[i]) t3[i] = rnd(-8, 8);
    foreach (t4[i]) t4[i] = rnd(-16, 16);
    lam = rnd(64, 700) + bias;   // Q8.8: 0.25 .. 2.7
    // padding of the unused parts of the default-size network
    foreach (img[c, y, x]) if (c >= n_ch) img[c][y][x] = 0;
    for (int n = n_hid; n < N_HID; n++) t4[n] = -N_FLAT;
    for (int a = 0; a < N_ACT; a++)
      for (int n = n_hid; n < N_HID; n += 2) w5[a][n+1] = !w5[a][n];
  endtask

  // loop bounds held in variables so the simulator compiler keeps the
  // reference loops as loops
  int v_IMG_C = IMG_C;
  int v_C1 = C1;
  int v_C2 = C2;
  int v_C3 = C3;
  int v_H1 = H1;
  int v_H2 = H2;
  int v_H3 = H3;
  int v_K1 = K1;
  int v_K2 = K2;
  int v_K3 = K3;
  int v_N_HID = N_HID;
  int v_N_ACT = N_ACT;

  // behavioural model of the network
  task automatic model();
    for (int c = 0; c < v_C1; c++)
      for (int y = 0; y < v_H1; y++)
        for (int x = 0; x < v_H1; x++) begin
          int o = 0;
          for (int ci = 0; ci < n_ch; ci++)
            for (int ky = 0; ky < v_K1; ky++)
              for (int kx = 0; kx < v_K1; kx++)
                o += pm(w1[c][ci][ky][kx]) * int'(img[ci][y*S1+ky][x*S1+kx]);
          x1[c][y][x] = (o >= t1[c]);
          if (x1[c][y][x]) th_pos[0]++; else th_neg[0]++;
        end
    for (int c = 0; c < v_C2; c++)
      for (int y = 0; y < v_H2; y++)
        for (int x = 0; x < v_H2; x++) begin
          int o = 0;
          for (int ci = 0; ci < v_C1; ci++)
            for (int ky = 0; ky < v_K2; ky++)
              for (int kx = 0; kx < v_K2; kx++)
                o += pm(w2[c][ci][ky][kx]) * pm(x1[ci][y*S2+ky][x*S2+kx]);
          x2[c][y][x] = (o >= t2[c]);
          if (x2[c][y][x]) th_pos[1]++; else th_neg[1]++;
        end
    for (int c = 0; c < v_C3; c++)
      for (int y = 0; y < v_H3; y++)
        for (int x = 0; x < v_H3; x++) begin
          int o = 0;
          for (int ci = 0; ci < v_C2; ci++)
            for (int ky = 0; ky < v_K3; ky++)
              for (int kx = 0; kx < v_K3; kx++)
                o += pm(w3[c][ci][ky][kx]) * pm(x2[ci][y*S3+ky][x*S3+kx]);
          x3[c][y][x] = (o >= t3[c]);
          if (x3[c][y][x]) th_pos[2]++; else th_neg[2]++;
        end
    for (int n = 0; n < n_hid; n++) begin
      int o = 0;
      // flattening: input index = (y*H3 + x)*C3 + c
      for (int y = 0; y < v_H3; y++)
        for (int x = 0; x < v_H3; x++)
          for (int c = 0; c < v_C3; c++)
            o += pm(w4[n][(y*H3 + x)*C3 + c]) * pm(x3[c][y][x]);
      x4[n] = (o >= t4[n]);
      if (x4[n]) th_pos[3]++; else th_neg[3]++;
    end
    for (int a = 0; a < n_act; a++) begin
      o5[a] = 0;
      for (int n = 0; n < n_hid; n++) o5[a] += pm(w5[a][n]) * pm(x4[n]);
      pref[a] = longint'(o5[a]) * longint'(lam);
    end
  endtask

  // ---- host bus ---------------------------------------------------------------
  // host writes are driven on the falling edge, one per clock
  task automatic hw(region_e r, int unsigned idx, int unsigned lane, logic [31:0] d);
    host_we    = 1'b1;
    host_addr  = host_address(r, idx, lane);
    host_wdata = d;
    @(negedge clk);
    host_we    = 1'b0;
  endtask

  task automatic load_all();
    logic [255:0] wide;
    @(negedge clk);
    for (int j = 0; j < (IMG_C*IMG_H*IMG_H)/4; j++) begin
      logic [31:0] d;
      for (int b = 0; b < 4; b++) begin
        int p = 4*j + b;
        d[8*b +: 8] = img[p / (IMG_H*IMG_H)][(p / IMG_H) % IMG_H][p % IMG_H];
      end
      hw(RGN_IMAGE, j, 0, d);
    end
    for (int ci = 0; ci < IMG_C; ci++)
      for (int ky = 0; ky < K1; ky++)
        for (int kx = 0; kx < K1; kx++) begin
          wide = '0;
          for (int c = 0; c < C1; c++) wide[c] = w1[c][ci][ky][kx];
          hw(RGN_W1, (ci*K1 + ky)*K1 + kx, 0, wide[31:0]);
        end
    for (int ky = 0; ky < K2; ky++)
      for (int kx = 0; kx < K2; kx++) begin
        wide = '0;
        for (int c = 0; c < C2; c++) for (int ci = 0; ci < C1; ci++) wide[c*C1 + ci] = w2[c][ci][ky][kx];
        for (int l = 0; l < 4; l++) hw(RGN_W2, ky*K2 + kx, l, wide[32*l +: 32]);
      end
    for (int ky = 0; ky < K3; ky++)
      for (int kx = 0; kx < K3; kx++) begin
        wide = '0;
        for (int c = 0; c < C3; c++) for (int ci = 0; ci < C2; ci++) wide[c*C2 + ci] = w3[c][ci][ky][kx];
        for (int l = 0; l < 8; l++) hw(RGN_W3, ky*K3 + kx, l, wide[32*l +: 32]);
      end
    for (int n = 0; n < N_HID; n++)
      for (int k = 0; k < N_FLAT/C3; k++) begin
        wide = '0;
        for (int c = 0; c < C3; c++) wide[c] = w4[n][k*C3 + c];
        hw(RGN_W4, n*(N_FLAT/C3) + k, 0, wide[31:0]);
      end
    for (int a = 0; a < N_ACT; a++) begin
      wide = '0;
      for (int n = 0; n < N_HID; n++) wide[n] = w5[a][n];
      for (int l = 0; l < 4; l++) hw(RGN_W5, a, l, wide[32*l +: 32]);
    end
    foreach (t1[i]) hw(RGN_TAU1, i, 0, 32'(t1[i]));
    foreach (t2[i]) hw(RGN_TAU2, i, 0, 32'(t2[i]));
    foreach (t3[i]) hw(RGN_TAU3, i, 0, 32'(t3[i]));
    foreach (t4[i]) hw(RGN_TAU4, i, 0, 32'(t4[i]));
    hw(RGN_LAMBDA, 0, 0, 32'(lam));
  endtask

  // expected start-to-done latency: every layer costs its tap/slice count plus
  // 3 cycles (registered start, read latency, done pulse); the controller adds
  // one cycle to register start and three after the last layer's done.
  localparam longint T1 = H1*H1*IMG_C*K1*K1;
  localparam longint T2 = H2*H2*K2*K2;
  localparam longint T3 = H3*H3*K3*K3;
  localparam longint T4 = N_HID*(N_FLAT/C3);
  localparam longint T5 = N_ACT;
  localparam longint LAT = 1 + (T1+3) + (T2+3) + (T3+3) + (T4+3) + (T5+3) + 3;

  task automatic run_and_check(int it);
    longint t0, t;
    @(negedge clk);
    start = 1'b1;
    @(posedge clk);
    t0 = cyc;
    @(negedge clk);
    start = 1'b0;
    // a start pulse in the middle of an inference must be ignored
    repeat (1000) @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    ignored_starts++;
    while (!done) @(posedge clk);
    t = cyc - t0 + 1;
    checks++;
    if (t != LAT) begin
      failures++;
      $display("[%0d] latency %0d cycles, expected %0d", it, t, LAT);
    end
    checks++;
    if (t > 400_000) begin   // 4 ms at 100 MHz
      failures++;
      $display("[%0d] latency %0d cycles exceeds 4 ms at 100 MHz", it, t);
    end
    @(posedge clk);
    checks++;
    if (busy) begin
      failures++;
      $display("[%0d] still busy after done (ignored start restarted the engine?)", it);
    end
    for (int a = 0; a < n_act; a++) begin
      checks++;
      if (longint'(p_out[a]) != pref[a]) begin
        failures++;
        $display("[%0d] P(s,a%0d) = %0d, expected %0d (o5=%0d lambda=%0d)", it, a, p_out[a], pref[a], o5[a], lam);
      end
      if (pref[a] < 0) p_negative++; else if (pref[a] > 0) p_positive++;
    end
    $display("[%0d] inference done in %0d cycles", it, t);
  endtask

  initial begin
    int unsigned seed;
    seed = $urandom(32'h5eed_b9f1);
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    for (int it = 0; it < 3; it++) begin
      case (it)
        0: begin n_ch = 1; n_hid = 30; n_act = 14; end   // reaching, N = 30
        1: begin n_ch = 1; n_hid = 10; n_act = 14; end   // reaching, N = 10
        default: begin n_ch = 6; n_hid = 50; n_act = 7; end   // simulated tracking, N = 50
      endcase
      $display("[%0d] %0d input channels, N = %0d, %0d actions", it, n_ch, n_hid, n_act);
      randomize_all(it * 50);
      model();
      load_all();
      if (it > 0) reloads++;
      run_and_check(it);
    end
    // every mechanism must have happened
    for (int l = 0; l < 4; l++) begin
      checks++;
      if (th_pos[l] == 0 || th_neg[l] == 0) begin
        failures++;
        $display("layer %0d threshold never gave both signs (%0d/%0d)", l+1, th_pos[l], th_neg[l]);
      end
    end
    checks++; if (p_negative == 0 || p_positive == 0) begin failures++; $display("scaled outputs of one sign only"); end
    checks++; if (reloads == 0) begin failures++; $display("no parameter reload"); end
    checks++; if (ignored_starts == 0) begin failures++; $display("no start while busy"); end
    $display("mechanisms: threshold +/-: L1 %0d/%0d L2 %0d/%0d L3 %0d/%0d L4 %0d/%0d; P<0 %0d P>0 %0d; reloads %0d; ignored starts %0d",
             th_pos[0], th_neg[0], th_pos[1], th_neg[1], th_pos[2], th_neg[2], th_pos[3], th_neg[3],
             p_negative, p_positive, reloads, ignored_starts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
