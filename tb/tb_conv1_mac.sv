// tb_conv1_mac: runs the first-layer engine at a reduced size (2 input
// channels, 16x16 image, 8x8 kernel, stride 4, 8 output channels: 3x3
// outputs) on random pixels, weights and thresholds, twice. Image and weight
// memories are modelled here with one cycle of read latency. Every output
// word is compared with a +-pixel sum computed here, each output address must
// be written exactly once, and the start-to-done time must be
// CIN*K*K*H_OUT*H_OUT + 2 cycles.
module tb_conv1_mac;
  import bpn_pkg::*;
  localparam int CIN = 2, H_IN = 16, K = 8, S = 4, COUT = 8;
  localparam int H_OUT = (H_IN - K) / S + 1;
  localparam int TAPS = CIN * K * K;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic busy, done;
  logic [$clog2(CIN*H_IN*H_IN)-1:0] img_idx;
  logic [7:0] img_pix;
  logic [$clog2(TAPS)-1:0] w_addr;
  logic [COUT-1:0] w_data;
  tau_t tau [COUT];
  logic out_we;
  logic [$clog2(H_OUT*H_OUT)-1:0] out_addr;
  logic [COUT-1:0] out_data;

  conv1_mac #(.CIN(CIN), .H_IN(H_IN), .K(K), .S(S), .COUT(COUT)) dut (.*);

  always #5 clk = ~clk;

  byte unsigned img [CIN*H_IN*H_IN];
  logic [COUT-1:0] wm [TAPS];
  logic [COUT-1:0] got [H_OUT*H_OUT];
  int writes [H_OUT*H_OUT];
  int v_cin = CIN, v_k = K, v_hout = H_OUT, v_cout = COUT;

  always_ff @(posedge clk) begin
    img_pix <= img[img_idx];
    w_data  <= wm[w_addr];
    if (out_we) begin
      got[out_addr] <= out_data;
      writes[out_addr] <= writes[out_addr] + 1;
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int run = 0; run < 2; run++) begin
      longint t0, t1;
      foreach (img[i]) img[i] = byte'($urandom);
      foreach (wm[i]) wm[i] = COUT'($urandom);
      foreach (tau[i]) tau[i] = TAU_W'(int'($urandom % 1601) - 800);
      foreach (writes[i]) writes[i] = 0;
      @(negedge clk);
      start = 1'b1;
      @(posedge clk); t0 = $time;
      @(negedge clk);
      start = 1'b0;
      while (!done) @(posedge clk);
      t1 = $time;
      checks++;
      if ((t1 - t0) / 10 != TAPS * H_OUT * H_OUT + 2) begin
        failures++;
        $display("latency %0d cycles, expected %0d", (t1 - t0) / 10, TAPS * H_OUT * H_OUT + 2);
      end
      @(negedge clk);
      for (int oy = 0; oy < v_hout; oy++)
        for (int ox = 0; ox < v_hout; ox++) begin
          logic [COUT-1:0] exp_w;
          for (int c = 0; c < v_cout; c++) begin
            int o;
            o = 0;
            for (int ci = 0; ci < v_cin; ci++)
              for (int ky = 0; ky < v_k; ky++)
                for (int kx = 0; kx < v_k; kx++) begin
                  int p;
                  p = int'(img[(ci*H_IN + oy*S + ky)*H_IN + ox*S + kx]);
                  o += wm[(ci*K + ky)*K + kx][c] ? p : -p;
                end
            exp_w[c] = (o >= int'(tau[c]));
          end
          checks++;
          if (got[oy*H_OUT + ox] !== exp_w || writes[oy*H_OUT + ox] != 1) begin
            failures++;
            $display("run %0d pixel (%0d,%0d): got %b expected %b, %0d writes", run, oy, ox,
                     got[oy*H_OUT + ox], exp_w, writes[oy*H_OUT + ox]);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
