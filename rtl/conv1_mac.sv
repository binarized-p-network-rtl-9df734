// conv1_mac: first convolution layer of the BPN network (Conv(8,4,8)).
//
// The first layer sees raw pixel values; only its weights are binary. Each
// output is therefore a multiply-accumulate in which a weight bit just picks
// +pixel (bit 1) or -pixel (bit 0), followed by the threshold activation that
// replaces batch normalization and Sign(): out bit = (o >= tau).
//
// Schedule: one kernel tap per cycle, all COUT output channels in parallel.
// For output pixel (oy, ox) the engine walks ci, ky, kx (CIN*K*K taps), reading
// the pixel at (ci, oy*S+ky, ox*S+kx) and the COUT-bit weight word of that tap.
// Both reads take one cycle, so accumulation runs one cycle behind the address
// counters; on the last tap of a pixel the thresholded COUT-bit word is
// written to the output feature map at oy*H_OUT + ox. Pixels follow each other
// without bubbles.
//
// Timing: start is a one-cycle pulse. Taps are issued on H_OUT*H_OUT*CIN*K*K
// consecutive cycles starting the cycle after start; the last output is
// written one cycle after the last tap issue and done pulses on the cycle
// after that. Total: TAPS*POS + 2 cycles from start to done.
//
// Unpadded convolution, the tap-serial schedule and the weight layout
// (address = (ci*K + ky)*K + kx, bit c = output channel c) are this design's
// choices.
module conv1_mac
  import bpn_pkg::*;
#(
  parameter int unsigned CIN   = IMG_C,
  parameter int unsigned H_IN  = IMG_H,
  parameter int unsigned K     = K1,
  parameter int unsigned S     = S1,
  parameter int unsigned COUT  = C1,
  parameter int unsigned H_OUT = (H_IN - K) / S + 1,
  parameter int unsigned TAPS  = CIN * K * K,
  parameter int unsigned IMG_AW = $clog2(CIN * H_IN * H_IN),
  parameter int unsigned W_AW  = $clog2(TAPS),
  parameter int unsigned O_AW  = $clog2(H_OUT * H_OUT)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  output logic                 busy,
  output logic                 done,
  // image read port (1-cycle latency)
  output logic [IMG_AW-1:0]    img_idx,
  input  logic [PIX_W-1:0]     img_pix,
  // weight read port (1-cycle latency)
  output logic [W_AW-1:0]      w_addr,
  input  logic [COUT-1:0]      w_data,
  // thresholds
  input  tau_t                 tau [COUT],
  // output feature-map write port
  output logic                 out_we,
  output logic [O_AW-1:0]      out_addr,
  output logic [COUT-1:0]      out_data
);
  localparam int unsigned CW = $clog2(H_OUT + 1);

  // address counters
  logic          run;
  logic [CW-1:0] oy, ox;
  logic [$clog2(CIN+1)-1:0] ci;
  logic [$clog2(K+1)-1:0]   ky, kx;
  logic          tap_first, tap_last, pix_last;

  assign tap_first = (ci == 0) && (ky == 0) && (kx == 0);
  assign tap_last  = (32'(ci) == CIN-1) && (32'(ky) == K-1) && (32'(kx) == K-1);
  assign pix_last  = (32'(oy) == H_OUT-1) && (32'(ox) == H_OUT-1);

  always_comb begin
    img_idx = IMG_AW'((32'(ci) * H_IN + 32'(oy) * S + 32'(ky)) * H_IN + 32'(ox) * S + 32'(kx));
    w_addr  = W_AW'((32'(ci) * K + 32'(ky)) * K + 32'(kx));
  end

  // pipeline stage: data of the tap issued last cycle
  logic              v_q, first_q, last_q, final_q;
  logic [O_AW-1:0]   pix_q;
  logic signed [TAU_W-1:0] acc [COUT];
  logic signed [TAU_W-1:0] acc_next [COUT];
  logic [COUT-1:0]   act;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0;
      oy <= '0; ox <= '0; ci <= '0; ky <= '0; kx <= '0;
      v_q <= 1'b0; first_q <= 1'b0; last_q <= 1'b0; final_q <= 1'b0; pix_q <= '0;
      done <= 1'b0;
    end else begin
      v_q     <= run;
      first_q <= tap_first;
      last_q  <= tap_last;
      final_q <= tap_last && pix_last;
      pix_q   <= O_AW'(32'(oy) * H_OUT + 32'(ox));
      done    <= v_q && last_q && final_q;
      if (start && !run && !busy) begin
        run <= 1'b1;
        oy <= '0; ox <= '0; ci <= '0; ky <= '0; kx <= '0;
      end else if (run) begin
        if (32'(kx) != K-1) kx <= kx + 1'b1;
        else begin
          kx <= '0;
          if (32'(ky) != K-1) ky <= ky + 1'b1;
          else begin
            ky <= '0;
            if (32'(ci) != CIN-1) ci <= ci + 1'b1;
            else begin
              ci <= '0;
              if (32'(ox) != H_OUT-1) ox <= ox + 1'b1;
              else begin
                ox <= '0;
                if (32'(oy) != H_OUT-1) oy <= oy + 1'b1;
                else begin
                  oy  <= '0;
                  run <= 1'b0;
                end
              end
            end
          end
        end
      end
    end
  end

  assign busy = run || v_q || done;

  // MAC: weight bit selects +pixel or -pixel
  always_comb begin
    for (int c = 0; c < COUT; c++) begin
      logic signed [TAU_W-1:0] term;
      term = w_data[c] ? TAU_W'(signed'({1'b0, img_pix})) : -TAU_W'(signed'({1'b0, img_pix}));
      acc_next[c] = (first_q ? TAU_W'(0) : acc[c]) + term;
    end
  end

  always_ff @(posedge clk) begin
    if (v_q) acc <= acc_next;
  end

  for (genvar c = 0; c < COUT; c++) begin : g_th
    threshold_act #(.ACC_W(TAU_W)) u_th (.o(acc_next[c]), .tau(tau[c]), .x(act[c]));
  end

  assign out_we   = v_q && last_q;
  assign out_addr = pix_q;
  assign out_data = act;
endmodule
