// bconv_layer: binary convolution layer (XNOR - popcount - threshold).
//
// Used for layers 2 and 3 of the BPN network, Conv(4,2,16) and Conv(3,1,16).
// Both inputs and weights are binary (1 = +1, 0 = -1). For every output pixel
// and every output channel co the engine sums, over the K x K kernel taps,
// the XNOR-popcount of the CIN input bits of the tapped pixel with the CIN
// weight bits of (co, tap). The +-1 dot product is o = 2*count - N with
// N = CIN*K*K, and the output bit is the threshold activation (o >= tau[co]).
//
// Schedule: one tap per cycle, all COUT channels in parallel (COUT
// xnor_popcount units of CIN bits). The input feature map stores one pixel
// (all CIN channels) per word; the weight word of tap t = ky*K + kx holds
// channel co's CIN bits at [co*CIN +: CIN]. Reads take one cycle, so the
// accumulation trails the counters by one cycle; the output word of pixel
// (oy, ox) is written at oy*H_OUT + ox on the cycle the last tap's data
// arrives.
//
// Timing: start pulse; taps issued on K*K*H_OUT*H_OUT consecutive cycles from
// the cycle after start; done pulses two cycles after the last issue.
// Padding (none), schedule and memory layout are this design's choices.
module bconv_layer
  import bpn_pkg::*;
#(
  parameter int unsigned CIN   = C1,
  parameter int unsigned COUT  = C2,
  parameter int unsigned K     = K2,
  parameter int unsigned S     = S2,
  parameter int unsigned H_IN  = H1,
  parameter int unsigned H_OUT = (H_IN - K) / S + 1,
  parameter int unsigned I_AW  = $clog2(H_IN * H_IN),
  parameter int unsigned W_AW  = (K * K > 1) ? $clog2(K * K) : 1,
  parameter int unsigned O_AW  = (H_OUT * H_OUT > 1) ? $clog2(H_OUT * H_OUT) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  output logic                   busy,
  output logic                   done,
  // input feature-map read port (1-cycle latency)
  output logic [I_AW-1:0]        in_addr,
  input  logic [CIN-1:0]         in_data,
  // weight read port (1-cycle latency)
  output logic [W_AW-1:0]        w_addr,
  input  logic [COUT*CIN-1:0]    w_data,
  // thresholds
  input  tau_t                   tau [COUT],
  // output feature-map write port
  output logic                   out_we,
  output logic [O_AW-1:0]        out_addr,
  output logic [COUT-1:0]        out_data
);
  localparam int unsigned N   = CIN * K * K;
  localparam int unsigned PCW = $clog2(CIN + 1);
  localparam int unsigned AW  = $clog2(N + 1);
  localparam int unsigned CW  = $clog2(H_OUT + 1);
  localparam int unsigned KW  = $clog2(K + 1);

  logic          run;
  logic [CW-1:0] oy, ox;
  logic [KW-1:0] ky, kx;
  logic          tap_first, tap_last, pix_last;

  assign tap_first = (ky == 0) && (kx == 0);
  assign tap_last  = (32'(ky) == K-1) && (32'(kx) == K-1);
  assign pix_last  = (32'(oy) == H_OUT-1) && (32'(ox) == H_OUT-1);

  always_comb begin
    in_addr = I_AW'((32'(oy) * S + 32'(ky)) * H_IN + 32'(ox) * S + 32'(kx));
    w_addr  = W_AW'(32'(ky) * K + 32'(kx));
  end

  logic            v_q, first_q, last_q, final_q;
  logic [O_AW-1:0] pix_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0;
      oy <= '0; ox <= '0; ky <= '0; kx <= '0;
      v_q <= 1'b0; first_q <= 1'b0; last_q <= 1'b0; final_q <= 1'b0; pix_q <= '0;
      done <= 1'b0;
    end else begin
      v_q     <= run;
      first_q <= tap_first;
      last_q  <= tap_last;
      final_q <= tap_last && pix_last;
      pix_q   <= O_AW'(32'(oy) * H_OUT + 32'(ox));
      done    <= v_q && last_q && final_q;
      if (start && !busy) begin
        run <= 1'b1;
        oy <= '0; ox <= '0; ky <= '0; kx <= '0;
      end else if (run) begin
        if (32'(kx) != K-1) kx <= kx + 1'b1;
        else begin
          kx <= '0;
          if (32'(ky) != K-1) ky <= ky + 1'b1;
          else begin
            ky <= '0;
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

  assign busy = run || v_q || done;

  // XNOR-popcount per output channel, accumulated over the taps
  logic [PCW-1:0]        cnt      [COUT];
  logic [AW-1:0]         acc      [COUT];
  logic [AW-1:0]         acc_next [COUT];
  logic signed [TAU_W-1:0] o      [COUT];
  logic [COUT-1:0]       act;

  for (genvar co = 0; co < COUT; co++) begin : g_ch
    xnor_popcount #(.W(CIN)) u_pc (
      .w(w_data[co*CIN +: CIN]), .x(in_data), .count(cnt[co])
    );
    assign acc_next[co] = (first_q ? AW'(0) : acc[co]) + AW'(cnt[co]);
    assign o[co] = TAU_W'(2 * int'(acc_next[co]) - int'(N));
    threshold_act #(.ACC_W(TAU_W)) u_th (.o(o[co]), .tau(tau[co]), .x(act[co]));
  end

  always_ff @(posedge clk) begin
    if (v_q) acc <= acc_next;
  end

  assign out_we   = v_q && last_q;
  assign out_addr = pix_q;
  assign out_data = act;
endmodule
