// bpn_top: Binarized P-Network inference accelerator.
//
// Computes the action preferences P(s, a) of a binarized convolutional
// network for one observation s (two consecutive 84x84 RGB frames). The
// processor beside it picks the action from P by a softmax policy, drives the
// robot and, after each learning iteration, reloads the binarized weights;
// weights live in RAM so that reloading needs no new FPGA image.
//
// Datapath, in the order an inference runs (see bpn_ctrl):
//   layer 1  conv1_mac    Conv(8,4,8)  6x84x84 pixels -> 20x20x8 bits  (MAC + threshold)
//   layer 2  bconv_layer  Conv(4,2,16) 20x20x8 -> 9x9x16               (XNOR/popcount + threshold)
//   layer 3  bconv_layer  Conv(3,1,16) 9x9x16  -> 7x7x16
//   layer 4  bfc_layer    FC(100)      784     -> 100 bits             (+ threshold_act here)
//   layer 5  bfc_layer    FC(17)       100     -> o_L in [-100, 100]
//   scaling  scaling_unit P(s,a) = lambda * o_L
// Feature maps sit in fmap_ram buffers between layers; weights in param_ram;
// thresholds and lambda in param_loader.
//
// Interface: host_we/host_addr/host_wdata is the write bus of param_loader
// (address map in bpn_pkg). start is a one-cycle pulse; busy stays high until
// done pulses, after which p_out holds P(s, a) for all actions as signed
// numbers with LAMBDA_FRAC fraction bits. The host must not write while busy
// (an assertion checks this).
//
// Timing: one inference takes 160,273 clock cycles from start to done
// (layer 1 alone 153,600), 1.6 ms at an assumed 100 MHz clock.
// Layer sizes, N = 100 and |A| = 17 follow the BPN network of the real-robot
// setup; the schedule, widths, memory layout and clock are this design's.
module bpn_top
  import bpn_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               host_we,
  input  logic [HOST_AW-1:0] host_addr,
  input  logic [31:0]        host_wdata,
  input  logic               start,
  output logic               busy,
  output logic               done,
  output pref_t              p_out [N_ACT]
);
  localparam int unsigned NPIX   = IMG_C * IMG_H * IMG_H;
  localparam int unsigned IMG_AW = $clog2(NPIX);
  localparam int unsigned NCH4   = N_FLAT / C3;            // 49 slices per neuron
  localparam int unsigned O5_W   = $clog2(N_HID + 1) + 1;  // 8
  localparam int unsigned O4_W   = $clog2(N_FLAT + 1) + 1; // 11

  // ---- parameter loading ----------------------------------------------------
  logic              img_we;
  logic [4:0]        w_we;
  logic [IDX_W-1:0]  wr_idx;
  logic [LANE_W-1:0] wr_lane;
  logic [31:0]       wr_data;
  tau_t              tau1 [C1];
  tau_t              tau2 [C2];
  tau_t              tau3 [C3];
  tau_t              tau4 [N_HID];
  lambda_t           lambda;

  param_loader u_loader (
    .clk, .rst_n, .host_we, .host_addr, .host_wdata,
    .img_we, .w_we, .wr_idx, .wr_lane, .wr_data,
    .tau1, .tau2, .tau3, .tau4, .lambda
  );

  // ---- control --------------------------------------------------------------
  logic [4:0] l_start, l_done;
  logic       ctrl_busy;

  bpn_ctrl #(.NL(5), .FLUSH(1)) u_ctrl (
    .clk, .rst_n, .start, .busy(ctrl_busy), .done, .l_start, .l_done
  );
  assign busy = ctrl_busy;

  // ---- layer 1 --------------------------------------------------------------
  logic [IMG_AW-1:0]      img_idx;
  logic [PIX_W-1:0]       img_pix;
  logic [$clog2(IMG_C*K1*K1)-1:0] w1_addr;
  logic [C1-1:0]          w1_data;
  logic                   f1_we;
  logic [$clog2(H1*H1)-1:0] f1_waddr, f1_raddr;
  logic [C1-1:0]          f1_wdata, f1_rdata;
  logic                   l1_busy;

  image_buffer u_img (
    .clk, .wr_en(img_we), .wr_word(wr_idx[$clog2((NPIX+3)/4)-1:0]), .wr_data,
    .rd_idx(img_idx), .rd_pix(img_pix)
  );

  param_ram #(.WIDTH(C1), .DEPTH(IMG_C*K1*K1)) u_w1 (
    .clk, .wr_en(w_we[0]), .wr_addr(wr_idx[$bits(w1_addr)-1:0]), .wr_lane, .wr_data,
    .rd_addr(w1_addr), .rd_data(w1_data)
  );

  conv1_mac u_l1 (
    .clk, .rst_n, .start(l_start[0]), .busy(l1_busy), .done(l_done[0]),
    .img_idx, .img_pix, .w_addr(w1_addr), .w_data(w1_data), .tau(tau1),
    .out_we(f1_we), .out_addr(f1_waddr), .out_data(f1_wdata)
  );

  fmap_ram #(.WIDTH(C1), .DEPTH(H1*H1)) u_f1 (
    .clk, .we(f1_we), .waddr(f1_waddr), .wdata(f1_wdata), .raddr(f1_raddr), .rdata(f1_rdata)
  );

  // ---- layer 2 --------------------------------------------------------------
  logic [$clog2(K2*K2)-1:0] w2_addr;
  logic [C2*C1-1:0]         w2_data;
  logic                     f2_we;
  logic [$clog2(H2*H2)-1:0] f2_waddr, f2_raddr;
  logic [C2-1:0]            f2_wdata, f2_rdata;
  logic                     l2_busy;

  param_ram #(.WIDTH(C2*C1), .DEPTH(K2*K2)) u_w2 (
    .clk, .wr_en(w_we[1]), .wr_addr(wr_idx[$bits(w2_addr)-1:0]), .wr_lane, .wr_data,
    .rd_addr(w2_addr), .rd_data(w2_data)
  );

  bconv_layer #(.CIN(C1), .COUT(C2), .K(K2), .S(S2), .H_IN(H1)) u_l2 (
    .clk, .rst_n, .start(l_start[1]), .busy(l2_busy), .done(l_done[1]),
    .in_addr(f1_raddr), .in_data(f1_rdata), .w_addr(w2_addr), .w_data(w2_data), .tau(tau2),
    .out_we(f2_we), .out_addr(f2_waddr), .out_data(f2_wdata)
  );

  fmap_ram #(.WIDTH(C2), .DEPTH(H2*H2)) u_f2 (
    .clk, .we(f2_we), .waddr(f2_waddr), .wdata(f2_wdata), .raddr(f2_raddr), .rdata(f2_rdata)
  );

  // ---- layer 3 --------------------------------------------------------------
  logic [$clog2(K3*K3)-1:0] w3_addr;
  logic [C3*C2-1:0]         w3_data;
  logic                     f3_we;
  logic [$clog2(H3*H3)-1:0] f3_waddr, f3_raddr;
  logic [C3-1:0]            f3_wdata, f3_rdata;
  logic                     l3_busy;

  param_ram #(.WIDTH(C3*C2), .DEPTH(K3*K3)) u_w3 (
    .clk, .wr_en(w_we[2]), .wr_addr(wr_idx[$bits(w3_addr)-1:0]), .wr_lane, .wr_data,
    .rd_addr(w3_addr), .rd_data(w3_data)
  );

  bconv_layer #(.CIN(C2), .COUT(C3), .K(K3), .S(S3), .H_IN(H2)) u_l3 (
    .clk, .rst_n, .start(l_start[2]), .busy(l3_busy), .done(l_done[2]),
    .in_addr(f2_raddr), .in_data(f2_rdata), .w_addr(w3_addr), .w_data(w3_data), .tau(tau3),
    .out_we(f3_we), .out_addr(f3_waddr), .out_data(f3_wdata)
  );

  fmap_ram #(.WIDTH(C3), .DEPTH(H3*H3)) u_f3 (
    .clk, .we(f3_we), .waddr(f3_waddr), .wdata(f3_wdata), .raddr(f3_raddr), .rdata(f3_rdata)
  );

  // ---- layer 4: FC(N) + threshold --------------------------------------------
  logic [$clog2(N_HID*NCH4)-1:0] w4_addr;
  logic [C3-1:0]                 w4_data;
  logic                          o4_valid;
  logic [$clog2(N_HID)-1:0]      o4_idx;
  logic signed [O4_W-1:0]        o4_val;
  logic                          x4;
  logic [N_HID-1:0]              hidden, hidden_rd;
  logic                          l4_busy;

  param_ram #(.WIDTH(C3), .DEPTH(N_HID*NCH4)) u_w4 (
    .clk, .wr_en(w_we[3]), .wr_addr(wr_idx[$bits(w4_addr)-1:0]), .wr_lane, .wr_data,
    .rd_addr(w4_addr), .rd_data(w4_data)
  );

  bfc_layer #(.N_IN(N_FLAT), .N_OUT(N_HID), .CHUNK(C3)) u_l4 (
    .clk, .rst_n, .start(l_start[3]), .busy(l4_busy), .done(l_done[3]),
    .in_addr(f3_raddr), .in_data(f3_rdata), .w_addr(w4_addr), .w_data(w4_data),
    .o_valid(o4_valid), .o_idx(o4_idx), .o_val(o4_val)
  );

  threshold_act #(.ACC_W(TAU_W)) u_th4 (.o(TAU_W'(o4_val)), .tau(tau4[o4_idx]), .x(x4));

  always_ff @(posedge clk) begin
    if (o4_valid) hidden[o4_idx] <= x4;
    hidden_rd <= hidden;   // layer-5 input read port, one cycle latency
  end

  // ---- layer 5: FC(|A|) + scaling ---------------------------------------------
  logic [$clog2(N_ACT)-1:0] w5_addr;
  logic [N_HID-1:0]         w5_data;
  logic                     l5_in_addr;
  logic                     o5_valid;
  logic [$clog2(N_ACT)-1:0] o5_idx;
  logic signed [O5_W-1:0]   o5_val;
  logic                     p_valid;
  logic [$clog2(N_ACT)-1:0] p_idx;
  pref_t                    p_val;
  logic                     l5_busy;

  param_ram #(.WIDTH(N_HID), .DEPTH(N_ACT)) u_w5 (
    .clk, .wr_en(w_we[4]), .wr_addr(wr_idx[$bits(w5_addr)-1:0]), .wr_lane, .wr_data,
    .rd_addr(w5_addr), .rd_data(w5_data)
  );

  bfc_layer #(.N_IN(N_HID), .N_OUT(N_ACT), .CHUNK(N_HID)) u_l5 (
    .clk, .rst_n, .start(l_start[4]), .busy(l5_busy), .done(l_done[4]),
    .in_addr(l5_in_addr), .in_data(hidden_rd), .w_addr(w5_addr), .w_data(w5_data),
    .o_valid(o5_valid), .o_idx(o5_idx), .o_val(o5_val)
  );

  scaling_unit #(.O_W(O5_W), .AIDX_W($clog2(N_ACT))) u_scale (
    .clk, .rst_n, .in_valid(o5_valid), .in_idx(o5_idx), .in_o(o5_val), .lambda,
    .out_valid(p_valid), .out_idx(p_idx), .out_p(p_val)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int a = 0; a < N_ACT; a++) p_out[a] <= '0;
    end else if (p_valid) begin
      p_out[p_idx] <= p_val;
    end
  end

  // ---- rules of the host interface ------------------------------------------
  a_no_write_while_busy: assert property (@(posedge clk) disable iff (!rst_n) busy |-> !host_we)
    else $error("host write while an inference is running");
  a_engines_exclusive: assert property (@(posedge clk) disable iff (!rst_n)
      $onehot0({l1_busy, l2_busy, l3_busy, l4_busy, l5_busy}))
    else $error("two layer engines busy at once");
endmodule
