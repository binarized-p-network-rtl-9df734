// param_loader: host-side loading of the network parameters and observation.
//
// The processor that runs the learning loop writes, through one plain write
// bus, the binarized weights of all five layers (after every learning
// iteration), the thresholds tau of layers 1-4, the output scale lambda and,
// for every control step, the observation. The address carries a region
// (addr[22:19], see bpn_pkg::region_e), an entry index (addr[18:3]) and a
// 32-bit lane (addr[2:0]) for words wider than 32 bits.
//
// This module decodes the regions: image and weight writes are forwarded as
// write strobes to the image buffer and the five weight RAMs, while
// thresholds and lambda are kept here in registers, because the layer engines
// need all of a layer's channel thresholds at once. Thresholds are signed and
// taken from the low TAU_W bits of the data word; lambda from the low
// LAMBDA_W bits. Registers are reset to zero; a write takes effect on the next
// clock edge. wr_idx, wr_lane and wr_data are the bus fields passed straight
// through to the RAMs, which decode them against their own strobes. The bus
// and address map are this design's choices.
module param_loader
  import bpn_pkg::*;
#(
  parameter int unsigned NT1 = C1,
  parameter int unsigned NT2 = C2,
  parameter int unsigned NT3 = C3,
  parameter int unsigned NT4 = N_HID
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               host_we,
  input  logic [HOST_AW-1:0] host_addr,
  input  logic [31:0]        host_wdata,
  // forwarded RAM writes
  output logic               img_we,
  output logic [4:0]         w_we,      // bit l-1: weight RAM of layer l
  output logic [IDX_W-1:0]   wr_idx,
  output logic [LANE_W-1:0]  wr_lane,
  output logic [31:0]        wr_data,
  // parameter registers
  output tau_t               tau1 [NT1],
  output tau_t               tau2 [NT2],
  output tau_t               tau3 [NT3],
  output tau_t               tau4 [NT4],
  output lambda_t            lambda
);
  region_e rgn;
  assign rgn     = region_e'(host_addr[HOST_AW-1 -: 4]);
  assign wr_idx  = host_addr[LANE_W +: IDX_W];
  assign wr_lane = host_addr[LANE_W-1:0];
  assign wr_data = host_wdata;

  always_comb begin
    img_we = host_we && (rgn == RGN_IMAGE);
    w_we   = '0;
    if (host_we) begin
      unique case (rgn)
        RGN_W1:  w_we[0] = 1'b1;
        RGN_W2:  w_we[1] = 1'b1;
        RGN_W3:  w_we[2] = 1'b1;
        RGN_W4:  w_we[3] = 1'b1;
        RGN_W5:  w_we[4] = 1'b1;
        default: ;
      endcase
    end
  end

  tau_t wtau;
  assign wtau = host_wdata[TAU_W-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NT1; i++) tau1[i] <= '0;
      for (int i = 0; i < NT2; i++) tau2[i] <= '0;
      for (int i = 0; i < NT3; i++) tau3[i] <= '0;
      for (int i = 0; i < NT4; i++) tau4[i] <= '0;
      lambda <= '0;
    end else if (host_we) begin
      case (rgn)
        RGN_TAU1:   if (32'(wr_idx) < NT1) tau1[wr_idx[$clog2(NT1)-1:0]] <= wtau;
        RGN_TAU2:   if (32'(wr_idx) < NT2) tau2[wr_idx[$clog2(NT2)-1:0]] <= wtau;
        RGN_TAU3:   if (32'(wr_idx) < NT3) tau3[wr_idx[$clog2(NT3)-1:0]] <= wtau;
        RGN_TAU4:   if (32'(wr_idx) < NT4) tau4[wr_idx[$clog2(NT4)-1:0]] <= wtau;
        RGN_LAMBDA: lambda <= host_wdata[LAMBDA_W-1:0];
        default: ;
      endcase
    end
  end
endmodule
