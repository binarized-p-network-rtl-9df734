// bpn_pkg: shared sizes, types and the host address map of the Binarized
// P-Network (BPN) inference accelerator.
//
// The network follows the five-layer structure Conv(8,4,8) - Conv(4,2,16) -
// Conv(3,1,16) - FC(N) - FC(|A|) on a 6x84x84 observation (two consecutive
// 84x84 RGB frames), with N = 100 hidden neurons and |A| = 17 actions as in
// the real-robot tracking configuration. Feature-map sizes follow from valid
// (unpadded) convolution: 84 -> 20 -> 9 -> 7. Pixel width, threshold width,
// the lambda number format and the host address map are this design's own
// choices.
//
// Host address map (word address, 32-bit data):
//   addr[22:19] region, addr[18:3] entry index, addr[2:0] 32-bit lane of the entry.
package bpn_pkg;

  // ---- network shape --------------------------------------------------------
  localparam int unsigned IMG_C  = 6;    // two RGB frames
  localparam int unsigned IMG_H  = 84;   // square image, 84x84
  localparam int unsigned PIX_W  = 8;    // unsigned pixel

  localparam int unsigned C1 = 8,  K1 = 8, S1 = 4;   // Conv(8,4,8)
  localparam int unsigned C2 = 16, K2 = 4, S2 = 2;   // Conv(4,2,16)
  localparam int unsigned C3 = 16, K3 = 3, S3 = 1;   // Conv(3,1,16)
  localparam int unsigned H1 = (IMG_H - K1) / S1 + 1;  // 20
  localparam int unsigned H2 = (H1 - K2) / S2 + 1;     // 9
  localparam int unsigned H3 = (H2 - K3) / S3 + 1;     // 7
  localparam int unsigned N_FLAT = H3 * H3 * C3;       // 784
  localparam int unsigned N_HID  = 100;                // FC(N), N = 100
  localparam int unsigned N_ACT  = 17;                 // FC(|A|), |A| = 17

  // ---- number formats -------------------------------------------------------
  localparam int unsigned TAU_W       = 18;  // signed thresholds, all layers
  localparam int unsigned LAMBDA_W    = 16;  // signed lambda, Q8.8
  localparam int unsigned LAMBDA_FRAC = 8;
  localparam int unsigned P_W         = 32;  // signed P(s,a), 8 fraction bits

  typedef logic signed [TAU_W-1:0]    tau_t;
  typedef logic signed [LAMBDA_W-1:0] lambda_t;
  typedef logic signed [P_W-1:0]      pref_t;

  // ---- host address map -----------------------------------------------------
  localparam int unsigned HOST_AW = 23;
  localparam int unsigned IDX_W   = 16;
  localparam int unsigned LANE_W  = 3;

  typedef enum logic [3:0] {
    RGN_IMAGE  = 4'd0,   // 4 pixels per word, index = pixel_index / 4
    RGN_W1     = 4'd1,   // layer-1 weights, index = tap, word = 8 channel bits
    RGN_W2     = 4'd2,   // layer-2 weights, index = tap, word = 16x8 bits
    RGN_W3     = 4'd3,   // layer-3 weights, index = tap, word = 16x16 bits
    RGN_W4     = 4'd4,   // layer-4 weights, index = neuron*49 + chunk, word = 16 bits
    RGN_W5     = 4'd5,   // layer-5 weights, index = action, word = 100 bits
    RGN_TAU1   = 4'd6,   // thresholds, index = channel / neuron
    RGN_TAU2   = 4'd7,
    RGN_TAU3   = 4'd8,
    RGN_TAU4   = 4'd9,
    RGN_LAMBDA = 4'd10   // output scale
  } region_e;

  function automatic logic [HOST_AW-1:0] host_address(region_e rgn, int unsigned idx,
                                                      int unsigned lane);
    return {rgn, IDX_W'(idx), LANE_W'(lane)};
  endfunction

endpackage
