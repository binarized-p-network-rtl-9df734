// image_buffer: observation store for the first layer.
//
// Holds the unbinarized observation s, IMG_C x IMG_H x IMG_H pixels (two
// consecutive RGB frames by default), channel-major: pixel index
// (c*IMG_H + y)*IMG_H + x. The host writes four pixels per 32-bit word, lowest
// pixel index in bits 7:0. Layer 1 reads one pixel per cycle; rd_pix is valid
// one cycle after rd_idx. Pixel width, layout and packing are this design's
// choices; the first layer seeing raw pixel values follows the BPN network.
module image_buffer
  import bpn_pkg::*;
#(
  parameter int unsigned C     = IMG_C,
  parameter int unsigned H     = IMG_H,
  parameter int unsigned NPIX  = C * H * H,
  parameter int unsigned NWORD = (NPIX + 3) / 4,
  parameter int unsigned PW    = $clog2(NPIX),
  parameter int unsigned WW    = $clog2(NWORD)
) (
  input  logic             clk,
  input  logic             wr_en,
  input  logic [WW-1:0]    wr_word,
  input  logic [31:0]      wr_data,
  input  logic [PW-1:0]    rd_idx,
  output logic [PIX_W-1:0] rd_pix
);
  logic [31:0] mem [NWORD];
  logic [31:0] word_q;
  logic [1:0]  sel_q;

  always_ff @(posedge clk) begin
    if (wr_en && (32'(wr_word) < NWORD)) mem[wr_word] <= wr_data;
    word_q <= mem[rd_idx[PW-1:2]];
    sel_q  <= rd_idx[1:0];
  end

  assign rd_pix = word_q[sel_q*8 +: PIX_W];
endmodule
