// param_ram: block RAM for one layer's binarized weights.
//
// Every weight is one bit (1 = +1, 0 = -1). A word holds all the weights one
// layer engine consumes in one cycle, so the word width is set per layer. The
// host writes a word 32 bits at a time: wr_lane selects the slice. The read
// port is synchronous with one cycle of latency, as a BRAM. Storing the
// parameters in RAM, not in the bitstream, is what lets new weights be loaded
// after each learning iteration without rebuilding the FPGA image; the word
// organisation is this design's choice.
module param_ram #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 384,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             wr_en,
  input  logic [AW-1:0]    wr_addr,
  input  logic [2:0]       wr_lane,
  input  logic [31:0]      wr_data,
  input  logic [AW-1:0]    rd_addr,
  output logic [WIDTH-1:0] rd_data
);
  localparam int unsigned LANES = (WIDTH + 31) / 32;

  logic [LANES*32-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en && (32'(wr_addr) < DEPTH) && (32'(wr_lane) < LANES))
      mem[wr_addr][wr_lane*32 +: 32] <= wr_data;
    rd_data <= mem[rd_addr][WIDTH-1:0];
  end
endmodule
