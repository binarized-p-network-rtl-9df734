// fmap_ram: buffer for one binary feature map between two layers.
//
// One word per pixel, one bit per channel, so the next layer reads every
// channel of a pixel in one access. Simple dual port: one write port for the
// producing layer, one read port (one cycle latency) for the consuming layer.
// The storage form is this design's choice.
module fmap_ram #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 400,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
